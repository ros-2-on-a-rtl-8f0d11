// tb_rtps_out: self-checking testbench of rtps_out.
// Random DATA records (0..64 payload bytes), discovery announcements and
// ACKNACK records are offered on the three inputs at the same time. Every
// datagram that comes out must have the UDP record of its destination
// (local address, port 7411, length) and be byte for byte the RTPS message
// built independently by tb_net_pkg: header with the local GUID prefix and
// one DATA or ACKNACK submessage. ACKNACK counts must increase by one per
// ACKNACK. Per input, order must be kept; all three inputs must be served
// (interleaved) while they are all busy.
`timescale 1ns/1ps
module tb_rtps_out;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  localparam logic [31:0] LOCAL_IP  = 32'h0A00_0002;
  localparam logic [95:0] LOCAL_PFX = 96'h0102_0304_0506_0708_090A_0B0C;

  logic s_valid [3], s_ready [3];
  rtps_msg_t s_msg [3];
  logic m_hv, m_hr, m_tv, m_tl, m_tr;
  udp_hdr_t m_h;
  logic [7:0] m_td;
  logic [15:0] sent_count;

  rtps_out dut (.clk, .rst, .local_guid_prefix(LOCAL_PFX), .local_ip(LOCAL_IP),
    .s_valid, .s_ready, .s_msg, .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td),
    .m_tvalid(m_tv), .m_tlast(m_tl), .m_tready(m_tr), .sent_count);
  tb_stream_sink #(.H(udp_hdr_t)) snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  localparam int NPER = 40;
  rtps_msg_t sent [3][$];

  function automatic rtps_msg_t rand_rec(int src);
    rtps_msg_t r;
    r = '0;
    r.kind = (src == 2) ? SUB_ACKNACK : SUB_DATA;
    r.guid_prefix = {$urandom, $urandom, $urandom};
    r.reader_id = $urandom; r.writer_id = {24'($urandom), 8'(src)};
    r.sn = {$urandom % 4, $urandom};
    r.ip = $urandom; r.port = 16'($urandom);
    if (src != 2) begin
      r.len = plen_t'($urandom % 65);
      for (int i = 0; i < int'(r.len); i++) r.data[8*i +: 8] = 8'($urandom);
    end
    return r;
  endfunction

  function automatic bq_t exp_bytes(rtps_msg_t r);
    bq_t m, p;
    m = rtps_header(LOCAL_PFX, 16'h0000);
    if (r.kind == SUB_DATA) begin
      for (int i = 0; i < int'(r.len); i++) p.push_back(r.data[8*i +: 8]);
      append(m, rtps_data(r.reader_id, r.writer_id, r.sn, p));
    end else
      append(m, rtps_acknack(r.reader_id, r.writer_id, r.sn, 1, 32'h8000_0000));
    return m;
  endfunction

  initial begin
    for (int i = 0; i < 3; i++) begin s_valid[i] = 0; s_msg[i] = '0; end
    repeat (5) @(posedge clk);
    rst = 0;
    fork
      for (int s = 0; s < 3; s++)
        fork
          automatic int src = s;
          for (int k = 0; k < NPER; k++) begin
            automatic rtps_msg_t r;
            r = rand_rec(src);
            @(negedge clk);
            s_valid[src] = 1; s_msg[src] = r;
            #0.1;
            while (!s_ready[src]) begin @(negedge clk); #0.1; end
            sent[src].push_back(r);
            @(negedge clk);
            s_valid[src] = 0;
          end
        join_none
      begin
        int got [3];
        int switches, prev;
        logic [31:0] ack_cnt;
        udp_hdr_t h;
        bq_t b;
        bit ok;
        got = '{0, 0, 0}; switches = 0; prev = -1; ack_cnt = 0;
        for (int n = 0; n < 3 * NPER; n++) begin
          int src;
          bq_t e;
          snk.wait_pkt(h, b, ok, 3000);
          check(ok, $sformatf("datagram %0d", n));
          if (!ok) break;
          src = (b.size() < 36) ? 3 : (b[20] == 8'h06) ? 2 : int'(b[35]);   // last byte of the writer id
          if (src > 2 || sent[src].size() == 0) begin check(0, "unknown datagram"); continue; end
          e = exp_bytes(sent[src][0]);
          check(h == '{src_ip: LOCAL_IP, dst_ip: sent[src][0].ip, src_port: 16'd7411,
                       dst_port: sent[src][0].port, payload_len: 16'(e.size()), checksum: 16'h0},
                $sformatf("UDP record, input %0d #%0d", src, got[src]));
          if (src == 2 && b.size() == 52) begin
            logic [31:0] c;
            c = get32le(b, 48);
            check(ack_cnt == 0 || c == ack_cnt + 1, "ACKNACK count increments");
            ack_cnt = c;
            for (int i = 48; i < 52; i++) e[i] = b[i];
          end
          check(same_bytes(b, e), $sformatf("bytes, input %0d #%0d", src, got[src]));
          if (!same_bytes(b, e)) begin show("got", b); show("exp", e); end
          void'(sent[src].pop_front());
          got[src]++;
          if (prev >= 0 && prev != src) switches++;
          prev = src;
        end
        check(got[0] == NPER && got[1] == NPER && got[2] == NPER, "all records sent");
        check(switches > NPER, $sformatf("inputs interleaved (%0d switches)", switches));
      end
    join
    check(sent_count == 16'(3 * NPER), "sent_count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
