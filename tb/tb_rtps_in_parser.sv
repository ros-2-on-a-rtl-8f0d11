// tb_rtps_in_parser: self-checking testbench of rtps_in_parser.
// Random RTPS messages are built from the DDSI-RTPS wire format by
// tb_net_pkg: each has 1..4 submessages drawn from DATA (little or big
// endian, 0..64 payload bytes), ACKNACK (asking for its base, or a pure
// acknowledgement with an empty bitmap) and INFO_TS (to be skipped). The
// testbench predicts the record list: one record per DATA and per ACKNACK
// that asks for its base, with the sender's GUID prefix, IP address and
// port, entity ids, sequence number and payload. Datagrams to a non-RTPS
// port, with a wrong protocol magic, or with a DATA payload over 64 bytes
// must yield no record and be counted. Random gaps and record back-pressure.
`timescale 1ns/1ps
module tb_rtps_in_parser;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_hv, s_hr, s_tv, s_tl, s_tr, m_valid, m_ready = 0;
  udp_hdr_t s_h;
  logic [7:0] s_td;
  rtps_msg_t m_msg;
  logic [15:0] msg_count, drop_count;

  rtps_in_parser dut (.clk, .rst,
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr), .m_valid, .m_ready, .m_msg, .msg_count, .drop_count);
  tb_stream_src #(.H(udp_hdr_t)) src (.clk, .hv(s_hv), .hr(s_hr), .h(s_h), .td(s_td), .tv(s_tv), .tl(s_tl), .tr(s_tr));

  rtps_msg_t exp_q[$];
  rtps_msg_t got_q[$];
  int exp_drops = 0;
  int stalls = 0;
  always @(posedge clk) begin
    m_ready <= ($urandom % 3 != 0);
    if (!rst && m_valid && m_ready) got_q.push_back(m_msg);
    if (!rst && m_valid && !m_ready) stalls++;
  end

  function automatic bit same_rec(rtps_msg_t a, rtps_msg_t b);
    if (a.kind != b.kind || a.guid_prefix != b.guid_prefix || a.reader_id != b.reader_id ||
        a.writer_id != b.writer_id || a.sn != b.sn || a.ip != b.ip || a.port != b.port) return 0;
    if (a.kind == SUB_DATA) begin
      if (a.len != b.len) return 0;
      for (int i = 0; i < int'(a.len); i++) if (a.data[8*i +: 8] != b.data[8*i +: 8]) return 0;
    end
    return 1;
  endfunction

  // kind: 0 normal, 1 wrong port, 2 wrong magic, 3 one DATA too long
  task automatic one(input int kind);
    logic [95:0] pfx;
    logic [31:0] ip;
    logic [15:0] sp, dp;
    bq_t m;
    int nsub;
    rtps_msg_t r;
    pfx = {$urandom, $urandom, $urandom};
    ip = $urandom; sp = 16'($urandom);
    dp = (kind == 1) ? 16'd7402 : 16'(7400 + ((int'($urandom % 4) < 2) ? int'($urandom % 2) : 10 + int'($urandom % 2)));
    m = rtps_header(pfx);
    if (kind == 2) m[1] = 8'h55;
    nsub = 1 + int'($urandom % 4);
    for (int k = 0; k < nsub; k++) begin
      int t;
      t = int'($urandom % 5);
      r = '0;
      r.guid_prefix = pfx; r.ip = ip; r.port = sp;
      r.reader_id = $urandom; r.writer_id = $urandom; r.sn = {$urandom, $urandom};
      if (kind == 3 && k == 0) begin
        append(m, rtps_data(r.reader_id, r.writer_id, r.sn, rand_bytes(65 + int'($urandom % 20))));
        exp_drops++;
      end else if (t <= 2) begin
        bq_t p;
        p = rand_bytes(int'($urandom % 65));
        append(m, rtps_data(r.reader_id, r.writer_id, r.sn, p, t == 2));
        r.kind = SUB_DATA;
        r.len = plen_t'(p.size());
        foreach (p[i]) r.data[8*i +: 8] = p[i];
        if (kind == 0 || kind == 3) exp_q.push_back(r);
      end else if (t == 3) begin
        bit ask;
        ask = $urandom % 2;
        append(m, rtps_acknack(r.reader_id, r.writer_id, r.sn, ask ? 1 + ($urandom % 32) : 0,
                               ask ? 32'h8000_0000 | $urandom : 32'h0));
        r.kind = SUB_ACKNACK;
        if ((kind == 0 || kind == 3) && ask) exp_q.push_back(r);
      end else
        append(m, rtps_info_ts());
    end
    if (kind == 1 || kind == 2) exp_drops++;
    src.send('{src_ip: ip, dst_ip: 32'h0A00_0002, src_port: sp, dst_port: dp,
               payload_len: 16'(m.size()), checksum: 16'h0}, m);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 150; i++) one((i % 5 == 4) ? 1 + int'($urandom % 3) : 0);
    repeat (200) @(posedge clk);
    check(got_q.size() == exp_q.size(), $sformatf("records %0d expected %0d", got_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      begin
        check(same_rec(got_q[i], exp_q[i]), $sformatf("record %0d", i));
        if (!same_rec(got_q[i], exp_q[i]) && failures < 3)
          $display("  got kind %0d sn %x len %0d / exp kind %0d sn %x len %0d",
                   got_q[i].kind, got_q[i].sn, got_q[i].len, exp_q[i].kind, exp_q[i].sn, exp_q[i].len);
      end
    check(drop_count == 16'(exp_drops), $sformatf("drop_count %0d expected %0d", drop_count, exp_drops));
    check(msg_count == 16'(exp_q.size()), "msg_count");
    check(stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
