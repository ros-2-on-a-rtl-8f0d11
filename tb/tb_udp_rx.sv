// tb_udp_rx: self-checking testbench of udp_rx.
// Random UDP datagrams (built with the reference builder in tb_net_pkg) are
// offered as IP packets; the header record must carry the addresses, ports,
// data length and received checksum, and the data bytes must follow exactly.
// Mixed in: other protocols, a UDP length below 9, a UDP length longer than
// the IP payload, and IP payloads with trailing bytes after the datagram.
// Dropped datagrams must not appear and must be counted. Random gaps and
// back-pressure.
`timescale 1ns/1ps
module tb_udp_rx;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_hv, s_hr, s_tv, s_tl, s_tr, m_hv, m_hr, m_tv, m_tl, m_tr;
  ip_hdr_t  s_h;
  udp_hdr_t m_h;
  logic [7:0] s_td, m_td;
  logic [15:0] drop_count;

  udp_rx dut (.clk, .rst,
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr),
    .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td), .m_tvalid(m_tv),
    .m_tlast(m_tl), .m_tready(m_tr), .drop_count);
  tb_stream_src  #(.H(ip_hdr_t))  src (.clk, .hv(s_hv), .hr(s_hr), .h(s_h), .td(s_td), .tv(s_tv), .tl(s_tl), .tr(s_tr));
  tb_stream_sink #(.H(udp_hdr_t)) snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  udp_hdr_t exp_h[$];
  bq_t      exp_p[$];
  int       exp_drops = 0;

  // kind: 0 good, 1 other protocol, 2 UDP length 8, 3 UDP length too long, 4 trailing bytes
  task automatic one(input int kind);
    logic [31:0] sip, dip;
    logic [15:0] sp, dp;
    bq_t pay, d;
    int extra;
    sip = $urandom; dip = $urandom; sp = 16'($urandom); dp = 16'($urandom);
    pay = rand_bytes(1 + int'($urandom % 80));
    d = udp_datagram(sip, dip, sp, dp, pay);
    extra = 0;
    if (kind == 2) begin d[4] = 0; d[5] = 8; end
    if (kind == 3) begin logic [15:0] l; l = 16'(d.size() + 3); d[4] = l[15:8]; d[5] = l[7:0]; end
    if (kind == 4) begin extra = 1 + int'($urandom % 5); repeat (extra) d.push_back(8'hEE); end
    if (kind == 0 || kind == 4) begin
      exp_h.push_back('{src_ip: sip, dst_ip: dip, src_port: sp, dst_port: dp,
                        payload_len: 16'(pay.size()), checksum: {d[6], d[7]}});
      exp_p.push_back(pay);
    end else exp_drops++;
    src.send('{src_ip: sip, dst_ip: dip, protocol: (kind == 1) ? 8'd6 : 8'd17,
               payload_len: 16'(d.size())}, d);
  endtask

  initial begin
    udp_hdr_t h;
    bq_t b;
    bit ok;
    repeat (5) @(posedge clk);
    rst = 0;
    fork
      begin
        for (int i = 0; i < 120; i++) one((i % 3 == 2) ? 1 + int'($urandom % 4) : 0);
        for (int k = 0; k <= 4; k++) one(k);
      end
      begin
        int got = 0;
        forever begin
          snk.wait_pkt(h, b, ok, 3000);
          if (!ok) break;
          got++;
          if (exp_h.size() == 0) begin check(0, "unexpected datagram"); continue; end
          check(h == exp_h[0], $sformatf("header %0d", got));
          check(same_bytes(b, exp_p[0]), $sformatf("data %0d", got));
          void'(exp_h.pop_front()); void'(exp_p.pop_front());
        end
      end
    join
    check(exp_h.size() == 0, $sformatf("%0d datagrams missing", exp_h.size()));
    check(drop_count == 16'(exp_drops), $sformatf("drop_count %0d expected %0d", drop_count, exp_drops));
    check(snk.stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
