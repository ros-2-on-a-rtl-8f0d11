// tb_ip_arbiter_mux: self-checking testbench of ip_arbiter_mux (N = 2).
// Two sources send random packets at the same time, each header tagged with
// its source and sequence number. Every output packet must be a complete,
// unmixed packet of one source, in that source's order, with the header that
// belongs to it; all packets must arrive. While both sources have packets
// waiting, grants must alternate (round-robin), which the testbench counts.
`timescale 1ns/1ps
module tb_ip_arbiter_mux;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_hv [2], s_hr [2], s_tv [2], s_tl [2], s_tr [2];
  ip_hdr_t s_h [2];
  logic [7:0] s_td [2];
  logic m_hv, m_hr, m_tv, m_tl, m_tr;
  ip_hdr_t m_h;
  logic [7:0] m_td;
  logic grant;

  ip_arbiter_mux #(.N(2)) dut (.clk, .rst,
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr),
    .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td), .m_tvalid(m_tv),
    .m_tlast(m_tl), .m_tready(m_tr), .grant);
  for (genvar i = 0; i < 2; i++) begin : g_src
    tb_stream_src #(.H(ip_hdr_t)) src (.clk, .hv(s_hv[i]), .hr(s_hr[i]), .h(s_h[i]), .td(s_td[i]),
                                       .tv(s_tv[i]), .tl(s_tl[i]), .tr(s_tr[i]));
  end
  tb_stream_sink #(.H(ip_hdr_t)) snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  localparam int NPKT = 60;
  bq_t exp_p [2][$];
  ip_hdr_t exp_h [2][$];

  function automatic ip_hdr_t mk_hdr(int s, int k, int len);
    return '{src_ip: 32'(s), dst_ip: 32'(k), protocol: 8'(8'h50 + s), payload_len: 16'(len)};
  endfunction

  initial begin
    int got [2];
    int alternations, prev_src;
    ip_hdr_t h;
    bq_t b;
    bit ok;
    got = '{0, 0};
    alternations = 0; prev_src = -1;
    repeat (5) @(posedge clk);
    rst = 0;
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < NPKT; k++) begin
        bq_t p;
        p = rand_bytes(1 + int'($urandom % 40));
        p[0] = 8'(s);
        exp_p[s].push_back(p);
        exp_h[s].push_back(mk_hdr(s, k, p.size()));
      end
    fork
      for (int k = 0; k < NPKT; k++) g_src[0].src.send(exp_h[0][k], exp_p[0][k]);
      for (int k = 0; k < NPKT; k++) g_src[1].src.send(exp_h[1][k], exp_p[1][k]);
      for (int n = 0; n < 2 * NPKT; n++) begin
        int s;
        snk.wait_pkt(h, b, ok, 3000);
        check(ok, $sformatf("packet %0d arrives", n));
        if (!ok) break;
        s = int'(h.src_ip);
        if (s > 1 || got[s] >= NPKT) begin check(0, "unknown packet"); continue; end
        check(h == exp_h[s][got[s]], $sformatf("header src %0d #%0d", s, got[s]));
        check(same_bytes(b, exp_p[s][got[s]]), $sformatf("payload src %0d #%0d", s, got[s]));
        got[s]++;
        if (prev_src >= 0 && s != prev_src) alternations++;
        prev_src = s;
      end
    join
    check(got[0] == NPKT && got[1] == NPKT, "all packets delivered");
    check(alternations > NPKT / 2, $sformatf("round-robin alternations %0d", alternations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
