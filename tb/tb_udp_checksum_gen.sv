// tb_udp_checksum_gen: self-checking testbench of udp_checksum_gen.
// Random datagrams (odd and even lengths, 1..200 bytes, plus all-0xFF data
// that drives the sum to its extremes) go in with checksum 0 and a wrong
// payload_len; the record that comes out must carry the counted length and
// the RFC 768 checksum computed independently over pseudo-header, header
// and data by tb_net_pkg, and the data must come out unchanged.
`timescale 1ns/1ps
module tb_udp_checksum_gen;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_hv, s_hr, s_tv, s_tl, s_tr, m_hv, m_hr, m_tv, m_tl, m_tr;
  udp_hdr_t s_h, m_h;
  logic [7:0] s_td, m_td;

  udp_checksum_gen dut (.clk, .rst,
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr),
    .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td), .m_tvalid(m_tv),
    .m_tlast(m_tl), .m_tready(m_tr));
  tb_stream_src  #(.H(udp_hdr_t)) src (.clk, .hv(s_hv), .hr(s_hr), .h(s_h), .td(s_td), .tv(s_tv), .tl(s_tl), .tr(s_tr));
  tb_stream_sink #(.H(udp_hdr_t)) snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  udp_hdr_t exp_h[$];
  bq_t      exp_p[$];

  initial begin
    udp_hdr_t h;
    bq_t b;
    bit ok;
    repeat (5) @(posedge clk);
    rst = 0;
    fork
      for (int i = 0; i < 100; i++) begin
        udp_hdr_t u;
        bq_t pay, d;
        u = '{src_ip: $urandom, dst_ip: $urandom, src_port: 16'($urandom), dst_port: 16'($urandom),
              payload_len: 16'($urandom), checksum: 16'h0000};
        pay = rand_bytes((i % 10 == 9) ? 0 : 1 + int'($urandom % 200));
        if (i % 10 == 9) repeat (1 + i % 7) pay.push_back(8'hFF);
        d = udp_datagram(u.src_ip, u.dst_ip, u.src_port, u.dst_port, pay);
        exp_h.push_back('{src_ip: u.src_ip, dst_ip: u.dst_ip, src_port: u.src_port, dst_port: u.dst_port,
                          payload_len: 16'(pay.size()), checksum: {d[6], d[7]}});
        exp_p.push_back(pay);
        src.send(u, pay);
      end
      begin
        int got = 0;
        forever begin
          snk.wait_pkt(h, b, ok, 3000);
          if (!ok) break;
          got++;
          if (exp_h.size() == 0) begin check(0, "unexpected datagram"); continue; end
          check(h.payload_len == exp_h[0].payload_len, $sformatf("length %0d", got));
          check(h.checksum == exp_h[0].checksum,
                $sformatf("checksum %0d: %04x expected %04x", got, h.checksum, exp_h[0].checksum));
          check(h.src_ip == exp_h[0].src_ip && h.dst_ip == exp_h[0].dst_ip &&
                h.src_port == exp_h[0].src_port && h.dst_port == exp_h[0].dst_port, $sformatf("fields %0d", got));
          check(same_bytes(b, exp_p[0]), $sformatf("data %0d", got));
          void'(exp_h.pop_front()); void'(exp_p.pop_front());
        end
      end
    join
    check(exp_h.size() == 0, $sformatf("%0d datagrams missing", exp_h.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
