// tb_udp_tx: self-checking testbench of udp_tx.
// Random UDP header records and data go in; the IP request record must have
// the addresses, protocol 17 and length data+8, and the stream must be the
// 8 UDP header bytes in network order followed by the data, as built
// independently by tb_net_pkg (with the checksum the record carried).
// Random gaps and back-pressure.
`timescale 1ns/1ps
module tb_udp_tx;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_hv, s_hr, s_tv, s_tl, s_tr, m_hv, m_hr, m_tv, m_tl, m_tr;
  udp_hdr_t s_h;
  ip_hdr_t  m_h;
  logic [7:0] s_td, m_td;

  udp_tx dut (.clk, .rst,
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr),
    .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td), .m_tvalid(m_tv),
    .m_tlast(m_tl), .m_tready(m_tr));
  tb_stream_src  #(.H(udp_hdr_t)) src (.clk, .hv(s_hv), .hr(s_hr), .h(s_h), .td(s_td), .tv(s_tv), .tl(s_tl), .tr(s_tr));
  tb_stream_sink #(.H(ip_hdr_t))  snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  ip_hdr_t exp_h[$];
  bq_t     exp_p[$];

  initial begin
    ip_hdr_t h;
    bq_t b;
    bit ok;
    repeat (5) @(posedge clk);
    rst = 0;
    fork
      for (int i = 0; i < 150; i++) begin
        udp_hdr_t u;
        bq_t pay, d;
        u = '{src_ip: $urandom, dst_ip: $urandom, src_port: 16'($urandom), dst_port: 16'($urandom),
              payload_len: 0, checksum: 16'($urandom)};
        pay = rand_bytes(1 + int'($urandom % 70));
        u.payload_len = 16'(pay.size());
        d.delete();
        put16(d, u.src_port); put16(d, u.dst_port); put16(d, 16'(8 + pay.size())); put16(d, u.checksum);
        append(d, pay);
        exp_h.push_back('{src_ip: u.src_ip, dst_ip: u.dst_ip, protocol: 8'd17, payload_len: 16'(d.size())});
        exp_p.push_back(d);
        src.send(u, pay);
      end
      begin
        int got = 0;
        forever begin
          snk.wait_pkt(h, b, ok, 3000);
          if (!ok) break;
          got++;
          if (exp_h.size() == 0) begin check(0, "unexpected packet"); continue; end
          check(h == exp_h[0], $sformatf("IP record %0d", got));
          check(same_bytes(b, exp_p[0]), $sformatf("bytes %0d", got));
          void'(exp_h.pop_front()); void'(exp_p.pop_front());
        end
      end
    join
    check(exp_h.size() == 0, $sformatf("%0d packets missing", exp_h.size()));
    check(snk.stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
