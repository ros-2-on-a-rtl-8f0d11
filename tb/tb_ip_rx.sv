// tb_ip_rx: self-checking testbench of ip_rx.
// Random IPv4 packets (random protocol, payload length, Ethernet padding)
// addressed to the local, broadcast and multicast addresses must come out as
// a header record with the right fields and exactly the payload bytes.
// Packets with a bad header checksum, another destination, a fragment flag,
// version 6, IP options (kept, options skipped) and non-IPv4 EtherTypes are
// mixed in; the dropped ones must not appear and must be counted. Expected
// values come from the reference packet builder in tb_net_pkg. Sink
// back-pressure and source gaps are random.
`timescale 1ns/1ps
module tb_ip_rx;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  localparam logic [31:0] LOCAL_IP = 32'hC0A8_010A;

  logic s_hv, s_hr, s_tv, s_tl, s_tr, m_hv, m_hr, m_tv, m_tl, m_tr;
  eth_hdr_t s_h;
  ip_hdr_t  m_h;
  logic [7:0] s_td, m_td;
  logic [15:0] drop_count;

  ip_rx dut (.clk, .rst, .local_ip(LOCAL_IP),
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr),
    .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td), .m_tvalid(m_tv),
    .m_tlast(m_tl), .m_tready(m_tr), .drop_count);
  tb_stream_src  #(.H(eth_hdr_t)) src (.clk, .hv(s_hv), .hr(s_hr), .h(s_h), .td(s_td), .tv(s_tv), .tl(s_tl), .tr(s_tr));
  tb_stream_sink #(.H(ip_hdr_t))  snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  localparam eth_hdr_t EH = '{dst_mac: 48'h02_00_00_00_00_01, src_mac: 48'h02_00_00_00_00_02,
                              ethertype: ETHERTYPE_IPV4};

  ip_hdr_t exp_h[$];
  bq_t     exp_p[$];
  int      exp_drops = 0;

  // kind: 0 good, 1 bad checksum, 2 other host, 3 fragment, 4 version 6, 5 options, 6 ARP type
  task automatic one(input int kind);
    logic [31:0] dst, src_ip;
    logic [7:0]  proto;
    bq_t pay, pkt;
    eth_hdr_t eh;
    int r;
    r = int'($urandom % 3);
    dst = (r == 0) ? LOCAL_IP : (r == 1) ? 32'hFFFF_FFFF : 32'hEF00_0000 | ($urandom & 32'h00FF_FFFF);
    if (kind == 2) dst = 32'hC0A8_0199;
    src_ip = $urandom;
    proto  = 8'($urandom);
    pay    = rand_bytes(1 + int'($urandom % 70));
    pkt    = ip_packet(src_ip, dst, proto, pay, kind == 1);
    if (kind == 3 || kind == 4) begin
      bq_t h;
      logic [15:0] c;
      if (kind == 3) pkt[6] = 8'h20; else pkt[0] = 8'h65;
      pkt[10] = 0; pkt[11] = 0;
      h = slice(pkt, 0, 20);
      c = ~ones_sum(h);
      pkt[10] = c[15:8]; pkt[11] = c[7:0];
    end
    if (kind == 5) begin   // IHL 6 with one option word
      bq_t h, q;
      logic [15:0] c, tl;
      h = slice(pkt, 0, 20);
      h[0] = 8'h46;
      tl = 16'(24 + pay.size());
      h[2] = tl[15:8]; h[3] = tl[7:0];
      h[10] = 0; h[11] = 0;
      repeat (4) h.push_back(8'h01);
      c = ~ones_sum(h);
      h[10] = c[15:8]; h[11] = c[7:0];
      q = h; append(q, pay); pkt = q;
    end
    while (pkt.size() < 46) pkt.push_back(8'h00);   // Ethernet padding
    eh = EH;
    if (kind == 6) eh.ethertype = ETHERTYPE_ARP;
    if (kind == 0 || kind == 5) begin
      exp_h.push_back('{src_ip: src_ip, dst_ip: dst, protocol: proto, payload_len: 16'(pay.size())});
      exp_p.push_back(pay);
    end else exp_drops++;
    src.send(eh, pkt);
  endtask

  initial begin
    ip_hdr_t h;
    bq_t b;
    bit ok;
    repeat (5) @(posedge clk);
    rst = 0;
    fork
      begin
        for (int i = 0; i < 120; i++) one((i % 4 == 3) ? 1 + int'($urandom % 6) : 0);
        for (int k = 0; k <= 6; k++) one(k);
      end
      begin
        int got = 0;
        forever begin
          snk.wait_pkt(h, b, ok, 3000);
          if (!ok) break;
          got++;
          if (exp_h.size() == 0) begin check(0, "unexpected packet"); continue; end
          check(h == exp_h[0], $sformatf("header %0d", got));
          check(same_bytes(b, exp_p[0]), $sformatf("payload %0d", got));
          if (!same_bytes(b, exp_p[0])) begin show("got", b); show("exp", exp_p[0]); end
          void'(exp_h.pop_front()); void'(exp_p.pop_front());
        end
      end
    join
    check(exp_h.size() == 0, $sformatf("%0d packets missing", exp_h.size()));
    check(drop_count == 16'(exp_drops), $sformatf("drop_count %0d expected %0d", drop_count, exp_drops));
    check(snk.stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
