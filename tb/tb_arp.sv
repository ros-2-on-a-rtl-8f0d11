// tb_arp: self-checking testbench of arp.
// ARP frames built from RFC 826 by tb_net_pkg (some with Ethernet padding)
// go in; the testbench keeps its own model of the cache (8 entries, update
// in place, otherwise round-robin replacement) and compares every lookup
// against it. Requests for the local address must produce a reply with the
// exact RFC 826 bytes to the asker; requests for other addresses, replies
// and non-ARP frames must not. A lookup miss pulsed on req_valid must
// produce one broadcast request for that address. Random gaps and
// back-pressure.
`timescale 1ns/1ps
module tb_arp;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  localparam logic [31:0] LOCAL_IP  = 32'h0A00_0002;
  localparam logic [47:0] LOCAL_MAC = 48'h02_00_00_00_00_02;

  logic s_hv, s_hr, s_tv, s_tl, s_tr, m_hv, m_hr, m_tv, m_tl, m_tr;
  eth_hdr_t s_h, m_h;
  logic [7:0] s_td, m_td;
  logic [31:0] lk_ip = 0, rq_ip = 0;
  logic lk_hit, rq_v = 0;
  logic [47:0] lk_mac;

  arp dut (.clk, .rst, .local_ip(LOCAL_IP), .local_mac(LOCAL_MAC),
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr),
    .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td), .m_tvalid(m_tv),
    .m_tlast(m_tl), .m_tready(m_tr),
    .lookup_ip(lk_ip), .lookup_hit(lk_hit), .lookup_mac(lk_mac), .req_valid(rq_v), .req_ip(rq_ip));
  tb_stream_src  #(.H(eth_hdr_t)) src (.clk, .hv(s_hv), .hr(s_hr), .h(s_h), .td(s_td), .tv(s_tv), .tl(s_tl), .tr(s_tr));
  tb_stream_sink #(.H(eth_hdr_t)) snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  // cache model
  logic [31:0] m_ip  [8];
  logic [47:0] m_mac [8];
  bit          m_v   [8];
  int          m_ptr = 0;
  function automatic void learn(logic [31:0] ip, logic [47:0] mac);
    for (int i = 0; i < 8; i++) if (m_v[i] && m_ip[i] == ip) begin m_mac[i] = mac; return; end
    m_v[m_ptr] = 1; m_ip[m_ptr] = ip; m_mac[m_ptr] = mac;
    m_ptr = (m_ptr + 1) % 8;
  endfunction

  task automatic check_lookups(input logic [31:0] ips[$], input string what);
    foreach (ips[k]) begin
      bit hit;
      logic [47:0] mac;
      hit = 0; mac = 0;
      for (int i = 0; i < 8; i++) if (m_v[i] && m_ip[i] == ips[k]) begin hit = 1; mac = m_mac[i]; end
      lk_ip = ips[k];
      #1;
      check(lk_hit == hit && (!hit || lk_mac == mac), $sformatf("%s: lookup %08x", what, ips[k]));
    end
  endtask

  task automatic expect_reply(input logic [47:0] mac, input logic [31:0] ip);
    eth_hdr_t h;
    bq_t b;
    bit ok;
    snk.wait_pkt(h, b, ok, 500);
    check(ok, "reply sent");
    if (!ok) return;
    check(h == '{dst_mac: mac, src_mac: LOCAL_MAC, ethertype: ETHERTYPE_ARP}, "reply header");
    check(same_bytes(b, arp_body(16'd2, LOCAL_MAC, LOCAL_IP, mac, ip)), "reply bytes");
  endtask

  initial begin
    logic [31:0] ips[$];
    eth_hdr_t h;
    bq_t b;
    bit ok;
    for (int i = 0; i < 8; i++) m_v[i] = 0;
    repeat (5) @(posedge clk);
    rst = 0;
    // requests for us from 12 hosts (cache wraps), some padded
    for (int i = 0; i < 12; i++) begin
      logic [31:0] ip;
      logic [47:0] mac;
      ip = 32'h0A00_0100 + 32'(i); mac = {16'h02AA, 32'($urandom)};
      b = arp_body(16'd1, mac, ip, 48'h0, LOCAL_IP);
      if (i % 3 == 0) repeat (18) b.push_back(8'h00);
      src.send('{dst_mac: 48'hFFFF_FFFF_FFFF, src_mac: mac, ethertype: ETHERTYPE_ARP}, b);
      learn(ip, mac);
      expect_reply(mac, ip);
      ips.push_back(ip);
    end
    check_lookups(ips, "after requests");
    // a host changes its MAC (update in place); replies and foreign requests teach but are not answered
    begin
      logic [47:0] mac;
      mac = 48'h02_DD_DD_DD_DD_DD;
      src.send('{dst_mac: LOCAL_MAC, src_mac: mac, ethertype: ETHERTYPE_ARP},
               arp_body(16'd2, mac, 32'h0A00_010B, LOCAL_MAC, LOCAL_IP));
      learn(32'h0A00_010B, mac);
      src.send('{dst_mac: 48'hFFFF_FFFF_FFFF, src_mac: 48'h02_EE_EE_EE_EE_EE, ethertype: ETHERTYPE_ARP},
               arp_body(16'd1, 48'h02_EE_EE_EE_EE_EE, 32'h0A00_0200, 48'h0, 32'h0A00_0077));
      learn(32'h0A00_0200, 48'h02_EE_EE_EE_EE_EE);
      // not an ARP frame
      src.send('{dst_mac: LOCAL_MAC, src_mac: 48'h02_FF_FF_FF_FF_FF, ethertype: ETHERTYPE_IPV4},
               arp_body(16'd1, 48'h02_FF_FF_FF_FF_FF, 32'h0A00_0300, 48'h0, LOCAL_IP));
      repeat (100) @(posedge clk);
      check(snk.fq.size() == 0, "no reply to replies, foreign requests or other frames");
      ips.push_back(32'h0A00_0200); ips.push_back(32'h0A00_0300);
      check_lookups(ips, "after updates");
    end
    // transmit requests on misses
    for (int i = 0; i < 5; i++) begin
      logic [31:0] ip;
      ip = 32'h0A00_0400 + 32'(i * 3);
      @(posedge clk);
      rq_v <= 1; rq_ip <= ip;
      @(posedge clk);
      rq_v <= 0;
      snk.wait_pkt(h, b, ok, 500);
      check(ok, "request sent");
      check(h == '{dst_mac: 48'hFFFF_FFFF_FFFF, src_mac: LOCAL_MAC, ethertype: ETHERTYPE_ARP}, "request header");
      check(same_bytes(b, arp_body(16'd1, LOCAL_MAC, LOCAL_IP, 48'h0, ip)), "request bytes");
    end
    repeat (50) @(posedge clk);
    check(snk.fq.size() == 0, "one request per pulse");
    check(snk.stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
