// tb_udp_ip_stack: self-checking testbench of the UDP/IP stack (udp_ip_stack,
// ARP_TIMEOUT reduced to 500 cycles).
// Frames built from the specifications by tb_net_pkg go into the data link
// receive port: an ARP request for the local address (reply checked byte for
// byte), UDP datagrams (must reach APP_UDP_RX with the right record and data),
// other IP protocols (must reach APP_IP_RX) and corrupted IP headers (must be
// dropped and counted). On the transmit side, UDP datagrams with checksum 0
// from APP_UDP_TX must leave as frames whose IPv4 header and UDP checksum
// equal independently built ones; a datagram for an unknown host must first
// cause an ARP request and leave once the reply has been received; raw IP
// from APP_IP_TX shares the transmit path.
`timescale 1ns/1ps
module tb_udp_ip_stack;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  localparam logic [31:0] LOCAL_IP  = 32'h0A00_0002;
  localparam logic [47:0] LOCAL_MAC = 48'h02_00_00_00_00_02;
  localparam logic [31:0] A_IP  = 32'h0A00_0009;
  localparam logic [47:0] A_MAC = 48'h02_AA_AA_AA_AA_09;
  localparam logic [31:0] B_IP  = 32'h0A00_000B;
  localparam logic [47:0] B_MAC = 48'h02_BB_BB_BB_BB_0B;

  logic rx_hv, rx_hr, rx_tv, rx_tl, rx_tr;  eth_hdr_t rx_h;  logic [7:0] rx_td;
  logic it_hv, it_hr, it_tv, it_tl, it_tr;  eth_hdr_t it_h;  logic [7:0] it_td;
  logic at_hv, at_hr, at_tv, at_tl, at_tr;  eth_hdr_t at_h;  logic [7:0] at_td;
  logic ir_hv, ir_hr, ir_tv, ir_tl, ir_tr;  ip_hdr_t  ir_h;  logic [7:0] ir_td;
  logic ur_hv, ur_hr, ur_tv, ur_tl, ur_tr;  udp_hdr_t ur_h;  logic [7:0] ur_td;
  logic ut_hv, ut_hr, ut_tv, ut_tl, ut_tr;  udp_hdr_t ut_h;  logic [7:0] ut_td;
  logic ip_hv, ip_hr, ip_tv, ip_tl, ip_tr;  ip_hdr_t  ip_h;  logic [7:0] ip_td;
  logic [15:0] ip_rx_drops, udp_rx_drops, ip_tx_drops;

  udp_ip_stack #(.ARP_TIMEOUT(500)) dut (.clk, .rst, .local_ip(LOCAL_IP), .local_mac(LOCAL_MAC),
    .dl_rx_hdr_valid(rx_hv), .dl_rx_hdr_ready(rx_hr), .dl_rx_hdr(rx_h), .dl_rx_tdata(rx_td),
    .dl_rx_tvalid(rx_tv), .dl_rx_tlast(rx_tl), .dl_rx_tready(rx_tr),
    .dl_ip_tx_hdr_valid(it_hv), .dl_ip_tx_hdr_ready(it_hr), .dl_ip_tx_hdr(it_h), .dl_ip_tx_tdata(it_td),
    .dl_ip_tx_tvalid(it_tv), .dl_ip_tx_tlast(it_tl), .dl_ip_tx_tready(it_tr),
    .dl_arp_tx_hdr_valid(at_hv), .dl_arp_tx_hdr_ready(at_hr), .dl_arp_tx_hdr(at_h), .dl_arp_tx_tdata(at_td),
    .dl_arp_tx_tvalid(at_tv), .dl_arp_tx_tlast(at_tl), .dl_arp_tx_tready(at_tr),
    .app_ip_rx_hdr_valid(ir_hv), .app_ip_rx_hdr_ready(ir_hr), .app_ip_rx_hdr(ir_h), .app_ip_rx_tdata(ir_td),
    .app_ip_rx_tvalid(ir_tv), .app_ip_rx_tlast(ir_tl), .app_ip_rx_tready(ir_tr),
    .app_udp_rx_hdr_valid(ur_hv), .app_udp_rx_hdr_ready(ur_hr), .app_udp_rx_hdr(ur_h), .app_udp_rx_tdata(ur_td),
    .app_udp_rx_tvalid(ur_tv), .app_udp_rx_tlast(ur_tl), .app_udp_rx_tready(ur_tr),
    .app_udp_tx_hdr_valid(ut_hv), .app_udp_tx_hdr_ready(ut_hr), .app_udp_tx_hdr(ut_h), .app_udp_tx_tdata(ut_td),
    .app_udp_tx_tvalid(ut_tv), .app_udp_tx_tlast(ut_tl), .app_udp_tx_tready(ut_tr),
    .app_ip_tx_hdr_valid(ip_hv), .app_ip_tx_hdr_ready(ip_hr), .app_ip_tx_hdr(ip_h), .app_ip_tx_tdata(ip_td),
    .app_ip_tx_tvalid(ip_tv), .app_ip_tx_tlast(ip_tl), .app_ip_tx_tready(ip_tr),
    .ip_rx_drops, .udp_rx_drops, .ip_tx_drops);

  tb_stream_src  #(.H(eth_hdr_t)) rx  (.clk, .hv(rx_hv), .hr(rx_hr), .h(rx_h), .td(rx_td), .tv(rx_tv), .tl(rx_tl), .tr(rx_tr));
  tb_stream_src  #(.H(udp_hdr_t)) ut  (.clk, .hv(ut_hv), .hr(ut_hr), .h(ut_h), .td(ut_td), .tv(ut_tv), .tl(ut_tl), .tr(ut_tr));
  tb_stream_src  #(.H(ip_hdr_t))  ipt (.clk, .hv(ip_hv), .hr(ip_hr), .h(ip_h), .td(ip_td), .tv(ip_tv), .tl(ip_tl), .tr(ip_tr));
  tb_stream_sink #(.H(eth_hdr_t)) it  (.clk, .rst, .hv(it_hv), .hr(it_hr), .h(it_h), .td(it_td), .tv(it_tv), .tl(it_tl), .tr(it_tr));
  tb_stream_sink #(.H(eth_hdr_t)) at  (.clk, .rst, .hv(at_hv), .hr(at_hr), .h(at_h), .td(at_td), .tv(at_tv), .tl(at_tl), .tr(at_tr));
  tb_stream_sink #(.H(ip_hdr_t))  ir  (.clk, .rst, .hv(ir_hv), .hr(ir_hr), .h(ir_h), .td(ir_td), .tv(ir_tv), .tl(ir_tl), .tr(ir_tr));
  tb_stream_sink #(.H(udp_hdr_t)) ur  (.clk, .rst, .hv(ur_hv), .hr(ur_hr), .h(ur_h), .td(ur_td), .tv(ur_tv), .tl(ur_tl), .tr(ur_tr));

  // the frame the stack should send for a UDP datagram (identification copied from got)
  function automatic bq_t exp_udp_frame(logic [31:0] dip, logic [15:0] sp, logic [15:0] dp, bq_t pay, bq_t got);
    bq_t e;
    logic [15:0] c;
    e = ip_packet(LOCAL_IP, dip, 8'd17, udp_datagram(LOCAL_IP, dip, sp, dp, pay));
    if (got.size() >= 6) begin e[4] = got[4]; e[5] = got[5]; end
    e[6] = 8'h40; e[10] = 0; e[11] = 0;
    c = ~ones_sum(slice(e, 0, 20));
    e[10] = c[15:8]; e[11] = c[7:0];
    return e;
  endfunction

  task automatic udp_out(input logic [31:0] dip, input logic [47:0] dmac, input bit wait_arp);
    udp_hdr_t u;
    bq_t pay, b;
    eth_hdr_t h;
    bit ok;
    u = '{src_ip: LOCAL_IP, dst_ip: dip, src_port: 16'd7411, dst_port: 16'($urandom),
          payload_len: 0, checksum: 0};
    pay = rand_bytes(1 + int'($urandom % 60));
    u.payload_len = 16'(pay.size());
    fork ut.send(u, pay); join_none
    if (wait_arp) begin
      at.wait_pkt(h, b, ok, 1000);
      check(ok && h.dst_mac == 48'hFFFF_FFFF_FFFF && same_bytes(b, arp_body(16'd1, LOCAL_MAC, LOCAL_IP, 48'h0, dip)),
            "ARP request for an unknown host");
      rx.send('{dst_mac: LOCAL_MAC, src_mac: dmac, ethertype: ETHERTYPE_ARP},
              arp_body(16'd2, dmac, dip, LOCAL_MAC, LOCAL_IP));
    end
    it.wait_pkt(h, b, ok, 3000);
    check(ok, "UDP frame sent");
    check(h == '{dst_mac: dmac, src_mac: LOCAL_MAC, ethertype: ETHERTYPE_IPV4}, "UDP frame Ethernet header");
    check(same_bytes(b, exp_udp_frame(dip, u.src_port, u.dst_port, pay, b)), "UDP frame bytes and checksums");
    if (!same_bytes(b, exp_udp_frame(dip, u.src_port, u.dst_port, pay, b))) begin
      show("got", b); show("exp", exp_udp_frame(dip, u.src_port, u.dst_port, pay, b));
    end
  endtask

  initial begin
    eth_hdr_t h;
    udp_hdr_t uh;
    ip_hdr_t ih;
    bq_t b;
    bit ok;
    repeat (5) @(posedge clk);
    rst = 0;
    // ARP request from A
    rx.send('{dst_mac: 48'hFFFF_FFFF_FFFF, src_mac: A_MAC, ethertype: ETHERTYPE_ARP},
            arp_body(16'd1, A_MAC, A_IP, 48'h0, LOCAL_IP));
    at.wait_pkt(h, b, ok, 500);
    check(ok && h.dst_mac == A_MAC && same_bytes(b, arp_body(16'd2, LOCAL_MAC, LOCAL_IP, A_MAC, A_IP)), "ARP reply");
    // receive: UDP, other protocol, bad header
    for (int i = 0; i < 40; i++) begin
      bq_t pay;
      logic [15:0] sp, dp;
      int kind;
      kind = i % 4;
      pay = rand_bytes(1 + int'($urandom % 60));
      sp = 16'($urandom); dp = 16'($urandom);
      if (kind == 3)
        rx.send('{dst_mac: LOCAL_MAC, src_mac: A_MAC, ethertype: ETHERTYPE_IPV4},
                ip_packet(A_IP, LOCAL_IP, 8'd17, udp_datagram(A_IP, LOCAL_IP, sp, dp, pay), 1));
      else if (kind == 2) begin
        rx.send('{dst_mac: LOCAL_MAC, src_mac: A_MAC, ethertype: ETHERTYPE_IPV4},
                ip_packet(A_IP, LOCAL_IP, 8'd1, pay));
        ir.wait_pkt(ih, b, ok, 500);
        check(ok && ih == '{src_ip: A_IP, dst_ip: LOCAL_IP, protocol: 8'd1, payload_len: 16'(pay.size())} &&
              same_bytes(b, pay), $sformatf("raw IP %0d to APP_IP_RX", i));
      end else begin
        bq_t d;
        d = udp_datagram(A_IP, LOCAL_IP, sp, dp, pay);
        rx.send('{dst_mac: LOCAL_MAC, src_mac: A_MAC, ethertype: ETHERTYPE_IPV4}, ip_packet(A_IP, LOCAL_IP, 8'd17, d));
        ur.wait_pkt(uh, b, ok, 500);
        check(ok && uh == '{src_ip: A_IP, dst_ip: LOCAL_IP, src_port: sp, dst_port: dp,
                            payload_len: 16'(pay.size()), checksum: {d[6], d[7]}} && same_bytes(b, pay),
              $sformatf("UDP %0d to APP_UDP_RX", i));
      end
    end
    repeat (50) @(posedge clk);
    check(ip_rx_drops == 16'd10, $sformatf("IP drops %0d", ip_rx_drops));
    check(ur.fq.size() == 0 && ir.fq.size() == 0, "nothing extra delivered");
    // transmit: known host, then unknown host (ARP), then raw IP
    for (int i = 0; i < 20; i++) udp_out(A_IP, A_MAC, 0);
    udp_out(B_IP, B_MAC, 1);
    udp_out(B_IP, B_MAC, 0);
    begin
      bq_t pay;
      pay = rand_bytes(33);
      fork ipt.send('{src_ip: LOCAL_IP, dst_ip: B_IP, protocol: 8'd99, payload_len: 16'd33}, pay); join_none
      it.wait_pkt(h, b, ok, 2000);
      check(ok && h.dst_mac == B_MAC && b.size() == 53 && b[9] == 8'd99 &&
            ones_sum(slice(b, 0, 20)) == 16'hFFFF && same_bytes(slice(b, 20, 33), pay), "raw IP transmit");
    end
    check(ip_tx_drops == 0, "no transmit drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
