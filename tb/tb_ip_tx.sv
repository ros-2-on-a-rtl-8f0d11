// tb_ip_tx: self-checking testbench of ip_tx (ARP_TIMEOUT reduced to 200
// cycles to keep the run short).
// The testbench models the ARP cache: a table that answers lookups in the
// same cycle and records every ARP request pulse. Random packets go to
// cached hosts, multicast and broadcast addresses; each frame must have the
// right Ethernet header and an IPv4 header equal to one built independently
// (version/IHL 0x45, total length, DF, TTL 64, protocol, addresses, valid
// checksum) followed by the payload. A host missing from the cache must
// cause exactly one ARP request; when the testbench then fills the entry the
// packet goes out; when it never does, the packet is dropped after the
// timeout, counted, and the next packet still goes out.
`timescale 1ns/1ps
module tb_ip_tx;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  localparam logic [47:0] LOCAL_MAC = 48'h02_00_00_00_00_01;

  logic s_hv, s_hr, s_tv, s_tl, s_tr, m_hv, m_hr, m_tv, m_tl, m_tr;
  ip_hdr_t  s_h;
  eth_hdr_t m_h;
  logic [7:0] s_td, m_td;
  logic [31:0] lk_ip, rq_ip;
  logic lk_hit, rq_v;
  logic [47:0] lk_mac;
  logic [15:0] drop_count;

  ip_tx #(.ARP_TIMEOUT(200)) dut (.clk, .rst, .local_mac(LOCAL_MAC),
    .s_hdr_valid(s_hv), .s_hdr_ready(s_hr), .s_hdr(s_h), .s_tdata(s_td), .s_tvalid(s_tv),
    .s_tlast(s_tl), .s_tready(s_tr),
    .m_hdr_valid(m_hv), .m_hdr_ready(m_hr), .m_hdr(m_h), .m_tdata(m_td), .m_tvalid(m_tv),
    .m_tlast(m_tl), .m_tready(m_tr),
    .arp_lookup_ip(lk_ip), .arp_lookup_hit(lk_hit), .arp_lookup_mac(lk_mac),
    .arp_req_valid(rq_v), .arp_req_ip(rq_ip), .drop_count);
  tb_stream_src  #(.H(ip_hdr_t))  src (.clk, .hv(s_hv), .hr(s_hr), .h(s_h), .td(s_td), .tv(s_tv), .tl(s_tl), .tr(s_tr));
  tb_stream_sink #(.H(eth_hdr_t)) snk (.clk, .rst, .hv(m_hv), .hr(m_hr), .h(m_h), .td(m_td), .tv(m_tv), .tl(m_tl), .tr(m_tr));

  // ARP cache model
  logic [47:0] cache[logic [31:0]];
  always_comb begin
    lk_hit = cache.exists(lk_ip);
    lk_mac = lk_hit ? cache[lk_ip] : 48'h0;
  end
  logic [31:0] reqs[$];
  always @(posedge clk) if (!rst && rq_v) reqs.push_back(rq_ip);

  function automatic bq_t exp_frame(ip_hdr_t h, bq_t pay, bq_t got);
    bq_t e;
    logic [15:0] c;
    e = ip_packet(h.src_ip, h.dst_ip, h.protocol, pay);
    if (got.size() >= 6) begin e[4] = got[4]; e[5] = got[5]; end   // identification: free
    e[6] = 8'h40; e[7] = 8'h00;                                    // DF
    e[10] = 0; e[11] = 0;
    c = ~ones_sum(slice(e, 0, 20));
    e[10] = c[15:8]; e[11] = c[7:0];
    return e;
  endfunction

  task automatic expect_frame(input ip_hdr_t h, input bq_t pay, input logic [47:0] dmac, input string what);
    eth_hdr_t eh;
    bq_t b;
    bit ok;
    snk.wait_pkt(eh, b, ok, 3000);
    check(ok, {what, ": frame"});
    if (!ok) return;
    check(eh == '{dst_mac: dmac, src_mac: LOCAL_MAC, ethertype: ETHERTYPE_IPV4}, {what, ": Ethernet header"});
    check(same_bytes(b, exp_frame(h, pay, b)), {what, ": bytes"});
    if (!same_bytes(b, exp_frame(h, pay, b))) begin show("got", b); show("exp", exp_frame(h, pay, b)); end
  endtask

  initial begin
    ip_hdr_t h;
    bq_t pay;
    logic [15:0] id0;
    repeat (5) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 8; i++) cache[32'h0A00_0100 + 32'(i)] = {16'h02AA, 32'(i * 77)};
    // cached, multicast and broadcast destinations
    for (int i = 0; i < 60; i++) begin
      int r;
      r = int'($urandom % 4);
      h.src_ip = 32'h0A00_0001;
      h.dst_ip = (r < 2) ? 32'h0A00_0100 + ($urandom % 8) : (r == 2) ? 32'hE000_0000 | $urandom % 32'h1000_0000
                                                            : 32'hFFFF_FFFF;
      h.protocol = 8'($urandom);
      pay = rand_bytes(1 + int'($urandom % 50));
      h.payload_len = 16'(pay.size());
      fork src.send(h, pay); join_none
      expect_frame(h, pay, (r < 2) ? cache[h.dst_ip] : (r == 2) ? {24'h01005E, 1'b0, h.dst_ip[22:0]}
                                                       : 48'hFFFF_FFFF_FFFF, $sformatf("packet %0d", i));
    end
    check(reqs.size() == 0, "no ARP request for cached, multicast or broadcast");
    // miss, then the cache learns the address
    h = '{src_ip: 32'h0A00_0001, dst_ip: 32'h0A00_0200, protocol: 8'd17, payload_len: 16'd20};
    pay = rand_bytes(20);
    fork src.send(h, pay); join_none
    repeat (60) @(posedge clk);
    check(reqs.size() == 1 && reqs[0] == 32'h0A00_0200, "one ARP request on a miss");
    check(snk.fq.size() == 0, "packet waits for the address");
    cache[32'h0A00_0200] = 48'h02CC_CCCC_CC00;
    expect_frame(h, pay, 48'h02CC_CCCC_CC00, "after ARP");
    reqs.delete();
    // miss that is never answered
    h.dst_ip = 32'h0A00_0300;
    pay = rand_bytes(30);
    h.payload_len = 16'd30;
    fork src.send(h, pay); join_none
    repeat (400) @(posedge clk);
    check(reqs.size() == 1, $sformatf("one ARP request for the unanswered miss (%0d)", reqs.size()));
    check(drop_count == 16'd1, "timeout drop counted");
    check(snk.fq.size() == 0, "timed-out packet not sent");
    h.dst_ip = 32'h0A00_0101;
    pay = rand_bytes(9);
    h.payload_len = 16'd9;
    fork src.send(h, pay); join_none
    expect_frame(h, pay, cache[32'h0A00_0101], "after the drop");
    check(snk.stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
