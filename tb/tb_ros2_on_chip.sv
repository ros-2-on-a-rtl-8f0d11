// tb_ros2_on_chip: end-to-end testbench of the whole chip at its default
// size (1 subscriber, 1 service client, 1 action client, 1 publisher,
// 1 service server, 1 action server: 6 readers and 6 writers).
//
// The testbench plays two remote ROS 2 nodes on the Ethernet segment (peer A
// and peer B) and the local application. It builds every frame from the
// protocol specifications with tb_net_pkg and checks every frame the chip
// sends (Ethernet addresses, IPv4 header checksum, UDP checksum over the
// pseudo-header, RTPS header and submessage bytes) against values it
// computes itself. The data link sinks apply random back-pressure.
// Scenario: ARP request/reply, static discovery in both directions with
// answers, repeated announcements, subscription data (also several
// submessages in one message), a sequence gap with the ACKNACK it causes
// and the repair, a duplicate, publishing, a resend on a remote ACKNACK,
// service responses (own and foreign client), a service server reply, action
// feedback and goal reply, KEEP_LAST history overflow while the application
// stalls, an ARP miss resolved by a request, fan-out to two readers, raw IP
// in both directions at the same time as RTPS traffic, and frames that must
// be filtered. Every mechanism is counted; one that never happened is a
// failure. Latencies from frame end to application and back are printed.
`timescale 1ns/1ps
module tb_ros2_on_chip;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam int NR = 6, NW = 6, NC = 4;

  logic clk = 1'b0, rst = 1'b1;
  always #3.2 clk = ~clk;   // 156.25 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  // ------------------------------------------------------------ addresses
  localparam logic [31:0] LOCAL_IP  = 32'h0A00_0002;
  localparam logic [47:0] LOCAL_MAC = 48'h02_00_00_00_00_02;
  localparam logic [95:0] LOCAL_PFX = 96'h0102_0304_0506_0708_090A_0B0C;
  localparam logic [31:0] A_IP  = 32'h0A00_0009;
  localparam logic [47:0] A_MAC = 48'h02_AA_AA_AA_AA_09;
  localparam logic [95:0] A_PFX = 96'hA1A2_A3A4_A5A6_A7A8_A9AA_ABAC;
  localparam logic [31:0] B_IP  = 32'h0A00_000A;
  localparam logic [47:0] B_MAC = 48'h02_BB_BB_BB_BB_0A;
  localparam logic [95:0] B_PFX = 96'hB1B2_B3B4_B5B6_B7B8_B9BA_BBBC;
  localparam logic [47:0] BCAST = 48'hFF_FF_FF_FF_FF_FF;

  // remote entities
  localparam logic [31:0] A_W_TOPIC0 = 32'h0000_0A02;   // writer -> local reader 0
  localparam logic [31:0] A_W_RESP   = 32'h0000_0A12;   // writer -> local reader 1
  localparam logic [31:0] A_W_FB     = 32'h0000_0A22;   // writer -> local reader 5
  localparam logic [31:0] A_R_TOPIC0 = 32'h0000_0B07;   // reader <- local writer 0
  localparam logic [31:0] A_R_RESP   = 32'h0000_0B17;   // reader <- local writer 1
  localparam logic [31:0] A_R_GOAL   = 32'h0000_0B27;   // reader <- local writer 2
  localparam logic [31:0] B_R_TOPIC0 = 32'h0000_0C07;

  function automatic logic [31:0] rtopic(int i); return 32'h0000_0100 + 32'(i); endfunction
  function automatic logic [31:0] wtopic(int i); return 32'h0000_0200 + 32'(i); endfunction
  function automatic logic [127:0] cguid(int k); return {LOCAL_PFX, 32'h0000_1000 + 32'(k)}; endfunction

  // ------------------------------------------------------------ DUT
  logic [31:0]  reader_topic [NR];
  logic         reader_en    [NR];
  logic [31:0]  writer_topic [NW];
  logic         writer_en    [NW];
  logic [127:0] client_guid  [NC];
  initial begin
    for (int i = 0; i < NR; i++) begin reader_topic[i] = rtopic(i); reader_en[i] = 1'b1; end
    for (int i = 0; i < NW; i++) begin writer_topic[i] = wtopic(i); writer_en[i] = 1'b1; end
    for (int k = 0; k < NC; k++) client_guid[k] = cguid(k);
  end

  logic       rx_hv = 0, rx_hr, rx_tv = 0, rx_tl = 0, rx_tr;
  eth_hdr_t   rx_h = '0;
  logic [7:0] rx_td = 0;
  logic       itx_hv, itx_hr = 0, itx_tv, itx_tl, itx_tr = 0;
  eth_hdr_t   itx_h;
  logic [7:0] itx_td;
  logic       atx_hv, atx_hr = 0, atx_tv, atx_tl, atx_tr = 0;
  eth_hdr_t   atx_h;
  logic [7:0] atx_td;
  logic       aipr_hv, aipr_hr = 1, aipr_tv, aipr_tl, aipr_tr = 1;
  ip_hdr_t    aipr_h;
  logic [7:0] aipr_td;
  logic       aipt_hv = 0, aipt_hr, aipt_tv = 0, aipt_tl = 0, aipt_tr;
  ip_hdr_t    aipt_h = '0;
  logic [7:0] aipt_td = 0;
  logic       arx_v, arx_r = 1;
  ros_msg_t   arx_m;
  logic [7:0] arx_e;
  logic       atxm_v = 0, atxm_r;
  ros_msg_t   atxm_m = '0;
  logic [7:0] atxm_e = 0;
  logic [2:0] peer_idx = 0;
  logic       peer_valid;
  match_t     peer;
  logic [15:0] peer_count, rtps_rx_count, rtps_tx_count, match_count, gap_count, dup_count,
               resend_count, overflow_count, drop_count;

  ros2_on_chip dut (
    .clk, .rst, .local_ip(LOCAL_IP), .local_mac(LOCAL_MAC), .local_guid_prefix(LOCAL_PFX),
    .reader_topic, .reader_en, .writer_topic, .writer_en, .client_guid,
    .dl_rx_hdr_valid(rx_hv), .dl_rx_hdr_ready(rx_hr), .dl_rx_hdr(rx_h), .dl_rx_tdata(rx_td),
    .dl_rx_tvalid(rx_tv), .dl_rx_tlast(rx_tl), .dl_rx_tready(rx_tr),
    .dl_ip_tx_hdr_valid(itx_hv), .dl_ip_tx_hdr_ready(itx_hr), .dl_ip_tx_hdr(itx_h),
    .dl_ip_tx_tdata(itx_td), .dl_ip_tx_tvalid(itx_tv), .dl_ip_tx_tlast(itx_tl), .dl_ip_tx_tready(itx_tr),
    .dl_arp_tx_hdr_valid(atx_hv), .dl_arp_tx_hdr_ready(atx_hr), .dl_arp_tx_hdr(atx_h),
    .dl_arp_tx_tdata(atx_td), .dl_arp_tx_tvalid(atx_tv), .dl_arp_tx_tlast(atx_tl), .dl_arp_tx_tready(atx_tr),
    .app_ip_rx_hdr_valid(aipr_hv), .app_ip_rx_hdr_ready(aipr_hr), .app_ip_rx_hdr(aipr_h),
    .app_ip_rx_tdata(aipr_td), .app_ip_rx_tvalid(aipr_tv), .app_ip_rx_tlast(aipr_tl), .app_ip_rx_tready(aipr_tr),
    .app_ip_tx_hdr_valid(aipt_hv), .app_ip_tx_hdr_ready(aipt_hr), .app_ip_tx_hdr(aipt_h),
    .app_ip_tx_tdata(aipt_td), .app_ip_tx_tvalid(aipt_tv), .app_ip_tx_tlast(aipt_tl), .app_ip_tx_tready(aipt_tr),
    .app_rx_valid(arx_v), .app_rx_ready(arx_r), .app_rx_msg(arx_m), .app_rx_entity(arx_e),
    .app_tx_valid(atxm_v), .app_tx_ready(atxm_r), .app_tx_msg(atxm_m), .app_tx_entity(atxm_e),
    .peer_idx, .peer_valid, .peer, .peer_count,
    .rtps_rx_count, .rtps_tx_count, .match_count, .gap_count, .dup_count, .resend_count,
    .overflow_count, .drop_count);

  // ------------------------------------------------------------ mechanisms
  typedef enum int {
    M_ARP_REPLY, M_ARP_HIT, M_ARP_MISS, M_DISC_MATCH, M_DISC_ANNOUNCE, M_DISC_QUIET, M_PEER_TABLE,
    M_SUBSCRIBE, M_MULTI_SUBMSG, M_GAP_ACKNACK, M_GAP_REPAIR, M_DUP_DROP, M_PUBLISH, M_FANOUT,
    M_RESEND, M_SRV_RESPONSE, M_SRV_FILTER, M_SRV_SERVER, M_ACTION_FB, M_ACTION_GOAL,
    M_KEEP_LAST, M_APP_STALL, M_TX_STALL, M_RAW_IP_RX, M_RAW_IP_TX, M_IP_ARB, M_RX_FILTER, M_NUM
  } mech_e;
  int mech [M_NUM];
  initial for (int i = 0; i < M_NUM; i++) mech[i] = 0;

  // ------------------------------------------------------------ sinks
  bit rand_bp = 1;
  always @(posedge clk) begin
    itx_hr <= !rand_bp || ($urandom % 4 != 0);
    itx_tr <= !rand_bp || ($urandom % 5 != 0);
    atx_hr <= !rand_bp || ($urandom % 3 != 0);
    atx_tr <= !rand_bp || ($urandom % 3 != 0);
  end

  eth_hdr_t ip_hq[$];
  bq_t      ip_fq[$];
  time      ip_tq[$];
  eth_hdr_t arp_hq[$];
  bq_t      arp_fq[$];
  bq_t      ip_cur, arp_cur;
  int       itx_pend = 0, atx_pend = 0;
  always @(posedge clk) begin
    if (!rst) begin
      if (itx_hv && itx_hr) begin ip_hq.push_back(itx_h); itx_pend++; end
      if (itx_tv && !itx_tr) mech[M_TX_STALL]++;
      if (itx_tv && itx_tr) begin
        ip_cur.push_back(itx_td);
        if (itx_tl) begin ip_fq.push_back(ip_cur); ip_tq.push_back($time); ip_cur = {}; end
      end
      if (atx_hv && atx_hr) begin arp_hq.push_back(atx_h); atx_pend++; end
      if (atx_tv && atx_tr) begin
        arp_cur.push_back(atx_td);
        if (atx_tl) begin arp_fq.push_back(arp_cur); arp_cur = {}; end
      end
    end
  end

  // application receive and raw IP receive monitors
  ros_msg_t   app_q[$];
  logic [7:0] app_eq[$];
  time        app_tq[$];
  ip_hdr_t    aipr_hq[$];
  bq_t        aipr_fq[$];
  bq_t        aipr_cur;
  always @(posedge clk) begin
    if (!rst) begin
      if (arx_v && arx_r) begin app_q.push_back(arx_m); app_eq.push_back(arx_e); app_tq.push_back($time); end
      if (arx_v && !arx_r) mech[M_APP_STALL]++;
      if (aipr_hv && aipr_hr) aipr_hq.push_back(aipr_h);
      if (aipr_tv && aipr_tr) begin
        aipr_cur.push_back(aipr_td);
        if (aipr_tl) begin aipr_fq.push_back(aipr_cur); aipr_cur = {}; end
      end
    end
  end

  // ------------------------------------------------------------ drivers
  time rx_end_time;
  // Inputs change just after a falling edge and ready is sampled there, so a
  // transfer is decided by values that are stable up to the rising edge.
  task automatic send_eth(input logic [47:0] dst, input logic [47:0] src, input logic [15:0] et,
                          input bq_t b);
    @(negedge clk);
    rx_hv = 1'b1;
    rx_h  = '{dst_mac: dst, src_mac: src, ethertype: et};
    #0.1;
    while (!rx_hr) begin @(negedge clk); #0.1; end
    @(negedge clk);
    rx_hv = 1'b0;
    for (int i = 0; i < b.size(); i++) begin
      while ($urandom % 8 == 0) begin rx_tv = 1'b0; @(negedge clk); end
      rx_tv = 1'b1; rx_td = b[i]; rx_tl = (i == b.size() - 1);
      #0.1;
      while (!rx_tr) begin @(negedge clk); #0.1; end
      @(negedge clk);
    end
    rx_tv = 1'b0; rx_tl = 1'b0;
    rx_end_time = $time;
  endtask

  task automatic send_ip(input logic [47:0] smac, input logic [31:0] sip, input logic [31:0] dip,
                         input logic [7:0] proto, input bq_t payload, input bit bad = 0);
    send_eth(LOCAL_MAC, smac, ETHERTYPE_IPV4, ip_packet(sip, dip, proto, payload, bad));
  endtask

  task automatic send_rtps(input logic [47:0] smac, input logic [31:0] sip, input logic [15:0] dport,
                           input bq_t msg);
    send_ip(smac, sip, LOCAL_IP, 8'd17, udp_datagram(sip, LOCAL_IP, 16'd7411, dport, msg));
  endtask

  // one RTPS message with one DATA submessage from peer A / B
  task automatic a_data(input logic [31:0] rid, input logic [31:0] wid, input logic [63:0] sn,
                        input bq_t payload, input logic [15:0] dport = 16'd7411);
    bq_t m;
    m = rtps_header(A_PFX);
    append(m, rtps_data(rid, wid, sn, payload));
    send_rtps(A_MAC, A_IP, dport, m);
  endtask

  task automatic announce(input logic [47:0] smac, input logic [31:0] sip, input logic [95:0] pfx,
                          input bit is_writer, input logic [31:0] topic, input logic [31:0] entity,
                          input logic [63:0] sn);
    bq_t m;
    m = rtps_header(pfx);
    append(m, rtps_data(is_writer ? ENTITYID_SEDP_PUB_READER : ENTITYID_SEDP_SUB_READER,
                        is_writer ? ENTITYID_SEDP_PUB_WRITER : ENTITYID_SEDP_SUB_WRITER, sn,
                        disc_payload(topic, entity, sip, 16'd7411)));
    send_rtps(smac, sip, 16'd7410, m);
  endtask

  task automatic app_send(input logic [7:0] ent, input bq_t body, input logic [127:0] g = '0,
                          input logic [63:0] s = '0);
    ros_msg_t m;
    m = '0;
    m.req_guid = g; m.req_seq = s; m.len = plen_t'(body.size());
    foreach (body[i]) m.data[8*i +: 8] = body[i];
    @(negedge clk);
    atxm_v = 1'b1; atxm_m = m; atxm_e = ent;
    #0.1;
    while (!atxm_r) begin @(negedge clk); #0.1; end
    @(negedge clk);
    atxm_v = 1'b0;
  endtask

  // ------------------------------------------------------------ frame checks
  time last_ip_t, last_app_t;
  function automatic bq_t cat2(bq_t a, bq_t b);
    bq_t q;
    q = a;
    append(q, b);
    return q;
  endfunction
  task automatic wait_ip(output eth_hdr_t h, output bq_t f, output bit ok, input int tmo = 4000);
    int n;
    n = 0;
    while (ip_fq.size() == 0 && n < tmo) begin @(posedge clk); n++; end
    ok = (ip_fq.size() != 0);
    if (ok) begin h = ip_hq.pop_front(); f = ip_fq.pop_front(); last_ip_t = ip_tq.pop_front(); end
    else begin h = '0; f = {}; end
  endtask

  // Checks Ethernet/IPv4/UDP of a transmitted frame; returns the UDP payload.
  task automatic check_udp_frame(input eth_hdr_t h, input bq_t f, input logic [47:0] dmac,
                                 input logic [31:0] dip, output bq_t pay, input string what);
    bq_t ih, ud;
    check(h.dst_mac == dmac && h.src_mac == LOCAL_MAC && h.ethertype == ETHERTYPE_IPV4,
          {what, ": Ethernet header"});
    if (f.size() < 28) begin check(0, {what, ": frame too short"}); pay = {}; return; end
    for (int i = 0; i < 20; i++) ih.push_back(f[i]);
    check(f[0] == 8'h45, {what, ": IPv4 version/IHL"});
    check({f[2], f[3]} == 16'(f.size()), {what, ": IPv4 total length"});
    check(ones_sum(ih) == 16'hFFFF, {what, ": IPv4 header checksum"});
    check(f[8] != 0 && f[9] == 8'd17, {what, ": TTL/protocol"});
    check(get32(f, 12) == LOCAL_IP && get32(f, 16) == dip, {what, ": IP addresses"});
    for (int i = 20; i < f.size(); i++) ud.push_back(f[i]);
    check({ud[0], ud[1]} == 16'd7411 && {ud[2], ud[3]} == 16'd7411, {what, ": UDP ports"});
    check({ud[4], ud[5]} == 16'(ud.size()), {what, ": UDP length"});
    begin
      logic [15:0] got;
      bq_t z;
      got = {ud[6], ud[7]};
      z = ud; z[6] = 0; z[7] = 0;
      check(got == udp_csum(LOCAL_IP, dip, z), {what, ": UDP checksum"});
    end
    pay = {};
    for (int i = 8; i < ud.size(); i++) pay.push_back(ud[i]);
  endtask

  // Compares an RTPS message against the expected bytes (skip the last
  // `tail_skip` bytes, used for the ACKNACK count).
  task automatic check_bytes(input bq_t got, input bq_t exp, input int tail_skip, input string what);
    bit same;
    same = (got.size() == exp.size());
    if (same) for (int i = 0; i < exp.size() - tail_skip; i++) if (got[i] !== exp[i]) same = 0;
    check(same, {what, ": RTPS bytes"});
    if (!same) begin
      $write("  got %0d:", got.size()); foreach (got[i]) $write(" %02x", got[i]); $write("\n");
      $write("  exp %0d:", exp.size()); foreach (exp[i]) $write(" %02x", exp[i]); $write("\n");
    end
  endtask

  function automatic bq_t exp_data(logic [31:0] rid, logic [31:0] wid, logic [63:0] sn, bq_t pay);
    bq_t m;
    m = rtps_header(LOCAL_PFX, 16'h0000);
    append(m, rtps_data(rid, wid, sn, pay));
    return m;
  endfunction

  function automatic bq_t exp_ann(bit local_reader, int idx, logic [31:0] topic);
    logic [31:0] ent;
    ent = local_reader ? reader_entity(idx) : writer_entity(idx);
    return exp_data(local_reader ? ENTITYID_SEDP_SUB_READER : ENTITYID_SEDP_PUB_READER,
                    local_reader ? ENTITYID_SEDP_SUB_WRITER : ENTITYID_SEDP_PUB_WRITER, 0,
                    disc_payload(topic, ent, LOCAL_IP, 16'd7411));
  endfunction

  // expected an RTPS frame to (dmac, dip) with the given bytes; the SN of an
  // announcement is not checked (pass sn_skip)
  task automatic expect_rtps(input logic [47:0] dmac, input logic [31:0] dip, input bq_t exp,
                             input bit sn_skip, input int tail_skip, input string what);
    eth_hdr_t h;
    bq_t f, pay;
    bit ok;
    wait_ip(h, f, ok);
    check(ok, {what, ": frame sent"});
    if (!ok) return;
    check_udp_frame(h, f, dmac, dip, pay, what);
    if (sn_skip && pay.size() >= 44) for (int i = 36; i < 44; i++) pay[i] = exp[i];
    check_bytes(pay, exp, tail_skip, what);
  endtask

  task automatic wait_app(output ros_msg_t m, output logic [7:0] e, output bit ok, input int tmo = 2000);
    int n;
    n = 0;
    while (app_q.size() == 0 && n < tmo) begin @(posedge clk); n++; end
    ok = (app_q.size() != 0);
    if (ok) begin m = app_q.pop_front(); e = app_eq.pop_front(); last_app_t = app_tq.pop_front(); end
    else begin m = '0; e = '0; end
  endtask

  function automatic bit body_is(ros_msg_t m, bq_t b);
    if (m.len != plen_t'(b.size())) return 0;
    foreach (b[i]) if (m.data[8*i +: 8] != b[i]) return 0;
    return 1;
  endfunction

  task automatic expect_app(input logic [7:0] ent, input bq_t body, input logic [127:0] g,
                            input logic [63:0] s, input string what);
    ros_msg_t m;
    logic [7:0] e;
    bit ok;
    wait_app(m, e, ok);
    check(ok, {what, ": delivered"});
    if (!ok) return;
    check(e == ent, $sformatf("%s: entity %0d (exp %0d)", what, e, ent));
    check(body_is(m, body), $sformatf("%s: body (len %0d)", what, m.len));
    check(m.req_guid == g && m.req_seq == s, $sformatf("%s: identity seq %0d", what, m.req_seq));
  endtask

  task automatic idle(input int n); repeat (n) @(posedge clk); endtask

  task automatic settle();
    // wait until nothing is in flight in the transmit direction
    idle(600);
  endtask

  // ------------------------------------------------------------ scenario
  int lat_rx, lat_tx;
  initial begin
    bq_t b, m, pay, body;
    eth_hdr_t h;
    bit ok;
    ros_msg_t am;
    logic [7:0] ae;
    logic [15:0] c0, d0, g0, o0;
    time t0;

    repeat (10) @(posedge clk);
    rst <= 1'b0;
    repeat (5) @(posedge clk);

    // ---- ARP: A asks for our MAC
    send_eth(BCAST, A_MAC, ETHERTYPE_ARP, arp_body(16'd1, A_MAC, A_IP, 48'h0, LOCAL_IP));
    begin
      int n = 0;
      while (arp_fq.size() == 0 && n < 500) begin @(posedge clk); n++; end
    end
    check(arp_fq.size() == 1, "ARP reply sent");
    if (arp_fq.size() != 0) begin
      h = arp_hq.pop_front(); b = arp_fq.pop_front();
      check(h.dst_mac == A_MAC && h.src_mac == LOCAL_MAC && h.ethertype == ETHERTYPE_ARP, "ARP reply header");
      check_bytes(b, arp_body(16'd2, LOCAL_MAC, LOCAL_IP, A_MAC, A_IP), 0, "ARP reply");
      mech[M_ARP_REPLY]++;
    end

    // ---- discovery: A's writer on reader 0's topic
    announce(A_MAC, A_IP, A_PFX, 1, rtopic(0), A_W_TOPIC0, 1);
    expect_rtps(A_MAC, A_IP, exp_ann(1, 0, rtopic(0)), 1, 0, "announce reader 0");
    mech[M_ARP_HIT] += (arp_fq.size() == 0);
    check(match_count == 1, "match count after first announcement");
    if (match_count == 1) mech[M_DISC_MATCH]++;
    mech[M_DISC_ANNOUNCE]++;
    // the same announcement again: matched, but not answered
    announce(A_MAC, A_IP, A_PFX, 1, rtopic(0), A_W_TOPIC0, 2);
    idle(300);
    check(ip_fq.size() == 0 && match_count == 2, "repeated announcement not answered");
    if (ip_fq.size() == 0 && match_count == 2) mech[M_DISC_QUIET]++;

    // A's writers for the service response (reader 1) and action feedback (reader 5)
    announce(A_MAC, A_IP, A_PFX, 1, rtopic(1), A_W_RESP, 3);
    expect_rtps(A_MAC, A_IP, exp_ann(1, 1, rtopic(1)), 1, 0, "announce reader 1");
    announce(A_MAC, A_IP, A_PFX, 1, rtopic(5), A_W_FB, 4);
    expect_rtps(A_MAC, A_IP, exp_ann(1, 5, rtopic(5)), 1, 0, "announce reader 5");
    // A's readers for writer 0 (topic), writer 1 (service response), writer 2 (action goal)
    announce(A_MAC, A_IP, A_PFX, 0, wtopic(0), A_R_TOPIC0, 1);
    expect_rtps(A_MAC, A_IP, exp_ann(0, 0, wtopic(0)), 1, 0, "announce writer 0");
    announce(A_MAC, A_IP, A_PFX, 0, wtopic(1), A_R_RESP, 2);
    expect_rtps(A_MAC, A_IP, exp_ann(0, 1, wtopic(1)), 1, 0, "announce writer 1");
    announce(A_MAC, A_IP, A_PFX, 0, wtopic(2), A_R_GOAL, 3);
    expect_rtps(A_MAC, A_IP, exp_ann(0, 2, wtopic(2)), 1, 0, "announce writer 2");
    // an announcement for a topic nobody has
    announce(A_MAC, A_IP, A_PFX, 0, 32'h0000_0999, 32'h0000_0D07, 4);
    idle(300);
    check(ip_fq.size() == 0, "no answer for an unknown topic");
    check(match_count == 7, $sformatf("match count %0d, expected 7", match_count));
    idle(50);
    check(peer_count == 3, $sformatf("peer count %0d, expected 3", peer_count));
    begin
      logic [31:0] exp_ent [3];
      bit all;
      exp_ent = '{A_R_TOPIC0, A_R_RESP, A_R_GOAL};
      all = 1;
      for (int i = 0; i < 3; i++) begin
        peer_idx = 3'(i);
        #1;
        all &= peer_valid && peer.entity_id == exp_ent[i] && peer.guid_prefix == A_PFX &&
               peer.ip == A_IP && peer.port == 16'd7411 && peer.local_idx == 8'(i);
      end
      check(all, "peer table entries");
      if (all) mech[M_PEER_TABLE]++;
    end

    // ---- subscription: DATA sn 1 to reader 0 from A's writer
    body = counting(12, 8'h40);
    a_data(reader_entity(0), A_W_TOPIC0, 1, cdr(body));
    expect_app(8'd0, body, {A_PFX, A_W_TOPIC0}, 1, "subscribe sn 1");
    lat_rx = int'(last_app_t - rx_end_time);
    mech[M_SUBSCRIBE]++;
    // INFO_TS + DATA sn 2 + DATA sn 3 (to ENTITYID_UNKNOWN) in one message
    m = rtps_header(A_PFX);
    append(m, rtps_info_ts());
    append(m, rtps_data(reader_entity(0), A_W_TOPIC0, 2, cdr(counting(5, 8'h50))));
    append(m, rtps_data(ENTITYID_UNKNOWN, A_W_TOPIC0, 3, cdr(counting(7, 8'h60))));
    send_rtps(A_MAC, A_IP, 16'd7411, m);
    expect_app(8'd0, counting(5, 8'h50), {A_PFX, A_W_TOPIC0}, 2, "subscribe sn 2");
    expect_app(8'd0, counting(7, 8'h60), {A_PFX, A_W_TOPIC0}, 3, "subscribe sn 3 (unknown reader id)");
    mech[M_MULTI_SUBMSG]++;

    // ---- gap: sn 5 without 4 -> dropped, ACKNACK asks for 4
    g0 = gap_count;
    a_data(reader_entity(0), A_W_TOPIC0, 5, cdr(counting(3, 8'h75)));
    m = rtps_header(LOCAL_PFX, 16'h0000);
    append(m, rtps_acknack(reader_entity(0), A_W_TOPIC0, 4, 1, 32'h8000_0000));
    expect_rtps(A_MAC, A_IP, m, 0, 4, "ACKNACK for sn 4");
    check(gap_count == g0 + 1, "gap counted");
    check(app_q.size() == 0, "sample after a gap not delivered");
    mech[M_GAP_ACKNACK] += (gap_count == g0 + 1);
    // the repair: 4 and 5 in one message
    m = rtps_header(A_PFX);
    append(m, rtps_data(reader_entity(0), A_W_TOPIC0, 4, cdr(counting(3, 8'h74))));
    append(m, rtps_data(reader_entity(0), A_W_TOPIC0, 5, cdr(counting(3, 8'h75))));
    send_rtps(A_MAC, A_IP, 16'd7411, m);
    expect_app(8'd0, counting(3, 8'h74), {A_PFX, A_W_TOPIC0}, 4, "repair sn 4");
    expect_app(8'd0, counting(3, 8'h75), {A_PFX, A_W_TOPIC0}, 5, "repair sn 5");
    mech[M_GAP_REPAIR]++;
    // duplicate
    d0 = dup_count;
    a_data(reader_entity(0), A_W_TOPIC0, 5, cdr(counting(3, 8'h75)));
    idle(200);
    check(dup_count == d0 + 1 && app_q.size() == 0, "duplicate dropped");
    if (dup_count == d0 + 1) mech[M_DUP_DROP]++;

    // ---- publish on writer 0, four samples
    for (int s = 1; s <= 4; s++) begin
      body = counting(10 + s, 8'(8'h10 * s));
      rand_bp = (s != 1);
      @(posedge clk);
      t0 = $time;
      app_send(8'd0, body);
      expect_rtps(A_MAC, A_IP, exp_data(A_R_TOPIC0, writer_entity(0), 64'(s), cdr(body)), 0, 0,
                  $sformatf("publish sn %0d", s));
      if (s == 1) lat_tx = int'(last_ip_t - t0);
    end
    mech[M_PUBLISH]++;
    // ---- A's reader asks for sn 2 again -> 2, 3, 4 resent
    c0 = resend_count;
    m = rtps_header(A_PFX);
    append(m, rtps_acknack(A_R_TOPIC0, writer_entity(0), 2, 3, 32'hE000_0000));
    send_rtps(A_MAC, A_IP, 16'd7411, m);
    for (int s = 2; s <= 4; s++)
      expect_rtps(A_MAC, A_IP, exp_data(A_R_TOPIC0, writer_entity(0), 64'(s),
                  cdr(counting(10 + s, 8'(8'h10 * s)))), 0, 0, $sformatf("resend sn %0d", s));
    check(resend_count == c0 + 1, "resend counted");
    mech[M_RESEND] += (resend_count == c0 + 1);
    // a pure acknowledgement (empty bitmap) makes no resend
    m = rtps_header(A_PFX);
    append(m, rtps_acknack(A_R_TOPIC0, writer_entity(0), 5, 0, 32'h0));
    send_rtps(A_MAC, A_IP, 16'd7411, m);
    idle(300);
    check(ip_fq.size() == 0, "pure ACK ignored");

    // ---- service client (reader 1): response for client 0, then for another client
    b = cdr(counting(0, 8'h00));
    for (int i = 0; i < 16; i++) b.push_back(cguid(0)[127 - 8*i -: 8]);
    for (int i = 0; i < 8; i++) b.push_back(8'(64'd77 >> (8*i)));
    append(b, counting(9, 8'hC0));
    a_data(reader_entity(1), A_W_RESP, 1, b);
    expect_app(8'd1, counting(9, 8'hC0), cguid(0), 77, "service response");
    mech[M_SRV_RESPONSE]++;
    o0 = drop_count;
    b[10] ^= 8'h01;   // another client's GUID
    a_data(reader_entity(1), A_W_RESP, 2, b);
    idle(200);
    check(app_q.size() == 0 && drop_count == o0 + 1, "response for another client dropped");
    if (app_q.size() == 0 && drop_count == o0 + 1) mech[M_SRV_FILTER]++;

    // ---- service server (writer 1): reply to A's request
    begin
      logic [127:0] rg;
      rg = {A_PFX, 32'h0000_5555};
      body = counting(6, 8'hD0);
      app_send(8'd1, body, rg, 64'h0102);
      b = cdr(counting(0, 8'h00));
      for (int i = 0; i < 16; i++) b.push_back(rg[127 - 8*i -: 8]);
      for (int i = 0; i < 8; i++) b.push_back(8'(64'h0102 >> (8*i)));
      append(b, body);
      expect_rtps(A_MAC, A_IP, exp_data(A_R_RESP, writer_entity(1), 1, b), 0, 0, "service server reply");
      mech[M_SRV_SERVER]++;
      // action goal server (writer 2)
      rg = {A_PFX, 32'h0000_6666};
      body = counting(4, 8'hE0);
      app_send(8'd2, body, rg, 64'd9);
      b = cdr(counting(0, 8'h00));
      for (int i = 0; i < 16; i++) b.push_back(rg[127 - 8*i -: 8]);
      for (int i = 0; i < 8; i++) b.push_back(8'(64'd9 >> (8*i)));
      append(b, body);
      expect_rtps(A_MAC, A_IP, exp_data(A_R_GOAL, writer_entity(2), 1, b), 0, 0, "action goal reply");
      mech[M_ACTION_GOAL]++;
    end
    // ---- action feedback subscriber (reader 5)
    a_data(reader_entity(5), A_W_FB, 1, cdr(counting(8, 8'hF0)));
    expect_app(8'd5, counting(8, 8'hF0), {A_PFX, A_W_FB}, 1, "action feedback");
    mech[M_ACTION_FB]++;

    // ---- KEEP_LAST: application stalls while 8 samples arrive
    arx_r <= 1'b0;
    o0 = overflow_count;
    for (int s = 6; s <= 13; s++) a_data(reader_entity(0), A_W_TOPIC0, 64'(s), cdr(counting(4, 8'(s))));
    idle(200);
    arx_r <= 1'b1;
    idle(100);
    begin
      int n;
      bit incr;
      logic [63:0] prev;
      n = app_q.size();
      incr = 1; prev = 5;
      foreach (app_q[i]) begin
        if (app_q[i].req_seq <= prev || app_eq[i] != 0) incr = 0;
        prev = app_q[i].req_seq;
      end
      check(n > 0 && n < 8, $sformatf("KEEP_LAST kept %0d of 8", n));
      check(incr && prev == 13, "KEEP_LAST order and newest kept");
      check(int'(overflow_count - o0) == 8 - n, $sformatf("overflow count %0d", overflow_count - o0));
      if (n < 8 && overflow_count != o0) mech[M_KEEP_LAST]++;
      app_q = {}; app_eq = {}; app_tq = {};
    end

    // ---- B (not in the ARP cache) announces a reader on writer 0's topic
    announce(B_MAC, B_IP, B_PFX, 0, wtopic(0), B_R_TOPIC0, 1);
    begin
      int n = 0;
      while (arp_fq.size() == 0 && n < 1000) begin @(posedge clk); n++; end
    end
    check(arp_fq.size() == 1, "ARP request on a miss");
    if (arp_fq.size() != 0) begin
      h = arp_hq.pop_front(); b = arp_fq.pop_front();
      check(h.dst_mac == BCAST && h.ethertype == ETHERTYPE_ARP, "ARP request header");
      check_bytes(b, arp_body(16'd1, LOCAL_MAC, LOCAL_IP, 48'h0, B_IP), 0, "ARP request");
      mech[M_ARP_MISS]++;
    end
    idle(20);
    check(ip_fq.size() == 0, "packet held until the address is known");
    send_eth(LOCAL_MAC, B_MAC, ETHERTYPE_ARP, arp_body(16'd2, B_MAC, B_IP, LOCAL_MAC, LOCAL_IP));
    expect_rtps(B_MAC, B_IP, exp_ann(0, 0, wtopic(0)), 1, 0, "announce writer 0 to B");
    // publish sn 5 goes to A and to B
    body = counting(5, 8'hA5);
    app_send(8'd0, body);
    expect_rtps(A_MAC, A_IP, exp_data(A_R_TOPIC0, writer_entity(0), 5, cdr(body)), 0, 0, "fan-out to A");
    expect_rtps(B_MAC, B_IP, exp_data(B_R_TOPIC0, writer_entity(0), 5, cdr(body)), 0, 0, "fan-out to B");
    mech[M_FANOUT]++;

    // ---- raw IP in both directions while RTPS traffic flows
    send_ip(A_MAC, A_IP, LOCAL_IP, 8'd1, counting(24, 8'h33));
    idle(100);
    check(aipr_fq.size() == 1, "raw IP delivered");
    if (aipr_fq.size() == 1) begin
      ip_hdr_t ih;
      ih = aipr_hq.pop_front();
      b = aipr_fq.pop_front();
      check(ih.src_ip == A_IP && ih.dst_ip == LOCAL_IP && ih.protocol == 8'd1 && ih.payload_len == 16'd24,
            "raw IP header record");
      check_bytes(b, counting(24, 8'h33), 0, "raw IP payload");
      mech[M_RAW_IP_RX]++;
    end
    fork
      begin
        @(negedge clk);
        aipt_h = '{src_ip: LOCAL_IP, dst_ip: A_IP, protocol: 8'h99, payload_len: 16'd16};
        aipt_hv = 1'b1;
        #0.1;
        while (!aipt_hr) begin @(negedge clk); #0.1; end
        @(negedge clk);
        aipt_hv = 1'b0;
        for (int i = 0; i < 16; i++) begin
          aipt_tv = 1'b1; aipt_td = 8'(8'h80 + i); aipt_tl = (i == 15);
          #0.1;
          while (!aipt_tr) begin @(negedge clk); #0.1; end
          @(negedge clk);
        end
        aipt_tv = 1'b0; aipt_tl = 1'b0;
      end
      app_send(8'd0, counting(3, 8'h01));
    join
    begin
      bit got_raw, got_rtps;
      got_raw = 0; got_rtps = 0;
      for (int k = 0; k < 2; k++) begin
        wait_ip(h, b, ok);
        if (!ok) continue;
        if (b.size() > 9 && b[9] == 8'h99) begin
          bq_t ih;
          for (int i = 0; i < 20; i++) ih.push_back(b[i]);
          check(h.dst_mac == A_MAC && ones_sum(ih) == 16'hFFFF && get32(b, 16) == A_IP &&
                b.size() == 36 && b[20] == 8'h80 && b[35] == 8'h8F, "raw IP frame");
          got_raw = 1;
        end else begin
          check_udp_frame(h, b, A_MAC, A_IP, pay, "RTPS next to raw IP");
          check_bytes(pay, exp_data(A_R_TOPIC0, writer_entity(0), 6, cdr(counting(3, 8'h01))), 0,
                      "publish sn 6");
          got_rtps = 1;
        end
      end
      check(got_raw && got_rtps, "raw IP and RTPS both sent");
      if (got_raw) mech[M_RAW_IP_TX]++;
      if (got_raw && got_rtps) mech[M_IP_ARB]++;
      // B also gets sn 6
      expect_rtps(B_MAC, B_IP, exp_data(B_R_TOPIC0, writer_entity(0), 6, cdr(counting(3, 8'h01))), 0, 0,
                  "publish sn 6 to B");
    end

    // ---- filtering: bad IP checksum, other host, other UDP port, not RTPS
    o0 = drop_count;
    c0 = rtps_rx_count;
    send_ip(A_MAC, A_IP, LOCAL_IP, 8'd17,
            udp_datagram(A_IP, LOCAL_IP, 16'd7411, 16'd7411,
                         cat2(rtps_header(A_PFX), rtps_data(reader_entity(0), A_W_TOPIC0, 14, cdr(counting(2, 0))))), 1);
    send_ip(A_MAC, A_IP, 32'h0A00_0077, 8'd17,
            udp_datagram(A_IP, 32'h0A00_0077, 16'd7411, 16'd7411,
                         cat2(rtps_header(A_PFX), rtps_data(reader_entity(0), A_W_TOPIC0, 14, cdr(counting(2, 0))))));
    send_ip(A_MAC, A_IP, LOCAL_IP, 8'd17,
            udp_datagram(A_IP, LOCAL_IP, 16'd7411, 16'd9999,
                         cat2(rtps_header(A_PFX), rtps_data(reader_entity(0), A_W_TOPIC0, 14, cdr(counting(2, 0))))));
    begin
      bq_t junk;
      junk = rtps_header(A_PFX);
      junk[0] = 8'h58;
      append(junk, rtps_data(reader_entity(0), A_W_TOPIC0, 14, cdr(counting(2, 0))));
      send_rtps(A_MAC, A_IP, 16'd7411, junk);
    end
    idle(300);
    check(app_q.size() == 0 && aipr_fq.size() == 0, "filtered frames not delivered");
    check(drop_count == o0 + 4, $sformatf("four drops counted (%0d)", drop_count - o0));
    if (app_q.size() == 0 && drop_count == o0 + 4) mech[M_RX_FILTER]++;
    // still working afterwards
    a_data(reader_entity(0), A_W_TOPIC0, 14, cdr(counting(2, 0)));
    expect_app(8'd0, counting(2, 0), {A_PFX, A_W_TOPIC0}, 14, "after filtering");
    check(rtps_rx_count != c0, "RTPS receive counter moves");

    idle(200);
    check(ip_fq.size() == 0 && arp_fq.size() == 0, "no unexpected frames");

    $display("latency: end of DATA frame -> application %0d ns (%0d cycles)", lat_rx, lat_rx * 10 / 64);
    $display("latency: application write -> last frame byte sent %0d ns (%0d cycles)", lat_tx, lat_tx * 10 / 64);
    $display("counters: rtps rx %0d tx %0d match %0d gap %0d dup %0d resend %0d overflow %0d drop %0d",
             rtps_rx_count, rtps_tx_count, match_count, gap_count, dup_count, resend_count,
             overflow_count, drop_count);
    for (int i = 0; i < M_NUM; i++) begin
      mech_e e;
      e = mech_e'(i);
      $display("mechanism %-16s %0d", e.name(), mech[i]);
      check(mech[i] > 0, $sformatf("mechanism %s happened", e.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
