// tb_rtps_dds_core: self-checking testbench of rtps_dds_core with two
// readers and two writers.
// A remote participant talks to the core over the UDP record/stream ports;
// every RTPS message is built with tb_net_pkg. Sequence:
//   1. it announces a writer on reader 0's topic: the core must answer with
//      reader 0's announcement (datagram to the remote locator);
//   2. it announces a reader on writer 0's topic: writer 0's announcement
//      and a DISCOVER event must follow;
//   3. DATA SN 1..3 to reader 0 must come out on ROS_RX[0] in order, and
//      nothing on ROS_RX[1];
//   4. DATA SN 5 (SN 4 lost) must produce an ACKNACK asking for SN 4;
//   5. two samples written on ROS_TX[0] must leave as DATA SN 1 and 2 to
//      the remote reader;
//   6. an ACKNACK from the remote reader for SN 1 must resend SN 1 and 2.
// Transmitted datagrams are checked byte for byte (announcement SNs and the
// ACKNACK count excepted) along with their UDP records; the status counters
// are checked at the end. The UDP transmit side uses random ready.
`timescale 1ns/1ps
module tb_rtps_dds_core;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam int NR = 2, NW = 2;
  localparam logic [31:0] LOCAL_IP  = 32'h0A00_0002;
  localparam logic [95:0] LOCAL_PFX = 96'h0102_0304_0506_0708_090A_0B0C;
  localparam logic [31:0] P_IP  = 32'h0A00_0063;
  localparam logic [95:0] P_PFX = 96'hABCD_0000_1111_2222_3333_4444;
  localparam logic [31:0] T0 = 32'h0000_1001, T1 = 32'h0000_1002;
  localparam logic [31:0] P_WR = 32'h0000_0103, P_RD = 32'h0000_0204;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic [31:0] reader_topic [NR] = '{T0, T1}, writer_topic [NW] = '{T1, T0};
  logic        reader_en [NR] = '{1, 1}, writer_en [NW] = '{1, 1};
  logic rx_hv, rx_hr, rx_tv, rx_tl, rx_tr, tx_hv, tx_hr, tx_tv, tx_tl, tx_tr;
  udp_hdr_t rx_h, tx_h;
  logic [7:0] rx_td, tx_td;
  logic ros_rx_valid [NR], ros_rx_ready [NR] = '{1, 1};
  sample_t ros_rx_sample [NR];
  logic ros_tx_valid [NW] = '{0, 0}, ros_tx_ready [NW];
  sample_t ros_tx_sample [NW] = '{default: '0};
  logic discover_valid, discover_ready = 1;
  match_t discover;
  logic [15:0] rx_msg_count, tx_msg_count, match_count, gap_count, dup_count, resend_count, overflow_count, drop_count;

  rtps_dds_core #(.NUM_READERS(NR), .NUM_WRITERS(NW)) dut (.clk, .rst, .local_guid_prefix(LOCAL_PFX),
    .local_ip(LOCAL_IP), .reader_topic, .reader_en, .writer_topic, .writer_en,
    .udp_rx_hdr_valid(rx_hv), .udp_rx_hdr_ready(rx_hr), .udp_rx_hdr(rx_h), .udp_rx_tdata(rx_td),
    .udp_rx_tvalid(rx_tv), .udp_rx_tlast(rx_tl), .udp_rx_tready(rx_tr),
    .udp_tx_hdr_valid(tx_hv), .udp_tx_hdr_ready(tx_hr), .udp_tx_hdr(tx_h), .udp_tx_tdata(tx_td),
    .udp_tx_tvalid(tx_tv), .udp_tx_tlast(tx_tl), .udp_tx_tready(tx_tr),
    .ros_rx_valid, .ros_rx_ready, .ros_rx_sample, .ros_tx_valid, .ros_tx_ready, .ros_tx_sample,
    .discover_valid, .discover_ready, .discover, .rx_msg_count, .tx_msg_count, .match_count, .gap_count,
    .dup_count, .resend_count, .overflow_count, .drop_count);

  tb_stream_src  #(.H(udp_hdr_t)) src (.clk, .hv(rx_hv), .hr(rx_hr), .h(rx_h), .td(rx_td), .tv(rx_tv), .tl(rx_tl), .tr(rx_tr));
  tb_stream_sink #(.H(udp_hdr_t)) snk (.clk, .rst, .hv(tx_hv), .hr(tx_hr), .h(tx_h), .td(tx_td), .tv(tx_tv), .tl(tx_tl), .tr(tx_tr));

  sample_t rxq [NR][$];
  match_t  discq [$];
  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < NR; i++) if (ros_rx_valid[i] && ros_rx_ready[i]) rxq[i].push_back(ros_rx_sample[i]);
    if (discover_valid && discover_ready) discq.push_back(discover);
  end

  task automatic remote(input logic [15:0] dport, input bq_t sub);
    bq_t m;
    m = rtps_header(P_PFX);
    append(m, sub);
    src.send('{src_ip: P_IP, dst_ip: LOCAL_IP, src_port: 16'd7411, dst_port: dport,
               payload_len: 16'(m.size()), checksum: 16'h0}, m);
  endtask

  // expect one datagram to the remote participant with bytes exp
  // (SN of an announcement and the trailing ACKNACK count not compared)
  task automatic expect_dgram(input bq_t sub, input bit sn_skip, input int tail_skip, input string what);
    udp_hdr_t h;
    bq_t b, e;
    bit ok;
    e = rtps_header(LOCAL_PFX, 16'h0000);
    append(e, sub);
    snk.wait_pkt(h, b, ok, 3000);
    check(ok, {what, ": datagram sent"});
    if (!ok) return;
    check(h.src_ip == LOCAL_IP && h.dst_ip == P_IP && h.src_port == 16'd7411 && h.dst_port == 16'd7411 &&
          h.payload_len == 16'(b.size()), {what, ": UDP record"});
    if (b.size() == e.size()) begin
      if (sn_skip) for (int i = 36; i < 44; i++) e[i] = b[i];
      for (int i = e.size() - tail_skip; i < e.size(); i++) e[i] = b[i];
    end
    check(same_bytes(b, e), {what, ": RTPS bytes"});
    if (!same_bytes(b, e)) begin show("got", b); show("exp", e); end
  endtask

  task automatic write_tx(input int w, input bq_t p);
    sample_t s;
    s = '0;
    s.len = plen_t'(p.size());
    s.data = pload(p);
    @(negedge clk);
    ros_tx_valid[w] = 1; ros_tx_sample[w] = s;
    #0.1;
    while (!ros_tx_ready[w]) begin @(negedge clk); #0.1; end
    @(negedge clk);
    ros_tx_valid[w] = 0;
  endtask

  bq_t pay [6];
  initial begin
    for (int i = 0; i < 6; i++) pay[i] = cdr(rand_bytes(8 + 8 * i));
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (5) @(posedge clk);

    // 1. remote writer on T0
    remote(16'd7410, rtps_data(ENTITYID_SEDP_PUB_READER, ENTITYID_SEDP_PUB_WRITER, 1,
                               disc_payload(T0, P_WR, P_IP, 16'd7411)));
    expect_dgram(rtps_data(ENTITYID_SEDP_SUB_READER, ENTITYID_SEDP_SUB_WRITER, 0,
                           disc_payload(T0, 32'h0000_0104, LOCAL_IP, 16'd7411)), 1, 0, "reader 0 announcement");
    // 2. remote reader on T1 (writer 0's topic)
    remote(16'd7410, rtps_data(ENTITYID_SEDP_SUB_READER, ENTITYID_SEDP_SUB_WRITER, 1,
                               disc_payload(T1, P_RD, P_IP, 16'd7411)));
    expect_dgram(rtps_data(ENTITYID_SEDP_PUB_READER, ENTITYID_SEDP_PUB_WRITER, 0,
                           disc_payload(T1, 32'h0000_0103, LOCAL_IP, 16'd7411)), 1, 0, "writer 0 announcement");
    repeat (20) @(posedge clk);
    check(discq.size() == 1 && discq[0] == '{8'd0, P_PFX, P_RD, P_IP, 16'd7411}, "DISCOVER event");
    // 3. DATA 1..3 to reader 0
    for (int s = 1; s <= 3; s++) remote(16'd7411, rtps_data(32'h0000_0104, P_WR, 64'(s), pay[s]));
    repeat (50) @(posedge clk);
    check(rxq[0].size() == 3, "three samples on ROS_RX[0]");
    for (int s = 1; s <= 3; s++)
      if (rxq[0].size() > 0) begin
        sample_t g;
        g = rxq[0].pop_front();
        check(g.guid_prefix == P_PFX && g.writer_id == P_WR && g.sn == 64'(s), $sformatf("sample %0d source", s));
        check(int'(g.len) == pay[s].size() && same_bytes(pbytes(g.data, pay[s].size()), pay[s]), $sformatf("sample %0d data", s));
      end
    check(rxq[1].size() == 0, "nothing on ROS_RX[1]");
    // 4. gap
    remote(16'd7411, rtps_data(32'h0000_0104, P_WR, 64'd5, pay[5]));
    expect_dgram(rtps_acknack(32'h0000_0104, P_WR, 64'd4, 1, 32'h8000_0000), 0, 4, "ACKNACK for SN 4");
    repeat (20) @(posedge clk);
    check(rxq[0].size() == 0, "SN 5 not delivered before SN 4");
    // 5. local writer 0 publishes
    write_tx(0, pay[0]);
    write_tx(0, pay[1]);
    expect_dgram(rtps_data(P_RD, 32'h0000_0103, 64'd1, pay[0]), 0, 0, "DATA SN 1");
    expect_dgram(rtps_data(P_RD, 32'h0000_0103, 64'd2, pay[1]), 0, 0, "DATA SN 2");
    // 6. remote reader asks for SN 1 again
    remote(16'd7411, rtps_acknack(P_RD, 32'h0000_0103, 64'd1, 1, 32'h8000_0000));
    expect_dgram(rtps_data(P_RD, 32'h0000_0103, 64'd1, pay[0]), 0, 0, "resent SN 1");
    expect_dgram(rtps_data(P_RD, 32'h0000_0103, 64'd2, pay[1]), 0, 0, "resent SN 2");
    repeat (50) @(posedge clk);
    check(snk.fq.size() == 0, "no further datagrams");
    check(match_count == 16'd2, $sformatf("match_count %0d", match_count));
    check(gap_count == 16'd1 && resend_count == 16'd1 && dup_count == 16'd0, "gap/resend/dup counters");
    check(tx_msg_count == 16'd7, $sformatf("tx_msg_count %0d", tx_msg_count));
    check(rx_msg_count == 16'd7, $sformatf("rx_msg_count %0d", rx_msg_count));
    check(drop_count == 16'd0 && overflow_count == 16'd0, "no drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
