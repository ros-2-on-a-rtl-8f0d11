// rtps_dds_core: the RTPS and DDS sub-core, wired as in the paper's
// RTPS/DDS data-flow diagram.
//
// Receive: APP_UDP_RX -> RTPS_IN_PARSER -> RTPS_DECODER, whose three FIFOs
// feed (0) all RTPS readers, (1) RTPS_DISCOVERY and (2) all RTPS writers.
// A record for the readers (or writers) is offered to all of them at once
// and leaves the FIFO only when every one that wants it can take it.
// RTPS_DISCOVERY's matches go to the reader or writer they name; its
// announcements go to RTPS_OUT.
// Each of the NUM_READERS RTPS readers feeds its own DDS reader, whose
// samples leave on ROS_RX[i]; each of the NUM_WRITERS DDS writers takes
// samples from ROS_TX[i] and feeds its own RTPS writer.
// Transmit: RTPS_OUT takes writer DATA (merged round-robin), discovery
// announcements and reader ACKNACKs (merged round-robin) and sends each as
// a UDP datagram on APP_UDP_TX. The writers' DISCOVER events are merged
// round-robin onto one output for the ROS 2 layer.
// Local reader i has entity id {0, i+1, 0x04}, local writer i {0, i+1,
// 0x03}; reader_topic/writer_topic give each endpoint's 32-bit topic id.
module rtps_dds_core
  import ros2_chip_pkg::*;
#(
  parameter int NUM_READERS   = 6,
  parameter int NUM_WRITERS   = 6,
  parameter int FIFO_DEPTH    = 4,
  parameter int MATCH_ENTRIES = 4,
  parameter int HISTORY_DEPTH = 4,
  parameter int DOMAIN_ID     = 0,
  parameter int PARTICIPANT_ID = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [95:0] local_guid_prefix,
  input  logic [31:0] local_ip,
  input  logic [31:0] reader_topic [NUM_READERS],
  input  logic        reader_en    [NUM_READERS],
  input  logic [31:0] writer_topic [NUM_WRITERS],
  input  logic        writer_en    [NUM_WRITERS],
  // APP_UDP_RX
  input  logic        udp_rx_hdr_valid,
  output logic        udp_rx_hdr_ready,
  input  udp_hdr_t    udp_rx_hdr,
  input  logic [7:0]  udp_rx_tdata,
  input  logic        udp_rx_tvalid,
  input  logic        udp_rx_tlast,
  output logic        udp_rx_tready,
  // APP_UDP_TX
  output logic        udp_tx_hdr_valid,
  input  logic        udp_tx_hdr_ready,
  output udp_hdr_t    udp_tx_hdr,
  output logic [7:0]  udp_tx_tdata,
  output logic        udp_tx_tvalid,
  output logic        udp_tx_tlast,
  input  logic        udp_tx_tready,
  // ROS_RX
  output logic        ros_rx_valid  [NUM_READERS],
  input  logic        ros_rx_ready  [NUM_READERS],
  output sample_t     ros_rx_sample [NUM_READERS],
  // ROS_TX
  input  logic        ros_tx_valid  [NUM_WRITERS],
  output logic        ros_tx_ready  [NUM_WRITERS],
  input  sample_t     ros_tx_sample [NUM_WRITERS],
  // DISCOVER
  output logic        discover_valid,
  input  logic        discover_ready,
  output match_t      discover,
  // status
  output logic [15:0] rx_msg_count,
  output logic [15:0] tx_msg_count,
  output logic [15:0] match_count,
  output logic [15:0] gap_count,
  output logic [15:0] dup_count,
  output logic [15:0] resend_count,
  output logic [15:0] overflow_count,
  output logic [15:0] drop_count
);
  // ---------------------------------------------------------- parser + decoder
  logic      p_valid, p_ready;
  rtps_msg_t p_msg;
  logic [15:0] p_drop, d_drop;
  rtps_in_parser #(.DOMAIN_ID(DOMAIN_ID), .PARTICIPANT_ID(PARTICIPANT_ID)) u_parser (
    .clk, .rst,
    .s_hdr_valid(udp_rx_hdr_valid), .s_hdr_ready(udp_rx_hdr_ready), .s_hdr(udp_rx_hdr),
    .s_tdata(udp_rx_tdata), .s_tvalid(udp_rx_tvalid), .s_tlast(udp_rx_tlast), .s_tready(udp_rx_tready),
    .m_valid(p_valid), .m_ready(p_ready), .m_msg(p_msg),
    .msg_count(rx_msg_count), .drop_count(p_drop));

  logic      d_valid [3], d_ready [3];
  rtps_msg_t d_msg   [3];
  rtps_decoder #(.FIFO_DEPTH(FIFO_DEPTH)) u_decoder (
    .clk, .rst, .s_valid(p_valid), .s_ready(p_ready), .s_msg(p_msg),
    .m_valid(d_valid), .m_ready(d_ready), .m_msg(d_msg), .drop_count(d_drop));

  // ---------------------------------------------------------- discovery
  logic   rm_valid, rm_ready, wm_valid, wm_ready, an_valid, an_ready;
  match_t rm, wm;
  rtps_msg_t an_msg;
  rtps_discovery #(.NUM_READERS(NUM_READERS), .NUM_WRITERS(NUM_WRITERS),
                   .FIFO_DEPTH(FIFO_DEPTH)) u_discovery (
    .clk, .rst, .local_ip,
    .reader_topic, .reader_en, .writer_topic, .writer_en,
    .s_valid(d_valid[1]), .s_ready(d_ready[1]), .s_msg(d_msg[1]),
    .rd_match_valid(rm_valid), .rd_match_ready(rm_ready), .rd_match(rm),
    .out_valid(an_valid), .out_ready(an_ready), .out_msg(an_msg),
    .wr_match_valid(wm_valid), .wr_match_ready(wm_ready), .wr_match(wm),
    .match_count);

  // ---------------------------------------------------------- readers
  logic      r_want [NUM_READERS], r_ready [NUM_READERS], r_mready [NUM_READERS];
  logic      r_ack_valid [NUM_READERS], r_ack_ready [NUM_READERS];
  rtps_msg_t r_ack [NUM_READERS];
  logic      r_s_valid [NUM_READERS], r_s_ready [NUM_READERS];
  sample_t   r_s [NUM_READERS];
  logic [15:0] r_dup [NUM_READERS], r_gap [NUM_READERS], r_ovf [NUM_READERS];
  logic      rd_all_ok;

  always_comb begin
    rd_all_ok = 1'b1;
    rm_ready  = 1'b0;
    for (int i = 0; i < NUM_READERS; i++) begin
      if (r_want[i] && !r_ready[i]) rd_all_ok = 1'b0;
      if (r_mready[i]) rm_ready = 1'b1;
    end
    d_ready[0] = rd_all_ok;
  end

  for (genvar i = 0; i < NUM_READERS; i++) begin : g_rd
    rtps_reader #(.IDX(i), .MATCH_ENTRIES(MATCH_ENTRIES), .PAYLOAD_DEPTH(HISTORY_DEPTH)) u_rtps_reader (
      .clk, .rst,
      .s_valid(d_valid[0] && rd_all_ok), .s_want(r_want[i]), .s_ready(r_ready[i]), .s_msg(d_msg[0]),
      .match_valid(rm_valid), .match_ready(r_mready[i]), .match_in(rm),
      .ack_valid(r_ack_valid[i]), .ack_ready(r_ack_ready[i]), .ack_msg(r_ack[i]),
      .m_valid(r_s_valid[i]), .m_ready(r_s_ready[i]), .m_sample(r_s[i]),
      .dup_count(r_dup[i]), .gap_count(r_gap[i]));
    dds_reader #(.HISTORY_DEPTH(HISTORY_DEPTH)) u_dds_reader (
      .clk, .rst,
      .s_valid(r_s_valid[i]), .s_ready(r_s_ready[i]), .s_sample(r_s[i]),
      .m_valid(ros_rx_valid[i]), .m_ready(ros_rx_ready[i]), .m_sample(ros_rx_sample[i]),
      .overflow_count(r_ovf[i]), .take_count());
  end

  // ---------------------------------------------------------- writers
  logic      w_ack_ready [NUM_WRITERS], w_mready [NUM_WRITERS];
  logic      w_valid [NUM_WRITERS], w_ready [NUM_WRITERS];
  rtps_msg_t w_msg [NUM_WRITERS];
  logic      w_disc_valid [NUM_WRITERS], w_disc_ready [NUM_WRITERS];
  match_t    w_disc [NUM_WRITERS];
  logic      w_s_valid [NUM_WRITERS], w_s_ready [NUM_WRITERS];
  sample_t   w_s [NUM_WRITERS];
  logic [63:0] w_last [NUM_WRITERS];
  logic [15:0] w_res [NUM_WRITERS], w_ovf [NUM_WRITERS];
  logic      wr_all_ok;

  always_comb begin
    wr_all_ok = 1'b1;
    wm_ready  = 1'b0;
    for (int i = 0; i < NUM_WRITERS; i++) begin
      if (!w_ack_ready[i]) wr_all_ok = 1'b0;
      if (w_mready[i]) wm_ready = 1'b1;
    end
    d_ready[2] = wr_all_ok;
  end

  for (genvar i = 0; i < NUM_WRITERS; i++) begin : g_wr
    dds_writer #(.IDX(i), .HISTORY_DEPTH(HISTORY_DEPTH)) u_dds_writer (
      .clk, .rst, .local_guid_prefix,
      .s_valid(ros_tx_valid[i]), .s_ready(ros_tx_ready[i]), .s_sample(ros_tx_sample[i]),
      .m_valid(w_s_valid[i]), .m_ready(w_s_ready[i]), .m_sample(w_s[i]),
      .overflow_count(w_ovf[i]), .write_count());
    rtps_writer #(.IDX(i), .MATCH_ENTRIES(MATCH_ENTRIES), .HISTORY_DEPTH(HISTORY_DEPTH)) u_rtps_writer (
      .clk, .rst,
      .s_valid(w_s_valid[i]), .s_ready(w_s_ready[i]), .s_sample(w_s[i]),
      .ack_valid(d_valid[2] && wr_all_ok), .ack_ready(w_ack_ready[i]), .ack_msg(d_msg[2]),
      .match_valid(wm_valid), .match_ready(w_mready[i]), .match_in(wm),
      .m_valid(w_valid[i]), .m_ready(w_ready[i]), .m_msg(w_msg[i]),
      .disc_valid(w_disc_valid[i]), .disc_ready(w_disc_ready[i]), .disc(w_disc[i]),
      .last_sn(w_last[i]), .resend_count(w_res[i]));
  end

  // ---------------------------------------------------------- merges + RTPS_OUT
  logic      o_valid [3], o_ready [3];
  rtps_msg_t o_msg   [3];
  rr_arbiter #(.T(rtps_msg_t), .N(NUM_WRITERS)) u_wr_merge (
    .clk, .rst, .s_valid(w_valid), .s_ready(w_ready), .s_data(w_msg),
    .m_valid(o_valid[0]), .m_ready(o_ready[0]), .m_data(o_msg[0]), .grant());
  assign o_valid[1] = an_valid;
  assign an_ready   = o_ready[1];
  assign o_msg[1]   = an_msg;
  rr_arbiter #(.T(rtps_msg_t), .N(NUM_READERS)) u_ack_merge (
    .clk, .rst, .s_valid(r_ack_valid), .s_ready(r_ack_ready), .s_data(r_ack),
    .m_valid(o_valid[2]), .m_ready(o_ready[2]), .m_data(o_msg[2]), .grant());
  rr_arbiter #(.T(match_t), .N(NUM_WRITERS)) u_disc_merge (
    .clk, .rst, .s_valid(w_disc_valid), .s_ready(w_disc_ready), .s_data(w_disc),
    .m_valid(discover_valid), .m_ready(discover_ready), .m_data(discover), .grant());

  rtps_out #(.FIFO_DEPTH(FIFO_DEPTH)) u_out (
    .clk, .rst, .local_guid_prefix, .local_ip,
    .s_valid(o_valid), .s_ready(o_ready), .s_msg(o_msg),
    .m_hdr_valid(udp_tx_hdr_valid), .m_hdr_ready(udp_tx_hdr_ready), .m_hdr(udp_tx_hdr),
    .m_tdata(udp_tx_tdata), .m_tvalid(udp_tx_tvalid), .m_tlast(udp_tx_tlast),
    .m_tready(udp_tx_tready), .sent_count(tx_msg_count));

  // ---------------------------------------------------------- status
  always_comb begin
    gap_count      = '0;
    dup_count      = '0;
    resend_count   = '0;
    overflow_count = '0;
    for (int i = 0; i < NUM_READERS; i++) begin
      gap_count      = gap_count + r_gap[i];
      dup_count      = dup_count + r_dup[i];
      overflow_count = overflow_count + r_ovf[i];
    end
    for (int i = 0; i < NUM_WRITERS; i++) begin
      resend_count   = resend_count + w_res[i];
      overflow_count = overflow_count + w_ovf[i];
    end
    drop_count = p_drop + d_drop;
  end
endmodule
