// rtps_decoder: sorts parsed RTPS submessages (RTPS_DECODER).
//
// Each rtps_msg_t record from RTPS_IN_PARSER goes into one of three FIFOs:
//   FIFO 0 -> RTPS readers:   DATA from a user writer (entity kind byte with
//                             the two top bits 00, i.e. user-defined),
//   FIFO 1 -> RTPS_DISCOVERY: DATA from the SEDP publications or
//                             subscriptions writer (builtin ids 0x3C2/0x4C2),
//   FIFO 2 -> RTPS writers:   ACKNACK.
// Other records (e.g. DATA from SPDP or other builtin writers) are dropped
// and counted. The input stalls while the chosen FIFO is full, so nothing is
// lost inside the chip. Each FIFO holds FIFO_DEPTH records.
// Timing: a record is in its FIFO one cycle after it is taken. The three
// FIFOs and where they lead are from the paper's RTPS diagram; the routing
// rule is this design's.
module rtps_decoder
  import ros2_chip_pkg::*;
#(
  parameter int FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_valid,
  output logic        s_ready,
  input  rtps_msg_t   s_msg,
  output logic        m_valid [3],
  input  logic        m_ready [3],
  output rtps_msg_t   m_msg   [3],
  output logic [15:0] drop_count
);
  logic [1:0] route;        // 3 = drop
  logic       f_ready [3];

  always_comb begin
    if (s_msg.kind == SUB_ACKNACK)
      route = 2'd2;
    else if (s_msg.writer_id == ENTITYID_SEDP_PUB_WRITER ||
             s_msg.writer_id == ENTITYID_SEDP_SUB_WRITER)
      route = 2'd1;
    else if (s_msg.writer_id[7:6] == 2'b00)
      route = 2'd0;
    else
      route = 2'd3;
    s_ready = (route == 2'd3) ? 1'b1 : f_ready[route];
  end

  for (genvar i = 0; i < 3; i++) begin : g_fifo
    sync_fifo #(.T(rtps_msg_t), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .s_valid(s_valid && route == 2'(i)), .s_ready(f_ready[i]), .s_data(s_msg),
      .m_valid(m_valid[i]), .m_ready(m_ready[i]), .m_data(m_msg[i]), .count());
  end

  always_ff @(posedge clk) begin
    if (rst)                                drop_count <= '0;
    else if (s_valid && route == 2'd3)      drop_count <= drop_count + 1'b1;
  end
endmodule
