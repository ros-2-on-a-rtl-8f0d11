// dds_reader: DDS data reader (DDS_READER, NUM_READERS copies).
//
// Sits between its RTPS reader and the ROS 2 layer. Every sample the RTPS
// reader delivers is written into a KEEP_LAST(HISTORY_DEPTH) history cache
// (SAMPLE_MEM, PAYLOAD_MEM, INSTNCE_MEM; see dds_history_cache) so the RTPS
// side is never held up by a slow consumer: the input is always ready and an
// overflow drops the oldest unread sample. The ROS 2 layer takes samples in
// arrival order on ROS_RX. take_count counts samples taken.
// Timing: a sample is offered on ROS_RX one cycle after it arrives.
module dds_reader
  import ros2_chip_pkg::*;
#(
  parameter int HISTORY_DEPTH = 4,
  parameter int INSTANCES     = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_valid,
  output logic        s_ready,
  input  sample_t     s_sample,
  output logic        m_valid,
  input  logic        m_ready,
  output sample_t     m_sample,
  output logic [15:0] overflow_count,
  output logic [15:0] take_count
);
  assign s_ready = 1'b1;

  dds_history_cache #(.DEPTH(HISTORY_DEPTH), .INSTANCES(INSTANCES)) u_cache (
    .clk, .rst, .s_valid(s_valid), .s_sample(s_sample),
    .m_valid, .m_ready, .m_sample, .m_time(), .m_instance(),
    .overflow_count, .fill());

  always_ff @(posedge clk) begin
    if (rst)                     take_count <= '0;
    else if (m_valid && m_ready) take_count <= take_count + 1'b1;
  end
endmodule
