// dds_writer: DDS data writer (DDS_WRITER, NUM_WRITERS copies).
//
// Sits between the ROS 2 layer (ROS_TX) and its RTPS writer. Each sample
// written is stamped with this participant's GUID prefix and the writer's
// entity id (so its instance in INSTNCE_MEM is this writer) and stored in a
// KEEP_LAST(HISTORY_DEPTH) history cache; the RTPS writer takes samples from
// it in order. The ROS side is always accepted; if the RTPS writer falls
// behind, the oldest unsent sample is overwritten (overflow_count).
// Timing: a sample is offered to the RTPS writer one cycle after it is
// written. The memories follow the paper's diagram; the stamping and the
// KEEP_LAST policy are this design's choices.
module dds_writer
  import ros2_chip_pkg::*;
#(
  parameter int IDX           = 0,
  parameter int HISTORY_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [95:0] local_guid_prefix,
  input  logic        s_valid,
  output logic        s_ready,
  input  sample_t     s_sample,
  output logic        m_valid,
  input  logic        m_ready,
  output sample_t     m_sample,
  output logic [15:0] overflow_count,
  output logic [15:0] write_count
);
  sample_t stamped;
  always_comb begin
    stamped             = s_sample;
    stamped.guid_prefix = local_guid_prefix;
    stamped.writer_id   = writer_entity(IDX);
    stamped.sn          = 64'(write_count) + 64'd1;
  end
  assign s_ready = 1'b1;

  dds_history_cache #(.DEPTH(HISTORY_DEPTH), .INSTANCES(2)) u_cache (
    .clk, .rst, .s_valid(s_valid), .s_sample(stamped),
    .m_valid, .m_ready, .m_sample, .m_time(), .m_instance(),
    .overflow_count, .fill());

  always_ff @(posedge clk) begin
    if (rst)          write_count <= '0;
    else if (s_valid) write_count <= write_count + 1'b1;
  end
endmodule
