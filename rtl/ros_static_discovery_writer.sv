// ros_static_discovery_writer: record of discovered peers for the ROS 2
// layer (ROS_STATIC_DISCOVERY_WRITER).
//
// Takes DISCOVER events from the RTPS writers - one per remote reader newly
// matched to a local writer: local writer index, remote GUID and locator -
// and keeps each distinct (writer, remote GUID) pair once in a history cache
// of CACHE_DEPTH entries (the oldest overwritten when full). The
// application reads entry rd_idx combinationally and sees how many distinct
// events were recorded (event_count). The input is always ready; a repeated
// event is ignored. Timing: an entry is visible the cycle after its event.
// The paper gives the block's name, its history cache and its DISCOVER
// input; what it exposes is this design's choice.
module ros_static_discovery_writer
  import ros2_chip_pkg::*;
#(
  parameter int CACHE_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_valid,
  output logic        s_ready,
  input  match_t      s_event,
  input  logic [$clog2(CACHE_DEPTH)-1:0] rd_idx,
  output logic        rd_valid,
  output match_t      rd_entry,
  output logic [15:0] event_count
);
  localparam int AW = $clog2(CACHE_DEPTH);
  logic          v   [CACHE_DEPTH];
  match_t        ent [CACHE_DEPTH];
  logic [AW-1:0] wp;

  logic dup;
  always_comb begin
    dup = 1'b0;
    for (int i = 0; i < CACHE_DEPTH; i++)
      if (v[i] && ent[i].local_idx == s_event.local_idx &&
          ent[i].guid_prefix == s_event.guid_prefix && ent[i].entity_id == s_event.entity_id)
        dup = 1'b1;
  end

  assign s_ready  = 1'b1;
  assign rd_valid = v[rd_idx];
  assign rd_entry = ent[rd_idx];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp          <= '0;
      event_count <= '0;
      for (int i = 0; i < CACHE_DEPTH; i++) v[i] <= 1'b0;
    end else if (s_valid && !dup) begin
      v[wp]       <= 1'b1;
      ent[wp]     <= s_event;
      wp          <= wp + 1'b1;
      event_count <= event_count + 1'b1;
    end
  end
endmodule
