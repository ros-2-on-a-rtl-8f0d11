// rmw_bridge_rx: receive half of the ROS 2 layer (RCL_BRIDGE_RX with the
// RMW_BRIDGE_RX inside it).
//
// Connects the NR = NUM_SUB + NUM_SRV_CLIENT + 4*NUM_ACTION_CLIENT DDS
// readers (ROS_RX) to hardware ROS 2 entities, one reader per entity port,
// in this order of reader index: subscribers, service clients, then for each
// action client its goal, cancel, result and feedback readers. Service
// client k (plain ones first, then 3 per action client) matches responses to
// client_guid[k]. The messages of all entities are merged round-robin onto
// the single application port ROS_APP_RX, tagged with the reader index they
// came from. Timing: entity register stage plus a combinational merge.
module rmw_bridge_rx
  import ros2_chip_pkg::*;
#(
  parameter int NUM_SUB           = 1,
  parameter int NUM_SRV_CLIENT    = 1,
  parameter int NUM_ACTION_CLIENT = 1,
  localparam int NR = NUM_SUB + NUM_SRV_CLIENT + 4*NUM_ACTION_CLIENT,
  localparam int NC = NUM_SRV_CLIENT + 3*NUM_ACTION_CLIENT
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [127:0] client_guid [NC > 0 ? NC : 1],
  input  logic         s_valid  [NR],
  output logic         s_ready  [NR],
  input  sample_t      s_sample [NR],
  output logic         app_valid,
  input  logic         app_ready,
  output ros_msg_t     app_msg,
  output logic [7:0]   app_entity,
  output logic [15:0]  drop_count
);
  logic     e_valid [NR], e_ready [NR];
  ros_msg_t e_msg   [NR];
  logic [15:0] e_drop [NR];

  for (genvar i = 0; i < NUM_SUB; i++) begin : g_sub
    ros_subscriber u_sub (
      .clk, .rst, .s_valid(s_valid[i]), .s_ready(s_ready[i]), .s_sample(s_sample[i]),
      .m_valid(e_valid[i]), .m_ready(e_ready[i]), .m_msg(e_msg[i]), .drop_count(e_drop[i]));
  end
  for (genvar i = 0; i < NUM_SRV_CLIENT; i++) begin : g_cli
    localparam int R = NUM_SUB + i;
    ros_service_client u_cli (
      .clk, .rst, .client_guid(client_guid[i]),
      .s_valid(s_valid[R]), .s_ready(s_ready[R]), .s_sample(s_sample[R]),
      .m_valid(e_valid[R]), .m_ready(e_ready[R]), .m_msg(e_msg[R]), .drop_count(e_drop[R]));
  end
  for (genvar a = 0; a < NUM_ACTION_CLIENT; a++) begin : g_act
    localparam int R = NUM_SUB + NUM_SRV_CLIENT + 4*a;
    localparam int C = NUM_SRV_CLIENT + 3*a;
    ros_action_client u_act (
      .clk, .rst, .client_guid(client_guid[C +: 3]),
      .s_valid(s_valid[R +: 4]), .s_ready(s_ready[R +: 4]), .s_sample(s_sample[R +: 4]),
      .m_valid(e_valid[R +: 4]), .m_ready(e_ready[R +: 4]), .m_msg(e_msg[R +: 4]),
      .drop_count(e_drop[R +: 4]));
  end

  logic [$clog2(NR > 1 ? NR : 2)-1:0] g;
  rr_arbiter #(.T(ros_msg_t), .N(NR)) u_merge (
    .clk, .rst, .s_valid(e_valid), .s_ready(e_ready), .s_data(e_msg),
    .m_valid(app_valid), .m_ready(app_ready), .m_data(app_msg), .grant(g));
  assign app_entity = 8'(g);

  always_comb begin
    drop_count = '0;
    for (int i = 0; i < NR; i++) drop_count = drop_count + e_drop[i];
  end
endmodule
