// rmw_bridge_tx: transmit half of the ROS 2 layer (RCL_BRIDGE_TX with the
// RMW_BRIDGE_TX inside it).
//
// Takes application messages from ROS_APP_TX, each tagged with the index of
// the DDS writer it is for, and passes it to the hardware ROS 2 entity that
// owns that writer. NW = NUM_PUB + NUM_SRV_SERVER + 4*NUM_ACTION_SERVER
// writers, in this order: publishers, service servers, then for each action
// server its goal, cancel and result servers and its feedback publisher.
// Each entity writes its samples to its own DDS writer (ROS_TX). A message
// for a writer index that does not exist is dropped.
// Timing: combinational routing, then the entity's register stage.
module rmw_bridge_tx
  import ros2_chip_pkg::*;
#(
  parameter int NUM_PUB           = 1,
  parameter int NUM_SRV_SERVER    = 1,
  parameter int NUM_ACTION_SERVER = 1,
  localparam int NW = NUM_PUB + NUM_SRV_SERVER + 4*NUM_ACTION_SERVER
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        app_valid,
  output logic        app_ready,
  input  ros_msg_t    app_msg,
  input  logic [7:0]  app_entity,
  output logic        m_valid  [NW],
  input  logic        m_ready  [NW],
  output sample_t     m_sample [NW],
  output logic [15:0] sent_count,
  output logic [15:0] drop_count
);
  logic e_valid [NW], e_ready [NW];
  logic [15:0] e_sent [NW], e_drop [NW];

  always_comb begin
    app_ready = 1'b1;                                 // unknown index: dropped
    for (int i = 0; i < NW; i++) begin
      e_valid[i] = app_valid && app_entity == 8'(i);
      if (app_entity == 8'(i)) app_ready = e_ready[i];
    end
  end

  for (genvar i = 0; i < NUM_PUB; i++) begin : g_pub
    ros_publisher u_pub (
      .clk, .rst, .s_valid(e_valid[i]), .s_ready(e_ready[i]), .s_msg(app_msg),
      .m_valid(m_valid[i]), .m_ready(m_ready[i]), .m_sample(m_sample[i]),
      .drop_count(e_drop[i]), .pub_count(e_sent[i]));
  end
  for (genvar i = 0; i < NUM_SRV_SERVER; i++) begin : g_srv
    localparam int W = NUM_PUB + i;
    ros_service_server u_srv (
      .clk, .rst, .s_valid(e_valid[W]), .s_ready(e_ready[W]), .s_msg(app_msg),
      .m_valid(m_valid[W]), .m_ready(m_ready[W]), .m_sample(m_sample[W]),
      .drop_count(e_drop[W]), .resp_count(e_sent[W]));
  end
  for (genvar a = 0; a < NUM_ACTION_SERVER; a++) begin : g_act
    localparam int W = NUM_PUB + NUM_SRV_SERVER + 4*a;
    ros_msg_t am [4];
    assign am = '{app_msg, app_msg, app_msg, app_msg};
    ros_action_server u_act (
      .clk, .rst, .s_valid(e_valid[W +: 4]), .s_ready(e_ready[W +: 4]), .s_msg(am),
      .m_valid(m_valid[W +: 4]), .m_ready(m_ready[W +: 4]), .m_sample(m_sample[W +: 4]),
      .drop_count(e_drop[W +: 4]), .sent_count(e_sent[W +: 4]));
  end

  always_comb begin
    sent_count = '0;
    drop_count = '0;
    for (int i = 0; i < NW; i++) begin
      sent_count = sent_count + e_sent[i];
      drop_count = drop_count + e_drop[i];
    end
  end
endmodule
