// ros_action_server: send side of a ROS 2 action server
// (ROS_ACTION_SERVER).
//
// Holds three ros_service_server parts, for the goal, cancel-goal and result
// services, and a ros_publisher for the feedback topic. Port index k:
// 0 goal, 1 cancel, 2 result, 3 feedback; each takes application messages
// (with the request identity for k < 3) and writes samples to its own DDS
// writer. The paper's diagram labels the parts inside ROS_ACTION_SERVER with
// the client names (GOAL_SERVICE_CLIENT, ..., ACTION_FEEDBACK_SUBSCRIBER);
// on the transmit side they are built here as servers and a publisher.
// Timing is that of the parts: one register stage.
module ros_action_server
  import ros2_chip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        s_valid  [4],
  output logic        s_ready  [4],
  input  ros_msg_t    s_msg    [4],
  output logic        m_valid  [4],
  input  logic        m_ready  [4],
  output sample_t     m_sample [4],
  output logic [15:0] drop_count [4],
  output logic [15:0] sent_count [4]
);
  for (genvar k = 0; k < 3; k++) begin : g_srv
    ros_service_server u_server (
      .clk, .rst,
      .s_valid(s_valid[k]), .s_ready(s_ready[k]), .s_msg(s_msg[k]),
      .m_valid(m_valid[k]), .m_ready(m_ready[k]), .m_sample(m_sample[k]),
      .drop_count(drop_count[k]), .resp_count(sent_count[k]));
  end
  ros_publisher u_feedback (
    .clk, .rst,
    .s_valid(s_valid[3]), .s_ready(s_ready[3]), .s_msg(s_msg[3]),
    .m_valid(m_valid[3]), .m_ready(m_ready[3]), .m_sample(m_sample[3]),
    .drop_count(drop_count[3]), .pub_count(sent_count[3]));
endmodule
