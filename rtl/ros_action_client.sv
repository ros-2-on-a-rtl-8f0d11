// ros_action_client: receive side of a ROS 2 action client
// (ROS_ACTION_CLIENT).
//
// An action is built from services and a topic. This block holds, as drawn
// in the paper's ROS 2 diagram, a GOAL_SERVICE_CLIENT, a
// CANCEL_GOAL_SERVICE_CLIENT and an ACTION_RESULT_SERVICE_CLIENT (each a
// ros_service_client matching responses to client_guid[k]) and an
// ACTION_FEEDBACK_SUBSCRIBER (a ros_subscriber). Port index k: 0 goal,
// 1 cancel, 2 result, 3 feedback; each has its own DDS reader input and its
// own application output. Timing is that of the parts: one register stage.
module ros_action_client
  import ros2_chip_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic [127:0] client_guid [3],
  input  logic         s_valid  [4],
  output logic         s_ready  [4],
  input  sample_t      s_sample [4],
  output logic         m_valid  [4],
  input  logic         m_ready  [4],
  output ros_msg_t     m_msg    [4],
  output logic [15:0]  drop_count [4]
);
  for (genvar k = 0; k < 3; k++) begin : g_srv
    ros_service_client u_client (
      .clk, .rst, .client_guid(client_guid[k]),
      .s_valid(s_valid[k]), .s_ready(s_ready[k]), .s_sample(s_sample[k]),
      .m_valid(m_valid[k]), .m_ready(m_ready[k]), .m_msg(m_msg[k]),
      .drop_count(drop_count[k]));
  end
  ros_subscriber u_feedback (
    .clk, .rst,
    .s_valid(s_valid[3]), .s_ready(s_ready[3]), .s_sample(s_sample[3]),
    .m_valid(m_valid[3]), .m_ready(m_ready[3]), .m_msg(m_msg[3]),
    .drop_count(drop_count[3]));
endmodule
