// ros_publisher: ROS 2 publisher in hardware (ROS_PUBLISHER).
//
// Takes a message body from the application (ROS_APP_TX), puts the CDR
// little-endian encapsulation header 00 01 00 00 in front and writes the
// result as one sample to its DDS writer (ROS_TX). A body longer than
// MAX_PAYLOAD-4 bytes does not fit a sample and is dropped and counted.
// Timing: one register stage, full throughput. The encapsulation is this
// design's reading of ROS 2 serialization.
module ros_publisher
  import ros2_chip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        s_valid,
  output logic        s_ready,
  input  ros_msg_t    s_msg,
  output logic        m_valid,
  input  logic        m_ready,
  output sample_t     m_sample,
  output logic [15:0] drop_count,
  output logic [15:0] pub_count
);
  wire fits = s_msg.len <= plen_t'(MAX_PAYLOAD - 4);
  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid    <= 1'b0;
      drop_count <= '0;
      pub_count  <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        if (fits) begin
          m_valid   <= 1'b1;
          pub_count <= pub_count + 1'b1;
          m_sample  <= '{guid_prefix: '0, writer_id: '0, sn: '0,
                         len: s_msg.len + plen_t'(4),
                         data: (s_msg.data << 32) | payload_t'(CDR_LE_HDR)};
        end else
          drop_count <= drop_count + 1'b1;
      end
    end
  end
endmodule
