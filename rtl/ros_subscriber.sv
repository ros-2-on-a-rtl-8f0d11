// ros_subscriber: ROS 2 subscriber in hardware (ROS_SUBSCRIBER).
//
// Takes samples of its topic from its DDS reader (ROS_RX), checks the CDR
// encapsulation header (first byte 00, second 00 or 01, at least 4 bytes)
// and hands the message body - the bytes after the 4-byte header - to the
// application (ROS_APP_RX). req_guid/req_seq carry the publishing writer's
// GUID and the sample's sequence number as message info. Malformed samples
// are dropped and counted. Timing: one register stage; a message is offered
// the cycle after its sample is taken, and the next sample is taken in the
// cycle the message leaves (full throughput). The encapsulation check is
// this design's reading of ROS 2 serialization.
module ros_subscriber
  import ros2_chip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        s_valid,
  output logic        s_ready,
  input  sample_t     s_sample,
  output logic        m_valid,
  input  logic        m_ready,
  output ros_msg_t    m_msg,
  output logic [15:0] drop_count
);
  wire ok = s_sample.len >= plen_t'(4) && s_sample.data[7:0] == 8'h00 && s_sample.data[15:9] == 7'd0;
  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid    <= 1'b0;
      drop_count <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        if (ok) begin
          m_valid        <= 1'b1;
          m_msg.req_guid <= {s_sample.guid_prefix, s_sample.writer_id};
          m_msg.req_seq  <= s_sample.sn;
          m_msg.len      <= s_sample.len - plen_t'(4);
          m_msg.data     <= s_sample.data >> 32;
        end else
          drop_count <= drop_count + 1'b1;
      end
    end
  end
endmodule
