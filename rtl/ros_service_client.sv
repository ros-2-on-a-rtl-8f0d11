// ros_service_client: receive side of a ROS 2 service client
// (ROS_SERVICE_CLIENT).
//
// Takes samples from the DDS reader of the service's response topic. Each
// response carries, after the 4-byte CDR encapsulation, the identity of the
// request it answers: the 16-byte GUID of the requesting client (first byte
// most significant) and an 8-byte little-endian sequence number. A response
// whose GUID equals client_guid is handed to the application (ROS_APP_RX)
// with req_guid/req_seq set and the body that follows the 28 header bytes;
// responses for other clients and malformed samples are dropped and counted.
// Requests leave through a publisher on the request topic (the paper's
// diagram puts only this receive side in the RX bridge).
// Timing: one register stage, full throughput. The request identity layout
// is this design's choice.
module ros_service_client
  import ros2_chip_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic [127:0] client_guid,
  input  logic         s_valid,
  output logic         s_ready,
  input  sample_t      s_sample,
  output logic         m_valid,
  input  logic         m_ready,
  output ros_msg_t     m_msg,
  output logic [15:0]  drop_count
);
  logic [127:0] guid;
  always_comb
    for (int i = 0; i < 16; i++) guid[127 - 8*i -: 8] = s_sample.data[8*(4 + i) +: 8];
  wire [63:0] seq = s_sample.data[8*20 +: 64];

  wire ok = s_sample.len >= plen_t'(4 + REQ_ID_LEN) && s_sample.data[7:0] == 8'h00 &&
            s_sample.data[15:9] == 7'd0 && guid == client_guid;
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
          m_msg.req_guid <= guid;
          m_msg.req_seq  <= seq;
          m_msg.len      <= s_sample.len - plen_t'(4 + REQ_ID_LEN);
          m_msg.data     <= s_sample.data >> (8 * (4 + REQ_ID_LEN));
        end else
          drop_count <= drop_count + 1'b1;
      end
    end
  end
endmodule
