// ros_service_server: send side of a ROS 2 service server
// (ROS_SERVICE_SERVER).
//
// Takes a response from the application (ROS_APP_TX) together with the
// identity of the request it answers (req_guid, req_seq, as delivered with
// the request) and writes one sample to the DDS writer of the response topic:
// CDR encapsulation 00 01 00 00, the 16-byte client GUID (first byte most
// significant), the 8-byte little-endian sequence number, then the body. A
// body longer than MAX_PAYLOAD-28 bytes is dropped and counted. Requests
// reach the application through a subscriber on the request topic (the
// paper's diagram puts only this send side in the TX bridge).
// Timing: one register stage, full throughput.
module ros_service_server
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
  output logic [15:0] resp_count
);
  localparam int HDR = 4 + REQ_ID_LEN;
  wire fits = s_msg.len <= plen_t'(MAX_PAYLOAD - HDR);
  assign s_ready = !m_valid || m_ready;

  payload_t head;
  always_comb begin
    head = payload_t'(CDR_LE_HDR);
    for (int i = 0; i < 16; i++) head[8*(4 + i) +: 8] = s_msg.req_guid[127 - 8*i -: 8];
    head[8*20 +: 64] = s_msg.req_seq;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid    <= 1'b0;
      drop_count <= '0;
      resp_count <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        if (fits) begin
          m_valid    <= 1'b1;
          resp_count <= resp_count + 1'b1;
          m_sample   <= '{guid_prefix: '0, writer_id: '0, sn: '0,
                          len: s_msg.len + plen_t'(HDR),
                          data: (s_msg.data << (8 * HDR)) | head};
        end else
          drop_count <= drop_count + 1'b1;
      end
    end
  end
endmodule
