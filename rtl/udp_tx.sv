// udp_tx: UDP transmit path (UDP_TX of the transport layer).
//
// Takes a UDP header record (with its checksum already filled in by
// UDP_CHECKSUM_GEN) and the data bytes, and produces an IPv4 request for the
// IP layer: an ip_hdr_t record with protocol 17 and payload_len = data + 8,
// followed by the 8 UDP header bytes (source port, destination port, length,
// checksum, all big endian) and the data, tlast on the last data byte.
// Timing: the IP header record is offered one cycle after the UDP record is
// accepted; the 8 header bytes take 8 cycles; data then passes through with
// no buffering.
module udp_tx
  import ros2_chip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        s_hdr_valid,
  output logic        s_hdr_ready,
  input  udp_hdr_t    s_hdr,
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  output logic        m_hdr_valid,
  input  logic        m_hdr_ready,
  output ip_hdr_t     m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready
);
  typedef enum logic [1:0] {IDLE, OUT_HDR, UHDR, PAYLOAD} state_e;
  state_e     state;
  udp_hdr_t   h;
  logic [2:0] cnt;

  wire [63:0] uh = {h.src_port, h.dst_port, h.payload_len + 16'd8, h.checksum};

  always_comb begin
    s_hdr_ready = (state == IDLE);
    m_hdr_valid = (state == OUT_HDR);
    m_hdr = '{src_ip: h.src_ip, dst_ip: h.dst_ip, protocol: IP_PROTO_UDP,
              payload_len: h.payload_len + 16'd8};
    s_tready = (state == PAYLOAD) && m_tready;
    m_tvalid = (state == UHDR) || ((state == PAYLOAD) && s_tvalid);
    m_tdata  = (state == UHDR) ? uh[8*(7 - 32'(cnt)) +: 8] : s_tdata;
    m_tlast  = (state == PAYLOAD) && s_tlast;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        IDLE:    if (s_hdr_valid) begin h <= s_hdr; state <= OUT_HDR; end
        OUT_HDR: if (m_hdr_ready) begin cnt <= '0; state <= UHDR; end
        UHDR:    if (m_tready) begin
          cnt <= cnt + 1'b1;
          if (cnt == 3'd7) state <= PAYLOAD;
        end
        PAYLOAD: if (s_tvalid && m_tready && s_tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
