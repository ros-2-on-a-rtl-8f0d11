// udp_rx: UDP receive path (UDP_RX of the transport layer).
//
// Takes an IPv4 packet of protocol 17 from IP_RX (ip_hdr_t record, then the
// payload bytes), reads the 8-byte UDP header and forwards a udp_hdr_t record
// (addresses, ports, data length, received checksum) followed by the UDP
// data, tlast on the last data byte. Datagrams whose UDP length is below 9 or
// longer than the IP payload, or of another protocol, are dropped and
// counted. The checksum is passed on, not verified: the paper's diagram has a
// checksum generator on the transmit side only. Timing: the header record is
// offered one cycle after the eighth header byte; data then streams through
// at one byte per cycle.
module udp_rx
  import ros2_chip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        s_hdr_valid,
  output logic        s_hdr_ready,
  input  ip_hdr_t     s_hdr,
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  output logic        m_hdr_valid,
  input  logic        m_hdr_ready,
  output udp_hdr_t    m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  output logic [15:0] drop_count
);
  typedef enum logic [2:0] {IDLE, HDR, CHECK, OUT_HDR, PAYLOAD, DROP} state_e;
  state_e state;
  ip_hdr_t     ih;
  logic [2:0]  cnt;
  logic [63:0] uh;        // byte k at [8*(7-k) +: 8]
  logic [15:0] rem;
  logic        saw_last;

  wire [15:0] u_len = uh[31:16];

  always_comb begin
    s_hdr_ready = (state == IDLE);
    unique case (state)
      HDR, DROP: s_tready = 1'b1;
      PAYLOAD:   s_tready = m_tready;
      default:   s_tready = 1'b0;
    endcase
    m_hdr_valid = (state == OUT_HDR);
    m_hdr = '{src_ip: ih.src_ip, dst_ip: ih.dst_ip, src_port: uh[63:48],
              dst_port: uh[47:32], payload_len: u_len - 16'd8, checksum: uh[15:0]};
    m_tvalid = (state == PAYLOAD) && s_tvalid;
    m_tdata  = s_tdata;
    m_tlast  = (rem == 16'd1) || s_tlast;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= IDLE;
      drop_count <= '0;
      cnt        <= '0;
      rem        <= '0;
      saw_last   <= 1'b0;
    end else begin
      unique case (state)
        IDLE: if (s_hdr_valid) begin
          ih       <= s_hdr;
          cnt      <= '0;
          saw_last <= 1'b0;
          state    <= HDR;
        end
        HDR: if (s_tvalid) begin
          uh[8*(7 - 32'(cnt)) +: 8] <= s_tdata;
          cnt <= cnt + 1'b1;
          if (s_tlast) saw_last <= 1'b1;
          if (cnt == 3'd7 || s_tlast) state <= CHECK;
        end
        CHECK: begin
          rem <= u_len - 16'd8;
          if (saw_last || ih.protocol != IP_PROTO_UDP || u_len < 16'd9 ||
              u_len > ih.payload_len) begin
            drop_count <= drop_count + 1'b1;
            state      <= saw_last ? IDLE : DROP;
          end else
            state <= OUT_HDR;
        end
        OUT_HDR: if (m_hdr_ready) state <= PAYLOAD;
        PAYLOAD: if (s_tvalid && s_tready) begin
          rem <= rem - 1'b1;
          if (s_tlast)           state <= IDLE;
          else if (rem == 16'd1) state <= DROP;
        end
        DROP: if (s_tvalid && s_tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
