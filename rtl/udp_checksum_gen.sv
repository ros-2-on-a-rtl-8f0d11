// udp_checksum_gen: UDP checksum generator of the transmit path
// (UDP_CHECKSUM_GEN).
//
// The UDP checksum sits in the header but covers the whole datagram, so the
// datagram is stored and forwarded: the header record is accepted, the data
// bytes are written into a BUF_DEPTH-byte FIFO while a 16-bit one's
// complement sum runs over them (an odd last byte is padded with zero), and
// when tlast arrives the pseudo-header (addresses, protocol 17, UDP length)
// and the UDP header words are added. The header record then leaves with
// payload_len set to the counted data length and checksum filled in (0 is
// sent as 0xFFFF), followed by the data from the FIFO.
// Timing: one cycle per input byte, two cycles to finish the sum, then one
// cycle per output byte. Datagrams longer than BUF_DEPTH bytes are not
// supported (the input stalls). The store-and-forward buffer and its size are
// this design's choice; the block itself is from the paper's diagram.
module udp_checksum_gen
  import ros2_chip_pkg::*;
#(
  parameter int BUF_DEPTH = 256
) (
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
  output udp_hdr_t    m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready
);
  typedef enum logic [2:0] {IDLE, SUM, FIN1, FIN2, OUT_HDR, STREAM} state_e;
  state_e state;
  udp_hdr_t    h;
  logic [15:0] sum, nbytes;
  logic [7:0]  hi_byte;
  logic        odd;

  logic       f_s_valid, f_s_ready, f_m_valid, f_m_ready;
  logic [8:0] f_m_data;
  sync_fifo #(.T(logic [8:0]), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst,
    .s_valid(f_s_valid), .s_ready(f_s_ready), .s_data({s_tlast, s_tdata}),
    .m_valid(f_m_valid), .m_ready(f_m_ready), .m_data(f_m_data), .count());

  assign s_hdr_ready = (state == IDLE);
  assign f_s_valid   = (state == SUM) && s_tvalid;
  assign s_tready    = (state == SUM) && f_s_ready;
  assign m_tvalid    = (state == STREAM) && f_m_valid;
  assign m_tdata     = f_m_data[7:0];
  assign m_tlast     = f_m_data[8];
  assign f_m_ready   = (state == STREAM) && m_tready;
  assign m_hdr_valid = (state == OUT_HDR);

  wire [15:0] udp_len = nbytes + 16'd8;

  always_comb begin
    m_hdr             = h;
    m_hdr.payload_len = nbytes;
    m_hdr.checksum    = (sum == 16'hFFFF) ? 16'hFFFF : ~sum;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= IDLE;
      sum    <= '0;
      nbytes <= '0;
      odd    <= 1'b0;
    end else begin
      unique case (state)
        IDLE: if (s_hdr_valid) begin
          h      <= s_hdr;
          nbytes <= '0;
          odd    <= 1'b0;
          // pseudo-header (without length) + ports; lengths added in FIN1
          sum <= csum_add(csum_add(csum_add(s_hdr.src_ip[31:16], s_hdr.src_ip[15:0]),
                                   csum_add(s_hdr.dst_ip[31:16], s_hdr.dst_ip[15:0])),
                          csum_add(csum_add(16'(IP_PROTO_UDP), s_hdr.src_port), s_hdr.dst_port));
          state <= SUM;
        end
        SUM: if (s_tvalid && s_tready) begin
          nbytes <= nbytes + 1'b1;
          odd    <= ~odd;
          if (!odd) hi_byte <= s_tdata;
          else      sum     <= csum_add(sum, {hi_byte, s_tdata});
          if (s_tlast) state <= FIN1;
        end
        FIN1: begin
          sum   <= odd ? csum_add(sum, {hi_byte, 8'h00}) : sum;
          state <= FIN2;
        end
        FIN2: begin
          sum   <= csum_add(sum, csum_add(udp_len, udp_len));
          state <= OUT_HDR;
        end
        OUT_HDR: if (m_hdr_ready) state <= STREAM;
        STREAM: if (m_tvalid && m_tready && m_tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
