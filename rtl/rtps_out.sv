// rtps_out: transmit end of the RTPS layer (RTPS_OUT).
//
// Three input FIFOs of FIFO_DEPTH rtps_msg_t records: 0 = DATA from the RTPS
// writers, 1 = discovery announcements, 2 = ACKNACK from the RTPS readers.
// A round-robin pick takes one record at a time and serializes it as one
// RTPS message in one UDP datagram to the record's ip/port, sent from
// local_ip port 7411:
//   RTPS header (20 B): "RTPS", version 2.3, vendor 00 00, local GUID prefix
//   DATA (0x15, flags E|D): length 20+len, extraFlags 0, octetsToInlineQos
//     16, readerId, writerId, SN (high, low; little endian), then the
//     serialized payload;
//   ACKNACK (0x06, flag E): length 28, readerId, writerId, bitmapBase = SN,
//     numBits 1, bitmap with the base bit set, a running count.
// The UDP checksum is left 0 for UDP_CHECKSUM_GEN to fill.
// Timing: the UDP header record, then one byte per cycle (44 + len bytes for
// DATA, 52 for ACKNACK). The FIFOs follow the paper's diagram; the message
// layout follows DDSI-RTPS with this design's reduced field choices.
module rtps_out
  import ros2_chip_pkg::*;
#(
  parameter int FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [95:0] local_guid_prefix,
  input  logic [31:0] local_ip,
  input  logic        s_valid [3],
  output logic        s_ready [3],
  input  rtps_msg_t   s_msg   [3],
  output logic        m_hdr_valid,
  input  logic        m_hdr_ready,
  output udp_hdr_t    m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  output logic [15:0] sent_count
);
  logic      f_valid [3], f_ready [3];
  rtps_msg_t f_msg   [3];
  for (genvar i = 0; i < 3; i++) begin : g_fifo
    sync_fifo #(.T(rtps_msg_t), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst, .s_valid(s_valid[i]), .s_ready(s_ready[i]), .s_data(s_msg[i]),
      .m_valid(f_valid[i]), .m_ready(f_ready[i]), .m_data(f_msg[i]), .count());
  end

  typedef enum logic [1:0] {IDLE, HDR, BYTES} state_e;
  state_e    state;
  rtps_msg_t cur;
  logic [15:0] cnt, total;
  logic [31:0] ack_count;

  logic      a_valid, a_ready;
  rtps_msg_t a_msg;
  rr_arbiter #(.T(rtps_msg_t), .N(3)) u_rr (
    .clk, .rst, .s_valid(f_valid), .s_ready(f_ready), .s_data(f_msg),
    .m_valid(a_valid), .m_ready(a_ready), .m_data(a_msg), .grant());
  assign a_ready = (state == IDLE);

  function automatic logic [31:0] le32(input logic [31:0] v);
    return {v[7:0], v[15:8], v[23:16], v[31:24]};
  endfunction

  // the fixed part of the message, first byte most significant
  logic [8*52-1:0] hb;
  logic [15:0]     hlen;
  always_comb begin
    logic [15:0] otnh;
    otnh = 16'd20 + 16'(cur.len);
    hb   = '0;
    if (cur.kind == SUB_DATA) begin
      hlen = 16'd44;
      hb[8*52-1 -: 8*44] = {32'h5254_5053, 8'd2, 8'd3, 16'h0000, local_guid_prefix,
                            RTPS_SUB_DATA, 8'h05, otnh[7:0], otnh[15:8],
                            16'h0000, 8'd16, 8'd0, cur.reader_id, cur.writer_id,
                            le32(cur.sn[63:32]), le32(cur.sn[31:0])};
    end else begin
      hlen = 16'd52;
      hb   = {32'h5254_5053, 8'd2, 8'd3, 16'h0000, local_guid_prefix,
              RTPS_SUB_ACKNACK, 8'h01, 8'd28, 8'd0,
              cur.reader_id, cur.writer_id, le32(cur.sn[63:32]), le32(cur.sn[31:0]),
              le32(32'd1), le32(32'h8000_0000), le32(ack_count)};
    end
  end

  always_comb begin
    m_hdr_valid = (state == HDR);
    m_hdr = '{src_ip: local_ip, dst_ip: cur.ip, src_port: RTPS_SRC_PORT, dst_port: cur.port,
              payload_len: total, checksum: 16'h0000};
    m_tvalid = (state == BYTES);
    m_tdata  = (cnt < hlen) ? hb[8*(51 - 32'(cnt)) +: 8] : cur.data[8*(cnt - hlen) +: 8];
    m_tlast  = (cnt == total - 16'd1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= IDLE;
      cnt        <= '0;
      total      <= '0;
      ack_count  <= 32'd1;
      sent_count <= '0;
    end else begin
      unique case (state)
        IDLE: if (a_valid) begin
          cur   <= a_msg;
          total <= (a_msg.kind == SUB_DATA) ? 16'd44 + 16'(a_msg.len) : 16'd52;
          state <= HDR;
        end
        HDR: if (m_hdr_ready) begin cnt <= '0; state <= BYTES; end
        BYTES: if (m_tready) begin
          cnt <= cnt + 1'b1;
          if (cnt == total - 16'd1) begin
            state      <= IDLE;
            sent_count <= sent_count + 1'b1;
            if (cur.kind == SUB_ACKNACK) ack_count <= ack_count + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
