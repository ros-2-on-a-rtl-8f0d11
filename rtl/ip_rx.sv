// ip_rx: IPv4 receive path (IP_RX of the network layer).
//
// Accepts one Ethernet frame at a time from the data link layer as an
// Ethernet header record followed by the IPv4 packet bytes (byte-wide stream
// with tlast). It walks the IPv4 header, summing it 16 bits at a time, and
// keeps the packet only if the version is 4, the header checksum is right,
// the packet is not a fragment and the destination is local_ip, the limited
// broadcast address or a multicast address. A kept packet is forwarded as an
// ip_hdr_t record and then exactly payload_len payload bytes, the last with
// tlast; Ethernet padding after the IP total length is discarded. IP options
// (IHL > 5) are skipped. Dropped packets are counted in drop_count.
// Timing: the header record appears two cycles after the last header byte;
// payload then passes through at one byte per cycle with no buffering.
// The split into a header channel and a payload channel follows the paper's
// diagram; byte width, address filter and drop rules are this design's choice.
module ip_rx
  import ros2_chip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] local_ip,
  // DATALINK_IP_RX_HEADER_AXIS / PAYLOAD_AXIS
  input  logic        s_hdr_valid,
  output logic        s_hdr_ready,
  input  eth_hdr_t    s_hdr,
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  // ip_rx_header_axis / ip_rx_payload_axis
  output logic        m_hdr_valid,
  input  logic        m_hdr_ready,
  output ip_hdr_t     m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  output logic [15:0] drop_count
);
  typedef enum logic [2:0] {IDLE, HDR, CHECK, OUT_HDR, PAYLOAD, DROP} state_e;
  state_e state;

  logic [5:0]  cnt;        // header byte index
  logic [5:0]  hlen;       // header length in bytes
  logic [7:0]  hi_byte;
  logic [15:0] csum;
  logic [3:0]  version;
  logic [15:0] total_len;
  logic [15:0] frag;
  logic [7:0]  proto;
  logic [31:0] src_ip, dst_ip;
  logic [15:0] rem;
  logic        saw_last;

  logic in_fire;
  assign in_fire = s_tvalid && s_tready;

  always_comb begin
    s_hdr_ready = (state == IDLE);
    unique case (state)
      HDR, DROP: s_tready = 1'b1;
      PAYLOAD:   s_tready = m_tready;
      default:   s_tready = 1'b0;
    endcase
    m_tvalid = (state == PAYLOAD) && s_tvalid;
    m_tdata  = s_tdata;
    m_tlast  = (rem == 16'd1) || s_tlast;
    m_hdr_valid = (state == OUT_HDR);
    m_hdr = '{src_ip: src_ip, dst_ip: dst_ip, protocol: proto,
              payload_len: total_len - 16'(hlen)};
  end

  logic dst_ok;
  assign dst_ok = (dst_ip == local_ip) || (dst_ip == 32'hFFFF_FFFF) ||
                  (dst_ip[31:28] == 4'hE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= IDLE;
      drop_count <= '0;
      cnt        <= '0;
      hlen       <= 6'd20;
      csum       <= '0;
      saw_last   <= 1'b0;
      rem        <= '0;
    end else begin
      unique case (state)
        IDLE: if (s_hdr_valid) begin
          state    <= (s_hdr.ethertype == ETHERTYPE_IPV4) ? HDR : DROP;
          cnt      <= '0;
          hlen     <= 6'd20;
          csum     <= '0;
          saw_last <= 1'b0;
          if (s_hdr.ethertype != ETHERTYPE_IPV4) drop_count <= drop_count + 1'b1;
        end
        HDR: if (in_fire) begin
          cnt <= cnt + 1'b1;
          if (!cnt[0]) hi_byte <= s_tdata;
          else         csum    <= csum_add(csum, {hi_byte, s_tdata});
          unique case (cnt)
            6'd0: begin version <= s_tdata[7:4]; hlen <= {s_tdata[3:0], 2'b00}; end
            6'd2: total_len[15:8] <= s_tdata;
            6'd3: total_len[7:0]  <= s_tdata;
            6'd6: frag[15:8]      <= s_tdata;
            6'd7: frag[7:0]       <= s_tdata;
            6'd9: proto           <= s_tdata;
            6'd12: src_ip[31:24]  <= s_tdata;
            6'd13: src_ip[23:16]  <= s_tdata;
            6'd14: src_ip[15:8]   <= s_tdata;
            6'd15: src_ip[7:0]    <= s_tdata;
            6'd16: dst_ip[31:24]  <= s_tdata;
            6'd17: dst_ip[23:16]  <= s_tdata;
            6'd18: dst_ip[15:8]   <= s_tdata;
            6'd19: dst_ip[7:0]    <= s_tdata;
            default: ;
          endcase
          if (s_tlast) saw_last <= 1'b1;
          if (cnt == hlen - 6'd1 || s_tlast) state <= CHECK;
        end
        CHECK: begin
          rem <= total_len - 16'(hlen);
          if (saw_last || cnt != hlen || version != 4'd4 || hlen < 6'd20 ||
              csum != 16'hFFFF || frag[13] || frag[12:0] != '0 || !dst_ok ||
              total_len <= 16'(hlen)) begin
            drop_count <= drop_count + 1'b1;
            state      <= saw_last ? IDLE : DROP;
          end else begin
            state <= OUT_HDR;
          end
        end
        OUT_HDR: if (m_hdr_ready) state <= PAYLOAD;
        PAYLOAD: if (in_fire) begin
          rem <= rem - 1'b1;
          if (s_tlast)            state <= IDLE;
          else if (rem == 16'd1)  state <= DROP;
        end
        DROP: if (in_fire && s_tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
