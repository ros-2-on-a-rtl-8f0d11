// ip_tx: IPv4 transmit path (IP_TX of the network layer).
//
// Takes an ip_hdr_t record and payload from IP_ARBITER_MUX, finds the
// destination MAC address and emits the Ethernet header record (EtherType
// 0x0800, source local_mac) followed by the 20-byte IPv4 header and the
// payload, tlast on the last byte. The header has version 4, IHL 5, TOS 0,
// an identification that counts up per packet, DF set, TTL 64 and a header
// checksum computed from the other fields while the MAC is resolved.
// MAC resolution: multicast 224.0.0.0/4 maps to 01:00:5e + low 23 address
// bits, 255.255.255.255 to the broadcast MAC, anything else is looked up in
// the ARP cache. On a miss one ARP request is asked for (arp_req_valid pulse)
// and the block waits for the cache to fill; after ARP_TIMEOUT cycles the
// packet is dropped (its payload drained) and counted in drop_count.
// Timing with a cache hit: Ethernet record 2 cycles after the IP record,
// then 20 header cycles, then payload at one byte per cycle.
// Header field values and the miss policy are this design's choices.
module ip_tx
  import ros2_chip_pkg::*;
#(
  parameter int ARP_TIMEOUT = 4096
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [47:0] local_mac,
  input  logic        s_hdr_valid,
  output logic        s_hdr_ready,
  input  ip_hdr_t     s_hdr,
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  // DATALINK_IP_TX_HEADER_AXIS / PAYLOAD_AXIS
  output logic        m_hdr_valid,
  input  logic        m_hdr_ready,
  output eth_hdr_t    m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  // ARP
  output logic [31:0] arp_lookup_ip,
  input  logic        arp_lookup_hit,
  input  logic [47:0] arp_lookup_mac,
  output logic        arp_req_valid,
  output logic [31:0] arp_req_ip,
  output logic [15:0] drop_count
);
  typedef enum logic [2:0] {IDLE, RESOLVE, OUT_HDR, IPHDR, PAYLOAD, DROP} state_e;
  state_e      state;
  ip_hdr_t     h;
  logic [47:0] dst_mac;
  logic [15:0] ident;
  logic [4:0]  cnt;
  logic [$clog2(ARP_TIMEOUT+1)-1:0] timer;
  logic        asked;

  wire [15:0] total_len = h.payload_len + 16'd20;
  logic [15:0] hsum;
  always_comb begin
    hsum = csum_add(16'h4500, total_len);
    hsum = csum_add(hsum, ident);
    hsum = csum_add(hsum, 16'h4000);
    hsum = csum_add(hsum, {8'd64, h.protocol});
    hsum = csum_add(hsum, h.src_ip[31:16]);
    hsum = csum_add(hsum, h.src_ip[15:0]);
    hsum = csum_add(hsum, h.dst_ip[31:16]);
    hsum = csum_add(hsum, h.dst_ip[15:0]);
  end
  wire [159:0] iph = {16'h4500, total_len, ident, 16'h4000, 8'd64, h.protocol,
                      ~hsum, h.src_ip, h.dst_ip};

  assign arp_lookup_ip = h.dst_ip;
  assign arp_req_ip    = h.dst_ip;

  always_comb begin
    s_hdr_ready = (state == IDLE);
    m_hdr_valid = (state == OUT_HDR);
    m_hdr       = '{dst_mac: dst_mac, src_mac: local_mac, ethertype: ETHERTYPE_IPV4};
    unique case (state)
      PAYLOAD: s_tready = m_tready;
      DROP:    s_tready = 1'b1;
      default: s_tready = 1'b0;
    endcase
    m_tvalid = (state == IPHDR) || ((state == PAYLOAD) && s_tvalid);
    m_tdata  = (state == IPHDR) ? iph[8*(19 - 32'(cnt)) +: 8] : s_tdata;
    m_tlast  = (state == PAYLOAD) && s_tlast;
    arp_req_valid = (state == RESOLVE) && !asked && !arp_lookup_hit &&
                    h.dst_ip[31:28] != 4'hE && h.dst_ip != 32'hFFFF_FFFF;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= IDLE;
      ident      <= '0;
      cnt        <= '0;
      timer      <= '0;
      asked      <= 1'b0;
      drop_count <= '0;
    end else begin
      unique case (state)
        IDLE: if (s_hdr_valid) begin
          h     <= s_hdr;
          timer <= '0;
          asked <= 1'b0;
          state <= RESOLVE;
        end
        RESOLVE: begin
          if (h.dst_ip[31:28] == 4'hE) begin
            dst_mac <= {24'h01005E, 1'b0, h.dst_ip[22:0]};
            state   <= OUT_HDR;
          end else if (h.dst_ip == 32'hFFFF_FFFF) begin
            dst_mac <= 48'hFFFF_FFFF_FFFF;
            state   <= OUT_HDR;
          end else if (arp_lookup_hit) begin
            dst_mac <= arp_lookup_mac;
            state   <= OUT_HDR;
          end else begin
            asked <= 1'b1;
            timer <= timer + 1'b1;
            if (32'(timer) == ARP_TIMEOUT - 1) begin
              drop_count <= drop_count + 1'b1;
              state      <= DROP;
            end
          end
        end
        OUT_HDR: if (m_hdr_ready) begin cnt <= '0; state <= IPHDR; end
        IPHDR: if (m_tready) begin
          cnt <= cnt + 1'b1;
          if (cnt == 5'd19) state <= PAYLOAD;
        end
        PAYLOAD: if (s_tvalid && m_tready && s_tlast) begin
          ident <= ident + 1'b1;
          state <= IDLE;
        end
        DROP: if (s_tvalid && s_tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
