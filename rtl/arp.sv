// arp: Address Resolution Protocol engine of the network layer (ARP).
//
// Receive: takes ARP frames (Ethernet header record + 28 payload bytes) from
// the data link layer. Every well-formed Ethernet/IPv4 ARP frame teaches the
// cache the sender's IP -> MAC binding (existing entry updated, otherwise the
// entry under a round-robin pointer replaced). A request whose target is
// local_ip queues a reply.
// Lookup: IP_TX presents lookup_ip and gets lookup_hit / lookup_mac in the
// same cycle (a search of all CACHE_ENTRIES entries). On a miss IP_TX pulses
// req_valid with the address; a broadcast ARP request for it is queued.
// Transmit: queued replies go out before queued requests, each as an Ethernet
// header record (EtherType 0x0806) followed by 28 bytes with tlast on the
// last; one frame takes 29 cycles when the sink is always ready.
// The block and its place between the receive and transmit paths follow the
// paper's diagram; the cache size, replacement and queueing are this
// design's choices. Frame layout follows RFC 826.
module arp
  import ros2_chip_pkg::*;
#(
  parameter int CACHE_ENTRIES = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] local_ip,
  input  logic [47:0] local_mac,
  // ARP frames from the data link layer
  input  logic        s_hdr_valid,
  output logic        s_hdr_ready,
  input  eth_hdr_t    s_hdr,
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  // DATALINK_ARP_TX_HEADER_AXIS / PAYLOAD_AXIS
  output logic        m_hdr_valid,
  input  logic        m_hdr_ready,
  output eth_hdr_t    m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  // lookup from IP_TX
  input  logic [31:0] lookup_ip,
  output logic        lookup_hit,
  output logic [47:0] lookup_mac,
  input  logic        req_valid,
  input  logic [31:0] req_ip
);
  localparam int IW = $clog2(CACHE_ENTRIES);

  // ------------------------------------------------------------ cache
  logic        c_valid [CACHE_ENTRIES];
  logic [31:0] c_ip    [CACHE_ENTRIES];
  logic [47:0] c_mac   [CACHE_ENTRIES];
  logic [IW-1:0] rr_ptr;

  always_comb begin
    lookup_hit = 1'b0;
    lookup_mac = '0;
    for (int i = 0; i < CACHE_ENTRIES; i++)
      if (c_valid[i] && c_ip[i] == lookup_ip) begin
        lookup_hit = 1'b1;
        lookup_mac = c_mac[i];
      end
  end

  // ------------------------------------------------------------ receive
  typedef enum logic [1:0] {R_IDLE, R_BODY, R_DONE, R_DROP} rstate_e;
  rstate_e     rstate;
  logic [4:0]  rcnt;
  logic [8*28-1:0] rbuf;       // byte k at [8*(27-k) +: 8]

  wire [15:0] f_htype = rbuf[8*28-1 -: 16];
  wire [15:0] f_ptype = rbuf[8*26-1 -: 16];
  wire [15:0] f_oper  = rbuf[8*22-1 -: 16];
  wire [47:0] f_sha   = rbuf[8*20-1 -: 48];
  wire [31:0] f_spa   = rbuf[8*14-1 -: 32];
  wire [31:0] f_tpa   = rbuf[8*4-1  -: 32];

  assign s_hdr_ready = (rstate == R_IDLE);
  assign s_tready    = (rstate == R_BODY) || (rstate == R_DROP);

  // learn-slot search
  logic          hit_sp;
  logic [IW-1:0] hit_idx;
  always_comb begin
    hit_sp  = 1'b0;
    hit_idx = rr_ptr;
    for (int i = 0; i < CACHE_ENTRIES; i++)
      if (c_valid[i] && c_ip[i] == f_spa) begin
        hit_sp  = 1'b1;
        hit_idx = IW'(i);
      end
  end

  // pending transmit work
  logic        reply_pend, request_pend;
  logic [47:0] reply_mac;
  logic [31:0] reply_ip, request_ip;

  // ------------------------------------------------------------ transmit
  typedef enum logic [1:0] {T_IDLE, T_HDR, T_BODY} tstate_e;
  tstate_e     tstate;
  logic        t_is_reply;
  logic [4:0]  tcnt;
  logic [8*28-1:0] tbuf;

  always_comb begin
    if (t_is_reply)
      tbuf = {16'd1, 16'h0800, 8'd6, 8'd4, 16'd2, local_mac, local_ip, reply_mac, reply_ip};
    else
      tbuf = {16'd1, 16'h0800, 8'd6, 8'd4, 16'd1, local_mac, local_ip, 48'd0, request_ip};
    m_hdr       = '{dst_mac: t_is_reply ? reply_mac : 48'hFFFF_FFFF_FFFF,
                    src_mac: local_mac, ethertype: ETHERTYPE_ARP};
    m_hdr_valid = (tstate == T_HDR);
    m_tvalid    = (tstate == T_BODY);
    m_tdata     = tbuf[8*(27 - 32'(tcnt)) +: 8];
    m_tlast     = (tcnt == 5'd27);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rstate       <= R_IDLE;
      tstate       <= T_IDLE;
      rcnt         <= '0;
      tcnt         <= '0;
      rr_ptr       <= '0;
      reply_pend   <= 1'b0;
      request_pend <= 1'b0;
      t_is_reply   <= 1'b0;
      for (int i = 0; i < CACHE_ENTRIES; i++) c_valid[i] <= 1'b0;
    end else begin
      // receive
      unique case (rstate)
        R_IDLE: if (s_hdr_valid) begin
          rcnt   <= '0;
          rstate <= (s_hdr.ethertype == ETHERTYPE_ARP) ? R_BODY : R_DROP;
        end
        R_BODY: if (s_tvalid) begin
          rbuf[8*(27 - 32'(rcnt)) +: 8] <= s_tdata;
          rcnt <= rcnt + 1'b1;
          if (rcnt == 5'd27) rstate <= s_tlast ? R_DONE : R_DROP;
          else if (s_tlast)  rstate <= R_IDLE;     // runt frame
        end
        R_DROP: if (s_tvalid && s_tlast) rstate <= (rcnt == 5'd28) ? R_DONE : R_IDLE;
        R_DONE: begin
          rstate <= R_IDLE;
          rcnt   <= '0;
          if (f_htype == 16'd1 && f_ptype == 16'h0800) begin
            c_valid[hit_idx] <= 1'b1;
            c_ip[hit_idx]    <= f_spa;
            c_mac[hit_idx]   <= f_sha;
            if (!hit_sp) rr_ptr <= rr_ptr + 1'b1;
            if (f_oper == 16'd1 && f_tpa == local_ip && !reply_pend) begin
              reply_pend <= 1'b1;
              reply_mac  <= f_sha;
              reply_ip   <= f_spa;
            end
          end
        end
        default: rstate <= R_IDLE;
      endcase

      if (req_valid && !request_pend) begin
        request_pend <= 1'b1;
        request_ip   <= req_ip;
      end

      // transmit
      unique case (tstate)
        T_IDLE: if (reply_pend || request_pend) begin
          t_is_reply <= reply_pend;
          tstate     <= T_HDR;
        end
        T_HDR: if (m_hdr_ready) begin
          tcnt   <= '0;
          tstate <= T_BODY;
        end
        T_BODY: if (m_tready) begin
          tcnt <= tcnt + 1'b1;
          if (tcnt == 5'd27) begin
            tstate <= T_IDLE;
            if (t_is_reply) reply_pend <= 1'b0;
            else            request_pend <= 1'b0;
          end
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end
endmodule
