// rtps_discovery: static endpoint discovery of the RTPS layer
// (RTPS_DISCOVERY).
//
// Input: discovery DATA records from RTPS_DECODER, each announcing one remote
// endpoint: a writer when sent by the SEDP publications writer (0x3C2), a
// reader when sent by the SEDP subscriptions writer (0x4C2). The 20-byte
// payload is this design's fixed announcement record (see ros2_chip_pkg):
// topic id, entity id and unicast locator.
// Work: the announced topic is compared with every enabled local endpoint of
// the other kind (remote writer -> local readers, remote reader -> local
// writers), one endpoint per cycle. Each match is pushed as a match_t into
// FIFO 0 (to the RTPS readers) or FIFO 2 (to the RTPS writers). If the remote
// endpoint was not seen before (a SEEN_ENTRIES table of remote GUIDs,
// replaced round-robin) the local endpoint's own announcement is also pushed
// into FIFO 1 (to RTPS_OUT), addressed to the remote locator, so that the
// remote side learns about this chip; an endpoint already seen is not
// answered again, which ends the exchange.
// Timing: one cycle per local endpoint scanned, plus stalls while a FIFO is
// full. The three FIFOs follow the paper's diagram; the announcement format,
// matching on a 32-bit topic id and the answering rule are this design's.
module rtps_discovery
  import ros2_chip_pkg::*;
#(
  parameter int NUM_READERS  = 6,
  parameter int NUM_WRITERS  = 6,
  parameter int SEEN_ENTRIES = 16,
  parameter int FIFO_DEPTH   = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] local_ip,
  input  logic [31:0] reader_topic [NUM_READERS],
  input  logic        reader_en    [NUM_READERS],
  input  logic [31:0] writer_topic [NUM_WRITERS],
  input  logic        writer_en    [NUM_WRITERS],
  input  logic        s_valid,
  output logic        s_ready,
  input  rtps_msg_t   s_msg,
  // FIFO 0: matches for readers
  output logic        rd_match_valid,
  input  logic        rd_match_ready,
  output match_t      rd_match,
  // FIFO 1: announcements to RTPS_OUT
  output logic        out_valid,
  input  logic        out_ready,
  output rtps_msg_t   out_msg,
  // FIFO 2: matches for writers
  output logic        wr_match_valid,
  input  logic        wr_match_ready,
  output match_t      wr_match,
  output logic [15:0] match_count
);
  localparam int NMAX = (NUM_READERS > NUM_WRITERS) ? NUM_READERS : NUM_WRITERS;
  localparam int SW   = $clog2(SEEN_ENTRIES);

  typedef enum logic [1:0] {IDLE, SCAN, PUSH_MATCH, PUSH_ANN} state_e;
  state_e state;

  logic          remote_is_writer;
  logic [31:0]   topic, r_entity, r_ip;
  logic [15:0]   r_port;
  logic [95:0]   r_prefix;
  logic          is_new;
  logic [7:0]    idx;
  logic [63:0]   ann_sn;

  logic          seen_v  [SEEN_ENTRIES];
  logic [127:0]  seen_g  [SEEN_ENTRIES];
  logic [SW-1:0] seen_ptr;

  // fields of the incoming announcement
  wire [31:0] in_topic  = s_msg.data[32 +: 32];
  wire [31:0] in_entity = {s_msg.data[64 +: 8], s_msg.data[72 +: 8], s_msg.data[80 +: 8], s_msg.data[88 +: 8]};
  wire [31:0] in_ip     = {s_msg.data[96 +: 8], s_msg.data[104 +: 8], s_msg.data[112 +: 8], s_msg.data[120 +: 8]};
  wire [15:0] in_port   = s_msg.data[128 +: 16];

  logic in_seen;
  always_comb begin
    in_seen = 1'b0;
    for (int i = 0; i < SEEN_ENTRIES; i++)
      if (seen_v[i] && seen_g[i] == {s_msg.guid_prefix, in_entity}) in_seen = 1'b1;
  end

  // local endpoint under the scan index
  logic        hit;
  always_comb begin
    hit = 1'b0;
    if (remote_is_writer) begin
      for (int i = 0; i < NUM_READERS; i++)
        if (idx == 8'(i) && reader_en[i] && reader_topic[i] == topic) hit = 1'b1;
    end else begin
      for (int i = 0; i < NUM_WRITERS; i++)
        if (idx == 8'(i) && writer_en[i] && writer_topic[i] == topic) hit = 1'b1;
    end
  end
  wire last_idx = remote_is_writer ? (idx == 8'(NUM_READERS - 1)) : (idx == 8'(NUM_WRITERS - 1));

  // FIFOs
  logic   f_rd_ready, f_wr_ready, f_out_ready;
  match_t m_rec;
  assign m_rec = '{local_idx: idx, guid_prefix: r_prefix, entity_id: r_entity, ip: r_ip, port: r_port};

  sync_fifo #(.T(match_t), .DEPTH(FIFO_DEPTH)) u_rd_fifo (
    .clk, .rst, .s_valid(state == PUSH_MATCH && remote_is_writer), .s_ready(f_rd_ready), .s_data(m_rec),
    .m_valid(rd_match_valid), .m_ready(rd_match_ready), .m_data(rd_match), .count());
  sync_fifo #(.T(match_t), .DEPTH(FIFO_DEPTH)) u_wr_fifo (
    .clk, .rst, .s_valid(state == PUSH_MATCH && !remote_is_writer), .s_ready(f_wr_ready), .s_data(m_rec),
    .m_valid(wr_match_valid), .m_ready(wr_match_ready), .m_data(wr_match), .count());

  rtps_msg_t ann;
  always_comb begin
    ann             = '0;
    ann.kind        = SUB_DATA;
    ann.guid_prefix = r_prefix;
    // a local reader is announced by the subscriptions writer, a local writer
    // by the publications writer
    ann.writer_id   = remote_is_writer ? ENTITYID_SEDP_SUB_WRITER : ENTITYID_SEDP_PUB_WRITER;
    ann.reader_id   = remote_is_writer ? ENTITYID_SEDP_SUB_READER : ENTITYID_SEDP_PUB_READER;
    ann.sn          = ann_sn;
    ann.ip          = r_ip;
    ann.port        = r_port;
    ann.len         = plen_t'(DISC_LEN);
    ann.data[0 +: 32]  = 32'h0000_0300;                 // PL_CDR_LE: 00 03 00 00
    ann.data[32 +: 32] = topic;
    begin
      logic [31:0] ent;
      ent = remote_is_writer ? reader_entity(int'(idx)) : writer_entity(int'(idx));
      ann.data[64 +: 32] = {ent[7:0], ent[15:8], ent[23:16], ent[31:24]};
    end
    ann.data[96 +: 32]  = {local_ip[7:0], local_ip[15:8], local_ip[23:16], local_ip[31:24]};
    ann.data[128 +: 16] = RTPS_SRC_PORT;
  end

  sync_fifo #(.T(rtps_msg_t), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst, .s_valid(state == PUSH_ANN), .s_ready(f_out_ready), .s_data(ann),
    .m_valid(out_valid), .m_ready(out_ready), .m_data(out_msg), .count());

  assign s_ready = (state == IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= IDLE;
      seen_ptr    <= '0;
      ann_sn      <= 64'd1;
      match_count <= '0;
      idx         <= '0;
      for (int i = 0; i < SEEN_ENTRIES; i++) seen_v[i] <= 1'b0;
    end else begin
      unique case (state)
        IDLE: if (s_valid) begin
          remote_is_writer <= (s_msg.writer_id == ENTITYID_SEDP_PUB_WRITER);
          topic    <= in_topic;
          r_entity <= in_entity;
          r_ip     <= in_ip;
          r_port   <= in_port;
          r_prefix <= s_msg.guid_prefix;
          is_new   <= !in_seen;
          idx      <= '0;
          if (!in_seen) begin
            seen_v[seen_ptr] <= 1'b1;
            seen_g[seen_ptr] <= {s_msg.guid_prefix, in_entity};
            seen_ptr         <= seen_ptr + 1'b1;
          end
          state <= (s_msg.len >= plen_t'(DISC_LEN)) ? SCAN : IDLE;
        end
        SCAN: begin
          if (hit) state <= PUSH_MATCH;
          else if (last_idx) state <= IDLE;
          else idx <= idx + 1'b1;
        end
        PUSH_MATCH: if (remote_is_writer ? f_rd_ready : f_wr_ready) begin
          match_count <= match_count + 1'b1;
          if (is_new) state <= PUSH_ANN;
          else if (last_idx) state <= IDLE;
          else begin idx <= idx + 1'b1; state <= SCAN; end
        end
        PUSH_ANN: if (f_out_ready) begin
          ann_sn <= ann_sn + 1'b1;
          if (last_idx) state <= IDLE;
          else begin idx <= idx + 1'b1; state <= SCAN; end
        end
        default: state <= IDLE;
      endcase
    end
  end

  initial assert (NMAX < 256) else $error("at most 255 endpoints of a kind");
endmodule
