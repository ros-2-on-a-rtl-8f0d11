// rtps_writer: one stateful RTPS writer (RTPS_WRITER, NUM_WRITERS copies).
//
// CTRL_MEM holds up to MATCH_ENTRIES matched remote readers (GUID and
// unicast locator), filled from RTPS_DISCOVERY; each new match is also
// reported once on the DISCOVER output. PAYLOAD_MEM keeps the last
// HISTORY_DEPTH samples, indexed by sequence number modulo the depth.
// A sample from the DDS writer gets the next sequence number (first is 1),
// is stored, and is sent as one DATA record to every matched reader in turn.
// An ACKNACK addressed to this writer from a matched reader asking for
// sequence number s makes the writer resend, to that reader only, every
// sample from max(s, oldest kept) up to the newest (go-back-N). ACKNACKs and
// new samples are served one at a time, ACKNACKs first.
// Timing: one DATA record per cycle while RTPS_OUT accepts; a new sample is
// taken only when the previous one has gone to all readers.
// CTRL_MEM, PAYLOAD_MEM and the DISCOVER output are from the paper's
// diagram; the repair scheme and history size are this design's choices.
module rtps_writer
  import ros2_chip_pkg::*;
#(
  parameter int IDX           = 0,
  parameter int MATCH_ENTRIES = 4,
  parameter int HISTORY_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst,
  // samples from the DDS writer
  input  logic        s_valid,
  output logic        s_ready,
  input  sample_t     s_sample,
  // ACKNACK records (shared by all writers)
  input  logic        ack_valid,
  output logic        ack_ready,
  input  rtps_msg_t   ack_msg,
  // matches from discovery (shared)
  input  logic        match_valid,
  output logic        match_ready,
  input  match_t      match_in,
  // DATA towards RTPS_OUT
  output logic        m_valid,
  input  logic        m_ready,
  output rtps_msg_t   m_msg,
  // DISCOVER: new matched reader
  output logic        disc_valid,
  input  logic        disc_ready,
  output match_t      disc,
  output logic [63:0] last_sn,
  output logic [15:0] resend_count
);
  localparam logic [31:0] MY_ID = writer_entity(IDX);
  localparam int MW = $clog2(MATCH_ENTRIES);
  localparam int HW = $clog2(HISTORY_DEPTH);

  // CTRL_MEM
  logic          c_v    [MATCH_ENTRIES];
  logic [127:0]  c_guid [MATCH_ENTRIES];
  logic [31:0]   c_ip   [MATCH_ENTRIES];
  logic [15:0]   c_port [MATCH_ENTRIES];
  logic [MW-1:0] c_ptr;
  // PAYLOAD_MEM
  plen_t         p_len  [HISTORY_DEPTH];
  payload_t      p_data [HISTORY_DEPTH];

  typedef enum logic [1:0] {IDLE, SEND, RESEND} state_e;
  state_e        state;
  logic [MW-1:0] tgt;         // reader being served
  logic [63:0]   cur_sn;      // sequence number being sent

  // ACKNACK lookup
  logic          a_hit;
  logic [MW-1:0] a_idx;
  always_comb begin
    a_hit = 1'b0;
    a_idx = '0;
    for (int i = 0; i < MATCH_ENTRIES; i++)
      if (c_v[i] && c_guid[i] == {ack_msg.guid_prefix, ack_msg.reader_id}) begin
        a_hit = 1'b1;
        a_idx = MW'(i);
      end
  end
  // match lookup
  logic          m_hit;
  logic [MW-1:0] m_idx;
  always_comb begin
    m_hit = 1'b0;
    m_idx = c_ptr;
    for (int i = 0; i < MATCH_ENTRIES; i++)
      if (c_v[i] && c_guid[i] == {match_in.guid_prefix, match_in.entity_id}) begin
        m_hit = 1'b1;
        m_idx = MW'(i);
      end
  end

  wire ack_for_me = (ack_msg.writer_id == MY_ID);
  wire [63:0] oldest = (last_sn >= 64'(HISTORY_DEPTH)) ? last_sn - 64'(HISTORY_DEPTH) + 64'd1 : 64'd1;

  assign ack_ready   = !ack_for_me || (state == IDLE);
  assign s_ready     = (state == IDLE) && !(ack_valid && ack_for_me);
  assign match_ready = (match_in.local_idx == 8'(IDX)) && !disc_valid;

  // first matched reader at or after tgt
  logic          nxt_hit;
  logic [MW-1:0] nxt;
  always_comb begin
    nxt_hit = 1'b0;
    nxt     = '0;
    for (int i = MATCH_ENTRIES - 1; i >= 0; i--)
      if (c_v[i] && MW'(i) >= tgt) begin
        nxt_hit = 1'b1;
        nxt     = MW'(i);
      end
  end

  always_comb begin
    m_msg             = '0;
    m_msg.kind        = SUB_DATA;
    m_msg.guid_prefix = c_guid[state == SEND ? nxt : tgt][127:32];
    m_msg.reader_id   = c_guid[state == SEND ? nxt : tgt][31:0];
    m_msg.writer_id   = MY_ID;
    m_msg.sn          = cur_sn;
    m_msg.ip          = c_ip[state == SEND ? nxt : tgt];
    m_msg.port        = c_port[state == SEND ? nxt : tgt];
    m_msg.len         = p_len[cur_sn[HW-1:0]];
    m_msg.data        = p_data[cur_sn[HW-1:0]];
    m_valid           = (state == SEND && nxt_hit) || (state == RESEND);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= IDLE;
      c_ptr        <= '0;
      last_sn      <= '0;
      cur_sn       <= '0;
      tgt          <= '0;
      disc_valid   <= 1'b0;
      resend_count <= '0;
      for (int i = 0; i < MATCH_ENTRIES; i++) c_v[i] <= 1'b0;
    end else begin
      if (disc_valid && disc_ready) disc_valid <= 1'b0;
      if (match_valid && match_ready) begin
        c_v[m_idx]    <= 1'b1;
        c_guid[m_idx] <= {match_in.guid_prefix, match_in.entity_id};
        c_ip[m_idx]   <= match_in.ip;
        c_port[m_idx] <= match_in.port;
        if (!m_hit) begin
          c_ptr      <= c_ptr + 1'b1;
          disc_valid <= 1'b1;
          disc       <= match_in;
        end
      end

      unique case (state)
        IDLE: begin
          if (ack_valid && ack_for_me) begin
            if (a_hit && ack_msg.sn <= last_sn && last_sn != 64'd0) begin
              tgt          <= a_idx;
              cur_sn       <= (ack_msg.sn < oldest) ? oldest : ack_msg.sn;
              resend_count <= resend_count + 1'b1;
              state        <= RESEND;
            end
          end else if (s_valid) begin
            p_len[HW'(last_sn + 64'd1)]  <= s_sample.len;
            p_data[HW'(last_sn + 64'd1)] <= s_sample.data;
            last_sn <= last_sn + 64'd1;
            cur_sn  <= last_sn + 64'd1;
            tgt     <= '0;
            state   <= SEND;
          end
        end
        SEND: begin
          if (!nxt_hit) state <= IDLE;
          else if (m_ready) begin
            if (nxt == MW'(MATCH_ENTRIES - 1)) state <= IDLE;
            else tgt <= nxt + 1'b1;
          end
        end
        RESEND: if (m_ready) begin
          if (cur_sn == last_sn) state <= IDLE;
          else cur_sn <= cur_sn + 64'd1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
