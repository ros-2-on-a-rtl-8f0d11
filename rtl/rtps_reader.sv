// rtps_reader: one stateful RTPS reader (RTPS_READER, NUM_READERS copies).
//
// CTRL_MEM holds up to MATCH_ENTRIES matched remote writers (GUID, unicast
// locator, last sequence number delivered, and whether anything was received
// yet). Matches arrive from RTPS_DISCOVERY; a match for an already known
// writer only refreshes its locator.
// DATA records are offered to every reader at once; this reader wants a
// record addressed to its entity id (or to ENTITYID_UNKNOWN) and takes it:
//   - from an unmatched writer: dropped;
//   - first sample from a writer, or sn = last+1: written into PAYLOAD_MEM
//     (a FIFO of PAYLOAD_DEPTH samples towards the DDS reader) and last = sn;
//     if PAYLOAD_MEM is full the record waits (back-pressure);
//   - sn <= last: duplicate, dropped (dup_count);
//   - sn > last+1: a gap; the sample is dropped (gap_count) and an ACKNACK
//     asking for last+1 is sent to the writer's locator, so the writer
//     resends from there (go-back-N). One ACKNACK is held at a time.
// Timing: a wanted record is decided in the cycle it is offered; delivered
// samples leave PAYLOAD_MEM one cycle later. CTRL_MEM and PAYLOAD_MEM are
// from the paper's diagram; the repair scheme is this design's choice.
module rtps_reader
  import ros2_chip_pkg::*;
#(
  parameter int IDX           = 0,
  parameter int MATCH_ENTRIES = 4,
  parameter int PAYLOAD_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst,
  // DATA records (shared by all readers)
  input  logic        s_valid,
  output logic        s_want,
  output logic        s_ready,
  input  rtps_msg_t   s_msg,
  // matches from discovery (shared)
  input  logic        match_valid,
  output logic        match_ready,
  input  match_t      match_in,
  // ACKNACK towards RTPS_OUT
  output logic        ack_valid,
  input  logic        ack_ready,
  output rtps_msg_t   ack_msg,
  // samples towards the DDS reader
  output logic        m_valid,
  input  logic        m_ready,
  output sample_t     m_sample,
  output logic [15:0] dup_count,
  output logic [15:0] gap_count
);
  localparam logic [31:0] MY_ID = reader_entity(IDX);
  localparam int MW = $clog2(MATCH_ENTRIES);

  // CTRL_MEM
  logic          c_v     [MATCH_ENTRIES];
  logic          c_fresh [MATCH_ENTRIES];
  logic [127:0]  c_guid  [MATCH_ENTRIES];
  logic [31:0]   c_ip    [MATCH_ENTRIES];
  logic [15:0]   c_port  [MATCH_ENTRIES];
  logic [63:0]   c_last  [MATCH_ENTRIES];
  logic [MW-1:0] c_ptr;

  // lookup of the record's writer
  logic          w_hit;
  logic [MW-1:0] w_idx;
  always_comb begin
    w_hit = 1'b0;
    w_idx = '0;
    for (int i = 0; i < MATCH_ENTRIES; i++)
      if (c_v[i] && c_guid[i] == {s_msg.guid_prefix, s_msg.writer_id}) begin
        w_hit = 1'b1;
        w_idx = MW'(i);
      end
  end
  // lookup of a match's writer
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

  wire want      = (s_msg.kind == SUB_DATA) &&
                   (s_msg.reader_id == MY_ID || s_msg.reader_id == ENTITYID_UNKNOWN);
  wire in_order  = w_hit && (c_fresh[w_idx] || s_msg.sn == c_last[w_idx] + 64'd1);
  wire dup       = w_hit && !c_fresh[w_idx] && s_msg.sn <= c_last[w_idx];
  wire gap       = w_hit && !in_order && !dup;

  logic f_ready;
  sample_t smp;
  assign smp = '{guid_prefix: s_msg.guid_prefix, writer_id: s_msg.writer_id,
                 sn: s_msg.sn, len: s_msg.len, data: s_msg.data};

  // PAYLOAD_MEM
  sync_fifo #(.T(sample_t), .DEPTH(PAYLOAD_DEPTH)) u_payload_mem (
    .clk, .rst, .s_valid(s_valid && want && in_order), .s_ready(f_ready), .s_data(smp),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_sample), .count());

  assign s_want      = want;
  assign s_ready     = !want || !in_order || f_ready;
  assign match_ready = (match_in.local_idx == 8'(IDX));

  always_ff @(posedge clk) begin
    if (rst) begin
      c_ptr     <= '0;
      ack_valid <= 1'b0;
      dup_count <= '0;
      gap_count <= '0;
      for (int i = 0; i < MATCH_ENTRIES; i++) c_v[i] <= 1'b0;
    end else begin
      if (ack_valid && ack_ready) ack_valid <= 1'b0;

      if (s_valid && s_ready && want) begin
        if (in_order) begin
          c_last[w_idx]  <= s_msg.sn;
          c_fresh[w_idx] <= 1'b0;
        end
        if (dup) dup_count <= dup_count + 1'b1;
        if (gap) begin
          gap_count <= gap_count + 1'b1;
          if (!ack_valid) begin
            ack_valid           <= 1'b1;
            ack_msg             <= '0;
            ack_msg.kind        <= SUB_ACKNACK;
            ack_msg.guid_prefix <= s_msg.guid_prefix;
            ack_msg.reader_id   <= MY_ID;
            ack_msg.writer_id   <= s_msg.writer_id;
            ack_msg.sn          <= c_last[w_idx] + 64'd1;
            ack_msg.ip          <= c_ip[w_idx];
            ack_msg.port        <= c_port[w_idx];
          end
        end
      end

      if (match_valid && match_ready) begin
        c_v[m_idx]    <= 1'b1;
        c_guid[m_idx] <= {match_in.guid_prefix, match_in.entity_id};
        c_ip[m_idx]   <= match_in.ip;
        c_port[m_idx] <= match_in.port;
        if (!m_hit) begin
          c_fresh[m_idx] <= 1'b1;
          c_last[m_idx]  <= '0;
          c_ptr          <= c_ptr + 1'b1;
        end
      end
    end
  end
endmodule
