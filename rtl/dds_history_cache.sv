// dds_history_cache: the history cache shared by DDS_READER and DDS_WRITER.
//
// A circular buffer of DEPTH samples split over three memories, as in the
// paper's DDS diagram:
//   SAMPLE_MEM  - per slot: source GUID, sequence number, arrival time
//                 (free-running cycle count) and instance number;
//   PAYLOAD_MEM - per slot: serialized length and bytes;
//   INSTNCE_MEM - per instance: its key (the 128-bit source writer GUID) and
//                 the number of samples stored for it so far.
// History QoS is KEEP_LAST(DEPTH): a sample always goes in; when the buffer
// is full the oldest sample is overwritten and overflow_count counts it.
// The oldest sample is offered on the output (valid/ready, "take").
// A sample written when empty is offered on the next cycle. The instance key
// and the KEEP_LAST policy are this design's choices (ROS 2 topics have no
// key, so instances separate the samples of different remote writers).
module dds_history_cache
  import ros2_chip_pkg::*;
#(
  parameter int DEPTH     = 4,
  parameter int INSTANCES = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_valid,
  input  sample_t     s_sample,
  output logic        m_valid,
  input  logic        m_ready,
  output sample_t     m_sample,
  output logic [31:0] m_time,
  output logic [$clog2(INSTANCES)-1:0] m_instance,
  output logic [15:0] overflow_count,
  output logic [$clog2(DEPTH):0] fill
);
  localparam int AW = $clog2(DEPTH);
  localparam int IW = $clog2(INSTANCES);

  typedef struct packed {
    logic [95:0] guid_prefix;
    logic [31:0] writer_id;
    logic [63:0] sn;
    logic [31:0] t;
    logic [IW-1:0] inst;
  } info_t;

  info_t    sample_mem  [DEPTH];
  plen_t    pay_len     [DEPTH];
  payload_t pay_data    [DEPTH];
  logic          inst_v   [INSTANCES];
  logic [127:0]  inst_key [INSTANCES];
  logic [31:0]   inst_cnt [INSTANCES];
  logic [IW-1:0] inst_ptr;

  logic [AW:0] wp, rp;
  logic [31:0] now;

  assign fill    = wp - rp;
  assign m_valid = (wp != rp);
  wire   full    = (fill == (AW+1)'(DEPTH));
  wire   pop     = m_valid && m_ready;

  always_comb begin
    info_t r;
    r = sample_mem[rp[AW-1:0]];
    m_sample = '{guid_prefix: r.guid_prefix, writer_id: r.writer_id, sn: r.sn,
                 len: pay_len[rp[AW-1:0]], data: pay_data[rp[AW-1:0]]};
    m_time     = r.t;
    m_instance = r.inst;
  end

  logic          i_hit;
  logic [IW-1:0] i_idx;
  always_comb begin
    i_hit = 1'b0;
    i_idx = inst_ptr;
    for (int i = 0; i < INSTANCES; i++)
      if (inst_v[i] && inst_key[i] == {s_sample.guid_prefix, s_sample.writer_id}) begin
        i_hit = 1'b1;
        i_idx = IW'(i);
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp             <= '0;
      rp             <= '0;
      now            <= '0;
      inst_ptr       <= '0;
      overflow_count <= '0;
      for (int i = 0; i < INSTANCES; i++) inst_v[i] <= 1'b0;
    end else begin
      now <= now + 1'b1;
      if (s_valid) begin
        sample_mem[wp[AW-1:0]] <= '{guid_prefix: s_sample.guid_prefix, writer_id: s_sample.writer_id,
                                    sn: s_sample.sn, t: now, inst: i_idx};
        pay_len[wp[AW-1:0]]    <= s_sample.len;
        pay_data[wp[AW-1:0]]   <= s_sample.data;
        wp <= wp + 1'b1;
        inst_v[i_idx]   <= 1'b1;
        inst_key[i_idx] <= {s_sample.guid_prefix, s_sample.writer_id};
        inst_cnt[i_idx] <= i_hit ? inst_cnt[i_idx] + 1'b1 : 32'd1;
        if (!i_hit) inst_ptr <= inst_ptr + 1'b1;
        if (full && !pop) begin
          rp             <= rp + 1'b1;          // KEEP_LAST: drop the oldest
          overflow_count <= overflow_count + 1'b1;
        end
      end
      if (pop) rp <= rp + 1'b1;
    end
  end
endmodule
