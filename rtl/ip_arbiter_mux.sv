// ip_arbiter_mux: packet arbiter in front of IP_TX (IP_ARBITER_MUX).
//
// N transmit sources (input 0: UDP_TX, input 1: the application's raw IP
// path) each offer an ip_hdr_t record followed by a payload stream. When
// idle the arbiter grants the first source with a header waiting, searching
// round-robin from the one after the last grant, and then passes that
// source's header and payload through unchanged until the payload's tlast,
// so packets never interleave. Timing: one idle cycle between packets; the
// data path is combinational (no added latency). The round-robin policy is
// this design's choice; the paper's diagram gives the block and its two
// inputs.
module ip_arbiter_mux
  import ros2_chip_pkg::*;
#(
  parameter int N = 2
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_hdr_valid [N],
  output logic        s_hdr_ready [N],
  input  ip_hdr_t     s_hdr       [N],
  input  logic [7:0]  s_tdata     [N],
  input  logic        s_tvalid    [N],
  input  logic        s_tlast     [N],
  output logic        s_tready    [N],
  output logic        m_hdr_valid,
  input  logic        m_hdr_ready,
  output ip_hdr_t     m_hdr,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant
);
  localparam int GW = $clog2(N > 1 ? N : 2);
  typedef enum logic [1:0] {IDLE, HDR, DATA} state_e;
  state_e  state;
  logic [GW-1:0] last, pick;
  logic          any;

  always_comb begin
    any  = 1'b0;
    pick = last;
    for (int k = N; k >= 1; k--) begin   // lowest offset wins
      if (s_hdr_valid[(int'(last) + k) % N]) begin
        any  = 1'b1;
        pick = GW'((int'(last) + k) % N);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      s_hdr_ready[i] = (state == HDR) && (grant == GW'(i)) && m_hdr_ready;
      s_tready[i]    = (state == DATA) && (grant == GW'(i)) && m_tready;
    end
    m_hdr_valid = (state == HDR) && s_hdr_valid[grant];
    m_hdr       = s_hdr[grant];
    m_tvalid    = (state == DATA) && s_tvalid[grant];
    m_tdata     = s_tdata[grant];
    m_tlast     = s_tlast[grant];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      grant <= '0;
      last  <= GW'(N - 1);
    end else begin
      unique case (state)
        IDLE: if (any) begin grant <= pick; last <= pick; state <= HDR; end
        HDR:  if (m_hdr_valid && m_hdr_ready) state <= DATA;
        DATA: if (m_tvalid && m_tready && m_tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
