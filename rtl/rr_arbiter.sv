// rr_arbiter: N-to-1 round-robin arbiter for single-transfer records.
//
// Each requester offers a record of type T with valid/ready. The output
// shows the first valid requester counted from the one after the last
// winner; the winner's ready follows m_ready and the pointer moves on only
// when a transfer happens, so a record once offered stays offered until
// taken. grant tells which input is shown. Combinational, no latency.
// Used to merge the chip's many endpoints onto shared FIFOs and buses.
module rr_arbiter #(
  parameter type T = logic [7:0],
  parameter int  N = 2
) (
  input  logic clk,
  input  logic rst,
  input  logic s_valid [N],
  output logic s_ready [N],
  input  T     s_data  [N],
  output logic m_valid,
  input  logic m_ready,
  output T     m_data,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant
);
  localparam int GW = $clog2(N > 1 ? N : 2);
  logic [GW-1:0] last;

  always_comb begin
    m_valid = 1'b0;
    grant   = '0;
    for (int k = N; k >= 1; k--) begin
      if (s_valid[(int'(last) + k) % N]) begin
        m_valid = 1'b1;
        grant   = GW'((int'(last) + k) % N);
      end
    end
    m_data = s_data[grant];
    for (int i = 0; i < N; i++) s_ready[i] = m_ready && m_valid && (grant == GW'(i));
  end

  always_ff @(posedge clk) begin
    if (rst)                     last <= GW'(N - 1);
    else if (m_valid && m_ready) last <= grant;
  end
endmodule
