// sync_fifo: single-clock FIFO for any element type, used wherever the chip
// decouples two blocks (RTPS decoder/discovery/output FIFOs, payload memories,
// the UDP checksum buffer).
//
// Storage is a plain array of DEPTH entries (DEPTH a power of two) with read
// and write pointers one bit wider than the index. s_ready is low when full,
// m_valid high when not empty; a push and a pop may happen in the same cycle.
// m_data shows the head entry combinationally (first-word fall-through).
// count gives the fill level. Reset empties it; entries are not cleared.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic s_valid,
  output logic s_ready,
  input  T     s_data,
  output logic m_valid,
  input  logic m_ready,
  output T     m_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW:0] wp, rp;

  assign count   = wp - rp;
  assign s_ready = (count != (AW+1)'(DEPTH));
  assign m_valid = (wp != rp);
  assign m_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (s_valid && s_ready) wp <= wp + 1'b1;
      if (m_valid && m_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (s_valid && s_ready) mem[wp[AW-1:0]] <= s_data;

endmodule
