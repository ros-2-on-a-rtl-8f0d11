`timescale 1ns/1ps
// tb_stream_sink: testbench receiver for a header record channel plus a
// byte stream with tlast. It applies random back-pressure to both channels
// (unless bp is cleared), stores every header in hq and every completed
// packet in fq, and counts the cycles the stream was stalled with data
// waiting.
module tb_stream_sink
  import tb_net_pkg::*;
#(
  parameter type H = logic [7:0]
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       hv,
  output logic       hr,
  input  H           h,
  input  logic [7:0] td,
  input  logic       tv,
  input  logic       tl,
  output logic       tr
);
  bit  bp = 1;
  int  stalls = 0;
  H    hq[$];
  bq_t fq[$];
  time tq[$];
  bq_t cur;
  initial begin hr = 0; tr = 0; end

  always @(posedge clk) begin
    hr <= !bp || ($urandom % 4 != 0);
    tr <= !bp || ($urandom % 4 != 0);
    if (!rst) begin
      if (hv && hr) hq.push_back(h);
      if (tv && !tr) stalls++;
      if (tv && tr) begin
        cur.push_back(td);
        if (tl) begin fq.push_back(cur); tq.push_back($time); cur = {}; end
      end
    end
  end

  // waits up to tmo cycles for a complete packet
  task automatic wait_pkt(output H hdr, output bq_t b, output bit ok, input int tmo = 2000);
    int n;
    n = 0;
    while ((fq.size() == 0 || hq.size() == 0) && n < tmo) begin @(posedge clk); n++; end
    ok = (fq.size() != 0 && hq.size() != 0);
    if (ok) begin hdr = hq.pop_front(); b = fq.pop_front(); void'(tq.pop_front()); end
    else begin hdr = '0; b = {}; end
  endtask
endmodule
