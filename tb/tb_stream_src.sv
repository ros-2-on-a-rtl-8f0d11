`timescale 1ns/1ps
// tb_stream_src: testbench driver for a header record channel plus a byte
// stream with tlast (the packet format used below the RTPS layer).
// send(h, b) offers the header until it is taken, then the bytes of b with
// random idle cycles (gap_pct percent) and tlast on the last byte. A queue
// of size 0 sends only the header.
module tb_stream_src
  import tb_net_pkg::*;
#(
  parameter type H = logic [7:0]
) (
  input  logic       clk,
  output logic       hv,
  input  logic       hr,
  output H           h,
  output logic [7:0] td,
  output logic       tv,
  output logic       tl,
  input  logic       tr
);
  int gap_pct = 12;
  time end_time = 0;
  initial begin hv = 0; h = '0; td = 0; tv = 0; tl = 0; end

  // Inputs change just after a falling edge and ready is sampled there, so
  // a transfer is decided by values that are stable up to the rising edge.
  task automatic send(input H hdr, input bq_t b);
    @(negedge clk);
    hv = 1'b1; h = hdr;
    #0.1;
    while (!hr) begin @(negedge clk); #0.1; end
    @(negedge clk);
    hv = 1'b0;
    send_bytes(b);
  endtask

  task automatic send_bytes(input bq_t b);
    for (int i = 0; i < b.size(); i++) begin
      while (int'($urandom % 100) < gap_pct) begin tv = 1'b0; @(negedge clk); end
      tv = 1'b1; td = b[i]; tl = (i == b.size() - 1);
      #0.1;
      while (!tr) begin @(negedge clk); #0.1; end
      @(negedge clk);
    end
    tv = 1'b0; tl = 1'b0;
    end_time = $time;
  endtask
endmodule
