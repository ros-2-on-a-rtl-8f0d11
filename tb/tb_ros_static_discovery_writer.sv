// tb_ros_static_discovery_writer: self-checking testbench of
// ros_static_discovery_writer (CACHE_DEPTH 8).
// Random DISCOVER events from a small pool (so that repeats occur) are
// written, one every few cycles. A model in this file keeps the distinct
// (writer, remote GUID) pairs in an 8-entry ring, oldest overwritten, and
// after every event all eight cache entries are read back through rd_idx
// and compared; event_count counts distinct events.
`timescale 1ns/1ps
module tb_ros_static_discovery_writer;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam int D = 8;
  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  logic s_valid = 0, s_ready, rd_valid;
  match_t s_event = '0, rd_entry;
  logic [2:0] rd_idx = 0;
  logic [15:0] event_count;

  ros_static_discovery_writer #(.CACHE_DEPTH(D)) dut (.clk, .rst, .s_valid, .s_ready, .s_event, .rd_idx, .rd_valid,
    .rd_entry, .event_count);

  bit     v [D];
  match_t ent [D];
  int     wp = 0, distinct = 0;

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    @(negedge clk);
    for (int i = 0; i < D; i++) begin rd_idx = 3'(i); #0.1; check(!rd_valid, "empty after reset"); end
    for (int n = 0; n < 400; n++) begin
      automatic match_t e = '{8'($urandom % 3), {80'h0, 16'($urandom % 5)}, 32'h0000_0104 + 32'(($urandom % 2) << 8),
                              $urandom, 16'($urandom)};
      automatic bit dup = 0;
      for (int i = 0; i < D; i++)
        if (v[i] && ent[i].local_idx == e.local_idx && ent[i].guid_prefix == e.guid_prefix &&
            ent[i].entity_id == e.entity_id) dup = 1;
      if (!dup) begin v[wp] = 1; ent[wp] = e; wp = (wp + 1) % D; distinct++; end
      @(negedge clk);
      s_valid = 1; s_event = e;
      #0.1;
      check(s_ready, "always ready");
      @(negedge clk);
      s_valid = 0;
      for (int i = 0; i < D; i++) begin
        rd_idx = 3'(i);
        #0.1;
        check(rd_valid == v[i] && (!v[i] || rd_entry == ent[i]), $sformatf("entry %0d after event %0d", i, n));
      end
      check(int'(event_count) == distinct, "event_count");
    end
    check(distinct > 40 && distinct < 350, "repeats and new events both seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
