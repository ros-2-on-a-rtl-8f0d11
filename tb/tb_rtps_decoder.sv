// tb_rtps_decoder: self-checking testbench of rtps_decoder.
// Random records: DATA from user writers (kind byte 0x02/0x03), DATA from
// the SEDP publications / subscriptions writers, DATA from other builtin
// writers (e.g. SPDP 0x100C2), and ACKNACKs. The testbench's own routing
// rule predicts, per output, the exact sequence of records; other records
// must be dropped and counted. Outputs apply random back-pressure, one of
// them held off for a long stretch so that the FIFOs fill and the input
// must stall without losing anything.
`timescale 1ns/1ps
module tb_rtps_decoder;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_valid = 0, s_ready;
  rtps_msg_t s_msg = '0;
  logic m_valid [3], m_ready [3];
  rtps_msg_t m_msg [3];
  logic [15:0] drop_count;

  rtps_decoder dut (.clk, .rst, .s_valid, .s_ready, .s_msg, .m_valid, .m_ready, .m_msg, .drop_count);

  rtps_msg_t exp_q [3][$];
  int got [3];
  int exp_drops = 0, in_stalls = 0;
  bit hold0 = 0;
  initial got = '{0, 0, 0};
  always @(posedge clk) begin
    for (int i = 0; i < 3; i++) m_ready[i] <= (i == 0 && hold0) ? 1'b0 : ($urandom % 3 != 0);
    if (!rst) begin
      if (s_valid && !s_ready) in_stalls++;
      for (int i = 0; i < 3; i++)
        if (m_valid[i] && m_ready[i]) begin
          if (exp_q[i].size() == 0) check(0, $sformatf("unexpected record on %0d", i));
          else begin
            check(m_msg[i] == exp_q[i][0], $sformatf("record %0d on output %0d", got[i], i));
            if (m_msg[i] != exp_q[i][0]) $display("  got sn %x exp sn %x next %x", m_msg[i].sn, exp_q[i][0].sn, exp_q[i].size() > 1 ? exp_q[i][1].sn : 0);
            void'(exp_q[i].pop_front());
          end
          got[i]++;
        end
    end
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 400; n++) begin
      rtps_msg_t r;
      int t, route;
      if (n == 100) fork begin hold0 = 1; repeat (300) @(posedge clk); hold0 = 0; end join_none
      r = '0;
      r.guid_prefix = {$urandom, $urandom, $urandom};
      r.reader_id = $urandom; r.sn = {$urandom, $urandom}; r.len = plen_t'($urandom % 65);
      r.data = {16{$urandom}};
      t = int'($urandom % 6);
      case (t)
        0, 1: begin r.kind = SUB_DATA; r.writer_id = {$urandom % 32'h0100_0000, (t == 0) ? 8'h02 : 8'h03}; route = 0; end
        2:    begin r.kind = SUB_DATA; r.writer_id = ENTITYID_SEDP_PUB_WRITER; route = 1; end
        3:    begin r.kind = SUB_DATA; r.writer_id = ENTITYID_SEDP_SUB_WRITER; route = 1; end
        4:    begin r.kind = SUB_ACKNACK; r.writer_id = $urandom; route = 2; end
        default: begin r.kind = SUB_DATA; r.writer_id = 32'h0001_00C2; route = 3; end
      endcase
      if (route < 3) exp_q[route].push_back(r); else exp_drops++;
      @(negedge clk);
      s_valid = 1; s_msg = r;
      #0.1;
      while (!s_ready) begin @(negedge clk); #0.1; end
      @(negedge clk);
      s_valid = 0;
      if ($urandom % 4 == 0) @(negedge clk);
    end
    repeat (100) @(posedge clk);
    for (int i = 0; i < 3; i++) check(exp_q[i].size() == 0, $sformatf("output %0d missing %0d", i, exp_q[i].size()));
    check(got[0] > 50 && got[1] > 50 && got[2] > 30, "all outputs used");
    check(drop_count == 16'(exp_drops), $sformatf("drop_count %0d expected %0d", drop_count, exp_drops));
    check(in_stalls > 0, "input stalled while a FIFO was full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
