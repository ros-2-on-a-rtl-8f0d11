// tb_dds_reader: self-checking testbench of dds_reader.
// Random samples from a few remote writers are written (the input is
// always ready) while the ROS side takes them with random ready, including
// long stalls that overflow the KEEP_LAST(4) history. A queue model in this
// file, updated on each clock edge, predicts every sample taken (oldest
// first, oldest dropped on overflow) and the overflow and take counters.
`timescale 1ns/1ps
module tb_dds_reader;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam int HD = 4;
  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  sample_t s_sample = '0, m_sample;
  logic [15:0] overflow_count, take_count;

  dds_reader #(.HISTORY_DEPTH(HD)) dut (.clk, .rst, .s_valid, .s_ready, .s_sample, .m_valid, .m_ready, .m_sample,
    .overflow_count, .take_count);

  sample_t model [$];
  int exp_ovf = 0, taken = 0, written = 0;
  always @(posedge clk) if (!rst) begin
    check(s_ready, "input always ready");
    check(m_valid == (model.size() != 0), "m_valid follows the history fill");
    if (m_valid && m_ready) begin
      check(model.size() > 0 && m_sample == model[0], $sformatf("sample taken %0d", taken));
      if (model.size() > 0) void'(model.pop_front());
      taken++;
    end
    if (s_valid) begin
      model.push_back(s_sample);
      written++;
      if (model.size() > HD) begin void'(model.pop_front()); exp_ovf++; end
    end
  end

  int rate_in = 50, rate_out = 50;
  always @(negedge clk) m_ready <= ($urandom % 100) < rate_out;

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int phase = 0; phase < 12; phase++) begin
      rate_in  = (phase % 3 == 0) ? 90 : 40;
      rate_out = (phase % 4 == 1) ? 0 : (phase % 4 == 2) ? 100 : 50;
      for (int c = 0; c < 200; c++) begin
        @(negedge clk);
        s_valid = ($urandom % 100) < rate_in;
        s_sample.guid_prefix = {64'hFACE_0000_0000_0000, 32'($urandom % 3)};
        s_sample.writer_id   = 32'h0000_0103;
        s_sample.sn          = 64'(written + 1);
        s_sample.len         = plen_t'($urandom % 65);
        s_sample.data        = {16{$urandom}};
      end
    end
    @(negedge clk);
    s_valid = 0;
    rate_out = 100;
    repeat (20) @(negedge clk);
    check(model.size() == 0, "history drained");
    check(int'(overflow_count) == exp_ovf, $sformatf("overflow_count %0d / %0d", overflow_count, exp_ovf));
    check(int'(take_count) == taken, "take_count");
    check(exp_ovf > 50 && taken > 500, "enough activity");
    $display("written %0d taken %0d overflow %0d", written, taken, exp_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
