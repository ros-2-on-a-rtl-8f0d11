// tb_ros_publisher: self-checking testbench of ros_publisher.
// Random message bodies of 0..70 bytes are offered by the application with
// a handshake driver. Bodies of up to 60 bytes must be written to the DDS
// writer as one sample holding 00 01 00 00 followed by the body (built
// independently with tb_net_pkg's cdr()); longer ones are dropped and
// counted. The DDS side uses random ready; pub_count and drop_count are
// checked at the end.
`timescale 1ns/1ps
module tb_ros_publisher;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready;
  ros_msg_t s_msg = '0;
  sample_t m_sample;
  logic [15:0] drop_count, pub_count;

  ros_publisher dut (.clk, .rst, .s_valid, .s_ready, .s_msg, .m_valid, .m_ready, .m_sample, .drop_count, .pub_count);

  sample_t got [$];
  always @(negedge clk) m_ready <= ($urandom % 100) < 60;
  always @(posedge clk) if (!rst && m_valid && m_ready) got.push_back(m_sample);

  bq_t exp [$];
  int exp_drop = 0;

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 500; n++) begin
      automatic int l = ($urandom % 8 == 0) ? 61 + $urandom % 10 : $urandom % 61;
      automatic bq_t body = rand_bytes(l);
      automatic ros_msg_t m;
      m.req_guid = {4{$urandom}}; m.req_seq = {$urandom, $urandom};
      m.len = plen_t'(l);
      m.data = pload(body) | ({16{$urandom}} << (8 * l));      // bytes past len are not part of the body
      if (l > 60) exp_drop++; else exp.push_back(cdr(body));
      @(negedge clk);
      s_valid = 1; s_msg = m;
      #0.1;
      while (!s_ready) begin @(negedge clk); #0.1; end
      @(negedge clk);
      s_valid = 0;
    end
    repeat (50) @(negedge clk);
    check(got.size() == exp.size(), $sformatf("samples %0d / %0d", got.size(), exp.size()));
    foreach (exp[i]) if (i < got.size())
      check(int'(got[i].len) == exp[i].size() && same_bytes(pbytes(got[i].data, exp[i].size()), exp[i]),
            $sformatf("sample %0d", i));
    check(int'(drop_count) == exp_drop, $sformatf("drop_count %0d / %0d", drop_count, exp_drop));
    check(int'(pub_count) == exp.size(), "pub_count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
