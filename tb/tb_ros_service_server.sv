// tb_ros_service_server: self-checking testbench of ros_service_server.
// The application offers random responses (req_guid, req_seq, 0..45 byte
// body). A body of up to 36 bytes must be written to the DDS writer as one
// sample: CDR header 00 01 00 00, request identity (tb_net_pkg's req_id)
// and the body; longer bodies are dropped and counted. The DDS side uses
// random ready; resp_count and drop_count are checked at the end.
`timescale 1ns/1ps
module tb_ros_service_server;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready;
  ros_msg_t s_msg = '0;
  sample_t m_sample;
  logic [15:0] drop_count, resp_count;

  ros_service_server dut (.clk, .rst, .s_valid, .s_ready, .s_msg, .m_valid, .m_ready, .m_sample, .drop_count,
    .resp_count);

  sample_t got [$];
  always @(negedge clk) m_ready <= ($urandom % 100) < 60;
  always @(posedge clk) if (!rst && m_valid && m_ready) got.push_back(m_sample);

  bq_t exp [$];
  int exp_drop = 0;

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 500; n++) begin
      automatic int l = ($urandom % 6 == 0) ? 37 + $urandom % 9 : $urandom % 37;
      automatic bq_t body = rand_bytes(l);
      automatic ros_msg_t m;
      automatic bq_t e;
      m.req_guid = {4{$urandom}}; m.req_seq = {$urandom, $urandom};
      m.len = plen_t'(l);
      m.data = pload(body) | ({16{$urandom}} << (8 * l));
      e = req_id(m.req_guid, m.req_seq);
      append(e, body);
      if (l > 36) exp_drop++; else exp.push_back(cdr(e));
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
    check(int'(resp_count) == exp.size(), "resp_count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
