// tb_ros_subscriber: self-checking testbench of ros_subscriber.
// Random samples are offered with a handshake driver: most are CDR
// encapsulated (00 01 or 00 00 header) bodies of 0..60 bytes, some are
// malformed (wrong header byte, shorter than 4 bytes). Every good sample
// must reach the application as the body after the 4-byte header, with
// req_guid = source writer GUID and req_seq = sample SN; malformed samples
// are dropped and counted. The application side uses random ready.
`timescale 1ns/1ps
module tb_ros_subscriber;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready;
  sample_t s_sample = '0;
  ros_msg_t m_msg;
  logic [15:0] drop_count;

  ros_subscriber dut (.clk, .rst, .s_valid, .s_ready, .s_sample, .m_valid, .m_ready, .m_msg, .drop_count);

  ros_msg_t got [$];
  always @(negedge clk) m_ready <= ($urandom % 100) < 60;
  always @(posedge clk) if (!rst && m_valid && m_ready) got.push_back(m_msg);

  typedef struct { logic [127:0] g; logic [63:0] s; bq_t b; } exp_t;
  exp_t exp [$];
  int exp_drop = 0;

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 500; n++) begin
      automatic bq_t body = rand_bytes($urandom % 61);
      automatic bq_t p = cdr(body);
      automatic int kind = $urandom % 10;
      automatic sample_t s;
      if (kind == 0) p[0] = 8'h01 + 8'($urandom % 255);            // bad first byte
      else if (kind == 1) p = slice(p, 0, $urandom % 4);           // too short
      else if (kind == 2) p[1] = 8'h00;                            // big-endian CDR: accepted
      s.guid_prefix = {$urandom, $urandom, $urandom};
      s.writer_id = $urandom;
      s.sn = {$urandom, $urandom};
      s.len = plen_t'(p.size());
      s.data = pload(p) | (kind == 1 ? {16{$urandom}} << (8 * p.size()) : '0);
      if (kind < 2) exp_drop++;
      else exp.push_back('{{s.guid_prefix, s.writer_id}, s.sn, body});
      @(negedge clk);
      s_valid = 1; s_sample = s;
      #0.1;
      while (!s_ready) begin @(negedge clk); #0.1; end
      @(negedge clk);
      s_valid = 0;
    end
    repeat (50) @(negedge clk);
    check(got.size() == exp.size(), $sformatf("messages %0d / %0d", got.size(), exp.size()));
    foreach (exp[i]) if (i < got.size()) begin
      check(got[i].req_guid == exp[i].g && got[i].req_seq == exp[i].s, $sformatf("message info %0d", i));
      check(int'(got[i].len) == exp[i].b.size() && same_bytes(pbytes(got[i].data, exp[i].b.size()), exp[i].b),
            $sformatf("message body %0d", i));
    end
    check(int'(drop_count) == exp_drop, $sformatf("drop_count %0d / %0d", drop_count, exp_drop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
