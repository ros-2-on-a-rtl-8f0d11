// tb_ros_service_client: self-checking testbench of ros_service_client.
// Random response samples are offered: CDR header, request identity
// (16-byte client GUID, 8-byte little-endian sequence number, built with
// tb_net_pkg's req_id) and a 0..36 byte body. Responses for this client's
// GUID must reach the application with req_guid, req_seq and the body;
// responses for other clients, with a bad header or shorter than 28 bytes
// are dropped and counted. The application side uses random ready.
`timescale 1ns/1ps
module tb_ros_service_client;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam logic [127:0] ME = 128'h0102_0304_0506_0708_090A_0B0C_0000_1204;
  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready;
  sample_t s_sample = '0;
  ros_msg_t m_msg;
  logic [15:0] drop_count;

  ros_service_client dut (.clk, .rst, .client_guid(ME), .s_valid, .s_ready, .s_sample, .m_valid, .m_ready,
    .m_msg, .drop_count);

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
      automatic bq_t body = rand_bytes($urandom % 37);
      automatic int kind = $urandom % 10;
      automatic logic [127:0] g = (kind == 0) ? ME ^ (128'd1 << ($urandom % 128)) : ME;
      automatic logic [63:0] sq = {$urandom, $urandom};
      automatic bq_t p = req_id(g, sq);
      automatic sample_t s;
      append(p, body);
      p = cdr(p);
      if (kind == 1) p[0] = 8'h80;
      if (kind == 2) p = slice(p, 0, $urandom % 28);
      s.guid_prefix = {$urandom, $urandom, $urandom}; s.writer_id = $urandom; s.sn = {$urandom, $urandom};
      s.len = plen_t'(p.size());
      s.data = pload(p);
      if (kind < 3) exp_drop++; else exp.push_back('{g, sq, body});
      @(negedge clk);
      s_valid = 1; s_sample = s;
      #0.1;
      while (!s_ready) begin @(negedge clk); #0.1; end
      @(negedge clk);
      s_valid = 0;
    end
    repeat (50) @(negedge clk);
    check(got.size() == exp.size(), $sformatf("responses %0d / %0d", got.size(), exp.size()));
    foreach (exp[i]) if (i < got.size()) begin
      check(got[i].req_guid == exp[i].g && got[i].req_seq == exp[i].s, $sformatf("request identity %0d", i));
      check(int'(got[i].len) == exp[i].b.size() && same_bytes(pbytes(got[i].data, exp[i].b.size()), exp[i].b),
            $sformatf("response body %0d", i));
    end
    check(int'(drop_count) == exp_drop, $sformatf("drop_count %0d / %0d", drop_count, exp_drop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
