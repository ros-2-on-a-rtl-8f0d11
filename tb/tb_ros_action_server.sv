// tb_ros_action_server: self-checking testbench of ros_action_server.
// The application drives the four inputs (goal, cancel and result
// responses with their request identity, and feedback messages) at the
// same time with random messages, some too long. Each DDS writer output,
// with its own random ready, must carry exactly the expected samples of its
// part in order: CDR header, request identity for the three services, and
// the body (built independently with tb_net_pkg). Sent and dropped counts
// are checked per part.
`timescale 1ns/1ps
module tb_ros_action_server;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  localparam int NP = 4, NMSG = 150;
  localparam bit IS_SRV [4] = '{1, 1, 1, 0};
  logic s_valid [4], s_ready [4], m_valid [4], m_ready [4];
  ros_msg_t s_msg [4];
  sample_t m_sample [4];
  logic [15:0] drop_count [4], sent_count [4];

  ros_action_server dut (.clk, .rst, .s_valid, .s_ready, .s_msg, .m_valid, .m_ready, .m_sample, .drop_count,
    .sent_count);

  // one random application message for a publisher (srv = 0) or a service
  // server (srv = 1); fits tells whether it must be written, as bytes e
  function automatic ros_msg_t gen_tx(bit srv, output bit fits, output bq_t e);
    ros_msg_t m;
    bq_t body;
    int l, lim;
    lim = srv ? 36 : 60;
    l = ($urandom % 8 == 0) ? lim + 1 + $urandom % 4 : $urandom % (lim + 1);
    body = rand_bytes(l);
    m.req_guid = {4{$urandom}}; m.req_seq = {$urandom, $urandom};
    m.len = plen_t'(l);
    m.data = pload(body);
    fits = (l <= lim);
    e.delete();
    if (srv) e = req_id(m.req_guid, m.req_seq);
    append(e, body);
    e = cdr(e);
    return m;
  endfunction


  bq_t exp [4][$];
  sample_t got [4][$];
  int exp_drop [4] = '{0, 0, 0, 0};
  always @(negedge clk) for (int k = 0; k < 4; k++) m_ready[k] <= ($urandom % 100) < 50 + 10 * k;
  always @(posedge clk) if (!rst) for (int k = 0; k < 4; k++) if (m_valid[k] && m_ready[k]) got[k].push_back(m_sample[k]);

  initial begin
    for (int k = 0; k < 4; k++) begin s_valid[k] = 0; s_msg[k] = '0; end
    repeat (5) @(posedge clk);
    rst = 0;
    for (int p = 0; p < NP; p++)
      fork
        automatic int k = p;
        for (int n = 0; n < NMSG; n++) begin
          automatic bit fits;
          automatic bq_t e;
          automatic ros_msg_t m = gen_tx(IS_SRV[k], fits, e);
          if (fits) exp[k].push_back(e); else exp_drop[k]++;
          @(negedge clk);
          s_valid[k] = 1; s_msg[k] = m;
          #0.1;
          while (!s_ready[k]) begin @(negedge clk); #0.1; end
          @(negedge clk);
          s_valid[k] = 0;
        end
      join_none
    wait fork;
    repeat (50) @(negedge clk);
    for (int k = 0; k < NP; k++) begin
      check(got[k].size() == exp[k].size(), $sformatf("port %0d: samples %0d / %0d", k, got[k].size(), exp[k].size()));
      foreach (exp[k][i]) if (i < got[k].size())
        check(int'(got[k][i].len) == exp[k][i].size() && same_bytes(pbytes(got[k][i].data, exp[k][i].size()), exp[k][i]),
              $sformatf("port %0d sample %0d", k, i));
    end
    for (int k = 0; k < 4; k++)
      check(int'(drop_count[k]) == exp_drop[k] && int'(sent_count[k]) == exp[k].size(), $sformatf("port %0d counts", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
