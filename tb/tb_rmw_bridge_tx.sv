// tb_rmw_bridge_tx: self-checking testbench of rmw_bridge_tx with one
// publisher, one service server and one action server (six DDS writers).
// The application sends random messages tagged with a writer index (some
// indexes out of range, some bodies too long) through the single
// ROS_APP_TX port. Each of the six writer outputs, with its own random
// ready, must carry exactly the samples for its index, in order, encoded
// as publisher (indexes 0 and 5) or service server (1 to 4); totals of
// sent and dropped messages are checked.
`timescale 1ns/1ps
module tb_rmw_bridge_tx;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  localparam int NP = 6, NMSG = 900;
  localparam bit IS_SRV [6] = '{0, 1, 1, 1, 1, 0};
  logic app_valid = 0, app_ready;
  ros_msg_t app_msg = '0;
  logic [7:0] app_entity = 0;
  logic m_valid [6], m_ready [6];
  sample_t m_sample [6];
  logic [15:0] sent_count, drop_count;

  rmw_bridge_tx #(.NUM_PUB(1), .NUM_SRV_SERVER(1), .NUM_ACTION_SERVER(1)) dut (.clk, .rst, .app_valid, .app_ready,
    .app_msg, .app_entity, .m_valid, .m_ready, .m_sample, .sent_count, .drop_count);

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


  bq_t exp [6][$];
  sample_t got [6][$];
  int exp_drop = 0, exp_sent = 0;
  always @(negedge clk) for (int k = 0; k < 6; k++) m_ready[k] <= ($urandom % 100) < 30 + 10 * k;
  always @(posedge clk) if (!rst) for (int k = 0; k < 6; k++) if (m_valid[k] && m_ready[k]) got[k].push_back(m_sample[k]);

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    for (int n = 0; n < NMSG; n++) begin
      automatic int k = ($urandom % 20 == 0) ? 6 + $urandom % 250 : $urandom % 6;
      automatic bit fits;
      automatic bq_t e;
      automatic ros_msg_t m = gen_tx(k < 6 ? IS_SRV[k] : 0, fits, e);
      if (k < 6) begin
        if (fits) begin exp[k].push_back(e); exp_sent++; end else exp_drop++;
      end
      @(negedge clk);
      app_valid = 1; app_msg = m; app_entity = 8'(k);
      #0.1;
      while (!app_ready) begin @(negedge clk); #0.1; end
      @(negedge clk);
      app_valid = 0;
    end
    repeat (50) @(negedge clk);
    for (int k = 0; k < NP; k++) begin
      check(got[k].size() == exp[k].size(), $sformatf("port %0d: samples %0d / %0d", k, got[k].size(), exp[k].size()));
      foreach (exp[k][i]) if (i < got[k].size())
        check(int'(got[k][i].len) == exp[k][i].size() && same_bytes(pbytes(got[k][i].data, exp[k][i].size()), exp[k][i]),
              $sformatf("port %0d sample %0d", k, i));
    end
    check(int'(sent_count) == exp_sent, $sformatf("sent_count %0d / %0d", sent_count, exp_sent));
    check(int'(drop_count) == exp_drop, $sformatf("drop_count %0d / %0d", drop_count, exp_drop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
