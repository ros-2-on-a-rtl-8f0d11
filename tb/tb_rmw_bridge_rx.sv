// tb_rmw_bridge_rx: self-checking testbench of rmw_bridge_rx with one
// subscriber, one service client and one action client (six DDS readers).
// All six reader inputs are driven at the same time with random samples
// (good, for another client, malformed). The single application port, with
// random ready, must deliver every good message exactly once, tagged with
// the reader index it came from, in order per reader; the total drop count
// must match. Expected messages are built independently with tb_net_pkg.
`timescale 1ns/1ps
module tb_rmw_bridge_rx;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  localparam int NP = 6, NMSG = 120;
  localparam logic [127:0] GUID [6] = '{128'h0, 128'hAAAA_0000_0000_0000_0000_0000_0000_0001,
    128'hBBBB_0000_0000_0000_0000_0000_0000_0002, 128'hCCCC_0000_0000_0000_0000_0000_0000_0003,
    128'hDDDD_0000_0000_0000_0000_0000_0000_0004, 128'h0};
  localparam bit IS_CLI [6] = '{0, 1, 1, 1, 1, 0};
  logic [127:0] client_guid [4];
  logic s_valid [6], s_ready [6], app_valid, app_ready;
  sample_t s_sample [6];
  ros_msg_t app_msg;
  logic [7:0] app_entity;
  logic [15:0] drop_count;
  assign client_guid = '{GUID[1], GUID[2], GUID[3], GUID[4]};

  rmw_bridge_rx #(.NUM_SUB(1), .NUM_SRV_CLIENT(1), .NUM_ACTION_CLIENT(1)) dut (.clk, .rst, .client_guid,
    .s_valid, .s_ready, .s_sample, .app_valid, .app_ready, .app_msg, .app_entity, .drop_count);

  // one random DDS sample for a subscriber (cli = 0) or a service client
  // expecting responses for guid (cli = 1); good tells whether it must be
  // delivered, with identity g/sq and body b
  typedef struct { logic [127:0] g; logic [63:0] s; bq_t b; } exp_t;
  function automatic sample_t gen_rx(bit cli, logic [127:0] guid, output bit good, output exp_t e);
    sample_t s;
    bq_t p;
    int kind;
    kind = $urandom % 8;
    s.guid_prefix = {$urandom, $urandom, $urandom}; s.writer_id = $urandom; s.sn = {$urandom, $urandom};
    e.b = rand_bytes($urandom % 37);
    if (cli) begin
      e.g = (kind == 0) ? ~guid : guid;
      e.s = {$urandom, $urandom};
      p = req_id(e.g, e.s);
      append(p, e.b);
      p = cdr(p);
    end else begin
      e.g = {s.guid_prefix, s.writer_id};
      e.s = s.sn;
      p = cdr(e.b);
    end
    if (kind == 1) p[0] = 8'h42;
    good = cli ? (kind > 1) : (kind != 1);
    s.len = plen_t'(p.size());
    s.data = pload(p);
    return s;
  endfunction


  exp_t exp [6][$];
  ros_msg_t got [6][$];
  int exp_drop = 0, bad_tag = 0;
  always @(negedge clk) app_ready <= ($urandom % 100) < 70;
  always @(posedge clk) if (!rst && app_valid && app_ready) begin
    if (app_entity < 6) got[app_entity].push_back(app_msg); else bad_tag++;
  end

  initial begin
    for (int k = 0; k < 6; k++) begin s_valid[k] = 0; s_sample[k] = '0; end
    repeat (5) @(posedge clk);
    rst = 0;
    fork
      begin
      for (int p = 0; p < NP; p++)
        fork
          automatic int k = p;
          for (int n = 0; n < NMSG; n++) begin
            automatic bit good;
            automatic exp_t e;
            automatic sample_t s = gen_rx(IS_CLI[k], GUID[k], good, e);
            if (good) exp[k].push_back(e); else exp_drop++;
            @(negedge clk);
            s_valid[k] = 1; s_sample[k] = s;
            #0.1;
            while (!s_ready[k]) begin @(negedge clk); #0.1; end
            @(negedge clk);
            s_valid[k] = 0;
            repeat ($urandom % 3) @(negedge clk);
          end
        join_none
      wait fork;
      end
    join
    repeat (100) @(negedge clk);
    for (int k = 0; k < NP; k++) begin
      check(got[k].size() == exp[k].size(), $sformatf("port %0d: messages %0d / %0d", k, got[k].size(), exp[k].size()));
      foreach (exp[k][i]) if (i < got[k].size()) begin
        check(got[k][i].req_guid == exp[k][i].g && got[k][i].req_seq == exp[k][i].s, $sformatf("port %0d identity %0d", k, i));
        check(int'(got[k][i].len) == exp[k][i].b.size() &&
              same_bytes(pbytes(got[k][i].data, exp[k][i].b.size()), exp[k][i].b), $sformatf("port %0d body %0d", k, i));
      end
    end
    check(bad_tag == 0, "entity tags in range");
    check(int'(drop_count) == exp_drop, $sformatf("drop_count %0d / %0d", drop_count, exp_drop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
