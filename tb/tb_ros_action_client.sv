// tb_ros_action_client: self-checking testbench of ros_action_client.
// Four DDS reader inputs (goal, cancel and result responses, each for its
// own client GUID, and feedback samples) are driven at the same time with
// random samples: responses for this client, for another client, malformed
// ones, and feedback messages. Each output must carry exactly the expected
// messages of its own part, in order (identity and body built
// independently with tb_net_pkg); drops are counted per part. Every output
// uses its own random ready.
`timescale 1ns/1ps
module tb_ros_action_client;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  localparam int NP = 4, NMSG = 150;
  localparam logic [127:0] GUID [4] = '{128'h11, 128'h2222_0000_0000_0000_0000_0000_0000_0022,
                                        128'h3333_0000_0000_0000_0000_0000_0000_0033, 128'h0};
  localparam bit IS_CLI [4] = '{1, 1, 1, 0};
  logic [127:0] client_guid [3];
  logic s_valid [4], s_ready [4], m_valid [4], m_ready [4];
  sample_t s_sample [4];
  ros_msg_t m_msg [4];
  logic [15:0] drop_count [4];
  assign client_guid = '{GUID[0], GUID[1], GUID[2]};

  ros_action_client dut (.clk, .rst, .client_guid, .s_valid, .s_ready, .s_sample, .m_valid, .m_ready, .m_msg,
    .drop_count);

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


  exp_t exp [4][$];
  ros_msg_t got [4][$];
  int exp_drop = 0;
  always @(negedge clk) for (int k = 0; k < 4; k++) m_ready[k] <= ($urandom % 100) < 50 + 10 * k;
  always @(posedge clk) if (!rst) for (int k = 0; k < 4; k++) if (m_valid[k] && m_ready[k]) got[k].push_back(m_msg[k]);

  initial begin
    for (int k = 0; k < 4; k++) begin s_valid[k] = 0; s_sample[k] = '0; end
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
    repeat (50) @(negedge clk);
    for (int k = 0; k < NP; k++) begin
      check(got[k].size() == exp[k].size(), $sformatf("port %0d: messages %0d / %0d", k, got[k].size(), exp[k].size()));
      foreach (exp[k][i]) if (i < got[k].size()) begin
        check(got[k][i].req_guid == exp[k][i].g && got[k][i].req_seq == exp[k][i].s, $sformatf("port %0d identity %0d", k, i));
        check(int'(got[k][i].len) == exp[k][i].b.size() &&
              same_bytes(pbytes(got[k][i].data, exp[k][i].b.size()), exp[k][i].b), $sformatf("port %0d body %0d", k, i));
      end
    end
    check(int'(drop_count[0] + drop_count[1] + drop_count[2] + drop_count[3]) == exp_drop, "drop counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
