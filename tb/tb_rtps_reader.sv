// tb_rtps_reader: self-checking testbench of rtps_reader (IDX 2).
// Three remote writers, two of them matched through the match port (a match
// for another local index must not be taken). Random DATA records follow:
// mostly in order per writer, with duplicates, gaps, records for other
// readers, for ENTITYID_UNKNOWN and from the unmatched writer. A reference
// model (per-writer last SN) predicts the delivered samples, the duplicate
// and gap counts and each ACKNACK (SN = last+1, sent to the writer's
// current locator). The delivery side uses random ready, so PAYLOAD_MEM
// fills and back-pressures. A re-match with a new locator must keep the
// SN state and redirect ACKNACKs; with ack_ready low only one ACKNACK is
// held.
`timescale 1ns/1ps
module tb_rtps_reader;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam int IDX = 2;
  localparam logic [31:0] MY_ID = 32'h0000_0304;
  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_valid = 0, s_want, s_ready;
  rtps_msg_t s_msg = '0;
  logic match_valid = 0, match_ready;
  match_t match_in = '0;
  logic ack_valid, ack_ready = 1;
  rtps_msg_t ack_msg;
  logic m_valid, m_ready;
  sample_t m_sample;
  logic [15:0] dup_count, gap_count;

  rtps_reader #(.IDX(IDX)) dut (.clk, .rst, .s_valid, .s_want, .s_ready, .s_msg, .match_valid, .match_ready,
    .match_in, .ack_valid, .ack_ready, .ack_msg, .m_valid, .m_ready, .m_sample, .dup_count, .gap_count);

  sample_t   got_s [$];
  rtps_msg_t got_a [$];
  always @(negedge clk) m_ready <= ($urandom % 100) < 50;
  always @(posedge clk) if (!rst) begin
    if (m_valid && m_ready) got_s.push_back(m_sample);
    if (ack_valid && ack_ready) got_a.push_back(ack_msg);
  end

  // remote writers
  logic [95:0] w_pfx [3] = '{96'hAAAA_0000_0000_0000_0000_0001, 96'hBBBB_0000_0000_0000_0000_0002,
                             96'hCCCC_0000_0000_0000_0000_0003};
  logic [31:0] w_ent [3] = '{32'h0000_0103, 32'h0000_0203, 32'h0000_0103};
  logic [31:0] w_ip  [3] = '{32'h0A00_000A, 32'h0A00_000B, 32'h0A00_000C};
  logic [15:0] w_port[3] = '{16'd7411, 16'd7412, 16'd7413};
  bit          w_matched [3] = '{0, 0, 0};
  bit          w_fresh [3] = '{1, 1, 1};
  logic [63:0] w_last [3] = '{0, 0, 0};
  logic [63:0] w_next [3] = '{5, 1, 1};     // next SN each remote writer sends

  sample_t   exp_s [$];
  rtps_msg_t exp_a [$];
  int        exp_dup = 0, exp_gap = 0;

  task automatic give_match(int w, int lidx);
    @(negedge clk);
    match_valid = 1;
    match_in = '{8'(lidx), w_pfx[w], w_ent[w], w_ip[w], w_port[w]};
    #0.1;
    if (lidx != IDX) begin
      check(!match_ready, "match for another reader not taken");
      @(negedge clk); match_valid = 0;
      return;
    end
    while (!match_ready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    match_valid = 0;
    w_matched[w] = 1;
  endtask

  // offer one DATA record; model the expected reaction
  task automatic send(int w, logic [63:0] sn, int rsel, bit expect_ack = 1);
    rtps_msg_t m;
    bit want;
    m = '0;
    m.kind = SUB_DATA;
    m.guid_prefix = w_pfx[w]; m.writer_id = w_ent[w];
    m.reader_id = (rsel == 0) ? MY_ID : (rsel == 1) ? ENTITYID_UNKNOWN : 32'h0000_0404;
    m.sn = sn; m.ip = w_ip[w]; m.port = w_port[w];
    m.len = plen_t'($urandom % 65);
    for (int i = 0; i < int'(m.len); i++) m.data[8*i +: 8] = 8'($urandom);
    want = (rsel != 2);
    if (want && w_matched[w]) begin
      if (w_fresh[w] || sn == w_last[w] + 1) begin
        exp_s.push_back('{m.guid_prefix, m.writer_id, m.sn, m.len, m.data});
        w_fresh[w] = 0; w_last[w] = sn;
      end else if (sn <= w_last[w]) exp_dup++;
      else begin
        rtps_msg_t a;
        exp_gap++;
        a = '0; a.kind = SUB_ACKNACK; a.guid_prefix = w_pfx[w]; a.reader_id = MY_ID; a.writer_id = w_ent[w];
        a.sn = w_last[w] + 1; a.ip = w_ip[w]; a.port = w_port[w];
        if (expect_ack) exp_a.push_back(a);
      end
    end
    @(negedge clk);
    s_valid = 1; s_msg = m;
    #0.1;
    check(s_want == want, "s_want");
    while (!s_ready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    s_valid = 0;
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    give_match(0, IDX);
    give_match(1, 5);          // for another reader
    give_match(1, IDX);
    for (int n = 0; n < 600; n++) begin
      automatic int w = $urandom % 3;
      automatic int r = $urandom % 100;
      automatic logic [63:0] sn;
      if (r < 70) sn = w_next[w];                                // next in order
      else if (r < 80) sn = w_next[w] > 3 ? w_next[w] - 1 - $urandom % 3 : w_next[w];   // duplicate
      else begin sn = w_next[w] + 1 + $urandom % 4; end          // gap
      send(w, sn, ($urandom % 10 < 7) ? 0 : ($urandom % 2) ? 1 : 2);
      // the remote writer goes back to the reader's expectation after a gap
      w_next[w] = w_matched[w] && !w_fresh[w] ? w_last[w] + 1 : sn + 1;
      if (n == 300) begin
        w_ip[1] = 32'h0A00_0021; w_port[1] = 16'd7500;
        give_match(1, IDX);     // same writer, new locator: SN state kept
      end
    end
    // one ACKNACK held while ack_ready is low
    ack_ready = 0;
    send(0, w_last[0] + 3, 0, 1);
    send(0, w_last[0] + 5, 0, 0);
    repeat (5) @(negedge clk);
    ack_ready = 1;
    repeat (100) @(negedge clk);

    check(got_s.size() == exp_s.size(), $sformatf("samples %0d / %0d", got_s.size(), exp_s.size()));
    foreach (exp_s[i]) if (i < got_s.size()) check(got_s[i] == exp_s[i], $sformatf("sample %0d", i));
    check(got_a.size() == exp_a.size(), $sformatf("acknacks %0d / %0d", got_a.size(), exp_a.size()));
    foreach (exp_a[i]) if (i < got_a.size()) begin
      check(got_a[i] == exp_a[i], $sformatf("acknack %0d", i));
      if (got_a[i] != exp_a[i]) $display("  got sn %0d ip %h / exp sn %0d ip %h", got_a[i].sn, got_a[i].ip, exp_a[i].sn, exp_a[i].ip);
    end
    check(int'(dup_count) == exp_dup, $sformatf("dup_count %0d / %0d", dup_count, exp_dup));
    check(int'(gap_count) == exp_gap, $sformatf("gap_count %0d / %0d", gap_count, exp_gap));
    check(exp_s.size() > 200 && exp_dup > 20 && exp_gap > 20, "enough activity");
    $display("samples %0d dups %0d gaps %0d", exp_s.size(), exp_dup, exp_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
