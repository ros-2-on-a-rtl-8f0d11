// tb_rtps_writer: self-checking testbench of rtps_writer (IDX 1).
// Remote readers are matched one after another (more than MATCH_ENTRIES, so
// CTRL_MEM entries are replaced round-robin; a repeated match only updates
// the locator). Random samples and ACKNACKs are then offered one operation
// at a time. A reference model of CTRL_MEM and of the history predicts
// every DATA record: each sample to every matched reader in CTRL_MEM order,
// and on an ACKNACK from a matched reader the go-back-N resend of
// max(SN, oldest kept) .. newest to that reader only. ACKNACKs for another
// writer or from unknown readers must be ignored. DISCOVER reports, last_sn
// and resend_count are checked too. RTPS_OUT is modelled with random ready.
`timescale 1ns/1ps
module tb_rtps_writer;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam int IDX = 1, ME = 4, HD = 4;
  localparam logic [31:0] MY_ID = 32'h0000_0203;
  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic s_valid = 0, s_ready;
  sample_t s_sample = '0;
  logic ack_valid = 0, ack_ready;
  rtps_msg_t ack_msg = '0;
  logic match_valid = 0, match_ready;
  match_t match_in = '0;
  logic m_valid, m_ready;
  rtps_msg_t m_msg;
  logic disc_valid, disc_ready;
  match_t disc;
  logic [63:0] last_sn;
  logic [15:0] resend_count;

  rtps_writer #(.IDX(IDX), .MATCH_ENTRIES(ME), .HISTORY_DEPTH(HD)) dut (.clk, .rst, .s_valid, .s_ready, .s_sample,
    .ack_valid, .ack_ready, .ack_msg, .match_valid, .match_ready, .match_in, .m_valid, .m_ready, .m_msg,
    .disc_valid, .disc_ready, .disc, .last_sn, .resend_count);

  rtps_msg_t got_m [$];
  match_t    got_d [$];
  always @(negedge clk) begin
    m_ready    <= ($urandom % 100) < 60;
    disc_ready <= ($urandom % 100) < 50;
  end
  always @(posedge clk) if (!rst) begin
    if (m_valid && m_ready) got_m.push_back(m_msg);
    if (disc_valid && disc_ready) got_d.push_back(disc);
  end

  // model
  bit          c_v [ME];
  match_t      c_m [ME];
  int          c_ptr = 0;
  sample_t     hist [$];            // all samples, hist[k] has SN k+1
  rtps_msg_t   exp_m [$];
  match_t      exp_d [$];
  int          exp_resend = 0;

  function automatic rtps_msg_t data_rec(int e, int k);
    rtps_msg_t r;
    r = '0;
    r.kind = SUB_DATA; r.guid_prefix = c_m[e].guid_prefix; r.reader_id = c_m[e].entity_id;
    r.writer_id = MY_ID; r.sn = 64'(k + 1); r.ip = c_m[e].ip; r.port = c_m[e].port;
    r.len = hist[k].len; r.data = hist[k].data;
    return r;
  endfunction

  task automatic settle();
    int t;
    t = 0;
    while ((got_m.size() != exp_m.size() || got_d.size() != exp_d.size() || m_valid) && t < 2000) begin
      @(negedge clk); t++;
    end
    repeat (2) @(negedge clk);
  endtask

  task automatic give_match(logic [95:0] pfx, logic [31:0] ent, logic [31:0] ip, logic [15:0] port, int lidx = IDX);
    match_t m;
    int hit;
    m = '{8'(lidx), pfx, ent, ip, port};
    @(negedge clk);
    match_valid = 1; match_in = m;
    #0.1;
    if (lidx != IDX) begin
      check(!match_ready, "match for another writer not taken");
      @(negedge clk); match_valid = 0;
      return;
    end
    while (!match_ready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    match_valid = 0;
    hit = -1;
    for (int i = 0; i < ME; i++) if (c_v[i] && {c_m[i].guid_prefix, c_m[i].entity_id} == {pfx, ent}) hit = i;
    if (hit >= 0) c_m[hit] = m;
    else begin
      c_v[c_ptr] = 1; c_m[c_ptr] = m; c_ptr = (c_ptr + 1) % ME;
      exp_d.push_back(m);
    end
    settle();
  endtask

  task automatic give_sample();
    sample_t s;
    s = '0;
    s.sn = 64'($urandom);     // ignored: the writer numbers samples itself
    s.len = plen_t'($urandom % 65);
    for (int i = 0; i < int'(s.len); i++) s.data[8*i +: 8] = 8'($urandom);
    hist.push_back(s);
    for (int e = 0; e < ME; e++) if (c_v[e]) exp_m.push_back(data_rec(e, hist.size() - 1));
    @(negedge clk);
    s_valid = 1; s_sample = s;
    #0.1;
    while (!s_ready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    s_valid = 0;
    settle();
  endtask

  task automatic give_ack(logic [95:0] pfx, logic [31:0] rid, logic [31:0] wid, logic [63:0] sn);
    rtps_msg_t a;
    int e;
    a = '0;
    a.kind = SUB_ACKNACK; a.guid_prefix = pfx; a.reader_id = rid; a.writer_id = wid; a.sn = sn;
    e = -1;
    for (int i = 0; i < ME; i++) if (c_v[i] && {c_m[i].guid_prefix, c_m[i].entity_id} == {pfx, rid}) e = i;
    if (wid == MY_ID && e >= 0 && sn <= 64'(hist.size()) && hist.size() > 0) begin
      int first;
      first = (hist.size() >= HD) ? hist.size() - HD + 1 : 1;
      if (int'(sn) > first) first = int'(sn);
      for (int k = first; k <= hist.size(); k++) exp_m.push_back(data_rec(e, k - 1));
      exp_resend++;
    end
    @(negedge clk);
    ack_valid = 1; ack_msg = a;
    #0.1;
    while (!ack_ready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    ack_valid = 0;
    settle();
  endtask

  logic [95:0] pfx [6];
  initial begin
    for (int i = 0; i < 6; i++) pfx[i] = {32'hBEEF_0000 + 32'(i), 64'($urandom)};
    repeat (5) @(posedge clk);
    rst = 0;
    give_sample();                                  // no reader yet: nothing sent
    give_ack(pfx[0], 32'h0000_0104, MY_ID, 1);      // unknown reader: ignored
    give_match(pfx[0], 32'h0000_0104, 32'h0A00_000A, 16'd7411);
    give_match(pfx[1], 32'h0000_0104, 32'h0A00_000B, 16'd7412, 3);   // other writer
    give_match(pfx[1], 32'h0000_0204, 32'h0A00_000B, 16'd7412);
    for (int n = 0; n < 300; n++) begin
      automatic int r = $urandom % 100;
      if (r < 55) give_sample();
      else if (r < 85) begin
        automatic int e = $urandom % ME;
        if (c_v[e]) give_ack(c_m[e].guid_prefix, c_m[e].entity_id, MY_ID, 64'($urandom % (hist.size() + 2)));
      end else if (r < 92) give_ack(pfx[$urandom % 6], 32'h0000_0104, ($urandom % 2) ? MY_ID : 32'h0000_0303,
                                     64'($urandom % (hist.size() + 1)));
      else if (r < 97) begin
        automatic int p = $urandom % 6;
        give_match(pfx[p], 32'h0000_0104, 32'h0A00_0010 + 32'(p), 16'd7411 + 16'($urandom % 4));
      end else give_match(pfx[$urandom % 6], 32'h0000_0204, 32'h0A00_0030, 16'd7420);
    end
    settle();
    check(got_m.size() == exp_m.size(), $sformatf("DATA records %0d / %0d", got_m.size(), exp_m.size()));
    foreach (exp_m[i]) if (i < got_m.size()) begin
      check(got_m[i] == exp_m[i], $sformatf("DATA record %0d", i));
      if (got_m[i] != exp_m[i]) $display("  got sn %0d to %h / exp sn %0d to %h", got_m[i].sn, got_m[i].ip, exp_m[i].sn, exp_m[i].ip);
    end
    check(got_d.size() == exp_d.size(), $sformatf("DISCOVER reports %0d / %0d", got_d.size(), exp_d.size()));
    foreach (exp_d[i]) if (i < got_d.size()) check(got_d[i] == exp_d[i], $sformatf("DISCOVER %0d", i));
    check(last_sn == 64'(hist.size()), "last_sn");
    check(int'(resend_count) == exp_resend, $sformatf("resend_count %0d / %0d", resend_count, exp_resend));
    check(exp_resend > 30 && exp_d.size() > ME, "enough activity");
    $display("samples %0d records %0d resends %0d discovers %0d", hist.size(), exp_m.size(), exp_resend, exp_d.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
