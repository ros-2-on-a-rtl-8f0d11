// tb_rtps_discovery: self-checking testbench of rtps_discovery.
// Local readers and writers get random topic ids (from a small set, some
// endpoints disabled). Random announcements from a small pool of remote
// GUIDs, as writers (SEDP publications writer) or readers (SEDP
// subscriptions writer), some too short, are fed in. A reference model in
// this file computes which local endpoints must match, in index order, and
// which must answer with their own announcement (only for a remote endpoint
// not in the SEEN_ENTRIES table, replaced round-robin). The three output
// FIFOs are drained with random ready and compared in full, announcement
// payloads byte for byte against tb_net_pkg's disc_payload.
`timescale 1ns/1ps
module tb_rtps_discovery;
  import ros2_chip_pkg::*;
  import tb_net_pkg::*;

  localparam int NR = 6, NW = 6, NSEEN = 16;
  localparam logic [31:0] LOCAL_IP = 32'h0A00_0002;
  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic [31:0] reader_topic [NR], writer_topic [NW];
  logic        reader_en [NR], writer_en [NW];
  logic        s_valid = 0, s_ready;
  rtps_msg_t   s_msg = '0;
  logic        rdv, rdr, outv, outr, wrv, wrr;
  match_t      rdm, wrm;
  rtps_msg_t   outm;
  logic [15:0] match_count;

  rtps_discovery #(.NUM_READERS(NR), .NUM_WRITERS(NW), .SEEN_ENTRIES(NSEEN)) dut (
    .clk, .rst, .local_ip(LOCAL_IP), .reader_topic, .reader_en, .writer_topic, .writer_en,
    .s_valid, .s_ready, .s_msg, .rd_match_valid(rdv), .rd_match_ready(rdr), .rd_match(rdm),
    .out_valid(outv), .out_ready(outr), .out_msg(outm), .wr_match_valid(wrv), .wr_match_ready(wrr),
    .wr_match(wrm), .match_count);

  // random-ready drains
  match_t    got_rd [$], got_wr [$];
  rtps_msg_t got_out [$];
  always @(negedge clk) begin
    rdr  <= ($urandom % 100) < 60;
    wrr  <= ($urandom % 100) < 60;
    outr <= ($urandom % 100) < 40;
  end
  always @(posedge clk) if (!rst) begin
    if (rdv && rdr) got_rd.push_back(rdm);
    if (wrv && wrr) got_wr.push_back(wrm);
    if (outv && outr) got_out.push_back(outm);
  end

  // reference model
  match_t    exp_rd [$], exp_wr [$];
  rtps_msg_t exp_out [$];
  logic [127:0] seen_g [NSEEN];
  bit           seen_v [NSEEN];
  int           seen_ptr = 0;
  logic [63:0]  ann_sn = 1;

  function automatic rtps_msg_t payload_rec(bq_t p);
    rtps_msg_t r;
    r = '0;
    r.len = plen_t'(p.size());
    foreach (p[i]) r.data[8*i +: 8] = p[i];
    return r;
  endfunction

  task automatic model(rtps_msg_t m, logic [31:0] topic, logic [31:0] ent, logic [31:0] ip, logic [15:0] port);
    bit is_w, seen;
    is_w = (m.writer_id == ENTITYID_SEDP_PUB_WRITER);
    seen = 0;
    for (int i = 0; i < NSEEN; i++) if (seen_v[i] && seen_g[i] == {m.guid_prefix, ent}) seen = 1;
    if (!seen) begin
      seen_v[seen_ptr] = 1; seen_g[seen_ptr] = {m.guid_prefix, ent};
      seen_ptr = (seen_ptr + 1) % NSEEN;
    end
    if (m.len < plen_t'(20)) return;
    for (int i = 0; i < (is_w ? NR : NW); i++) begin
      bit hit;
      hit = is_w ? (reader_en[i] && reader_topic[i] == topic) : (writer_en[i] && writer_topic[i] == topic);
      if (!hit) continue;
      if (is_w) exp_rd.push_back('{8'(i), m.guid_prefix, ent, ip, port});
      else      exp_wr.push_back('{8'(i), m.guid_prefix, ent, ip, port});
      if (!seen) begin
        rtps_msg_t a;
        logic [31:0] le;
        le = is_w ? {16'h0, 8'(i + 1), 8'h04} : {16'h0, 8'(i + 1), 8'h03};
        a = payload_rec(disc_payload(topic, le, LOCAL_IP, 16'd7411));
        a.kind = SUB_DATA;
        a.guid_prefix = m.guid_prefix;
        a.writer_id = is_w ? 32'h0000_04C2 : 32'h0000_03C2;
        a.reader_id = is_w ? 32'h0000_04C7 : 32'h0000_03C7;
        a.sn = ann_sn++;
        a.ip = ip; a.port = port;
        exp_out.push_back(a);
      end
    end
  endtask

  localparam int NMSG = 400;
  logic [31:0] topics [4] = '{32'h1111_0001, 32'h2222_0002, 32'h3333_0003, 32'h4444_0004};

  initial begin
    for (int i = 0; i < NR; i++) begin reader_topic[i] = topics[$urandom % 4]; reader_en[i] = ($urandom % 6) != 0; end
    for (int i = 0; i < NW; i++) begin writer_topic[i] = topics[$urandom % 4]; writer_en[i] = ($urandom % 6) != 0; end
    reader_en[0] = 1; writer_en[0] = 1;
    repeat (5) @(posedge clk);
    rst = 0;
    for (int n = 0; n < NMSG; n++) begin
      automatic rtps_msg_t m;
      automatic logic [31:0] topic, ent, ip;
      automatic logic [15:0] port;
      automatic bq_t p;
      topic = (n % 7 == 3) ? 32'h5555_0005 : topics[$urandom % 4];        // sometimes no local match
      ent   = {16'h0, 8'($urandom % 12 + 1), ($urandom % 2) ? 8'h03 : 8'h04};
      ip    = {24'h0A0000, 8'($urandom % 8 + 10)};
      port  = 16'd7411 + 16'($urandom % 3);
      p = disc_payload(topic, ent, ip, port);
      if (n % 23 == 11) p = slice(p, 0, 16);                              // too short: no action
      m = payload_rec(p);
      m.kind = SUB_DATA;
      m.guid_prefix = {64'hCAFE_0000_0000_0000, 32'($urandom % 3)};
      m.writer_id = ($urandom % 2) ? ENTITYID_SEDP_PUB_WRITER : ENTITYID_SEDP_SUB_WRITER;
      m.reader_id = ($urandom % 2) ? ENTITYID_UNKNOWN : ENTITYID_SEDP_PUB_READER;
      m.sn = 64'(n);
      m.ip = 32'hDEAD_BEEF; m.port = 16'd9;   // transport address of the datagram, not used
      model(m, topic, ent, ip, port);
      @(negedge clk);
      s_valid = 1; s_msg = m;
      #0.1;
      while (!s_ready) begin @(negedge clk); #0.1; end
      @(negedge clk);
      s_valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (400) @(posedge clk);
    check(got_rd.size() == exp_rd.size(), $sformatf("reader matches %0d / %0d", got_rd.size(), exp_rd.size()));
    check(got_wr.size() == exp_wr.size(), $sformatf("writer matches %0d / %0d", got_wr.size(), exp_wr.size()));
    check(got_out.size() == exp_out.size(), $sformatf("announcements %0d / %0d", got_out.size(), exp_out.size()));
    foreach (exp_rd[i]) if (i < got_rd.size()) check(got_rd[i] == exp_rd[i], $sformatf("reader match %0d", i));
    foreach (exp_wr[i]) if (i < got_wr.size()) check(got_wr[i] == exp_wr[i], $sformatf("writer match %0d", i));
    foreach (exp_out[i]) if (i < got_out.size()) begin
      check(got_out[i] == exp_out[i], $sformatf("announcement %0d", i));
      if (got_out[i] != exp_out[i])
        $display("  got wid %h sn %0d ip %h len %0d / exp wid %h sn %0d ip %h len %0d", got_out[i].writer_id,
          got_out[i].sn, got_out[i].ip, got_out[i].len, exp_out[i].writer_id, exp_out[i].sn, exp_out[i].ip, exp_out[i].len);
    end
    check(int'(match_count) == exp_rd.size() + exp_wr.size(), "match_count");
    check(exp_rd.size() > 50 && exp_wr.size() > 50 && exp_out.size() > 10, "enough activity");
    $display("matches rd %0d wr %0d announcements %0d", exp_rd.size(), exp_wr.size(), exp_out.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
