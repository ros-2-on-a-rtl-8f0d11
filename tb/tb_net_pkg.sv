// tb_net_pkg: reference packet builders and checkers for the testbenches.
//
// Everything here is written from the protocol specifications (IPv4, UDP,
// ARP, DDSI-RTPS) as byte queues, independently of the RTL, so that the
// testbenches can build stimulus and compute expected bytes and checksums
// without reusing any logic of the design.
package tb_net_pkg;
  typedef logic [7:0] bq_t[$];

  // check bookkeeping shared by the block testbenches
  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endfunction

  function automatic bit same_bytes(bq_t a, bq_t b);
    if (a.size() != b.size()) return 0;
    foreach (a[i]) if (a[i] !== b[i]) return 0;
    return 1;
  endfunction

  function automatic void show(string tag, bq_t a);
    $write("  %s %0d:", tag, a.size());
    foreach (a[i]) $write(" %02x", a[i]);
    $write("\n");
  endfunction

  function automatic bq_t slice(bq_t a, int from, int n);
    bq_t q;
    for (int i = from; i < from + n && i < a.size(); i++) q.push_back(a[i]);
    return q;
  endfunction

  function automatic bq_t rand_bytes(int n);
    bq_t q;
    for (int i = 0; i < n; i++) q.push_back(8'($urandom));
    return q;
  endfunction

  function automatic logic [15:0] ones_sum(bq_t b);
    logic [31:0] s;
    s = 0;
    for (int i = 0; i < b.size(); i += 2)
      s += 32'({b[i], (i + 1 < b.size()) ? b[i+1] : 8'h00});
    while (s[31:16] != 0) s = 32'(s[15:0]) + 32'(s[31:16]);
    return s[15:0];
  endfunction

  function automatic void put16(ref bq_t q, input logic [15:0] v);
    q.push_back(v[15:8]); q.push_back(v[7:0]);
  endfunction
  function automatic void put32(ref bq_t q, input logic [31:0] v);
    q.push_back(v[31:24]); q.push_back(v[23:16]); q.push_back(v[15:8]); q.push_back(v[7:0]);
  endfunction
  function automatic void put32le(ref bq_t q, input logic [31:0] v);
    q.push_back(v[7:0]); q.push_back(v[15:8]); q.push_back(v[23:16]); q.push_back(v[31:24]);
  endfunction
  function automatic void append(ref bq_t q, input bq_t b);
    foreach (b[i]) q.push_back(b[i]);
  endfunction

  // IPv4 packet (20-byte header, correct checksum unless bad_csum)
  function automatic bq_t ip_packet(logic [31:0] src, logic [31:0] dst, logic [7:0] proto,
                                    bq_t payload, bit bad_csum = 0);
    bq_t h;
    logic [15:0] c;
    put16(h, 16'h4500); put16(h, 16'(20 + payload.size())); put16(h, 16'h1234);
    put16(h, 16'h0000); h.push_back(8'd64); h.push_back(proto); put16(h, 16'h0000);
    put32(h, src); put32(h, dst);
    c = ~ones_sum(h);
    if (bad_csum) c ^= 16'h0101;
    h[10] = c[15:8]; h[11] = c[7:0];
    append(h, payload);
    return h;
  endfunction

  // UDP checksum over pseudo-header + datagram (datagram with checksum 0)
  function automatic logic [15:0] udp_csum(logic [31:0] src, logic [31:0] dst, bq_t dgram);
    bq_t p;
    logic [15:0] c;
    put32(p, src); put32(p, dst); p.push_back(8'd0); p.push_back(8'd17);
    put16(p, 16'(dgram.size()));
    append(p, dgram);
    c = ~ones_sum(p);
    return (c == 16'h0000) ? 16'hFFFF : c;
  endfunction

  function automatic bq_t udp_datagram(logic [31:0] src, logic [31:0] dst, logic [15:0] sport,
                                       logic [15:0] dport, bq_t payload);
    bq_t d;
    logic [15:0] c;
    put16(d, sport); put16(d, dport); put16(d, 16'(8 + payload.size())); put16(d, 16'h0000);
    append(d, payload);
    c = udp_csum(src, dst, d);
    d[6] = c[15:8]; d[7] = c[7:0];
    return d;
  endfunction

  function automatic bq_t arp_body(logic [15:0] oper, logic [47:0] sha, logic [31:0] spa,
                                   logic [47:0] tha, logic [31:0] tpa);
    bq_t a;
    put16(a, 16'd1); put16(a, 16'h0800); a.push_back(8'd6); a.push_back(8'd4); put16(a, oper);
    put16(a, sha[47:32]); put32(a, sha[31:0]); put32(a, spa);
    put16(a, tha[47:32]); put32(a, tha[31:0]); put32(a, tpa);
    return a;
  endfunction

  function automatic bq_t rtps_header(logic [95:0] prefix, logic [15:0] vendor = 16'h0102);
    bq_t q;
    put32(q, 32'h5254_5053); q.push_back(8'd2); q.push_back(8'd3); put16(q, vendor);
    put32(q, prefix[95:64]); put32(q, prefix[63:32]); put32(q, prefix[31:0]);
    return q;
  endfunction

  // DATA submessage, no inline QoS; little endian unless be is set
  function automatic bq_t rtps_data(logic [31:0] rid, logic [31:0] wid, logic [63:0] sn, bq_t payload,
                                    bit be = 0);
    bq_t q;
    logic [15:0] l;
    l = 16'(20 + payload.size());
    q.push_back(8'h15); q.push_back(be ? 8'h04 : 8'h05);
    if (be) put16(q, l); else begin q.push_back(l[7:0]); q.push_back(l[15:8]); end
    put16(q, 16'h0000);
    if (be) put16(q, 16'd16); else begin q.push_back(8'd16); q.push_back(8'd0); end
    put32(q, rid); put32(q, wid);
    if (be) begin put32(q, sn[63:32]); put32(q, sn[31:0]); end
    else begin put32le(q, sn[63:32]); put32le(q, sn[31:0]); end
    append(q, payload);
    return q;
  endfunction

  function automatic bq_t rtps_acknack(logic [31:0] rid, logic [31:0] wid, logic [63:0] base,
                                       logic [31:0] nbits, logic [31:0] bitmap);
    bq_t q;
    q.push_back(8'h06); q.push_back(8'h01); q.push_back(8'd28); q.push_back(8'd0);
    put32(q, rid); put32(q, wid); put32le(q, base[63:32]); put32le(q, base[31:0]);
    put32le(q, nbits); put32le(q, bitmap); put32le(q, 32'd7);
    return q;
  endfunction

  // INFO_TS submessage (skipped by the parser)
  function automatic bq_t rtps_info_ts();
    bq_t q;
    q.push_back(8'h09); q.push_back(8'h01); q.push_back(8'd8); q.push_back(8'd0);
    repeat (8) q.push_back(8'hAB);
    return q;
  endfunction

  // static discovery announcement payload
  function automatic bq_t disc_payload(logic [31:0] topic, logic [31:0] entity, logic [31:0] ip,
                                       logic [15:0] port);
    bq_t q;
    q.push_back(8'h00); q.push_back(8'h03); q.push_back(8'h00); q.push_back(8'h00);
    put32le(q, topic); put32(q, entity); put32(q, ip);
    q.push_back(port[7:0]); q.push_back(port[15:8]); q.push_back(8'h00); q.push_back(8'h00);
    return q;
  endfunction

  // CDR_LE encapsulated message body
  function automatic bq_t cdr(bq_t body);
    bq_t q;
    q.push_back(8'h00); q.push_back(8'h01); q.push_back(8'h00); q.push_back(8'h00);
    append(q, body);
    return q;
  endfunction

  // service request identity: 16-byte client GUID (first byte most
  // significant) and 8-byte little-endian sequence number
  function automatic bq_t req_id(logic [127:0] guid, logic [63:0] seq);
    bq_t q;
    put32(q, guid[127:96]); put32(q, guid[95:64]); put32(q, guid[63:32]); put32(q, guid[31:0]);
    put32le(q, seq[31:0]); put32le(q, seq[63:32]);
    return q;
  endfunction

  // first n bytes of a record payload (byte i at bits [8*i +: 8]) and back
  function automatic bq_t pbytes(logic [511:0] d, int n);
    bq_t q;
    for (int i = 0; i < n && i < 64; i++) q.push_back(d[8*i +: 8]);
    return q;
  endfunction
  function automatic logic [511:0] pload(bq_t q);
    logic [511:0] d;
    d = '0;
    foreach (q[i]) if (i < 64) d[8*i +: 8] = q[i];
    return d;
  endfunction

  function automatic bq_t counting(int n, logic [7:0] start);
    bq_t q;
    for (int i = 0; i < n; i++) q.push_back(8'(start + 8'(i)));
    return q;
  endfunction

  function automatic logic [31:0] get32(bq_t q, int i);
    return {q[i], q[i+1], q[i+2], q[i+3]};
  endfunction
  function automatic logic [31:0] get32le(bq_t q, int i);
    return {q[i+3], q[i+2], q[i+1], q[i]};
  endfunction
endpackage
