// tb_parser: self-checking test of parser.
//
// Builds random packets from random field values along the parser graph:
// 0-2 VLAN tags, 0-3 MPLS labels, then IPv4 (random IHL 5..8 for the
// dynamic offset), IPv6, ARP or an unknown EtherType, then TCP, UDP, ICMP
// or ICMPv6. Because each packet is built from known fields, the expected
// match tuple and metadata are known without re-parsing. One packet in
// eight is damaged on purpose (wrong IP version, IHL below 5, MPLS stack
// without bottom-of-stack, IPv4 total length past the packet, packet
// shorter than its headers) and must come out marked malicious. Packets
// are offered back to back, one per cycle, and each result must appear
// exactly one cycle after its input (the paper's single-cycle parser).
module tb_parser;
  import sdn_pkg::*;
  localparam int HB = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [HB*8-1:0] hdr;
  logic [7:0] in_port;
  logic [15:0] pkt_len;
  tuple_t out_tuple;
  meta_t out_meta;

  parser #(.HDR_BYTES(HB)) dut (.*);

  int checks = 0, failures = 0;
  int n_mal = 0, n_v4 = 0, n_v6 = 0, n_arp = 0, n_mpls = 0, n_vlan = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned pk[$];
  task automatic put8(int v);  pk.push_back(8'(v)); endtask
  task automatic put16(int v); put8(v >> 8); put8(v); endtask
  task automatic put32(logic [31:0] v); put16(v[31:16]); put16(v[15:0]); endtask
  task automatic putn(logic [127:0] v, int n);
    for (int i = n - 1; i >= 0; i--) put8(v[8*i +: 8]);
  endtask

  tuple_t exp_t, exp_q[$];
  meta_t  exp_m, exp_mq[$];

  task automatic build();
    int nv, nm, l3, l4, ihl, bad, et, plen, l3off, l4len;
    logic [47:0] da, sa;
    logic [127:0] s6, d6;
    logic [31:0] s4, d4;
    logic [15:0] sp, dp;
    pk.delete();
    exp_t = '0; exp_m = '0;
    nv = $urandom % 3; nm = ($urandom % 3 == 0) ? ($urandom % 3 + 1) : 0;
    l3 = $urandom % 4;                 // 0 v4, 1 v6, 2 arp, 3 other
    if (nm != 0 && l3 >= 2) l3 = $urandom % 2;
    l4 = $urandom % 3;                 // 0 tcp, 1 udp, 2 icmp
    ihl = 5 + $urandom % 4;
    bad = ($urandom % 8 == 0) ? ($urandom % 5 + 1) : 0;
    if (bad == 2 && l3 != 0) bad = 1;
    if (bad == 3 && nm == 0) bad = 1;
    if (bad == 1 && (l3 >= 2 || nm != 0)) bad = 5;  // after MPLS the nibble itself picks the L3 type
    if (bad == 4 && l3 != 0) bad = 5;
    da = {$urandom, $urandom}; sa = {$urandom, $urandom};
    s4 = $urandom; d4 = $urandom;
    s6 = {$urandom, $urandom, $urandom, $urandom}; d6 = {$urandom, $urandom, $urandom, $urandom};
    sp = $urandom; dp = $urandom;
    exp_t.in_port = in_port; exp_m.in_port = in_port;
    exp_t.eth_dst = da; exp_t.eth_src = sa;
    putn(da, 6); putn(sa, 6);
    et = (l3 == 0) ? 16'h0800 : (l3 == 1) ? 16'h86DD : (l3 == 2) ? 16'h0806 : 16'h88B5;
    if (nm != 0) et = 16'h8847;
    for (int i = 0; i < nv; i++) begin
      int tci;
      tci = $urandom % 65536;
      put16((i == 0) ? 16'h88A8 : 16'h8100);
      if (i == 0) begin exp_t.vlan_vid = {1'b1, 12'(tci)}; exp_t.vlan_pcp = 3'(tci >> 13); end
      pk.push_back(0); pk.push_back(0);   // placeholder for TCI
      pk[pk.size()-2] = 8'(tci >> 8); pk[pk.size()-1] = 8'(tci);
    end
    // move the TCI after its TPID: build as TPID,TCI pairs
    if (nv != 0) begin
      byte unsigned tmp[$];
      tmp = pk[12:$];
      pk = pk[0:11];
      for (int i = 0; i < nv; i++) begin
        pk.push_back(tmp[4*i]); pk.push_back(tmp[4*i+1]); pk.push_back(tmp[4*i+2]); pk.push_back(tmp[4*i+3]);
      end
    end
    put16(et);
    exp_t.eth_type = 16'(et);
    exp_m.n_vlan = 2'(nv);
    for (int i = 0; i < nm; i++) begin
      logic [19:0] lab; logic [2:0] tc; logic b;
      lab = $urandom; tc = $urandom;
      b = (i == nm - 1) && (bad != 3);
      if (i == 0) begin exp_t.mpls_label = lab; exp_t.mpls_tc = tc; exp_t.mpls_bos = b; end
      put32({lab, tc, b, 8'd64});
    end
    if (bad == 3) begin
      // no bottom-of-stack: the parser reads up to four labels
      for (int i = nm; i < 4; i++) put32({20'd7, 3'd0, 1'b0, 8'd64});
      exp_m.n_mpls = 3'd4;
      nm = 4;
    end else exp_m.n_mpls = 3'(nm);
    l3off = pk.size();
    exp_m.l3_off = 8'(l3off);
    if (bad == 3) begin
      // parsing stops after the labels when the stack does not end
      exp_m.malicious = 1;
      if (pk.size() > 0) begin
        // the byte after label four is read as an IP version nibble: keep it 0
        put8(0);
      end
    end else if (l3 == 0) begin
      int tot, ver, ih;
      ver = (bad == 1) ? 6 : 4; ih = (bad == 2) ? 4 : ihl;
      l4len = (l4 == 0) ? 20 : (l4 == 1) ? 8 : 4;
      tot = 4 * ih + l4len + 10;
      if (bad == 4) tot = tot + 200;
      put8((ver << 4) | ih); put8(8'hB5); put16(tot); put32($urandom);
      put8(64); put8((l4 == 0) ? 6 : (l4 == 1) ? 17 : 1); put16(0);
      put32(s4); put32(d4);
      for (int i = 5; i < ih; i++) put32($urandom);
      exp_t.ip_dscp = 6'h2D; exp_t.ip_ecn = 2'b01;
      exp_t.ip_proto = (l4 == 0) ? 6 : (l4 == 1) ? 17 : 1;
      exp_t.ip_src = 128'(s4); exp_t.ip_dst = 128'(d4);
      exp_m.l3_type = L3_IPV4;
      if (bad == 1 || bad == 2 || bad == 4) exp_m.malicious = 1;
      if (bad == 2) begin
        // IHL 4: the L4 header is looked for 16 bytes after the L3 start
        // (the parser still extracts from there); only the flag is checked.
      end
      n_v4++;
    end else if (l3 == 1) begin
      int ver;
      ver = (bad == 1) ? 4 : 6;
      l4len = (l4 == 0) ? 20 : (l4 == 1) ? 8 : 4;
      put8((ver << 4) | 4'hA); put8(8'h50); put16(0);
      put16(l4len + 10); put8((l4 == 0) ? 6 : (l4 == 1) ? 17 : 58); put8(64);
      putn(s6, 16); putn(d6, 16);
      exp_t.ip_dscp = {4'hA, 2'b01}; exp_t.ip_ecn = 2'b01;
      exp_t.ip_proto = (l4 == 0) ? 6 : (l4 == 1) ? 17 : 58;
      exp_t.ip_src = s6; exp_t.ip_dst = d6;
      exp_m.l3_type = L3_IPV6;
      if (bad == 1) exp_m.malicious = 1;
      n_v6++;
    end else if (l3 == 2) begin
      put16(1); put16(16'h0800); put8(6); put8(4); put16(2);
      putn(sa, 6); put32(s4); putn(48'h0, 6); put32(d4);
      exp_t.ip_proto = 8'd2; exp_t.ip_src = 128'(s4); exp_t.ip_dst = 128'(d4);
      exp_m.l3_type = L3_ARP;
      n_arp++;
    end
    if (bad != 3 && l3 <= 1) begin
      if (l4 == 2) begin
        put8(sp[7:0]); put8(dp[7:0]); put16(0);
        exp_t.l4_src = 16'(sp[7:0]); exp_t.l4_dst = 16'(dp[7:0]);
      end else begin
        put16(sp); put16(dp);
        for (int i = 4; i < ((l4 == 0) ? 20 : 8); i++) put8($urandom);
        exp_t.l4_src = sp; exp_t.l4_dst = dp;
      end
    end
    if (bad == 2) begin
      // with IHL 4 the L4 fields come from a different place: take them from
      // the packet the same way the parser must (4*IHL from the L3 start)
      int o;
      o = l3off + 16;
      if (l4 == 2) begin exp_t.l4_src = 16'(pk[o]); exp_t.l4_dst = 16'(pk[o+1]); end
      else begin exp_t.l4_src = {pk[o], pk[o+1]}; exp_t.l4_dst = {pk[o+2], pk[o+3]}; end
    end
    for (int i = 0; i < 10; i++) put8($urandom);
    plen = pk.size();
    if (bad == 5) begin
      plen = l3off + 2;          // claims to end inside its own headers
      if (l3 >= 2 && nm == 0) plen = 10;
      exp_m.malicious = 1;
    end
    if (bad == 4) exp_m.malicious = 1;
    exp_m.pkt_len = 16'(plen);
    pkt_len = 16'(plen);
    hdr = '0;
    for (int i = 0; i < HB && i < pk.size(); i++) hdr[8*i +: 8] = pk[i];
    if (nm != 0) n_mpls++;
    if (nv != 0) n_vlan++;
    if (exp_m.malicious) n_mal++;
  endtask

  int sent = 0, got = 0;
  initial begin
    in_valid = 0; hdr = '0; in_port = 0; pkt_len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_port = $urandom % 8;
      build();
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin exp_q.push_back(exp_t); exp_mq.push_back(exp_m); sent++; end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    check(got == sent, "all results");
    check(n_mal > 50 && n_v4 > 200 && n_v6 > 200 && n_arp > 100 && n_mpls > 100 && n_vlan > 200, "coverage");
    $display("sent=%0d malicious=%0d v4=%0d v6=%0d arp=%0d mpls=%0d vlan=%0d", sent, n_mal, n_v4, n_v6, n_arp, n_mpls, n_vlan);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency: out_valid must follow in_valid by exactly one cycle
  logic in_valid_d;
  always @(posedge clk) in_valid_d <= rst_n ? in_valid : 1'b0;
  always @(negedge clk) if (rst_n) begin
    check(out_valid == in_valid_d, "one-cycle latency");
    if (out_valid && exp_q.size() != 0) begin
      tuple_t et; meta_t em;
      et = exp_q.pop_front(); em = exp_mq.pop_front();
      got++;
      if (em.malicious) begin
        if (!out_meta.malicious) $display("meta %p exp %p", out_meta, em);
        check(out_meta.malicious, "malicious flagged");
      end else begin
        if (out_tuple != et) $display("tuple got %h\n      exp %h", out_tuple, et);
        check(out_tuple == et, "tuple");
        check(out_meta == em, "meta");
      end
    end
  end
endmodule
