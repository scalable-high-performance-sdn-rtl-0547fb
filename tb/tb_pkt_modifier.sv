// tb_pkt_modifier: self-checking test of pkt_modifier (512-bit datapath).
//
// Random packets (Ethernet, 0-2 VLAN tags, 0-2 MPLS labels, IPv4 with a
// valid header checksum or IPv6, random payload, 60 to 400 bytes) are sent
// with random action sets: set Ethernet destination, set VLAN id, decrement
// TTL, and any mix of pop/push VLAN and pop/push MPLS. A byte-level model
// applies the same actions to a copy of the packet (for IPv4 it recomputes
// the header checksum from scratch, which checks the incremental update in
// the design) and the output stream must equal it byte for byte, with full
// beats except the last, correct start/end marks and the packet's tag.
// Input gaps and output stalls are random in the first phase; in the second
// phase both sides run at full speed and every packet must leave within its
// output beat count plus two cycles (one beat per cycle, as the paper's
// pipelined datapath requires).
module tb_pkt_modifier;
  import sdn_pkg::*;
  localparam int DW = 512, B = DW/8, NBW = $clog2(B) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_sop, in_eop, out_valid, out_ready, out_sop, out_eop;
  logic [DW-1:0] in_data, out_data;
  logic [NBW-1:0] in_nbytes, out_nbytes;
  action_set_t in_aset;
  meta_t in_meta;
  logic [7:0] in_tag, out_tag;

  pkt_modifier #(.DATA_W(DW), .TAG_W(8)) dut (.*);

  int checks = 0, failures = 0;
  int n_ttl = 0, n_push = 0, n_pop = 0, n_multi = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef byte unsigned bytes_t[$];
  bytes_t exp_q[$];
  int     exp_tag[$], exp_beats[$];
  logic   fast = 0;

  function automatic logic [15:0] ip_csum(bytes_t p, int o, int len);
    logic [31:0] s = 0;
    for (int i = 0; i < len; i += 2) if (i != 10) s += {p[o+i], p[o+i+1]};
    while (s[31:16] != 0) s = s[15:0] + s[31:16];
    return ~s[15:0];
  endfunction

  task automatic gen(output bytes_t p, output meta_t m, output action_set_t a, output bytes_t e);
    int nv, nm, v6, len, l3, mo, pay;
    p = {}; m = '0; a = '0;
    nv = $urandom % 3; nm = ($urandom % 3 == 0) ? $urandom % 2 + 1 : 0; v6 = $urandom % 2;
    for (int i = 0; i < 12; i++) p.push_back($urandom);
    for (int i = 0; i < nv; i++) begin p.push_back(8'h81); p.push_back(0); p.push_back($urandom); p.push_back($urandom); end
    if (nm != 0) begin p.push_back(8'h88); p.push_back(8'h47); end
    else if (v6) begin p.push_back(8'h86); p.push_back(8'hDD); end
    else begin p.push_back(8'h08); p.push_back(8'h00); end
    for (int i = 0; i < nm; i++) begin
      p.push_back($urandom); p.push_back($urandom); p.push_back({4'($urandom), 3'd0, 1'(i == nm - 1)}); p.push_back($urandom);
    end
    l3 = p.size();
    pay = 20 + $urandom % 330;
    if (v6) begin
      p.push_back(8'h60); for (int i = 1; i < 40; i++) p.push_back($urandom);
      p[l3+7] = $urandom % 4;   // hop limit, sometimes zero
    end else begin
      p.push_back(8'h45); for (int i = 1; i < 20; i++) p.push_back($urandom);
      p[l3+8] = $urandom % 4;   // TTL, sometimes zero
      p[l3+2] = 8'((20 + pay) >> 8); p[l3+3] = 8'(20 + pay);
      {p[l3+10], p[l3+11]} = ip_csum(p, l3, 20);
    end
    for (int i = 0; i < pay; i++) p.push_back($urandom);
    m.pkt_len = 16'(p.size()); m.l3_off = 8'(l3); m.l3_type = v6 ? L3_IPV6 : L3_IPV4;
    m.n_vlan = 2'(nv); m.n_mpls = 3'(nm);
    a.set_eth_dst = $urandom % 4 == 0; a.eth_dst = {$urandom, $urandom};
    a.set_vid = $urandom % 4 == 0; a.vid = $urandom;
    a.dec_ttl = $urandom % 3 == 0;
    a.pop_vlan = $urandom % 5 == 0; a.push_vlan = $urandom % 5 == 0;
    a.pop_mpls = $urandom % 4 == 0; a.push_mpls = $urandom % 5 == 0;
    a.mpls_label = $urandom; a.pop_ethertype = v6 ? 16'h86DD : 16'h0800;
    // model
    e = p;
    mo = 14 + 4 * nv;
    if (a.set_eth_dst) for (int i = 0; i < 6; i++) e[i] = a.eth_dst[8*(5-i) +: 8];
    if (a.set_vid && nv != 0) begin e[14] = {e[14][7:4], a.vid[11:8]}; e[15] = a.vid[7:0]; end
    if (a.dec_ttl) begin
      if (!v6 && e[l3+8] != 0) begin
        e[l3+8]--; {e[l3+10], e[l3+11]} = ip_csum(e, l3, 20); n_ttl++;
      end
      if (v6 && e[l3+7] != 0) begin e[l3+7]--; n_ttl++; end
    end
    if ((a.pop_vlan && nv != 0) + a.push_vlan + (a.pop_mpls && nm != 0) + a.push_mpls > 1) n_multi++;
    if (a.pop_vlan && nv != 0) begin
      e.delete(12); e.delete(12); e.delete(12); e.delete(12); n_pop++;
    end else if (a.push_vlan) begin
      logic [11:0] vid; logic [2:0] pcp;
      vid = a.set_vid ? a.vid : (nv != 0 ? {p[14][3:0], p[15]} : 12'd0);
      pcp = nv != 0 ? p[14][7:5] : 3'd0;
      e.insert(12, vid[7:0]); e.insert(12, {pcp, 1'b0, vid[11:8]}); e.insert(12, 8'h00); e.insert(12, 8'h81);
      n_push++;
    end else if (a.pop_mpls && nm != 0) begin
      e.delete(mo); e.delete(mo); e.delete(mo); e.delete(mo);
      if (nm == 1) begin e[mo-2] = a.pop_ethertype[15:8]; e[mo-1] = a.pop_ethertype[7:0]; end
      n_pop++;
    end else if (a.push_mpls) begin
      logic [31:0] lse;
      lse = {a.mpls_label, 3'd0, 1'(nm == 0), 8'd64};
      e[mo-2] = 8'h88; e[mo-1] = 8'h47;
      e.insert(mo, lse[7:0]); e.insert(mo, lse[15:8]); e.insert(mo, lse[23:16]); e.insert(mo, lse[31:24]);
      n_push++;
    end
  endtask

  int sent = 0, got = 0;
  int t_in [$];
  bit t_fast [$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    in_valid = 0; in_data = '0; in_nbytes = '0; in_sop = 0; in_eop = 0; in_aset = '0; in_meta = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1200; n++) begin
      bytes_t p, e; meta_t m; action_set_t a; int nb;
      if (n == 600) fast = 1;
      gen(p, m, a, e);
      exp_q.push_back(e); exp_tag.push_back(n % 256); exp_beats.push_back((e.size() + B - 1) / B);
      nb = (p.size() + B - 1) / B;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        while (!fast && ($urandom % 4 == 0)) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_sop = (b == 0); in_eop = (b == nb - 1);
        in_aset = a; in_meta = m; in_tag = 8'(n);
        in_data = '0;
        for (int i = 0; i < B && b*B + i < p.size(); i++) in_data[8*i +: 8] = p[b*B + i];
        in_nbytes = in_eop ? NBW'(p.size() - b*B) : NBW'(B);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (b == 0) begin t_in.push_back(cyc); t_fast.push_back(fast && n > 600); end
      end
      sent++;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (50) @(negedge clk);
    check(got == sent, "all packets out");
    check(n_ttl > 100 && n_push > 100 && n_pop > 100 && n_multi > 20, "coverage");
    $display("packets=%0d ttl=%0d push=%0d pop=%0d multi=%0d", got, n_ttl, n_push, n_pop, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  bytes_t cur;
  int     ob = 0;
  always @(negedge clk) out_ready = fast ? 1'b1 : ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(out_sop == (ob == 0), "sop mark");
    if (!out_eop) check(int'(out_nbytes) == B, "full middle beat");
    for (int i = 0; i < int'(out_nbytes); i++) cur.push_back(out_data[8*i +: 8]);
    ob++;
    if (out_eop) begin
      bytes_t e; int tg, eb, ti;
      e = exp_q.pop_front(); tg = exp_tag.pop_front(); eb = exp_beats.pop_front(); ti = t_in.pop_front();
      check(cur == e, "packet bytes");
      if (cur != e) $display("  packet %0d size got %0d exp %0d", got, cur.size(), e.size());
      check(int'(out_tag) == tg, "tag");
      check(ob == eb, "beat count");
      if (t_fast.pop_front()) check(cyc - ti <= eb + 2, "one beat per cycle");
      got++;
      cur = {}; ob = 0;
    end
  end
endmodule
