// tb_flow_table: self-checking test of flow_table, exact and ternary.
//
// Two 16-entry tables run side by side from the same commands and lookups:
// a CAM (4-bit chunks, masks ignored) and a TCAM (3-bit chunks). A model of
// each holds the entries (slot, priority, key, mask, instruction) and the
// per-flow counters. The test alternates phases: a few flow-mod commands
// (ADD into the lowest free slot, DELETE_STRICT of an existing or absent
// entry, TABLE_MOD of the miss rule), then a burst of lookups with keys near
// stored entries, then statistics reads of every slot. It checks:
//   - cmd_done, cmd_ok and cmd_slot of each command, and that an ADD takes
//     2^CHUNK_W + 3 cycles from the command to cmd_done (the RAM walk of
//     the paper's RAM-based CAM plus command and completion registers);
//   - every lookup answers four cycles after it is issued (Sec. IV-B);
//   - hit, slot (highest priority, lowest slot on a tie) and instruction;
//   - per-flow packet and byte counts, duration and priority, and the
//     table's active, lookup and matched counters.
module tb_flow_table;
  import sdn_pkg::*;
  localparam int D = 16, SW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] now_sec = 0;
  logic lk_valid, lk_use, cmd_valid;
  tuple_t lk_key;
  logic [15:0] lk_len;
  flow_mod_t cmd;
  logic [SW-1:0] st_slot;

  logic res_valid [2], res_hit [2], mtc [2], cmd_ready [2], cmd_done [2], cmd_ok [2], st_ev [2];
  logic [SW-1:0] res_slot [2], cmd_slot [2];
  instr_t res_instr [2];
  logic [63:0] st_pkts [2], st_bytes [2], lookup_count [2], matched_count [2];
  logic [31:0] st_dur [2], active_count [2];
  logic [15:0] st_prio [2];

  for (genvar t = 0; t < 2; t++) begin : g_t
    flow_table #(.DEPTH(D), .CHUNK_W(t ? 3 : 4), .TERNARY(t == 1)) dut (
      .clk, .rst_n, .now_sec, .lk_valid, .lk_key, .lk_len, .lk_use,
      .res_valid(res_valid[t]), .res_hit(res_hit[t]), .res_slot(res_slot[t]), .res_instr(res_instr[t]),
      .miss_to_ctrl(mtc[t]), .cmd_valid, .cmd_ready(cmd_ready[t]), .cmd,
      .cmd_done(cmd_done[t]), .cmd_ok(cmd_ok[t]), .cmd_slot(cmd_slot[t]),
      .st_slot, .st_entry_valid(st_ev[t]), .st_pkts(st_pkts[t]), .st_bytes(st_bytes[t]),
      .st_dur(st_dur[t]), .st_prio(st_prio[t]), .active_count(active_count[t]),
      .lookup_count(lookup_count[t]), .matched_count(matched_count[t]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  typedef struct {
    bit v; logic [15:0] prio; tuple_t key, mask; instr_t instr;
    longint pk, by; int t0;
  } ent_t;
  ent_t m [2][D];
  bit   m_mtc;
  longint m_lk [2], m_mt [2];
  tuple_t pool [8];
  int hits = 0, ties = 0, adds = 0, dels = 0, full = 0;

  function automatic bit is_match(int t, int e, tuple_t k);
    if (!m[t][e].v) return 0;
    return t ? ((k & m[t][e].mask) == (m[t][e].key & m[t][e].mask)) : (k == m[t][e].key);
  endfunction

  function automatic int best(int t, tuple_t k);
    int b = -1;
    for (int e = 0; e < D; e++)
      if (is_match(t, e, k) && (b < 0 || m[t][e].prio > m[t][b].prio)) b = e;
    return b;
  endfunction

  function automatic tuple_t rnd_tuple();
    tuple_t r;
    for (int i = 0; i < $bits(tuple_t); i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  function automatic tuple_t rnd_mask();
    tuple_t r = '1;
    // wildcard a few whole fields, as a controller does
    if ($urandom % 2) r.ip_src = '0;
    if ($urandom % 2) r.ip_dst = '0;
    if ($urandom % 2) r.l4_src = '0;
    if ($urandom % 2) r.eth_src = '0;
    if ($urandom % 3 == 0) r.l4_dst = '0;
    if ($urandom % 4 == 0) r.ip_dst[7:0] = '0;    // a prefix
    return r;
  endfunction

  task automatic do_cmd(flow_mod_t c);
    int slot_exp [2], tnow; bit ok_exp [2];
    @(negedge clk);
    while (!(cmd_ready[0] && cmd_ready[1])) @(negedge clk);
    cmd = c; cmd_valid = 1;
    tnow = now_sec;
    for (int t = 0; t < 2; t++) begin
      slot_exp[t] = -1; ok_exp[t] = 0;
      if (c.op == FM_ADD) begin
        for (int e = D - 1; e >= 0; e--) if (!m[t][e].v) slot_exp[t] = e;
        ok_exp[t] = slot_exp[t] >= 0;
      end else if (c.op == FM_DELETE_STRICT) begin
        for (int e = D - 1; e >= 0; e--)
          if (m[t][e].v && m[t][e].prio == c.prio && m[t][e].mask == (t ? c.mask : '1) &&
              (m[t][e].key & m[t][e].mask) == (c.key & m[t][e].mask)) slot_exp[t] = e;
        ok_exp[t] = slot_exp[t] >= 0;
      end else ok_exp[t] = 1;
    end
    begin
      int n, seen [2]; bit okv [2]; int sl [2];
      seen[0] = 0; seen[1] = 0;
      for (n = 1; n < 200 && (seen[0] == 0 || seen[1] == 0); n++) begin
        @(negedge clk);
        cmd_valid = 0;
        for (int t = 0; t < 2; t++) if (cmd_done[t] && seen[t] == 0) begin
          seen[t] = n; okv[t] = cmd_ok[t]; sl[t] = int'(cmd_slot[t]);
        end
      end
      for (int t = 0; t < 2; t++) begin
        check(seen[t] != 0 && okv[t] == ok_exp[t], "command result");
        if (ok_exp[t] && c.op != FM_TABLE_MOD) check(sl[t] == slot_exp[t], "command slot");
        if (c.op == FM_ADD && ok_exp[t]) begin
          if (seen[t] != (t ? 8 : 16) + 3) $display("t=%0d seen=%0d", t, seen[t]);
          check(seen[t] == (t ? 8 : 16) + 3, "add takes 2^CHUNK_W + 3 cycles");
          m[t][slot_exp[t]] = '{v: 1, prio: c.prio, key: c.key & (t ? c.mask : '1), mask: t ? c.mask : '1,
                                instr: c.instr, pk: 0, by: 0, t0: tnow};
        end
        if (c.op == FM_DELETE_STRICT && ok_exp[t]) m[t][slot_exp[t]].v = 0;
      end
    end
    if (c.op == FM_TABLE_MOD) m_mtc = c.tbl_config[0];
    if (c.op == FM_ADD) begin if (ok_exp[1]) adds++; else full++; end
    if (c.op == FM_DELETE_STRICT && ok_exp[1]) dels++;
    repeat (2) @(negedge clk);
  endtask

  // lookups in flight
  tuple_t lq [$]; int llen [$]; bit luse [$];
  int cyc = 0;
  always @(posedge clk) begin cyc++; now_sec <= 32'(cyc / 64); end

  initial begin
    lk_valid = 0; lk_use = 0; lk_key = '0; lk_len = 0; cmd_valid = 0; cmd = '0; st_slot = '0;
    for (int t = 0; t < 2; t++) begin m_lk[t] = 0; m_mt[t] = 0; for (int e = 0; e < D; e++) m[t][e] = '{default: 0}; end
    m_mtc = 0;
    for (int i = 0; i < 8; i++) pool[i] = rnd_tuple();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 150; ph++) begin
      // commands
      repeat ($urandom % 4 + 1) begin
        flow_mod_t c;
        int r, pi;
        c = '0;
        r = $urandom % 10;
        c.op = (r < 5) ? FM_ADD : (r < 9) ? FM_DELETE_STRICT : FM_TABLE_MOD;
        c.prio = 16'($urandom % 4);
        pi = $urandom % 8;
        c.key = pool[pi];
        c.mask = rnd_mask();
        c.instr = instr_t'({$urandom, $urandom, $urandom, $urandom});
        c.tbl_config = $urandom % 2;
        if (c.op == FM_DELETE_STRICT && $urandom % 6 != 0) begin
          // delete an entry that exists in the TCAM model
          int e;
          e = $urandom % D;
          if (m[1][e].v) begin c.key = m[1][e].key; c.mask = m[1][e].mask; c.prio = m[1][e].prio; end
        end
        do_cmd(c);
      end
      // lookups
      repeat (60) begin
        tuple_t k; int pi;
        @(negedge clk);
        pi = $urandom % 8;
        k = pool[pi];
        if ($urandom % 2) begin k.ip_src = $urandom; k.l4_src = $urandom; end
        if ($urandom % 4 == 0) k.ip_dst[7:0] = $urandom;
        if ($urandom % 8 == 0) k = rnd_tuple();
        lk_valid = $urandom % 4 != 0; lk_key = k; lk_len = 16'($urandom % 1500 + 60); lk_use = $urandom % 8 != 0;
        if (lk_valid) begin lq.push_back(k); llen.push_back(lk_len); luse.push_back(lk_use); end
      end
      @(negedge clk);
      lk_valid = 0;
      repeat (6) @(negedge clk);
      // statistics of every slot
      for (int e = 0; e < D; e++) begin
        st_slot = SW'(e);
        @(negedge clk);
        for (int t = 0; t < 2; t++) begin
          check(st_ev[t] == m[t][e].v, "entry valid");
          if (m[t][e].v) begin
            check(st_pkts[t] == m[t][e].pk && st_bytes[t] == m[t][e].by, "flow counters");
            check(st_prio[t] == m[t][e].prio, "flow priority");
            // the duration register may hold the second before a tick
            check(st_dur[t] == now_sec - m[t][e].t0 || st_dur[t] == now_sec - m[t][e].t0 - 1, "flow duration");
          end
        end
      end
      for (int t = 0; t < 2; t++) begin
        int act;
        act = 0;
        for (int e = 0; e < D; e++) act += m[t][e].v;
        check(int'(active_count[t]) == act, "active count");
        check(lookup_count[t] == m_lk[t] && matched_count[t] == m_mt[t], "table counters");
        check(mtc[t] == m_mtc, "miss rule");
      end
    end
    check(hits > 1000 && adds > 100 && dels > 50 && full > 5 && ties > 20, "coverage");
    $display("lookups=%0d matched=%0d lq=%0d", lookup_count[0], matched_count[0], lq.size());
    $display("hits=%0d adds=%0d deletes=%0d full=%0d ties=%0d", hits, adds, dels, full, ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // four-cycle latency and results
  logic [3:0] vd;
  always @(posedge clk) vd <= rst_n ? {vd[2:0], lk_valid} : 4'b0;
  always @(negedge clk) if (rst_n) begin
    check(res_valid[0] == vd[3] && res_valid[1] == vd[3], "four-cycle lookup latency");
    if (res_valid[0] && lq.size() != 0) begin
      tuple_t k; int len; bit u;
      k = lq.pop_front(); len = llen.pop_front(); u = luse.pop_front();
      for (int t = 0; t < 2; t++) begin
        int b, nb;
        b = best(t, k);
        nb = 0;
        for (int e = 0; e < D; e++) if (is_match(t, e, k) && m[t][e].prio == m[t][b].prio) nb++;
        check(res_hit[t] == (b >= 0), "hit");
        if (b >= 0) begin
          check(int'(res_slot[t]) == b, "slot");
          check(res_instr[t] == m[t][b].instr, "instruction");
          if (u) begin m[t][b].pk++; m[t][b].by += len; end
          if (t == 1) begin hits++; if (nb > 1) ties++; end
        end
        if (u) begin m_lk[t]++; if (b >= 0) m_mt[t]++; end
      end
    end
  end
endmodule
