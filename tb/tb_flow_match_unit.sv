// tb_flow_match_unit: self-checking test of flow_match_unit.
//
// Two 16-entry tables: table 0 a TCAM (3-bit chunks), table 1 a CAM (4-bit
// chunks). Entries are installed through the flow-mod port (including
// commands for a table that does not exist, which must fail), the miss rule
// of each table is set by table-mod, and random packets stream through at
// up to one per cycle while buf_full toggles at random. A model walks the
// same tables: table 0 first, merge of write-actions on a hit, goto only to
// a higher table, miss rule on a miss, then the final rules (malicious,
// no output, controller-bound while buffers are full). Checks:
//   - result count and order, and the latency of N_TABLES * 5 + 1 = 11
//     cycles at one packet per cycle;
//   - the action set, packet-in reason, last table and metadata of each
//     result, and drop_full_event;
//   - fm_done/fm_ok of each command and the per-table lookup and match
//     counters; per-flow statistics through st_table/st_slot.
module tb_flow_match_unit;
  import sdn_pkg::*;
  localparam int NT = 2, D = 16, SW = 4, LATENCY = NT * 5 + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] now_sec = 0;
  logic in_valid, res_valid, buf_full, drop_full_event, fm_valid, fm_ready, fm_done, fm_ok, st_entry_valid;
  tuple_t in_tuple;
  meta_t in_meta;
  fmu_result_t res;
  flow_mod_t fm;
  logic [7:0] st_table;
  logic [SW-1:0] st_slot;
  logic [63:0] st_pkts, st_bytes;
  logic [31:0] st_dur;
  logic [15:0] st_prio;
  logic [31:0] tbl_active [NT];
  logic [63:0] tbl_lookups [NT], tbl_matches [NT];

  flow_match_unit #(.N_TABLES(NT), .DEPTH(D), .CAM_CHUNK(4), .TCAM_CHUNK(3), .N_TCAM(1)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { bit v; logic [15:0] prio; tuple_t key, mask; instr_t instr; longint pk, by; } ent_t;
  ent_t m [NT][D];
  bit   mtc [NT];
  longint m_lk [NT], m_mt [NT];
  tuple_t pool [6];
  int n_goto = 0, n_miss_ctrl = 0, n_full = 0, n_mal = 0, n_fwd = 0, n_hit1 = 0;

  function automatic int lookup(int t, tuple_t k);
    int b = -1;
    for (int e = 0; e < D; e++)
      if (m[t][e].v && ((t == 0) ? ((k & m[t][e].mask) == (m[t][e].key & m[t][e].mask)) : (k == m[t][e].key)))
        if (b < 0 || m[t][e].prio > m[t][b].prio) b = e;
    return b;
  endfunction

  // model of the walk; updates counters
  function automatic fmu_result_t walk(tuple_t k, meta_t md, bit full, output bit fev);
    fmu_result_t r;
    action_set_t a;
    int target;
    bit done;
    a = '0; r = '0; target = 0; done = 0; fev = 0;
    r.reason = RSN_NONE;
    for (int t = 0; t < NT; t++) begin
      if (!done && target == t) begin
        int b;
        b = lookup(t, k);
        r.table_id = 8'(t);
        m_lk[t]++;
        if (b >= 0) begin
          instr_t in;
          in = m[t][b].instr;
          m_mt[t]++; m[t][b].pk++; m[t][b].by += md.pkt_len;
          if (t == 1) n_hit1++;
          a = merge_actions(a, in.actions);
          if (in.actions.to_ctrl) r.reason = RSN_ACTION;
          if (in.goto_en && int'(in.goto_id) > t) begin target = in.goto_id; if (t == 0 && in.goto_id == 1) n_goto++; end
          else done = 1;
        end else begin
          done = 1; a.out_en = 0;
          if (mtc[t]) begin a.to_ctrl = 1; a.drop = 0; r.reason = RSN_NO_MATCH; n_miss_ctrl++; end
          else begin a.to_ctrl = 0; a.drop = 1; end
        end
      end
    end
    if (!a.to_ctrl && !a.out_en) a.drop = 1;
    if (md.malicious) begin a.drop = 1; n_mal++; end
    if (a.to_ctrl && !a.drop && full) begin a.drop = 1; fev = 1; n_full++; end
    if (a.drop) begin a.to_ctrl = 0; a.out_en = 0; end
    if (!a.drop && a.out_en) n_fwd++;
    r.aset = a; r.meta = md;
    return r;
  endfunction

  function automatic tuple_t rnd_tuple();
    tuple_t r;
    for (int i = 0; i < $bits(tuple_t); i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  function automatic action_set_t rnd_aset();
    action_set_t a;
    a = '0;
    case ($urandom % 5)
      0: a.drop = 1;
      1: a.to_ctrl = 1;
      2, 3: begin a.out_en = 1; a.out_port = $urandom % 8; end
      default: ;
    endcase
    a.set_vid = $urandom % 4 == 0; a.vid = $urandom;
    a.dec_ttl = $urandom % 3 == 0;
    a.push_vlan = $urandom % 6 == 0;
    a.set_eth_dst = $urandom % 5 == 0; a.eth_dst = {$urandom, $urandom};
    return a;
  endfunction

  task automatic cmd(flow_mod_t c, bit exp_ok);
    @(negedge clk);
    while (!fm_ready) @(negedge clk);
    fm = c; fm_valid = 1;
    @(negedge clk);
    fm_valid = 0;
    for (int n = 0; n < 100 && !fm_done; n++) @(negedge clk);
    check(fm_done && fm_ok == exp_ok, "command result");
  endtask

  task automatic add(int t, int pi);
    flow_mod_t c; int s;
    c = '0; c.op = FM_ADD; c.table_id = 8'(t); c.prio = 16'($urandom % 4);
    c.key = pool[pi];
    c.mask = '1;
    if (t == 0 && $urandom % 2) begin c.mask.ip_src = '0; c.mask.l4_src = '0; end
    c.instr.actions = rnd_aset();
    c.instr.goto_en = $urandom % 2; c.instr.goto_id = ($urandom % 4 == 0) ? 8'd0 : 8'd1;
    s = -1;
    for (int e = D - 1; e >= 0; e--) if (!m[t][e].v) s = e;
    cmd(c, s >= 0);
    if (s >= 0) m[t][s] = '{v: 1, prio: c.prio, key: c.key & c.mask, mask: c.mask, instr: c.instr, pk: 0, by: 0};
  endtask

  fmu_result_t exp_q [$];
  bit          exp_f [$];
  int          sent = 0, got = 0;

  initial begin
    in_valid = 0; in_tuple = '0; in_meta = '0; buf_full = 0; fm_valid = 0; fm = '0; st_table = 0; st_slot = 0;
    for (int t = 0; t < NT; t++) begin mtc[t] = 0; m_lk[t] = 0; m_mt[t] = 0; for (int e = 0; e < D; e++) m[t][e] = '{default: 0}; end
    for (int i = 0; i < 6; i++) pool[i] = rnd_tuple();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 40; ph++) begin
      // table changes
      repeat (2) begin
        int pi;
        pi = $urandom % 6;
        add($urandom % 2, pi);
      end
      if ($urandom % 4 == 0) begin
        flow_mod_t c; int t;
        c = '0; t = $urandom % 2;
        c.op = FM_TABLE_MOD; c.table_id = 8'(t); c.tbl_config = $urandom % 2;
        cmd(c, 1);
        mtc[t] = c.tbl_config[0];
      end
      if (ph % 10 == 9) begin
        flow_mod_t c;
        c = '0; c.op = FM_ADD; c.table_id = 8'd5;
        cmd(c, 0);                       // no such table
        // empty the tables again with strict deletes
        for (int t = 0; t < NT; t++) for (int e = 0; e < D; e++) if (m[t][e].v) begin
          c = '0; c.op = FM_DELETE_STRICT; c.table_id = 8'(t); c.prio = m[t][e].prio;
          c.key = m[t][e].key; c.mask = m[t][e].mask;
          cmd(c, 1);
          m[t][e].v = 0;
        end
      end
      repeat (4) @(negedge clk);
      // packets
      repeat (100) begin
        tuple_t k; meta_t md; bit fev; int pi;
        @(negedge clk);
        pi = $urandom % 6;
        k = pool[pi];
        if ($urandom % 2) begin k.ip_src = $urandom; k.l4_src = $urandom; end
        if ($urandom % 6 == 0) k = rnd_tuple();
        md = '0; md.pkt_len = 16'(60 + $urandom % 1400); md.in_port = $urandom % 8; md.malicious = $urandom % 16 == 0;
        in_valid = $urandom % 5 != 0; in_tuple = k; in_meta = md;
        buf_full = $urandom % 3 == 0;
        if (in_valid) begin
          // buf_full is sampled when the result is finalised: record the
          // value it will have then
          exp_q.push_back(walk(k, md, 0, fev));
          sent++;
        end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (LATENCY + 3) @(negedge clk);
      for (int t = 0; t < NT; t++) check(tbl_lookups[t] == m_lk[t] && tbl_matches[t] == m_mt[t], "table counters");
      for (int t = 0; t < NT; t++) for (int e = 0; e < D; e++) begin
        st_table = 8'(t); st_slot = SW'(e);
        @(negedge clk);
        check(st_entry_valid == m[t][e].v, "stats entry valid");
        if (m[t][e].v) check(st_pkts == m[t][e].pk && st_bytes == m[t][e].by && st_prio == m[t][e].prio, "flow statistics");
      end
    end
    check(got == sent, "all results");
    check(n_goto > 100 && n_miss_ctrl > 100 && n_full > 50 && n_mal > 50 && n_fwd > 100 && n_hit1 > 100, "coverage");
    $display("results=%0d goto=%0d miss_to_ctrl=%0d full_drop=%0d malicious=%0d fwd=%0d t1_hits=%0d",
             got, n_goto, n_miss_ctrl, n_full, n_mal, n_fwd, n_hit1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results: latency, and the buf_full rule applied with the flag's value
  // one cycle before the result
  logic [LATENCY-1:0] vd;
  logic full_d;
  always @(posedge clk) begin
    vd <= rst_n ? {vd[LATENCY-2:0], in_valid} : '0;
    full_d <= buf_full;
  end
  always @(negedge clk) if (rst_n) begin
    check(res_valid == vd[LATENCY-1], "latency N_TABLES*5+1");
    if (res_valid && exp_q.size() != 0) begin
      fmu_result_t e;
      e = exp_q.pop_front();
      if (e.aset.to_ctrl && full_d) begin
        e.aset.to_ctrl = 0; e.aset.out_en = 0; e.aset.drop = 1;
        check(drop_full_event, "drop_full_event");
        n_full++;
      end else check(!drop_full_event, "no drop_full_event");
      if (res != e) $display("  got %p\n  exp %p", res, e);
      check(res == e, "result");
      got++;
    end
  end
endmodule
