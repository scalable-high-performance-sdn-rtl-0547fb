// tb_of_agent: self-checking test of of_agent.
//
// The test plays the controller on the 64-bit channel, the flow match unit
// on the flow-mod and statistics ports, and action execution on the
// packet-in / packet-out ports (4 ports, 2 tables of 16 entries). It sends
// a random mix of HELLO, ECHO, BARRIER, FEATURES, GET_CONFIG, SET_CONFIG,
// FLOW_MOD (add, strict delete, bad command), TABLE_MOD, PACKET_OUT,
// multipart requests (TABLE, PORT, QUEUE, FLOW, unknown), messages with a
// wrong version or unknown type, and raises packet-in requests at random.
// For every message it knows the reply the agent must give (OpenFlow 1.3
// header, type, length, xid and body words, see of_agent for the layouts)
// and compares each class of replies in order; the flow-mod, table-mod and
// packet-out commands handed to the datapath are compared field by field.
// A flow-mod ADD that the datapath refuses must give a TABLE_FULL error.
// A directed case checks the paper's output priority: with the channel
// blocked behind a long port-statistics reply, a packet-in queued after a
// FEATURES and an ECHO reply must leave before them.
module tb_of_agent;
  import sdn_pkg::*;
  localparam int NP = 4, NT = 2, D = 16, SW = 4, NBUF = 8;
  localparam logic [63:0] DPID = 64'h0000_1234_5678_9ABC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic c_in_valid, c_in_ready, c_in_last, c_out_valid, c_out_ready, c_out_last;
  logic [63:0] c_in_data, c_out_data;
  logic fm_valid, fm_ready, fm_done, fm_ok;
  flow_mod_t fm;
  logic [7:0] st_table;
  logic [SW-1:0] st_slot;
  logic st_entry_valid;
  logic [63:0] st_pkts, st_bytes;
  logic [31:0] st_dur;
  logic [31:0] tbl_active [NT];
  logic [63:0] tbl_lookups [NT], tbl_matches [NT];
  logic po_valid, po_ready, pin_valid, pin_ready;
  pkt_out_t po;
  pkt_in_t pin;
  logic [63:0] rx_packets [NP], rx_bytes [NP], rx_dropped [NP], tx_packets [NP], tx_bytes [NP];
  logic [15:0] cfg_flags, miss_send_len;
  logic [31:0] msg_count;

  of_agent #(.N_PORTS(NP), .N_TABLES(NT), .DEPTH(D), .N_BUF(NBUF), .DPID(DPID)) dut (.*);

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

  // ---- datapath side models ----
  bit          ev [NT][D];
  logic [63:0] ep [NT][D], eb [NT][D];
  logic [31:0] ed [NT][D];
  always @(posedge clk) begin
    st_entry_valid <= ev[st_table[0]][st_slot];
    st_pkts  <= ep[st_table[0]][st_slot];
    st_bytes <= eb[st_table[0]][st_slot];
    st_dur   <= ed[st_table[0]][st_slot];
  end

  // expected datapath commands and replies per class
  flow_mod_t   fm_exp [$];
  bit          fm_res [$];      // fm_ok the test will answer with
  pkt_out_t    po_exp [$];
  logic [63:0] rep_exp [4][$];  // words, per class
  int          rep_msgs [4];
  logic [63:0] rx_msg [$];
  int          n_rx [4];

  function automatic int cls_of(logic [7:0] t);
    case (t)
      OFPT_PACKET_IN: return 0;
      OFPT_MP_REP: return 1;
      OFPT_FEAT_REP, OFPT_GCFG_REP: return 2;
      default: return 3;
    endcase
  endfunction

  task automatic expect_msg(int c, logic [63:0] w [$]);
    foreach (w[i]) rep_exp[c].push_back(w[i]);
    rep_msgs[c]++;
  endtask

  // channel input
  int n_sent = 0;
  task automatic send(logic [63:0] w [$]);
    n_sent++;
    for (int i = 0; i < w.size(); i++) begin
      @(negedge clk);
      c_in_valid = 1; c_in_data = w[i]; c_in_last = (i == w.size() - 1);
      @(posedge clk);
      while (!c_in_ready) @(posedge clk);
    end
    @(negedge clk);
    c_in_valid = 0; c_in_last = 0;
  endtask

  function automatic logic [63:0] hdr(logic [7:0] t, int len, logic [31:0] xid, logic [7:0] ver = OFP_VERSION);
    return {ver, t, 16'(len), xid};
  endfunction

  function automatic tuple_t rnd_tuple();
    tuple_t r;
    for (int i = 0; i < $bits(tuple_t); i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  int n_flowmod = 0, n_fail = 0, n_stats = 0, n_pin = 0, n_po = 0, n_err = 0;

  task automatic one_message();
    logic [63:0] w [$], r [$];
    logic [31:0] xid;
    int k;
    xid = $urandom;
    k = $urandom % 16;
    w = {}; r = {};
    case (k)
      0, 1: begin   // HELLO / ECHO / BARRIER
        logic [7:0] t, rt;
        case ($urandom % 3)
          0: begin t = OFPT_HELLO; rt = OFPT_HELLO; end
          1: begin t = OFPT_ECHO_REQ; rt = OFPT_ECHO_REP; end
          default: begin t = OFPT_BARRIER_REQ; rt = OFPT_BARRIER_REP; end
        endcase
        w.push_back(hdr(t, 8, xid));
        r.push_back(hdr(rt, 8, xid));
        send(w); expect_msg(3, r);
      end
      2: begin
        w.push_back(hdr(OFPT_FEAT_REQ, 8, xid));
        r = '{hdr(OFPT_FEAT_REP, 32, xid), DPID, {32'(NBUF), 8'(NT), 24'd0}, {32'h47, 32'd0}};
        send(w); expect_msg(2, r);
      end
      3: begin   // SET_CONFIG then GET_CONFIG
        logic [15:0] f, l;
        f = $urandom % 4; l = $urandom;
        w = '{hdr(OFPT_SET_CONFIG, 12, xid), {f, l, 32'd0}};
        send(w);
        w = '{hdr(OFPT_GCFG_REQ, 8, xid + 1)};
        r = '{hdr(OFPT_GCFG_REP, 12, xid + 1), {f, l, 32'd0}};
        send(w); expect_msg(2, r);
      end
      4, 5, 6: begin   // FLOW_MOD
        flow_mod_t e; logic [7:0] cmd; logic [511:0] k5, m5; logic [127:0] i1;
        cmd = ($urandom % 8 == 0) ? 8'd7 : (($urandom % 3 == 0) ? 8'd4 : 8'd0);
        e = '0;
        e.op = (cmd == 8'd4) ? FM_DELETE_STRICT : FM_ADD;
        e.table_id = $urandom % NT; e.prio = $urandom;
        e.key = rnd_tuple(); e.mask = rnd_tuple();
        e.instr = instr_t'({$urandom, $urandom, $urandom, $urandom});
        k5 = {e.key, 48'd0}; m5 = {e.mask, 48'd0}; i1 = {e.instr, (128 - $bits(instr_t))'(0)};
        w.push_back(hdr(OFPT_FLOW_MOD, 160, xid));
        w.push_back({cmd, e.table_id, e.prio, 32'd0});
        for (int i = 7; i >= 0; i--) w.push_back(k5[64*i +: 64]);
        for (int i = 7; i >= 0; i--) w.push_back(m5[64*i +: 64]);
        w.push_back(i1[127:64]); w.push_back(i1[63:0]);
        if (cmd == 8'd7) begin
          r = '{hdr(OFPT_ERROR, 20, xid), {16'd5, 16'd8, w[0][63:32]}, {w[0][31:0], 32'd0}};
          expect_msg(3, r); n_err++;
        end else begin
          bit ok;
          ok = $urandom % 4 != 0;
          fm_exp.push_back(e); fm_res.push_back(ok);
          if (!ok && e.op == FM_ADD) begin
            r = '{hdr(OFPT_ERROR, 20, xid), {16'd5, 16'd1, w[0][63:32]}, {w[0][31:0], 32'd0}};
            expect_msg(3, r); n_fail++;
          end
          n_flowmod++;
        end
        send(w);
      end
      7: begin   // TABLE_MOD
        flow_mod_t e;
        e = '0; e.op = FM_TABLE_MOD; e.table_id = $urandom % NT; e.tbl_config = $urandom % 2;
        fm_exp.push_back(e); fm_res.push_back(1);
        w = '{hdr(OFPT_TABLE_MOD, 16, xid), {e.table_id, 24'd0, e.tbl_config}};
        send(w);
      end
      8, 9: begin   // PACKET_OUT
        pkt_out_t e; logic [15:0] al;
        e.buffer_id = $urandom % NBUF; e.out_port = $urandom % NP;
        al = ($urandom % 5 == 0) ? 16'd0 : 16'd16;
        e.drop = (al == 0);
        w = '{hdr(OFPT_PACKET_OUT, 40, xid), {e.buffer_id, 32'hFFFF_FFFD}, {al, 48'd0},
              {16'd0, 16'd16, 24'd0, e.out_port}, {16'hFFFF, 48'd0}};
        if (e.drop) e.out_port = e.out_port;   // port is don't-care when dropping
        po_exp.push_back(e);
        send(w); n_po++;
      end
      10, 11: begin   // multipart
        logic [15:0] t;
        case ($urandom % 5)
          0: t = OFPMP_TABLE;
          1: t = OFPMP_PORT;
          2: t = OFPMP_QUEUE;
          3: t = OFPMP_FLOW;
          default: t = 16'd9;
        endcase
        w = '{hdr(OFPT_MP_REQ, 16, xid), {t, 48'd0}};
        if (t == 16'd9) begin
          r = '{hdr(OFPT_ERROR, 20, xid), {16'd1, 16'd2, w[0][63:32]}, {w[0][31:0], 32'd0}};
          expect_msg(3, r); n_err++;
          send(w);
        end else begin
          // the counters stay constant while the reply is built
          n_stats++;
          if (t == OFPMP_TABLE) begin
            r = '{hdr(OFPT_MP_REP, 16 + 24 * NT, xid), {t, 48'd0}};
            for (int i = 0; i < NT; i++) begin r.push_back({8'(i), 24'd0, tbl_active[i]}); r.push_back(tbl_lookups[i]); r.push_back(tbl_matches[i]); end
          end else if (t == OFPMP_PORT) begin
            r = '{hdr(OFPT_MP_REP, 16 + 112 * NP, xid), {t, 48'd0}};
            for (int i = 0; i < NP; i++) begin
              r.push_back({16'd0, 16'(i), 32'd0}); r.push_back(rx_packets[i]); r.push_back(tx_packets[i]);
              r.push_back(rx_bytes[i]); r.push_back(tx_bytes[i]); r.push_back(rx_dropped[i]);
              for (int j = 0; j < 8; j++) r.push_back(64'd0);
            end
          end else if (t == OFPMP_QUEUE) begin
            r = '{hdr(OFPT_MP_REP, 16 + 40 * NP, xid), {t, 48'd0}};
            for (int i = 0; i < NP; i++) begin
              r.push_back({16'd0, 16'(i), 32'd0}); r.push_back(tx_bytes[i]); r.push_back(tx_packets[i]);
              r.push_back(64'd0); r.push_back(64'd0);
            end
          end else begin
            int tot;
            tot = 0;
            for (int t2 = 0; t2 < NT; t2++) tot += tbl_active[t2];
            r = '{hdr(OFPT_MP_REP, 16 + 24 * tot, xid), {t, 48'd0}};
            for (int t2 = 0; t2 < NT; t2++) for (int e = 0; e < D; e++) if (ev[t2][e]) begin
              r.push_back({16'd24, 8'(t2), 8'd0, ed[t2][e]}); r.push_back(ep[t2][e]); r.push_back(eb[t2][e]);
            end
          end
          expect_msg(1, r);
          send(w);
        end
      end
      12: begin   // wrong version
        w = '{hdr(OFPT_ECHO_REQ, 8, xid, 8'h01)};
        r = '{hdr(OFPT_ERROR, 20, xid), {16'd1, 16'd0, w[0][63:32]}, {w[0][31:0], 32'd0}};
        send(w); expect_msg(3, r); n_err++;
      end
      13: begin   // unknown type
        w = '{hdr(8'd25, 16, xid), 64'h1};
        r = '{hdr(OFPT_ERROR, 20, xid), {16'd1, 16'd1, w[0][63:32]}, {w[0][31:0], 32'd0}};
        send(w); expect_msg(3, r); n_err++;
      end
      default: begin   // packet-in request from the datapath
        pkt_in_t p;
        p.buffer_id = $urandom % NBUF; p.total_len = $urandom; p.reason = ($urandom % 2) ? RSN_NO_MATCH : RSN_ACTION;
        p.table_id = $urandom % NT; p.in_port = $urandom % NP;
        r = '{hdr(OFPT_PACKET_IN, 48, 0), {p.buffer_id, p.total_len, (p.reason == RSN_ACTION) ? 8'd1 : 8'd0, p.table_id},
              64'd0, {16'd1, 16'd12, 32'h8000_0004}, {24'd0, p.in_port, 32'd0}, 64'd0};
        expect_msg(0, r); n_pin++;
        @(negedge clk);
        pin = p; pin_valid = 1;
        @(posedge clk);
        while (!pin_ready) @(posedge clk);
        @(negedge clk);
        pin_valid = 0;
      end
    endcase
  endtask

  // datapath command port: accept, compare, answer
  always @(posedge clk) if (rst_n) begin
    fm_done <= 0;
    if (fm_valid && fm_ready) begin
      flow_mod_t e; bit ok;
      e = fm_exp.pop_front(); ok = fm_res.pop_front();
      if (e.op == FM_TABLE_MOD) check(fm.op == e.op && fm.table_id == e.table_id && fm.tbl_config == e.tbl_config, "table-mod command");
      else check(fm.op == e.op && fm.table_id == e.table_id && fm.prio == e.prio && fm.key == e.key &&
                 fm.mask == e.mask && fm.instr == e.instr, "flow-mod command");
      fm_pending <= 3 + $urandom % 20; fm_ans <= ok;
    end
    if (fm_pending == 1) begin fm_done <= 1; fm_ok <= fm_ans; end
    if (fm_pending != 0) fm_pending <= fm_pending - 1;
    if (po_valid && po_ready) begin
      pkt_out_t e;
      e = po_exp.pop_front();
      check(po.buffer_id == e.buffer_id && po.drop == e.drop && (e.drop || po.out_port == e.out_port), "packet-out command");
    end
  end
  int fm_pending = 0; bit fm_ans = 0;
  always @(negedge clk) begin fm_ready = $urandom % 3 != 0; po_ready = $urandom % 3 != 0; end

  // channel output: split into messages and compare per class
  bit hold_out = 0;
  int first_types [$];
  always @(negedge clk) c_out_ready = !hold_out && ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n && c_out_valid && c_out_ready) begin
    rx_msg.push_back(c_out_data);
    if (c_out_last) begin
      int c;
      c = cls_of(rx_msg[0][55:48]);
      first_types.push_back(int'(rx_msg[0][55:48]));
      check(rep_msgs[c] > 0, "reply expected in its class");
      foreach (rx_msg[i]) begin
        check(rep_exp[c].size() != 0 && rx_msg[i] == rep_exp[c][0], "reply word");
        if (rep_exp[c].size() != 0 && rx_msg[i] != rep_exp[c][0]) $display("  class %0d word %0d got %h exp %h", c, i, rx_msg[i], rep_exp[c][0]);
        if (rep_exp[c].size() != 0) void'(rep_exp[c].pop_front());
      end
      check(int'(rx_msg[0][47:32]) <= 8 * rx_msg.size() && int'(rx_msg[0][47:32]) > 8 * (rx_msg.size() - 1), "length field matches the words");
      rep_msgs[c]--; n_rx[c]++;
      rx_msg = {};
    end
  end

  initial begin
    c_in_valid = 0; c_in_data = '0; c_in_last = 0; pin_valid = 0; pin = '0; fm_done = 0; fm_ok = 0;
    for (int c = 0; c < 4; c++) begin rep_msgs[c] = 0; n_rx[c] = 0; end
    for (int t = 0; t < NT; t++) begin
      tbl_active[t] = 0; tbl_lookups[t] = {$urandom, $urandom}; tbl_matches[t] = $urandom;
      for (int e = 0; e < D; e++) begin
        ev[t][e] = $urandom % 3 == 0; ep[t][e] = $urandom; eb[t][e] = {$urandom, $urandom}; ed[t][e] = $urandom % 1000;
        tbl_active[t] += ev[t][e];
      end
    end
    for (int i = 0; i < NP; i++) begin
      rx_packets[i] = $urandom; rx_bytes[i] = {$urandom, $urandom}; rx_dropped[i] = $urandom % 100;
      tx_packets[i] = $urandom; tx_bytes[i] = {$urandom, $urandom};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) one_message();
    repeat (3000) @(negedge clk);
    // directed priority case
    begin
      logic [63:0] r [$];
      pkt_in_t p;
      first_types = {};
      hold_out = 1;
      r = '{hdr(OFPT_MP_REP, 16 + 112 * NP, 32'h77), {OFPMP_PORT, 48'd0}};
      for (int i = 0; i < NP; i++) begin
        r.push_back({16'd0, 16'(i), 32'd0}); r.push_back(rx_packets[i]); r.push_back(tx_packets[i]);
        r.push_back(rx_bytes[i]); r.push_back(tx_bytes[i]); r.push_back(rx_dropped[i]);
        for (int j = 0; j < 8; j++) r.push_back(64'd0);
      end
      expect_msg(1, r);
      send('{hdr(OFPT_MP_REQ, 16, 32'h77), {OFPMP_PORT, 48'd0}});
      repeat (100) @(negedge clk);
      send('{hdr(OFPT_FEAT_REQ, 8, 32'h78)});
      expect_msg(2, '{hdr(OFPT_FEAT_REP, 32, 32'h78), DPID, {32'(NBUF), 8'(NT), 24'd0}, {32'h47, 32'd0}});
      send('{hdr(OFPT_ECHO_REQ, 8, 32'h79)});
      expect_msg(3, '{hdr(OFPT_ECHO_REP, 8, 32'h79)});
      repeat (20) @(negedge clk);
      p = '{buffer_id: 3, total_len: 99, reason: RSN_NO_MATCH, table_id: 1, in_port: 2};
      expect_msg(0, '{hdr(OFPT_PACKET_IN, 48, 0), {32'd3, 16'd99, 8'd0, 8'd1}, 64'd0, {16'd1, 16'd12, 32'h8000_0004}, {24'd0, 8'd2, 32'd0}, 64'd0});
      pin = p; pin_valid = 1;
      @(negedge clk);
      pin_valid = 0;
      repeat (50) @(negedge clk);
      hold_out = 0;
      repeat (500) @(negedge clk);
      check(first_types.size() == 4 && first_types[0] == OFPT_MP_REP && first_types[1] == OFPT_PACKET_IN &&
            first_types[2] == OFPT_FEAT_REP && first_types[3] == OFPT_ECHO_REP, "output priority: packet-in first");
    end
    for (int c = 0; c < 4; c++) check(rep_msgs[c] == 0 && rep_exp[c].size() == 0, "all replies received");
    check(fm_exp.size() == 0 && po_exp.size() == 0, "all commands handed on");
    check(int'(msg_count) == n_sent, "message counter");
    check(n_flowmod > 50 && n_fail > 5 && n_stats > 50 && n_pin > 20 && n_po > 40 && n_err > 40, "coverage");
    $display("replies per class: pin=%0d stats=%0d config=%0d channel=%0d flowmods=%0d fails=%0d errors=%0d",
             n_rx[0], n_rx[1], n_rx[2], n_rx[3], n_flowmod, n_fail, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
