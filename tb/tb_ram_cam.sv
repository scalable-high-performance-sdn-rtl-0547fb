// tb_ram_cam: self-checking test of ram_cam, binary and ternary.
//
// Two small instances run side by side from the same stimulus: an exact-match
// CAM (4-bit chunks) and a TCAM (3-bit chunks), 16 entries of 24-bit keys.
// A model holds each entry's key, mask and valid bit. The test writes and
// erases random entries and issues a lookup almost every cycle, often with a
// key derived from a stored entry (wildcard bits changed at random in the
// ternary case), and compares the match vector with the model. The entry
// being rewritten is excluded from the comparison while its walk is in
// flight and must read as no-match. Timing checked against the paper's RAM
// CAM: a lookup answers two cycles after it is issued, every cycle, and
// writing an entry takes exactly 2^CHUNK_W cycles (wr_done).
module tb_ram_cam;
  localparam int KW = 24, D = 16, SW = $clog2(D);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lk_valid, wr_start, wr_set;
  logic [KW-1:0] lk_key, wr_key, wr_mask;
  logic [SW-1:0] wr_slot;
  logic mv [2], busy [2], done [2];
  logic [D-1:0] vec [2], ev [2];

  ram_cam #(.KEY_W(KW), .DEPTH(D), .CHUNK_W(4), .TERNARY(1'b0)) u_cam (
    .clk, .rst_n, .lk_valid, .lk_key, .match_valid(mv[0]), .match_vec(vec[0]),
    .wr_start, .wr_slot, .wr_key, .wr_mask, .wr_set, .wr_busy(busy[0]), .wr_done(done[0]), .entry_valid(ev[0]));
  ram_cam #(.KEY_W(KW), .DEPTH(D), .CHUNK_W(3), .TERNARY(1'b1)) u_tcam (
    .clk, .rst_n, .lk_valid, .lk_key, .match_valid(mv[1]), .match_vec(vec[1]),
    .wr_start, .wr_slot, .wr_key, .wr_mask, .wr_set, .wr_busy(busy[1]), .wr_done(done[1]), .entry_valid(ev[1]));

  int checks = 0, failures = 0, hits = 0, multi = 0;
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

  logic [KW-1:0] mkey [D], mmask [D];
  logic          mval [D];
  int            hold [D];   // cycles the slot is excluded from comparison

  function automatic logic [D-1:0] expect_vec(logic [KW-1:0] k, bit tern);
    logic [D-1:0] r;
    for (int e = 0; e < D; e++)
      r[e] = mval[e] && (tern ? ((k & mmask[e]) == (mkey[e] & mmask[e])) : (k == mkey[e]));
    return r;
  endfunction

  // lookups in flight: key and the exclusion mask at issue time
  logic [KW-1:0] pk [$];
  logic [D-1:0]  px [$];
  int start_cyc = -1, cyc = 0, nwrites = 0;

  initial begin
    lk_valid = 0; lk_key = '0; wr_start = 0; wr_set = 0; wr_key = '0; wr_mask = '0; wr_slot = '0;
    for (int e = 0; e < D; e++) begin mval[e] = 0; mkey[e] = '0; mmask[e] = '0; hold[e] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      cyc++;
      // a new write when both instances are free
      wr_start = 0;
      if (!busy[0] && !busy[1] && ($urandom % 8 == 0)) begin
        int s;
        s = $urandom % D;
        wr_start = 1; wr_slot = SW'(s);
        wr_set = ($urandom % 5) != 0;
        wr_key = ($urandom % 2) ? KW'($urandom) : KW'($urandom % 8);
        wr_mask = KW'($urandom) | KW'($urandom);
        if ($urandom % 3 == 0) wr_mask = '1;
        hold[s] = 100000;
        start_cyc = cyc;
        nwrites++;
      end
      // lookup key: random, or near a stored entry
      lk_valid = ($urandom % 8) != 0;
      begin
        int e;
        e = $urandom % D;
        if ($urandom % 4 == 0) lk_key = KW'($urandom);
        else if ($urandom % 2) lk_key = mkey[e];
        else lk_key = (mkey[e] & mmask[e]) | (KW'($urandom) & ~mmask[e]);
      end
      if (lk_valid) begin
        logic [D-1:0] x;
        for (int e = 0; e < D; e++) x[e] = (hold[e] != 0) || (wr_start && wr_slot == SW'(e));
        pk.push_back(lk_key); px.push_back(x);
      end
    end
    @(negedge clk);
    lk_valid = 0;
    repeat (40) @(negedge clk);
    check(pk.size() == 0, "all lookups answered");
    check(hits > 1000 && multi > 50 && nwrites > 500, "coverage");
    $display("writes=%0d hits=%0d multi=%0d", nwrites, hits, multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write completion: timing and model update
  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < D; e++) if (hold[e] > 0 && hold[e] < 100000) hold[e]--;
  end
  int wstart0 = -1, wstart1 = -1;
  always @(posedge clk) if (rst_n) begin
    if (wr_start && !busy[0]) begin wstart0 = cyc; wstart1 = cyc; end
  end
  always @(negedge clk) if (rst_n) begin
    if (done[1] && wstart1 >= 0) begin check(cyc - wstart1 == 8 + 1, "TCAM write takes 2^3 cycles"); wstart1 = -1; end
    if (done[0] && wstart0 >= 0) begin
      check(cyc - wstart0 == 16 + 1, "CAM write takes 2^4 cycles");
      wstart0 = -1;
      mval[wr_slot_q] = wr_set_q; mkey[wr_slot_q] = wr_key_q; mmask[wr_slot_q] = wr_mask_q;
      hold[wr_slot_q] = 3;
    end
  end
  logic [SW-1:0] wr_slot_q; logic wr_set_q; logic [KW-1:0] wr_key_q, wr_mask_q;
  always @(posedge clk) if (wr_start && !busy[0]) begin
    wr_slot_q <= wr_slot; wr_set_q <= wr_set; wr_key_q <= wr_key; wr_mask_q <= wr_mask;
  end

  // lookup answers, two cycles after issue
  logic lk_d1, lk_d2;
  always @(posedge clk) begin lk_d1 <= rst_n && lk_valid; lk_d2 <= lk_d1; end
  always @(negedge clk) if (rst_n) begin
    check(mv[0] == lk_d2 && mv[1] == lk_d2, "two-cycle lookup latency");
    if (mv[0] && pk.size() != 0) begin
      logic [KW-1:0] k; logic [D-1:0] x, e0, e1;
      k = pk.pop_front(); x = px.pop_front();
      e0 = expect_vec(k, 0); e1 = expect_vec(k, 1);
      check((vec[0] & ~x) == (e0 & ~x), "CAM match vector");
      check((vec[1] & ~x) == (e1 & ~x), "TCAM match vector");
      if ((e1 & ~x) != 0) hits++;
      if ($countones(e1 & ~x) > 1) multi++;
    end
  end
  // an entry being rewritten never matches
  always @(negedge clk) if (rst_n) begin
    if (busy[0] && !done[0]) check(!ev[0][wr_slot_q], "entry disabled during its walk");
  end
endmodule
