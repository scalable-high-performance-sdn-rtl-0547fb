// tb_input_arbiter: self-checking test of input_arbiter.
//
// Four behavioural input buffers (queues of complete packets with their
// fill level) feed a small arbiter: 64-bit beats, 32-byte header copy,
// buffer depth 16, four credits. Packets arrive at random, more often on
// ports 0 and 1 so that they become congested. The test checks:
//   - each grant goes to the port the rule predicts: ports with a half-full
//     buffer first, round-robin from the port after the last one served,
//     and grant_congested tells which class won;
//   - every packet reaches the packet buffer whole, in order, unmixed;
//   - one header pulse per packet, one cycle after the beat that completes
//     the header (or after the last beat of a short packet), with the first
//     32 bytes (zero past the end), the input port and the length;
//   - no more than four packets are ever waiting for a credit return, and
//     returned credits let the arbiter continue.
module tb_input_arbiter;
  localparam int N = 4, DW = 64, B = DW/8, HB = 32, BD = 16, LW = 5, CR = 4, NBW = $clog2(B) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid [N], in_ready [N], in_sop [N], in_eop [N], pkt_avail [N];
  logic [DW-1:0] in_data [N];
  logic [NBW-1:0] in_nbytes [N];
  logic [15:0] head_len [N];
  logic [LW-1:0] level [N];
  logic pb_valid, pb_ready, pb_sop, pb_eop, hdr_valid, credit_return, grant_congested;
  logic [DW-1:0] pb_data;
  logic [NBW-1:0] pb_nbytes;
  logic [HB*8-1:0] hdr_data;
  logic [7:0] hdr_port;
  logic [15:0] hdr_len;

  input_arbiter #(.N_PORTS(N), .DATA_W(DW), .HDR_BYTES(HB), .LW(LW), .BUF_DEPTH(BD), .CREDITS(CR)) dut (.*);

  int checks = 0, failures = 0;
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

  typedef struct packed { logic [DW-1:0] d; logic [NBW-1:0] n; logic s, e; } w_t;
  w_t q [N][$];
  int lens [N][$];

  always_comb for (int i = 0; i < N; i++) begin
    in_valid[i]  = q[i].size() != 0;
    in_data[i]   = in_valid[i] ? q[i][0].d : '0;
    in_nbytes[i] = in_valid[i] ? q[i][0].n : '0;
    in_sop[i]    = in_valid[i] ? q[i][0].s : 1'b0;
    in_eop[i]    = in_valid[i] ? q[i][0].e : 1'b0;
    pkt_avail[i] = lens[i].size() != 0;
    head_len[i]  = pkt_avail[i] ? 16'(lens[i][0]) : 16'd0;
    level[i]     = LW'(q[i].size());
  end

  task automatic add_pkt(int p);
    int len, nb;
    len = 1 + $urandom % 60;
    nb = (len + B - 1) / B;
    if (q[p].size() + nb > BD) return;
    for (int b = 0; b < nb; b++)
      q[p].push_back('{d: {$urandom, $urandom}, n: NBW'((b == nb - 1) ? len - b*B : B), s: (b == 0), e: (b == nb - 1)});
    lens[p].push_back(len);
  endtask

  int outstanding = 0, ret_pending = 0, pkts = 0, cong_grants = 0, credit_stalls = 0;
  int cur = -1, last = N - 1, hbeat = 0, bcount = 0, hdr_due = -1, cyc = 0;
  logic [HB*8-1:0] hexp;
  int hlen;

  initial begin
    pb_ready = 0; credit_return = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (30000) begin
      @(posedge clk); #2;
      for (int p = 0; p < N; p++) if ($urandom % ((p < 2 && cyc < 15000) ? 6 : 30) == 0) add_pkt(p);
      pb_ready = $urandom % 5 != 0;
      credit_return = 0;
      if (ret_pending > 0 && $urandom % ((cyc < 15000) ? 7 : 2) == 0) begin credit_return = 1; ret_pending--; end
    end
    for (int i = 0; i < 2000; i++) begin
      @(posedge clk); #2;
      pb_ready = 1; credit_return = 0;
      if (ret_pending > 0) begin credit_return = 1; ret_pending--; end
    end
    for (int p = 0; p < N; p++) check(q[p].size() == 0, "all packets moved");
    check(pkts > 1000 && cong_grants > 100 && pkts - cong_grants > 100 && credit_stalls > 100, "coverage");
    $display("packets=%0d congested grants=%0d credit stalls=%0d", pkts, cong_grants, credit_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the model runs mid-cycle, on the values the design samples at the next edge
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (hdr_due == cyc) begin
      check(hdr_valid, "header pulse timing");
    end else check(!hdr_valid, "one header pulse per packet");
    if (hdr_valid) begin
      check(hdr_data == hexp && int'(hdr_port) == cur_h && int'(hdr_len) == hlen, "header content");
    end
    if (!dut.busy) begin
      // the grant rule
      int pick, pc;
      pick = -1; pc = 0;
      for (int cls = 1; cls >= 0 && pick < 0; cls--)
        for (int k = 1; k <= N && pick < 0; k++) begin
          int p;
          p = (last + k) % N;
          if (lens[p].size() != 0 && (cls == 0 || q[p].size() >= BD/2)) begin pick = p; pc = cls; end
        end
      if (pick >= 0 && outstanding >= CR) credit_stalls++;
      if (pick >= 0 && outstanding < CR) begin
        cur = pick; last = pick; outstanding++; ret_pending++; pkts++;
        if (pc == 1) cong_grants++;
        expect_grant = pick; expect_cong = pc;
        hbeat = 0; hexp = '0; hlen = lens[pick][0]; bcount = 0;
      end
      check(outstanding <= CR, "credit limit");
    end else begin
      check(expect_grant < 0 || grant_congested == expect_cong, "grant class");
      expect_grant = -1;
      if (int'(dut.cur) != cur) $display("dut.cur=%0d model=%0d last=%0d lens=%0d %0d %0d %0d lvl=%0d %0d %0d %0d cred=%0d out=%0d", dut.cur, cur, last, lens[0].size(), lens[1].size(), lens[2].size(), lens[3].size(), q[0].size(), q[1].size(), q[2].size(), q[3].size(), dut.credits, outstanding);
      check(int'(dut.cur) == cur, "granted port");
      check(pb_valid == in_valid[cur], "beat offered");
      if (pb_valid && pb_ready) begin
        w_t w;
        w = q[cur][0];
        check(pb_data == w.d && pb_nbytes == w.n && pb_sop == w.s && pb_eop == w.e, "beat content");
        for (int i = 0; i < B; i++) if (bcount*B + i < HB && i < int'(w.n)) hexp[8*(bcount*B + i) +: 8] = w.d[8*i +: 8];
        bcount++;
        if (bcount == HB/B || (w.e && bcount < HB/B)) begin hdr_due = cyc + 1; cur_h = cur; end
        pop_p = cur; pop_e = w.e;
      end
    end
    if (credit_return) outstanding--;
  end
  int expect_grant = -1, expect_cong = 0, cur_h = 0;
  // queue updates are applied after the clock edge, so that the design sees
  // the pre-edge inputs at the edge
  int pop_p = -1; bit pop_e = 0;
  always @(posedge clk) begin
    #1;
    if (pop_p >= 0) begin
      void'(q[pop_p].pop_front());
      if (pop_e) void'(lens[pop_p].pop_front());
      pop_p = -1;
    end
  end
endmodule
