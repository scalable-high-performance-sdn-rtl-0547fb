// tb_of_out_arbiter: self-checking test of of_out_arbiter.
//
// Four sources hold queues of random messages (1 to 6 words, first word
// tagged with source and sequence number). A source raises its request when
// it holds a complete message. The test checks that every message leaves
// whole and in order per source, that messages never interleave, that at
// each new grant the lowest-numbered requesting source wins (packet-in
// first, as in the paper), and that a granted message moves one word per
// cycle while the output is ready. Output stalls are random.
module tb_of_out_arbiter;
  localparam int N = 4, W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid [N], in_ready [N], in_sop [N], in_eop [N], in_req [N];
  logic [W-1:0] in_data [N];
  logic out_valid, out_ready, out_sop, out_eop;
  logic [W-1:0] out_data;
  logic [1:0] grant;

  of_out_arbiter #(.N_IN(N), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct packed { logic [W-1:0] d; logic s, e; } w_t;
  w_t src [N][$];          // words waiting at each source
  int nmsg [N];            // complete messages waiting
  int seq_tx [N], seq_rx [N];
  int delivered = 0, contested = 0;

  task automatic add_msg(int s);
    int len;
    len = $urandom % 6 + 1;
    for (int i = 0; i < len; i++)
      src[s].push_back('{d: (i == 0) ? {8'(s), 24'(seq_tx[s]), 32'hC0DE} : {$urandom, $urandom}, s: (i == 0), e: (i == len - 1)});
    seq_tx[s]++;
    nmsg[s]++;
  endtask

  always_comb for (int i = 0; i < N; i++) begin
    in_valid[i] = src[i].size() != 0;
    in_data[i]  = in_valid[i] ? src[i][0].d : '0;
    in_sop[i]   = in_valid[i] ? src[i][0].s : 1'b0;
    in_eop[i]   = in_valid[i] ? src[i][0].e : 1'b0;
    in_req[i]   = nmsg[i] != 0;
  end

  int cur = -1;
  logic [W-1:0] exp_words [$];
  initial begin
    for (int i = 0; i < N; i++) begin nmsg[i] = 0; seq_tx[i] = 0; seq_rx[i] = 0; end
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) if ($urandom % 12 == 0 && nmsg[i] < 4) add_msg(i);
      out_ready = $urandom % 4 != 0;
    end
    for (int i = 0; i < 300; i++) begin @(negedge clk); out_ready = 1; end
    for (int i = 0; i < N; i++) check(src[i].size() == 0 && seq_rx[i] == seq_tx[i], "all delivered");
    check(delivered > 1000 && contested > 200, "coverage");
    $display("messages=%0d contested grants=%0d", delivered, contested);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic busy_q = 0;
  always @(posedge clk) if (rst_n) begin
    // grant decision: the arbiter's busy flag rises with the lowest requester
    if (!dut.busy) begin
      int lo, nreq;
      lo = -1; nreq = 0;
      for (int i = N - 1; i >= 0; i--) if (in_req[i]) begin lo = i; nreq++; end
      if (lo >= 0) begin cur = lo; if (nreq > 1) contested++; end
    end else begin
      check(!(cur >= 0) || int'(grant) == cur, "grant is the lowest requester");
      check(out_valid == in_valid[cur], "word moves when present");
      if (out_valid && out_ready) begin
        w_t w;
        w = src[cur][0];
        check(out_data == w.d && out_sop == w.s && out_eop == w.e, "word content");
        if (w.s) begin
          check(int'(out_data[63:56]) == cur && int'(out_data[55:32]) == seq_rx[cur], "message order");
          seq_rx[cur]++;
        end
        void'(src[cur].pop_front());
        if (w.e) begin nmsg[cur]--; delivered++; end
      end
    end
    for (int i = 0; i < N; i++) if (i != cur || !dut.busy) check(!in_ready[i], "only the granted source is read");
  end
endmodule
