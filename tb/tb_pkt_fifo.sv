// tb_pkt_fifo: self-checking test of pkt_fifo.
//
// Pushes random beats with random gaps while the reader stalls at random,
// and compares every popped beat (data, byte count, start/end marks) with a
// queue model. Also checks the full/empty flags, the beat level and the
// complete-packet count against the model, and that a full FIFO refuses
// writes. A watchdog ends the run with a failure if it hangs.
module tb_pkt_fifo;
  localparam int W = 64, DEPTH = 8, NBW = $clog2(W/8) + 1, LW = $clog2(DEPTH + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_sop, in_eop, out_valid, out_ready, out_sop, out_eop;
  logic [W-1:0] in_data, out_data;
  logic [NBW-1:0] in_nbytes, out_nbytes;
  logic [LW-1:0] level, pkts;

  pkt_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  typedef struct packed { logic [W-1:0] d; logic [NBW-1:0] n; logic s, e; } beat_t;
  beat_t q[$];
  int checks = 0, failures = 0, npk = 0;

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

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0; in_nbytes = '0; in_sop = 0; in_eop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare outputs with the model
      check(out_valid == (q.size() != 0), "out_valid");
      check(in_ready == (q.size() != DEPTH), "in_ready");
      check(int'(level) == q.size(), "level");
      check(int'(pkts) == npk, "pkts");
      if (out_valid && q.size() != 0)
        check({out_data, out_nbytes, out_sop, out_eop} == q[0], "beat");
      in_valid  = ($urandom % 3) != 0;
      out_ready = (cyc < 2000) ? (($urandom % 4) == 0) : (($urandom % 3) != 0);
      in_data   = {$urandom, $urandom};
      in_nbytes = NBW'($urandom % 8 + 1);
      in_sop    = $urandom % 2;
      in_eop    = $urandom % 2;
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update on the clock edge
  always @(posedge clk) if (rst_n) begin
    beat_t b;
    b = '{d: in_data, n: in_nbytes, s: in_sop, e: in_eop};
    if (out_valid && out_ready) begin
      if (q[0].e) npk--;
      void'(q.pop_front());
    end
    if (in_valid && in_ready) begin
      q.push_back(b);
      if (in_eop) npk++;
    end
  end
endmodule
