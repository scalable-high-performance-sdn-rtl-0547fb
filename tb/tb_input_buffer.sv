// tb_input_buffer: self-checking test of input_buffer.
//
// A writer sends random packets (1 to 8 beats, random last-beat byte count,
// random gaps, no back-pressure, as a MAC does) while a reader pulls beats
// at a random rate that is slow in the first half, so that the buffer fills
// and whole packets must be dropped. A cycle-level model decides, at each
// first beat, whether a maximum-size packet fits (the buffer's rule), keeps
// the expected beat queue, the number of complete packets and the counters,
// and every cycle the test compares level, pkt_avail, head_len, the output
// beat and the rx_packets / rx_bytes / rx_dropped counters with it. The
// test also requires that drops did happen. A watchdog ends a hung run.
module tb_input_buffer;
  localparam int W = 64, DEPTH = 16, MAX_PKT = 64, NBW = $clog2(W/8) + 1, LW = $clog2(DEPTH + 1);
  localparam int MAX_BEATS = MAX_PKT / (W/8);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rx_valid, rx_sop, rx_eop, out_valid, out_ready, out_sop, out_eop, pkt_avail;
  logic [W-1:0] rx_data, out_data;
  logic [NBW-1:0] rx_nbytes, out_nbytes;
  logic [15:0] head_len;
  logic [LW-1:0] level;
  logic [63:0] rx_packets, rx_bytes, rx_dropped;

  input_buffer #(.DATA_W(W), .DEPTH(DEPTH), .MAX_PKT(MAX_PKT)) dut (.*);

  typedef struct packed { logic [W-1:0] d; logic [NBW-1:0] n; logic s, e; } beat_t;
  beat_t q[$];
  int lens[$];
  int checks = 0, failures = 0;
  longint m_pk = 0, m_by = 0, m_dr = 0;
  bit acc = 0;
  int cur_len = 0;

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

  // writer: random packets with gaps
  int cyc = 0;
  initial begin
    rx_valid = 0; rx_data = '0; rx_nbytes = '0; rx_sop = 0; rx_eop = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (cyc < 6000) begin
      int nb;
      nb = $urandom % MAX_BEATS + 1;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        rx_valid  = 1;
        rx_data   = {$urandom, $urandom};
        rx_sop    = (b == 0);
        rx_eop    = (b == nb - 1);
        rx_nbytes = rx_eop ? NBW'($urandom % 8 + 1) : NBW'(8);
      end
      @(negedge clk);
      rx_valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
    @(negedge clk);
    rx_valid = 0;
    out_ready = 1;
    repeat (200) @(negedge clk);
    check(q.size() == 0 && level == 0, "drained");
    check(m_dr > 0, "drops happened");
    check(m_pk > 100, "packets accepted");
    $display("accepted=%0d dropped=%0d", m_pk, m_dr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader and per-cycle comparison
  always @(negedge clk) if (rst_n) begin
    cyc++;
    check(int'(level) == q.size(), "level");
    check(pkt_avail == (lens.size() != 0), "pkt_avail");
    if (lens.size() != 0) check(int'(head_len) == lens[0], "head_len");
    check(out_valid == (q.size() != 0), "out_valid");
    if (out_valid && q.size() != 0)
      check({out_data, out_nbytes, out_sop, out_eop} == q[0], "beat");
    check(rx_packets == m_pk && rx_bytes == m_by && rx_dropped == m_dr, "counters");
    if (cyc < 6000) out_ready = (cyc < 3000) ? (($urandom % 5) == 0) : (($urandom % 3) != 0);
  end

  // model
  always @(posedge clk) if (rst_n) begin
    int lvl_before;
    lvl_before = q.size();
    if (out_valid && out_ready) begin
      if (q[0].e) void'(lens.pop_front());
      void'(q.pop_front());
    end
    if (rx_valid) begin
      if (rx_sop) begin
        acc = (DEPTH - lvl_before) >= MAX_BEATS;
        if (!acc) m_dr++;
        cur_len = 0;
      end
      cur_len += int'(rx_nbytes);
      if (acc) begin
        q.push_back('{d: rx_data, n: rx_nbytes, s: rx_sop, e: rx_eop});
        if (rx_eop) begin lens.push_back(cur_len); m_pk++; m_by += cur_len; end
      end
    end
  end
endmodule
