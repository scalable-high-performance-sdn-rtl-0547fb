// tb_action_execution: self-checking test of action_execution.
//
// Small instance: 64-bit beats, 4 ports, 4 packet buffers, packets of 1 to
// 64 bytes. A stream of packets arrives with one flow-match result each:
// drop, no output, send to controller, or output to a port (sometimes a
// port number past the last port, which must be discarded). The test acts
// as the OpenFlow agent: it takes packet-in requests at random times and
// answers each buffered packet later with a packet-out to a random port or
// with no output. Output queues stall at random. Checks:
//   - every forwarded and every replayed packet leaves on the right port
//     byte for byte, and nothing else leaves;
//   - each controller-bound packet gives one packet-in with a free buffer
//     id, its length, reason, table and port; when the buffers are full it
//     is dropped instead and counted in drop_full;
//   - buf_full is set when all buffers hold packets and clear when none do;
//   - credit_return pulses once per result;
//   - the forward, drop, controller and packet-out counters.
// The design samples the test's inputs at the clock edge; the test decides
// mid-cycle and changes its queues just after the edge.
module tb_action_execution;
  import sdn_pkg::*;
  localparam int DW = 64, B = 8, NP = 4, NB = 4, MP = 64, NBW = $clog2(B) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pb_valid, pb_ready, pb_sop, pb_eop, res_valid, res_ready, credit_return, buf_full;
  logic [DW-1:0] pb_data;
  logic [NBW-1:0] pb_nbytes;
  fmu_result_t res;
  logic pin_valid, pin_ready, po_valid, po_ready;
  pkt_in_t pin;
  pkt_out_t po;
  logic oq_valid [NP], oq_ready [NP], oq_sop [NP], oq_eop [NP];
  logic [DW-1:0] oq_data [NP];
  logic [NBW-1:0] oq_nbytes [NP];
  logic [63:0] cnt_fwd, cnt_drop, cnt_to_ctrl, cnt_pkt_out, drop_full;

  action_execution #(.DATA_W(DW), .N_PORTS(NP), .N_BUF(NB), .MAX_PKT(MP)) dut (.*);

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

  // packets are numbered; byte i of packet n is pbyte(n, i), its length plen[n]
  typedef struct packed { logic [DW-1:0] d; logic [NBW-1:0] n; logic s, e; } w_t;
  w_t          pbq [$];
  fmu_result_t rq [$];
  int          rid [$];           // packet number, in result order
  int          plen [int];
  int          exp_port [$], exp_id [$];   // packets expected at the outputs
  int          stored [NB];       // buffer id -> packet number, -1 free
  int          pend_store [$];
  pkt_in_t     pin_exp [$];
  int          pin_ids [$];       // buffer ids announced, waiting for a packet-out
  longint m_fwd = 0, m_drop = 0, m_ctrl = 0, m_po = 0, m_full = 0;
  int     n_credits = 0, n_results = 0, n_replay = 0, n_badport = 0, n_po_drop = 0, n_full_seen = 0;

  function automatic logic [7:0] pbyte(int n, int i);
    return 8'((n * 7919) ^ (i * 104729) ^ (n >> 3) ^ (i << 4) ^ (n * i));
  endfunction

  int next_id = 0;
  task automatic add_packet();
    fmu_result_t r; int len, nb, k, p;
    len = 1 + $urandom % MP;
    p = next_id++;
    plen[p] = len;
    nb = (len + B - 1) / B;
    for (int b = 0; b < nb; b++) begin
      w_t w;
      w.d = '0;
      for (int i = 0; i < B && b*B + i < len; i++) w.d[8*i +: 8] = pbyte(p, b*B + i);
      w.n = NBW'((b == nb - 1) ? len - b*B : B); w.s = (b == 0); w.e = (b == nb - 1);
      pbq.push_back(w);
    end
    r = '0;
    r.meta.pkt_len = 16'(len); r.meta.in_port = $urandom % NP; r.table_id = $urandom % 2;
    k = $urandom % 10;
    if (k == 0) r.aset.drop = 1;
    else if (k == 1) ;                                   // no output
    else if (k < 5) begin r.aset.to_ctrl = 1; r.reason = ($urandom % 2) ? RSN_NO_MATCH : RSN_ACTION; end
    else begin r.aset.out_en = 1; r.aset.out_port = ($urandom % 12 == 0) ? 8'(NP + $urandom % 4) : 8'($urandom % NP); end
    rq.push_back(r);
    rid.push_back(p);
  endtask

  always_comb begin
    pb_valid  = pbq.size() != 0;
    pb_data   = pb_valid ? pbq[0].d : '0;
    pb_nbytes = pb_valid ? pbq[0].n : '0;
    pb_sop    = pb_valid ? pbq[0].s : 1'b0;
    pb_eop    = pb_valid ? pbq[0].e : 1'b0;
    res_valid = rq.size() != 0;
    res       = res_valid ? rq[0] : '0;
  end

  // mid-cycle decisions
  bit pop_pb = 0, pop_res = 0, pop_po = 0;
  int rx_n [NP];
  int n_stored = 0;
  always @(negedge clk) if (rst_n) begin
    // results taken at the coming edge
    if (res_valid && res_ready) begin
      fmu_result_t r; int p;
      r = rq[0]; p = rid.pop_front();
      pop_res = 1;
      n_results++;
      if (r.aset.drop || (!r.aset.to_ctrl && !r.aset.out_en)) m_drop++;
      else if (r.aset.to_ctrl) begin
        if (buf_full) begin m_full++; m_drop++; n_full_seen++; end
        else begin
          m_ctrl++;
          pin_exp.push_back('{buffer_id: 0, total_len: r.meta.pkt_len, reason: r.reason, table_id: r.table_id, in_port: r.meta.in_port});
          pend_store.push_back(p);
        end
      end else begin
        m_fwd++;
        if (int'(r.aset.out_port) < NP) begin exp_port.push_back(int'(r.aset.out_port)); exp_id.push_back(p); end
        else n_badport++;
      end
    end
    if (pb_valid && pb_ready) pop_pb = 1;
    // packet-in requests
    if (pin_valid && pin_ready) begin
      pkt_in_t e;
      e = pin_exp.pop_front();
      e.buffer_id = pin.buffer_id;
      check(pin == e, "packet-in contents");
      check(int'(pin.buffer_id) < NB && stored[pin.buffer_id[1:0]] < 0, "free buffer id");
      stored[pin.buffer_id[1:0]] = pend_store.pop_front();
      n_stored++;
      pin_ids.push_back(int'(pin.buffer_id));
    end
    // packet-outs
    if (po_valid && po_ready) begin
      pop_po = 1;
      m_po++;
      if (int'(po.buffer_id) < NB && stored[po.buffer_id[1:0]] >= 0) begin
        if (!po.drop) begin exp_port.push_back(int'(po.out_port)); exp_id.push_back(stored[po.buffer_id[1:0]]); n_replay++; end
        else n_po_drop++;
        stored[po.buffer_id[1:0]] = -1;
        n_stored--;
      end
    end
    // output queues
    for (int p = 0; p < NP; p++) if (oq_valid[p] && oq_ready[p]) begin
      check(oq_sop[p] == (rx_n[p] == 0), "sop mark");
      for (int i = 0; i < int'(oq_nbytes[p]); i++) if (rx_n[p] + i < 2*MP) rxb[p][rx_n[p] + i] = oq_data[p][8*i +: 8];
      rx_n[p] += int'(oq_nbytes[p]);
      if (oq_eop[p]) begin
        // find the packet among those expected on this port
        int f;
        f = -1;
        for (int i = 0; i < exp_id.size() && f < 0; i++) if (exp_port[i] == p && plen[exp_id[i]] == rx_n[p]) begin
          bit same;
          same = 1;
          for (int j = 0; j < rx_n[p]; j++) if (rxb[p][j] != pbyte(exp_id[i], j)) same = 0;
          if (same) f = i;
        end
        check(f >= 0, "output packet expected on this port");
        if (f >= 0) begin exp_port.delete(f); exp_id.delete(f); end
        rx_n[p] = 0;
      end
    end
    if (credit_return) n_credits++;
    // buffer state
    if (n_stored == NB) check(buf_full, "buf_full when all buffers hold packets");
    if (n_stored == 0 && pend_store.size() == 0 && !po_valid && !po_in_flight()) check(!buf_full, "buf_full clear when empty");
  end
  logic [7:0] rxb [NP][2*MP];
  // a replay still streaming keeps its buffer until the last beat
  function automatic bit po_in_flight();
    for (int i = 0; i < exp_id.size(); i++) if (exp_id[i] >= 0) return 1;
    return 0;
  endfunction

  always @(posedge clk) begin
    #1;
    if (pop_pb) begin void'(pbq.pop_front()); pop_pb = 0; end
    if (pop_res) begin void'(rq.pop_front()); pop_res = 0; end
    if (pop_po) begin po_valid = 0; pop_po = 0; end
  end

  initial begin
    po_valid = 0; po = '0; pin_ready = 0;
    for (int i = 0; i < NB; i++) stored[i] = -1;
    for (int p = 0; p < NP; p++) rx_n[p] = 0;
    for (int p = 0; p < NP; p++) oq_ready[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 40000; cyc++) begin
      @(posedge clk); #2;
      if (pbq.size() < 40 && $urandom % 3 == 0) add_packet();
      pin_ready = $urandom % 3 != 0;
      for (int p = 0; p < NP; p++) oq_ready[p] = $urandom % 4 != 0;
      if (!po_valid && pin_ids.size() != 0 && $urandom % ((cyc % 8000 < 4000) ? 40 : 3) == 0) begin
        int i, id;
        i = $urandom % pin_ids.size();
        id = pin_ids[i];
        pin_ids.delete(i);
        po.buffer_id = 32'(id); po.drop = $urandom % 5 == 0; po.out_port = $urandom % NP;
        po_valid = 1;
      end else if (!po_valid && $urandom % 500 == 0) begin
        po.buffer_id = 32'(NB + 3); po.drop = 0; po.out_port = 0; po_valid = 1;   // unknown buffer
      end
    end
    // drain: answer every buffered packet
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(posedge clk); #2;
      pin_ready = 1;
      for (int p = 0; p < NP; p++) oq_ready[p] = 1;
      if (!po_valid && pin_ids.size() != 0) begin
        po.buffer_id = 32'(pin_ids.pop_front()); po.drop = 0; po.out_port = 1; po_valid = 1;
      end
    end
    check(exp_id.size() == 0, "every expected packet left");
    check(pbq.size() == 0 && rq.size() == 0 && n_stored == 0, "all consumed");
    check(n_credits == n_results, "one credit per result");
    check(cnt_fwd == m_fwd && cnt_drop == m_drop && cnt_to_ctrl == m_ctrl && cnt_pkt_out == m_po && drop_full == m_full, "counters");
    check(n_full_seen > 50 && n_replay > 100 && n_badport > 20 && n_po_drop > 20 && m_fwd > 500, "coverage");
    $display("results=%0d fwd=%0d ctrl=%0d full=%0d replay=%0d po_drop=%0d badport=%0d", n_results, m_fwd, m_ctrl, m_full, n_replay, n_po_drop, n_badport);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
