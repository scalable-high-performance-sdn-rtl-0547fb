// tb_sdn_switch: end-to-end test of the whole switch at its full size.
//
// The switch is instantiated with its default parameters (512-bit datapath,
// 8 ports, two 1K-entry flow tables). The bench plays the controller on the
// 64-bit channel and the MACs on the ports, so every flow entry, packet-in
// and packet-out goes through the OpenFlow agent exactly as in a system:
//   table 0 (TCAM): A  IPv4 to 10.0.0.0/24 -> output 3, dec TTL, goto table 1
//                   C  IPv4/UDP to port 666 -> controller (reason action)
//                   V  IPv6 -> push VLAN 100, output 1
//                   miss -> controller (TABLE_MOD)
//   table 1 (CAM):  four exact 5-tuple flows -> set Ethernet dst, output 5
//                   miss -> drop
// Packet classes: F (flow of table 1, modified, goto), G (TCAM hit, CAM miss,
// dropped), C and M (controller; the bench answers each packet-in with a
// packet-out to port 2 if the length is even, otherwise with a drop), V
// (IPv6, VLAN pushed), X (IPv4 with IHL 4, malicious, dropped).
// Every packet carries its id in its last four bytes. A monitor on each port
// rebuilds the expected bytes from the id and compares them; anything that
// should have been dropped and shows up is a failure.
//
// Phases: mixed traffic at about half load; an output stall (port 5 not
// ready); a hold phase in which the controller withholds packet-outs until
// the internal buffers fill and further controller-bound packets are dropped;
// a burst with all ports at full rate that overflows the input buffers and
// measures the arbiter's rate; a strict delete of one flow. Finally table,
// port and flow statistics are read over the channel and compared.
//
// Rate check (paper: 512-bit datapath at 160 MHz forwards 80 Gbps, Fig. 8):
// with every input backlogged the arbiter moves at least 0.95 beats per
// cycle; for 1536-byte packets this design moves 24 beats in 25 cycles.
//
// Every mechanism is counted (overflow drop, congested grant, output stall,
// packet-buffer back-pressure, TCAM hit, CAM hit, goto, miss to controller,
// action to controller, packet-out forward and drop, TTL, VLAN push,
// malicious drop, miss drop, buffer-full drop, channel back-pressure, each
// statistics kind, flow delete); one that never happened is a failure.
module tb_sdn_switch;
  import sdn_pkg::*;
  localparam int DW = 512, NP = 8, NT = 2, BYTES = DW / 8, NBW = $clog2(BYTES) + 1;
  localparam int MAXID = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              rx_valid  [NP];
  logic [DW-1:0]     rx_data   [NP];
  logic [NBW-1:0]    rx_nbytes [NP];
  logic              rx_sop    [NP];
  logic              rx_eop    [NP];
  logic              tx_valid  [NP];
  logic              tx_ready  [NP];
  logic [DW-1:0]     tx_data   [NP];
  logic [NBW-1:0]    tx_nbytes [NP];
  logic              tx_sop    [NP];
  logic              tx_eop    [NP];
  logic              c_in_valid = 0, c_in_ready, c_in_last = 0;
  logic [63:0]       c_in_data = 0;
  logic              c_out_valid, c_out_ready = 1, c_out_last;
  logic [63:0]       c_out_data;
  logic [63:0]       cnt_fwd, cnt_drop, cnt_to_ctrl, cnt_pkt_out, cnt_drop_full, cnt_drop_late,
                     cnt_congested_grants;

  sdn_switch dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 40) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- packets ----------------
  typedef byte unsigned bytes_t[$];
  localparam int CF = 0, CG = 1, CC = 2, CM = 3, CV = 4, CX = 5;
  int  p_cls [MAXID], p_flow [MAXID], p_port [MAXID], p_len [MAXID];
  bit  p_seen [MAXID], p_deleted [MAXID];
  int  n_ids = 0;

  function automatic logic [47:0] f_dmac(int f); return 48'h0200_0000_0100 + 48'(f); endfunction
  function automatic logic [47:0] f_smac(int f); return 48'h0200_0000_0200 + 48'(f); endfunction
  localparam logic [47:0] NEW_DMAC = 48'h0200_0000_0055;

  function automatic logic [15:0] ip_csum(bytes_t p, int o);
    logic [31:0] s = 0;
    for (int i = 0; i < 20; i += 2) if (i != 10) s += {p[o+i], p[o+i+1]};
    while (s[31:16] != 0) s = s[15:0] + s[31:16];
    return ~s[15:0];
  endfunction

  function automatic void put(ref bytes_t b, input int o, input int n, input logic [127:0] v);
    for (int i = 0; i < n; i++) b[o + i] = v[8*(n-1-i) +: 8];
  endfunction

  // bytes of packet id as sent
  function automatic bytes_t build(int id);
    bytes_t b;
    int L, f, c;
    L = p_len[id]; f = p_flow[id]; c = p_cls[id];
    b = {};
    for (int i = 0; i < L; i++) b.push_back(8'((id * 37 + i * 11) ^ (i >> 3)));
    if (c == CF || c == CX) begin put(b, 0, 6, f_dmac(f)); put(b, 6, 6, f_smac(f)); end
    else begin put(b, 0, 6, 48'h0200_0000_0A00 + 48'(id)); put(b, 6, 6, 48'h0200_0000_0B00 + 48'(id)); end
    if (c == CV) begin
      put(b, 12, 2, 16'h86DD);
      put(b, 14, 4, 32'h6000_0000); put(b, 18, 2, 16'(L - 54)); b[20] = 8'd17; b[21] = 8'd64;
      put(b, 22, 16, {96'h2001_0db8_0000_0000_0000_0000, 32'(id)});
      put(b, 38, 16, 128'h2001_0db8_0000_0000_0000_0000_0000_0001);
      put(b, 54, 2, 16'(3000 + id % 100)); put(b, 56, 2, 16'(4000 + id % 50));
      put(b, 58, 2, 16'(L - 54)); put(b, 60, 2, 16'd0);
    end else begin
      put(b, 12, 2, 16'h0800);
      b[14] = (c == CX) ? 8'h44 : 8'h45; b[15] = 8'h00;
      put(b, 16, 2, 16'(L - 14)); put(b, 18, 2, 16'(id)); put(b, 20, 2, 16'd0);
      b[22] = 8'(32 + id % 64); b[23] = 8'd17;
      case (c)
        CF, CX: begin put(b, 26, 4, 32'h0A01_0000 + 32'(f)); put(b, 30, 4, 32'h0A00_000A + 32'(f));
                      put(b, 34, 2, 16'(1000 + f)); put(b, 36, 2, 16'(2000 + f)); end
        CG: begin put(b, 26, 4, 32'h0A02_0000 + 32'(id)); put(b, 30, 4, 32'h0A00_00C8);
                  put(b, 34, 2, 16'(id)); put(b, 36, 2, 16'd7); end
        CC: begin put(b, 26, 4, 32'h0A03_0000 + 32'(id)); put(b, 30, 4, 32'h0A09_0909);
                  put(b, 34, 2, 16'(id)); put(b, 36, 2, 16'd666); end
        default: begin put(b, 26, 4, 32'h0A04_0000 + 32'(id)); put(b, 30, 4, 32'hC0A8_0100 + 32'(id % 200));
                       put(b, 34, 2, 16'(id)); put(b, 36, 2, 16'd53); end
      endcase
      put(b, 38, 2, 16'(L - 34)); put(b, 40, 2, 16'd0);
      put(b, 24, 2, ip_csum(b, 14));
    end
    put(b, L - 4, 4, 32'(id));
    return b;
  endfunction

  // bytes expected on the output port
  function automatic bytes_t expected(int id);
    bytes_t b;
    b = build(id);
    if (p_cls[id] == CF) begin
      put(b, 0, 6, NEW_DMAC);
      b[22] = b[22] - 1;
      put(b, 24, 2, ip_csum(b, 14));
    end else if (p_cls[id] == CV) begin
      // tag 0x8100, PCP 0, VLAN id 100 inserted after the MAC addresses
      b.insert(12, 8'h64); b.insert(12, 8'h00); b.insert(12, 8'h00); b.insert(12, 8'h81);
    end
    return b;
  endfunction

  // ---------------- MAC receive drivers ----------------
  int  txq [NP][$];
  int  gap_max [NP];
  int  sent [NP];
  initial for (int p = 0; p < NP; p++) begin
    rx_valid[p] = 0; rx_data[p] = '0; rx_nbytes[p] = '0; rx_sop[p] = 0; rx_eop[p] = 0;
    gap_max[p] = 40; sent[p] = 0;
  end

  for (genvar gp = 0; gp < NP; gp++) begin : g_drv
    initial begin
      bytes_t b;
      int id, nb, g;
      @(posedge rst_n);
      forever begin
        @(negedge clk);
        rx_valid[gp] = 0; rx_sop[gp] = 0; rx_eop[gp] = 0;
        if (txq[gp].size() != 0) begin
          id = txq[gp].pop_front();
          b = build(id);
          nb = (b.size() + BYTES - 1) / BYTES;
          sent[gp]++;
          for (int k = 0; k < nb; k++) begin
            logic [DW-1:0] d;
            int n;
            d = '0;
            n = (k == nb - 1) ? b.size() - k * BYTES : BYTES;
            for (int i = 0; i < n; i++) d[8*i +: 8] = b[k * BYTES + i];
            if (k != 0) @(negedge clk);
            rx_valid[gp] = 1; rx_data[gp] = d; rx_nbytes[gp] = NBW'(n);
            rx_sop[gp] = (k == 0); rx_eop[gp] = (k == nb - 1);
          end
          g = (gap_max[gp] == 0) ? 0 : $urandom % gap_max[gp];
          repeat (g) begin @(negedge clk); rx_valid[gp] = 0; rx_sop[gp] = 0; rx_eop[gp] = 0; end
        end
      end
    end
  end

  function automatic int new_pkt(int c, int f, int port, int len);
    int id;
    id = n_ids++;
    p_cls[id] = c; p_flow[id] = f; p_port[id] = port; p_len[id] = len; p_seen[id] = 0; p_deleted[id] = 0;
    return id;
  endfunction

  // ---------------- MAC transmit monitors ----------------
  int arrivals [NP];
  int n_goto = 0, n_ttl = 0, n_vlan = 0, n_po_fwd = 0, n_unexp = 0;
  bit tx_rand [NP];
  initial for (int p = 0; p < NP; p++) begin tx_ready[p] = 1; tx_rand[p] = 0; arrivals[p] = 0; end
  always @(posedge clk) begin
    #1;
    for (int p = 0; p < NP; p++) if (tx_rand[p]) tx_ready[p] = ($urandom % 4 != 0);
  end

  for (genvar gp = 0; gp < NP; gp++) begin : g_mon
    initial begin
      bytes_t r, e;
      int id;
      r = {};
      forever begin
        @(negedge clk);
        if (tx_valid[gp] && tx_ready[gp]) begin
          if (tx_sop[gp]) r = {};
          for (int i = 0; i < int'(tx_nbytes[gp]); i++) r.push_back(tx_data[gp][8*i +: 8]);
          if (tx_eop[gp]) begin
            arrivals[gp]++;
            id = (r.size() < 4) ? -1 : int'({r[r.size()-4], r[r.size()-3], r[r.size()-2], r[r.size()-1]});
            if (id < 0 || id >= n_ids || p_seen[id]) begin
              check(0, $sformatf("port %0d: unknown or repeated packet id %0d", gp, id)); n_unexp++;
            end else begin
              p_seen[id] = 1;
              case (p_cls[id])
                CF: begin
                  check(gp == 5 && !p_deleted[id], $sformatf("flow packet %0d on port %0d", id, gp));
                  e = expected(id);
                  check(r == e, $sformatf("flow packet %0d bytes", id));
                  n_goto++; n_ttl++;
                end
                CV: begin
                  check(gp == 1, $sformatf("IPv6 packet %0d on port %0d", id, gp));
                  e = expected(id);
                  check(r == e, $sformatf("IPv6 packet %0d bytes (len %0d vs %0d)", id, r.size(), e.size()));
                  n_vlan++;
                end
                CC, CM: begin
                  check(gp == 2 && p_len[id] % 2 == 0, $sformatf("controller packet %0d on port %0d", id, gp));
                  e = build(id);
                  check(r == e, $sformatf("packet-out %0d bytes", id));
                  n_po_fwd++;
                end
                default: begin check(0, $sformatf("dropped-class packet %0d (class %0d) forwarded", id, p_cls[id])); n_unexp++; end
              endcase
            end
          end
        end
      end
    end
  end

  // ---------------- controller channel ----------------
  logic [64:0] cq [$];        // {last, word}
  int n_msgs_sent = 0;
  function automatic logic [63:0] hdr(logic [7:0] t, int len, logic [31:0] xid);
    return {OFP_VERSION, t, 16'(len), xid};
  endfunction
  function automatic void qmsg(logic [63:0] w [$]);
    foreach (w[i]) cq.push_back({i == w.size() - 1, w[i]});
    n_msgs_sent++;
  endfunction

  initial begin
    logic [64:0] x;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      c_in_valid = 0; c_in_last = 0;
      if (cq.size() != 0) begin
        x = cq.pop_front();
        c_in_valid = 1; c_in_data = x[63:0]; c_in_last = x[64];
        #1;
        while (!c_in_ready) begin @(negedge clk); #1; end
      end
    end
  end

  // replies
  logic [63:0] rx_msg [$];
  logic [63:0] mp_rep [$];
  int n_mp = 0, n_barrier = 0, n_feat = 0, n_err = 0, n_hello = 0;
  int n_pin [3];
  int n_po_out = 0, n_po_drop = 0, n_cout_stall = 0;
  bit hold = 0;
  logic [47:0] held [$];     // {buffer_id, total_len}
  logic [63:0] feat [$];
  bit c_rand = 0;

  always @(posedge clk) begin
    #1;
    c_out_ready = c_rand ? ($urandom % 3 != 0) : 1'b1;
  end

  task automatic send_po(logic [31:0] bid, logic [15:0] len);
    logic [15:0] al;
    al = (len % 2 == 0) ? 16'd16 : 16'd0;
    if (al != 0) n_po_out++; else n_po_drop++;
    qmsg('{hdr(OFPT_PACKET_OUT, 40, 32'h500 + bid), {bid, 32'hFFFF_FFFD}, {al, 48'd0},
           {16'd0, 16'd16, 24'd0, 8'd2}, {16'hFFFF, 48'd0}});
  endtask

  initial begin
    n_pin[0] = 0; n_pin[1] = 0; n_pin[2] = 0;
    forever begin
      @(negedge clk);
      if (c_out_valid && !c_out_ready) n_cout_stall++;
      if (c_out_valid && c_out_ready) begin
        rx_msg.push_back(c_out_data);
        if (c_out_last) begin
          check(rx_msg[0][63:56] == OFP_VERSION && int'(rx_msg[0][47:32]) == 8 * rx_msg.size(), "reply header length");
          case (rx_msg[0][55:48])
            OFPT_PACKET_IN: begin
              logic [31:0] bid; logic [15:0] tl; logic [7:0] rs, tb, ip;
              {bid, tl, rs, tb} = rx_msg[1];
              ip = rx_msg[4][39:32];
              check(rs <= 1 && tb == 0 && ip < NP, "packet-in fields");
              n_pin[rs <= 1 ? rs : 2]++;
              if (hold) held.push_back({bid, tl});
              else send_po(bid, tl);
            end
            OFPT_MP_REP: begin mp_rep = rx_msg; n_mp++; end
            OFPT_BARRIER_REP: n_barrier++;
            OFPT_FEAT_REP: begin feat = rx_msg; n_feat++; end
            OFPT_HELLO: n_hello++;
            default: begin n_err++; check(0, $sformatf("unexpected reply type %0d", rx_msg[0][55:48])); end
          endcase
          rx_msg = {};
        end
      end
    end
  end

  task automatic barrier();
    int b;
    b = n_barrier;
    qmsg('{hdr(OFPT_BARRIER_REQ, 8, 32'h77)});
    wait (n_barrier > b);
  endtask

  task automatic flow_mod(logic [7:0] cmd, int tbl, int prio, tuple_t k, tuple_t m, instr_t ins);
    logic [511:0] k5, m5; logic [127:0] i1; logic [63:0] w [$];
    k5 = {k, 48'd0}; m5 = {m, 48'd0}; i1 = {ins, (128 - $bits(instr_t))'(0)};
    w = '{hdr(OFPT_FLOW_MOD, 160, 32'h100 + 32'(prio)), {cmd, 8'(tbl), 16'(prio), 32'd0}};
    for (int i = 7; i >= 0; i--) w.push_back(k5[64*i +: 64]);
    for (int i = 7; i >= 0; i--) w.push_back(m5[64*i +: 64]);
    w.push_back(i1[127:64]); w.push_back(i1[63:0]);
    qmsg(w);
  endtask

  task automatic mp(logic [15:0] t);
    int n;
    n = n_mp;
    qmsg('{hdr(OFPT_MP_REQ, 16, 32'h900 + 32'(t)), {t, 48'd0}});
    wait (n_mp > n);
  endtask

  function automatic tuple_t flow_key(int f);
    tuple_t t;
    t = '0;
    t.in_port = 8'(f); t.eth_dst = f_dmac(f); t.eth_src = f_smac(f); t.eth_type = 16'h0800;
    t.ip_proto = 8'd17; t.ip_src = 128'(32'h0A01_0000 + 32'(f)); t.ip_dst = 128'(32'h0A00_000A + 32'(f));
    t.l4_src = 16'(1000 + f); t.l4_dst = 16'(2000 + f);
    return t;
  endfunction

  // ---------------- observation ----------------
  int n_oq_stall = 0, n_pb_stall = 0, cyc = 0;
  always @(negedge clk) begin
    cyc++;
    if (dut.oq_valid[5] && !dut.oq_ready[5]) n_oq_stall++;
    if (dut.pbi_valid && !dut.pbi_ready) n_pb_stall++;
  end
  bit measure = 0;
  int m_cyc = 0, m_beats = 0;
  longint m_bytes = 0;
  always @(negedge clk) if (measure) begin
    m_cyc++;
    if (dut.pbi_valid && dut.pbi_ready) begin m_beats++; m_bytes += dut.pbi_nbytes; end
  end

  task automatic quiet(int n);
    int last;
    last = cyc;
    forever begin
      @(negedge clk);
      for (int p = 0; p < NP; p++)
        if (txq[p].size() != 0 || rx_valid[p] || tx_valid[p] || dut.ib_valid[p]) last = cyc;
      if (cq.size() != 0 || c_out_valid || dut.pb_valid) last = cyc;
      if (cyc - last > n) break;
    end
  endtask

  // ---------------- main ----------------
  int n_sent_cls [6];
  int f_cnt [4];
  longint f_bytes [4];
  int c_cnt = 0, v_cnt = 0;
  longint c_bytes = 0, v_bytes = 0;
  int n_ctrl_sent = 0, n_x_sent = 0, n_g_sent = 0, n_del_sent = 0;

  function automatic void send_pkt(int c, int f, int port, int len);
    int id;
    id = new_pkt(c, f, port, len);
    txq[port].push_back(id);
    n_sent_cls[c]++;
    case (c)
      CF: begin f_cnt[f]++; f_bytes[f] += len; end
      CC: begin c_cnt++; c_bytes += len; n_ctrl_sent++; end
      CM: n_ctrl_sent++;
      CV: begin v_cnt++; v_bytes += len; end
      CX: n_x_sent++;
      CG: n_g_sent++;
      default: ;
    endcase
  endfunction

  function automatic int rlen(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic void mixed_one();
    int c, f, port;
    c = $urandom % 6; f = $urandom % 4;
    port = (c == CF || c == CX) ? f : $urandom % NP;
    send_pkt(c, f, port, rlen(64, 1024));
  endfunction

  initial begin
    tuple_t k, m;
    instr_t ins;
    int pin_before, hold_sent, rx_tot, lk0;
    foreach (n_sent_cls[i]) n_sent_cls[i] = 0;
    foreach (f_cnt[i]) begin f_cnt[i] = 0; f_bytes[i] = 0; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // handshake and features
    qmsg('{hdr(OFPT_HELLO, 8, 32'h1)});
    qmsg('{hdr(OFPT_FEAT_REQ, 8, 32'h2)});
    wait (n_feat == 1);
    check(n_hello == 1, "hello");
    check(feat[2][63:32] == 32'd16 && feat[2][31:24] == 8'(NT), "features: buffers and tables");

    // table-miss rules: table 0 -> controller, table 1 -> drop
    qmsg('{hdr(OFPT_TABLE_MOD, 16, 32'h3), {8'd0, 24'd0, 32'd1}});
    qmsg('{hdr(OFPT_TABLE_MOD, 16, 32'h4), {8'd1, 24'd0, 32'd0}});
    // A
    k = '0; m = '0; ins = '0;
    k.eth_type = 16'h0800; m.eth_type = '1;
    k.ip_dst = 128'(32'h0A00_0000); m.ip_dst = {{96{1'b1}}, 32'hFFFF_FF00};
    ins.goto_en = 1; ins.goto_id = 8'd1;
    ins.actions.out_en = 1; ins.actions.out_port = 8'd3; ins.actions.dec_ttl = 1;
    flow_mod(8'd0, 0, 100, k, m, ins);
    // C
    k = '0; m = '0; ins = '0;
    k.eth_type = 16'h0800; m.eth_type = '1; k.ip_proto = 8'd17; m.ip_proto = '1;
    k.l4_dst = 16'd666; m.l4_dst = '1;
    ins.actions.to_ctrl = 1;
    flow_mod(8'd0, 0, 200, k, m, ins);
    // V
    k = '0; m = '0; ins = '0;
    k.eth_type = 16'h86DD; m.eth_type = '1;
    ins.actions.out_en = 1; ins.actions.out_port = 8'd1;
    ins.actions.push_vlan = 1; ins.actions.set_vid = 1; ins.actions.vid = 12'd100;
    flow_mod(8'd0, 0, 50, k, m, ins);
    // table 1 flows
    for (int f = 0; f < 4; f++) begin
      ins = '0;
      ins.actions.out_en = 1; ins.actions.out_port = 8'd5;
      ins.actions.set_eth_dst = 1; ins.actions.eth_dst = NEW_DMAC;
      flow_mod(8'd0, 1, 10, flow_key(f), '0, ins);
    end
    barrier();
    check(n_err == 0, "flow setup without errors");

    // phase 1: mixed traffic, random output and channel back-pressure
    $display("phase 1 at cycle %0d", cyc);
    c_rand = 1;
    for (int p = 0; p < NP; p++) gap_max[p] = 300;
    tx_rand[2] = 1; tx_rand[1] = 1;
    for (int i = 0; i < 600; i++) mixed_one();
    quiet(300);
    tx_rand[2] = 0; tx_rand[1] = 0;

    // phase 2: output stall on port 5
    $display("phase 2 at cycle %0d", cyc);
    tx_ready[5] = 0;
    gap_max[1] = 0;
    for (int i = 0; i < 10; i++) send_pkt(CF, 1, 1, 1536);
    repeat (900) @(negedge clk);
    check(n_oq_stall > 0, "output queue of port 5 filled");
    tx_rand[5] = 1;
    quiet(300);
    tx_rand[5] = 0; tx_ready[5] = 1;

    // phase 3: controller withholds packet-outs until the buffers fill
    $display("phase 3 at cycle %0d", cyc);
    hold = 1;
    pin_before = n_pin[0] + n_pin[1];
    for (int i = 0; i < 40; i++) send_pkt((i % 2) ? CC : CM, 0, i % NP, rlen(64, 600));
    quiet(300);
    hold_sent = n_pin[0] + n_pin[1] - pin_before;
    check(hold_sent == 16, $sformatf("packet-ins while held: %0d (16 buffers)", hold_sent));
    check(cnt_drop_full + cnt_drop_late == 64'(40 - hold_sent), "controller-bound drops when buffers are full");
    hold = 0;
    while (held.size() != 0) begin
      logic [47:0] h;
      h = held.pop_front();
      send_po(h[47:16], h[15:0]);
    end
    quiet(300);

    // phase 4: all ports at full rate, TCAM-hit / CAM-miss packets
    $display("phase 4 at cycle %0d", cyc);
    c_rand = 0;
    for (int p = 0; p < NP; p++) gap_max[p] = 0;
    begin
      longint d;
      d = 0;
      for (int p = 0; p < NP; p++) d += 64'(sent[p]) - 64'(dut.rx_packets[p]);
      check(d == 0, $sformatf("no input drops before the burst (%0d)", d));
    end
    for (int i = 0; i < 80; i++) for (int p = 0; p < NP; p++) send_pkt(CG, 0, p, 1536);
    repeat (200) @(negedge clk);
    measure = 1;
    repeat (1500) @(negedge clk);
    measure = 0;
    check(m_beats * 100 >= m_cyc * 95, $sformatf("arbiter rate %0d beats in %0d cycles", m_beats, m_cyc));
    $display("saturated: %0d beats / %0d cycles, %0.2f Gbps at 160 MHz", m_beats, m_cyc,
             real'(m_bytes) * 8.0 * 0.160 / real'(m_cyc));
    quiet(300);
    for (int p = 0; p < NP; p++) gap_max[p] = 40;

    // phase 5: strict delete of flow 3, its packets are then dropped
    $display("phase 5 at cycle %0d", cyc);
    flow_mod(8'd4, 1, 10, flow_key(3), '0, '0);
    barrier();
    for (int i = 0; i < 6; i++) begin
      int id;
      id = new_pkt(CF, 3, 3, rlen(64, 800));
      p_deleted[id] = 1; n_del_sent++;
      txq[3].push_back(id);
    end
    for (int i = 0; i < 6; i++) send_pkt(CF, 0, 0, rlen(64, 800));
    quiet(500);

    // ---------------- statistics over the channel ----------------
    mp(OFPMP_PORT);
    rx_tot = 0;
    for (int p = 0; p < NP; p++) begin
      logic [63:0] rxp, txp, rxd;
      rxp = mp_rep[2 + 14 * p + 1]; txp = mp_rep[2 + 14 * p + 2]; rxd = mp_rep[2 + 14 * p + 5];
      check(rxp + rxd == 64'(sent[p]), $sformatf("port %0d rx %0d + dropped %0d vs sent %0d", p, rxp, rxd, sent[p]));
      check(txp == 64'(arrivals[p]), $sformatf("port %0d tx %0d vs seen %0d", p, txp, arrivals[p]));
      rx_tot += int'(rxp);
    end
    mp(OFPMP_TABLE);
    lk0 = int'(mp_rep[3]);
    check(lk0 == rx_tot, $sformatf("table 0 lookups %0d vs received packets %0d", lk0, rx_tot));
    check(mp_rep[7] == 64'(f_cnt[0] + f_cnt[1] + f_cnt[2] + f_cnt[3]), "table 1 matches = flow packets");
    check(mp_rep[4] > 0, "table 0 matches");
    mp(OFPMP_FLOW);
    // entries in slot order: table 0 A, C, V; table 1 flows 0, 1, 2
    check(mp_rep.size() == 2 + 3 * 6, $sformatf("flow stats entries %0d", (mp_rep.size() - 2) / 3));
    if (mp_rep.size() == 2 + 3 * 6) begin
      check(mp_rep[2 + 3 * 1 + 1] == 64'(c_cnt) && mp_rep[2 + 3 * 1 + 2] == 64'(c_bytes), "flow C counters");
      check(mp_rep[2 + 3 * 2 + 1] == 64'(v_cnt) && mp_rep[2 + 3 * 2 + 2] == 64'(v_bytes), "flow V counters");
      for (int f = 0; f < 3; f++)
        check(mp_rep[2 + 3 * (3 + f) + 1] == 64'(f_cnt[f]) && mp_rep[2 + 3 * (3 + f) + 2] == 64'(f_bytes[f]),
              $sformatf("flow %0d counters %0d vs %0d", f, mp_rep[2 + 3 * (3 + f) + 1], f_cnt[f]));
    end

    // ---------------- end checks ----------------
    for (int id = 0; id < n_ids; id++) begin
      if (p_cls[id] == CF && !p_deleted[id]) check(p_seen[id], $sformatf("flow packet %0d delivered", id));
      if (p_cls[id] == CF && p_deleted[id]) check(!p_seen[id], $sformatf("deleted-flow packet %0d dropped", id));
      if (p_cls[id] == CV) check(p_seen[id], $sformatf("IPv6 packet %0d delivered", id));
    end
    check(n_pin[0] + n_pin[1] + int'(cnt_drop_full + cnt_drop_late) == n_ctrl_sent, "controller-bound packets accounted");
    check(64'(n_pin[0] + n_pin[1]) == cnt_to_ctrl, "packet-in count");
    check(n_po_fwd == n_po_out, $sformatf("packet-outs forwarded %0d vs sent %0d", n_po_fwd, n_po_out));
    check(cnt_pkt_out == 64'(n_po_out + n_po_drop), "packet-out counter");
    check(n_err == 0 && n_unexp == 0, "no errors, nothing unexpected");

    $display("mechanisms: received=%0d congested=%0d oq_stall=%0d pb_stall=%0d goto=%0d ttl=%0d vlan=%0d",
             rx_tot, cnt_congested_grants, n_oq_stall, n_pb_stall, n_goto, n_ttl, n_vlan);
    begin
      longint ovf;
      ovf = 0;
      for (int p = 0; p < NP; p++) ovf += 64'(sent[p]) - 64'(dut.rx_packets[p]);
      $display("  input overflow drops=%0d pin_miss=%0d pin_action=%0d po_fwd=%0d po_drop=%0d buf_full=%0d+%0d",
               ovf, n_pin[0], n_pin[1], n_po_fwd, n_po_drop, cnt_drop_full, cnt_drop_late);
      $display("  malicious=%0d miss_drop=%0d deleted=%0d c_out_stall=%0d msgs=%0d packets=%0d cycles=%0d",
               n_x_sent, n_g_sent, n_del_sent, n_cout_stall, n_msgs_sent, n_ids, cyc);
      check(ovf > 0, "mechanism: input overflow drop");
    end
    check(cnt_congested_grants > 0, "mechanism: congested grant");
    check(n_oq_stall > 0, "mechanism: output stall");
    check(n_pb_stall > 0, "mechanism: packet buffer back-pressure");
    check(mp_rep.size() > 0 && lk0 > 0, "mechanism: TCAM lookups");
    check(n_goto > 0, "mechanism: goto and CAM hit");
    check(n_ttl > 0, "mechanism: TTL decrement");
    check(n_vlan > 0, "mechanism: VLAN push");
    check(n_pin[0] > 0, "mechanism: miss to controller");
    check(n_pin[1] > 0, "mechanism: action to controller");
    check(n_po_fwd > 0, "mechanism: packet-out forward");
    check(n_po_drop > 0, "mechanism: packet-out drop");
    check(cnt_drop_full + cnt_drop_late > 0, "mechanism: buffer-full drop");
    check(n_x_sent > 0, "mechanism: malicious drop");
    check(n_g_sent > 0, "mechanism: table-miss drop");
    check(n_del_sent > 0, "mechanism: flow delete");
    check(n_cout_stall > 0, "mechanism: channel back-pressure");
    check(n_mp == 3, "mechanism: statistics replies");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
