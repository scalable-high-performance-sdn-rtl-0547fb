// of_agent: hardware OpenFlow 1.3 southbound agent.
//
// The controller link is 8 bytes wide, as in the paper: every OpenFlow
// message is a whole number of 8-byte words. Word order is network order:
// the first byte of a word sits in bits [63:56]. Messages from the
// controller enter an input buffer; the header decoder reads the 8-byte
// OpenFlow header (version, type, length, xid), collects the body words and
// then starts the handler for the type. Messages are handled in order: the
// next header is decoded once the handlers have finished with the last one.
//
// Handlers (Fig. 7 of the paper) and what they do here:
//   Packet Out      OFPT_PACKET_OUT: buffer id and the port of the first
//                   OUTPUT action go to action execution (no action = drop).
//   Flow/Table Mod  OFPT_FLOW_MOD (ADD, DELETE_STRICT) and OFPT_TABLE_MOD go
//                   to the flow match unit; a failed ADD gets an error reply.
//   Queue and port stats, table and flow stats
//                   OFPT_MULTIPART_REQUEST for PORT_STATS, QUEUE_STATS,
//                   TABLE and FLOW; the reply covers all ports / tables.
//   Switch configuration   FEATURES_REQUEST, GET_CONFIG_REQUEST, SET_CONFIG.
//   OFP channel     HELLO, ECHO_REQUEST, BARRIER_REQUEST; ERROR replies for a
//                   wrong version, an unknown type or multipart type.
//   Packet In       packet-in requests from action execution become
//                   OFPT_PACKET_IN messages.
// Replies are queued per class and leave through of_out_arbiter in the
// paper's order: packet-in, statistics, switch information and
// configuration, channel setup and keep-alive.
//
// Departures from OpenFlow 1.3 (this design's choices, the paper gives no
// message layouts): a FLOW_MOD body has a fixed layout instead of OXM TLVs:
// word 1 = {command, table_id, priority, 32'b0}, words 2-9 = match value
// (the tuple in the upper 464 of 512 bits), words 10-17 = mask, words 18-19 =
// instruction (upper bits of 128). Flow statistics records are 24 bytes
// {length, table_id, pad, duration_sec, packet_count, byte_count}. Echo
// replies carry no data; PACKET_IN carries no packet data; port statistics
// give the packet, byte and drop counters and zero for the rest.
//
// Lint note: rst_n is the asynchronous reset of the flops and also gates the
// assertions (disable iff). The linter reports that as SYNCASYNCNET; the
// assertions are not logic, so no flop uses rst_n synchronously.
module of_agent
  import sdn_pkg::*;
#(
  parameter int          N_PORTS  = 8,
  parameter int          N_TABLES = 2,
  parameter int          DEPTH    = 1024,
  parameter int          N_BUF    = 16,
  parameter logic [63:0] DPID     = 64'h0000_0000_0000_0001,
  localparam int         SW       = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // controller channel
  input  logic        c_in_valid,
  output logic        c_in_ready,
  input  logic [63:0] c_in_data,
  input  logic        c_in_last,
  output logic        c_out_valid,
  input  logic        c_out_ready,
  output logic [63:0] c_out_data,
  output logic        c_out_last,
  // flow match unit
  output logic        fm_valid,
  input  logic        fm_ready,
  output flow_mod_t   fm,
  input  logic        fm_done,
  input  logic        fm_ok,
  output logic [7:0]  st_table,
  output logic [SW-1:0] st_slot,
  input  logic        st_entry_valid,
  input  logic [63:0] st_pkts,
  input  logic [63:0] st_bytes,
  input  logic [31:0] st_dur,
  input  logic [31:0] tbl_active  [N_TABLES],
  input  logic [63:0] tbl_lookups [N_TABLES],
  input  logic [63:0] tbl_matches [N_TABLES],
  // action execution
  output logic        po_valid,
  input  logic        po_ready,
  output pkt_out_t    po,
  input  logic        pin_valid,
  output logic        pin_ready,
  input  pkt_in_t     pin,
  // port and queue counters
  input  logic [63:0] rx_packets [N_PORTS],
  input  logic [63:0] rx_bytes   [N_PORTS],
  input  logic [63:0] rx_dropped [N_PORTS],
  input  logic [63:0] tx_packets [N_PORTS],
  input  logic [63:0] tx_bytes   [N_PORTS],
  // switch configuration
  output logic [15:0] cfg_flags,
  output logic [15:0] miss_send_len,
  output logic [31:0] msg_count
);
  localparam int NB = 20;   // body words kept

  // ---------------- input buffer ----------------
  logic        i_valid, i_ready, i_eop;
  logic [63:0] i_data;
  pkt_fifo #(.W(64), .DEPTH(32)) u_in (
    .clk, .rst_n,
    .in_valid(c_in_valid), .in_ready(c_in_ready), .in_data(c_in_data), .in_nbytes(4'd8),
    .in_sop(1'b0), .in_eop(c_in_last),
    .out_valid(i_valid), .out_ready(i_ready), .out_data(i_data), .out_nbytes(), .out_sop(),
    .out_eop(i_eop), .level(), .pkts()
  );

  // ---------------- header decoder ----------------
  typedef enum logic [1:0] {D_HDR, D_BODY, D_EXEC} d_e;
  d_e          ds;
  logic [7:0]  h_ver, h_type;
  logic [15:0] h_len;
  logic [31:0] h_xid;
  logic [63:0] h_word;
  logic [12:0] left, widx;
  logic [63:0] body [NB];
  logic        handlers_busy;

  assign i_ready = (ds == D_BODY) || (ds == D_HDR && !handlers_busy);

  // ---------------- reply generators (channel, config) ----------------
  logic [63:0] ch_w [3];
  logic [1:0]  ch_n, ch_i;
  logic        ch_busy;
  logic [63:0] cf_w [4];
  logic [1:0]  cf_n, cf_i;
  logic        cf_busy;
  logic        fm_wait;

  // ---------------- stats generator ----------------
  typedef enum logic [2:0] {SG_IDLE, SG_HDR, SG_REC, SG_FREQ, SG_FWAIT, SG_FCHK, SG_FREC} sg_e;
  sg_e         sg;
  logic [15:0] sg_type;
  logic [31:0] sg_xid;
  logic [15:0] sg_len;
  logic        sg_hi;           // header word index 0/1
  logic [15:0] sg_rec, sg_nrec;
  logic [3:0]  sg_k, sg_wpr;
  logic [63:0] sg_word;
  logic        sg_push, sg_eop;
  logic [31:0] fl_emitted, fl_total;
  logic [7:0]  fl_table;

  assign handlers_busy = ch_busy || cf_busy || fm_valid || fm_wait || po_valid || (sg != SG_IDLE);

  // ---------------- per-class output buffers ----------------
  localparam int NQ = 4;  // 0 packet-in, 1 stats, 2 config, 3 channel
  logic        q_in_valid [NQ];
  logic        q_in_ready [NQ];
  logic [63:0] q_in_data  [NQ];
  logic        q_in_sop   [NQ];
  logic        q_in_eop   [NQ];
  logic        q_out_valid[NQ];
  logic        q_out_ready[NQ];
  logic [63:0] q_out_data [NQ];
  logic        q_out_sop  [NQ];
  logic        q_out_eop  [NQ];
  logic        q_req      [NQ];

  for (genvar q = 0; q < NQ; q++) begin : g_q
    logic [6:0] lvl, pk;
    pkt_fifo #(.W(64), .DEPTH(64)) u_q (
      .clk, .rst_n,
      .in_valid(q_in_valid[q]), .in_ready(q_in_ready[q]), .in_data(q_in_data[q]), .in_nbytes(4'd8),
      .in_sop(q_in_sop[q]), .in_eop(q_in_eop[q]),
      .out_valid(q_out_valid[q]), .out_ready(q_out_ready[q]), .out_data(q_out_data[q]), .out_nbytes(),
      .out_sop(q_out_sop[q]), .out_eop(q_out_eop[q]), .level(lvl), .pkts(pk)
    );
    assign q_req[q] = (pk != '0) || (lvl == 7'd64);
  end

  logic        a_valid, a_ready, a_sop, a_eop;
  logic [63:0] a_data;
  of_out_arbiter #(.N_IN(NQ), .W(64)) u_arb (
    .clk, .rst_n,
    .in_valid(q_out_valid), .in_ready(q_out_ready), .in_data(q_out_data), .in_sop(q_out_sop),
    .in_eop(q_out_eop), .in_req(q_req),
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data), .out_sop(a_sop), .out_eop(a_eop),
    .grant()
  );

  pkt_fifo #(.W(64), .DEPTH(32)) u_out (
    .clk, .rst_n,
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data), .in_nbytes(4'd8),
    .in_sop(a_sop), .in_eop(a_eop),
    .out_valid(c_out_valid), .out_ready(c_out_ready), .out_data(c_out_data), .out_nbytes(), .out_sop(),
    .out_eop(c_out_last), .level(), .pkts()
  );

  // ---------------- packet-in handler ----------------
  logic [63:0] pi_w [6];
  logic [2:0]  pi_i;
  logic        pi_busy;
  assign pin_ready = !pi_busy;
  assign q_in_valid[0] = pi_busy;
  assign q_in_data[0]  = pi_w[pi_i];
  assign q_in_sop[0]   = (pi_i == 3'd0);
  assign q_in_eop[0]   = (pi_i == 3'd5);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pi_busy <= 1'b0; pi_i <= '0;
      for (int i = 0; i < 6; i++) pi_w[i] <= '0;
    end else if (!pi_busy) begin
      if (pin_valid) begin
        pi_busy <= 1'b1; pi_i <= '0;
        pi_w[0] <= {OFP_VERSION, OFPT_PACKET_IN, 16'd48, 32'd0};
        pi_w[1] <= {pin.buffer_id, pin.total_len,
                    (pin.reason == RSN_ACTION) ? 8'd1 : 8'd0, pin.table_id};
        pi_w[2] <= 64'd0;                                   // cookie
        pi_w[3] <= {16'd1, 16'd12, 32'h8000_0004};          // match: OXM in_port
        pi_w[4] <= {24'd0, pin.in_port, 32'd0};
        pi_w[5] <= 64'd0;
      end
    end else if (q_in_ready[0]) begin
      if (pi_i == 3'd5) pi_busy <= 1'b0;
      pi_i <= pi_i + 1'b1;
    end
  end

  // ---------------- channel and config queues ----------------
  assign q_in_valid[3] = ch_busy;
  assign q_in_data[3]  = ch_w[ch_i];
  assign q_in_sop[3]   = (ch_i == 2'd0);
  assign q_in_eop[3]   = (ch_i == ch_n - 2'd1);
  assign q_in_valid[2] = cf_busy;
  assign q_in_data[2]  = cf_w[cf_i];
  assign q_in_sop[2]   = (cf_i == 2'd0);
  assign q_in_eop[2]   = (cf_i == cf_n - 2'd1);
  assign q_in_valid[1] = sg_push;
  assign q_in_data[1]  = sg_word;
  assign q_in_sop[1]   = (sg == SG_HDR) && !sg_hi;
  assign q_in_eop[1]   = sg_eop;

  // ---------------- stats word generation ----------------
  function automatic logic [63:0] rec_word(logic [15:0] t, logic [15:0] r, logic [3:0] k,
                                           logic [63:0] rxp, logic [63:0] rxb, logic [63:0] rxd,
                                           logic [63:0] txp, logic [63:0] txb,
                                           logic [31:0] act, logic [63:0] lk, logic [63:0] mt);
    logic [63:0] w = '0;
    if (t == OFPMP_TABLE) begin
      unique case (k)
        4'd0: w = {r[7:0], 24'd0, act};
        4'd1: w = lk;
        4'd2: w = mt;
        default: w = '0;
      endcase
    end else if (t == OFPMP_PORT) begin
      unique case (k)
        4'd0: w = {16'd0, r, 32'd0};
        4'd1: w = rxp;
        4'd2: w = txp;
        4'd3: w = rxb;
        4'd4: w = txb;
        4'd5: w = rxd;
        default: w = '0;
      endcase
    end else if (t == OFPMP_QUEUE) begin
      unique case (k)
        4'd0: w = {16'd0, r, 32'd0};
        4'd1: w = txb;
        4'd2: w = txp;
        default: w = '0;
      endcase
    end
    return w;
  endfunction

  logic [63:0] r_rxp, r_rxb, r_rxd, r_txp, r_txb, r_lk, r_mt;
  logic [31:0] r_act;
  always_comb begin
    r_rxp = '0; r_rxb = '0; r_rxd = '0; r_txp = '0; r_txb = '0; r_lk = '0; r_mt = '0; r_act = '0;
    for (int i = 0; i < N_PORTS; i++) if (int'(sg_rec) == i) begin
      r_rxp = rx_packets[i]; r_rxb = rx_bytes[i]; r_rxd = rx_dropped[i];
      r_txp = tx_packets[i]; r_txb = tx_bytes[i];
    end
    for (int i = 0; i < N_TABLES; i++) if (int'(sg_rec) == i) begin
      r_act = tbl_active[i]; r_lk = tbl_lookups[i]; r_mt = tbl_matches[i];
    end
  end

  always_comb begin
    sg_push = 1'b0; sg_word = '0; sg_eop = 1'b0;
    unique case (sg)
      SG_HDR: begin
        sg_push = 1'b1;
        sg_word = sg_hi ? {sg_type, 48'd0} : {OFP_VERSION, OFPT_MP_REP, sg_len, sg_xid};
        sg_eop  = sg_hi && ((sg_type == OFPMP_FLOW) ? (fl_total == 0) : (sg_nrec == 0));
      end
      SG_REC: begin
        sg_push = 1'b1;
        sg_word = rec_word(sg_type, sg_rec, sg_k, r_rxp, r_rxb, r_rxd, r_txp, r_txb, r_act, r_lk, r_mt);
        sg_eop  = (sg_rec == sg_nrec - 1'b1) && (sg_k == sg_wpr - 1'b1);
      end
      SG_FREC: begin
        sg_push = 1'b1;
        unique case (sg_k)
          4'd0:    sg_word = {16'd24, fl_table, 8'd0, st_dur};
          4'd1:    sg_word = st_pkts;
          default: sg_word = st_bytes;
        endcase
        sg_eop = (sg_k == 4'd2) && (fl_emitted == fl_total - 1);
      end
      default: ;
    endcase
  end

  // ---------------- decoder and handlers ----------------
  // flow-mod body fields: match in words 1-8, mask in words 9-16,
  // instruction in words 17-18
  logic [511:0] k512, m512;
  logic [127:0] i128;
  assign k512 = {body[1], body[2], body[3], body[4], body[5], body[6], body[7], body[8]};
  assign m512 = {body[9], body[10], body[11], body[12], body[13], body[14], body[15], body[16]};
  assign i128 = {body[17], body[18]};

  // entries in all tables, for the flow statistics reply length
  logic [31:0] act_total;
  always_comb begin
    act_total = '0;
    for (int i = 0; i < N_TABLES; i++) act_total = act_total + tbl_active[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ds <= D_HDR; h_ver <= '0; h_type <= '0; h_len <= '0; h_xid <= '0; h_word <= '0;
      left <= '0; widx <= '0;
      for (int i = 0; i < NB; i++) body[i] <= '0;
      ch_busy <= 1'b0; ch_n <= '0; ch_i <= '0; cf_busy <= 1'b0; cf_n <= '0; cf_i <= '0;
      for (int i = 0; i < 3; i++) ch_w[i] <= '0;
      for (int i = 0; i < 4; i++) cf_w[i] <= '0;
      fm_valid <= 1'b0; fm <= '0; fm_wait <= 1'b0;
      po_valid <= 1'b0; po <= '0;
      cfg_flags <= '0; miss_send_len <= 16'd128; msg_count <= '0;
      sg <= SG_IDLE; sg_type <= '0; sg_xid <= '0; sg_len <= '0; sg_hi <= 1'b0;
      sg_rec <= '0; sg_nrec <= '0; sg_k <= '0; sg_wpr <= '0;
      fl_emitted <= '0; fl_total <= '0; fl_table <= '0;
      st_table <= '0; st_slot <= '0;
    end else begin
      // ---- decoder ----
      unique case (ds)
        D_HDR: if (i_valid && i_ready) begin
          h_word <= i_data;
          h_ver <= i_data[63:56]; h_type <= i_data[55:48]; h_len <= i_data[47:32]; h_xid <= i_data[31:0];
          left  <= 13'((i_data[47:32] + 16'd7) >> 3) - 13'd1;
          widx  <= '0;
          for (int i = 0; i < NB; i++) body[i] <= '0;
          msg_count <= msg_count + 1;
          ds <= (i_eop || ((i_data[47:32] + 16'd7) >> 3) <= 16'd1) ? D_EXEC : D_BODY;
        end
        D_BODY: if (i_valid) begin
          if (int'(widx) < NB) body[5'(widx)] <= i_data;
          widx <= widx + 1'b1;
          left <= left - 1'b1;
          if (left == 13'd1 || i_eop) ds <= D_EXEC;
        end
        D_EXEC: begin
          ds <= D_HDR;
          if (h_ver != OFP_VERSION && h_type != OFPT_HELLO) begin
            ch_busy <= 1'b1; ch_i <= '0; ch_n <= 2'd3;
            ch_w[0] <= {OFP_VERSION, OFPT_ERROR, 16'd20, h_xid};
            ch_w[1] <= {16'd1, 16'd0, h_word[63:32]};
            ch_w[2] <= {h_word[31:0], 32'd0};
          end else begin
            unique case (h_type)
              OFPT_HELLO, OFPT_ECHO_REQ, OFPT_BARRIER_REQ: begin
                ch_busy <= 1'b1; ch_i <= '0; ch_n <= 2'd1;
                ch_w[0] <= {OFP_VERSION,
                            (h_type == OFPT_HELLO) ? OFPT_HELLO :
                            (h_type == OFPT_ECHO_REQ) ? OFPT_ECHO_REP : OFPT_BARRIER_REP,
                            16'd8, h_xid};
              end
              OFPT_FEAT_REQ: begin
                cf_busy <= 1'b1; cf_i <= '0; cf_n <= 2'd0;   // four words (wraps to 0)
                cf_w[0] <= {OFP_VERSION, OFPT_FEAT_REP, 16'd32, h_xid};
                cf_w[1] <= DPID;
                cf_w[2] <= {32'(N_BUF), 8'(N_TABLES), 8'd0, 16'd0};
                cf_w[3] <= {32'h0000_0047, 32'd0};
              end
              OFPT_GCFG_REQ: begin
                cf_busy <= 1'b1; cf_i <= '0; cf_n <= 2'd2;
                cf_w[0] <= {OFP_VERSION, OFPT_GCFG_REP, 16'd12, h_xid};
                cf_w[1] <= {cfg_flags, miss_send_len, 32'd0};
              end
              OFPT_SET_CONFIG: begin
                cfg_flags <= body[0][63:48]; miss_send_len <= body[0][47:32];
              end
              OFPT_PACKET_OUT: begin
                po_valid <= 1'b1;
                po.buffer_id <= body[0][63:32];
                po.drop      <= !(body[1][63:48] != 16'd0 && body[2][63:48] == 16'd0);
                po.out_port  <= body[2][7:0];
              end
              OFPT_FLOW_MOD: begin
                fm.table_id   <= body[0][55:48];
                fm.prio       <= body[0][47:32];
                fm.key        <= k512[511 -: TUPLE_W];
                fm.mask       <= m512[511 -: TUPLE_W];
                fm.instr      <= i128[127 -: $bits(instr_t)];
                fm.tbl_config <= '0;
                if (body[0][63:56] == 8'd0) begin
                  fm.op <= FM_ADD; fm_valid <= 1'b1;
                end else if (body[0][63:56] == 8'd4) begin
                  fm.op <= FM_DELETE_STRICT; fm_valid <= 1'b1;
                end else begin
                  // OFPET_FLOW_MOD_FAILED / OFPFMFC_BAD_COMMAND
                  ch_busy <= 1'b1; ch_i <= '0; ch_n <= 2'd3;
                  ch_w[0] <= {OFP_VERSION, OFPT_ERROR, 16'd20, h_xid};
                  ch_w[1] <= {16'd5, 16'd8, h_word[63:32]};
                  ch_w[2] <= {h_word[31:0], 32'd0};
                end
              end
              OFPT_TABLE_MOD: begin
                fm.op <= FM_TABLE_MOD; fm.table_id <= body[0][63:56];
                fm.tbl_config <= body[0][31:0]; fm.prio <= '0;
                fm.key <= '0; fm.mask <= '0; fm.instr <= '0;
                fm_valid <= 1'b1;
              end
              OFPT_MP_REQ: begin
                sg_type <= body[0][63:48]; sg_xid <= h_xid; sg_hi <= 1'b0;
                sg_rec <= '0; sg_k <= '0;
                fl_emitted <= '0; fl_table <= '0; st_table <= '0; st_slot <= '0;
                unique case (body[0][63:48])
                  OFPMP_TABLE: begin
                    sg <= SG_HDR; sg_nrec <= 16'(N_TABLES); sg_wpr <= 4'd3;
                    sg_len <= 16'(16 + 24 * N_TABLES);
                  end
                  OFPMP_PORT: begin
                    sg <= SG_HDR; sg_nrec <= 16'(N_PORTS); sg_wpr <= 4'd14;
                    sg_len <= 16'(16 + 112 * N_PORTS);
                  end
                  OFPMP_QUEUE: begin
                    sg <= SG_HDR; sg_nrec <= 16'(N_PORTS); sg_wpr <= 4'd5;
                    sg_len <= 16'(16 + 40 * N_PORTS);
                  end
                  OFPMP_FLOW: begin
                    sg <= SG_HDR; sg_nrec <= '0; sg_wpr <= 4'd3;
                    fl_total <= act_total;
                    sg_len <= 16'(16 + 24 * act_total);
                  end
                  default: begin
                    // OFPET_BAD_REQUEST / OFPBRC_BAD_MULTIPART
                    ch_busy <= 1'b1; ch_i <= '0; ch_n <= 2'd3;
                    ch_w[0] <= {OFP_VERSION, OFPT_ERROR, 16'd20, h_xid};
                    ch_w[1] <= {16'd1, 16'd2, h_word[63:32]};
                    ch_w[2] <= {h_word[31:0], 32'd0};
                  end
                endcase
              end
              default: begin
                // OFPET_BAD_REQUEST / OFPBRC_BAD_TYPE
                ch_busy <= 1'b1; ch_i <= '0; ch_n <= 2'd3;
                ch_w[0] <= {OFP_VERSION, OFPT_ERROR, 16'd20, h_xid};
                ch_w[1] <= {16'd1, 16'd1, h_word[63:32]};
                ch_w[2] <= {h_word[31:0], 32'd0};
              end
            endcase
          end
        end
        default: ds <= D_HDR;
      endcase

      // ---- flow/table mod hand-off ----
      if (fm_valid && fm_ready) begin fm_valid <= 1'b0; fm_wait <= 1'b1; end
      if (fm_wait && fm_done) begin
        fm_wait <= 1'b0;
        if (!fm_ok && fm.op == FM_ADD) begin
          // OFPET_FLOW_MOD_FAILED / OFPFMFC_TABLE_FULL
          ch_busy <= 1'b1; ch_i <= '0; ch_n <= 2'd3;
          ch_w[0] <= {OFP_VERSION, OFPT_ERROR, 16'd20, h_xid};
          ch_w[1] <= {16'd5, 16'd1, h_word[63:32]};
          ch_w[2] <= {h_word[31:0], 32'd0};
        end
      end

      // ---- packet-out hand-off ----
      if (po_valid && po_ready) po_valid <= 1'b0;

      // ---- reply pushers ----
      if (ch_busy && q_in_ready[3]) begin
        ch_i <= ch_i + 1'b1;
        if (ch_i == ch_n - 2'd1) ch_busy <= 1'b0;
      end
      if (cf_busy && q_in_ready[2]) begin
        cf_i <= cf_i + 1'b1;
        if (cf_i == cf_n - 2'd1) cf_busy <= 1'b0;
      end

      // ---- stats generator ----
      unique case (sg)
        SG_HDR: if (q_in_ready[1]) begin
          sg_hi <= 1'b1;
          if (sg_hi) begin
            if (sg_eop) sg <= SG_IDLE;
            else if (sg_type == OFPMP_FLOW) sg <= SG_FREQ;
            else sg <= SG_REC;
          end
        end
        SG_REC: if (q_in_ready[1]) begin
          if (sg_eop) sg <= SG_IDLE;
          else if (sg_k == sg_wpr - 1'b1) begin sg_k <= '0; sg_rec <= sg_rec + 1'b1; end
          else sg_k <= sg_k + 1'b1;
        end
        SG_FREQ: sg <= SG_FWAIT;            // slot address registered
        SG_FWAIT: sg <= SG_FCHK;            // table statistics read
        SG_FCHK: begin
          if (st_entry_valid) begin sg <= SG_FREC; sg_k <= '0; fl_table <= st_table; end
          else if (st_slot == SW'(DEPTH - 1)) begin
            st_slot <= '0;
            if (int'(st_table) == N_TABLES - 1) sg <= SG_IDLE;  // entries vanished meanwhile
            else begin st_table <= st_table + 1'b1; sg <= SG_FREQ; end
          end else begin st_slot <= st_slot + 1'b1; sg <= SG_FREQ; end
        end
        SG_FREC: if (q_in_ready[1]) begin
          if (sg_k == 4'd2) begin
            fl_emitted <= fl_emitted + 1;
            if (sg_eop) sg <= SG_IDLE;
            else if (st_slot == SW'(DEPTH - 1)) begin
              st_slot <= '0;
              if (int'(st_table) == N_TABLES - 1) sg <= SG_IDLE;
              else begin st_table <= st_table + 1'b1; sg <= SG_FREQ; end
            end else begin st_slot <= st_slot + 1'b1; sg <= SG_FREQ; end
          end else sg_k <= sg_k + 1'b1;
        end
        default: ;
      endcase
    end
  end

endmodule
