// flow_match_unit: the flow table pipeline, action-set accumulation and the
// pipeline handler.
//
// Every packet enters at table 0. Each table is one pipeline stage; a
// context (tuple, metadata, accumulated action set, target table, done flag)
// moves through the stages at one packet per cycle. A stage looks the tuple
// up in its table every time, but only uses (and counts) the result when the
// packet's target is that table and it is not finished. On a hit the entry's
// write-actions are merged into the action set; a goto-table instruction
// sets the next target, which must be a higher table id (the paper forbids
// going backwards; a goto that does not go forward ends the walk). An entry
// without goto ends the walk. On a miss the table's miss rule applies: send
// to the controller (reason no-match) or drop.
//
// At the end of the pipeline the result is finalised: a packet the parser
// marked malicious is dropped; an action set with no output is dropped; and,
// as the paper describes, when action execution reports that its buffers for
// packets waiting on the controller are full (buf_full), a packet bound for
// the controller gets a drop action instead.
//
// Pipeline handler: routes flow-mod / table-mod commands from the agent to
// the table named in them, one at a time, and answers statistics reads
// (per-flow counters of one slot of one table, per-table counters).
//
// The table count, which table is a TCAM, and the result latency
// (N_TABLES * 5 + 1 cycles) are this design's choices.
//
// Lint note: rst_n is the asynchronous reset of the flops and also gates the
// assertions (disable iff). The linter reports that as SYNCASYNCNET; the
// assertions are not logic, so no flop uses rst_n synchronously.
module flow_match_unit
  import sdn_pkg::*;
#(
  parameter int N_TABLES   = 2,
  parameter int DEPTH      = 1024,
  parameter int CAM_CHUNK  = 8,
  parameter int TCAM_CHUNK = 6,
  parameter int N_TCAM     = 1,        // tables 0 .. N_TCAM-1 are TCAMs
  localparam int SW        = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] now_sec,
  // from the parser
  input  logic        in_valid,
  input  tuple_t      in_tuple,
  input  meta_t       in_meta,
  // to action execution
  output logic        res_valid,
  output fmu_result_t res,
  input  logic        buf_full,
  output logic        drop_full_event,
  // flow / table mods from the agent
  input  logic        fm_valid,
  output logic        fm_ready,
  input  flow_mod_t   fm,
  output logic        fm_done,
  output logic        fm_ok,
  // statistics from the agent
  input  logic [7:0]  st_table,
  input  logic [SW-1:0] st_slot,
  output logic        st_entry_valid,
  output logic [63:0] st_pkts,
  output logic [63:0] st_bytes,
  output logic [31:0] st_dur,
  output logic [15:0] st_prio,
  output logic [31:0] tbl_active  [N_TABLES],
  output logic [63:0] tbl_lookups [N_TABLES],
  output logic [63:0] tbl_matches [N_TABLES]
);
  localparam int LAT = 4;

  typedef struct packed {
    logic          valid;
    tuple_t        tuple;
    meta_t         meta;
    action_set_t   aset;
    logic [7:0]    target;
    logic          done;
    logic [7:0]    table_id;
    pktin_reason_e reason;
  } ctx_t;

  ctx_t ctx0, ctx_last;

  assign ctx0 = '{valid: in_valid, tuple: in_tuple, meta: in_meta, aset: '0,
                    target: 8'd0, done: 1'b0, table_id: 8'd0, reason: RSN_NONE};

  // command routing
  logic [N_TABLES-1:0] t_cmd_ready, t_cmd_done, t_cmd_ok;
  logic                fm_busy;
  logic                sel_ok;
  assign sel_ok   = int'(fm.table_id) < N_TABLES;
  logic                sel_ready;
  always_comb begin
    sel_ready = 1'b0;
    for (int i = 0; i < N_TABLES; i++) if (int'(fm.table_id) == i) sel_ready = t_cmd_ready[i];
  end
  assign fm_ready = !fm_busy && (!sel_ok || sel_ready);

  logic        st_ev [N_TABLES];
  logic [63:0] st_p  [N_TABLES];
  logic [63:0] st_b  [N_TABLES];
  logic [31:0] st_d  [N_TABLES];
  logic [15:0] st_pr [N_TABLES];

  for (genvar i = 0; i < N_TABLES; i++) begin : g_tab
    logic          r_valid, r_hit, miss_ctrl;
    logic [SW-1:0] r_slot;
    instr_t        r_instr;
    ctx_t          dly [LAT];
    ctx_t          c_in, c_out;
    logic          use_it;

    if (i == 0) begin : g_first
      assign c_in = ctx0;
    end else begin : g_next
      assign c_in = g_tab[i-1].c_out;
    end

    assign use_it = c_in.valid && !c_in.done && c_in.target == 8'(i);

    flow_table #(
      .DEPTH(DEPTH), .CHUNK_W((i < N_TCAM) ? TCAM_CHUNK : CAM_CHUNK), .TERNARY(i < N_TCAM)
    ) u_table (
      .clk, .rst_n, .now_sec,
      .lk_valid(c_in.valid), .lk_key(c_in.tuple), .lk_len(c_in.meta.pkt_len), .lk_use(use_it),
      .res_valid(r_valid), .res_hit(r_hit), .res_slot(r_slot), .res_instr(r_instr),
      .miss_to_ctrl(miss_ctrl),
      .cmd_valid(fm_valid && !fm_busy && sel_ok && int'(fm.table_id) == i), .cmd_ready(t_cmd_ready[i]),
      .cmd(fm), .cmd_done(t_cmd_done[i]), .cmd_ok(t_cmd_ok[i]), .cmd_slot(),
      .st_slot, .st_entry_valid(st_ev[i]), .st_pkts(st_p[i]), .st_bytes(st_b[i]),
      .st_dur(st_d[i]), .st_prio(st_pr[i]),
      .active_count(tbl_active[i]), .lookup_count(tbl_lookups[i]), .matched_count(tbl_matches[i])
    );

    // context delay matching the table latency
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < LAT; k++) dly[k] <= '0;
      end else begin
        dly[0] <= c_in;
        for (int k = 1; k < LAT; k++) dly[k] <= dly[k-1];
      end
    end

    // merge the table's answer into the context
    ctx_t c_nx;
    always_comb begin
      c_nx = dly[LAT-1];
      if (c_nx.valid && !c_nx.done && c_nx.target == 8'(i)) begin
        c_nx.table_id = 8'(i);
        if (r_hit) begin
          c_nx.aset = merge_actions(c_nx.aset, r_instr.actions);
          if (r_instr.actions.to_ctrl) c_nx.reason = RSN_ACTION;
          if (r_instr.goto_en && r_instr.goto_id > 8'(i)) c_nx.target = r_instr.goto_id;
          else c_nx.done = 1'b1;
        end else begin
          c_nx.done = 1'b1;
          c_nx.aset.out_en = 1'b0;
          if (miss_ctrl) begin
            c_nx.aset.to_ctrl = 1'b1; c_nx.aset.drop = 1'b0; c_nx.reason = RSN_NO_MATCH;
          end else begin
            c_nx.aset.to_ctrl = 1'b0; c_nx.aset.drop = 1'b1;
          end
        end
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) c_out <= '0;
      else        c_out <= c_nx;
    end

    // a lookup result arrives exactly when its context leaves the delay line
    assert property (@(posedge clk) disable iff (!rst_n) r_valid == dly[LAT-1].valid);
  end

  assign ctx_last = g_tab[N_TABLES-1].c_out;

  // finalise
  action_set_t fin_a;
  logic        fin_full;
  always_comb begin
    fin_a    = ctx_last.aset;
    fin_full = 1'b0;
    if (!fin_a.to_ctrl && !fin_a.out_en) fin_a.drop = 1'b1;
    if (ctx_last.meta.malicious) fin_a.drop = 1'b1;
    if (fin_a.to_ctrl && !fin_a.drop && buf_full) begin
      fin_a.drop = 1'b1;
      fin_full   = 1'b1;
    end
    if (fin_a.drop) begin fin_a.to_ctrl = 1'b0; fin_a.out_en = 1'b0; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0; res <= '0; drop_full_event <= 1'b0;
    end else begin
      res_valid       <= ctx_last.valid;
      drop_full_event <= ctx_last.valid && fin_full;
      res <= '{aset: fin_a, meta: ctx_last.meta, table_id: ctx_last.table_id, reason: ctx_last.reason};
    end
  end

  // pipeline handler: one command at a time, answer when the table is done
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fm_busy <= 1'b0; fm_done <= 1'b0; fm_ok <= 1'b0;
    end else begin
      fm_done <= 1'b0;
      if (fm_valid && fm_ready) begin
        if (sel_ok) fm_busy <= 1'b1;
        else begin fm_done <= 1'b1; fm_ok <= 1'b0; end
      end else if (fm_busy && |t_cmd_done) begin
        fm_busy <= 1'b0; fm_done <= 1'b1; fm_ok <= |(t_cmd_done & t_cmd_ok);
      end
    end
  end

  always_comb begin
    st_entry_valid = 1'b0; st_pkts = '0; st_bytes = '0; st_dur = '0; st_prio = '0;
    for (int i = 0; i < N_TABLES; i++) begin
      if (int'(st_table) == i) begin
        st_entry_valid = st_ev[i]; st_pkts = st_p[i]; st_bytes = st_b[i];
        st_dur = st_d[i]; st_prio = st_pr[i];
      end
    end
  end

endmodule
