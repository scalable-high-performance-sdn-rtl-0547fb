// flow_table: one OpenFlow flow table (CAM or TCAM) with its counters.
//
// Lookup path (one tuple per cycle, four cycles of latency):
//   cycle 1-2  ram_cam reads its RAMs and ANDs the rows into a match vector;
//   cycle 3    the priority encoder picks, among the matching entries, the one
//              with the highest priority value (lowest slot on a tie), and the
//              per-flow packet and byte counters of that entry are updated;
//   cycle 4    the chosen slot addresses the instruction and action memory.
// The paper gives this chain (Fig. 5: DP-RAMs, combinational logic, priority
// encoder, instruction and action memory) and says that higher-priority
// entries are examined first; storing the priority per entry and comparing
// the values in the encoder is this design's way of doing that.
//
// Module controller: takes flow-mod commands one at a time. ADD places the
// entry in the lowest free slot, stores priority, match and instruction and
// starts the RAM walk in ram_cam (2^CHUNK_W cycles). DELETE_STRICT scans the
// slots, one per cycle, for an entry with the same match, mask and priority
// and erases it. TABLE_MOD sets the table-miss behaviour (config bit 0: send
// a miss to the controller, otherwise drop). cmd_done pulses with cmd_ok and
// the slot used. Lookups go on while a command runs.
//
// Statistics: per flow a packet count, a byte count and the install time
// (duration = now_sec - install time), read through st_slot with one cycle of
// latency; per table the active entries, lookups and matches. lk_use says
// whether a lookup belongs to a packet that is actually in this table (a
// packet that skipped the table by goto is looked up but not counted).
module flow_table
  import sdn_pkg::*;
#(
  parameter int          DEPTH    = 1024,
  parameter int          CHUNK_W  = 8,
  parameter bit          TERNARY  = 1'b0,
  localparam int         SW       = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  now_sec,
  // lookup
  input  logic         lk_valid,
  input  tuple_t       lk_key,
  input  logic [15:0]  lk_len,
  input  logic         lk_use,
  output logic         res_valid,
  output logic         res_hit,
  output logic [SW-1:0] res_slot,
  output instr_t       res_instr,
  output logic         miss_to_ctrl,
  // module controller
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  flow_mod_t    cmd,
  output logic         cmd_done,
  output logic         cmd_ok,
  output logic [SW-1:0] cmd_slot,
  // statistics
  input  logic [SW-1:0] st_slot,
  output logic         st_entry_valid,
  output logic [63:0]  st_pkts,
  output logic [63:0]  st_bytes,
  output logic [31:0]  st_dur,
  output logic [15:0]  st_prio,
  output logic [31:0]  active_count,
  output logic [63:0]  lookup_count,
  output logic [63:0]  matched_count
);
  // entry storage
  logic [15:0]   prio_mem  [DEPTH];
  tuple_t        key_mem   [DEPTH];
  tuple_t        mask_mem  [DEPTH];
  instr_t        instr_mem [DEPTH];
  logic [63:0]   pkt_cnt   [DEPTH];
  logic [63:0]   byte_cnt  [DEPTH];
  logic [31:0]   t_install [DEPTH];
  logic [DEPTH-1:0] entry_valid;

  // ---------------- lookup pipeline ----------------
  logic             mv_valid;
  logic [DEPTH-1:0] mv;
  logic [15:0]      len_d [3];
  logic             use_d [3];

  logic             cam_wr_start, cam_wr_set, cam_wr_busy, cam_wr_done;
  logic [SW-1:0]    cam_wr_slot;
  tuple_t           cam_wr_key, cam_wr_mask;

  ram_cam #(.KEY_W(TUPLE_W), .DEPTH(DEPTH), .CHUNK_W(CHUNK_W), .TERNARY(TERNARY)) u_cam (
    .clk, .rst_n,
    .lk_valid, .lk_key(lk_key),
    .match_valid(mv_valid), .match_vec(mv),
    .wr_start(cam_wr_start), .wr_slot(cam_wr_slot), .wr_key(cam_wr_key), .wr_mask(cam_wr_mask),
    .wr_set(cam_wr_set), .wr_busy(cam_wr_busy), .wr_done(cam_wr_done), .entry_valid(entry_valid)
  );

  // priority encoder: highest priority value, lowest slot on a tie
  logic          pe_hit;
  logic [SW-1:0] pe_slot;
  always_comb begin
    logic [15:0] best;
    pe_hit = 1'b0; pe_slot = '0; best = '0;
    for (int e = 0; e < DEPTH; e++) begin
      if (mv[e] && (!pe_hit || prio_mem[e] > best)) begin
        pe_hit = 1'b1; pe_slot = SW'(e); best = prio_mem[e];
      end
    end
  end

  logic          s3_valid, s3_hit;
  logic [SW-1:0] s3_slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) begin len_d[i] <= '0; use_d[i] <= 1'b0; end
      s3_valid <= 1'b0; s3_hit <= 1'b0; s3_slot <= '0;
      res_valid <= 1'b0; res_hit <= 1'b0; res_slot <= '0;
      lookup_count <= '0; matched_count <= '0;
    end else begin
      len_d[0] <= lk_len;   use_d[0] <= lk_use && lk_valid;
      len_d[1] <= len_d[0]; use_d[1] <= use_d[0];
      s3_valid <= mv_valid; s3_hit <= pe_hit; s3_slot <= pe_slot;
      len_d[2] <= len_d[1]; use_d[2] <= use_d[1] && mv_valid;
      res_valid <= s3_valid; res_hit <= s3_hit; res_slot <= s3_slot;
      if (s3_valid && use_d[2]) begin
        lookup_count <= lookup_count + 1;
        if (s3_hit) matched_count <= matched_count + 1;
      end
    end
  end

  // instruction and action memory read
  always_ff @(posedge clk) res_instr <= instr_mem[s3_slot];

  // ---------------- module controller ----------------
  typedef enum logic [1:0] {MC_IDLE, MC_SCAN, MC_WAIT} mc_e;
  mc_e           st;
  logic [SW-1:0] scan;
  flow_mod_t     c;

  logic          free_ok;
  logic [SW-1:0] free_slot;
  always_comb begin
    free_ok = 1'b0; free_slot = '0;
    for (int e = DEPTH - 1; e >= 0; e--) if (!entry_valid[e]) begin free_ok = 1'b1; free_slot = SW'(e); end
  end

  assign cmd_ready = (st == MC_IDLE) && !cam_wr_busy;

  logic scan_hit;
  assign scan_hit = entry_valid[scan] && prio_mem[scan] == c.prio &&
                    mask_mem[scan] == (TERNARY ? c.mask : '1) &&
                    (key_mem[scan] & mask_mem[scan]) == (c.key & mask_mem[scan]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= MC_IDLE; scan <= '0; c <= '0;
      cmd_done <= 1'b0; cmd_ok <= 1'b0; cmd_slot <= '0;
      cam_wr_start <= 1'b0; cam_wr_set <= 1'b0; cam_wr_slot <= '0; cam_wr_key <= '0; cam_wr_mask <= '0;
      miss_to_ctrl <= 1'b0; active_count <= '0;
    end else begin
      cmd_done <= 1'b0;
      cam_wr_start <= 1'b0;
      unique case (st)
        MC_IDLE: if (cmd_valid && cmd_ready) begin
          c <= cmd;
          unique case (cmd.op)
            FM_ADD: begin
              if (free_ok) begin
                cam_wr_start <= 1'b1; cam_wr_set <= 1'b1; cam_wr_slot <= free_slot;
                cam_wr_key <= cmd.key; cam_wr_mask <= TERNARY ? cmd.mask : '1;
                cmd_slot <= free_slot;
                st <= MC_WAIT;
              end else begin
                cmd_done <= 1'b1; cmd_ok <= 1'b0;
              end
            end
            FM_DELETE_STRICT: begin scan <= '0; st <= MC_SCAN; end
            FM_TABLE_MOD: begin
              miss_to_ctrl <= cmd.tbl_config[0];
              cmd_done <= 1'b1; cmd_ok <= 1'b1;
            end
            default: begin cmd_done <= 1'b1; cmd_ok <= 1'b0; end
          endcase
        end
        MC_SCAN: begin
          if (scan_hit) begin
            cam_wr_start <= 1'b1; cam_wr_set <= 1'b0; cam_wr_slot <= scan;
            cmd_slot <= scan;
            st <= MC_WAIT;
          end else if (scan == SW'(DEPTH - 1)) begin
            cmd_done <= 1'b1; cmd_ok <= 1'b0; st <= MC_IDLE;
          end else scan <= scan + 1'b1;
        end
        MC_WAIT: if (cam_wr_done) begin
          cmd_done <= 1'b1; cmd_ok <= 1'b1; st <= MC_IDLE;
          active_count <= (c.op == FM_ADD) ? active_count + 1 : active_count - 1;
        end
        default: st <= MC_IDLE;
      endcase
    end
  end

  // entry memories and per-flow counters
  always_ff @(posedge clk) begin
    if (st == MC_IDLE && cmd_valid && cmd_ready && cmd.op == FM_ADD && free_ok) begin
      prio_mem[free_slot]  <= cmd.prio;
      key_mem[free_slot]   <= cmd.key & (TERNARY ? cmd.mask : '1);
      mask_mem[free_slot]  <= TERNARY ? cmd.mask : '1;
      instr_mem[free_slot] <= cmd.instr;
      t_install[free_slot] <= now_sec;
    end
  end

  always_ff @(posedge clk) begin
    if (st == MC_IDLE && cmd_valid && cmd_ready && cmd.op == FM_ADD && free_ok) begin
      pkt_cnt[free_slot]  <= '0;
      byte_cnt[free_slot] <= '0;
    end else if (s3_valid && s3_hit && use_d[2]) begin
      pkt_cnt[s3_slot]  <= pkt_cnt[s3_slot] + 1;
      byte_cnt[s3_slot] <= byte_cnt[s3_slot] + 64'(len_d[2]);
    end
  end

  always_ff @(posedge clk) begin
    st_entry_valid <= entry_valid[st_slot];
    st_pkts  <= pkt_cnt[st_slot];
    st_bytes <= byte_cnt[st_slot];
    st_dur   <= now_sec - t_install[st_slot];
    st_prio  <= prio_mem[st_slot];
  end

endmodule
