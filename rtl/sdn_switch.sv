// sdn_switch: OpenFlow switch fabric, top level.
//
// Packets from N_PORTS Ethernet MACs are queued per port (input_buffer). The
// input arbiter picks one packet at a time, weighing each port's backlog,
// and moves it into the shared packet buffer while a copy of its first
// HDR_BYTES bytes goes to the parser. The parser builds the match tuple in
// one cycle; the flow match unit runs it through the flow table pipeline
// (TCAM and CAM tables linked by goto-table) and queues one action set per
// packet. Action execution pairs each action set with its packet from the
// packet buffer: it drops it, keeps it in its internal buffers and asks the
// OpenFlow agent to send a packet-in, or modifies it and hands it to the
// output queue of its port. The OpenFlow agent, on an 8-byte-wide channel to
// the controller, installs flow entries, answers statistics and
// configuration requests, and turns packet-in and packet-out messages into
// hand-offs with action execution.
//
// The structure follows Fig. 1 of the paper; the data width and port count
// default to its 512-bit, 8 x 10G instance (Table I), the table depth to 1K
// entries (Sec. IV). The number of flow tables (N_TABLES, table 0 a TCAM,
// the others CAMs), the header window, buffer depths and the flow control
// between arbiter and action execution are this design's choices.
//
// Interface: per port a MAC receive stream (no back-pressure; byte i of a
// beat in bits [8i+7:8i], nbytes valid bytes, sop/eop) and a MAC transmit
// stream with tx_ready; the 64-bit controller channel in both directions
// with a last-word mark. One clock (160 MHz in the paper), active-low
// asynchronous reset. now_sec counts seconds of CLK_MHZ cycles for flow
// durations.
//
// Lint note: rst_n is the asynchronous reset of the flops and also gates the
// assertions (disable iff). The linter reports that as SYNCASYNCNET; the
// assertions are not logic, so no flop uses rst_n synchronously.
module sdn_switch
  import sdn_pkg::*;
#(
  parameter int DATA_W    = 512,
  parameter int N_PORTS   = 8,
  parameter int N_TABLES  = 2,
  parameter int DEPTH     = 1024,
  parameter int HDR_BYTES = 128,
  parameter int IN_DEPTH  = 64,
  parameter int PB_DEPTH  = 128,
  parameter int OQ_DEPTH  = 64,
  parameter int N_BUF     = 16,
  parameter int CREDITS   = 16,
  parameter int CLK_MHZ   = 160,
  localparam int NBW      = $clog2(DATA_W/8) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // MAC receive
  input  logic              rx_valid  [N_PORTS],
  input  logic [DATA_W-1:0] rx_data   [N_PORTS],
  input  logic [NBW-1:0]    rx_nbytes [N_PORTS],
  input  logic              rx_sop    [N_PORTS],
  input  logic              rx_eop    [N_PORTS],
  // MAC transmit
  output logic              tx_valid  [N_PORTS],
  input  logic              tx_ready  [N_PORTS],
  output logic [DATA_W-1:0] tx_data   [N_PORTS],
  output logic [NBW-1:0]    tx_nbytes [N_PORTS],
  output logic              tx_sop    [N_PORTS],
  output logic              tx_eop    [N_PORTS],
  // controller channel
  input  logic              c_in_valid,
  output logic              c_in_ready,
  input  logic [63:0]       c_in_data,
  input  logic              c_in_last,
  output logic              c_out_valid,
  input  logic              c_out_ready,
  output logic [63:0]       c_out_data,
  output logic              c_out_last,
  // event counters
  output logic [63:0]       cnt_fwd,
  output logic [63:0]       cnt_drop,
  output logic [63:0]       cnt_to_ctrl,
  output logic [63:0]       cnt_pkt_out,
  output logic [63:0]       cnt_drop_full,     // controller-bound packets dropped, buffers full
  output logic [63:0]       cnt_drop_late,     // same, caught in action execution
  output logic [63:0]       cnt_congested_grants
);
  localparam int ILW = $clog2(IN_DEPTH + 1);
  localparam int SW  = $clog2(DEPTH);

  // ---------------- time base ----------------
  logic [31:0] now_sec, tick;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin now_sec <= '0; tick <= '0; end
    else if (tick == 32'(CLK_MHZ * 1_000_000 - 1)) begin tick <= '0; now_sec <= now_sec + 1; end
    else tick <= tick + 1;
  end

  // ---------------- input buffers ----------------
  logic              ib_valid [N_PORTS], ib_ready [N_PORTS], ib_sop [N_PORTS], ib_eop [N_PORTS];
  logic [DATA_W-1:0] ib_data  [N_PORTS];
  logic [NBW-1:0]    ib_nbytes[N_PORTS];
  logic              ib_avail [N_PORTS];
  logic [15:0]       ib_len   [N_PORTS];
  logic [ILW-1:0]    ib_level [N_PORTS];
  logic [63:0]       rx_packets [N_PORTS], rx_bytes [N_PORTS], rx_dropped [N_PORTS];

  for (genvar p = 0; p < N_PORTS; p++) begin : g_in
    input_buffer #(.DATA_W(DATA_W), .DEPTH(IN_DEPTH)) u_ib (
      .clk, .rst_n,
      .rx_valid(rx_valid[p]), .rx_data(rx_data[p]), .rx_nbytes(rx_nbytes[p]),
      .rx_sop(rx_sop[p]), .rx_eop(rx_eop[p]),
      .out_valid(ib_valid[p]), .out_ready(ib_ready[p]), .out_data(ib_data[p]),
      .out_nbytes(ib_nbytes[p]), .out_sop(ib_sop[p]), .out_eop(ib_eop[p]),
      .pkt_avail(ib_avail[p]), .head_len(ib_len[p]), .level(ib_level[p]),
      .rx_packets(rx_packets[p]), .rx_bytes(rx_bytes[p]), .rx_dropped(rx_dropped[p])
    );
  end

  // ---------------- arbiter and packet buffer ----------------
  logic              pbi_valid, pbi_ready, pbi_sop, pbi_eop;
  logic [DATA_W-1:0] pbi_data;
  logic [NBW-1:0]    pbi_nbytes;
  logic                   hdr_valid;
  logic [HDR_BYTES*8-1:0] hdr_data;
  logic [7:0]             hdr_port;
  logic [15:0]            hdr_len;
  logic                   credit_return, grant_cong;

  input_arbiter #(
    .N_PORTS(N_PORTS), .DATA_W(DATA_W), .HDR_BYTES(HDR_BYTES), .LW(ILW),
    .BUF_DEPTH(IN_DEPTH), .CREDITS(CREDITS)
  ) u_arb (
    .clk, .rst_n,
    .in_valid(ib_valid), .in_ready(ib_ready), .in_data(ib_data), .in_nbytes(ib_nbytes),
    .in_sop(ib_sop), .in_eop(ib_eop), .pkt_avail(ib_avail), .head_len(ib_len), .level(ib_level),
    .pb_valid(pbi_valid), .pb_ready(pbi_ready), .pb_data(pbi_data), .pb_nbytes(pbi_nbytes),
    .pb_sop(pbi_sop), .pb_eop(pbi_eop),
    .hdr_valid, .hdr_data, .hdr_port, .hdr_len,
    .credit_return, .grant_congested(grant_cong)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_congested_grants <= '0;
    else if (pbi_valid && pbi_ready && pbi_sop && grant_cong) cnt_congested_grants <= cnt_congested_grants + 1;
  end

  logic              pb_valid, pb_ready, pb_sop, pb_eop;
  logic [DATA_W-1:0] pb_data;
  logic [NBW-1:0]    pb_nbytes;
  pkt_fifo #(.W(DATA_W), .DEPTH(PB_DEPTH)) u_pb (
    .clk, .rst_n,
    .in_valid(pbi_valid), .in_ready(pbi_ready), .in_data(pbi_data), .in_nbytes(pbi_nbytes),
    .in_sop(pbi_sop), .in_eop(pbi_eop),
    .out_valid(pb_valid), .out_ready(pb_ready), .out_data(pb_data), .out_nbytes(pb_nbytes),
    .out_sop(pb_sop), .out_eop(pb_eop), .level(), .pkts()
  );

  // ---------------- parser and flow match unit ----------------
  logic   p_valid;
  tuple_t p_tuple;
  meta_t  p_meta;
  parser #(.HDR_BYTES(HDR_BYTES)) u_parser (
    .clk, .rst_n, .in_valid(hdr_valid), .hdr(hdr_data), .in_port(hdr_port), .pkt_len(hdr_len),
    .out_valid(p_valid), .out_tuple(p_tuple), .out_meta(p_meta)
  );

  logic        f_valid, buf_full;
  fmu_result_t f_res;
  logic        fm_valid, fm_ready, fm_done, fm_ok;
  flow_mod_t   fm;
  logic [7:0]  st_table;
  logic [SW-1:0] st_slot;
  logic        st_entry_valid;
  logic [63:0] st_pkts, st_bytes;
  logic [31:0] st_dur;
  logic [31:0] tbl_active  [N_TABLES];
  logic [63:0] tbl_lookups [N_TABLES];
  logic [63:0] tbl_matches [N_TABLES];
  logic        drop_full_event;

  flow_match_unit #(.N_TABLES(N_TABLES), .DEPTH(DEPTH)) u_fmu (
    .clk, .rst_n, .now_sec,
    .in_valid(p_valid), .in_tuple(p_tuple), .in_meta(p_meta),
    .res_valid(f_valid), .res(f_res), .buf_full, .drop_full_event,
    .fm_valid, .fm_ready, .fm, .fm_done, .fm_ok,
    .st_table, .st_slot, .st_entry_valid, .st_pkts, .st_bytes, .st_dur, .st_prio(),
    .tbl_active, .tbl_lookups, .tbl_matches
  );

  // result queue; the arbiter's credits guarantee it never overflows
  localparam int RW = $bits(fmu_result_t);
  logic        r_valid, r_ready;
  logic [RW-1:0] r_bits;
  logic        rq_in_ready;
  pkt_fifo #(.W(RW), .DEPTH(CREDITS)) u_rq (
    .clk, .rst_n,
    .in_valid(f_valid), .in_ready(rq_in_ready), .in_data(f_res), .in_nbytes('0),
    .in_sop(1'b1), .in_eop(1'b1),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_bits), .out_nbytes(),
    .out_sop(), .out_eop(), .level(), .pkts()
  );
  assert property (@(posedge clk) disable iff (!rst_n) f_valid |-> rq_in_ready);

  // ---------------- action execution and output queues ----------------
  logic     pin_valid, pin_ready, po_valid, po_ready;
  pkt_in_t  pin;
  pkt_out_t po;
  logic              oq_valid [N_PORTS], oq_ready [N_PORTS], oq_sop [N_PORTS], oq_eop [N_PORTS];
  logic [DATA_W-1:0] oq_data  [N_PORTS];
  logic [NBW-1:0]    oq_nbytes[N_PORTS];

  action_execution #(.DATA_W(DATA_W), .N_PORTS(N_PORTS), .N_BUF(N_BUF)) u_ae (
    .clk, .rst_n,
    .pb_valid, .pb_ready, .pb_data, .pb_nbytes, .pb_sop, .pb_eop,
    .res_valid(r_valid), .res_ready(r_ready), .res(fmu_result_t'(r_bits)),
    .credit_return, .buf_full,
    .pin_valid, .pin_ready, .pin, .po_valid, .po_ready, .po,
    .oq_valid, .oq_ready, .oq_data, .oq_nbytes, .oq_sop, .oq_eop,
    .cnt_fwd, .cnt_drop, .cnt_to_ctrl, .cnt_pkt_out, .drop_full(cnt_drop_late)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_drop_full <= '0;
    else cnt_drop_full <= cnt_drop_full + 64'(drop_full_event);
  end

  logic [63:0] tx_packets [N_PORTS], tx_bytes [N_PORTS];
  for (genvar p = 0; p < N_PORTS; p++) begin : g_out
    pkt_fifo #(.W(DATA_W), .DEPTH(OQ_DEPTH)) u_oq (
      .clk, .rst_n,
      .in_valid(oq_valid[p]), .in_ready(oq_ready[p]), .in_data(oq_data[p]), .in_nbytes(oq_nbytes[p]),
      .in_sop(oq_sop[p]), .in_eop(oq_eop[p]),
      .out_valid(tx_valid[p]), .out_ready(tx_ready[p]), .out_data(tx_data[p]), .out_nbytes(tx_nbytes[p]),
      .out_sop(tx_sop[p]), .out_eop(tx_eop[p]), .level(), .pkts()
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin tx_packets[p] <= '0; tx_bytes[p] <= '0; end
      else if (tx_valid[p] && tx_ready[p]) begin
        tx_bytes[p] <= tx_bytes[p] + 64'(tx_nbytes[p]);
        if (tx_eop[p]) tx_packets[p] <= tx_packets[p] + 1;
      end
    end
  end

  // ---------------- OpenFlow agent ----------------
  of_agent #(.N_PORTS(N_PORTS), .N_TABLES(N_TABLES), .DEPTH(DEPTH), .N_BUF(N_BUF)) u_agent (
    .clk, .rst_n,
    .c_in_valid, .c_in_ready, .c_in_data, .c_in_last,
    .c_out_valid, .c_out_ready, .c_out_data, .c_out_last,
    .fm_valid, .fm_ready, .fm, .fm_done, .fm_ok,
    .st_table, .st_slot, .st_entry_valid, .st_pkts, .st_bytes, .st_dur,
    .tbl_active, .tbl_lookups, .tbl_matches,
    .po_valid, .po_ready, .po, .pin_valid, .pin_ready, .pin,
    .rx_packets, .rx_bytes, .rx_dropped, .tx_packets, .tx_bytes,
    .cfg_flags(), .miss_send_len(), .msg_count()
  );

endmodule
