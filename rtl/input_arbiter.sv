// input_arbiter: picks the next packet among the input buffers.
//
// When idle, the arbiter looks at every input buffer that holds at least one
// complete packet. Ports whose buffer is at least half full count as
// congested and are served first; within a class the choice is round-robin
// from the port after the last one served. This is how this design reads the
// paper's "considering the traffic of each input port"; the exact rule is its
// own. The chosen packet is then moved beat by beat into the packet buffer
// (pb_*), and its first HDR_BYTES bytes are gathered into a header copy that
// is handed to the parser in a one-cycle pulse (hdr_valid) together with the
// input port and the packet length.
//
// A packet is only started when the flow match unit's result queue has room:
// the arbiter holds one credit per result slot (CREDITS) and gets one back
// each time action execution consumes a result (credit_return).
// Timing: a new packet can start the cycle after the previous last beat.
//
// Lint note: rst_n is the asynchronous reset of the flops and also gates the
// assertions (disable iff). The linter reports that as SYNCASYNCNET; the
// assertions are not logic, so no flop uses rst_n synchronously.
module input_arbiter #(
  parameter int N_PORTS   = 8,
  parameter int DATA_W    = 512,
  parameter int HDR_BYTES = 128,
  parameter int LW        = 7,      // width of the buffers' level outputs
  parameter int BUF_DEPTH = 64,     // depth of the input buffers, beats
  parameter int CREDITS   = 16,
  localparam int NBW      = $clog2(DATA_W/8) + 1,
  localparam int PW       = (N_PORTS > 1) ? $clog2(N_PORTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // input buffers
  input  logic              in_valid   [N_PORTS],
  output logic              in_ready   [N_PORTS],
  input  logic [DATA_W-1:0] in_data    [N_PORTS],
  input  logic [NBW-1:0]    in_nbytes  [N_PORTS],
  input  logic              in_sop     [N_PORTS],
  input  logic              in_eop     [N_PORTS],
  input  logic              pkt_avail  [N_PORTS],
  input  logic [15:0]       head_len   [N_PORTS],
  input  logic [LW-1:0]     level      [N_PORTS],
  // packet buffer
  output logic              pb_valid,
  input  logic              pb_ready,
  output logic [DATA_W-1:0] pb_data,
  output logic [NBW-1:0]    pb_nbytes,
  output logic              pb_sop,
  output logic              pb_eop,
  // header copy to the parser
  output logic                   hdr_valid,
  output logic [HDR_BYTES*8-1:0] hdr_data,
  output logic [7:0]             hdr_port,
  output logic [15:0]            hdr_len,
  // flow control with action execution
  input  logic              credit_return,
  // traffic class of the last grant, for observation
  output logic              grant_congested
);
  localparam int HDR_BEATS = (HDR_BYTES + DATA_W/8 - 1) / (DATA_W/8);
  localparam int HW = HDR_BYTES * 8;
  localparam int CW = $clog2(CREDITS + 1);

  logic          busy, hdr_sent;
  logic [PW-1:0] cur, last;
  logic [15:0]   cur_len;
  logic [$clog2(HDR_BEATS+1)-1:0] hbeat;
  logic [HW-1:0] hdr_acc;
  logic [CW-1:0] credits;

  logic          pick_ok, pick_cong;
  logic [PW-1:0] pick;

  // round-robin search, congested ports first
  always_comb begin
    logic [PW:0] p;
    p = '0;
    pick_ok = 1'b0; pick = '0; pick_cong = 1'b0;
    for (int cls = 1; cls >= 0; cls--) begin
      for (int k = 1; k <= N_PORTS; k++) begin
        p = (PW+1)'(last) + (PW+1)'(k);
        if (p >= (PW+1)'(N_PORTS)) p = p - (PW+1)'(N_PORTS);
        if (!pick_ok && pkt_avail[p[PW-1:0]] &&
            ((cls == 0) || (int'(level[p[PW-1:0]]) >= BUF_DEPTH/2))) begin
          pick_ok = 1'b1; pick = p[PW-1:0]; pick_cong = (cls == 1);
        end
      end
    end
  end

  logic take;
  assign take = busy && in_valid[cur] && pb_ready;

  always_comb begin
    for (int i = 0; i < N_PORTS; i++) in_ready[i] = busy && (PW'(i) == cur) && pb_ready;
    pb_valid  = busy && in_valid[cur];
    pb_data   = in_data[cur];
    pb_nbytes = in_nbytes[cur];
    pb_sop    = in_sop[cur];
    pb_eop    = in_eop[cur];
  end

  // header word with the current beat placed at its position
  logic [HW-1:0] hdr_next;
  always_comb begin
    hdr_next = hdr_acc;
    for (int b = 0; b < HDR_BEATS; b++) begin
      if (int'(hbeat) == b) begin
        for (int i = 0; i < DATA_W/8; i++) begin
          if (b*(DATA_W/8) + i < HDR_BYTES)
            hdr_next[8*(b*(DATA_W/8)+i) +: 8] = (i < int'(in_nbytes[cur])) ? in_data[cur][8*i +: 8] : 8'h00;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; last <= PW'(N_PORTS - 1); cur_len <= '0;
      hbeat <= '0; hdr_acc <= '0; hdr_sent <= 1'b0;
      hdr_valid <= 1'b0; hdr_data <= '0; hdr_port <= '0; hdr_len <= '0;
      credits <= CW'(CREDITS); grant_congested <= 1'b0;
    end else begin
      hdr_valid <= 1'b0;
      if (!busy) begin
        if (pick_ok && credits != '0) begin
          busy <= 1'b1; cur <= pick; last <= pick; cur_len <= head_len[pick];
          hbeat <= '0; hdr_acc <= '0; hdr_sent <= 1'b0;
          grant_congested <= pick_cong;
        end
      end else if (take) begin
        if (!hdr_sent) begin
          hdr_acc <= hdr_next;
          hbeat   <= hbeat + 1'b1;
          if (int'(hbeat) == HDR_BEATS - 1 || in_eop[cur]) begin
            hdr_sent  <= 1'b1;
            hdr_valid <= 1'b1;
            hdr_data  <= hdr_next;
            hdr_port  <= 8'(cur);
            hdr_len   <= cur_len;
          end
        end
        if (in_eop[cur]) busy <= 1'b0;
      end
      // one credit per packet started, one back per result consumed
      credits <= credits - CW'(!busy && pick_ok && credits != '0) + CW'(credit_return);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) credits <= CW'(CREDITS));

endmodule
