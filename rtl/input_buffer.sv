// input_buffer: per-port store-and-forward input queue.
//
// The MAC side writes beats without back-pressure. At the first beat of a
// packet the buffer checks that a maximum-size packet still fits; if not, the
// whole packet is dropped and counted, so the queue only ever holds complete
// packets. The length of every packet is pushed to a small side queue when
// its last beat is written, so the arbiter sees how many complete packets
// wait (pkt_avail), the length of the oldest one (head_len) and the fill
// level (level) when it weighs the ports' traffic. The paper names the input
// buffers and says the arbiter considers each port's traffic; the whole-packet
// drop rule, the depth and the counters' widths are this design's choice.
//
// Receive counters (rx_packets, rx_bytes, rx_dropped) feed the port statistics
// of the OpenFlow agent.
//
// Lint note: rst_n is the asynchronous reset of the flops and also gates the
// assertions (disable iff). The linter reports that as SYNCASYNCNET; the
// assertions are not logic, so no flop uses rst_n synchronously.
module input_buffer #(
  parameter int DATA_W   = 512,
  parameter int DEPTH    = 64,     // beats
  parameter int MAX_PKT  = 1536,   // bytes
  localparam int NBW     = $clog2(DATA_W/8) + 1,
  localparam int LW      = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // MAC side
  input  logic              rx_valid,
  input  logic [DATA_W-1:0] rx_data,
  input  logic [NBW-1:0]    rx_nbytes,
  input  logic              rx_sop,
  input  logic              rx_eop,
  // arbiter side
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic [NBW-1:0]    out_nbytes,
  output logic              out_sop,
  output logic              out_eop,
  output logic              pkt_avail,
  output logic [15:0]       head_len,
  output logic [LW-1:0]     level,
  // statistics
  output logic [63:0]       rx_packets,
  output logic [63:0]       rx_bytes,
  output logic [63:0]       rx_dropped
);
  localparam int MAX_BEATS = (MAX_PKT + DATA_W/8 - 1) / (DATA_W/8);
  localparam int AW = $clog2(DEPTH);

  logic          dropping, in_pkt, fifo_in_ready, wr;
  logic [15:0]   acc_len;
  logic [LW-1:0] pkts;
  logic [15:0]   lenq [DEPTH];
  logic [AW-1:0] lwp, lrp;
  logic          accept_sop;

  assign accept_sop = (LW'(DEPTH) - level) >= LW'(MAX_BEATS);
  // a beat is written when it belongs to an accepted packet
  assign wr = rx_valid && (rx_sop ? accept_sop : (in_pkt && !dropping));

  pkt_fifo #(.W(DATA_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(wr), .in_ready(fifo_in_ready), .in_data(rx_data), .in_nbytes(rx_nbytes),
    .in_sop(rx_sop), .in_eop(rx_eop),
    .out_valid, .out_ready, .out_data, .out_nbytes, .out_sop, .out_eop,
    .level, .pkts
  );

  assign pkt_avail = (pkts != '0);
  assign head_len  = lenq[lrp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dropping <= 1'b0; in_pkt <= 1'b0; acc_len <= '0;
      lwp <= '0; lrp <= '0;
      rx_packets <= '0; rx_bytes <= '0; rx_dropped <= '0;
    end else begin
      if (rx_valid) begin
        if (rx_sop) begin
          dropping <= !accept_sop;
          in_pkt   <= !rx_eop;
          acc_len  <= 16'(rx_nbytes);
          if (!accept_sop) rx_dropped <= rx_dropped + 1;
        end else begin
          acc_len <= acc_len + 16'(rx_nbytes);
          if (rx_eop) in_pkt <= 1'b0;
        end
        if (wr && rx_eop) begin
          lenq[lwp]  <= (rx_sop ? 16'(rx_nbytes) : acc_len + 16'(rx_nbytes));
          lwp        <= lwp + 1'b1;
          rx_packets <= rx_packets + 1;
          rx_bytes   <= rx_bytes + 64'(rx_sop ? 16'(rx_nbytes) : 16'(acc_len + 16'(rx_nbytes)));
        end
      end
      if (out_valid && out_ready && out_eop) lrp <= lrp + 1'b1;
    end
  end

  // the MAC never needs back-pressure: space is reserved at the first beat
  assert property (@(posedge clk) disable iff (!rst_n) wr |-> fifo_in_ready);

endmodule
