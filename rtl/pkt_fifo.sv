// pkt_fifo: synchronous first-word-fall-through FIFO of packet beats.
//
// Each entry is one beat of a packet: W data bits, the number of valid bytes
// in the beat, and start/end-of-packet marks. The switch uses it wherever the
// architecture has a packet queue: the packet buffer between the arbiter and
// action execution, the output queues, and the module-wise message buffers
// of the OpenFlow agent. The paper names these buffers; depth and the
// valid/ready handshake are this design's choice.
//
// Interface: in_valid/in_ready and out_valid/out_ready, a beat moves when
// both are high. out_* shows the oldest entry whenever out_valid is high.
// level counts stored beats, pkts counts stored complete packets (eop beats).
// Timing: a beat written in cycle t can be read in cycle t+1.
//
// Lint note: rst_n is the asynchronous reset of the flops and also gates the
// assertions (disable iff). The linter reports that as SYNCASYNCNET; the
// assertions are not logic, so no flop uses rst_n synchronously.
module pkt_fifo #(
  parameter int W     = 512,
  parameter int DEPTH = 64,
  localparam int NBW  = $clog2(W/8) + 1,
  localparam int LW   = $clog2(DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [W-1:0]   in_data,
  input  logic [NBW-1:0] in_nbytes,
  input  logic           in_sop,
  input  logic           in_eop,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [W-1:0]   out_data,
  output logic [NBW-1:0] out_nbytes,
  output logic           out_sop,
  output logic           out_eop,
  output logic [LW-1:0]  level,
  output logic [LW-1:0]  pkts
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]   mem_data [DEPTH];
  logic [NBW-1:0] mem_nb   [DEPTH];
  logic [1:0]     mem_flag [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic           push, pop;

  assign in_ready  = (level != LW'(DEPTH));
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  assign out_data   = mem_data[rp];
  assign out_nbytes = mem_nb[rp];
  assign out_sop    = mem_flag[rp][1];
  assign out_eop    = mem_flag[rp][0];

  always_ff @(posedge clk) begin
    if (push) begin
      mem_data[wp] <= in_data;
      mem_nb[wp]   <= in_nbytes;
      mem_flag[wp] <= {in_sop, in_eop};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0; pkts <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + LW'(push) - LW'(pop);
      pkts  <= pkts + LW'(push && in_eop) - LW'(pop && out_eop);
    end
  end

  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) level <= LW'(DEPTH);
  endproperty
  assert property (p_no_overflow);

endmodule
