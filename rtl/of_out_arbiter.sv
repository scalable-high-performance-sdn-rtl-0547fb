// of_out_arbiter: message arbiter in front of the agent's output buffer.
//
// The agent's handlers queue their replies in buffers of their own, one
// buffer per class. The arbiter moves whole messages (start to end mark) from
// these buffers to the output buffer, choosing by fixed priority among the
// buffers that hold at least one complete message: input 0 first (packet-in),
// then 1 (statistics), 2 (switch information and configuration) and 3
// (channel setup, keep-alive and errors). The order is the paper's; moving
// whole messages without interleaving is required by the byte stream.
//
// Interface: per input a 64-bit beat stream and a request (in_req: the
// buffer holds a complete message, or is full with the start of a message
// longer than the buffer); one output stream. A message, once started, is
// moved at one word per cycle while the output accepts.
//
// Lint note: rst_n is the asynchronous reset of the flops and also gates the
// assertions (disable iff). The linter reports that as SYNCASYNCNET; the
// assertions are not logic, so no flop uses rst_n synchronously.
module of_out_arbiter #(
  parameter int N_IN = 4,
  parameter int W    = 64,
  localparam int IW  = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid [N_IN],
  output logic          in_ready [N_IN],
  input  logic [W-1:0]  in_data  [N_IN],
  input  logic          in_sop   [N_IN],
  input  logic          in_eop   [N_IN],
  input  logic          in_req   [N_IN],
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic          out_sop,
  output logic          out_eop,
  output logic [IW-1:0] grant
);
  logic          busy;
  logic [IW-1:0] cur;
  logic          pick_ok;
  logic [IW-1:0] pick;

  always_comb begin
    pick_ok = 1'b0; pick = '0;
    for (int i = N_IN - 1; i >= 0; i--) if (in_req[i]) begin pick_ok = 1'b1; pick = IW'(i); end
  end

  always_comb begin
    out_valid = busy && in_valid[cur];
    out_data  = in_data[cur];
    out_sop   = in_sop[cur];
    out_eop   = in_eop[cur];
    for (int i = 0; i < N_IN; i++) in_ready[i] = busy && (IW'(i) == cur) && out_ready;
  end

  assign grant = cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0;
    end else if (!busy) begin
      if (pick_ok) begin busy <= 1'b1; cur <= pick; end
    end else if (out_valid && out_ready && out_eop) begin
      busy <= 1'b0;
    end
  end

  // a granted buffer must begin with the first word of a message
  assert property (@(posedge clk) disable iff (!rst_n)
                   (busy && $rose(busy) && in_valid[cur]) |-> in_sop[cur]);

endmodule
