// ram_cam: content-addressable memory built from dual-port RAMs.
//
// The key is cut into NCH chunks of CHUNK_W bits. Chunk c addresses its own
// RAM of 2^CHUNK_W words, and each word holds one bit per flow entry: bit e of
// word a is 1 when entry e accepts the value a in chunk c. A lookup reads one
// word from every RAM (the chunks of the key are the addresses) and ANDs the
// words: bit e of the result is 1 when entry e matches in every chunk. This
// is how the paper stores flow entries "as addresses of the RAMs"; the AND is
// its "complex combinational logic".
//
// Writing an entry walks all 2^CHUNK_W addresses on the second RAM port and
// writes the entry's bit in every RAM at once: in a ternary table (TERNARY=1)
// the bit is 1 wherever the address equals the key under the mask, so one
// entry covers all values its wildcard bits allow; in an exact-match table
// the mask is ignored. Hence lookups take one read while adding an entry
// takes 2^CHUNK_W cycles, as the paper says. Lookups continue during a write;
// the entry being written is disabled until its walk ends. A TCAM uses a
// narrower chunk than a CAM, so it has more, shallower RAMs (the paper notes
// that the TCAM has more DP-RAMs); the chunk widths are this design's choice.
//
// Interface: lk_valid/lk_key -> two cycles later match_valid/match_vec.
// wr_start (when !wr_busy) with wr_slot/wr_key/wr_mask/wr_set (0 erases);
// wr_done pulses when the walk ends.
module ram_cam #(
  parameter int KEY_W   = 464,
  parameter int DEPTH   = 1024,
  parameter int CHUNK_W = 8,
  parameter bit TERNARY = 1'b0,
  localparam int SW     = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [KEY_W-1:0] lk_key,
  output logic             match_valid,
  output logic [DEPTH-1:0] match_vec,
  input  logic             wr_start,
  input  logic [SW-1:0]    wr_slot,
  input  logic [KEY_W-1:0] wr_key,
  input  logic [KEY_W-1:0] wr_mask,
  input  logic             wr_set,
  output logic             wr_busy,
  output logic             wr_done,
  output logic [DEPTH-1:0] entry_valid
);
  localparam int NCH = (KEY_W + CHUNK_W - 1) / CHUNK_W;
  localparam int PW  = NCH * CHUNK_W;
  localparam int NA  = 1 << CHUNK_W;

  logic [DEPTH-1:0] ram [NCH][NA];
  logic [DEPTH-1:0] row [NCH];
  logic             rd_valid, busy;

  logic [PW-1:0]      lk_pad, wk, wm;
  logic [SW-1:0]      ws;
  logic               wset;
  logic [CHUNK_W-1:0] wa;

  assign lk_pad  = PW'(lk_key);
  assign wr_busy = busy || wr_done;

  // read port: one word per RAM
  always_ff @(posedge clk) begin
    for (int c = 0; c < NCH; c++) row[c] <= ram[c][lk_pad[c*CHUNK_W +: CHUNK_W]];
  end

  // write port: one address per cycle, the entry's bit in every RAM
  always_ff @(posedge clk) begin
    if (busy) begin
      for (int c = 0; c < NCH; c++) begin
        logic [CHUNK_W-1:0] k, m;
        k = wk[c*CHUNK_W +: CHUNK_W];
        m = TERNARY ? wm[c*CHUNK_W +: CHUNK_W] : '1;
        ram[c][wa][ws] <= wset && ((wa & m) == (k & m));
      end
    end
  end

  // AND of the rows
  logic [DEPTH-1:0] and_vec;
  always_comb begin
    and_vec = entry_valid;
    for (int c = 0; c < NCH; c++) and_vec &= row[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0; match_valid <= 1'b0; match_vec <= '0;
      busy <= 1'b0; wr_done <= 1'b0; wa <= '0; ws <= '0; wk <= '0; wm <= '0; wset <= 1'b0;
      entry_valid <= '0;
    end else begin
      rd_valid    <= lk_valid;
      match_valid <= rd_valid;
      match_vec   <= and_vec;
      wr_done     <= 1'b0;
      // the entry is enabled one cycle after its last RAM write, so no
      // lookup can combine a stale row with the new valid bit
      if (wr_done) entry_valid[ws] <= wset;
      if (wr_start && !wr_busy) begin
        busy <= 1'b1; wa <= '0; ws <= wr_slot; wset <= wr_set;
        wk <= PW'(wr_key);
        wm <= PW'(wr_mask);
        entry_valid[wr_slot] <= 1'b0;
      end else if (busy) begin
        wa <= wa + 1'b1;
        if (wa == CHUNK_W'(NA - 1)) begin
          busy <= 1'b0; wr_done <= 1'b1;
        end
      end
    end
  end

endmodule
