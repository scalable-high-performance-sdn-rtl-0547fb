// action_execution: action set decoder, internal packet buffers, packet
// modification unit and output de-mux.
//
// Packets arrive in order from the packet buffer, and their action sets in
// the same order from the flow match unit. For each packet the action set
// decoder takes one result and chooses:
//   drop        the packet's beats are read and discarded;
//   controller  the packet is copied into a free slot of the internal packet
//               buffers and a packet-in request (buffer id = slot, length,
//               reason, table, input port) goes to the OpenFlow agent;
//   forward     the packet streams through pkt_modifier and the de-mux into
//               the output queue of its port.
// A packet-out from the agent names a buffer id and an output port (or no
// output, meaning drop); the buffered packet is then replayed through the
// modifier to that port, and the slot is freed. Packet-outs are served
// between pipeline packets and take precedence over them.
//
// buf_full tells the flow match unit that no slot is free, so that it turns
// a send-to-controller into a drop, as the paper describes. A result that
// still asks for the controller when no slot is free (it was decided before
// the buffers filled) is dropped here and counted in drop_full.
// credit_return pulses once per result taken, for the arbiter's flow control.
//
// Slot count and size, and the packet-in contents (no packet data) are this
// design's choices. The buffers are read combinationally, as LUT RAM.
module action_execution
  import sdn_pkg::*;
#(
  parameter int DATA_W  = 512,
  parameter int N_PORTS = 8,
  parameter int N_BUF   = 16,
  parameter int MAX_PKT = 1536,
  localparam int NBW    = $clog2(DATA_W/8) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // packet buffer
  input  logic              pb_valid,
  output logic              pb_ready,
  input  logic [DATA_W-1:0] pb_data,
  input  logic [NBW-1:0]    pb_nbytes,
  input  logic              pb_sop,
  input  logic              pb_eop,
  // flow match results
  input  logic              res_valid,
  output logic              res_ready,
  input  fmu_result_t       res,
  output logic              credit_return,
  output logic              buf_full,
  // OpenFlow agent
  output logic              pin_valid,
  input  logic              pin_ready,
  output pkt_in_t           pin,
  input  logic              po_valid,
  output logic              po_ready,
  input  pkt_out_t          po,
  // output queues
  output logic              oq_valid  [N_PORTS],
  input  logic              oq_ready  [N_PORTS],
  output logic [DATA_W-1:0] oq_data   [N_PORTS],
  output logic [NBW-1:0]    oq_nbytes [N_PORTS],
  output logic              oq_sop    [N_PORTS],
  output logic              oq_eop    [N_PORTS],
  // counters
  output logic [63:0]       cnt_fwd,
  output logic [63:0]       cnt_drop,
  output logic [63:0]       cnt_to_ctrl,
  output logic [63:0]       cnt_pkt_out,
  output logic [63:0]       drop_full
);
  localparam int MB  = (MAX_PKT + DATA_W/8 - 1) / (DATA_W/8);
  localparam int BW  = $clog2(N_BUF);
  localparam int MBW = $clog2(MB + 1);

  // internal packet buffers
  logic [DATA_W-1:0] bmem  [N_BUF][MB];
  logic [NBW-1:0]    blast [N_BUF];       // bytes in the last beat
  logic [MBW-1:0]    bbeats[N_BUF];
  logic [N_BUF-1:0]  bused;

  typedef enum logic [2:0] {S_IDLE, S_DISCARD, S_STORE, S_PIN, S_FWD, S_REPLAY} st_e;
  st_e            st;
  fmu_result_t    cur;
  logic [BW-1:0]  slot;
  logic [MBW-1:0] beat;
  logic [7:0]     rport;
  logic           rdrop;

  logic          free_ok;
  logic [BW-1:0] free_slot;
  always_comb begin
    free_ok = 1'b0; free_slot = '0;
    for (int i = N_BUF - 1; i >= 0; i--) if (!bused[i]) begin free_ok = 1'b1; free_slot = BW'(i); end
  end
  assign buf_full = !free_ok;

  logic po_hit;
  assign po_hit = po.buffer_id < 32'(N_BUF) && bused[po.buffer_id[BW-1:0]];

  // modifier input
  logic              m_in_valid, m_in_ready, m_in_sop, m_in_eop;
  logic [DATA_W-1:0] m_in_data;
  logic [NBW-1:0]    m_in_nbytes;
  action_set_t       m_aset;
  meta_t             m_meta;
  logic [7:0]        m_tag;

  always_comb begin
    m_in_valid = 1'b0; m_in_data = pb_data; m_in_nbytes = pb_nbytes; m_in_sop = pb_sop; m_in_eop = pb_eop;
    m_aset = cur.aset; m_meta = cur.meta; m_tag = cur.aset.out_port;
    pb_ready = 1'b0;
    unique case (st)
      S_DISCARD: pb_ready = 1'b1;
      S_STORE:   pb_ready = 1'b1;
      S_FWD: begin
        m_in_valid = pb_valid;
        pb_ready   = m_in_ready;
      end
      S_REPLAY: begin
        m_in_valid  = !rdrop;
        m_in_data   = bmem[slot][beat];
        m_in_sop    = (beat == '0);
        m_in_eop    = (beat == bbeats[slot] - 1'b1);
        m_in_nbytes = m_in_eop ? blast[slot] : NBW'(DATA_W/8);
        m_aset      = '0;
        m_tag       = rport;
      end
      default: ;
    endcase
  end

  logic res_take;
  assign res_take  = (st == S_IDLE) && !po_valid && res_valid && pb_valid && pb_sop;
  assign res_ready = res_take;
  assign po_ready  = (st == S_IDLE) && po_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; slot <= '0; beat <= '0; rport <= '0; rdrop <= 1'b0;
      bused <= '0; pin_valid <= 1'b0; pin <= '0; credit_return <= 1'b0;
      cnt_fwd <= '0; cnt_drop <= '0; cnt_to_ctrl <= '0; cnt_pkt_out <= '0; drop_full <= '0;
    end else begin
      credit_return <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (po_valid) begin
            cnt_pkt_out <= cnt_pkt_out + 1;
            if (po_hit) begin
              slot <= po.buffer_id[BW-1:0]; beat <= '0; rport <= po.out_port; rdrop <= po.drop;
              st <= S_REPLAY;
            end
          end else if (res_take) begin
            cur <= res;
            credit_return <= 1'b1;
            if (res.aset.drop || (!res.aset.to_ctrl && !res.aset.out_en)) begin
              cnt_drop <= cnt_drop + 1; st <= S_DISCARD;
            end else if (res.aset.to_ctrl) begin
              if (free_ok) begin
                slot <= free_slot; beat <= '0; bused[free_slot] <= 1'b1;
                cnt_to_ctrl <= cnt_to_ctrl + 1; st <= S_STORE;
              end else begin
                drop_full <= drop_full + 1; cnt_drop <= cnt_drop + 1; st <= S_DISCARD;
              end
            end else begin
              cnt_fwd <= cnt_fwd + 1; st <= S_FWD;
            end
          end
        end
        S_DISCARD: if (pb_valid && pb_eop) st <= S_IDLE;
        S_STORE: if (pb_valid) begin
          if (beat != MBW'(MB)) beat <= beat + 1'b1;
          if (pb_eop) begin
            bbeats[slot] <= (beat != MBW'(MB)) ? beat + 1'b1 : beat;
            blast[slot]  <= pb_nbytes;
            pin_valid <= 1'b1;
            pin <= '{buffer_id: 32'(slot), total_len: cur.meta.pkt_len, reason: cur.reason,
                     table_id: cur.table_id, in_port: cur.meta.in_port};
            st <= S_PIN;
          end
        end
        S_PIN: if (pin_ready) begin pin_valid <= 1'b0; st <= S_IDLE; end
        S_FWD: if (pb_valid && m_in_ready && pb_eop) st <= S_IDLE;
        S_REPLAY: if (rdrop || m_in_ready) begin
          if (m_in_eop || rdrop) begin
            bused[slot] <= 1'b0; st <= S_IDLE;
          end else beat <= beat + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_STORE && pb_valid && beat != MBW'(MB)) bmem[slot][beat[$clog2(MB)-1:0]] <= pb_data;
  end

  // packet modification unit
  logic              m_out_valid, m_out_ready, m_out_sop, m_out_eop;
  logic [DATA_W-1:0] m_out_data;
  logic [NBW-1:0]    m_out_nbytes;
  logic [7:0]        m_out_tag;

  pkt_modifier #(.DATA_W(DATA_W), .TAG_W(8)) u_mod (
    .clk, .rst_n,
    .in_valid(m_in_valid), .in_ready(m_in_ready), .in_data(m_in_data), .in_nbytes(m_in_nbytes),
    .in_sop(m_in_sop), .in_eop(m_in_eop), .in_aset(m_aset), .in_meta(m_meta), .in_tag(m_tag),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_data(m_out_data), .out_nbytes(m_out_nbytes),
    .out_sop(m_out_sop), .out_eop(m_out_eop), .out_tag(m_out_tag)
  );

  // de-mux to the output queues; a port number past the last port discards
  always_comb begin
    m_out_ready = (int'(m_out_tag) >= N_PORTS);
    for (int i = 0; i < N_PORTS; i++) begin
      oq_valid[i]  = m_out_valid && (int'(m_out_tag) == i);
      oq_data[i]   = m_out_data;
      oq_nbytes[i] = m_out_nbytes;
      oq_sop[i]    = m_out_sop;
      oq_eop[i]    = m_out_eop;
      if (int'(m_out_tag) == i) m_out_ready = oq_ready[i];
    end
  end

endmodule
