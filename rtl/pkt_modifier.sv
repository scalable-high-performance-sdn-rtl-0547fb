// pkt_modifier: the packet modification unit of action execution.
//
// Applies the header actions of a packet's action set while the packet
// streams through, one beat per cycle:
//   in place (first beat): set Ethernet destination, set the VLAN id of the
//     outer tag, decrement the IPv4 TTL (with an incremental RFC 1624 update
//     of the header checksum) or the IPv6 hop limit;
//   length-changing (one per packet, in this order of preference): pop the
//     outer VLAN tag, push a VLAN tag (TPID 0x8100, id from set-VLAN-id or the
//     old outer tag), pop the top MPLS label (the last pop restores the
//     EtherType given with the action), push an MPLS label (TTL 64, TC 0).
// The paper lists these action kinds; the header layout comes from the
// Ethernet/IEEE 802.1Q/MPLS/IP standards; the one-length-change rule, the
// field values of pushed tags and the gearbox are this design's choices.
//
// A push or pop inserts or removes four bytes in the first beat. The beats
// then pass through a byte gearbox (a shift buffer of 2*DATA_W/8+8 bytes with
// a fill level) that re-packs the stream into full beats, so throughput stays
// one beat per cycle and a push can add one beat at the end. Only one packet
// is inside at a time: a new packet is accepted after the last beat of the
// previous one has left (one idle cycle between packets).
//
// Interface: in_* beats with the packet's action set, metadata and a sideband
// tag (the output port) valid with the first beat; out_* beats, out_tag held
// for the whole packet.
module pkt_modifier
  import sdn_pkg::*;
#(
  parameter int DATA_W = 512,
  parameter int TAG_W  = 8,
  localparam int NBW   = $clog2(DATA_W/8) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  input  logic [NBW-1:0]    in_nbytes,
  input  logic              in_sop,
  input  logic              in_eop,
  input  action_set_t       in_aset,
  input  meta_t             in_meta,
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic [NBW-1:0]    out_nbytes,
  output logic              out_sop,
  output logic              out_eop,
  output logic [TAG_W-1:0]  out_tag
);
  localparam int B   = DATA_W / 8;
  localparam int CAP = 2 * B + 8;
  localparam int XW  = DATA_W + 32;
  localparam int LW  = $clog2(CAP + 1);

  // ---------------- first-beat edits ----------------
  function automatic logic [XW-1:0] lowmask(int nbytes);
    logic [XW-1:0] m = '0;
    for (int i = 0; i < XW/8; i++) if (i < nbytes) m[8*i +: 8] = 8'hFF;
    return m;
  endfunction

  logic [XW-1:0] beat_x;     // edited beat, up to B+4 bytes
  int            beat_n;

  always_comb begin
    logic [DATA_W-1:0] d;
    logic [XW-1:0]     dx, ins;
    int                l3, mo, x;
    logic [15:0]       hc, m_old, m_new;
    logic [16:0]       sum;
    logic [7:0]        ttl;
    logic [11:0]       old_vid;
    logic [2:0]        old_pcp;
    logic              do_ins, do_rem;
    logic [11:0]       nv;
    logic [31:0]       lse;
    d = in_data;
    ttl = '0; m_old = '0; m_new = '0; hc = '0; sum = '0; nv = '0; lse = '0; dx = '0;
    beat_n = int'(in_nbytes);
    l3 = int'(in_meta.l3_off);
    mo = 14 + 4 * int'(in_meta.n_vlan);           // first MPLS label
    old_vid = {d[8*14 +: 4], d[8*15 +: 8]};
    old_pcp = d[8*14 + 5 +: 3];
    do_ins = 1'b0; do_rem = 1'b0; x = 12; ins = '0;
    if (in_sop) begin
      if (in_aset.set_eth_dst)
        for (int i = 0; i < 6; i++) d[8*i +: 8] = in_aset.eth_dst[8*(5-i) +: 8];
      if (in_aset.set_vid && in_meta.n_vlan != 2'd0) begin
        d[8*14 +: 4] = in_aset.vid[11:8];
        d[8*15 +: 8] = in_aset.vid[7:0];
      end
      if (in_aset.dec_ttl && in_meta.l3_type == L3_IPV4 && l3 + 12 <= B) begin
        ttl = d[8*(l3+8) +: 8];
        if (ttl != 8'd0) begin
          m_old = {ttl, d[8*(l3+9) +: 8]};
          m_new = {ttl - 8'd1, d[8*(l3+9) +: 8]};
          hc    = {d[8*(l3+10) +: 8], d[8*(l3+11) +: 8]};
          // RFC 1624: HC' = ~(~HC + ~m + m')
          sum = 17'(~hc) + 17'(~m_old);
          sum = 17'(sum[15:0]) + 17'(sum[16]);
          sum = 17'(sum[15:0]) + 17'(m_new);
          sum = 17'(sum[15:0]) + 17'(sum[16]);
          hc  = ~sum[15:0];
          d[8*(l3+8) +: 8]  = ttl - 8'd1;
          d[8*(l3+10) +: 8] = hc[15:8];
          d[8*(l3+11) +: 8] = hc[7:0];
        end
      end else if (in_aset.dec_ttl && in_meta.l3_type == L3_IPV6 && l3 + 8 <= B) begin
        if (d[8*(l3+7) +: 8] != 8'd0) d[8*(l3+7) +: 8] = d[8*(l3+7) +: 8] - 8'd1;
      end
      // one length change
      if (in_aset.pop_vlan && in_meta.n_vlan != 2'd0) begin
        do_rem = 1'b1; x = 12;
      end else if (in_aset.push_vlan) begin
        nv = in_aset.set_vid ? in_aset.vid : ((in_meta.n_vlan != 2'd0) ? old_vid : 12'd0);
        do_ins = 1'b1; x = 12;
        ins[7:0] = 8'h81; ins[15:8] = 8'h00;
        ins[23:16] = {((in_meta.n_vlan != 2'd0) ? old_pcp : 3'd0), 1'b0, nv[11:8]};
        ins[31:24] = nv[7:0];
      end else if (in_aset.pop_mpls && in_meta.n_mpls != 3'd0 && mo + 4 <= B) begin
        do_rem = 1'b1; x = mo;
        if (in_meta.n_mpls == 3'd1) begin
          d[8*(mo-2) +: 8] = in_aset.pop_ethertype[15:8];
          d[8*(mo-1) +: 8] = in_aset.pop_ethertype[7:0];
        end
      end else if (in_aset.push_mpls && mo + 4 <= B) begin
        lse = {in_aset.mpls_label, 3'd0, (in_meta.n_mpls == 3'd0), 8'd64};
        do_ins = 1'b1; x = mo;
        d[8*(mo-2) +: 8] = 8'h88;
        d[8*(mo-1) +: 8] = 8'h47;
        ins[7:0] = lse[31:24]; ins[15:8] = lse[23:16]; ins[23:16] = lse[15:8]; ins[31:24] = lse[7:0];
      end
    end
    dx = XW'(d);
    if (do_ins) begin
      beat_x = (dx & lowmask(x)) | (ins << (8 * x)) | ((dx & ~lowmask(x)) << 32);
      beat_n = beat_n + 4;
    end else if (do_rem) begin
      beat_x = (dx & lowmask(x)) | ((dx >> 32) & ~lowmask(x));
      beat_n = beat_n - 4;
    end else begin
      beat_x = dx;
    end
    beat_x = beat_x & lowmask(beat_n);    // bytes past the end are zero
  end

  // ---------------- gearbox ----------------
  logic [8*CAP-1:0] gb;
  logic [LW-1:0]    lvl;
  logic             eop_seen, first_out;
  int               emit_n, lvl_after;
  logic             emit, take;

  always_comb begin
    out_valid  = (int'(lvl) >= B) || (eop_seen && lvl != '0);
    emit_n     = (int'(lvl) >= B) ? B : int'(lvl);
    out_data   = gb[DATA_W-1:0];
    out_nbytes = NBW'(emit_n);
    out_sop    = first_out;
    out_eop    = eop_seen && int'(lvl) <= B;
    emit       = out_valid && out_ready;
    lvl_after  = int'(lvl) - (emit ? emit_n : 0);
    in_ready   = !eop_seen && (lvl_after + B + 4 <= CAP);
    take       = in_valid && in_ready;
  end

  // next gearbox contents: drop the emitted beat, append the taken one
  logic [8*CAP-1:0] gb_nx;
  always_comb begin
    gb_nx = emit ? (gb >> DATA_W) : gb;
    for (int i = 0; i < CAP; i++) if (i >= lvl_after) gb_nx[8*i +: 8] = 8'h00;
    if (take) gb_nx = gb_nx | ((8*CAP)'(beat_x) << (8 * lvl_after));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gb <= '0; lvl <= '0; eop_seen <= 1'b0; first_out <= 1'b1; out_tag <= '0;
    end else begin
      if (take) begin
        if (in_sop) out_tag <= in_tag;
        if (in_eop) eop_seen <= 1'b1;
      end
      gb  <= gb_nx;
      lvl <= LW'(lvl_after + (take ? beat_n : 0));
      if (emit) first_out <= out_eop;
      if (emit && out_eop) eop_seen <= 1'b0;
    end
  end

endmodule
