// parser: single-cycle header extraction along the switch's parser graph.
//
// The parser works on a copy of the first HDR_BYTES bytes of a packet. As in
// the paper, it is not a pipeline with one stage per header: one block of
// combinational logic walks the whole graph in one clock cycle, and a
// register captures the result. Each header has its own identification and
// extraction step: identification reads the field that names the next header
// (EtherType, IPv4 protocol, IPv6 next header, MPLS bottom-of-stack), and the
// offset of the next header is either static (Ethernet, VLAN, MPLS, IPv6) or
// dynamic (IPv4, taken from the IHL field and applied with a shifter).
//
// Graph: Ethernet -> up to two VLAN tags -> up to four MPLS labels ->
// IPv4 / IPv6 / ARP -> ICMP, UDP, TCP (IPv4) or ICMPv6, UDP, TCP (IPv6).
// After the last MPLS label the first nibble of the payload selects IPv4 (4)
// or IPv6 (6); anything else ends parsing there.
//
// A packet whose headers contradict themselves is marked malicious so the flow
// match unit drops it: wrong IP version, IHL below 5, an MPLS stack with no
// bottom-of-stack within four labels, an IPv4 total length larger than the
// packet, or headers that end beyond the packet's length. These rules are
// this design's reading of "contradicting data".
//
// Interface: in_valid with hdr/in_port/pkt_len; one cycle later out_valid
// with the match tuple and the per-packet metadata. One packet per cycle.
module parser
  import sdn_pkg::*;
#(
  parameter int HDR_BYTES = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [HDR_BYTES*8-1:0] hdr,
  input  logic [7:0]             in_port,
  input  logic [15:0]            pkt_len,
  output logic                   out_valid,
  output tuple_t                 out_tuple,
  output meta_t                  out_meta
);
  localparam int HW = HDR_BYTES * 8;

  function automatic logic [7:0] b8(logic [HW-1:0] h, int o);
    return (o >= 0 && o < HDR_BYTES) ? h[8*o +: 8] : 8'h00;
  endfunction
  function automatic logic [15:0] b16(logic [HW-1:0] h, int o);
    return {b8(h, o), b8(h, o + 1)};
  endfunction
  function automatic logic [31:0] b32(logic [HW-1:0] h, int o);
    return {b16(h, o), b16(h, o + 2)};
  endfunction
  function automatic logic [127:0] b128(logic [HW-1:0] h, int o);
    return {b32(h, o), b32(h, o + 4), b32(h, o + 8), b32(h, o + 12)};
  endfunction

  tuple_t t;
  meta_t  m;

  always_comb begin
    int   off, l4off, hdr_end;
    logic [15:0] et;
    logic [7:0]  v;
    logic        bos, l4_ok;
    t = '0; m = '0;
    off = 0; l4off = 0; hdr_end = 0; et = '0; v = '0; bos = 1'b0; l4_ok = 1'b0;
    m.in_port = in_port; m.pkt_len = pkt_len;
    t.in_port = in_port;
    // Ethernet (static length)
    t.eth_dst  = {b8(hdr,0), b8(hdr,1), b8(hdr,2), b8(hdr,3), b8(hdr,4), b8(hdr,5)};
    t.eth_src  = {b8(hdr,6), b8(hdr,7), b8(hdr,8), b8(hdr,9), b8(hdr,10), b8(hdr,11)};
    et  = b16(hdr, 12);
    off = 14;
    // VLAN tags (static length), outer tag goes to the tuple
    for (int i = 0; i < 2; i++) begin
      if (et == 16'h8100 || et == 16'h88A8) begin
        if (m.n_vlan == 2'd0) begin
          t.vlan_vid = {1'b1, b16(hdr, off)[11:0]};
          t.vlan_pcp = b16(hdr, off)[15:13];
        end
        et  = b16(hdr, off + 2);
        off = off + 4;
        m.n_vlan = m.n_vlan + 2'd1;
      end
    end
    t.eth_type = et;
    // MPLS labels (static length), top label goes to the tuple
    if (et == 16'h8847 || et == 16'h8848) begin
      bos = 1'b0;
      for (int i = 0; i < 4; i++) begin
        if (!bos) begin
          if (i == 0) begin
            t.mpls_label = b32(hdr, off)[31:12];
            t.mpls_tc    = b32(hdr, off)[11:9];
            t.mpls_bos   = b32(hdr, off)[8];
          end
          bos = b32(hdr, off)[8];
          off = off + 4;
          m.n_mpls = m.n_mpls + 3'd1;
        end
      end
      if (!bos) m.malicious = 1'b1;
      v = b8(hdr, off);
      if (v[7:4] == 4'd4)      et = 16'h0800;
      else if (v[7:4] == 4'd6) et = 16'h86DD;
      else                     et = 16'h0000;
    end
    m.l3_off = 8'(off);
    l4off  = off;
    l4_ok  = 1'b0;
    hdr_end = off;
    // L3
    if (et == 16'h0800) begin
      v = b8(hdr, off);
      m.l3_type = L3_IPV4;
      if (v[7:4] != 4'd4 || v[3:0] < 4'd5) m.malicious = 1'b1;
      if (int'(b16(hdr, off + 2)) + off > int'(pkt_len)) m.malicious = 1'b1;
      t.ip_dscp  = b8(hdr, off + 1)[7:2];
      t.ip_ecn   = b8(hdr, off + 1)[1:0];
      t.ip_proto = b8(hdr, off + 9);
      t.ip_src   = 128'(b32(hdr, off + 12));
      t.ip_dst   = 128'(b32(hdr, off + 16));
      l4off = off + 4 * int'(v[3:0]);       // dynamic offset from IHL
      hdr_end = l4off;
      l4_ok = (t.ip_proto == 8'd6 || t.ip_proto == 8'd17 || t.ip_proto == 8'd1);
    end else if (et == 16'h86DD) begin
      v = b8(hdr, off);
      m.l3_type = L3_IPV6;
      if (v[7:4] != 4'd6) m.malicious = 1'b1;
      t.ip_dscp  = {v[3:0], b8(hdr, off + 1)[7:6]};
      t.ip_ecn   = b8(hdr, off + 1)[5:4];
      t.ip_proto = b8(hdr, off + 6);
      t.ip_src   = b128(hdr, off + 8);
      t.ip_dst   = b128(hdr, off + 24);
      l4off = off + 40;
      hdr_end = l4off;
      l4_ok = (t.ip_proto == 8'd6 || t.ip_proto == 8'd17 || t.ip_proto == 8'd58);
    end else if (et == 16'h0806) begin
      m.l3_type = L3_ARP;
      t.ip_proto = b16(hdr, off + 6)[7:0];
      t.ip_src   = 128'(b32(hdr, off + 14));
      t.ip_dst   = 128'(b32(hdr, off + 24));
      hdr_end = off + 28;
    end
    // L4
    if (l4_ok) begin
      if (t.ip_proto == 8'd1 || t.ip_proto == 8'd58) begin
        t.l4_src = 16'(b8(hdr, l4off));
        t.l4_dst = 16'(b8(hdr, l4off + 1));
        hdr_end = l4off + 4;
      end else begin
        t.l4_src = b16(hdr, l4off);
        t.l4_dst = b16(hdr, l4off + 2);
        hdr_end = l4off + ((t.ip_proto == 8'd6) ? 20 : 8);
      end
    end
    if (hdr_end > int'(pkt_len)) m.malicious = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tuple <= '0; out_meta <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tuple <= t;
        out_meta  <= m;
      end
    end
  end

endmodule
