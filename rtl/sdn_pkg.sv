// sdn_pkg: types and constants shared by the OpenFlow switch datapath.
//
// The match tuple carries the header fields the parser extracts along the
// parser graph (Ethernet, up to two VLAN tags, up to four MPLS labels, IPv4,
// IPv6, ARP, ICMP, UDP, TCP, ICMPv6) plus the input port. IPv4 and ARP
// addresses sit zero-extended in the 128-bit address fields so that one tuple
// layout serves IPv4 and IPv6. ICMP/ICMPv6 type and code occupy the L4 port
// fields and the ARP opcode the protocol field. The field choice follows the
// OpenFlow match fields; the layout is this design's own.
//
// The action set is the reduced OpenFlow action set the action execution
// engine carries out: output to a port, output to the controller, drop,
// set VLAN id, set Ethernet destination, decrement IP TTL and push/pop of a
// VLAN tag or an MPLS label.
//
// Byte i of a packet beat sits at data[8*i +: 8] (AXI-stream order).
package sdn_pkg;

  typedef struct packed {
    logic [7:0]   in_port;
    logic [47:0]  eth_dst;
    logic [47:0]  eth_src;
    logic [15:0]  eth_type;
    logic [12:0]  vlan_vid;   // bit 12: a tag is present
    logic [2:0]   vlan_pcp;
    logic [19:0]  mpls_label;
    logic [2:0]   mpls_tc;
    logic         mpls_bos;
    logic [7:0]   ip_proto;   // ARP: low byte of the opcode
    logic [5:0]   ip_dscp;
    logic [1:0]   ip_ecn;
    logic [127:0] ip_src;     // IPv4 / ARP SPA zero-extended
    logic [127:0] ip_dst;     // IPv4 / ARP TPA zero-extended
    logic [15:0]  l4_src;     // ICMP: type
    logic [15:0]  l4_dst;     // ICMP: code
  } tuple_t;

  localparam int TUPLE_W = $bits(tuple_t);  // 464

  typedef enum logic [1:0] {L3_NONE = 2'd0, L3_IPV4 = 2'd1, L3_IPV6 = 2'd2, L3_ARP = 2'd3} l3_e;

  // Per-packet facts the parser hands on with the tuple.
  typedef struct packed {
    logic [7:0]  in_port;
    logic [15:0] pkt_len;    // bytes
    logic [7:0]  l3_off;     // byte offset of the L3 header
    l3_e         l3_type;
    logic [1:0]  n_vlan;
    logic [2:0]  n_mpls;
    logic        malicious;
  } meta_t;

  typedef struct packed {
    logic        drop;
    logic        to_ctrl;
    logic        out_en;
    logic [7:0]  out_port;
    logic        set_vid;
    logic [11:0] vid;
    logic        push_vlan;
    logic        pop_vlan;
    logic        push_mpls;
    logic        pop_mpls;
    logic [19:0] mpls_label;
    logic [15:0] pop_ethertype;
    logic        dec_ttl;
    logic        set_eth_dst;
    logic [47:0] eth_dst;
  } action_set_t;

  // Instruction word held in a flow table's instruction and action memory.
  typedef struct packed {
    logic        goto_en;
    logic [7:0]  goto_id;
    action_set_t actions;     // write-actions
  } instr_t;

  // Result the flow match unit hands to action execution, one per packet.
  typedef enum logic [1:0] {RSN_NONE = 2'd0, RSN_NO_MATCH = 2'd1, RSN_ACTION = 2'd2} pktin_reason_e;

  typedef struct packed {
    action_set_t   aset;
    meta_t         meta;
    logic [7:0]    table_id;   // last table visited
    pktin_reason_e reason;
  } fmu_result_t;

  // Flow table management command (from the OpenFlow agent).
  typedef enum logic [1:0] {FM_ADD = 2'd0, FM_DELETE_STRICT = 2'd1, FM_TABLE_MOD = 2'd2} fm_op_e;

  typedef struct packed {
    fm_op_e      op;
    logic [7:0]  table_id;
    logic [15:0] prio;
    tuple_t      key;
    tuple_t      mask;       // 1 = bit must match (TCAM tables only)
    instr_t      instr;
    logic [31:0] tbl_config;     // table-mod: bit 0 = send misses to controller
  } flow_mod_t;

  // Packet-in request from action execution to the agent.
  typedef struct packed {
    logic [31:0]   buffer_id;
    logic [15:0]   total_len;
    pktin_reason_e reason;
    logic [7:0]    table_id;
    logic [7:0]    in_port;
  } pkt_in_t;

  // Packet-out command from the agent to action execution.
  typedef struct packed {
    logic [31:0] buffer_id;
    logic        drop;       // no output action
    logic [7:0]  out_port;
  } pkt_out_t;

  // OpenFlow 1.3 message types used by the agent.
  localparam logic [7:0] OFP_VERSION     = 8'h04;
  localparam logic [7:0] OFPT_HELLO      = 8'd0;
  localparam logic [7:0] OFPT_ERROR      = 8'd1;
  localparam logic [7:0] OFPT_ECHO_REQ   = 8'd2;
  localparam logic [7:0] OFPT_ECHO_REP   = 8'd3;
  localparam logic [7:0] OFPT_FEAT_REQ   = 8'd5;
  localparam logic [7:0] OFPT_FEAT_REP   = 8'd6;
  localparam logic [7:0] OFPT_GCFG_REQ   = 8'd7;
  localparam logic [7:0] OFPT_GCFG_REP   = 8'd8;
  localparam logic [7:0] OFPT_SET_CONFIG = 8'd9;
  localparam logic [7:0] OFPT_PACKET_IN  = 8'd10;
  localparam logic [7:0] OFPT_PACKET_OUT = 8'd13;
  localparam logic [7:0] OFPT_FLOW_MOD   = 8'd14;
  localparam logic [7:0] OFPT_TABLE_MOD  = 8'd17;
  localparam logic [7:0] OFPT_MP_REQ     = 8'd18;
  localparam logic [7:0] OFPT_MP_REP     = 8'd19;
  localparam logic [7:0] OFPT_BARRIER_REQ = 8'd20;
  localparam logic [7:0] OFPT_BARRIER_REP = 8'd21;

  localparam logic [15:0] OFPMP_FLOW  = 16'd1;
  localparam logic [15:0] OFPMP_TABLE = 16'd3;
  localparam logic [15:0] OFPMP_PORT  = 16'd4;
  localparam logic [15:0] OFPMP_QUEUE = 16'd5;

  // Merge write-actions of a later table into the accumulated set: every
  // group the later entry sets replaces the earlier one.
  function automatic action_set_t merge_actions(action_set_t a, action_set_t b);
    action_set_t r = a;
    if (b.drop || b.to_ctrl || b.out_en) begin
      r.drop = b.drop; r.to_ctrl = b.to_ctrl; r.out_en = b.out_en; r.out_port = b.out_port;
    end
    if (b.set_vid)     begin r.set_vid = 1'b1; r.vid = b.vid; end
    if (b.set_eth_dst) begin r.set_eth_dst = 1'b1; r.eth_dst = b.eth_dst; end
    if (b.dec_ttl)     r.dec_ttl = 1'b1;
    if (b.push_vlan)   r.push_vlan = 1'b1;
    if (b.pop_vlan)    r.pop_vlan = 1'b1;
    if (b.push_mpls || b.pop_mpls) begin
      r.push_mpls = b.push_mpls; r.pop_mpls = b.pop_mpls;
      r.mpls_label = b.mpls_label; r.pop_ethertype = b.pop_ethertype;
    end
    return r;
  endfunction

endpackage
