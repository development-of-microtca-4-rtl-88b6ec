// ipv4_udp_parser: second stage of the UDP parser ("UDP/IPv4/type Parsing").
//
// Checks that a frame is an IPv4 datagram carrying UDP that the board should take:
// EtherType 0x0800, version 4 with a 20-byte header (no options, so that the UDP
// header sits at a fixed offset), not a fragment (MF = 0 and fragment offset 0),
// protocol 17, and a destination address equal to the subscribed multicast group or
// the board's own address. The header checksum is not recomputed; the MAC's FCS check
// already covers corruption on the link.
//
// Like the other stages it is cut-through: beats pass one register slice and on the
// last beat the 'user' (bad-frame) flag is ORed with this stage's verdict; a frame
// that ends before all checked fields arrived is flagged too.
// Interface: AXI4-Stream in/out (sdn_pkg::axis_beat_t + ready), static configuration.
// Timing: one cycle of latency, one beat per cycle.
// The stage and its place in the chain follow the published block diagram; the exact
// set of header checks is this implementation's choice.
module ipv4_udp_parser
  import sdn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  s_axis,
  output logic        s_ready,
  output axis_beat_t  m_axis,
  input  logic        m_ready,
  input  logic [31:0] cfg_local_ip,
  input  logic [31:0] cfg_mcast_ip
);
  logic        fire;
  logic [15:0] beat_q;

  logic [15:0] etype, frag;
  logic [7:0]  vihl, proto;
  logic [31:0] dst_ip;
  logic        etype_f, frag_f, vihl_f, proto_f, dst_f;
  logic        match;

  assign s_ready = !m_axis.valid || m_ready;
  assign fire    = s_axis.valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       beat_q <= '0;
    else if (fire && s_axis.last)     beat_q <= '0;
    else if (fire && beat_q != '1)    beat_q <= beat_q + 16'd1;
  end

  byte_window #(.DATA_W(DATA_W), .LO(OFF_ETYPE), .LEN(2)) u_etype (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(etype), .full(etype_f));
  byte_window #(.DATA_W(DATA_W), .LO(OFF_IP_VIHL), .LEN(1)) u_vihl (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(vihl), .full(vihl_f));
  byte_window #(.DATA_W(DATA_W), .LO(OFF_IP_FRAG), .LEN(2)) u_frag (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(frag), .full(frag_f));
  byte_window #(.DATA_W(DATA_W), .LO(OFF_IP_PROTO), .LEN(1)) u_proto (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(proto), .full(proto_f));
  byte_window #(.DATA_W(DATA_W), .LO(OFF_IP_DST), .LEN(4)) u_dst (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(dst_ip), .full(dst_f));

  assign match = etype_f && vihl_f && frag_f && proto_f && dst_f
              && etype == ETYPE_IPV4
              && vihl  == IP_VIHL_20
              && (frag & 16'h3FFF) == 16'h0000      // MF clear, offset 0 (DF may be set)
              && proto == IP_PROTO_UDP
              && (dst_ip == cfg_mcast_ip || dst_ip == cfg_local_ip);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_axis <= '0;
    end else if (s_ready) begin
      m_axis      <= s_axis;
      m_axis.user <= s_axis.user | (s_axis.last & ~match);
    end
  end
endmodule
