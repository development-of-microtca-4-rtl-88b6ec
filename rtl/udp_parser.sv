// udp_parser: the "UDP Parser" of the FPGA program, three cut-through stages in a row.
//
//   10G MAC stream -> dmac_parser -> ipv4_udp_parser -> udp_port_parser -> AXI4-Lite
//
// Each of the first two stages forwards every beat through one register and marks a
// rejected frame by setting the stream's 'user' flag on its last beat; the last stage
// discards marked frames and, for a good SDN packet, writes the carried 16-bit code
// to the DAC converter register of the addressed channel.
// Interface: AXI4-Stream sink (sdn_pkg::axis_beat_t + ready), AXI4-Lite master,
// configuration inputs (own MAC and IP, subscribed multicast group, SDN UDP port),
// 'accept'/'drop' strobes, 'wr_err'.
// Timing: one beat per cycle. If the clock edge that takes a frame's last beat is
// edge 0, 'accept'/'drop' and the AW/W valids are high after edge 2 (two stage
// registers, then the decision register of the last stage).
// The three stages and their order are the published structure; everything about
// the stream format and flagging is this implementation's choice.
module udp_parser
  import sdn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  s_axis,
  output logic        s_ready,
  input  logic [47:0] cfg_local_mac,
  input  logic [31:0] cfg_local_ip,
  input  logic [31:0] cfg_mcast_ip,
  input  logic [15:0] cfg_udp_port,
  output axil_req_t   m_axil,
  input  axil_rsp_t   m_axil_rsp,
  output logic        accept,
  output logic        drop,
  output logic        wr_err
);
  axis_beat_t s1, s2;
  logic       s1_ready, s2_ready;

  dmac_parser u_dmac (
    .clk, .rst_n, .s_axis, .s_ready,
    .m_axis(s1), .m_ready(s1_ready), .cfg_local_mac, .cfg_mcast_ip);

  ipv4_udp_parser u_ip (
    .clk, .rst_n, .s_axis(s1), .s_ready(s1_ready),
    .m_axis(s2), .m_ready(s2_ready), .cfg_local_ip, .cfg_mcast_ip);

  udp_port_parser u_port (
    .clk, .rst_n, .s_axis(s2), .s_ready(s2_ready), .cfg_udp_port,
    .m_axil, .m_axil_rsp, .accept, .drop, .wr_err);
endmodule
