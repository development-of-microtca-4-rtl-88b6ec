// dmac_parser: first stage of the UDP parser ("DMAC Parsing").
//
// Checks the destination MAC address of every received Ethernet frame. A frame is
// for this board if the address is the board's own unicast MAC, or the Ethernet
// multicast MAC of the SDN group the board subscribes to (01:00:5E followed by the
// low 23 bits of the IPv4 group address). The stage is cut-through: it does not
// buffer or delete a frame. Every beat passes through one register slice and, on
// the last beat, the frame's 'user' (bad-frame) flag is ORed with this stage's
// verdict. A frame too short to hold a destination MAC is also flagged. The final
// parser stage discards flagged frames.
//
// Interface: AXI4-Stream in/out as sdn_pkg::axis_beat_t plus ready; configuration
// inputs must be stable while frames flow.
// Timing: one cycle of latency, full throughput (one beat per cycle), ready is the
// usual skid-less pipeline ready (!m.valid || m_ready).
// The stage name, order and the multicast support follow the published design; the
// cut-through flag scheme and the stream format are this implementation's choices.
module dmac_parser
  import sdn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  s_axis,
  output logic        s_ready,
  output axis_beat_t  m_axis,
  input  logic        m_ready,
  input  logic [47:0] cfg_local_mac,
  input  logic [31:0] cfg_mcast_ip
);
  logic        fire;
  logic [15:0] beat_q;
  logic [47:0] dmac;
  logic        dmac_full;
  logic        match;

  assign s_ready = !m_axis.valid || m_ready;
  assign fire    = s_axis.valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       beat_q <= '0;
    else if (fire && s_axis.last)     beat_q <= '0;
    else if (fire && beat_q != '1)    beat_q <= beat_q + 16'd1;
  end

  byte_window #(.DATA_W(DATA_W), .LO(OFF_DMAC), .LEN(6)) u_dmac (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(dmac), .full(dmac_full)
  );

  assign match = dmac_full && (dmac == cfg_local_mac || dmac == mcast_mac(cfg_mcast_ip));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_axis <= '0;
    end else if (s_ready) begin
      m_axis      <= s_axis;
      m_axis.user <= s_axis.user | (s_axis.last & ~match);
    end
  end
endmodule
