// udp_port_parser: last stage of the UDP parser ("UDP port Parsing").
//
// Takes the frames the first two stages have checked, checks the UDP destination port
// against the SDN topic port and the UDP length against the SDN datagram size
// (8 + 48 + 36 = 92 bytes), and pulls the channel index and the 16-bit DAC code out of
// the SDN payload (payload bytes 0-1 and 2-3, little-endian). On the last beat of a
// frame it decides: if no stage flagged the frame, all fields were present, the port
// matches and the channel exists, it issues one AXI4-Lite write of the code to
// register 4*channel of the DAC converter and pulses 'accept'; otherwise it pulses
// 'drop'. The frame itself ends here (this stage is the stream sink).
//
// Handshake: AW and W are raised together in the cycle after the last beat and each
// drops when its ready is seen; B is always accepted. While a write is outstanding
// the stage holds s_ready low, which stalls the stream (one packet in flight).
// Interface: AXI4-Stream sink, AXI4-Lite master (write channels; read channels tied
// off), one-cycle 'accept'/'drop' strobes, 'wr_err' if the slave answers SLVERR.
// Timing: 'accept' and the AW/W valids rise one cycle after the last beat.
// The stage, its place after IPv4/UDP checking, the AXI link to the DAC converter and
// the one-channel-per-packet rule follow the published design; payload layout, length
// check and stall-while-busy are this implementation's choices.
module udp_port_parser
  import sdn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  s_axis,
  output logic        s_ready,
  input  logic [15:0] cfg_udp_port,
  output axil_req_t   m_axil,
  input  axil_rsp_t   m_axil_rsp,
  output logic        accept,
  output logic        drop,
  output logic        wr_err
);
  logic        fire;
  logic [15:0] beat_q;
  logic [15:0] dport, ulen, ch_be, val_be;
  logic        dport_f, ulen_f, ch_f, val_f;
  logic [15:0] ch, val;
  logic        good;
  logic        busy_q, aw_q, w_q;
  logic [CH_W-1:0]     ch_q;
  logic [DAC_BITS-1:0] val_q;

  assign s_ready = !busy_q;
  assign fire    = s_axis.valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       beat_q <= '0;
    else if (fire && s_axis.last)     beat_q <= '0;
    else if (fire && beat_q != '1)    beat_q <= beat_q + 16'd1;
  end

  byte_window #(.DATA_W(DATA_W), .LO(OFF_UDP_DPORT), .LEN(2)) u_dport (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(dport), .full(dport_f));
  byte_window #(.DATA_W(DATA_W), .LO(OFF_UDP_LEN), .LEN(2)) u_ulen (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(ulen), .full(ulen_f));
  byte_window #(.DATA_W(DATA_W), .LO(OFF_SDN_CH), .LEN(2)) u_ch (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(ch_be), .full(ch_f));
  byte_window #(.DATA_W(DATA_W), .LO(OFF_SDN_VALUE), .LEN(2)) u_val (
    .clk, .rst_n, .fire, .data(s_axis.data), .keep(s_axis.keep), .last(s_axis.last),
    .beat(beat_q), .win(val_be), .full(val_f));

  // payload fields are little-endian; the windows are in wire (big-endian) order
  assign ch  = {ch_be[7:0],  ch_be[15:8]};
  assign val = {val_be[7:0], val_be[15:8]};

  assign good = !s_axis.user && dport_f && ulen_f && ch_f && val_f
             && dport == cfg_udp_port
             && ulen >= 16'(SDN_UDP_LEN)
             && ch < 16'(NUM_CH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      aw_q   <= 1'b0;
      w_q    <= 1'b0;
      ch_q   <= '0;
      val_q  <= '0;
      accept <= 1'b0;
      drop   <= 1'b0;
      wr_err <= 1'b0;
    end else begin
      accept <= 1'b0;
      drop   <= 1'b0;
      wr_err <= 1'b0;
      if (fire && s_axis.last) begin
        if (good) begin
          busy_q <= 1'b1;
          aw_q   <= 1'b1;
          w_q    <= 1'b1;
          ch_q   <= ch[CH_W-1:0];
          val_q  <= val[DAC_BITS-1:0];
          accept <= 1'b1;
        end else begin
          drop   <= 1'b1;
        end
      end
      if (aw_q && m_axil_rsp.aw_ready) aw_q <= 1'b0;
      if (w_q  && m_axil_rsp.w_ready)  w_q  <= 1'b0;
      if (busy_q && m_axil_rsp.b_valid) begin
        busy_q <= 1'b0;
        wr_err <= m_axil_rsp.b_resp != AXI_OKAY;
      end
    end
  end

  always_comb begin
    m_axil          = '0;
    m_axil.aw_valid = aw_q;
    m_axil.aw_addr  = AXIL_AW'({ch_q, 2'b00});
    m_axil.w_valid  = w_q;
    m_axil.w_data   = 32'(val_q);
    m_axil.w_strb   = 4'b0011;
    m_axil.b_ready  = 1'b1;
    m_axil.r_ready  = 1'b1;
  end

  // AXI rule: a raised valid holds until its ready
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_axil.aw_valid && !m_axil_rsp.aw_ready |=> m_axil.aw_valid);
  a_w_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                              m_axil.w_valid && !m_axil_rsp.w_ready |=> m_axil.w_valid);
endmodule
