// sdn_daq_top: FPGA logic of the 10G Ethernet remote DAQ - SDN packets in, analog
// output codes out.
//
// Frames arrive from the 10G Ethernet MAC as a 64-bit AXI4-Stream. The UDP parser
// checks destination MAC, EtherType/IPv4/UDP and UDP port in three cut-through stages,
// takes the channel index and 16-bit code from the SDN payload and writes the code over
// AXI4-Lite into the SPI-to-DAC converter, which serializes it to the 8-channel DAC.
// Each accepted packet also starts a pulse on a digital output (do_accept), used as
// the time reference for latency measurement.
//
// Ports: the MAC stream (s_axis/s_ready); configuration of own MAC/IP, subscribed
// multicast group and SDN UDP port, to be held static by the processor; the DAC SPI
// pins; the acceptance DO; 'pkt_accept'/'pkt_drop'/'wr_err' strobes for counters.
// Timing at the defaults, counted from the clock edge that takes a packet's last beat
// (edge 0) when nothing is queued: pkt_accept is high after edge 2, do_accept after
// edge 3, the AXI write is taken at edge 3, sync_n falls at edge 4 and rises at edge
// 100 (48*SCLK_DIV later), when the DAC output changes: 100 cycles = 0.64 us at
// 156.25 MHz, plus the DAC's own settling.
// The chain of blocks is the published one; widths, formats and timings inside are
// this implementation's choices, described in each block.
module sdn_daq_top
  import sdn_pkg::*;
#(
  parameter int SCLK_DIV     = 2,
  parameter int PULSE_CYCLES = 156
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  s_axis,
  output logic        s_ready,
  input  logic [47:0] cfg_local_mac,
  input  logic [31:0] cfg_local_ip,
  input  logic [31:0] cfg_mcast_ip,
  input  logic [15:0] cfg_udp_port,
  output logic        dac_sclk,
  output logic        dac_sync_n,
  output logic        dac_mosi,
  output logic        do_accept,
  output logic        pkt_accept,
  output logic        pkt_drop,
  output logic        wr_err,
  output logic        dac_busy
);
  axil_req_t axil;
  axil_rsp_t axil_rsp;

  udp_parser u_parser (
    .clk, .rst_n, .s_axis, .s_ready,
    .cfg_local_mac, .cfg_local_ip, .cfg_mcast_ip, .cfg_udp_port,
    .m_axil(axil), .m_axil_rsp(axil_rsp),
    .accept(pkt_accept), .drop(pkt_drop), .wr_err);

  spi_dac_converter #(.SCLK_DIV(SCLK_DIV)) u_dac (
    .clk, .rst_n, .s_axil(axil), .s_axil_rsp(axil_rsp),
    .dac_sclk, .dac_sync_n, .dac_mosi, .busy(dac_busy));

  accept_do #(.PULSE_CYCLES(PULSE_CYCLES)) u_do (
    .clk, .rst_n, .strobe(pkt_accept), .do_out(do_accept));
endmodule
