// sdn_pkg: types and constants shared by the SDN packet parser and the DAC converter.
//
// The remote DAQ receives ITER SDN (Synchronous Databus Network) packets: UDP
// datagrams, usually multicast, sent over 10 Gb/s Ethernet. The frame layout fixed
// here is plain Ethernet II / IPv4 without options / UDP, followed by a 48-byte SDN
// header and a 36-byte SDN payload that carries the value for one DAC channel.
// The 48 + 36 byte split and the 8 x 16-bit DAC are the published numbers; the
// position of the channel index and code inside the payload, the 64-bit stream width
// and the AXI4-Lite register bus are choices of this implementation.
//
// Byte offsets are counted from the first byte of the destination MAC (the MAC strips
// the preamble and the FCS). Frame byte k travels in stream beat k / STREAM_BYTES,
// lane k % STREAM_BYTES, i.e. in data[8*(k%STREAM_BYTES) +: 8].
package sdn_pkg;

  // ---- stream (AXI4-Stream from the 10G Ethernet MAC) ----
  localparam int DATA_W       = 64;           // 10GBASE-R MAC user side, 156.25 MHz
  localparam int STREAM_BYTES = DATA_W / 8;

  // One stream beat. 'user' marks a bad frame and is meaningful with 'last' only
  // (MAC FCS error, or a parser stage that rejected the frame).
  typedef struct packed {
    logic [DATA_W-1:0]       data;
    logic [STREAM_BYTES-1:0] keep;
    logic                    last;
    logic                    user;
    logic                    valid;
  } axis_beat_t;

  // ---- frame layout ----
  localparam int OFF_DMAC      = 0;
  localparam int OFF_ETYPE     = 12;
  localparam int OFF_IP_VIHL   = 14;
  localparam int OFF_IP_FRAG   = 20;
  localparam int OFF_IP_PROTO  = 23;
  localparam int OFF_IP_DST    = 30;
  localparam int OFF_UDP_DPORT = 36;
  localparam int OFF_UDP_LEN   = 38;
  localparam int OFF_SDN_HDR   = 42;

  localparam int SDN_HDR_BYTES     = 48;      // SDN header, published size
  localparam int SDN_PAYLOAD_BYTES = 36;      // SDN payload, published size
  localparam int OFF_SDN_PAYLOAD   = OFF_SDN_HDR + SDN_HDR_BYTES;   // 90
  localparam int OFF_SDN_CH        = OFF_SDN_PAYLOAD + 0;           // uint16, little-endian
  localparam int OFF_SDN_VALUE     = OFF_SDN_PAYLOAD + 2;           // uint16, little-endian
  localparam int SDN_FRAME_BYTES   = OFF_SDN_PAYLOAD + SDN_PAYLOAD_BYTES; // 126
  localparam int SDN_UDP_LEN       = 8 + SDN_HDR_BYTES + SDN_PAYLOAD_BYTES; // 92

  localparam logic [15:0] ETYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_VIHL_20 = 8'h45;   // IPv4, 20-byte header (no options)
  localparam logic [7:0]  IP_PROTO_UDP = 8'd17;

  // ---- DAC on the rear transition module ----
  localparam int NUM_CH   = 8;                  // published: 8 AO channels
  localparam int DAC_BITS = 16;                 // published: 16-bit resolution
  localparam int CH_W     = $clog2(NUM_CH);

  // ---- AXI4-Lite between parser and DAC converter ----
  localparam int AXIL_AW = 8;

  typedef struct packed {
    logic               aw_valid;
    logic [AXIL_AW-1:0] aw_addr;
    logic               w_valid;
    logic [31:0]        w_data;
    logic [3:0]         w_strb;
    logic               b_ready;
    logic               ar_valid;
    logic [AXIL_AW-1:0] ar_addr;
    logic               r_ready;
  } axil_req_t;

  typedef struct packed {
    logic        aw_ready;
    logic        w_ready;
    logic        b_valid;
    logic [1:0]  b_resp;
    logic        ar_ready;
    logic        r_valid;
    logic [31:0] r_data;
    logic [1:0]  r_resp;
  } axil_rsp_t;

  localparam logic [1:0] AXI_OKAY   = 2'b00;
  localparam logic [1:0] AXI_SLVERR = 2'b10;

  // IPv4 multicast group -> Ethernet multicast MAC (01:00:5E + low 23 bits of group)
  function automatic logic [47:0] mcast_mac(input logic [31:0] group);
    return {24'h01005E, 1'b0, group[22:0]};
  endfunction

endpackage
