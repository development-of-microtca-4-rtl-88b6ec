// tb_sdn_pkg: frame builder shared by the parser testbenches.
//
// Builds an Ethernet II / IPv4 / UDP / SDN frame byte by byte from a field record,
// written directly from the protocol layouts (not from the RTL's offset constants), so
// that a wrong offset in the design shows up as a mismatch. The SDN payload carries the
// channel index in bytes 0-1 and the DAC code in bytes 2-3, little-endian.
package tb_sdn_pkg;

  typedef logic [7:0] byteq_t[$];

  typedef struct {
    logic [47:0] dmac;
    logic [15:0] etype;
    logic [7:0]  vihl;
    logic [15:0] frag;
    logic [7:0]  proto;
    logic [31:0] dip;
    logic [15:0] dport;
    logic [15:0] ulen;
    logic [15:0] ch;
    logic [15:0] val;
    int          len;      // total frame bytes (no FCS)
  } frame_t;

  localparam logic [47:0] T_MAC   = 48'h02_00_00_4B_53_54;
  localparam logic [31:0] T_IP    = 32'hC0A8_0A14;       // 192.168.10.20
  localparam logic [31:0] T_GROUP = 32'hEF01_0203;       // 239.1.2.3
  localparam logic [47:0] T_GMAC  = 48'h01_00_5E_01_02_03;
  localparam logic [15:0] T_PORT  = 16'd2000;

  function automatic frame_t good_frame(logic [15:0] ch, logic [15:0] val);
    frame_t f;
    f.dmac = T_GMAC;  f.etype = 16'h0800; f.vihl = 8'h45; f.frag = 16'h4000;
    f.proto = 8'd17;  f.dip = T_GROUP;    f.dport = T_PORT; f.ulen = 16'd92;
    f.ch = ch; f.val = val; f.len = 126;
    return f;
  endfunction

  function automatic byteq_t build(frame_t f);
    byteq_t b;
    b = {};
    for (int i = 0; i < 6; i++) b.push_back(f.dmac[8*(5-i) +: 8]);
    b.push_back(8'h02); b.push_back(8'h11); b.push_back(8'h22);
    b.push_back(8'h33); b.push_back(8'h44); b.push_back(8'h55);
    b.push_back(f.etype[15:8]); b.push_back(f.etype[7:0]);
    // IPv4 header, 20 bytes
    b.push_back(f.vihl); b.push_back(8'h00);
    b.push_back(8'h00);  b.push_back(8'd112);                   // total length 20+92
    b.push_back(8'h12);  b.push_back(8'h34);
    b.push_back(f.frag[15:8]); b.push_back(f.frag[7:0]);
    b.push_back(8'd64);  b.push_back(f.proto);
    b.push_back(8'hAB);  b.push_back(8'hCD);                     // checksum (not checked)
    b.push_back(8'd192); b.push_back(8'd168); b.push_back(8'd10); b.push_back(8'd1);
    for (int i = 0; i < 4; i++) b.push_back(f.dip[8*(3-i) +: 8]);
    // UDP header
    b.push_back(8'h9C); b.push_back(8'h40);                      // source port 40000
    b.push_back(f.dport[15:8]); b.push_back(f.dport[7:0]);
    b.push_back(f.ulen[15:8]);  b.push_back(f.ulen[7:0]);
    b.push_back(8'h00); b.push_back(8'h00);
    // SDN header (48 bytes of arbitrary content)
    for (int i = 0; i < 48; i++) b.push_back(8'(8'hA0 + i));
    // SDN payload (36 bytes)
    b.push_back(f.ch[7:0]);  b.push_back(f.ch[15:8]);
    b.push_back(f.val[7:0]); b.push_back(f.val[15:8]);
    for (int i = 4; i < 36; i++) b.push_back(8'(i));
    while (b.size() > f.len) void'(b.pop_back());
    while (b.size() < f.len) b.push_back(8'h5A);
    return b;
  endfunction

endpackage
