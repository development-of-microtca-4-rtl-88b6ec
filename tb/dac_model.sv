// dac_model: behavioural model of an 8-channel, 16-bit SPI DAC, for simulation only.
//
// Shifts in mosi on each rising sclk edge while sync_n is low. When sync_n rises
// after exactly 24 bits it decodes the frame {command[3:0], address[3:0], code[15:0]};
// command 0011 (write and update) sets output 'code' of the addressed channel at once.
// Other commands, other bit counts or an address >= 8 count as 'bad_frames'.
// 'updates' counts the frames applied, 'last_ch' and 'last_t' record the latest one.
module dac_model (
  input  logic sclk,
  input  logic sync_n,
  input  logic mosi,
  output logic [15:0] code [8],
  output int   updates,
  output int   bad_frames,
  output int   last_ch,
  output time  last_t
);
  logic [23:0] sh;
  int          nbits;

  initial begin
    for (int i = 0; i < 8; i++) code[i] = '0;
    updates = 0; bad_frames = 0; last_ch = -1; last_t = 0; nbits = 0; sh = '0;
  end

  always @(negedge sync_n) nbits = 0;

  always @(posedge sclk) if (!sync_n) begin
    sh    = {sh[22:0], mosi};
    nbits = nbits + 1;
  end

  always @(posedge sync_n) begin
    if (nbits == 24 && sh[23:20] == 4'b0011 && sh[19:16] < 4'd8) begin
      code[sh[18:16]] = sh[15:0];
      last_ch = int'(sh[19:16]);
      last_t  = $time;
      updates = updates + 1;
    end else if (nbits != 0) begin
      bad_frames = bad_frames + 1;
    end
    nbits = 0;
  end
endmodule
