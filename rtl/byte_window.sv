// byte_window: captures LEN consecutive frame bytes starting at byte offset LO from
// an AXI4-Stream frame, for the parser stages.
//
// The bytes arrive spread over one or more beats. The module keeps what earlier beats
// delivered in registers and merges the bytes of the current beat combinationally, so
// that 'win' and 'full' already include the beat being accepted. A stage can therefore
// judge a field on the very beat that completes it, and on the last beat of a frame.
// 'win' is in network (big-endian) order: byte LO is in the top 8 bits. 'full' is 1
// once every byte of the window has been seen with its keep bit set. The registers
// clear after the last beat of a frame.
//
// Timing: 'win'/'full' are combinational from the inputs; one register stage inside.
module byte_window #(
  parameter int DATA_W = 64,
  parameter int LO     = 0,
  parameter int LEN    = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                fire,     // a beat is accepted this cycle
  input  logic [DATA_W-1:0]   data,
  input  logic [DATA_W/8-1:0] keep,
  input  logic                last,
  input  logic [15:0]         beat,     // index of the accepted beat within its frame
  output logic [8*LEN-1:0]    win,
  output logic                full
);
  localparam int NB = DATA_W / 8;

  logic [8*LEN-1:0] win_q;
  logic [LEN-1:0]   got_q, got;

  always_comb begin
    win = win_q;
    got = got_q;
    for (int i = 0; i < LEN; i++) begin
      if (fire && beat == 16'((LO + i) / NB) && keep[(LO + i) % NB]) begin
        win[8*(LEN-1-i) +: 8] = data[8*((LO + i) % NB) +: 8];
        got[i]                = 1'b1;
      end
    end
    full = &got;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_q <= '0;
      got_q <= '0;
    end else if (fire) begin
      win_q <= last ? '0 : win;
      got_q <= last ? '0 : got;
    end
  end
endmodule
