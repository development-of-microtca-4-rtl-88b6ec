// accept_do: the packet acceptance digital output.
//
// The parser produces a one-cycle strobe for each accepted SDN packet. That is too
// short to see on a TTL output and an oscilloscope, so this module stretches it: the
// output goes high in the cycle after a strobe and stays high for PULSE_CYCLES cycles;
// a strobe that arrives while the pulse is running starts it again from full length.
// The rising edge therefore marks the moment the packet was accepted, which is the
// reference for measuring how long the parser and DAC take to produce the analog value.
// Interface: 'strobe' in, 'do_out' registered out.
// The acceptance output itself is published; its width (1 us at 156.25 MHz by
// default) and the retrigger rule are this implementation's choices.
module accept_do #(
  parameter int PULSE_CYCLES = 156
) (
  input  logic clk,
  input  logic rst_n,
  input  logic strobe,
  output logic do_out
);
  localparam int CW = $clog2(PULSE_CYCLES + 1);
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            cnt_q <= '0;
    else if (strobe)       cnt_q <= CW'(PULSE_CYCLES);
    else if (cnt_q != '0)  cnt_q <= cnt_q - CW'(1);
  end

  assign do_out = cnt_q != '0;
endmodule
