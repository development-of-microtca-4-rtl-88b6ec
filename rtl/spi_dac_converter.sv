// spi_dac_converter: "SPI to DAC Converter" - AXI4-Lite register file in front of the
// 8-channel, 16-bit SPI DAC on the rear transition module.
//
// Register map (32-bit, word aligned): 0x00 + 4*ch holds the code of channel ch in
// bits [15:0], for ch = 0..NUM_CH-1; any other address answers SLVERR. Writing a
// channel register marks that channel pending. A round-robin arbiter, starting after
// the channel sent last, picks a pending channel whenever the SPI engine is idle and
// sends one 24-bit frame, MSB first: command 0011 (write input register and update the
// output), 4-bit channel address, 16-bit code. The DAC output changes when sync_n
// returns high. A channel written again before it was sent is sent once, with the
// newest code, so the outputs always converge to the last written values; writes to
// different channels are all delivered, which lets all eight outputs run side by side.
//
// SPI timing: sclk idles low, each half period lasts SCLK_DIV clock cycles, mosi
// changes after the falling edge and is sampled by the DAC on the rising edge, sync_n
// is low for the 24 clock periods and high for at least SCLK_DIV cycles between
// frames. One frame takes 48*SCLK_DIV cycles; with the default SCLK_DIV = 2 that is
// 96 cycles (0.61 us at 156.25 MHz, sclk = 39 MHz).
// AXI timing: AW and W are taken together in one cycle when both are valid and no B
// is pending; B follows one cycle later. AR is answered the same way with R.
// The DAC size (8 x 16 bit) and the SPI link are published; the register map, frame
// format, arbitration and clock rate are choices of this implementation.
module spi_dac_converter
  import sdn_pkg::*;
#(
  parameter int SCLK_DIV = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axil,
  output axil_rsp_t s_axil_rsp,
  output logic      dac_sclk,
  output logic      dac_sync_n,
  output logic      dac_mosi,
  output logic      busy
);
  localparam int FRAME_BITS = 24;
  localparam logic [3:0] CMD_WRITE_UPDATE = 4'b0011;

  logic [DAC_BITS-1:0] code_q [NUM_CH];
  logic [NUM_CH-1:0]   pend_q;

  // ---------------- AXI4-Lite slave ----------------
  logic                wr_take, rd_take;
  logic [AXIL_AW-3:0]  wr_idx, rd_idx;
  logic                wr_ok, rd_ok;

  logic        b_valid_q, r_valid_q;
  logic [1:0]  b_resp_q, r_resp_q;
  logic [31:0] r_data_q;

  assign wr_take = s_axil.aw_valid && s_axil.w_valid && !b_valid_q;
  assign rd_take = s_axil.ar_valid && !r_valid_q;
  assign wr_idx  = s_axil.aw_addr[AXIL_AW-1:2];
  assign rd_idx  = s_axil.ar_addr[AXIL_AW-1:2];
  assign wr_ok   = s_axil.aw_addr[1:0] == 2'b00 && wr_idx < (AXIL_AW-2)'(NUM_CH);
  assign rd_ok   = s_axil.ar_addr[1:0] == 2'b00 && rd_idx < (AXIL_AW-2)'(NUM_CH);

  always_comb begin
    s_axil_rsp.aw_ready = wr_take;
    s_axil_rsp.w_ready  = wr_take;
    s_axil_rsp.b_valid  = b_valid_q;
    s_axil_rsp.b_resp   = b_resp_q;
    s_axil_rsp.ar_ready = rd_take;
    s_axil_rsp.r_valid  = r_valid_q;
    s_axil_rsp.r_data   = r_data_q;
    s_axil_rsp.r_resp   = r_resp_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid_q <= 1'b0;
      b_resp_q  <= AXI_OKAY;
      r_valid_q <= 1'b0;
      r_data_q  <= '0;
      r_resp_q  <= AXI_OKAY;
    end else begin
      if (b_valid_q && s_axil.b_ready) b_valid_q <= 1'b0;
      if (wr_take) begin
        b_valid_q <= 1'b1;
        b_resp_q  <= wr_ok ? AXI_OKAY : AXI_SLVERR;
      end
      if (r_valid_q && s_axil.r_ready) r_valid_q <= 1'b0;
      if (rd_take) begin
        r_valid_q <= 1'b1;
        r_resp_q  <= rd_ok ? AXI_OKAY : AXI_SLVERR;
        r_data_q  <= rd_ok ? 32'(code_q[rd_idx[CH_W-1:0]]) : 32'h0;
      end
    end
  end

  // ---------------- arbiter ----------------
  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_GAP} spi_state_e;
  spi_state_e state_q;

  logic [CH_W-1:0] rr_q;          // channel to look at first
  logic            pick_v;
  logic [CH_W-1:0] pick;
  logic            start;

  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int k = NUM_CH - 1; k >= 0; k--) begin
      logic [CH_W-1:0] c;
      c = rr_q + CH_W'(k);
      if (pend_q[c]) begin
        pick_v = 1'b1;
        pick   = c;
      end
    end
  end

  assign start = state_q == S_IDLE && pick_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= '0;
      rr_q   <= '0;
      for (int i = 0; i < NUM_CH; i++) code_q[i] <= '0;
    end else begin
      if (start) begin
        pend_q[pick] <= 1'b0;
        rr_q         <= pick + CH_W'(1);
      end
      if (wr_take && wr_ok) begin       // a new write wins over the clear above
        if (s_axil.w_strb[0]) code_q[wr_idx[CH_W-1:0]][7:0]  <= s_axil.w_data[7:0];
        if (s_axil.w_strb[1]) code_q[wr_idx[CH_W-1:0]][15:8] <= s_axil.w_data[15:8];
        pend_q[wr_idx[CH_W-1:0]] <= 1'b1;
      end
    end
  end

  // ---------------- SPI engine ----------------
  localparam int DIV_W = $clog2(SCLK_DIV + 1);
  logic [DIV_W-1:0]      div_q;
  logic [4:0]            bit_q;
  logic [FRAME_BITS-1:0] sh_q;

  assign dac_mosi = sh_q[FRAME_BITS-1];
  assign busy     = state_q != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      div_q      <= '0;
      bit_q      <= '0;
      sh_q       <= '0;
      dac_sclk   <= 1'b0;
      dac_sync_n <= 1'b1;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q    <= S_SHIFT;
          sh_q       <= {CMD_WRITE_UPDATE, 4'(pick), code_q[pick]};
          dac_sync_n <= 1'b0;
          dac_sclk   <= 1'b0;
          div_q      <= '0;
          bit_q      <= '0;
        end
        S_SHIFT: begin
          if (div_q == DIV_W'(SCLK_DIV - 1)) begin
            div_q    <= '0;
            dac_sclk <= !dac_sclk;
            if (dac_sclk) begin                    // falling edge
              if (bit_q == 5'(FRAME_BITS - 1)) begin
                state_q    <= S_GAP;
                dac_sync_n <= 1'b1;
              end else begin
                bit_q <= bit_q + 5'd1;
                sh_q  <= {sh_q[FRAME_BITS-2:0], 1'b0};
              end
            end
          end else begin
            div_q <= div_q + DIV_W'(1);
          end
        end
        S_GAP: begin
          if (div_q == DIV_W'(SCLK_DIV - 1)) begin
            div_q   <= '0;
            state_q <= S_IDLE;
          end else begin
            div_q <= div_q + DIV_W'(1);
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI rule: a response, once raised, holds until taken
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axil_rsp.b_valid && !s_axil.b_ready |=> s_axil_rsp.b_valid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axil_rsp.r_valid && !s_axil.r_ready |=> s_axil_rsp.r_valid);
  // sclk never moves while sync_n is high
  a_sclk_idle: assert property (@(posedge clk) disable iff (!rst_n) dac_sync_n |-> !dac_sclk);
endmodule
