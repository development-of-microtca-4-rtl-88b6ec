// axil_sink_model: AXI4-Lite write slave for testbenches.
//
// Raises aw_ready and w_ready at random, independently of each other; once it holds
// both an address and data it reports the write on 'wr_fire'/'wr_addr'/'wr_data' for
// one cycle and returns a B response after a random delay, SLVERR for an address at or
// above ERR_ADDR, OKAY otherwise. It also checks the master side of the protocol: a
// raised aw_valid or w_valid must hold until its ready ('proto_errors').
module axil_sink_model
  import sdn_pkg::*;
#(
  parameter int ERR_ADDR = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  axil_req_t       req,
  output axil_rsp_t       rsp,
  output logic            wr_fire,
  output logic [AXIL_AW-1:0] wr_addr,
  output logic [31:0]     wr_data,
  output int              proto_errors
);
  logic have_a, have_w, aw_rdy, w_rdy, bv;
  logic [AXIL_AW-1:0] a;
  logic [31:0] d;
  int bdelay;
  logic prev_awv, prev_awr, prev_wv, prev_wr;

  initial proto_errors = 0;

  always_comb begin
    rsp          = '0;
    rsp.aw_ready = aw_rdy && !have_a;
    rsp.w_ready  = w_rdy && !have_w;
    rsp.b_valid  = bv;
    rsp.b_resp   = (a >= AXIL_AW'(ERR_ADDR)) ? AXI_SLVERR : AXI_OKAY;
  end

  always @(negedge clk) begin
    aw_rdy <= ($urandom % 3 != 0);
    w_rdy  <= ($urandom % 3 != 0);
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_a <= 1'b0; have_w <= 1'b0; bv <= 1'b0; wr_fire <= 1'b0; bdelay <= 0;
      a <= '0; d <= '0; wr_addr <= '0; wr_data <= '0;
      prev_awv <= 1'b0; prev_awr <= 1'b0; prev_wv <= 1'b0; prev_wr <= 1'b0;
    end else begin
      wr_fire <= 1'b0;
      prev_awv <= req.aw_valid; prev_awr <= rsp.aw_ready;
      prev_wv  <= req.w_valid;  prev_wr  <= rsp.w_ready;
      if (prev_awv && !prev_awr && !req.aw_valid) proto_errors <= proto_errors + 1;
      if (prev_wv  && !prev_wr  && !req.w_valid)  proto_errors <= proto_errors + 1;
      if (req.aw_valid && rsp.aw_ready) begin have_a <= 1'b1; a <= req.aw_addr; end
      if (req.w_valid  && rsp.w_ready)  begin have_w <= 1'b1; d <= req.w_data;  end
      if (have_a && have_w && !bv) begin
        if (bdelay == 0) begin
          wr_fire <= 1'b1; wr_addr <= a; wr_data <= d;
          bv <= 1'b1;
          bdelay <= $urandom % 4;
        end else begin
          bdelay <= bdelay - 1;
        end
      end
      if (bv && req.b_ready) begin
        bv <= 1'b0; have_a <= 1'b0; have_w <= 1'b0;
      end
    end
  end
endmodule
