// tb_spi_dac_converter: self-checking test of the AXI4-Lite to SPI DAC converter.
//
// An AXI4-Lite master drives the register file; a behavioural 8-channel SPI DAC model
// decodes the serial frames. Checked: every channel's output equals the code written;
// read-back of every register; SLVERR for out-of-range and misaligned addresses;
// sync_n falls exactly 2 cycles after an idle write handshake and stays low for
// 48*SCLK_DIV cycles; pending channels are served round-robin starting after the
// channel sent last; a channel written twice while waiting is sent once with the
// newer code; a single channel can be updated at the DAC's rated 1 MS/s.
module tb_spi_dac_converter;
  import sdn_pkg::*;

  localparam int DIV = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axil_req_t req;
  axil_rsp_t rsp;
  logic sclk, sync_n, mosi, busy;
  logic [15:0] dac_code [8];
  int updates, bad_frames, last_ch;
  time last_t;
  int checks = 0, failures = 0;
  int order_q[$];

  spi_dac_converter #(.SCLK_DIV(DIV)) dut (.clk, .rst_n, .s_axil(req), .s_axil_rsp(rsp),
    .dac_sclk(sclk), .dac_sync_n(sync_n), .dac_mosi(mosi), .busy);

  dac_model u_dac (.sclk, .sync_n, .mosi, .code(dac_code), .updates, .bad_frames,
                   .last_ch, .last_t);

  always @(updates) if (updates > 0) order_q.push_back(last_ch);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // returns the cycle count (since reset) of the AW/W handshake
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic axi_write(logic [7:0] addr, logic [31:0] data, output logic [1:0] resp,
                           output longint t_hs);
    @(negedge clk);
    req.aw_valid = 1'b1; req.aw_addr = addr; req.w_valid = 1'b1; req.w_data = data;
    req.w_strb = 4'hF;
    #1;
    while (!(rsp.aw_ready && rsp.w_ready)) begin @(negedge clk); #1; end
    t_hs = cyc;
    @(negedge clk);
    req.aw_valid = 1'b0; req.w_valid = 1'b0;
    #1;
    while (!rsp.b_valid) begin @(negedge clk); #1; end
    resp = rsp.b_resp;
  endtask

  task automatic axi_read(logic [7:0] addr, output logic [31:0] data, output logic [1:0] resp);
    @(negedge clk);
    req.ar_valid = 1'b1; req.ar_addr = addr;
    #1;
    while (!rsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req.ar_valid = 1'b0;
    #1;
    while (!rsp.r_valid) begin @(negedge clk); #1; end
    data = rsp.r_data; resp = rsp.r_resp;
  endtask

  task automatic wait_idle();
    // a pending channel starts within one cycle of the engine going idle
    int quiet;
    quiet = 0;
    while (quiet < 4) begin
      @(posedge clk); #1;
      quiet = busy ? 0 : quiet + 1;
    end
  endtask

  // sync_n low time
  longint t_fall = 0, low_len = 0, n_frames = 0;
  always @(posedge clk) begin
    if (rst_n && $fell(sync_n)) t_fall = cyc;
    if (rst_n && $rose(sync_n)) begin low_len = cyc - t_fall; n_frames++; end
  end

  initial begin
    logic [1:0] resp;
    logic [31:0] rd;
    longint t_hs;
    logic [15:0] vals [8];
    req = '0;
    req.b_ready = 1'b1; req.r_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // timing of a single write from idle
    axi_write(8'h0C, 32'h0000_ABCD, resp, t_hs);
    check(resp == AXI_OKAY, "OKAY for channel 3");
    while (sync_n) begin @(posedge clk); #1; end
    check(cyc - t_hs == 2, $sformatf("sync_n falls 2 cycles after write (got %0d)", cyc - t_hs));
    wait_idle();
    check(low_len == 48 * DIV, $sformatf("sync_n low %0d cycles, expected %0d", low_len, 48 * DIV));
    check(dac_code[3] == 16'hABCD, "channel 3 output");

    // all channels
    for (int c = 0; c < 8; c++) begin
      vals[c] = 16'($urandom);
      axi_write(8'(4 * c), 32'(vals[c]), resp, t_hs);
      check(resp == AXI_OKAY, "OKAY for channel write");
    end
    wait_idle();
    for (int c = 0; c < 8; c++) begin
      check(dac_code[c] == vals[c], $sformatf("channel %0d output %h exp %h", c, dac_code[c], vals[c]));
      axi_read(8'(4 * c), rd, resp);
      check(resp == AXI_OKAY && rd == 32'(vals[c]), "read-back");
    end

    // errors
    axi_write(8'h20, 32'h1, resp, t_hs);  check(resp == AXI_SLVERR, "SLVERR above channel 7");
    axi_write(8'h02, 32'h1, resp, t_hs);  check(resp == AXI_SLVERR, "SLVERR misaligned");
    axi_read(8'h24, rd, resp);            check(resp == AXI_SLVERR, "read SLVERR");
    wait_idle();
    check(dac_code[0] == vals[0], "misaligned write left channel 0 alone");

    // round robin and coalescing: ch0 goes out first, then 5,2,7 wait; 2 written twice
    order_q = {};
    axi_write(8'h00, 32'h0000_1000, resp, t_hs);
    axi_write(8'h14, 32'h0000_5555, resp, t_hs);
    axi_write(8'h08, 32'h0000_2222, resp, t_hs);
    axi_write(8'h1C, 32'h0000_7777, resp, t_hs);
    axi_write(8'h08, 32'h0000_2223, resp, t_hs);
    wait_idle();
    check(order_q.size() == 4, $sformatf("4 frames sent, got %0d", order_q.size()));
    if (order_q.size() == 4)
      check(order_q[0] == 0 && order_q[1] == 2 && order_q[2] == 5 && order_q[3] == 7,
            $sformatf("round-robin order %0d %0d %0d %0d", order_q[0], order_q[1], order_q[2], order_q[3]));
    check(dac_code[2] == 16'h2223 && dac_code[5] == 16'h5555 && dac_code[7] == 16'h7777
          && dac_code[0] == 16'h1000, "codes after round-robin");
    // wrap-around: last sent was 7, so 1 and 6 pending while 3 goes out -> 6 before 1? No:
    // search starts after 3, so the order is 3, 6, 1.
    order_q = {};
    axi_write(8'h0C, 32'h0000_3333, resp, t_hs);
    axi_write(8'h04, 32'h0000_1111, resp, t_hs);
    axi_write(8'h18, 32'h0000_6666, resp, t_hs);
    wait_idle();
    check(order_q.size() == 3 && order_q[0] == 3 && order_q[1] == 6 && order_q[2] == 1,
          "round-robin wraps around");
    // the DAC's rated 1 MS/s on one channel: a write every 156 cycles (1 us at
    // 156.25 MHz) must give one DAC update per write, none merged
    begin
      int u0;
      longint t_prev;
      logic [15:0] v;
      u0 = updates;
      for (int k = 0; k < 10; k++) begin
        v = 16'(16'h4000 + k);
        t_prev = cyc;
        axi_write(8'h10, 32'(v), resp, t_hs);
        while (cyc - t_prev < 156) @(posedge clk);
        check(dac_code[4] == v, $sformatf("1 MS/s sample %0d reached the DAC", k));
      end
      check(updates - u0 == 10, "one update per 1 MS/s sample");
    end
    check(bad_frames == 0, "DAC saw only well-formed frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
