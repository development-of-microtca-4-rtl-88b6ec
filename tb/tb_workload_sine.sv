// tb_workload_sine: multi-channel waveform workload on the full design at defaults.
//
// Reproduces the operating pattern of the remote DAQ: at every tick of a 10 kHz
// control clock the host sends one SDN packet per analog channel (one channel per
// packet), back to back, each carrying the next sample of a sine wave; every channel
// has its own phase. Eight channels run for 20 ticks (2 ms of simulated time). After
// each tick the bench checks that every DAC output holds that tick's sample and that
// the whole burst of eight updates finished within 8 SPI frames (8 x 99 cycles) plus
// the time the eight packets take on the stream, i.e. long before the next tick.
// A second phase repeats the single-channel latency measurement: one packet per
// 10 kHz tick on channel 0, and for each packet the time from the rising edge of the
// acceptance output to the DAC update must be 97 cycles (0.62 us).
module tb_workload_sine;
  import sdn_pkg::*;
  import tb_sdn_pkg::*;

  localparam int    NCH       = 8;
  localparam int    TICKS     = 20;
  localparam int    TICK_CYC  = 15625;   // 100 us at 156.25 MHz
  localparam real   PI        = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0;
  always #3.2 clk = ~clk;

  axis_beat_t s;
  logic s_ready;
  logic sclk, sync_n, mosi, do_accept, pkt_accept, pkt_drop, wr_err, dac_busy;
  logic [15:0] dac_code [8];
  int updates, bad_frames, last_ch;
  time last_t;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sdn_daq_top dut (
    .clk, .rst_n, .s_axis(s), .s_ready,
    .cfg_local_mac(T_MAC), .cfg_local_ip(T_IP), .cfg_mcast_ip(T_GROUP), .cfg_udp_port(T_PORT),
    .dac_sclk(sclk), .dac_sync_n(sync_n), .dac_mosi(mosi), .do_accept,
    .pkt_accept, .pkt_drop, .wr_err, .dac_busy);

  dac_model u_dac (.sclk, .sync_n, .mosi, .code(dac_code), .updates, .bad_frames,
                   .last_ch, .last_t);

  task automatic send(byteq_t b);
    int n;
    n = (b.size() + 7) / 8;
    for (int i = 0; i < n; i++) begin
      axis_beat_t x;
      x = '0;
      for (int l = 0; l < 8; l++)
        if (8*i + l < b.size()) begin
          x.data[8*l +: 8] = b[8*i + l];
          x.keep[l] = 1'b1;
        end
      x.last  = (i == n - 1);
      x.valid = 1'b1;
      do begin @(negedge clk); s = x; #0.1; end while (!s_ready);
    end
    @(negedge clk); s = '0;
  endtask

  function automatic logic [15:0] sample(int ch, int t);
    real v;
    v = 32767.5 + 30000.0 * $sin(2.0 * PI * real'(t) / 10.0 + real'(ch) * PI / 8.0);
    return 16'(int'(v));
  endfunction

  initial begin
    longint t0;
    int u0, worst;
    s = '0;
    worst = 0;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int t = 0; t < TICKS; t++) begin
      t0 = cyc;
      u0 = updates;
      for (int c = 0; c < NCH; c++) send(build(good_frame(16'(c), sample(c, t))));
      while (updates - u0 < NCH && cyc - t0 < TICK_CYC - 10) @(posedge clk);
      if (int'(cyc - t0) > worst) worst = int'(cyc - t0);
      checks++;
      if (cyc - t0 > 8 * 99 + 8 * 20) begin
        failures++; $display("FAIL: tick %0d burst took %0d cycles", t, cyc - t0);
      end
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (dac_code[c] != sample(c, t)) begin
          failures++;
          $display("FAIL: tick %0d ch%0d DAC %h exp %h", t, c, dac_code[c], sample(c, t));
        end
      end
      while (cyc - t0 < TICK_CYC) @(posedge clk);
    end
    // phase 2: single-channel packets at 10 kHz, acceptance DO to DAC update
    for (int t = 0; t < 10; t++) begin
      longint t_do;
      t0 = cyc;
      u0 = updates;
      fork
        send(build(good_frame(16'd0, sample(0, t))));
        begin
          do begin @(posedge clk); #0.1; end while (!do_accept);
          t_do = cyc;
          do begin @(posedge clk); #0.1; end while (updates == u0);
        end
      join
      checks++;
      if (cyc - t_do != 97 || dac_code[0] != sample(0, t)) begin
        failures++;
        $display("FAIL: tick %0d DO to DAC %0d cycles (exp 97), code %h", t, cyc - t_do, dac_code[0]);
      end
      while (cyc - t0 < TICK_CYC) @(posedge clk);
    end
    $display("single channel: acceptance DO to DAC update 97 cycles = %0.2f us", 97 * 6.4e-3);
    checks++;
    if (updates != TICKS * NCH + 10 || bad_frames != 0 || wr_err) begin
      failures++; $display("FAIL: %0d updates, %0d bad SPI frames", updates, bad_frames);
    end
    $display("8-channel burst: worst %0d cycles (%0.2f us) from first beat to last DAC update",
             worst, real'(worst) * 6.4e-3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((TICKS + 10) * TICK_CYC + 100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
