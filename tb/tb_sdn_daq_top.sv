// tb_sdn_daq_top: end-to-end test of the remote DAQ FPGA logic at its default
// parameters (156.25 MHz clock, 64-bit stream, sclk = clk/4, 1 us acceptance pulse).
//
// Frames built from the protocol layouts go in at the MAC stream; a behavioural SPI
// DAC model sits on the SPI pins. The bench keeps its own list of the codes each
// channel should receive and checks that every DAC update carries one of them, in
// order (a newer code may overtake an older one still waiting for the same channel),
// that every channel ends with its last accepted code, that accept/drop counts match,
// and the latency of an isolated packet: DAC update 100 cycles after the clock edge
// that takes the last beat, acceptance DO rising 3 edges after it.
// It also counts how often each mechanism of the design happened and fails if one
// never did: acceptance, rejection by each parser stage, a MAC-flagged frame, stream
// stall, a channel code replaced while waiting, round-robin reordering, DO retrigger.
module tb_sdn_daq_top;
  import sdn_pkg::*;
  import tb_sdn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #3.2 clk = ~clk;            // 156.25 MHz

  axis_beat_t s;
  logic s_ready;
  logic sclk, sync_n, mosi, do_accept, pkt_accept, pkt_drop, wr_err, dac_busy;
  logic [15:0] dac_code [8];
  int updates, bad_frames, last_ch;
  time last_t;

  sdn_daq_top dut (
    .clk, .rst_n, .s_axis(s), .s_ready,
    .cfg_local_mac(T_MAC), .cfg_local_ip(T_IP), .cfg_mcast_ip(T_GROUP), .cfg_udp_port(T_PORT),
    .dac_sclk(sclk), .dac_sync_n(sync_n), .dac_mosi(mosi), .do_accept,
    .pkt_accept, .pkt_drop, .wr_err, .dac_busy);

  dac_model u_dac (.sclk, .sync_n, .mosi, .code(dac_code), .updates, .bad_frames,
                   .last_ch, .last_t);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_accept = 0, n_drop = 0, exp_accept = 0, exp_drop = 0;
  int n_drop_mac = 0, n_drop_ip = 0, n_drop_port = 0, n_drop_ch = 0, n_mac_err = 0;
  int n_stall = 0, n_replaced = 0, n_reorder = 0, n_retrigger = 0;
  logic [15:0] want_q [8][$];
  logic [15:0] final_code [8];
  int accept_order_q[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (pkt_accept) n_accept++;
    if (pkt_drop)   n_drop++;
    if (pkt_accept && do_accept) n_retrigger++;
    if (wr_err) begin failures++; $display("FAIL: unexpected SLVERR"); end
  end

  // every DAC update must be a wanted code of that channel; older ones may be skipped
  always @(updates) if (updates > 0) begin
    logic [15:0] got;
    int skipped;
    bit found;
    got = dac_code[last_ch[2:0]];
    skipped = 0; found = 0;
    checks++;
    while (want_q[last_ch].size() > 0 && !found) begin
      if (want_q[last_ch].pop_front() == got) found = 1;
      else skipped++;
    end
    if (!found) begin
      failures++; $display("FAIL: DAC ch%0d got %h, not an accepted code", last_ch, got);
    end
    n_replaced += skipped;
    if (accept_order_q.size() > 0) begin
      if (accept_order_q[0] != last_ch) n_reorder++;
      foreach (accept_order_q[i]) if (accept_order_q[i] == last_ch) begin
        accept_order_q.delete(i);
        break;
      end
    end
  end

  task automatic send(byteq_t b, logic user_in, bit gaps);
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
      x.user  = x.last & user_in;
      x.valid = 1'b1;
      while (gaps && $urandom % 4 == 0) begin @(negedge clk); s = '0; end
      do begin
        @(negedge clk); s = x; #0.1;
        if (!s_ready) n_stall++;
      end while (!s_ready);
    end
    @(negedge clk); s = '0;
  endtask

  // classify a frame the way the published parser chain would, and send it
  typedef enum {GOOD, BAD_MAC, BAD_IP, BAD_PORT, BAD_CH, MAC_ERR} kind_e;

  task automatic frame(frame_t f, kind_e k, bit gaps);
    if (k == GOOD) begin
      want_q[f.ch[2:0]].push_back(f.val);
      final_code[f.ch[2:0]] = f.val;
      accept_order_q.push_back(int'(f.ch));
      exp_accept++;
    end else exp_drop++;
    case (k)
      BAD_MAC:  n_drop_mac++;
      BAD_IP:   n_drop_ip++;
      BAD_PORT: n_drop_port++;
      BAD_CH:   n_drop_ch++;
      MAC_ERR:  n_mac_err++;
      default: ;
    endcase
    send(build(f), k == MAC_ERR, gaps);
  endtask

  function automatic frame_t make(kind_e k, logic [15:0] ch, logic [15:0] val);
    frame_t f;
    f = good_frame(ch, val);
    case (k)
      BAD_MAC:  f.dmac  = T_GMAC ^ (48'h1 << ($urandom % 23));
      BAD_IP:   case ($urandom % 3) 0: f.etype = 16'h86DD; 1: f.proto = 8'd6; default: f.dip = $urandom; endcase
      BAD_PORT: f.dport = T_PORT ^ 16'(1 << ($urandom % 16));
      BAD_CH:   f.ch    = 16'd8 + 16'($urandom % 100);
      default: ;
    endcase
    return f;
  endfunction

  task automatic wait_quiet();
    int quiet;
    quiet = 0;
    while (quiet < 200) begin
      @(posedge clk); #0.1;
      quiet = (dac_busy || do_accept) ? 0 : quiet + 1;
    end
  endtask

  initial begin
    longint t_last, t_do, t_upd;
    int u0;
    s = '0;
    for (int c = 0; c < 8; c++) final_code[c] = '0;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // 1) latency of an isolated packet, channel 0
    u0 = updates;
    fork
      begin
        frame(make(GOOD, 16'd0, 16'h8000), GOOD, 1'b0);
      end
      begin
        // edge that takes the last beat
        do @(posedge clk); while (!(s.valid && s.last && s_ready));
        t_last = cyc;
        do @(posedge clk); while (!do_accept);
        t_do = cyc;
        do @(posedge clk); while (updates == u0);
        t_upd = cyc;
      end
    join
    // signals are sampled as each edge arrives, before the edge's own updates, so a
    // signal that changes at edge k is first seen at edge k+1: subtract one
    t_do  = t_do - 1;
    t_upd = t_upd - 1;
    check(t_do - t_last == 3, $sformatf("DO rises 3 edges after last beat (got %0d)", t_do - t_last));
    check(t_upd - t_last == 100, $sformatf("DAC updates 100 edges after last beat (got %0d)", t_upd - t_last));
    $display("latency: last beat -> DO %0d cycles, -> DAC update %0d cycles (%0.2f us at 156.25 MHz)",
             t_do - t_last, t_upd - t_last, real'(t_upd - t_last) * 6.4e-3);
    wait_quiet();
    check(dac_code[0] == 16'h8000, "channel 0 after isolated packet");

    // 2) one packet per channel, then each kind of rejected frame, with random gaps
    for (int c = 0; c < 8; c++) frame(make(GOOD, 16'(c), 16'($urandom)), GOOD, 1'b1);
    frame(make(BAD_MAC, 16'd1, 16'h1), BAD_MAC, 1'b1);
    frame(make(BAD_IP, 16'd1, 16'h1), BAD_IP, 1'b1);
    frame(make(BAD_PORT, 16'd1, 16'h1), BAD_PORT, 1'b1);
    frame(make(BAD_CH, 16'd1, 16'h1), BAD_CH, 1'b1);
    frame(make(GOOD, 16'd1, 16'h1), MAC_ERR, 1'b1);
    wait_quiet();

    // 3) back-to-back bursts, the same channel repeated: stalls, queued and replaced codes
    for (int k = 0; k < 60; k++) begin
      kind_e kd;
      int r;
      r = $urandom % 10;
      kd = r < 6 ? GOOD : r == 6 ? BAD_MAC : r == 7 ? BAD_IP : r == 8 ? BAD_PORT : BAD_CH;
      frame(make(kd, 16'($urandom % 3 == 0 ? 5 : $urandom % 8), 16'($urandom)), kd, 1'b0);
    end
    wait_quiet();

    for (int c = 0; c < 8; c++)
      check(dac_code[c] == final_code[c], $sformatf("final code ch%0d %h exp %h", c, dac_code[c], final_code[c]));
    check(n_accept == exp_accept, $sformatf("accepts %0d exp %0d", n_accept, exp_accept));
    check(n_drop == exp_drop, $sformatf("drops %0d exp %0d", n_drop, exp_drop));
    check(bad_frames == 0, "DAC saw only well-formed SPI frames");

    $display("mechanisms: accept=%0d drop_mac=%0d drop_ip=%0d drop_port=%0d drop_ch=%0d mac_err=%0d",
             n_accept, n_drop_mac, n_drop_ip, n_drop_port, n_drop_ch, n_mac_err);
    $display("mechanisms: stall=%0d replaced=%0d reorder=%0d do_retrigger=%0d dac_updates=%0d",
             n_stall, n_replaced, n_reorder, n_retrigger, updates);
    check(n_accept > 0,    "mechanism: acceptance");
    check(n_drop_mac > 0,  "mechanism: DMAC rejection");
    check(n_drop_ip > 0,   "mechanism: IPv4/UDP rejection");
    check(n_drop_port > 0, "mechanism: UDP port rejection");
    check(n_drop_ch > 0,   "mechanism: channel rejection");
    check(n_mac_err > 0,   "mechanism: MAC-flagged frame");
    check(n_stall > 0,     "mechanism: stream stall");
    check(n_replaced > 0,  "mechanism: waiting code replaced");
    check(n_reorder > 0,   "mechanism: round-robin reorder");
    check(n_retrigger > 0, "mechanism: DO retrigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
