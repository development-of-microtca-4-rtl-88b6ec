// tb_dmac_parser: self-checking test of the DMAC parsing stage.
//
// Sends frames whose destination MAC is the subscribed multicast MAC, the unicast MAC,
// broadcast, near misses and random values, plus a runt frame and a frame the MAC
// already marked bad. Downstream ready and upstream valid are randomly throttled.
// Every output beat is compared with the input beat (data, keep, last) and the
// bad-frame flag on the last beat with the expected verdict worked out here from
// the MAC rules. The stage latency (one cycle) is checked on an unthrottled frame.
module tb_dmac_parser;
  import sdn_pkg::*;
  import tb_sdn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axis_beat_t s, m;
  logic s_ready, m_ready = 1'b0;
  int checks = 0, failures = 0, frames_out = 0, frames_in = 0;
  bit throttle = 1'b1;

  dmac_parser dut (.clk, .rst_n, .s_axis(s), .s_ready, .m_axis(m), .m_ready,
                   .cfg_local_mac(T_MAC), .cfg_mcast_ip(T_GROUP));

  axis_beat_t exp_q[$];

  always @(negedge clk) m_ready <= throttle ? ($urandom % 4 != 0) : 1'b1;

  task automatic send(byteq_t b, logic user_in, logic exp_bad);
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
      begin
        axis_beat_t e;
        e = x;
        e.user = x.last & (user_in | exp_bad);
        exp_q.push_back(e);
      end
      while (throttle && $urandom % 3 == 0) begin
        @(negedge clk); s = '0;
      end
      do begin
        @(negedge clk); s = x; #1;
      end while (!s_ready);
    end
    @(negedge clk); s = '0;
    frames_in++;
  endtask

  always @(posedge clk) if (rst_n && m.valid && m_ready) begin
    axis_beat_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected output beat");
    end else begin
      e = exp_q.pop_front();
      if (m.data != e.data || m.keep != e.keep || m.last != e.last || m.user != e.user) begin
        failures++;
        $display("FAIL: beat mismatch got d=%h k=%h l=%b u=%b exp d=%h k=%h l=%b u=%b",
                 m.data, m.keep, m.last, m.user, e.data, e.keep, e.last, e.user);
      end
      if (m.last) frames_out++;
    end
  end

  function automatic frame_t with_mac(logic [47:0] mac);
    frame_t f;
    f = good_frame(16'd1, 16'h1234);
    f.dmac = mac;
    return f;
  endfunction

  initial begin
    s = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // latency: unthrottled single beat frame accepted at posedge T appears at T+1
    throttle = 1'b0;
    @(negedge clk); s = '0; s.valid = 1'b1; s.last = 1'b1; s.keep = 8'hFF;
    s.data = 64'h0302_015E_0001;  // bytes 0..5 = 01 00 5E 01 02 03 (little-endian lanes)
    exp_q.push_back('{data: s.data, keep: 8'hFF, last: 1'b0, user: 1'b0, valid: 1'b1});
    exp_q[0].last = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (!(m.valid && m.last && !m.user)) begin
      failures++; $display("FAIL: latency - output not valid one cycle after input");
    end
    @(negedge clk); s = '0;
    repeat (3) @(posedge clk);
    throttle = 1'b1;

    send(build(with_mac(T_GMAC)), 1'b0, 1'b0);
    send(build(with_mac(T_MAC)), 1'b0, 1'b0);
    send(build(with_mac(48'hFFFF_FFFF_FFFF)), 1'b0, 1'b1);
    send(build(with_mac(T_GMAC ^ 48'h1)), 1'b0, 1'b1);
    send(build(with_mac(T_GMAC ^ 48'h0100_0000_0000)), 1'b0, 1'b1);
    send(build(with_mac(T_MAC ^ 48'h8000_0000_0000)), 1'b0, 1'b1);
    send(build(with_mac(T_GMAC)), 1'b1, 1'b1);            // MAC-reported error stays bad
    begin
      frame_t f;
      f = with_mac(T_GMAC); f.len = 4;            // runt: MAC cut short
      send(build(f), 1'b0, 1'b1);
    end
    for (int k = 0; k < 40; k++) begin
      logic [47:0] mac;
      int sel;
      sel = $urandom % 3;
      mac = sel == 0 ? T_GMAC : sel == 1 ? T_MAC : {$urandom, $urandom}[47:0];
      begin
        frame_t f;
        f = with_mac(mac);
        f.len = 60 + $urandom % 80;
        send(build(f), 1'b0, !(mac == T_GMAC || mac == T_MAC));
      end
    end
    repeat (50) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || frames_out != frames_in + 1) begin
      failures++; $display("FAIL: %0d beats missing, frames in %0d out %0d", exp_q.size(), frames_in, frames_out);
    end
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
