// tb_ipv4_udp_parser: self-checking test of the EtherType/IPv4/UDP parsing stage.
//
// Sends a good multicast SDN frame, one to the board's own address, and frames that
// break one rule each: EtherType, version/header length, more-fragments flag, fragment
// offset, protocol, destination address, a frame cut off inside the IPv4 header and a
// frame the MAC marked bad; then random mixes of these. Ready and valid are randomly
// throttled. Every output beat must equal the input beat and the last beat must carry
// the verdict computed here from the field values. Latency (one cycle) is checked.
module tb_ipv4_udp_parser;
  import sdn_pkg::*;
  import tb_sdn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axis_beat_t s, m;
  logic s_ready, m_ready = 1'b0;
  int checks = 0, failures = 0, frames_out = 0, frames_in = 0;
  bit throttle = 1'b1;

  ipv4_udp_parser dut (.clk, .rst_n, .s_axis(s), .s_ready, .m_axis(m), .m_ready,
                       .cfg_local_ip(T_IP), .cfg_mcast_ip(T_GROUP));

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

  // expected verdict, written from the IPv4 rules
  function automatic logic is_bad(frame_t f);
    return !(f.len >= 34 && f.etype == 16'h0800 && f.vihl == 8'h45 && f.frag[13:0] == 14'd0
             && f.proto == 8'd17 && (f.dip == T_GROUP || f.dip == T_IP));
  endfunction

  function automatic frame_t mutate(int kind);
    frame_t f;
    f = good_frame(16'd2, 16'hBEEF);
    f.len = 60 + $urandom % 80;
    case (kind)
      1: f.etype = 16'h86DD;
      2: f.vihl  = 8'h46;
      3: f.frag  = 16'h2000;
      4: f.frag  = 16'h0001;
      5: f.proto = 8'd6;
      6: f.dip   = T_GROUP + 32'd1;
      7: f.dip   = T_IP;
      8: f.len   = 30;
      9: f.frag  = 16'h0000;
      default: ;
    endcase
    return f;
  endfunction

  initial begin
    s = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // latency: one-beat frame (too short, so flagged) accepted at posedge T is out at T+1
    throttle = 1'b0;
    @(negedge clk); s = '0; s.valid = 1'b1; s.last = 1'b1; s.keep = 8'hFF; s.data = 64'h1122;
    exp_q.push_back('{data: 64'h1122, keep: 8'hFF, last: 1'b1, user: 1'b1, valid: 1'b1});
    @(posedge clk); #1;
    checks++;
    if (!(m.valid && m.last && m.user)) begin
      failures++; $display("FAIL: latency - output not valid one cycle after input");
    end
    @(negedge clk); s = '0;
    repeat (3) @(posedge clk);
    throttle = 1'b1;

    for (int k = 0; k <= 9; k++) begin
      frame_t f;
      f = mutate(k);
      send(build(f), 1'b0, is_bad(f));
    end
    send(build(mutate(0)), 1'b1, 1'b1);
    for (int k = 0; k < 60; k++) begin
      frame_t f;
      f = mutate($urandom % 12);
      send(build(f), 1'b0, is_bad(f));
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
