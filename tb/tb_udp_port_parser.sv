// tb_udp_port_parser: self-checking test of the UDP port parsing stage (stream sink and
// AXI4-Lite master).
//
// Sends good SDN frames for every channel and frames that break one rule each: wrong
// UDP port, UDP length too short, channel index out of range, frame cut off before the
// DAC code, and a frame already flagged bad upstream. A randomly slow AXI4-Lite slave
// model takes the writes. Checked: each good frame produces exactly one write to
// address 4*channel with the code in bits [15:0], in order; accept and drop strobes
// match the frame counts; accept and aw_valid rise exactly one cycle after the last
// beat; the stage stalls the stream while a write is outstanding; SLVERR raises wr_err.
module tb_udp_port_parser;
  import sdn_pkg::*;
  import tb_sdn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axis_beat_t s;
  logic s_ready;
  axil_req_t req;
  axil_rsp_t rsp;
  logic accept, drop, wr_err;
  logic wr_fire;
  logic [AXIL_AW-1:0] wr_addr;
  logic [31:0] wr_data;
  int proto_errors;
  logic [15:0] port = T_PORT;

  int checks = 0, failures = 0;
  int n_accept = 0, n_drop = 0, n_err = 0, n_stall = 0, exp_accept = 0, exp_drop = 0;
  logic [AXIL_AW-1:0] exp_addr_q[$];
  logic [31:0]        exp_data_q[$];

  udp_port_parser dut (.clk, .rst_n, .s_axis(s), .s_ready, .cfg_udp_port(port),
                       .m_axil(req), .m_axil_rsp(rsp), .accept, .drop, .wr_err);

  // channel 7 register address 28 answers SLVERR in this bench (ERR_ADDR = 28)
  axil_sink_model #(.ERR_ADDR(28)) u_slave (.clk, .rst_n, .req, .rsp, .wr_fire, .wr_addr,
                                           .wr_data, .proto_errors);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(byteq_t b, logic user_in);
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
      while ($urandom % 4 == 0) begin @(negedge clk); s = '0; end
      do begin
        @(negedge clk); s = x; #1;
        if (!s_ready) n_stall++;
      end while (!s_ready);
      if (x.last) begin
        // accept/aw_valid must appear right after this handshake
        @(posedge clk); #1;
      end
    end
    @(negedge clk); s = '0;
  endtask

  function automatic bit good(frame_t f, logic user_in);
    return !user_in && f.len >= 94 && f.dport == T_PORT && f.ulen >= 16'd92 && f.ch < 16'd8;
  endfunction

  task automatic run(frame_t f, logic user_in);
    bit g;
    g = good(f, user_in);
    if (g) begin
      exp_addr_q.push_back(AXIL_AW'(4 * f.ch));
      exp_data_q.push_back(32'(f.val));
      exp_accept++;
    end else exp_drop++;
    send(build(f), user_in);
    check(accept == g && drop == !g, "accept/drop strobe one cycle after last beat");
    if (g) check(req.aw_valid && req.w_valid, "AW/W valid one cycle after last beat");
  endtask

  always @(posedge clk) if (rst_n) begin
    if (accept) n_accept++;
    if (drop)   n_drop++;
    if (wr_err) n_err++;
    if (wr_fire) begin
      checks++;
      if (exp_addr_q.size() == 0) begin
        failures++; $display("FAIL: unexpected write");
      end else begin
        logic [AXIL_AW-1:0] ea;
        logic [31:0] ed;
        ea = exp_addr_q.pop_front();
        ed = exp_data_q.pop_front();
        if (wr_addr != ea || wr_data[15:0] != ed[15:0]) begin
          failures++;
          $display("FAIL: write got %h=%h exp %h=%h", wr_addr, wr_data, ea, ed);
        end
      end
    end
  end

  initial begin
    s = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 8; c++) run(good_frame(16'(c), 16'($urandom)), 1'b0);
    begin
      frame_t f;
      f = good_frame(16'd3, 16'h1111); f.dport = T_PORT + 16'd1; run(f, 1'b0);
      f = good_frame(16'd3, 16'h2222); f.ulen  = 16'd91;         run(f, 1'b0);
      f = good_frame(16'd8, 16'h3333);                           run(f, 1'b0);
      f = good_frame(16'd256, 16'h3333);                         run(f, 1'b0);
      f = good_frame(16'd3, 16'h4444); f.len = 93;               run(f, 1'b0);
      f = good_frame(16'd3, 16'h5555);                           run(f, 1'b1);
      f = good_frame(16'd4, 16'h6666); f.len = 94;               run(f, 1'b0);
      for (int k = 0; k < 80; k++) begin
        f = good_frame(16'($urandom % 10), 16'($urandom));
        if ($urandom % 5 == 0) f.dport = 16'($urandom);
        f.len = 90 + $urandom % 60;
        run(f, ($urandom % 8) == 0);
      end
    end
    repeat (50) @(posedge clk);
    check(exp_addr_q.size() == 0, "all expected writes seen");
    check(n_accept == exp_accept && n_drop == exp_drop, "accept/drop counts");
    check(n_stall > 0, "stream stalled while a write was outstanding");
    check(n_err > 0, "SLVERR reported on wr_err");
    check(proto_errors == 0, "AXI valid held until ready");
    $display("accepted %0d dropped %0d stalls %0d slverr %0d", n_accept, n_drop, n_stall, n_err);
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
