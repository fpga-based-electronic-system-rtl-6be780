// tb_daq_state_disc: random integrated points, reference points, angles and
// thresholds (and thresholds at the projection itself, p-1, p and p+1) against a 64-bit reference; checks state, projection, the
// one-clock latency and the feedback pulse length (only for state 1).
module tb_daq_state_disc;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic signed [31:0] acc_i = 0, acc_q = 0, x0 = 0, y0 = 0, thr = 0, proj;
  logic signed [15:0] cos_t = 0, sin_t = 0;
  logic [7:0] fbw = 4;
  logic done = 0, state, sv, fb;
  daq_state_disc #(.ACC_W(32), .COEF_W(16)) dut (.clk, .rst_n, .acc_i, .acc_q, .acc_done(done), .x0, .y0,
    .cos_t, .sin_t, .threshold(thr), .fb_width(fbw), .state, .state_valid(sv), .proj, .fb);

  int n_exc = 0, n_gnd = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 260; t++) begin
      longint p;
      real th;
      int width;
      bit exp_st;
      @(negedge clk);
      th = 6.2831853 * $urandom_range(0, 999) / 1000.0;
      cos_t = 16'($rtoi($floor(32767.0 * $cos(th) + 0.5)));
      sin_t = 16'($rtoi($floor(32767.0 * $sin(th) + 0.5)));
      acc_i = int'($urandom_range(0, 2000000)) - 1000000;
      acc_q = int'($urandom_range(0, 2000000)) - 1000000;
      x0 = int'($urandom_range(0, 20000)) - 10000;
      y0 = int'($urandom_range(0, 20000)) - 10000;
      fbw = 8'($urandom_range(0, 9));
      p = (longint'(acc_i) - x0) * cos_t + (longint'(acc_q) - y0) * sin_t;
      p = p >>> 15;
      // the last 60 shots put the threshold right at the projection (p-1, p, p+1)
      if (t < 200) thr = int'($urandom_range(0, 400000)) - 200000;
      else         thr = int'(p) + (t % 3) - 1;
      exp_st = (p > longint'(thr));
      done = 1;
      @(posedge clk); #1;
      @(negedge clk) done = 0;
      chk(sv && state == exp_st && longint'(proj) == p, $sformatf("t %0d state %0d proj %0d exp %0d", t, state, proj, p));
      width = 0;
      for (int n = 0; n < 14; n++) begin
        if (fb) width++;
        @(posedge clk); #1;
      end
      if (exp_st) n_exc++; else n_gnd++;
      chk(width == (exp_st ? ((fbw == 0) ? 1 : int'(fbw)) : 0), $sformatf("fb width %0d (fbw %0d st %0d)", width, fbw, exp_st));
    end
    chk(n_exc > 20 && n_gnd > 20, "both states exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
