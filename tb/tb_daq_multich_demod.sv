// tb_daq_multich_demod: feeds a sum of two complex tones (after the fs/4
// mixer) and checks, for all 8 channels, the window sums against a reference
// demodulator written here, the 3-clock latency, and that the channels tuned
// to the tones see a far larger magnitude than the others. Then 12 random
// windows (random frequency words and full-scale samples, 1..60 words, some
// back to back) are checked channel by channel at every done pulse.
module tb_daq_multich_demod;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NC = 8, L = 4, W = 13;
  logic [L-1:0][W-1:0] i_in = '0, q_in = '0;
  logic v = 0, f = 0, la = 0, done;
  logic [NC-1:0][31:0] fw;
  logic signed [NC-1:0][31:0] acc_i, acc_q;
  daq_multich_demod #(.N_CH(NC), .LANES(L), .IW(W), .ACC_W(32)) dut (.clk, .rst_n, .i_in, .q_in,
    .in_valid(v), .in_first(f), .in_last(la), .fw, .acc_i, .acc_q, .done);

  function automatic int tab(input int k);
    return $rtoi($floor(32767.0 * $cos(6.283185307179586 * real'(k) / 1024.0) + 0.5));
  endfunction

  longint ri[NC], rq[NC];

  initial begin
    // residual frequencies (MHz, at 500 MSa/s after decimation): -150 .. +120
    real fres[NC] = '{-150.0, -110.0, -75.0, -20.0, 20.0, 50.0, 80.0, 120.0};
    int len = 50;
    int seen;
    for (int c = 0; c < NC; c++) begin
      real x;
      x = fres[c] / 500.0;
      if (x < 0) x = x + 1.0;
      fw[c] = 32'($rtoi(x * 4294967296.0 / 2.0) * 2);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) begin ri[c] = 0; rq[c] = 0; end
    for (int w = 0; w < len; w++) begin
      @(negedge clk);
      v = 1; f = (w == 0); la = (w == len - 1);
      for (int l = 0; l < L; l++) begin
        int n;
        real a1, a2;
        n  = 4 * w + l;                               // 1 GSa/s sample index
        a1 = 6.283185307179586 * (fres[1] / 1000.0) * n;
        a2 = 6.283185307179586 * (fres[6] / 1000.0) * n;
        i_in[l] = W'($rtoi($floor(1500.0 * $cos(a1) + 900.0 * $cos(a2) + 0.5)));
        q_in[l] = W'($rtoi($floor(1500.0 * $sin(a1) + 900.0 * $sin(a2) + 0.5)));
      end
      for (int c = 0; c < NC; c++) begin
        longint si, sq;
        si = 0; sq = 0;
        for (int j = 0; j < 2; j++) begin
          logic [31:0] ph;
          int k, cc, ss, ii, qq;
          ph = 32'(2 * w + j) * fw[c];
          k  = int'(ph[31:22]);
          cc = tab(k);
          ss = tab((k + 768) % 1024);
          ii = int'(signed'(i_in[2 * j]));
          qq = int'(signed'(q_in[2 * j]));
          si += longint'(ii) * cc + longint'(qq) * ss;
          sq += longint'(qq) * cc - longint'(ii) * ss;
        end
        ri[c] += si >>> 15;
        rq[c] += sq >>> 15;
      end
    end
    @(posedge clk); #1;
    @(negedge clk) begin v = 0; f = 0; la = 0; end
    seen = -1;
    for (int n = 1; n <= 5; n++) begin
      @(posedge clk); #1;
      if (done && seen < 0) seen = n;
    end
    chk(seen == 3, $sformatf("done after edge k+3, got k+%0d", seen));
    for (int c = 0; c < NC; c++) begin
      chk(longint'(signed'(acc_i[c])) == ri[c] && longint'(signed'(acc_q[c])) == rq[c],
          $sformatf("ch %0d: %0d/%0d vs %0d/%0d", c, signed'(acc_i[c]), signed'(acc_q[c]), ri[c], rq[c]));
    end
    for (int c = 0; c < NC; c++) begin
      longint m2;
      m2 = longint'(signed'(acc_i[c])) * signed'(acc_i[c]) + longint'(signed'(acc_q[c])) * signed'(acc_q[c]);
      if (c == 1 || c == 6) chk(m2 > longint'(50) * 50 * 100 * 100 * 4, $sformatf("tone on ch %0d found", c));
      else chk(m2 < longint'(50) * 50 * 100 * 100, $sformatf("ch %0d rejects the tones (%0d)", c, m2));
    end
    // random windows: random frequency words, full-scale random samples,
    // random lengths, 0..3 idle clocks between windows (0 = back to back)
    for (int c = 0; c < NC; c++) fw[c] = $urandom;
    for (int r = 0; r < 12; r++) begin
      int n;
      longint wi[NC], wq[NC];
      n = (r == 0) ? 1 : $urandom_range(1, 60);
      for (int c = 0; c < NC; c++) begin wi[c] = 0; wq[c] = 0; end
      for (int w = 0; w < n; w++) begin
        @(negedge clk);
        v = 1; f = (w == 0); la = (w == n - 1);
        for (int l = 0; l < L; l++) begin
          i_in[l] = W'($urandom);
          q_in[l] = W'($urandom);
        end
        for (int c = 0; c < NC; c++) begin
          longint si, sq;
          si = 0; sq = 0;
          for (int j = 0; j < 2; j++) begin
            logic [31:0] ph;
            int k, cc, ss, ii, qq;
            ph = 32'(2 * w + j) * fw[c];
            k  = int'(ph[31:22]);
            cc = tab(k);
            ss = tab((k + 768) % 1024);
            ii = int'(signed'(i_in[2 * j]));
            qq = int'(signed'(q_in[2 * j]));
            si += longint'(ii) * cc + longint'(qq) * ss;
            sq += longint'(qq) * cc - longint'(ii) * ss;
          end
          wi[c] += si >>> 15;                          // per clock, as above
          wq[c] += sq >>> 15;
        end
      end
      for (int c = 0; c < NC; c++) begin exp_i.push_back(wi[c]); exp_q.push_back(wq[c]); end
      exp_n++;
      repeat ($urandom_range(0, 3)) @(negedge clk) begin v = 0; f = 0; la = 0; end
    end
    @(negedge clk) begin v = 0; f = 0; la = 0; end
    repeat (6) @(posedge clk);
    chk(got_n == exp_n, $sformatf("random windows: %0d done pulses for %0d windows", got_n, exp_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker for the random windows: every done pulse against the reference
  longint exp_i[$], exp_q[$];
  int exp_n = 0, got_n = 0;
  always @(posedge clk) begin
    #1;
    if (done && exp_n > 0) begin
      int bad;
      bad = 0;
      for (int c = 0; c < NC; c++)
        if (longint'(signed'(acc_i[c])) != exp_i[c] || longint'(signed'(acc_q[c])) != exp_q[c]) bad++;
      chk(bad == 0 && exp_i.size() >= NC, $sformatf("random window %0d: %0d channels wrong", got_n, bad));
      for (int c = 0; c < NC; c++) begin void'(exp_i.pop_front()); void'(exp_q.pop_front()); end
      got_n++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
