// tb_daq_top: programs a DAQ board over its host bus and feeds both readout
// lines with an fs/4 tone whose sign encodes the qubit state (line 0
// "excited", line 1 "ground"). Checks the level-2 window timing, the sums,
// the state, the feedback output 5 clocks after the last ADC word, the
// feedback-line select, the multi-channel result, the result counters and
// the upload buffers of line 0 (raw words of both windows, one result per
// shot). Then 10 random shots with random amplitudes, thresholds and
// feedback line check sums, states, feedback and counters.
module tb_daq_top;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NL = 2, L = 4, AW = 12;
  host_req_t req = '0;
  host_rsp_t rsp;
  logic l1 = 0;
  logic [NL-1:0][L-1:0][AW-1:0] adc_i, adc_q;
  logic fb_out, sclk, mosi;
  logic [NL-1:0] line_fb, line_st, line_sv;
  logic [2:0] cs_n;
  daq_top #(.N_LINES(NL), .LANES(L), .AW(AW), .N_MCH(8), .SEQ_DEPTH(16)) dut (
    .clk, .rst_n, .host_req(req), .host_rsp(rsp), .l1_trig(l1), .adc_i, .adc_q, .fb_out,
    .line_fb, .line_state(line_st), .line_state_valid(line_sv), .spi_sclk(sclk), .spi_mosi(mosi),
    .spi_cs_n(cs_n), .spi_miso(1'b0));

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk) begin req.we = 1; req.addr = 16'(a); req.wdata = d; end
    @(negedge clk) req.we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk) begin req.re = 1; req.addr = 16'(a); end
    @(negedge clk) begin req.re = 0; d = rsp.rdata; end
  endtask

  // ADC model: amplitude amp[line] at fs/4, I = A cos(pi n/2), Q = A sin(pi n/2)
  int amp[NL] = '{700, -500};
  always_comb
    for (int ln = 0; ln < NL; ln++)
      for (int l = 0; l < L; l++) begin
        int c, s;
        c = (l == 0) ? 1 : (l == 2) ? -1 : 0;
        s = (l == 1) ? 1 : (l == 3) ? -1 : 0;
        adc_i[ln][l] = AW'(amp[ln] * c);
        adc_q[ln][l] = AW'(amp[ln] * s);
      end

  localparam int START = 2, LEN = 12;

  task automatic shot(output int fb_n, output int fb_len);
    fb_n = -1; fb_len = 0;
    @(negedge clk) l1 = 1;
    @(posedge clk); #1;
    @(negedge clk) l1 = 0;
    for (int n = 1; n <= 40; n++) begin
      @(posedge clk); #1;
      if (fb_out) begin if (fb_n < 0) fb_n = n; fb_len++; end
    end
  endtask

  initial begin
    logic [31:0] d;
    int fb_n, fb_len;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one window per line: start 2, 12 clocks (48 ns)
    wr(2, START);
    wr(3, {16'(LEN), 16'd0});
    wr(1, 32'h000);
    wr(1, 32'h100);
    for (int ln = 0; ln < NL; ln++) begin
      int b;
      b = 16'h100 * (ln + 1);
      wr(b + 5, 1);                         // SEQ_N
      wr(b + 3, 1000);                      // threshold
      wr(b + 4, 4);                         // feedback pulse 4 clocks
      wr(b + 16'h10, 0);                    // multi-channel ch 0 at 0 Hz residual
    end
    wr(0, 0);                               // feedback from line 0
    wr(16'h106, 1);                         // arm raw capture of line 0
    wr(16'h107, 1);                         // arm result capture of line 0
    shot(fb_n, fb_len);
    // first word sampled at edge 3+START, last at 2+START+LEN, fb 4 edges later
    chk(fb_n == 6 + START + LEN, $sformatf("feedback at edge %0d, expected %0d", fb_n, 6 + START + LEN));
    chk(fb_len == 4, $sformatf("feedback length %0d", fb_len));
    rd(16'h120, d); chk(d == 1, "line 0 result count");
    rd(16'h121, d); chk(d == 1, "line 0 excited");
    rd(16'h122, d); chk(int'(d) == LEN * 4 * 700, $sformatf("line 0 sum I %0d", int'(d)));
    rd(16'h123, d); chk(int'(d) == 0, "line 0 sum Q");
    rd(16'h221, d); chk(d == 0, "line 1 ground");
    rd(16'h222, d); chk(int'(d) == -LEN * 4 * 500, "line 1 sum I");
    rd(16'h125, d); chk(d == 1, "multi-channel count");
    rd(16'h140, d);
    chk(int'(d) > LEN * 2 * 700 - 50 && int'(d) <= LEN * 2 * 700, $sformatf("multi-channel ch0 I %0d", int'(d)));
    // feedback from line 1 (ground): no pulse
    wr(0, 1);
    shot(fb_n, fb_len);
    chk(fb_n < 0, "no feedback for ground state");
    rd(16'h220, d); chk(d == 2, "line 1 result count");
    // upload buffers of line 0: two windows of LEN words, two results
    rd(16'h126, d); chk(d == 2 * LEN, $sformatf("raw words stored %0d", d));
    for (int k = 0; k < 3; k++) begin
      logic [95:0] w, e;
      int i;
      i = (k == 0) ? 0 : (k == 1) ? LEN + 3 : 2 * LEN - 1;
      wr(16'h108, i);
      rd(16'h128, d); w[31:0]  = d;
      rd(16'h129, d); w[63:32] = d;
      rd(16'h12A, d); w[95:64] = d;
      e = {adc_q[0], adc_i[0]};
      chk(w == e, $sformatf("raw word %0d", i));
    end
    rd(16'h127, d); chk(d == 2, "results stored");
    wr(16'h109, 1);
    rd(16'h12B, d); chk(int'(d) == LEN * 4 * 700, "stored result 1 sum I");
    rd(16'h12C, d); chk(int'(d) == 0, "stored result 1 sum Q");
    rd(16'h12E, d); chk(d == 1, "stored result 1 state");
    rd(16'h106, d); chk(d == 0, "raw buffer not full");
    // SPI to the PLL
    wr(16'hF00, 32'h1234);
    wr(16'hF01, {22'd0, 2'd2, 2'd0, 6'd16});
    rd(16'hF01, d); chk(d[0] && cs_n == 3'b011, "SPI busy on the PLL select");
    // random shots: random tone amplitude on each line, random threshold at
    // least 100 LSB from the expected sum (the projection's rotation rounds
    // by a few LSB), random feedback line
    for (int r = 0; r < 10; r++) begin
      int thr [NL], sel, want_fb;
      bit st [NL];
      sel = $urandom_range(0, NL - 1);
      wr(0, sel);
      for (int ln = 0; ln < NL; ln++) begin
        amp[ln] = $urandom_range(0, 3800) - 1900;
        thr[ln] = LEN * 4 * amp[ln] + (($urandom_range(0, 1) == 1) ? 1 : -1) * int'($urandom_range(100, 20000));
        st[ln]  = (LEN * 4 * amp[ln] > thr[ln]);
        wr(16'h100 * (ln + 1) + 3, thr[ln]);
      end
      want_fb = st[sel];
      shot(fb_n, fb_len);
      chk(want_fb ? (fb_n == 6 + START + LEN && fb_len == 4) : (fb_n < 0),
          $sformatf("random shot %0d: feedback from line %0d at %0d (state %0d)", r, sel, fb_n, st[sel]));
      for (int ln = 0; ln < NL; ln++) begin
        logic [31:0] s_i, s_st, cnt;
        rd(16'h100 * (ln + 1) + 16'h22, s_i);
        rd(16'h100 * (ln + 1) + 16'h21, s_st);
        rd(16'h100 * (ln + 1) + 16'h20, cnt);
        chk(int'(s_i) == LEN * 4 * amp[ln] && s_st == 32'(st[ln]) && cnt == 32'(3 + r),
            $sformatf("random shot %0d line %0d: sum %0d state %0d count %0d", r, ln, int'(s_i), s_st, cnt));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
