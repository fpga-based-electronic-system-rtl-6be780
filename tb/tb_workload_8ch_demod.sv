// tb_workload_8ch_demod: parallel eight-channel readout demodulation on a
// DAQ board at its default sizes, the evaluation of frequency-multiplexed
// readout: the ADC of readout line 0 receives the sum of eight tones at
// fs/4 + f_c (one per qubit resonator), and the initial phase of every tone
// is rotated from shot to shot, so each channel's result walks round a
// circle in the I/Q plane.
//
// Tones: f_c = k_c * 500 MHz / 128 with k = -28, -20, -12, -4, 4, 12, 20, 28
// (about -109 ... +109 MHz around the intermediate frequency), amplitude 250
// LSB each (8 x 250 fits the 12-bit ADC). The window is 64 clocks (256 ns,
// 128 samples after decimation), so the tones are orthogonal over it and each
// channel should see only its own tone: A * 128 * e^(j phi), where phi is the
// tone's phase at the window's first sample. For 9 shots with
// phi_c = 40 deg * shot + 45 deg * c the testbench reads all eight channel
// results over the host bus and checks angle (within 1 degree) and
// magnitude (within 2 %) of every channel, plus the result counter.
module tb_workload_8ch_demod;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NC = 8, NSHOT = 9, WIN = 64, AMP = 250;
  localparam real PI = 3.14159265358979;
  host_req_t req = '0;
  host_rsp_t rsp;
  logic l1 = 0;
  logic [DAQ_LINES-1:0][ADC_LANES-1:0][ADC_W-1:0] adc_i = '0, adc_q = '0;
  logic fb_out, sclk, mosi;
  logic [DAQ_LINES-1:0] line_fb, line_st, line_sv;
  logic [2:0] cs_n;
  daq_top dut (
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

  int  k_bin[NC] = '{-28, -20, -12, -4, 4, 12, 20, 28};
  real phi[NC];                          // tone phases at absolute sample 0, radians
  longint wc = 0;                        // ADC word counter (4 samples per word)
  longint n_first = -1;                  // absolute index of a window's first sample

  function automatic real f_ghz(input int c);
    return k_bin[c] * 0.5 / 128.0;       // offset from fs/4, in GHz
  endfunction

  // ADC: a continuous sum of eight tones at fs/4 + f_c
  always @(negedge clk) begin
    for (int l = 0; l < ADC_LANES; l++) begin
      real si, sq;
      longint n;
      n = 4 * wc + l;
      si = 0.0; sq = 0.0;
      for (int c = 0; c < NC; c++) begin
        real a;
        a = 2.0 * PI * (0.25 + f_ghz(c)) * real'(n) + phi[c];
        si += AMP * $cos(a);
        sq += AMP * $sin(a);
      end
      adc_i[0][l] = ADC_W'($rtoi($floor(si + 0.5)));
      adc_q[0][l] = ADC_W'($rtoi($floor(sq + 0.5)));
    end
    wc++;
  end

  // the word that the mixer samples with the window's first flag
  always @(posedge clk)
    if (dut.g_line[0].win_v_q && dut.g_line[0].win_f_q) n_first = 4 * (wc - 1);

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic real wrap(input real x);
    real y;
    y = x;
    while (y > PI) y -= 2.0 * PI;
    while (y <= -PI) y += 2.0 * PI;
    return y;
  endfunction

  initial begin
    logic [31:0] d;
    int worst_deg_milli = 0, worst_mag_milli = 0;
    for (int c = 0; c < NC; c++) phi[c] = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(2, 2);                                       // one window: start 2, 64 clocks
    wr(3, {16'(WIN), 16'd0});
    wr(1, 0);
    wr(16'h105, 1);
    for (int c = 0; c < NC; c++)                    // FW = k * 2^32 / 128
      wr(16'h110 + c, 32'(k_bin[c]) << 25);
    for (int s = 0; s < NSHOT; s++) begin
      for (int c = 0; c < NC; c++)
        phi[c] = (40.0 * s + 45.0 * c) * PI / 180.0;
      @(negedge clk) l1 = 1;
      @(negedge clk) l1 = 0;
      repeat (WIN + 20) @(posedge clk);
      rd(16'h125, d);
      chk(d == 32'(s + 1), $sformatf("shot %0d: result count %0d", s, d));
      for (int c = 0; c < NC; c++) begin
        logic [31:0] vi, vq;
        real ri, rq, ang, mag, exp_ang, exp_mag, dang, dmag;
        rd(16'h140 + 2 * c, vi);
        rd(16'h141 + 2 * c, vq);
        ri = real'(int'(vi));
        rq = real'(int'(vq));
        ang = $atan2(rq, ri);
        mag = $sqrt(ri * ri + rq * rq);
        // phase of tone c (after fs/4 mixing) at the window's first sample
        exp_ang = wrap(2.0 * PI * f_ghz(c) * real'(n_first) + phi[c]);
        exp_mag = AMP * 2.0 * WIN * 32767.0 / 32768.0;
        dang = wrap(ang - exp_ang) * 180.0 / PI;
        dmag = (mag - exp_mag) / exp_mag;
        if ($rtoi(fabs(dang) * 1000.0) > worst_deg_milli) worst_deg_milli = $rtoi(fabs(dang) * 1000.0);
        if ($rtoi(fabs(dmag) * 1000.0) > worst_mag_milli) worst_mag_milli = $rtoi(fabs(dmag) * 1000.0);
        chk(fabs(dang) < 1.0 && fabs(dmag) < 0.02,
            $sformatf("shot %0d ch %0d: angle error %f deg, magnitude error %f", s, c, dang, dmag));
      end
    end
    $display("worst angle error %0d mdeg, worst magnitude error %0d per mille",
             worst_deg_milli, worst_mag_milli);
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
