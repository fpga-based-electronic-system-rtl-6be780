// tb_workload_t1_sweep: an energy-relaxation (T1) measurement, one of the
// characterisation sequences run on a fluxonium qubit, on the two-qubit
// system at its default sizes.
//
// Each shot: AWG1 channel 0 plays a pi pulse (4 words) at start 0; after a
// delay tau the readout tone (AWG1 channels 2/3, 16 words) starts and the
// DAQ integrates a 48 ns window of it. Between shots the host moves the
// start times of the readout entries and of the DAQ window, so tau is swept
// over 0, 20, ..., 180 clocks, one TCM trigger per point.
// The qubit is modelled from what the DAC outputs actually do: it is excited
// by the pi pulse and has decayed if the readout starts T1C = 100 clocks or
// more after the pulse ends (a step in place of an exponential). The
// readout signal reaches the ADC through the same analog model as in the
// system testbench (every second sample, 14 -> 12 bits, sign flipped when
// the qubit is in the ground state).
// Checked per point: the time from the pi pulse to the readout tone on the
// DAC outputs is exactly 4 + tau clocks, the DAQ's state equals the model's,
// its sum has the full magnitude, and its result counter advances by one.
module tb_workload_t1_sweep;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NS = TCM_SLOTS;
  host_req_t req[5];
  host_rsp_t rsp[5];
  logic [AWG_CH-1:0][AWG_LANES-1:0][DAC_W-1:0] awg1_dac, awg2_dac;
  logic [DAQ_LINES-1:0][ADC_LANES-1:0][ADC_W-1:0] adc_i, adc_q;
  logic [DAQ_LINES-1:0] daq_state, daq_sv;
  logic [1:0] awg_sclk, awg_mosi;
  logic [1:0][4:0] awg_cs_n;
  logic daq_sclk, daq_mosi;
  logic [2:0] daq_cs_n;
  logic [BVG_CH-1:0] bvg_sclk, bvg_mosi, bvg_sync_n;
  logic chain_out;
  logic [NS-1:0] slot_trig, slot_fb_trig;

  qc_system_top dut (
    .clk, .rst_n,
    .tcm_host_req(req[0]), .tcm_host_rsp(rsp[0]),
    .awg1_host_req(req[1]), .awg1_host_rsp(rsp[1]),
    .awg2_host_req(req[2]), .awg2_host_rsp(rsp[2]),
    .daq_host_req(req[3]), .daq_host_rsp(rsp[3]),
    .bvg_host_req(req[4]), .bvg_host_rsp(rsp[4]),
    .awg1_dac, .awg2_dac, .daq_adc_i(adc_i), .daq_adc_q(adc_q),
    .daq_state, .daq_state_valid(daq_sv),
    .awg_spi_sclk(awg_sclk), .awg_spi_mosi(awg_mosi), .awg_spi_cs_n(awg_cs_n), .awg_spi_miso(2'b00),
    .daq_spi_sclk(daq_sclk), .daq_spi_mosi(daq_mosi), .daq_spi_cs_n(daq_cs_n), .daq_spi_miso(1'b0),
    .bvg_spi_sclk(bvg_sclk), .bvg_spi_mosi(bvg_mosi), .bvg_spi_sync_n(bvg_sync_n), .bvg_spi_miso('0),
    .tcm_chain_in(1'b0), .tcm_chain_out(chain_out), .slot_trig, .slot_fb_trig, .ext_fb_in('0));

  task automatic wr(input int b, input int a, input logic [31:0] d);
    @(negedge clk) begin req[b].we = 1; req[b].addr = 16'(a); req[b].wdata = d; end
    @(negedge clk) req[b].we = 0;
  endtask
  task automatic rd(input int b, input int a, output logic [31:0] d);
    @(negedge clk) begin req[b].re = 1; req[b].addr = 16'(a); end
    @(negedge clk) begin req[b].re = 0; d = rsp[b].rdata; end
  endtask
  task automatic load_word(input int b, input int c, input int a, input logic [AWG_LANES*DAC_W-1:0] w);
    logic [127:0] x;
    x = 128'(w);
    for (int i = 0; i < 4; i++) wr(b, 4 + i, x[32*i +: 32]);
    wr(b, 1, {14'd0, 2'(c), 16'(a)});
  endtask
  task automatic seq_entry(input int b, input int c, input int idx, input int st, input int a, input int n);
    wr(b, 8, st);
    wr(b, 9, {16'(n), 16'(a)});
    wr(b, 2, {22'd0, 2'(c), 8'(idx)});
  endtask

  // ---- qubit and analog path ----
  localparam int A = 2000, T1C = 100;
  int  cyc = 0;
  int  pi_on = -1, pi_off = -1, meas_on = -1;
  bit  exc = 0;
  logic ctrl_prev = 0, meas_prev = 0;
  always @(posedge clk) begin
    logic ctrl_nz, meas_nz;
    #1;
    cyc++;
    ctrl_nz = rst_n && (awg1_dac[0] != '0);
    meas_nz = rst_n && (awg1_dac[2] != '0);
    if (ctrl_nz && !ctrl_prev) begin pi_on = cyc; exc = 1; end
    if (!ctrl_nz && ctrl_prev) pi_off = cyc;
    if (meas_nz && !meas_prev) begin
      meas_on = cyc;
      if (cyc - pi_off >= T1C) exc = 0;          // decayed before the readout
    end
    ctrl_prev = ctrl_nz; meas_prev = meas_nz;
  end
  logic [ADC_LANES-1:0][ADC_W-1:0] d1_i, d1_q;
  always_ff @(posedge clk) begin
    for (int l = 0; l < ADC_LANES; l++) begin
      int vi, vq;
      vi = int'(signed'(awg1_dac[2][2*l])) >>> 2;
      vq = int'(signed'(awg1_dac[3][2*l])) >>> 2;
      d1_i[l] <= ADC_W'(exc ? vi : -vi);
      d1_q[l] <= ADC_W'(exc ? vq : -vq);
    end
    adc_i[0] <= d1_i;
    adc_q[0] <= d1_q;
    adc_i[1] <= '0;
    adc_q[1] <= '0;
  end

  localparam int MEAS_LEN = 16, WIN_LEN = 12, NPT = 10, STEP = 20;

  initial begin
    logic [31:0] d;
    logic [AWG_LANES*DAC_W-1:0] w;
    int n_exc = 0, n_gnd = 0;
    for (int b = 0; b < 5; b++) req[b] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // pi pulse on channel 0: 4 words
    for (int a = 0; a < 4; a++) begin
      for (int l = 0; l < AWG_LANES; l++) w[l*DAC_W +: DAC_W] = DAC_W'(200 * (a + 1) + l);
      load_word(1, 0, a, w);
    end
    seq_entry(1, 0, 0, 0, 0, 4);
    wr(1, 16'h18, 1);
    // readout tone at the DAQ's fs/4 on channels 2/3
    for (int a = 0; a < MEAS_LEN; a++) begin
      for (int l = 0; l < AWG_LANES; l++)
        w[l*DAC_W +: DAC_W] = DAC_W'($rtoi($floor(A * $cos(3.14159265358979 * l / 4.0) + 0.5)));
      load_word(1, 2, a, w);
      for (int l = 0; l < AWG_LANES; l++)
        w[l*DAC_W +: DAC_W] = DAC_W'($rtoi($floor(A * $sin(3.14159265358979 * l / 4.0) + 0.5)));
      load_word(1, 3, a, w);
    end
    wr(1, 16'h1A, 1);
    wr(1, 16'h1B, 1);
    // DAQ line 0: one 12-clock window, threshold 0
    wr(3, 16'h105, 1);
    wr(3, 16'h103, 0);
    // TCM: one trigger per sweep point
    wr(0, 3, 1000);
    wr(0, 4, 1);
    wr(0, 6, 32'h0_0007);
    for (int p = 0; p < NPT; p++) begin
      int tau, s_meas;
      bit model_exc;
      logic [31:0] st, sum, cnt;
      tau = STEP * p;
      s_meas = 4 + tau;
      seq_entry(1, 2, 0, s_meas, 0, MEAS_LEN);
      seq_entry(1, 3, 0, s_meas, 0, MEAS_LEN);
      wr(3, 2, s_meas + 6);                       // window on the returning tone
      wr(3, 3, {16'(WIN_LEN), 16'd0});
      wr(3, 1, 0);
      wr(0, 1, 1);
      repeat (s_meas + 60) @(posedge clk);
      model_exc = exc;
      rd(3, 16'h121, st);
      rd(3, 16'h122, sum);
      rd(3, 16'h120, cnt);
      chk(meas_on - pi_on == s_meas, $sformatf("tau %0d: readout %0d clocks after the pi pulse, expected %0d",
          tau, meas_on - pi_on, s_meas));
      chk(st == 32'(model_exc) && model_exc == (tau < T1C),
          $sformatf("tau %0d: DAQ state %0d, qubit %0d", tau, st, model_exc));
      chk(int'(sum) == (model_exc ? 1 : -1) * WIN_LEN * 4 * (A / 4), $sformatf("tau %0d: sum I %0d", tau, int'(sum)));
      chk(cnt == 32'(p + 1), $sformatf("tau %0d: result count %0d", tau, cnt));
      if (st == 1) n_exc++; else n_gnd++;
    end
    chk(n_exc == T1C / STEP && n_gnd == NPT - T1C / STEP, $sformatf("decay curve: %0d excited, %0d decayed", n_exc, n_gnd));
    $display("T1 sweep: %0d points, %0d excited, %0d decayed", NPT, n_exc, n_gnd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
