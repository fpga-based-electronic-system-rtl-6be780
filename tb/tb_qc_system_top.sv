// tb_qc_system_top: end-to-end run of the two-qubit system at its default
// sizes, closing the loop the way a bench test does: AWG1's readout channels
// (2/3) are fed back into DAQ line 0 through a model of the analog path
// (every second sample, 14 -> 12 bits, two clocks of delay), and a "qubit"
// model flips the sign of the readout signal in the shots where it is
// excited. The TCM issues six level-1 triggers; in each shot AWG1 plays two
// control pulses and a measurement pulse, the DAQ integrates a 48 ns window
// and decides the state, and for an excited qubit the DAQ's feedback goes
// through the TCM to AWG2, which plays its feedback pulse on channel 2
// (AWG1 CH3/CH4 to the DAQ and the feedback on AWG2 CH3 mirror the paper's
// test platform).
// Checked: feedback pulses exactly in the excited shots, the loop latency of
// 10 clocks from the last ADC word to the feedback sample (DAQ 5 + TCM 1 +
// AWG 4), the DAQ's result counters and states, the per-shot results read
// back from the DAQ's upload buffer, the daisy-chain output, the
// bias DAC frame, and the precompensation offset on an idle channel. Every
// mechanism is counted and must occur.
module tb_qc_system_top;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NS = TCM_SLOTS;
  // host buses: 0 TCM, 1 AWG1, 2 AWG2, 3 DAQ, 4 BVG
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

  // ---- analog path and qubit model ----
  localparam int A = 2000;
  int  shot = -1;
  bit  excited [6] = '{0, 1, 1, 0, 1, 0};
  bit  cur_exc;
  logic [ADC_LANES-1:0][ADC_W-1:0] d1_i, d1_q;
  always @(posedge clk) if (rst_n && slot_trig[2]) begin shot++; cur_exc = excited[shot % 6]; end
  always_ff @(posedge clk) begin
    for (int l = 0; l < ADC_LANES; l++) begin
      int vi, vq;
      vi = int'(signed'(awg1_dac[2][2*l])) >>> 2;
      vq = int'(signed'(awg1_dac[3][2*l])) >>> 2;
      d1_i[l] <= ADC_W'(cur_exc ? vi : -vi);
      d1_q[l] <= ADC_W'(cur_exc ? vq : -vq);
    end
    adc_i[0] <= d1_i;
    adc_q[0] <= d1_q;
    adc_i[1] <= '0;
    adc_q[1] <= '0;
  end

  // ---- monitors ----
  int cyc = 0;
  int n_upload = 0, n_l1 = 0, n_chain = 0, n_ctrl = 0, n_meas = 0, n_win = 0, n_exc = 0, n_fb = 0, n_fbtrig = 0;
  int last_word_cyc = -1, lat_ok = 0, lat_bad = 0;
  int fb_shot[$];
  logic awg2_prev = 0, ctrl_prev = 1, meas_prev = 0;
  always @(posedge clk) begin
    logic awg2_nz, ctrl_nz, meas_nz;
    #1;
    cyc++;
    if (rst_n && slot_trig[0]) n_l1++;
    if (rst_n && chain_out) n_chain++;
    if (slot_fb_trig[1]) n_fbtrig++;
    if (daq_sv[0]) begin n_win++; if (daq_state[0]) n_exc++; end
    // the DAQ mixer sampled the last word of a window at this edge
    if (dut.u_daq.g_line[0].win_v_q && dut.u_daq.g_line[0].win_l_q) last_word_cyc = cyc + 1;
    awg2_nz = (awg2_dac[2] != '0);
    ctrl_nz = (awg1_dac[0] != {AWG_LANES{14'd7}});
    meas_nz = (awg1_dac[2] != '0);
    if (ctrl_nz && !ctrl_prev && shot >= 0) n_ctrl++;
    if (meas_nz && !meas_prev) n_meas++;
    if (awg2_nz && !awg2_prev) begin
      n_fb++;
      fb_shot.push_back(shot);
      if (cyc - last_word_cyc == 9) lat_ok++;
      else begin lat_bad++; $display("feedback latency %0d edges", cyc - last_word_cyc); end
    end
    awg2_prev = awg2_nz; ctrl_prev = ctrl_nz; meas_prev = meas_nz;
  end

  // AD5791 model on BVG channel 0
  logic [23:0] bsh = '0;
  logic [19:0] bias = '0;
  int bbits = 0, n_bias = 0;
  always @(negedge bvg_sclk[0]) if (!bvg_sync_n[0]) begin bsh = {bsh[22:0], bvg_mosi[0]}; bbits++; end
  always @(posedge bvg_sync_n[0]) if (rst_n) begin
    if (bbits == 24 && bsh[22:20] == AD5791_REG_DAC) begin bias = bsh[19:0]; n_bias++; end
    bbits = 0;
  end

  localparam int S_MEAS = 40, MEAS_LEN = 16, S_WIN = S_MEAS + 6, WIN_LEN = 12;

  initial begin
    logic [31:0] d;
    logic [AWG_LANES*DAC_W-1:0] w;
    for (int b = 0; b < 5; b++) req[b] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // AWG1: control envelope (ch0/ch1), readout tone at fs/4 of the DAQ (ch2/ch3)
    for (int a = 0; a < 4; a++) begin
      for (int l = 0; l < AWG_LANES; l++) w[l*DAC_W +: DAC_W] = DAC_W'(100 * (a + 1) + l);
      load_word(1, 0, a, w);
      load_word(1, 1, a, w);
    end
    for (int l = 0; l < AWG_LANES; l++)
      w[l*DAC_W +: DAC_W] = DAC_W'($rtoi($floor(A * $cos(3.14159265358979 * l / 4.0) + 0.5)));
    load_word(1, 2, 0, w);
    for (int l = 0; l < AWG_LANES; l++)
      w[l*DAC_W +: DAC_W] = DAC_W'($rtoi($floor(A * $sin(3.14159265358979 * l / 4.0) + 0.5)));
    load_word(1, 3, 0, w);
    for (int c = 0; c < 2; c++) begin
      seq_entry(1, c, 0, 0, 0, 4);               // first gate
      seq_entry(1, c, 1, 12, 0, 4);              // second gate
      wr(1, 16'h18 + c, 2);
    end
    for (int c = 2; c < 4; c++) begin
      // measurement pulse: the same tone word repeated (address stays 0 for a 1-word envelope
      // is not possible, so the envelope is written MEAS_LEN times)
      wr(1, 16'h18 + c, 1);
    end
    for (int a = 1; a < MEAS_LEN; a++) begin
      for (int l = 0; l < AWG_LANES; l++)
        w[l*DAC_W +: DAC_W] = DAC_W'($rtoi($floor(A * $cos(3.14159265358979 * l / 4.0) + 0.5)));
      load_word(1, 2, a, w);
      for (int l = 0; l < AWG_LANES; l++)
        w[l*DAC_W +: DAC_W] = DAC_W'($rtoi($floor(A * $sin(3.14159265358979 * l / 4.0) + 0.5)));
      load_word(1, 3, a, w);
    end
    seq_entry(1, 2, 0, S_MEAS, 0, MEAS_LEN);
    seq_entry(1, 3, 0, S_MEAS, 0, MEAS_LEN);
    wr(1, 16'h24, 7);                             // pair 0 I offset: 7 LSB
    // AWG2: feedback pulse on channel 2 (CH3 on the front panel)
    for (int a = 0; a < 4; a++) begin
      for (int l = 0; l < AWG_LANES; l++) w[l*DAC_W +: DAC_W] = DAC_W'(300 + 10 * a + l);
      load_word(2, 2, 100 + a, w);
    end
    wr(2, 16'h12, {16'd4, 16'd100});
    wr(2, 0, 32'b0100);
    // DAQ line 0: window of 12 clocks (48 ns), threshold 0
    wr(3, 2, S_WIN);
    wr(3, 3, {16'(WIN_LEN), 16'd0});
    wr(3, 1, 0);
    wr(3, 16'h105, 1);
    wr(3, 16'h103, 0);
    wr(3, 0, 0);
    wr(3, 16'h107, 1);                            // record one result per shot
    // BVG: bias code on channel 0
    wr(4, 0, {8'd0, 1'b0, AD5791_REG_DAC, 20'hABCDE});
    // TCM: DAQ feedback (slot 2) to AWG2 (slot 1); 6 triggers every 200 clocks
    wr(0, 16'h11, 32'h102);
    wr(0, 3, 200);
    wr(0, 4, 6);
    wr(0, 6, 32'h0_0007);
    repeat (300) @(posedge clk);
    chk(awg1_dac[0] == {AWG_LANES{14'd7}}, "idle control channel carries the I offset");
    wr(0, 1, 1);
    repeat (6 * 200 + 100) @(posedge clk);
    // ---- results ----
    chk(n_l1 == 6, $sformatf("level-1 triggers %0d", n_l1));
    chk(n_chain == 6, "daisy-chain output follows");
    chk(n_ctrl == 12, $sformatf("control pulses %0d", n_ctrl));
    chk(n_meas == 6, $sformatf("measurement pulses %0d", n_meas));
    chk(n_win == 6, $sformatf("readout windows %0d", n_win));
    chk(n_exc == 3, $sformatf("excited decisions %0d", n_exc));
    chk(n_fbtrig > 0, "feedback triggers");
    chk(n_fb == 3, $sformatf("feedback pulses %0d", n_fb));
    chk(fb_shot.size() == 3 && fb_shot[0] == 1 && fb_shot[1] == 2 && fb_shot[2] == 4, "feedback only in excited shots");
    chk(lat_ok == 3 && lat_bad == 0, "feedback loop latency 10 clocks");
    rd(3, 16'h120, d); chk(d == 6, $sformatf("DAQ result count %0d", d));
    rd(3, 16'h125, d); chk(d == 6, "multi-channel result count");
    rd(3, 16'h121, d); chk(d == 0, "last shot ground");
    rd(3, 16'h122, d); chk(int'(d) == -WIN_LEN * 4 * (A / 4), $sformatf("last sum I %0d", int'(d)));
    chk(n_bias == 1 && bias == 20'hABCDE, "bias DAC code");
    // upload: the per-shot results recorded by the DAQ
    rd(3, 16'h127, d); chk(d == 6, $sformatf("results stored %0d", d));
    for (int i = 0; i < 6; i++) begin
      wr(3, 16'h109, i);
      rd(3, 16'h12E, d);
      if (d[0] == excited[i]) n_upload++;
      rd(3, 16'h12B, d);
      chk(int'(d) == (excited[i] ? 1 : -1) * WIN_LEN * 4 * (A / 4), $sformatf("uploaded sum I of shot %0d: %0d", i, int'(d)));
    end
    chk(n_upload == 6, "uploaded states match the qubit");
    $display("mechanisms: l1 %0d chain %0d ctrl %0d meas %0d windows %0d excited %0d fb %0d bias %0d upload %0d",
             n_l1, n_chain, n_ctrl, n_meas, n_win, n_exc, n_fb, n_bias, n_upload);
    if (n_l1 == 0 || n_chain == 0 || n_ctrl == 0 || n_meas == 0 || n_win == 0 || n_exc == 0 ||
        n_fb == 0 || n_bias == 0 || n_upload == 0) failures++;
    checks++;
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
