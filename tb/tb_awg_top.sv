// tb_awg_top: programs an AWG board over its host bus (envelopes, sequences,
// feedback pulse, precompensation) and checks: level-2 pulses at their start
// times after a level-1 trigger, the feedback pulse 4 clocks after the
// feedback trigger on enabled channels only, the I/Q correction, an SPI
// configuration frame, and finally random sequence tables on all four
// channels at once, every output word checked.
module tb_awg_top;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NC = 4, L = 8, DW = 14;
  host_req_t req = '0;
  host_rsp_t rsp;
  logic l1 = 0, fbt = 0;
  logic [NC-1:0][L-1:0][DW-1:0] dac;
  logic [NC-1:0] busy;
  logic sclk, mosi, miso = 0;
  logic [4:0] cs_n;
  awg_top #(.N_CH(NC), .LANES(L), .DW(DW), .ENV_DEPTH(1024), .SEQ_DEPTH(16)) dut (
    .clk, .rst_n, .host_req(req), .host_rsp(rsp), .l1_trig(l1), .fb_trig(fbt), .dac_data(dac),
    .ch_busy(busy), .spi_sclk(sclk), .spi_mosi(mosi), .spi_cs_n(cs_n), .spi_miso(miso));

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk) begin req.we = 1; req.addr = 16'(a); req.wdata = d; end
    @(negedge clk) req.we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk) begin req.re = 1; req.addr = 16'(a); end
    @(negedge clk) begin req.re = 0; d = rsp.rdata; end
  endtask

  // envelope word a of channel c: sample l = c*1000 + a*8 + l (small, positive)
  function automatic logic [L*DW-1:0] word(input int c, input int a);
    logic [L*DW-1:0] w;
    for (int l = 0; l < L; l++) w[l*DW +: DW] = DW'(c * 1000 + a * 8 + l);
    return w;
  endfunction

  task automatic load_word(input int c, input int a);
    logic [127:0] w;
    w = 128'(word(c, a));
    for (int i = 0; i < 4; i++) wr(4 + i, w[32*i +: 32]);
    wr(1, {14'd0, 2'(c), 16'(a)});
  endtask

  task automatic seq_entry(input int c, input int idx, input int st, input int a, input int n);
    wr(8, st);
    wr(9, {16'(n), 16'(a)});
    wr(2, {22'd0, 2'(c), 8'(idx)});
  endtask

  // collect, for n = 0..ncyc after the edge that samples the trigger, the
  // first cycle at which channel c leaves zero
  int first_n[NC];
  logic [L*DW-1:0] first_w[NC];
  task automatic watch(input int ncyc);
    for (int c = 0; c < NC; c++) first_n[c] = -1;
    for (int n = 0; n <= ncyc; n++) begin
      if (n > 0) begin @(posedge clk); #1; end
      for (int c = 0; c < NC; c++)
        if (first_n[c] < 0 && dac[c] != '0) begin first_n[c] = n; first_w[c] = dac[c]; end
    end
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++)
      for (int a = 0; a < 12; a++) load_word(c, a);
    // channel c: one entry, start 3*c+2, envelope at word c, 2 words
    for (int c = 0; c < NC; c++) begin
      seq_entry(c, 0, 3 * c + 2, c, 2);
      wr(16'h18 + c, 1);
      wr(16'h10 + c, {16'd3, 16'd10});          // feedback pulse: words 10..12
    end
    // level-1 trigger
    @(negedge clk) l1 = 1;
    @(posedge clk); #1;
    @(negedge clk) l1 = 0;
    watch(30);
    for (int c = 0; c < NC; c++) begin
      // l2 after edge start+1, sampled one edge later, then 3 more edges
      chk(first_n[c] == (3 * c + 2) + 5, $sformatf("ch %0d pulse at %0d", c, first_n[c]));
      chk(first_w[c] == word(c, c), $sformatf("ch %0d first word", c));
    end
    // feedback: enable channels 1 and 2
    wr(0, 32'b0110);
    @(negedge clk) fbt = 1;
    @(posedge clk); #1;
    @(negedge clk) fbt = 0;
    watch(12);
    chk(first_n[0] < 0 && first_n[3] < 0, "feedback ignored by disabled channels");
    chk(first_n[1] == 3 && first_n[2] == 3, $sformatf("feedback pulse after edge k+3 (4 clocks) (%0d)", first_n[1]));
    chk(first_w[1] == word(1, 10), "feedback pulse data");
    // a feedback level five clocks wide plays the pulse once, from its first clock
    @(negedge clk) fbt = 1;
    @(posedge clk); #1;
    fork begin repeat (4) @(negedge clk); fbt = 0; end join_none
    begin
      logic [L-1:0][DW-1:0] w3, w4;
      for (int n = 1; n <= 12; n++) begin
        @(posedge clk); #1;
        if (n == 3) w3 = dac[1];
        if (n == 4) w4 = dac[1];
      end
      chk(w3 == word(1, 10) && w4 == word(1, 11), "wide feedback level: pulse played once, not restarted");
    end
    rd(0, d);
    chk(d == 32'b0110, "FB_EN read back");
    // precompensation on pair 0: Q' = I/2 + Q, offsets 5 / -3
    wr(16'h22, 32'd8192);
    wr(16'h24, 32'd5);
    wr(16'h25, 32'hFFFF_FFFD);
    @(negedge clk) fbt = 1;
    @(posedge clk); #1;
    @(negedge clk) fbt = 0;
    repeat (3) begin @(posedge clk); #1; end
    for (int l = 0; l < L; l++) begin
      int iv, qv;
      iv = 0;                           // channel 0 is disabled: I = 0
      qv = 1000 + 10 * 8 + l;
      chk(int'(signed'(dac[0][l])) == iv + 5, $sformatf("precomp I lane %0d = %0d", l, signed'(dac[0][l])));
      chk(int'(signed'(dac[1][l])) == qv + (iv >>> 1) - 3, $sformatf("precomp Q lane %0d", l));
    end
    // SPI frame to DAC 2
    wr(16'h40, 32'h0000_A5F0);
    wr(16'h41, {21'd0, 3'd2, 2'd0, 6'd16});
    rd(16'h41, d);
    chk(d[0] == 1 && cs_n == 5'b11011, "SPI busy with chip select 2");
    repeat (200) @(posedge clk);
    rd(16'h41, d);
    chk(d[0] == 0 && cs_n == 5'b11111, "SPI done");
    // random sequences on all four channels at once: precompensation back to
    // identity, feedback off, 1..4 non-overlapping pulses of 1..3 words per
    // channel; every word of every channel is checked (word j of a pulse with
    // start s after edge s+5+j, zero elsewhere)
    wr(16'h22, 0);
    wr(16'h24, 0);
    wr(16'h25, 0);
    wr(0, 0);
    for (int r = 0; r < 4; r++) begin
      int exp_a [NC][int];                // edge -> envelope word address
      int last, wrong;
      last = 0;
      for (int c = 0; c < NC; c++) exp_a[c].delete();
      for (int c = 0; c < NC; c++) begin
        int n, t;
        n = $urandom_range(1, 4);
        t = $urandom_range(0, 4);
        for (int i = 0; i < n; i++) begin
          int a, len;
          len = $urandom_range(1, 3);
          a = $urandom_range(0, 12 - len);
          seq_entry(c, i, t, a, len);
          for (int j = 0; j < len; j++) exp_a[c][t + 5 + j] = a + j;
          t += len + $urandom_range(0, 3);
        end
        wr(16'h18 + c, n);
        if (t + 5 > last) last = t + 5;
      end
      @(negedge clk) l1 = 1;
      @(posedge clk); #1;
      @(negedge clk) l1 = 0;
      wrong = 0;
      for (int e = 1; e <= last + 6; e++) begin
        @(posedge clk); #1;
        for (int c = 0; c < NC; c++)
          if (dac[c] != (exp_a[c].exists(e) ? word(c, exp_a[c][e]) : '0)) wrong++;
      end
      chk(wrong == 0, $sformatf("random sequences %0d: %0d wrong channel words", r, wrong));
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
