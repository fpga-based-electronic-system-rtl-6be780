// tb_workload_gate_sequence: a long gate sequence, as in randomized
// benchmarking, played by an AWG board at its default sizes from a few
// stored envelopes.
//
// Four gate envelopes (4, 6, 2 and 5 words = 16, 24, 8 and 20 ns) are stored
// once in channel 0's envelope memory. The sequencer table is filled with
// all 256 entries: random gates, most of them back to back, some after an
// idle gap of one or two words. One level-1 trigger plays the whole
// sequence (about 1100 words, 4.4 us) from 17 stored words. Every output word
// of channel 0 is compared with the expected stream: gate g's word j at
// edge start + 5 + j after the edge that samples the level-1 trigger
// (sequencer 1 + 1, player 3 including the memory, output register 1),
// zero in the gaps. Channel 1 stays silent, so the precompensation (identity
// after reset) passes channel 0 unchanged.
module tb_workload_gate_sequence;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NG = 4, NENT = 256;
  host_req_t req = '0;
  host_rsp_t rsp;
  logic l1 = 0, fbt = 0;
  logic [AWG_CH-1:0][AWG_LANES-1:0][DAC_W-1:0] dac;
  logic [1:0] sclk, mosi;
  logic [4:0] cs_n;
  awg_top dut (.clk, .rst_n, .host_req(req), .host_rsp(rsp), .l1_trig(l1), .fb_trig(fbt),
    .dac_data(dac), .spi_sclk(sclk[0]), .spi_mosi(mosi[0]), .spi_cs_n(cs_n), .spi_miso(1'b0));

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk) begin req.we = 1; req.addr = 16'(a); req.wdata = d; end
    @(negedge clk) req.we = 0;
  endtask

  int glen[NG] = '{4, 6, 2, 5};
  function automatic int gaddr(input int g);
    return 1000 * g + 7;
  endfunction
  function automatic logic [AWG_LANES*DAC_W-1:0] gword(input int g, input int j);
    logic [AWG_LANES*DAC_W-1:0] w;
    for (int l = 0; l < AWG_LANES; l++) w[l*DAC_W +: DAC_W] = DAC_W'(1000 * (g + 1) + 100 * j + 3 * l + 1);
    return w;
  endfunction

  int gate_at[int];                 // edge -> gate * 100 + word, for every played word

  initial begin
    int t, last, played, wrong;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // store the gate set
    for (int g = 0; g < NG; g++)
      for (int j = 0; j < glen[g]; j++) begin
        logic [127:0] x;
        x = 128'(gword(g, j));
        for (int i = 0; i < 4; i++) wr(4 + i, x[32*i +: 32]);
        wr(1, {14'd0, 2'd0, 16'(gaddr(g) + j)});
      end
    // random sequence of 256 gates
    t = 10;
    for (int i = 0; i < NENT; i++) begin
      int g;
      g = $urandom_range(0, NG - 1);
      if ($urandom_range(0, 3) == 0) t += $urandom_range(1, 2);
      wr(8, t);
      wr(9, {16'(glen[g]), 16'(gaddr(g))});
      wr(2, {22'd0, 2'd0, 8'(i)});
      for (int j = 0; j < glen[g]; j++) gate_at[t + 5 + j] = 100 * g + j;
      t += glen[g];
    end
    last = t + 5;
    wr(16'h18, NENT);
    // play
    @(negedge clk) l1 = 1;
    @(posedge clk); #1;
    @(negedge clk) l1 = 0;
    played = 0; wrong = 0;
    for (int e = 1; e <= last + 10; e++) begin
      logic [AWG_LANES*DAC_W-1:0] exp_w;
      @(posedge clk); #1;
      if (gate_at.exists(e)) begin
        exp_w = gword(gate_at[e] / 100, gate_at[e] % 100);
        played++;
      end else exp_w = '0;
      if (dac[0] != exp_w || dac[1] != '0) wrong++;
      if (wrong <= 5) chk(dac[0] == exp_w && dac[1] == '0, $sformatf("edge %0d: got %h expected %h", e, dac[0], exp_w));
    end
    chk(wrong == 0, $sformatf("%0d wrong output words", wrong));
    chk(played == gate_at.num() && played > 1000, $sformatf("%0d words played from 17 stored", played));
    $display("sequence: %0d gates, %0d words played, %0d edges", NENT, played, last);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
