// tb_workload_envelope_storage: the full envelope storage of an AWG board,
// about 30 Mb of block RAM: four channels x 65536 words x 8 samples x 14
// bits = 29.4 Mb.
//
// The testbench fills every word of all four channels over the host bus with
// a pattern that depends on channel, address and lane, so that a wrong
// address, a wrong channel or a lost write shows. It then plays, on all four
// channels at once, pulses that together span the whole address range: each
// channel has four entries of 16384 words (the 16-bit length field's range
// allows 65535), back to back, one from each quarter of the memory, in an
// order that differs per channel. Every output word of every channel is
// compared with the pattern: word j of an entry with start s appears after
// edge s + 5 + j following the edge that samples the level-1 trigger.
module tb_workload_envelope_storage;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int DEPTH = 65536, Q = DEPTH / 4;
  host_req_t req = '0;
  host_rsp_t rsp;
  logic l1 = 0, fbt = 0;
  logic [AWG_CH-1:0][AWG_LANES-1:0][DAC_W-1:0] dac;
  logic sclk, mosi;
  logic [4:0] cs_n;
  awg_top dut (.clk, .rst_n, .host_req(req), .host_rsp(rsp), .l1_trig(l1), .fb_trig(fbt),
    .dac_data(dac), .spi_sclk(sclk), .spi_mosi(mosi), .spi_cs_n(cs_n), .spi_miso(1'b0));

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk) begin req.we = 1; req.addr = 16'(a); req.wdata = d; end
    @(negedge clk) req.we = 0;
  endtask

  // sample l of word a on channel c: 13 bits, positive
  function automatic logic [AWG_LANES*DAC_W-1:0] pat(input int c, input int a);
    logic [AWG_LANES*DAC_W-1:0] w;
    for (int l = 0; l < AWG_LANES; l++)
      w[l*DAC_W +: DAC_W] = DAC_W'(((a * 8 + l) ^ (c * 1237 + (a >> 10) * 77)) & 13'h1FFF);
    return w;
  endfunction

  int order [AWG_CH][4];
  int bad_q [AWG_CH][4];                    // wrong words per channel and entry

  initial begin
    int wrong, played;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill all four memories
    for (int c = 0; c < AWG_CH; c++)
      for (int a = 0; a < DEPTH; a++) begin
        logic [127:0] x;
        x = 128'(pat(c, a));
        for (int i = 0; i < 4; i++) wr(4 + i, x[32*i +: 32]);
        wr(1, {14'd0, 2'(c), 16'(a)});
      end
    // per channel: the four quarters in a rotated order, back to back
    for (int c = 0; c < AWG_CH; c++) begin
      for (int i = 0; i < 4; i++) begin
        order[c][i] = (i + c) % 4;
        wr(8, 10 + Q * i);
        wr(9, {16'(Q), 16'(Q * order[c][i])});
        wr(2, {22'd0, 2'(c), 8'(i)});
      end
      wr(16'h18 + c, 4);
    end
    @(negedge clk) l1 = 1;
    @(posedge clk); #1;
    @(negedge clk) l1 = 0;
    wrong = 0; played = 0;
    for (int c = 0; c < AWG_CH; c++) for (int i = 0; i < 4; i++) bad_q[c][i] = 0;
    for (int e = 1; e <= 10 + DEPTH + 10; e++) begin
      int k;
      @(posedge clk); #1;
      k = e - 15;                               // word index in the played stream
      for (int c = 0; c < AWG_CH; c++) begin
        logic [AWG_LANES*DAC_W-1:0] exp_w;
        if (k >= 0 && k < DEPTH) begin
          exp_w = pat(c, Q * order[c][k / Q] + k % Q);
          played++;
        end else exp_w = '0;
        if (dac[c] != exp_w) begin
          wrong++;
          if (k >= 0 && k < DEPTH) bad_q[c][k / Q]++;
          if (wrong <= 5) chk(0, $sformatf("ch %0d edge %0d: got %h expected %h", c, e, dac[c], exp_w));
        end
      end
    end
    for (int c = 0; c < AWG_CH; c++)
      for (int i = 0; i < 4; i++)
        chk(bad_q[c][i] == 0, $sformatf("ch %0d entry %0d (quarter %0d): %0d wrong words", c, i, order[c][i], bad_q[c][i]));
    chk(wrong == 0, $sformatf("%0d wrong output words", wrong));
    chk(played == AWG_CH * DEPTH, $sformatf("%0d words checked", played));
    $display("%0d channels x %0d words stored and played back", AWG_CH, DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
