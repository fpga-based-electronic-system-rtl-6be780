// tb_bvg_top: writes AD5791 frames (control register, then DAC codes) to the
// six channels over the host bus; AD5791 models on each SPI link latch 24 bits
// on falling SCLK while SYNC is low and update on SYNC rising. Checks the
// codes, the busy flags, frame duration and the read-back path. Then 20
// random rounds update a random subset of channels at once, with one more
// frame written to a busy channel, which must be dropped; each round checks
// every channel's code and that exactly 24 SCLK edges reached each updated
// channel and none the others.
module tb_bvg_top;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NC = 6;
  host_req_t req = '0;
  host_rsp_t rsp;
  logic [NC-1:0] sclk, mosi, sync_n, miso;
  bvg_top #(.N_CH(NC)) dut (.clk, .rst_n, .host_req(req), .host_rsp(rsp), .spi_sclk(sclk),
    .spi_mosi(mosi), .spi_sync_n(sync_n), .spi_miso(miso));

  // AD5791 register model
  logic [23:0] sh [NC];
  int          nbits [NC];
  logic [19:0] dac_reg [NC], ctrl_reg [NC];
  int          edges [NC];                 // falling SCLK edges counted by the testbench
  for (genvar c = 0; c < NC; c++) begin : g_dac
    assign miso[c] = !sync_n[c] && dac_reg[c][19 - (nbits[c] % 20)];
    always @(negedge sclk[c]) if (!sync_n[c]) begin sh[c] = {sh[c][22:0], mosi[c]}; nbits[c]++; edges[c]++; end
    always @(negedge sync_n[c]) nbits[c] = 0;
    always @(posedge sync_n[c]) if (rst_n && nbits[c] == 24 && !sh[c][23]) begin
      if (sh[c][22:20] == AD5791_REG_DAC)  dac_reg[c]  = sh[c][19:0];
      if (sh[c][22:20] == AD5791_REG_CTRL) ctrl_reg[c] = sh[c][19:0];
    end
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk) begin req.we = 1; req.addr = 16'(a); req.wdata = d; end
    @(negedge clk) req.we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk) begin req.re = 1; req.addr = 16'(a); end
    @(negedge clk) begin req.re = 0; d = rsp.rdata; end
  endtask

  initial begin
    logic [31:0] d;
    logic [19:0] codes [NC];
    int cyc;
    for (int c = 0; c < NC; c++) begin dac_reg[c] = '0; ctrl_reg[c] = '0; nbits[c] = 0; edges[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // control register: clear DACTRI and OPGND (value 0x00012: RBUF, BIN)
    for (int c = 0; c < NC; c++) wr(c, {8'd0, 1'b0, AD5791_REG_CTRL, 20'h00012});
    rd(16'h10, d);
    chk(d[NC-1:0] != 0, "busy while sending");
    cyc = 0;
    while (d[NC-1:0] != 0 && cyc < 100) begin rd(16'h10, d); cyc++; end
    chk(cyc > 80 && cyc < 100, $sformatf("frames took about 193 clocks (%0d polls)", cyc));
    for (int c = 0; c < NC; c++) chk(ctrl_reg[c] == 20'h00012, $sformatf("ch %0d control", c));
    // DAC codes, all six at once
    for (int c = 0; c < NC; c++) begin
      codes[c] = 20'($urandom);
      wr(c, {8'd0, 1'b0, AD5791_REG_DAC, codes[c]});
    end
    repeat (250) @(posedge clk);
    for (int c = 0; c < NC; c++) chk(dac_reg[c] == codes[c], $sformatf("ch %0d code %h", c, dac_reg[c]));
    // a second frame on channel 3 while idle; read back bits clocked in
    wr(3, {8'd0, 1'b0, AD5791_REG_DAC, 20'h8_0000});
    repeat (250) @(posedge clk);
    chk(dac_reg[3] == 20'h8_0000, "mid-scale code");
    rd(16'h23, d);
    begin
      logic [23:0] e;
      for (int i = 0; i < 24; i++) e[23 - i] = codes[3][19 - (i % 20)];
      chk(d[23:0] == e, $sformatf("read-back %h expected %h", d[23:0], e));
    end
    // random rounds: a random subset of channels gets new codes; one of them
    // gets a second frame while busy, which must be dropped
    codes[3] = 20'h8_0000;
    for (int r = 0; r < 20; r++) begin
      logic [NC-1:0] sel;
      int victim;
      for (int c = 0; c < NC; c++) edges[c] = 0;
      sel = NC'($urandom) | NC'(1);
      victim = 0;
      for (int c = 0; c < NC; c++) if (sel[c] && $urandom_range(0, 1)) victim = c;
      for (int c = 0; c < NC; c++)
        if (sel[c]) begin
          codes[c] = 20'($urandom);
          wr(c, {8'd0, 1'b0, AD5791_REG_DAC, codes[c]});
        end
      repeat ($urandom_range(0, 100)) @(posedge clk);
      wr(victim, {8'd0, 1'b0, AD5791_REG_DAC, ~codes[victim]});
      repeat (250) @(posedge clk);
      begin
        int bad;
        bad = 0;
        for (int c = 0; c < NC; c++)
          if (dac_reg[c] != codes[c] || edges[c] != (sel[c] ? 24 : 0)) bad++;
        chk(bad == 0, $sformatf("round %0d: %0d channels wrong (sel %b, busy write on %0d)", r, bad, sel, victim));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
