// tb_spi_master: two masters (CPHA = 1 and CPHA = 0) talk to slave models
// that latch mosi on the sampling edge and drive miso; checks the frame
// received, the chip select, the data read back and the frame duration.
module tb_spi_master;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int DIV = 3;
  logic        start [2];
  logic [1:0]  cs_sel = 0;
  logic [5:0]  len = 0;
  logic [31:0] wdata = 0;
  logic [31:0] rdata [2];
  logic        busy [2], done [2], sclk [2], mosi [2], miso [2];
  logic [2:0]  cs_n [2];

  for (genvar m = 0; m < 2; m++) begin : g_m
    spi_master #(.FRAME_W(32), .N_CS(3), .CLK_DIV(DIV), .CPHA(m == 0)) dut (
      .clk, .rst_n, .start(start[m]), .cs_sel, .len, .wdata, .rdata(rdata[m]), .busy(busy[m]),
      .done(done[m]), .sclk(sclk[m]), .mosi(mosi[m]), .cs_n(cs_n[m]), .miso(miso[m]));

    // slave model: latches on the sampling edge (falling for CPHA=1, rising for CPHA=0)
    logic [31:0] rx;
    int          nb;
    logic [31:0] tx;
    wire         sel = (cs_n[m] != 3'b111);
    assign miso[m] = sel ? tx[31 - nb] : 1'b0;
    if (m == 0) begin : g_cpha1
      always @(negedge sclk[0]) if (sel) begin rx = {rx[30:0], mosi[0]}; nb++; end
    end else begin : g_cpha0
      always @(posedge sclk[1]) if (sel) begin rx = {rx[30:0], mosi[1]}; nb++; end
    end
  end

  task automatic frame(input int m, input int cs, input int n, input logic [31:0] v, input logic [31:0] t);
    int cyc;
    g_m[0].nb = 0; g_m[1].nb = 0; g_m[0].rx = 0; g_m[1].rx = 0;
    if (m == 0) g_m[0].tx = t; else g_m[1].tx = t;
    @(negedge clk) begin start[m] = 1; cs_sel = 2'(cs); len = 6'(n); wdata = v; end
    @(posedge clk); #1;
    @(negedge clk) start[m] = 0;
    chk(busy[m] && cs_n[m] == ~(3'b1 << cs), $sformatf("m%0d cs %0d selected", m, cs));
    cyc = 0;
    while (!done[m] && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    chk(cyc == 2 * DIV * n, $sformatf("m%0d frame took %0d clocks, expected %0d", m, cyc, 2 * DIV * n));
    chk(cs_n[m] == 3'b111 && !busy[m], "deselected at done");
    if (m == 0) begin
      chk(g_m[0].nb == n && g_m[0].rx == (v & ((64'd1 << n) - 1)), $sformatf("m0 rx %h", g_m[0].rx));
      chk(rdata[0] == (t >> (32 - n)), $sformatf("m0 rdata %h", rdata[0]));
    end else begin
      chk(g_m[1].nb == n && g_m[1].rx == (v & ((64'd1 << n) - 1)), $sformatf("m1 rx %h", g_m[1].rx));
      chk(rdata[1] == (t >> (32 - n)), $sformatf("m1 rdata %h", rdata[1]));
    end
  endtask

  initial begin
    start[0] = 0; start[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk(sclk[0] == 0 && sclk[1] == 0 && cs_n[0] == 3'b111, "idle pins");
    frame(0, 0, 24, 32'h00123456, 32'hA5C3_0000);
    frame(0, 2, 24, 32'h00F0F0F1, 32'h1234_5678);
    frame(1, 1, 16, 32'h0000BEEF, 32'hCAFE_0000);
    frame(1, 0, 32, 32'hDEADBEEF, 32'h8765_4321);
    frame(0, 1, 1, 32'h1, 32'h8000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
