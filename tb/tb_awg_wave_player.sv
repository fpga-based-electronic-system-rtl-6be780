// tb_awg_wave_player: loads envelopes, starts pulses and checks the samples,
// the zero idle level, the 2-clock start-to-data latency, that a new start
// cuts a running pulse off exactly where the new one begins, and (against a
// cycle model, with random starts, lengths and gaps, including pulses started
// back to back) that the output is always the expected word stream.
module tb_awg_wave_player;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int LANES = 8, DW = 14, DEPTH = 1024;
  logic mem_we = 0;
  logic [9:0] mem_waddr = 0;
  logic [LANES*DW-1:0] mem_wdata = 0;
  logic start = 0;
  logic [15:0] start_addr = 0, start_len = 0;
  logic [LANES-1:0][DW-1:0] dout;
  logic busy;
  awg_wave_player #(.LANES(LANES), .DW(DW), .DEPTH(DEPTH)) dut (.clk, .rst_n, .mem_we, .mem_waddr,
    .mem_wdata, .start, .start_addr, .start_len, .dout, .busy);

  function automatic logic [LANES*DW-1:0] word(input int a);
    logic [LANES*DW-1:0] w;
    for (int l = 0; l < LANES; l++) w[l*DW +: DW] = DW'(a * 8 + l + 1);
    return w;
  endfunction

  // start a pulse and compare n = 0..ncyc after the sampling edge
  task automatic play(input int addr, input int len, input int ncyc, input int tail = -1);
    @(negedge clk) begin start = 1; start_addr = 16'(addr); start_len = 16'(len); end
    @(posedge clk); #1;
    @(negedge clk) start = 0;
    for (int n = 1; n <= ncyc; n++) begin
      logic [LANES*DW-1:0] exp_w;
      @(posedge clk); #1;
      exp_w = (n >= 2 && n < 2 + len) ? word(addr + n - 2) :
              (n == 1 && tail >= 0)    ? word(tail) : '0;
      chk(dout == exp_w, $sformatf("addr %0d len %0d cycle %0d", addr, len, n));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk) begin mem_we = 1; mem_waddr = 10'(a); mem_wdata = word(a); end
    end
    @(negedge clk) mem_we = 0;
    chk(dout == '0 && !busy, "idle after reset");
    play(5, 3, 8);
    play(20, 1, 5);
    play(40, 10, 14);
    // abort: start at 0 with len 10, restart at 30 after 3 clocks
    @(negedge clk) begin start = 1; start_addr = 0; start_len = 10; end
    @(negedge clk) start = 0;
    @(negedge clk);
    // words 0, 1, 2 were read before the restart; word 2 is still on its way
    play(30, 2, 6, 2);
    // random starts against a model: reads[e] is the word read at edge e
    begin
      int reads[$];
      int cur, left, e;
      cur = 0; left = 0; e = 0;
      for (int i = 0; i < 400; i++) begin
        bit st;
        int a, n;
        st = ($urandom_range(0, 4) == 0);
        a  = $urandom_range(0, 50);
        n  = $urandom_range(1, 6);
        @(negedge clk) begin start = st; start_addr = 16'(a); start_len = 16'(n); end
        @(posedge clk); #1;
        if (st) begin cur = a; left = n; end
        if (left > 0) begin reads.push_back(cur); cur++; left--; end
        else reads.push_back(-1);
        // after edge e the output shows the word read at edge e-2
        if (e >= 2)
          chk(dout == (reads[e - 2] >= 0 ? word(reads[e - 2]) : '0), $sformatf("random stream edge %0d", e));
        e++;
      end
      @(negedge clk) start = 0;
    end
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
