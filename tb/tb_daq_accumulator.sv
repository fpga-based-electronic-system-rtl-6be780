// tb_daq_accumulator: random windows of random words; checks the final sums,
// that a new window restarts the sum, words outside a window are ignored,
// and the 3-clock latency from the last word to acc_done.
module tb_daq_accumulator;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int L = 4, W = 13;
  logic [L-1:0][W-1:0] i_in = '0, q_in = '0;
  logic v = 0, f = 0, la = 0, done;
  logic signed [31:0] acc_i, acc_q;
  daq_accumulator #(.LANES(L), .IW(W), .ACC_W(32)) dut (.clk, .rst_n, .i_in, .q_in, .in_valid(v),
    .in_first(f), .in_last(la), .acc_i, .acc_q, .acc_done(done));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 20; w++) begin
      int len, si, sq, gap, seen;
      len = (w == 0) ? 1 : int'($urandom_range(1, 40));
      gap = int'($urandom_range(0, 4));
      si = 0; sq = 0;
      for (int g = 0; g < gap; g++) begin       // idle words must not count
        @(negedge clk);
        v = 0; f = 0; la = 0;
        for (int l = 0; l < L; l++) begin i_in[l] = W'($urandom); q_in[l] = W'($urandom); end
      end
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        v = 1; f = (k == 0); la = (k == len - 1);
        for (int l = 0; l < L; l++) begin
          i_in[l] = W'($urandom); q_in[l] = W'($urandom);
          si += int'(signed'(i_in[l])); sq += int'(signed'(q_in[l]));
        end
      end
      @(posedge clk); #1;                          // edge k samples the last word
      @(negedge clk) begin v = 0; f = 0; la = 0; end
      seen = -1;
      for (int n = 1; n <= 4; n++) begin
        @(posedge clk); #1;
        if (done && seen < 0) begin
          seen = n;
          chk(acc_i == si && acc_q == sq, $sformatf("window %0d len %0d sums %0d/%0d vs %0d/%0d",
              w, len, acc_i, acc_q, si, sq));
        end
      end
      chk(seen == 2, $sformatf("acc_done after edge k+2, got k+%0d", seen));
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
