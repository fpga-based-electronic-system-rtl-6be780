// tb_daq_capture_buf: records random words with random gaps into a 16-word
// buffer and reads them back. Checks that nothing is recorded before the
// first arm, the count, the one-clock read latency, that the first DEPTH
// words are kept and later ones dropped once full, that a word offered in
// the arming clock is not recorded, and that re-arming starts again at
// address 0. A second instance at the default size (96 x 4096) is filled
// completely and spot-checked.
module tb_daq_capture_buf;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int W = 96, D = 16;
  logic          arm = 0, vld = 0;
  logic [W-1:0]  din = '0, rdata;
  logic [4:0]    count;
  logic          full;
  logic [3:0]    raddr = '0;

  daq_capture_buf #(.W(W), .DEPTH(D)) dut (
    .clk, .rst_n, .arm, .in_valid(vld), .in_data(din), .count, .full, .raddr, .rdata);

  // default size
  logic          arm2 = 0, vld2 = 0;
  logic [95:0]   din2 = '0, rdata2;
  logic [12:0]   count2;
  logic          full2;
  logic [11:0]   raddr2 = '0;
  daq_capture_buf dut2 (
    .clk, .rst_n, .arm(arm2), .in_valid(vld2), .in_data(din2), .count(count2), .full(full2),
    .raddr(raddr2), .rdata(rdata2));

  function automatic logic [W-1:0] rnd();
    return {$urandom, $urandom, $urandom};
  endfunction

  logic [W-1:0] ref_q[$];

  task automatic offer(input int n);
    // offers n words, each after a random gap; returns with vld low
    for (int i = 0; i < n; i++) begin
      repeat ($urandom_range(0, 2)) @(negedge clk) vld = 0;
      @(negedge clk) begin vld = 1; din = rnd(); end
      if (ref_q.size() < D) ref_q.push_back(din);
    end
    @(negedge clk) vld = 0;
  endtask

  task automatic readback(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk) raddr = 4'(i);
      @(posedge clk); #1;
      chk(rdata == ref_q[i], $sformatf("word %0d", i));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // not armed: nothing is recorded
    offer(3);
    ref_q.delete();
    chk(count == 0 && !full, "no recording before arm");
    // arm, with a word offered in the same clock (not recorded)
    @(negedge clk) begin arm = 1; vld = 1; din = rnd(); end
    @(negedge clk) begin arm = 0; vld = 0; end
    chk(count == 0, "arming clock records nothing");
    offer(10);
    chk(count == 10 && !full, $sformatf("count %0d", count));
    readback(10);
    offer(9);                               // 6 fit, 3 dropped
    chk(count == 5'(D) && full, "full after DEPTH words");
    readback(D);
    // re-arm: starts again at address 0
    ref_q.delete();
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    chk(count == 0 && !full, "re-arm clears");
    offer(4);
    chk(count == 4, "count after re-arm");
    readback(4);

    // default-size buffer: fill all 4096 words with a pattern
    @(negedge clk) arm2 = 1;
    @(negedge clk) arm2 = 0;
    for (int i = 0; i < 4100; i++) begin
      @(negedge clk) begin vld2 = 1; din2 = {32'(i), 32'(~i), 32'(i * 7)}; end
    end
    @(negedge clk) vld2 = 0;
    chk(count2 == 13'd4096 && full2, "default size: 4096 words");
    for (int k = 0; k < 20; k++) begin
      int i;
      i = (k == 0) ? 4095 : int'($urandom_range(0, 4095));
      @(negedge clk) raddr2 = 12'(i);
      @(posedge clk); #1;
      chk(rdata2 == {32'(i), 32'(~i), 32'(i * 7)}, $sformatf("default size word %0d", i));
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
