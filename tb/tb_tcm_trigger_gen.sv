// tb_tcm_trigger_gen: master mode (period, count, slot mask, delay), stop,
// and follower mode through the daisy-chain input, with exact clock timing;
// then 40 random master runs (period 2..20, count 1..6, delay 0..63, random
// slot mask) and 20 random follower pulses, each checked trigger by trigger:
// slot triggers at 1 + delay + i*period, chain_out at 1 + i*period.
module tb_tcm_trigger_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NS = 17;
  logic master = 1, start = 0, stop = 0, chain_in = 0;
  logic [31:0] period = 10, count = 3;
  logic [5:0]  delay = 0;
  logic [NS-1:0] slot_mask = '1;
  logic chain_out, running;
  logic [NS-1:0] trig_out;
  logic [31:0] n_sent;
  tcm_trigger_gen #(.N_SLOTS(NS)) dut (.clk, .rst_n, .master, .start, .stop, .period, .count, .delay,
    .slot_mask, .chain_in, .chain_out, .trig_out, .running, .n_sent);

  int tn[$];  // cycles at which trig_out was seen
  int cn[$];  // cycles at which chain_out was seen
  logic [NS-1:0] tv[$];

  task automatic observe(input int ncyc);
    tn.delete(); cn.delete(); tv.delete();
    for (int n = 0; n <= ncyc; n++) begin
      if (n > 0) begin @(posedge clk); #1; end
      if (trig_out != 0) begin tn.push_back(n); tv.push_back(trig_out); end
      if (chain_out) cn.push_back(n);
    end
  endtask

  task automatic pulse_start();
    @(negedge clk) start = 1;
    @(posedge clk); #1;
    @(negedge clk) start = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // master, period 10, three triggers
    slot_mask = 17'h0_0107;
    pulse_start();
    observe(60);
    chk(tn.size() == 3, $sformatf("3 triggers, got %0d", tn.size()));
    chk(tn.size() == 3 && tn[0] == 1 && tn[1] == 11 && tn[2] == 21, "trigger times 1, 11, 21");
    chk(tv.size() > 0 && tv[0] == 17'h0_0107, "slot mask applied");
    chk(cn.size() == 3 && cn[0] == 1, "chain_out with trig_out at delay 0");
    chk(n_sent == 3 && !running, "count reached");
    // delay 5
    delay = 5; slot_mask = '1;
    pulse_start();
    observe(40);
    chk(tn.size() == 3 && tn[0] == 6 && tn[1] == 16, "delayed by 5");
    // continuous until stop
    delay = 0; count = 0; period = 4;
    pulse_start();
    observe(30);
    chk(tn.size() == 8, $sformatf("continuous: %0d triggers in 30 clocks", tn.size()));
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    observe(20);
    chk(tn.size() <= 1, "stopped");
    // follower
    master = 0; delay = 3;
    @(negedge clk) chain_in = 1;
    @(posedge clk); #1;
    @(negedge clk) chain_in = 0;
    observe(10);
    chk(tn.size() == 1 && tn[0] == 3, $sformatf("follower trig at delay (%0d)", tn.size() ? tn[0] : -1));
    // random master runs
    master = 1;
    for (int r = 0; r < 40; r++) begin
      int p, c, dl;
      bit ok;
      repeat (64) @(posedge clk);          // empty the delay line before moving the tap
      p = $urandom_range(2, 20); c = $urandom_range(1, 6); dl = $urandom_range(0, 63);
      period = 32'(p); count = 32'(c); delay = 6'(dl);
      slot_mask = NS'($urandom);
      slot_mask[0] = 1'b1;
      pulse_start();
      observe(1 + dl + c * p + 5);
      ok = (tn.size() == c) && (cn.size() == c) && (n_sent == 32'(c)) && !running;
      for (int i = 0; i < c && ok; i++)
        ok = (tn[i] == 1 + dl + i * p) && (tv[i] == slot_mask) && (cn[i] == 1 + i * p);
      chk(ok, $sformatf("random run period %0d count %0d delay %0d: %0d triggers", p, c, dl, tn.size()));
    end
    // random follower pulses
    master = 0;
    for (int r = 0; r < 20; r++) begin
      int dl;
      repeat (64) @(posedge clk);
      dl = $urandom_range(1, 63);
      delay = 6'(dl);
      @(negedge clk) chain_in = 1;
      @(posedge clk); #1;
      @(negedge clk) chain_in = 0;
      observe(dl + 3);
      chk(tn.size() == 1 && tn[0] == dl && tv[0] == slot_mask, $sformatf("follower delay %0d: %0d triggers, first %0d", dl, tn.size(), tn.size() ? tn[0] : -1));
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
