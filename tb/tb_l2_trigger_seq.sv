// tb_l2_trigger_seq: checks that a level-1 trigger plays the programmed
// entries at start+1 clocks with their address and length, that a new
// level-1 trigger restarts the table, and that an empty table fires nothing;
// then 10 random tables (up to all 256 entries, increasing start times with
// gaps of 1..5 clocks, so many entries fire on consecutive clocks) whose
// every trigger is checked for time, address and length.
module tb_l2_trigger_seq;
  import qc_pkg::seq_entry_t;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic       tab_we = 0, l1 = 0;
  logic [7:0] tab_idx = 0;
  seq_entry_t tab_entry = '0;
  logic [8:0] n_entries = 0;
  logic       l2_trig, running;
  logic [15:0] l2_addr, l2_len;

  l2_trigger_seq #(.DEPTH(256)) dut (.clk, .rst_n, .tab_we, .tab_idx, .tab_entry, .n_entries,
    .l1_trig(l1), .l2_trig, .l2_addr, .l2_len, .running);

  int starts[4] = '{0, 5, 6, 40};
  int got_n[$];
  int got_a[$];

  task automatic run_and_collect(input int ncyc);
    got_n.delete(); got_a.delete();
    @(negedge clk) l1 = 1;
    @(posedge clk); #1;          // edge that samples l1
    @(negedge clk) l1 = 0;
    for (int n = 1; n <= ncyc; n++) begin
      @(posedge clk); #1;
      if (l2_trig) begin got_n.push_back(n); got_a.push_back(int'(l2_addr) + 1000 * int'(l2_len)); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      tab_we = 1; tab_idx = 8'(i);
      tab_entry = '{start: 32'(starts[i]), addr: 16'(100 + i), len: 16'(i + 1)};
    end
    @(negedge clk) tab_we = 0;
    n_entries = 4;
    run_and_collect(60);
    chk(got_n.size() == 4, $sformatf("4 triggers, got %0d", got_n.size()));
    for (int i = 0; i < 4 && i < got_n.size(); i++) begin
      chk(got_n[i] == starts[i] + 1, $sformatf("entry %0d at %0d, expected %0d", i, got_n[i], starts[i] + 1));
      chk(got_a[i] == 100 + i + 1000 * (i + 1), $sformatf("entry %0d addr/len %0d", i, got_a[i]));
    end
    chk(!running, "sequence ended");
    // restart in the middle of a sequence
    n_entries = 3;
    @(negedge clk) l1 = 1;
    @(posedge clk); #1;
    @(negedge clk) l1 = 0;
    repeat (3) @(posedge clk);
    run_and_collect(20);
    chk(got_n.size() == 3 && got_n[0] == 1 && got_n[2] == 7, "restart replays from entry 0");
    n_entries = 0;
    run_and_collect(50);
    chk(got_n.size() == 0, "empty table fires nothing");
    // random tables
    for (int r = 0; r < 10; r++) begin
      int n, t, ok;
      int st[$], ad[$];
      st.delete(); ad.delete();
      n = (r == 0) ? 256 : $urandom_range(1, 256);
      t = $urandom_range(0, 3);
      for (int i = 0; i < n; i++) begin
        int a, len;
        a = $urandom_range(0, 65535); len = $urandom_range(1, 40);
        st.push_back(t); ad.push_back(a + 100000 * len);
        @(negedge clk);
        tab_we = 1; tab_idx = 8'(i);
        tab_entry = '{start: 32'(t), addr: 16'(a), len: 16'(len)};
        t += $urandom_range(1, 5);
      end
      @(negedge clk) tab_we = 0;
      n_entries = 9'(n);
      got_n.delete(); got_a.delete();
      @(negedge clk) l1 = 1;
      @(posedge clk); #1;
      @(negedge clk) l1 = 0;
      for (int k = 1; k <= t + 5; k++) begin
        @(posedge clk); #1;
        if (l2_trig) begin got_n.push_back(k); got_a.push_back(int'(l2_addr) + 100000 * int'(l2_len)); end
      end
      ok = (got_n.size() == n);
      for (int i = 0; i < n && ok; i++) ok = (got_n[i] == st[i] + 1) && (got_a[i] == ad[i]);
      chk(ok && !running, $sformatf("random table %0d: %0d entries, %0d triggers", r, n, got_n.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
