// tb_workload_multi_chassis: a system of several chassis, each with its own
// timing control module, whose level-1 triggers must reach every board of
// every chassis on the same clock.
//
// Four TCMs at the default size (17 slots each) are joined in a daisy chain:
// TCM 0 is the master and generates the triggers, TCMs 1..3 follow the chain.
// Each hop adds one clock. First all delays are 0, and the testbench checks
// that TCM i fires i clocks after the master (the skew the chain causes).
// Then TCM i gets the delay 3 - i and the testbench checks that all 68 slot
// lines fire together, on every one of the triggers, one every PERIOD clocks,
// and that the master counts the triggers of its run. The aligned run gives
// each TCM a random slot mask, to check that masked slots stay silent.
module tb_workload_multi_chassis;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NT = 4, NS = 17, PERIOD = 40, NTRIG = 8;
  host_req_t req [NT];
  host_rsp_t rsp [NT];
  logic [NT:0]              chain;
  logic [NT-1:0][NS-1:0]    trig;
  logic [NT-1:0][NS-1:0]    fbt;
  assign chain[0] = 1'b0;

  for (genvar i = 0; i < NT; i++) begin : g_tcm
    tcm_top u_tcm (.clk, .rst_n, .host_req(req[i]), .host_rsp(rsp[i]), .chain_in(chain[i]),
      .chain_out(chain[i+1]), .trig_out(trig[i]), .fb_in('0), .fb_trig(fbt[i]));
  end

  task automatic wr(input int t, input int a, input logic [31:0] d);
    @(negedge clk) begin req[t].we = 1; req[t].addr = 16'(a); req[t].wdata = d; end
    @(negedge clk) req[t].we = 0;
  endtask
  task automatic rd(input int t, input int a, output logic [31:0] d);
    @(negedge clk) begin req[t].re = 1; req[t].addr = 16'(a); end
    @(negedge clk) begin req[t].re = 0; d = rsp[t].rdata; end
  endtask

  // record the edges at which each TCM's slots fire
  int  edge_n = 0;
  int  fire_t [NT][$];
  logic [NS-1:0] fire_m [NT][$];
  always @(posedge clk) begin
    edge_n <= edge_n + 1;
    if (rst_n)
      for (int i = 0; i < NT; i++)
        if (trig[i] != '0) begin fire_t[i].push_back(edge_n); fire_m[i].push_back(trig[i]); end
  end

  task automatic clear_log();
    for (int i = 0; i < NT; i++) begin fire_t[i].delete(); fire_m[i].delete(); end
  endtask

  task automatic run();
    wr(0, 1, 1);                                    // START on the master
    repeat (PERIOD * NTRIG + 80) @(posedge clk);
  endtask

  initial begin
    logic [31:0] d;
    logic [NS-1:0] mask [NT];
    for (int i = 0; i < NT; i++) req[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(0, 0, 1);
    wr(0, 3, PERIOD);
    wr(0, 4, NTRIG);
    for (int i = 1; i < NT; i++) wr(i, 0, 0);       // followers
    // 1: no equalisation, every hop one clock later
    clear_log();
    run();
    for (int i = 0; i < NT; i++) begin
      chk(fire_t[i].size() == NTRIG, $sformatf("skewed: TCM %0d fired %0d times", i, fire_t[i].size()));
      for (int k = 0; k < NTRIG && k < fire_t[i].size() && fire_t[0].size() == NTRIG; k++) begin
        chk(fire_t[i][k] - fire_t[0][k] == i,
            $sformatf("skewed: TCM %0d trigger %0d is %0d clocks after the master", i, k, fire_t[i][k] - fire_t[0][k]));
        chk(fire_m[i][k] == '1, $sformatf("skewed: TCM %0d trigger %0d slots %h", i, k, fire_m[i][k]));
      end
      if (fire_t[i].size() > 1)
        chk(fire_t[i][1] - fire_t[i][0] == PERIOD, $sformatf("TCM %0d period %0d", i, fire_t[i][1] - fire_t[i][0]));
    end
    // 2: delay 3 - i on TCM i, random slot masks: every slot line together
    for (int i = 0; i < NT; i++) begin
      mask[i] = NS'($urandom) | NS'(1);
      wr(i, 5, NT - 1 - i);
      wr(i, 6, mask[i]);
    end
    repeat (70) @(posedge clk);                     // delay lines settle
    clear_log();
    run();
    for (int i = 0; i < NT; i++) begin
      chk(fire_t[i].size() == NTRIG, $sformatf("aligned: TCM %0d fired %0d times", i, fire_t[i].size()));
      for (int k = 0; k < NTRIG && k < fire_t[i].size() && fire_t[0].size() == NTRIG; k++) begin
        chk(fire_t[i][k] == fire_t[0][k],
            $sformatf("aligned: TCM %0d trigger %0d off by %0d clocks", i, k, fire_t[i][k] - fire_t[0][k]));
        chk(fire_m[i][k] == mask[i], $sformatf("aligned: TCM %0d trigger %0d slots %h, mask %h", i, k, fire_m[i][k], mask[i]));
      end
      rd(i, 7, d);
      // the counter belongs to the generator: the master's run, 0 on followers
      chk(d == ((i == 0) ? 32'(NTRIG) : 32'd0), $sformatf("TCM %0d counted %0d triggers", i, d));
    end
    $display("%0d chassis x %0d slots aligned on %0d triggers", NT, NS, NTRIG);
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
