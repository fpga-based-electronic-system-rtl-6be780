// tb_tcm_top: two TCMs joined in a daisy chain (a master and a follower),
// programmed over their host buses. Checks period and count of the level-1
// triggers, that the delay register lines up both chassis on the same clock,
// the slot mask, and feedback routing to chosen slots.
module tb_tcm_top;
  import qc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NS = 17;
  host_req_t req[2];
  host_rsp_t rsp[2];
  logic chain_ab, chain_out_b;
  logic [NS-1:0] trig[2], fb_in[2], fbt[2];

  tcm_top #(.N_SLOTS(NS)) u_a (.clk, .rst_n, .host_req(req[0]), .host_rsp(rsp[0]), .chain_in(1'b0),
    .chain_out(chain_ab), .trig_out(trig[0]), .fb_in(fb_in[0]), .fb_trig(fbt[0]));
  tcm_top #(.N_SLOTS(NS)) u_b (.clk, .rst_n, .host_req(req[1]), .host_rsp(rsp[1]), .chain_in(chain_ab),
    .chain_out(chain_out_b), .trig_out(trig[1]), .fb_in(fb_in[1]), .fb_trig(fbt[1]));

  task automatic wr(input int t, input int a, input logic [31:0] d);
    @(negedge clk) begin req[t].we = 1; req[t].addr = 16'(a); req[t].wdata = d; end
    @(negedge clk) req[t].we = 0;
  endtask
  task automatic rd(input int t, input int a, output logic [31:0] d);
    @(negedge clk) begin req[t].re = 1; req[t].addr = 16'(a); end
    @(negedge clk) begin req[t].re = 0; d = rsp[t].rdata; end
  endtask

  int na = 0, nb = 0, same = 0;
  always @(posedge clk) begin
    if (trig[0][0]) na++;
    if (trig[1][0]) nb++;
    if (trig[0][0] && trig[1][0]) same++;
  end

  initial begin
    logic [31:0] d;
    req[0] = '0; req[1] = '0; fb_in[0] = '0; fb_in[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(1, 0, 0);                 // B follows the chain
    wr(0, 3, 25);                // period 25
    wr(0, 4, 4);                 // 4 triggers
    wr(0, 5, 1);                 // A waits one clock for the hop to B
    wr(0, 6, 32'h0_0003);        // A: slots 0 and 1 only
    wr(0, 1, 1);                 // start
    repeat (150) @(posedge clk);
    chk(na == 4 && nb == 4, $sformatf("4 triggers each (%0d, %0d)", na, nb));
    chk(same == 4, $sformatf("chassis aligned on %0d of 4", same));
    chk(trig[0][5] == 0, "masked slot");
    rd(0, 7, d); chk(d == 4, "triggers sent");
    rd(0, 8, d); chk(d == 0, "stopped after count");
    // feedback: slot 2 -> slots 0 and 5, slot 7 -> slot 1
    wr(0, 16'h10, 32'h102);
    wr(0, 16'h15, 32'h102);
    wr(0, 16'h11, 32'h107);
    for (int t = 0; t < 40; t++) begin
      logic [NS-1:0] e;
      @(negedge clk) fb_in[0] = NS'($urandom);
      e = '0;
      e[0] = fb_in[0][2]; e[5] = fb_in[0][2]; e[1] = fb_in[0][7];
      @(posedge clk); #1;
      chk(fbt[0] == e, $sformatf("feedback routing t %0d", t));
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
