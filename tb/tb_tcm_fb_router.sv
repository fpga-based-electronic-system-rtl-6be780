// tb_tcm_fb_router: random routing tables and feedback inputs against the
// table lookup, one clock later.
module tb_tcm_fb_router;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NS = 17;
  logic [NS-1:0] fb_in = '0, route_en = '0, fb_trig;
  logic [NS-1:0][4:0] route_src = '0;
  tcm_fb_router #(.N_SLOTS(NS)) dut (.clk, .rst_n, .fb_in, .route_src, .route_en, .fb_trig);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [NS-1:0] e;
      @(negedge clk);
      if (t % 20 == 0)
        for (int j = 0; j < NS; j++) begin
          route_src[j] = 5'($urandom_range(0, NS - 1));
          route_en[j]  = 1'($urandom);
        end
      fb_in = NS'($urandom);
      for (int j = 0; j < NS; j++) e[j] = route_en[j] & fb_in[route_src[j]];
      @(posedge clk); #1;
      chk(fb_trig == e, $sformatf("t %0d", t));
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
