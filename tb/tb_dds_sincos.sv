// tb_dds_sincos: after clear, the NPAR outputs per clock must be cos/sin of
// phases 0, fw, 2fw, ... (table resolution 2^10 per turn), checked against
// real cos/sin within one LSB, for several frequency words.
module tb_dds_sincos;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NP = 2;
  logic [31:0] fw = 0;
  logic clear = 0;
  logic signed [NP-1:0][15:0] co, si;
  dds_sincos #(.PHASE_W(32), .LUT_AW(10), .AMP_W(16), .NPAR(NP)) dut (.clk, .rst_n, .fw, .clear,
    .cos_o(co), .sin_o(si));

  function automatic bit near(input int a, input real b);
    return (real'(a) - b <= 1.0) && (b - real'(a) <= 1.0);
  endfunction

  initial begin
    logic [31:0] fws[4];
    fws = '{32'h1000_0000, 32'h0123_4567, 32'hF000_0000, 32'h3333_3333};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (fws[k]) begin
      @(negedge clk) begin fw = fws[k]; clear = 1; end
      @(posedge clk); #1;                 // edge k: phase cleared
      @(negedge clk) clear = 0;
      for (int m = 0; m < 40; m++) begin
        @(posedge clk); #1;               // outputs for word m after edge k+1+m
        for (int j = 0; j < NP; j++) begin
          logic [31:0] ph;
          real ang;
          ph  = 32'(NP * m + j) * fws[k];
          ang = 6.283185307179586 * real'(ph[31:22]) / 1024.0;
          chk(near(int'(signed'(co[j])), 32767.0 * $cos(ang)), $sformatf("fw %h m %0d j %0d cos %0d", fws[k], m, j, co[j]));
          chk(near(int'(signed'(si[j])), 32767.0 * $sin(ang)), $sformatf("fw %h m %0d j %0d sin %0d", fws[k], m, j, si[j]));
        end
      end
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
