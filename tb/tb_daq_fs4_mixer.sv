// tb_daq_fs4_mixer: random ADC words against the complex rotation by
// exp(-j*pi*n/2) computed with real cos/sin, one clock later, flags aligned.
module tb_daq_fs4_mixer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int L = 4, W = 12;
  logic [L-1:0][W-1:0] i_in = '0, q_in = '0;
  logic [L-1:0][W:0]   i_out, q_out;
  logic v = 0, f = 0, la = 0, ov, of, ol;
  daq_fs4_mixer #(.LANES(L), .IW(W)) dut (.clk, .rst_n, .i_in, .q_in, .in_valid(v), .in_first(f),
    .in_last(la), .i_out, .q_out, .out_valid(ov), .out_first(of), .out_last(ol));

  function automatic int rnd(input real x);
    return $rtoi($floor(x + 0.5));
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin i_in[l] = W'($urandom); q_in[l] = W'($urandom); end
      if (t == 7) begin i_in = {L{12'h800}}; q_in = {L{12'h800}}; end
      v = 1'($urandom); f = 1'($urandom); la = 1'($urandom);
      @(posedge clk); #1;
      for (int l = 0; l < L; l++) begin
        int n, ii, qq, ci, si;
        n  = t * L + l;
        ii = int'(signed'(i_in[l]));
        qq = int'(signed'(q_in[l]));
        ci = rnd($cos(3.14159265358979 * n / 2.0));
        si = rnd($sin(3.14159265358979 * n / 2.0));
        chk(int'(signed'(i_out[l])) == ii * ci + qq * si, $sformatf("I t%0d l%0d", t, l));
        chk(int'(signed'(q_out[l])) == qq * ci - ii * si, $sformatf("Q t%0d l%0d", t, l));
      end
      chk(ov == v && of == f && ol == la, "flags");
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
