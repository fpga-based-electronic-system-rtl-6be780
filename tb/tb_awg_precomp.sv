// tb_awg_precomp: random samples, matrices and offsets against a reference
// computed in 64-bit integers, including saturation at both ends, with a
// one-clock latency.
module tb_awg_precomp;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int LANES = 8, DW = 14;
  logic signed [15:0] c11 = 16384, c12 = 0, c21 = 0, c22 = 16384, off_i = 0, off_q = 0;
  logic [LANES-1:0][DW-1:0] i_in = '0, q_in = '0, i_out, q_out;
  awg_precomp #(.LANES(LANES), .DW(DW)) dut (.clk, .rst_n, .c11, .c12, .c21, .c22, .off_i, .off_q,
    .i_in, .q_in, .i_out, .q_out);

  function automatic int model(input int a, input int b, input int ca, input int cb, input int off);
    longint s;
    s = longint'(a) * ca + longint'(b) * cb;
    s = (s >= 0) ? s / 16384 : -((-s + 16383) / 16384);   // floor division
    s = s + off;
    if (s > 8191) s = 8191;
    if (s < -8192) s = -8192;
    return int'(s);
  endfunction

  function automatic int sx(input logic [DW-1:0] v);
    return int'(signed'(v));
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      if (t > 0) begin
        c11 = 16'($urandom_range(8000, 24000)); c12 = 16'(int'($urandom_range(0, 8000)) - 4000);
        c21 = 16'(int'($urandom_range(0, 8000)) - 4000); c22 = 16'($urandom_range(8000, 24000));
        off_i = 16'(int'($urandom_range(0, 400)) - 200); off_q = 16'(int'($urandom_range(0, 400)) - 200);
      end
      for (int l = 0; l < LANES; l++) begin
        i_in[l] = DW'($urandom);
        q_in[l] = DW'($urandom);
      end
      if (t % 10 == 5) begin i_in[0] = 14'h1FFF; q_in[0] = 14'h1FFF; end
      if (t % 10 == 6) begin i_in[0] = 14'h2000; q_in[0] = 14'h2000; end
      @(posedge clk); #1;
      for (int l = 0; l < LANES; l++) begin
        chk(sx(i_out[l]) == model(sx(i_in[l]), sx(q_in[l]), c11, c12, off_i),
            $sformatf("t %0d lane %0d I %0d", t, l, sx(i_out[l])));
        chk(sx(q_out[l]) == model(sx(i_in[l]), sx(q_in[l]), c21, c22, off_q),
            $sformatf("t %0d lane %0d Q", t, l));
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
