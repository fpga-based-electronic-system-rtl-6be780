// tb_awg_env_mem: writes random 112-bit words at random addresses of the
// full-size memory, reads them back and checks data and the 2-clock latency.
module tb_awg_env_mem;
  logic clk = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int DEPTH = 65536;
  logic we = 0;
  logic [15:0] waddr = 0, raddr = 0;
  logic [111:0] wdata = 0, rdata;
  awg_env_mem #(.DEPTH(DEPTH), .WIDTH(112)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  logic [111:0] ref_mem [int];
  int addrs[$];

  initial begin
    for (int i = 0; i < 64; i++) begin
      int a;
      logic [111:0] v;
      a = (i * 1031 + 7) % DEPTH;
      v = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk) begin we = 1; waddr = 16'(a); wdata = v; end
      ref_mem[a] = v;
      addrs.push_back(a);
    end
    @(negedge clk) we = 0;
    foreach (addrs[i]) begin
      @(negedge clk) raddr = 16'(addrs[i]);
      @(posedge clk); #1;               // edge k samples raddr
      @(posedge clk); #1;               // edge k+1: data valid after it
      chk(rdata == ref_mem[addrs[i]], $sformatf("addr %0d", addrs[i]));
    end
    // latency: data must not be there after edge k only
    @(negedge clk) raddr = 16'(addrs[0]);
    @(posedge clk); #1;
    @(negedge clk) raddr = 16'(addrs[1]);
    @(posedge clk); #1;
    chk(rdata == ref_mem[addrs[0]], "pipelined read 0");
    @(posedge clk); #1;
    chk(rdata == ref_mem[addrs[1]], "pipelined read 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
