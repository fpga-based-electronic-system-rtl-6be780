// awg_env_mem: pulse-envelope memory of one AWG channel.
//
// Holds the pulse envelopes that the host preloads, one word per 250 MHz clock
// (8 samples of 14 bits = 112 bits, the amount one DAC consumes per clock at
// 2 GSa/s). It is on-chip block RAM rather than external DDR4 because its read
// latency is 2 clocks instead of about 14. The default depth, 64 Ki words per
// channel (7.3 Mbit, 29.4 Mbit for four channels), is this design's reading of
// the roughly 30 Mbit of block RAM available on the board's FPGA.
//
// Simple dual-port: a write port for the host and a read port for the player.
// Read timing: raddr sampled at edge k, rdata valid after edge k+1 (a
// registered array read followed by the BRAM output register).
module awg_env_mem #(
  parameter int DEPTH = 65536,
  parameter int WIDTH = 112
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [WIDTH-1:0] q1;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    q1    <= mem[raddr];
    rdata <= q1;
  end

endmodule
