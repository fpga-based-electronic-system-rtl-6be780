// awg_wave_player: plays pulse envelopes of one AWG channel from block RAM.
//
// On a start pulse the player streams `start_len` words of 8 samples, starting
// at word `start_addr`, from its envelope memory to the DAC path; between
// pulses it outputs zeros, the idle level of a control line. This is the
// "direct mode" of the AWG: samples go to the DAC exactly as stored, with no
// arithmetic on the way, which keeps the latency short. A start pulse that
// arrives during a pulse stops its reads and starts the new pulse; the words
// of the old pulse already read still come out, so the old pulse ends exactly
// where the new one begins and a pulse started right after another (start =
// previous start + previous length) follows it without a gap (this design's
// choice). A start with length 0 is ignored.
//
// Timing: start sampled at edge k -> the read address is registered at k, the
// memory returns data after k+2, and dout (combinational from the memory
// output) carries the first word during the cycle after edge k+2. The AWG's
// output register (in awg_precomp) adds the fourth clock.
module awg_wave_player #(
  parameter int LANES = 8,
  parameter int DW    = 14,
  parameter int DEPTH = 65536
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host write port of the envelope memory
  input  logic                          mem_we,
  input  logic [$clog2(DEPTH)-1:0]      mem_waddr,
  input  logic [LANES*DW-1:0]           mem_wdata,
  // playback control
  input  logic                          start,
  input  logic [15:0]                   start_addr,
  input  logic [15:0]                   start_len,
  // samples, lane 0 first in time
  output logic [LANES-1:0][DW-1:0]      dout,
  output logic                          busy
);
  localparam int AW = $clog2(DEPTH);

  logic [AW-1:0]         raddr_q;
  logic [15:0]           left_q;     // words still to read after raddr_q
  logic                  rd_q;       // raddr_q is a valid read this cycle
  logic [1:0]            vld_q;      // read valid, delayed to the memory output
  logic [LANES*DW-1:0]   rdata;

  awg_env_mem #(.DEPTH(DEPTH), .WIDTH(LANES*DW)) u_mem (
    .clk   (clk),
    .we    (mem_we),
    .waddr (mem_waddr),
    .wdata (mem_wdata),
    .raddr (raddr_q),
    .rdata (rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raddr_q <= '0;
      left_q  <= '0;
      rd_q    <= 1'b0;
      vld_q   <= '0;
    end else begin
      vld_q <= {vld_q[0], rd_q};
      if (start && start_len != 0) begin
        raddr_q <= AW'(start_addr);
        left_q  <= start_len - 1'b1;
        rd_q    <= 1'b1;
      end else if (rd_q && left_q != 0) begin
        raddr_q <= raddr_q + 1'b1;
        left_q  <= left_q - 1'b1;
      end else begin
        rd_q    <= 1'b0;
      end
    end
  end

  assign dout = vld_q[1] ? rdata : '0;
  assign busy = rd_q | (|vld_q);

endmodule
