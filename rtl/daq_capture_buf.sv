// daq_capture_buf: block-RAM buffer that records data words for the host.
//
// The acquisition board keeps two of these per readout line: one records the
// raw ADC words of every acquisition window (so the host can see the signal
// the state decision was made on), the other records one result per shot
// (the integrated I/Q point and the decided state), so the host can collect
// a whole run of shots instead of polling after each one.
//
// `arm` clears the write pointer and enables recording. Every clock with
// in_valid high then writes in_data to the next address, until DEPTH words
// are stored; after that the buffer is `full` and further words are dropped,
// so the first DEPTH words of a run are kept. `count` is the number of words
// stored. The host side reads one word at raddr with a registered read:
// raddr sampled at edge k -> rdata valid after edge k (1 clock), so a host
// that sets raddr in one bus cycle can read rdata in the next. A read and a
// write of the same address in one clock return the old word.
//
// That the board can upload raw data and measurement results follows the
// paper; the buffer sizes, the arm/count protocol and the "keep the first
// DEPTH words" policy are this design's choices.
module daq_capture_buf #(
  parameter int W     = 96,
  parameter int DEPTH = 4096
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       arm,
  input  logic                       in_valid,
  input  logic [W-1:0]               in_data,
  output logic [$clog2(DEPTH):0]     count,
  output logic                       full,
  input  logic [$clog2(DEPTH)-1:0]   raddr,
  output logic [W-1:0]               rdata
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic         en_q;

  assign full = (count == (AW + 1)'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      en_q  <= 1'b0;
    end else if (arm) begin
      count <= '0;
      en_q  <= 1'b1;
    end else if (en_q && in_valid && !full) begin
      count <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!arm && en_q && in_valid && !full) mem[count[AW-1:0]] <= in_data;
    rdata <= mem[raddr];
  end
endmodule
