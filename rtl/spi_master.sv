// spi_master: shifts configuration frames out to the converter, clock and
// precision-DAC chips.
//
// Every board configures its chips (DACs, ADCs, PLL, the BVG's 20-bit DACs)
// over SPI. A request gives the chip select, the frame length in bits
// (1..FRAME_W) and the frame, right-aligned in wdata; bits go out MSB first.
// Each bit lasts 2*CLK_DIV clocks in two halves. The data bit is driven at
// the start of the first half; the edge between the halves is the sampling
// edge, on which the slave latches mosi and the master latches miso. With
// CPOL = 0 (sclk idles low) that edge is falling for CPHA = 1 (the mode of
// the AD5791) and rising for CPHA = 0. cs_n stays low for the whole frame.
// The bits read back are in rdata, right-aligned, when done pulses.
// The mode and divider are this design's choices.
//
// Handshake: start is taken only while busy is low; done is a one-clock
// pulse one clock after the last half-bit.
module spi_master #(
  parameter int FRAME_W = 32,
  parameter int N_CS    = 1,
  parameter int CLK_DIV = 4,
  parameter bit CPHA    = 1'b1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [$clog2(N_CS+1)-1:0]        cs_sel,
  input  logic [$clog2(FRAME_W+1)-1:0]     len,
  input  logic [FRAME_W-1:0]               wdata,
  output logic [FRAME_W-1:0]               rdata,
  output logic                             busy,
  output logic                             done,
  output logic                             sclk,
  output logic                             mosi,
  output logic [N_CS-1:0]                  cs_n,
  input  logic                             miso
);
  localparam int DW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  logic [FRAME_W-1:0]            sh_q;     // MSB is the bit on the wire
  logic [$clog2(FRAME_W+1)-1:0]  bits_q;   // bits left, including current
  logic                          half_q;   // 0: first half, 1: second half
  logic [DW-1:0]                 div_q;
  logic [$clog2(N_CS+1)-1:0]     cs_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q   <= '0;
      bits_q <= '0;
      half_q <= 1'b0;
      div_q  <= '0;
      cs_q   <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      rdata  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && len != 0) begin
          sh_q   <= wdata << (FRAME_W - int'(len));
          bits_q <= len;
          half_q <= 1'b0;
          div_q  <= '0;
          cs_q   <= cs_sel;
          busy   <= 1'b1;
          rdata  <= '0;
        end
      end else if (div_q != DW'(CLK_DIV - 1)) begin
        div_q <= div_q + 1'b1;
      end else begin
        div_q <= '0;
        if (!half_q) begin
          half_q <= 1'b1;                       // sampling edge
          rdata  <= {rdata[FRAME_W-2:0], miso};
        end else begin
          half_q <= 1'b0;
          sh_q   <= sh_q << 1;
          bits_q <= bits_q - 1'b1;
          if (bits_q == 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assign mosi = busy & sh_q[FRAME_W-1];
  assign sclk = busy & (CPHA ? !half_q : half_q);
  always_comb begin
    cs_n = '1;
    if (busy) cs_n[cs_q] = 1'b0;
  end

endmodule
