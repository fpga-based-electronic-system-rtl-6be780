// dds_sincos: direct digital synthesiser giving NPAR phases per clock.
//
// A phase accumulator advances by NPAR*fw per clock; output j carries the
// cosine and sine of phase (acc + j*fw), so the block delivers NPAR
// consecutive samples of exp(j*2*pi*fw*n/2^PHASE_W) per clock. The top
// LUT_AW bits of each phase address a cosine table,
//   TAB[k] = round((2^(AMP_W-1) - 1) * cos(2*pi*k / 2^LUT_AW)),
// computed at elaboration; the sine reads the same table a quarter turn
// back (sin x = cos(x - pi/2)). `clear` restarts the phase at zero so that
// every readout window is demodulated with the same starting phase.
//
// Timing: clear sampled at edge k -> outputs for phases 0, fw, ... are valid
// after edge k+1 (phase register at k, table register at k+1), and each
// following clock continues the sequence.
module dds_sincos #(
  parameter int PHASE_W = 32,
  parameter int LUT_AW  = 10,
  parameter int AMP_W   = 16,
  parameter int NPAR    = 2
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [PHASE_W-1:0]                  fw,
  input  logic                                clear,
  output logic signed [NPAR-1:0][AMP_W-1:0]   cos_o,
  output logic signed [NPAR-1:0][AMP_W-1:0]   sin_o
);
  localparam int N = 1 << LUT_AW;
  typedef logic signed [AMP_W-1:0] tab_t [N];

  function automatic tab_t make_tab();
    tab_t t;
    for (int k = 0; k < N; k++)
      t[k] = AMP_W'($rtoi($floor($cos(2.0 * 3.14159265358979323846 * k / N)
                                  * (2.0 ** (AMP_W - 1) - 1.0) + 0.5)));
    return t;
  endfunction

  localparam tab_t TAB = make_tab();

  logic [PHASE_W-1:0] acc_q;
  logic [PHASE_W-1:0] ph [NPAR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc_q <= '0;
    else if (clear) acc_q <= '0;
    else            acc_q <= acc_q + PHASE_W'(NPAR) * fw;
  end

  always_comb begin
    for (int j = 0; j < NPAR; j++) ph[j] = acc_q + PHASE_W'(j) * fw;
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < NPAR; j++) begin
      logic [LUT_AW-1:0] a;
      a = ph[j][PHASE_W-1 -: LUT_AW];
      cos_o[j] <= TAB[a];
      sin_o[j] <= TAB[LUT_AW'(a - LUT_AW'(N / 4))];
    end
  end

endmodule
