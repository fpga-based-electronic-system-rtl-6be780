// awg_precomp: mixer-leakage precompensation for one I/Q pair of AWG channels.
//
// An analog IQ mixer leaks its local oscillator (from DC offsets at its I and
// Q inputs) and the unwanted sideband (from gain and phase imbalance between
// I and Q). Both are cancelled by pre-distorting the digital samples:
//   I' = sat((c11*I + c12*Q) >>> 14) + off_i
//   Q' = sat((c21*I + c22*Q) >>> 14) + off_q
// with Q2.14 coefficients (16384 = 1.0) and offsets in DAC LSBs, saturated to
// the 14-bit DAC range. The form (a 2x2 matrix and two offsets) is this
// design's choice; the calibration values come from the host. After reset the
// matrix is the identity and the offsets are zero.
//
// Timing: one register stage; this is the last stage of the AWG pipeline.
module awg_precomp #(
  parameter int LANES  = 8,
  parameter int DW     = 14,
  parameter int COEF_W = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic signed [COEF_W-1:0]        c11, c12, c21, c22,
  input  logic signed [COEF_W-1:0]        off_i, off_q,
  input  logic [LANES-1:0][DW-1:0]        i_in,
  input  logic [LANES-1:0][DW-1:0]        q_in,
  output logic [LANES-1:0][DW-1:0]        i_out,
  output logic [LANES-1:0][DW-1:0]        q_out
);
  localparam int PW = DW + COEF_W + 1;      // product sum width
  localparam int FRAC = COEF_W - 2;         // Q2.14

  function automatic logic [DW-1:0] corr(input logic signed [DW-1:0] a,
                                         input logic signed [DW-1:0] b,
                                         input logic signed [COEF_W-1:0] ca,
                                         input logic signed [COEF_W-1:0] cb,
                                         input logic signed [COEF_W-1:0] off);
    logic signed [PW-1:0] acc;
    logic signed [PW-1:0] v;
    logic signed [PW-1:0] vmax, vmin;
    acc  = PW'(a) * PW'(ca) + PW'(b) * PW'(cb);
    v    = (acc >>> FRAC) + PW'(off);
    vmax = PW'((1 << (DW - 1)) - 1);
    vmin = -PW'(1 << (DW - 1));
    if (v > vmax)      return vmax[DW-1:0];
    else if (v < vmin) return vmin[DW-1:0];
    else               return v[DW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_out <= '0;
      q_out <= '0;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        i_out[l] <= corr(i_in[l], q_in[l], c11, c12, off_i);
        q_out[l] <= corr(i_in[l], q_in[l], c21, c22, off_q);
      end
    end
  end

endmodule
