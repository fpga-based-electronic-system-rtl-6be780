// daq_state_disc: qubit-state discrimination and feedback generation.
//
// At the end of a readout window the integrated point (I, Q) lies in one of
// two clouds, one for the ground and one for the excited state. The block
// moves the origin to the reference point (X0, Y0), projects onto the axis
// that separates the clouds (a rotation by the angle theta, given as
// cos_t/sin_t in Q1.15) and compares the projection with a threshold:
//   p = ((I - X0)*cos_t + (Q - Y0)*sin_t) >>> 15,   state = (p > threshold)
// State 1 means excited. For the excited state the feedback output `fb`
// goes high for fb_width clocks (minimum 1); a ground-state result gives no
// pulse. Subtraction, rotation, comparison and the output register all fit
// in one clock so that the feedback generator costs only 4 ns.
// The projection formula, the Q1.15 format and the pulse length register
// are this design's choices.
//
// Timing: acc_done sampled at edge k -> state/state_valid/fb high after k.
module daq_state_disc #(
  parameter int ACC_W  = 32,
  parameter int COEF_W = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic signed [ACC_W-1:0]     acc_i,
  input  logic signed [ACC_W-1:0]     acc_q,
  input  logic                        acc_done,
  input  logic signed [ACC_W-1:0]     x0,
  input  logic signed [ACC_W-1:0]     y0,
  input  logic signed [COEF_W-1:0]    cos_t,
  input  logic signed [COEF_W-1:0]    sin_t,
  input  logic signed [ACC_W-1:0]     threshold,
  input  logic [7:0]                  fb_width,
  output logic                        state,
  output logic                        state_valid,
  output logic signed [ACC_W-1:0]     proj,
  output logic                        fb
);
  localparam int PW = ACC_W + COEF_W + 2;

  logic signed [ACC_W:0]  di, dq;
  logic signed [PW-1:0]   p_full;
  logic signed [PW-1:0]   p_d;
  logic                   st_d;
  logic [7:0]             fb_cnt_q;

  always_comb begin
    di     = (ACC_W+1)'(acc_i) - (ACC_W+1)'(x0);
    dq     = (ACC_W+1)'(acc_q) - (ACC_W+1)'(y0);
    p_full = PW'(di) * PW'(cos_t) + PW'(dq) * PW'(sin_t);
    p_d    = p_full >>> (COEF_W - 1);
    st_d   = p_d > PW'(threshold);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= 1'b0;
      state_valid <= 1'b0;
      proj        <= '0;
      fb          <= 1'b0;
      fb_cnt_q    <= '0;
    end else begin
      state_valid <= acc_done;
      if (acc_done) begin
        state <= st_d;
        proj  <= ACC_W'(p_d);
      end
      if (acc_done && st_d) begin
        fb       <= 1'b1;
        fb_cnt_q <= (fb_width > 8'd1) ? fb_width - 8'd1 : 8'd0;
      end else if (fb_cnt_q != 0) begin
        fb_cnt_q <= fb_cnt_q - 1'b1;
      end else begin
        fb       <= 1'b0;
      end
    end
  end

endmodule
