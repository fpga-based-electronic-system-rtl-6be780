// daq_fs4_mixer: digital down-conversion of an fs/4 intermediate frequency.
//
// The ADC pair samples the analog I and Q outputs of the readout IQ mixer at
// fs = 1 GSa/s. With the intermediate frequency at fs/4 = 250 MHz, the
// complex rotation S = (I + jQ) * exp(-j*pi*n/2) only ever multiplies by
// cos = 1, 0, -1, 0 and sin = 0, 1, 0, -1:
//   I' = I*cos + Q*sin,   Q' = Q*cos - I*sin
// so the mixer needs no multipliers, just lane swaps and negations. Since
// 4 samples arrive per clock, lane k always holds sample n = 4m + k and
// its coefficients are constant (lane 0: ( I, Q); lane 1: ( Q,-I);
// lane 2: (-I,-Q); lane 3: (-Q, I)). LANES must be a multiple of 4.
//
// Output width is one bit wider than the input so that -(-2048) fits.
// Window flags (valid/first/last) travel with the data.
// Timing: one register stage (4 ns).
module daq_fs4_mixer #(
  parameter int LANES = 4,
  parameter int IW    = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [LANES-1:0][IW-1:0]      i_in,
  input  logic [LANES-1:0][IW-1:0]      q_in,
  input  logic                          in_valid,
  input  logic                          in_first,
  input  logic                          in_last,
  output logic [LANES-1:0][IW:0]        i_out,
  output logic [LANES-1:0][IW:0]        q_out,
  output logic                          out_valid,
  output logic                          out_first,
  output logic                          out_last
);
  logic [LANES-1:0][IW:0] mi, mq;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [IW:0] si, sq;
      si = (IW+1)'(signed'(i_in[l]));
      sq = (IW+1)'(signed'(q_in[l]));
      case (l % 4)
        0:       begin mi[l] =  si; mq[l] =  sq; end
        1:       begin mi[l] =  sq; mq[l] = -si; end
        2:       begin mi[l] = -si; mq[l] = -sq; end
        default: begin mi[l] = -sq; mq[l] =  si; end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_out     <= '0;
      q_out     <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      i_out     <= mi;
      q_out     <= mq;
    end
  end

endmodule
