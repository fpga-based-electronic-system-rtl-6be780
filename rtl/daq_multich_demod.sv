// daq_multich_demod: parallel demodulation of several qubits on one readout line.
//
// Up to about ten qubits share a readout line, each with its own resonator
// tone. The fs/4 mixer has already shifted the band so that it is centred
// on 0 Hz; this block then decimates by 2 (keeping the even samples, lanes
// 0 and 2, with no filter) and, for each of N_CH channels, rotates the
// 500 MSa/s complex stream by that channel's residual frequency with its own
// DDS and integrates the result over the readout window:
//   I'' = I*cos + Q*sin,  Q'' = Q*cos - I*sin,  acc += sum over the 2 samples
// Decimating first halves the number of DDS outputs and multipliers per
// channel. The products are scaled by 2^-15 before accumulation (this
// design's choice). fw[c] = round(2^32 * f_res / 500 MHz), where f_res is
// the tone's offset from 250 MHz; each window restarts every DDS phase at 0.
//
// Interface: the fs/4 mixer's lanes with its window flags. acc_i/acc_q give
// each channel's sum; done pulses when the last word of a window is in.
// Timing: a word at the input at edge k is in acc_* after edge k+3.
module daq_multich_demod #(
  parameter int N_CH    = 8,
  parameter int LANES   = 4,
  parameter int IW      = 13,
  parameter int ACC_W   = 32,
  parameter int AMP_W   = 16,
  parameter int PHASE_W = 32
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [LANES-1:0][IW-1:0]             i_in,
  input  logic [LANES-1:0][IW-1:0]             q_in,
  input  logic                                 in_valid,
  input  logic                                 in_first,
  input  logic                                 in_last,
  input  logic [N_CH-1:0][PHASE_W-1:0]         fw,
  output logic signed [N_CH-1:0][ACC_W-1:0]    acc_i,
  output logic signed [N_CH-1:0][ACC_W-1:0]    acc_q,
  output logic                                 done
);
  localparam int D  = LANES / 2;             // samples per clock after decimation
  localparam int PW = IW + AMP_W + 1;        // one complex-product term pair

  // decimated data, two register stages to meet the DDS output
  logic signed [D-1:0][IW-1:0] di1, dq1, di2, dq2;
  logic [2:0] v_q, f_q, l_q;                 // flags at stages d1, d2, product

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      di1 <= '0; dq1 <= '0; di2 <= '0; dq2 <= '0;
      v_q <= '0; f_q <= '0; l_q <= '0;
    end else begin
      for (int j = 0; j < D; j++) begin
        di1[j] <= i_in[2*j];
        dq1[j] <= q_in[2*j];
      end
      di2 <= di1;
      dq2 <= dq1;
      v_q <= {v_q[1:0], in_valid};
      f_q <= {f_q[1:0], in_first};
      l_q <= {l_q[1:0], in_last};
    end
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic signed [D-1:0][AMP_W-1:0] co, si;
    logic signed [D-1:0][PW-1:0]    pi, pq;
    logic signed [PW:0]             si_sum, sq_sum;

    dds_sincos #(.PHASE_W(PHASE_W), .LUT_AW(10), .AMP_W(AMP_W), .NPAR(D)) u_dds (
      .clk   (clk),
      .rst_n (rst_n),
      .fw    (fw[c]),
      .clear (in_valid && in_first),
      .cos_o (co),
      .sin_o (si)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pi <= '0;
        pq <= '0;
      end else begin
        for (int j = 0; j < D; j++) begin
          // elements of packed arrays are unsigned: cast before widening
          pi[j] <= PW'(signed'(di2[j])) * PW'(signed'(co[j])) + PW'(signed'(dq2[j])) * PW'(signed'(si[j]));
          pq[j] <= PW'(signed'(dq2[j])) * PW'(signed'(co[j])) - PW'(signed'(di2[j])) * PW'(signed'(si[j]));
        end
      end
    end

    always_comb begin
      si_sum = '0;
      sq_sum = '0;
      for (int j = 0; j < D; j++) begin
        si_sum = si_sum + (PW+1)'(signed'(pi[j]));
        sq_sum = sq_sum + (PW+1)'(signed'(pq[j]));
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc_i[c] <= '0;
        acc_q[c] <= '0;
      end else if (v_q[2]) begin
        acc_i[c] <= (f_q[2] ? '0 : acc_i[c]) + ACC_W'(si_sum >>> (AMP_W - 1));
        acc_q[c] <= (f_q[2] ? '0 : acc_q[c]) + ACC_W'(sq_sum >>> (AMP_W - 1));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= v_q[2] && l_q[2];
  end

endmodule
