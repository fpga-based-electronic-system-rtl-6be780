// daq_accumulator: the three-stage adder that integrates a readout window.
//
// Integrating the down-converted signal over the readout time raises its
// signal-to-noise ratio. With 4 lanes per clock the work is split into three
// pipelined adder stages: stage 1 adds lanes pairwise (4 -> 2), stage 2 adds
// the pair (2 -> 1 sum per clock), stage 3 accumulates that sum over the
// window. The first word of a window (in_first) restarts the sum; the last
// word (in_last) raises acc_done with the final sum. acc_i/acc_q also show
// the running sum while the window is open.
//
// The code builds a general adder tree of log2(LANES) levels; with the
// default 4 lanes this is exactly the three-stage adder.
// Timing: a word at the input at edge k is included in acc_* after edge k+2
// (three register stages, 12 ns).
module daq_accumulator #(
  parameter int LANES = 4,
  parameter int IW    = 13,
  parameter int ACC_W = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [LANES-1:0][IW-1:0]      i_in,
  input  logic [LANES-1:0][IW-1:0]      q_in,
  input  logic                          in_valid,
  input  logic                          in_first,
  input  logic                          in_last,
  output logic signed [ACC_W-1:0]       acc_i,
  output logic signed [ACC_W-1:0]       acc_q,
  output logic                          acc_done
);
  localparam int LV = $clog2(LANES);   // adder-tree levels

  // tree[v] holds the sums after level v (level 0 = input)
  logic signed [ACC_W-1:0] ti [LV+1][LANES];
  logic signed [ACC_W-1:0] tq [LV+1][LANES];
  logic [LV:0]             v_q, f_q, l_q;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      ti[0][l] = ACC_W'(signed'(i_in[l]));
      tq[0][l] = ACC_W'(signed'(q_in[l]));
    end
  end
  assign v_q[0] = in_valid;
  assign f_q[0] = in_first;
  assign l_q[0] = in_last;

  for (genvar v = 1; v <= LV; v++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int l = 0; l < LANES; l++) begin
          ti[v][l] <= '0;
          tq[v][l] <= '0;
        end
        v_q[v] <= 1'b0;
        f_q[v] <= 1'b0;
        l_q[v] <= 1'b0;
      end else begin
        for (int l = 0; l < (LANES >> v); l++) begin
          ti[v][l] <= ti[v-1][2*l] + ti[v-1][2*l+1];
          tq[v][l] <= tq[v-1][2*l] + tq[v-1][2*l+1];
        end
        for (int l = (LANES >> v); l < LANES; l++) begin
          ti[v][l] <= '0;
          tq[v][l] <= '0;
        end
        v_q[v] <= v_q[v-1];
        f_q[v] <= f_q[v-1];
        l_q[v] <= l_q[v-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_i    <= '0;
      acc_q    <= '0;
      acc_done <= 1'b0;
    end else begin
      acc_done <= v_q[LV] && l_q[LV];
      if (v_q[LV]) begin
        acc_i <= (f_q[LV] ? '0 : acc_i) + ti[LV][0];
        acc_q <= (f_q[LV] ? '0 : acc_q) + tq[LV][0];
      end
    end
  end

endmodule
