// tcm_fb_router: feedback routing in the TCM.
//
// A DAQ that has measured a qubit signals the result on its feedback line to
// the TCM; the TCM turns it into a feedback trigger for the AWG that must
// react (for example the one driving the same qubit). Each output slot j has
// a table entry: an enable and the index of the slot whose feedback it
// follows, fb_trig[j] = en[j] & fb_in[src[j]]. One slot's feedback can go to
// many outputs. The table form is this design's choice.
//
// Timing: one register stage (fb_in sampled at edge k, fb_trig after k).
module tcm_fb_router #(
  parameter int N_SLOTS = 17
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic [N_SLOTS-1:0]                        fb_in,
  input  logic [N_SLOTS-1:0][$clog2(N_SLOTS)-1:0]   route_src,
  input  logic [N_SLOTS-1:0]                        route_en,
  output logic [N_SLOTS-1:0]                        fb_trig
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb_trig <= '0;
    end else begin
      for (int j = 0; j < N_SLOTS; j++)
        fb_trig[j] <= route_en[j] && (int'(route_src[j]) < N_SLOTS) && fb_in[route_src[j]];
    end
  end

endmodule
