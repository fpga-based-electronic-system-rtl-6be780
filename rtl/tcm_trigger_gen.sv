// tcm_trigger_gen: level-1 trigger generation and distribution of a TCM.
//
// A level-1 trigger starts one complete operation of the qubits (one
// preparation-control-measurement cycle). The master TCM issues `count`
// triggers, one every `period` clocks (count = 0: until stop), and sends each
// to its slots over the backplane as a one-clock pulse on a star of
// point-to-point lines (trig_out, enabled per slot by slot_mask).
//
// Several chassis are joined by a daisy chain: each TCM passes the trigger
// it uses to the next TCM through chain_out, one clock later. A TCM in
// follower mode (master = 0) takes its trigger from chain_in instead of its
// own generator. Since the trigger reaches each TCM in the chain a few clocks
// later than the one before, every TCM delays its slot triggers by its own
// `delay` (0..MAX_DELAY-1 clocks); giving hop i of an n-TCM chain the delay
// (n-1-i) * (hop latency) makes all chassis fire on the same clock. This
// equalisation is this design's way of making the chain synchronous.
//
// Timing: trig_out and chain_out are registered copies of the trigger in
// use. In follower mode, chain_in sampled at edge k shows on both after edge
// k (plus `delay` clocks on trig_out). In master mode, start sampled at edge
// k gives the first trigger on trig_out after edge k+1+delay and the next
// ones every `period` clocks.
// The delay is a tap on a MAX_DELAY-stage shift register that every trigger
// runs through. `delay` is a setting of the chain, made once: if it is
// increased within MAX_DELAY clocks after a trigger, that trigger can appear
// a second time at the new tap.
module tcm_trigger_gen #(
  parameter int N_SLOTS   = 17,
  parameter int TIME_W    = 32,
  parameter int MAX_DELAY = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          master,
  input  logic                          start,
  input  logic                          stop,
  input  logic [TIME_W-1:0]             period,
  input  logic [31:0]                   count,
  input  logic [$clog2(MAX_DELAY)-1:0]  delay,
  input  logic [N_SLOTS-1:0]            slot_mask,
  input  logic                          chain_in,
  output logic                          chain_out,
  output logic [N_SLOTS-1:0]            trig_out,
  output logic                          running,
  output logic [31:0]                   n_sent
);
  logic [TIME_W-1:0]    t_q;
  logic                 gen;           // generator pulse this cycle
  logic                 src;           // trigger in use
  logic [MAX_DELAY-1:0] dl_q;          // delay line, dl_q[0] = src one clock ago

  assign gen = running && (t_q == '0);
  assign src = master ? gen : chain_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      t_q     <= '0;
      n_sent  <= '0;
    end else begin
      if (start && master) begin
        running <= 1'b1;
        t_q     <= '0;
        n_sent  <= '0;
      end else if (stop) begin
        running <= 1'b0;
      end else if (running) begin
        t_q <= (t_q >= period - 1'b1) ? '0 : t_q + 1'b1;
        if (gen) begin
          n_sent <= n_sent + 1'b1;
          if (count != 0 && n_sent + 1'b1 >= count) running <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dl_q      <= '0;
      chain_out <= 1'b0;
      trig_out  <= '0;
    end else begin
      dl_q      <= {dl_q[MAX_DELAY-2:0], src};
      chain_out <= src;
      trig_out  <= (delay == 0 ? {N_SLOTS{src}} : {N_SLOTS{dl_q[delay - 1'b1]}}) & slot_mask;
    end
  end

endmodule
