// l2_trigger_seq: level-2 trigger module of an AWG channel or a DAQ line.
//
// The TCM's level-1 trigger starts one "operation" of the qubits. Inside that
// operation each channel fires its own level-2 triggers: the gate pulses of a
// control line, the measurement pulse of a readout line, or the sampling window
// of the ADC. Instead of storing a whole waveform, the channel stores a short
// table of entries {start, addr, len}: fire at `start` clocks after the
// level-1 trigger, and play/acquire `len` clock words from `addr`. Storing only
// the start times and a small set of pulse envelopes is the compression idea of
// the system; the table layout is this design's own.
//
// Operation: a level-1 trigger clears a cycle counter and rewinds to entry 0.
// While entries remain, the entry at the head is fired in the cycle in which
// the counter equals its start time; entries must be sorted by start time with
// distinct start values. A new level-1 trigger restarts the sequence.
//
// Table: written by the host through tab_we/tab_idx/tab_entry; read with a
// registered read (block-RAM style) addressed with the next index, so the
// head entry is ready in the same cycle it becomes the head and consecutive
// entries may fire on consecutive clocks.
//
// Timing: l1_trig sampled at clock edge k -> l2_trig is high after edge
// k+1+start (a downstream block samples it at edge k+2+start).
module l2_trigger_seq
  import qc_pkg::seq_entry_t;
#(
  parameter int DEPTH  = 256,
  parameter int TIME_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host table port
  input  logic                     tab_we,
  input  logic [$clog2(DEPTH)-1:0] tab_idx,
  input  seq_entry_t               tab_entry,
  input  logic [$clog2(DEPTH):0]   n_entries,
  // trigger in
  input  logic                     l1_trig,
  // trigger out
  output logic                     l2_trig,
  output logic [15:0]              l2_addr,
  output logic [15:0]              l2_len,
  output logic                     running
);
  localparam int IW = $clog2(DEPTH);

  seq_entry_t             table_q [DEPTH];
  seq_entry_t             head_q;        // table_q[idx_q], prefetched
  logic [IW:0]            idx_q, idx_d;
  logic [TIME_W-1:0]      t_q;
  logic                   fire;

  always_ff @(posedge clk) begin
    if (tab_we) table_q[tab_idx] <= tab_entry;
  end

  assign fire  = running && (idx_q < n_entries) && (t_q == head_q.start);
  assign idx_d = l1_trig ? '0 : (fire ? idx_q + 1'b1 : idx_q);

  always_ff @(posedge clk) begin
    head_q <= table_q[idx_d[IW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      idx_q     <= '0;
      t_q       <= '0;
      l2_trig   <= 1'b0;
      l2_addr   <= '0;
      l2_len    <= '0;
    end else begin
      idx_q     <= idx_d;
      l2_trig   <= fire;
      if (fire) begin
        l2_addr <= head_q.addr;
        l2_len  <= head_q.len;
      end
      if (l1_trig) begin
        running <= (n_entries != 0);
        t_q     <= '0;
      end else if (running) begin
        t_q <= t_q + 1'b1;
        if (fire && (idx_q + 1'b1 >= n_entries)) running <= 1'b0;
      end
    end
  end

endmodule
