// awg_top: FPGA logic of a four-channel arbitrary waveform generator board.
//
// Each channel owns a level-2 trigger sequencer, an envelope memory with its
// player, and a pre-selected feedback pulse. A level-1 trigger from the TCM
// starts every channel's sequence; each level-2 trigger plays one envelope.
// A feedback trigger from the TCM plays, on every channel whose fb_en bit
// is set, that channel's feedback pulse at once, bypassing the sequencer
// (it wins over a level-2 trigger in the same clock). Only the rising edge
// of fb_trig counts, so a trigger level of any width plays one pulse.
// Channels 0/1 and 2/3 are I/Q pairs for an IQ mixer and pass through
// awg_precomp, whose register is the last pipeline stage. dac_data goes to
// the serialisers of the DAC links: 8 samples of 14 bits per channel per
// clock, lane 0 first in time.
//
// Latency (the AWG's share of the feedback loop): fb_trig sampled at edge k
// -> first sample of the feedback pulse on dac_data after edge k+3, i.e.
// 4 clocks (16 ns): address register, two memory stages, output register.
//
// Host registers (word addresses; all written values are this design's map):
//   0x0000 FB_EN       bit c enables feedback playback on channel c
//   0x0001 ENV_COMMIT  write staged 112-bit word: [15:0] word address, [17:16] channel
//   0x0002 SEQ_COMMIT  write staged sequence entry: [7:0] index, [9:8] channel
//   0x0004..7 ENV_STAGE bits 32*i+31:32*i of the staged envelope word
//   0x0008 SEQ_START   staged entry start time (clocks after level-1 trigger)
//   0x0009 SEQ_ADDRLEN staged entry {len[31:16], addr[15:0]}
//   0x0010+c FB_PULSE  feedback pulse of channel c {len[31:16], addr[15:0]}
//   0x0018+c SEQ_N     number of sequence entries of channel c
//   0x0020+8p+k        precompensation of pair p: k = 0 c11, 1 c12, 2 c21,
//                      3 c22 (Q2.14), 4 off_i, 5 off_q
//   0x0040 SPI_DATA    frame to send (read: last frame read back)
//   0x0041 SPI_GO      write: [5:0] length, [10:8] chip select
//                      (0..3 DACs, 4 PLL); read: bit 0 busy
// Reads return 0 at other addresses, one clock after re.
module awg_top
  import qc_pkg::host_req_t, qc_pkg::host_rsp_t, qc_pkg::seq_entry_t;
#(
  parameter int N_CH      = 4,
  parameter int LANES     = 8,
  parameter int DW        = 14,
  parameter int ENV_DEPTH = 65536,
  parameter int SEQ_DEPTH = 256
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  host_req_t                           host_req,
  output host_rsp_t                           host_rsp,
  input  logic                                l1_trig,
  input  logic                                fb_trig,
  output logic [N_CH-1:0][LANES-1:0][DW-1:0]  dac_data,
  output logic [N_CH-1:0]                     ch_busy,
  output logic                                spi_sclk,
  output logic                                spi_mosi,
  output logic [4:0]                          spi_cs_n,
  input  logic                                spi_miso
);
  localparam int EAW = $clog2(ENV_DEPTH);
  localparam int SAW = $clog2(SEQ_DEPTH);
  localparam int NP  = N_CH / 2;

  // ---------------- host registers ----------------
  logic [N_CH-1:0]           fb_en_q;
  logic [127:0]              env_stage_q;
  logic [31:0]               seq_start_q, seq_al_q;
  logic [N_CH-1:0][31:0]     fb_pulse_q;
  logic [N_CH-1:0][SAW:0]    seq_n_q;
  logic [NP-1:0][5:0][15:0]  pc_q;
  logic [31:0]               spi_data_q;
  logic                      spi_go;
  logic [31:0]               spi_rdata;
  logic                      spi_busy, spi_done;
  logic                      fb_prev_q;

  // A feedback trigger may be a level several clocks long; only its first
  // clock starts the pulse, so a long level cannot restart it.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) fb_prev_q <= 1'b0;
    else        fb_prev_q <= fb_trig;
  wire fb_rise = fb_trig && !fb_prev_q;

  wire wr = host_req.we;
  wire [15:0] a = host_req.addr;
  wire [31:0] d = host_req.wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb_en_q     <= '0;
      env_stage_q <= '0;
      seq_start_q <= '0;
      seq_al_q    <= '0;
      fb_pulse_q  <= '0;
      seq_n_q     <= '0;
      spi_data_q  <= '0;
      for (int p = 0; p < NP; p++) begin
        pc_q[p]    <= '0;
        pc_q[p][0] <= 16'sd16384;
        pc_q[p][3] <= 16'sd16384;
      end
    end else if (wr) begin
      if (a == 16'h0000) fb_en_q <= d[N_CH-1:0];
      if (a[15:2] == 14'h0001) env_stage_q[32*a[1:0] +: 32] <= d;
      if (a == 16'h0008) seq_start_q <= d;
      if (a == 16'h0009) seq_al_q <= d;
      for (int c = 0; c < N_CH; c++) begin
        if (a == 16'h0010 + 16'(c)) fb_pulse_q[c] <= d;
        if (a == 16'h0018 + 16'(c)) seq_n_q[c] <= d[SAW:0];
      end
      for (int p = 0; p < NP; p++)
        for (int k = 0; k < 6; k++)
          if (a == 16'h0020 + 16'(8*p + k)) pc_q[p][k] <= d[15:0];
      if (a == 16'h0040) spi_data_q <= d;
    end
  end

  assign spi_go = wr && (a == 16'h0041);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rsp <= '0;
    end else begin
      host_rsp.rvalid <= host_req.re;
      unique case (a)
        16'h0000: host_rsp.rdata <= 32'(fb_en_q);
        16'h0040: host_rsp.rdata <= spi_rdata;
        16'h0041: host_rsp.rdata <= 32'(spi_busy);
        default:  host_rsp.rdata <= '0;
      endcase
    end
  end

  // ---------------- channels ----------------
  logic [N_CH-1:0][LANES-1:0][DW-1:0] raw;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic        l2_trig, running, start;
    logic [15:0] l2_addr, l2_len, st_addr, st_len;
    seq_entry_t  entry;

    assign entry = '{start: seq_start_q, addr: seq_al_q[15:0], len: seq_al_q[31:16]};

    l2_trigger_seq #(.DEPTH(SEQ_DEPTH)) u_seq (
      .clk       (clk),
      .rst_n     (rst_n),
      .tab_we    (wr && a == 16'h0002 && d[9:8] == 2'(c)),
      .tab_idx   (d[SAW-1:0]),
      .tab_entry (entry),
      .n_entries (seq_n_q[c]),
      .l1_trig   (l1_trig),
      .l2_trig   (l2_trig),
      .l2_addr   (l2_addr),
      .l2_len    (l2_len),
      .running   (running)
    );

    wire fb_go = fb_rise && fb_en_q[c];
    assign start   = fb_go || l2_trig;
    assign st_addr = fb_go ? fb_pulse_q[c][15:0]  : l2_addr;
    assign st_len  = fb_go ? fb_pulse_q[c][31:16] : l2_len;

    awg_wave_player #(.LANES(LANES), .DW(DW), .DEPTH(ENV_DEPTH)) u_play (
      .clk        (clk),
      .rst_n      (rst_n),
      .mem_we     (wr && a == 16'h0001 && d[17:16] == 2'(c)),
      .mem_waddr  (d[EAW-1:0]),
      .mem_wdata  (env_stage_q[LANES*DW-1:0]),
      .start      (start),
      .start_addr (st_addr),
      .start_len  (st_len),
      .dout       (raw[c]),
      .busy       (ch_busy[c])
    );
  end

  for (genvar p = 0; p < NP; p++) begin : g_pc
    awg_precomp #(.LANES(LANES), .DW(DW)) u_pc (
      .clk   (clk),
      .rst_n (rst_n),
      .c11   (pc_q[p][0]),
      .c12   (pc_q[p][1]),
      .c21   (pc_q[p][2]),
      .c22   (pc_q[p][3]),
      .off_i (pc_q[p][4]),
      .off_q (pc_q[p][5]),
      .i_in  (raw[2*p]),
      .q_in  (raw[2*p+1]),
      .i_out (dac_data[2*p]),
      .q_out (dac_data[2*p+1])
    );
  end

  // ---------------- chip configuration ----------------
  spi_master #(.FRAME_W(32), .N_CS(5), .CLK_DIV(4), .CPHA(1'b0)) u_spi (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (spi_go),
    .cs_sel (d[10:8]),
    .len    (d[5:0]),
    .wdata  (spi_data_q),
    .rdata  (spi_rdata),
    .busy   (spi_busy),
    .done   (spi_done),
    .sclk   (spi_sclk),
    .mosi   (spi_mosi),
    .cs_n   (spi_cs_n),
    .miso   (spi_miso)
  );

endmodule
