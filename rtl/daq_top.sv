// daq_top: FPGA logic of the data acquisition (readout) board.
//
// Two readout lines, each the I and Q outputs of an analog IQ down-mixer
// digitised at 1 GSa/s (4 samples per channel per 250 MHz clock). Per line:
//   * a level-2 trigger sequencer opens acquisition windows; an entry's len
//     is the window length in clocks (the readout time);
//   * daq_fs4_mixer -> daq_accumulator -> daq_state_disc is the low-latency
//     path that integrates the window, decides the qubit state and raises
//     the feedback line;
//   * daq_multich_demod demodulates up to 8 frequency-multiplexed qubits of
//     the same line in parallel over the same window.
// The board has one feedback line to the TCM; FB_SEL picks the line that
// drives it. Results stay in registers for the host (last result of each
// line and channel, with a counter). For upload, each line also has two
// daq_capture_buf buffers: one records the raw ADC words of every window
// (I lanes in [47:0], Q lanes in [95:48]), the other one result per shot.
//
// Window timing: l2_trig is registered into the window flags, so the first
// word of a window is the ADC word the mixer samples two clocks after the
// sequencer raises l2_trig.
// Latency: last ADC word of a window sampled at edge k -> fb_out after edge
// k+4, i.e. 5 clocks (20 ns): mixer 1, accumulator 3, discriminator 1.
//
// Host registers (word addresses, this design's map):
//   0x0000 FB_SEL       line that drives fb_out
//   0x0001 SEQ_COMMIT   write staged entry: [7:0] index, [8] line
//   0x0002 SEQ_START    staged entry start time
//   0x0003 SEQ_ADDRLEN  staged entry {len[31:16], tag[15:0]}
//   line L at base 0x0100*(L+1):
//     +0 X0, +1 Y0, +2 {sin_t[31:16], cos_t[15:0]} (Q1.15), +3 THRESHOLD,
//     +4 FB_WIDTH, +5 SEQ_N, +0x10+c FW of channel c
//     read: +0x20 result count, +0x21 state, +0x22 sum I, +0x23 sum Q,
//           +0x24 projection, +0x25 multi-channel count,
//           +0x40+2c / +0x41+2c sum I / Q of channel c
//     capture: write +6 RAW_ARM, +7 RES_ARM (start recording from address
//     0), +8 RAW_RADDR, +9 RES_RADDR (word to read back);
//     read +0x26 raw words stored, +0x27 results stored,
//     +0x28/+0x29/+0x2A bits [31:0]/[63:32]/[95:64] of raw word RAW_RADDR,
//     +0x2B sum I, +0x2C sum Q, +0x2D projection, +0x2E state of result
//     RES_RADDR (readable from the bus cycle after the address write);
//     read +6 / +7: raw / result buffer full
//   0x0F00 SPI_DATA, 0x0F01 SPI_GO ([5:0] length, [9:8] chip select:
//          0..1 ADCs, 2 PLL; read bit 0 busy)
module daq_top
  import qc_pkg::host_req_t, qc_pkg::host_rsp_t, qc_pkg::seq_entry_t;
#(
  parameter int N_LINES   = 2,
  parameter int LANES     = 4,
  parameter int AW        = 12,
  parameter int N_MCH     = 8,
  parameter int SEQ_DEPTH = 256,
  parameter int ACC_W     = 32,
  parameter int RAW_DEPTH = 4096,
  parameter int RES_DEPTH = 1024
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  host_req_t                                host_req,
  output host_rsp_t                                host_rsp,
  input  logic                                     l1_trig,
  input  logic [N_LINES-1:0][LANES-1:0][AW-1:0]    adc_i,
  input  logic [N_LINES-1:0][LANES-1:0][AW-1:0]    adc_q,
  output logic                                     fb_out,
  output logic [N_LINES-1:0]                       line_fb,
  output logic [N_LINES-1:0]                       line_state,
  output logic [N_LINES-1:0]                       line_state_valid,
  output logic                                     spi_sclk,
  output logic                                     spi_mosi,
  output logic [2:0]                               spi_cs_n,
  input  logic                                     spi_miso
);
  localparam int SAW = $clog2(SEQ_DEPTH);
  localparam int LW  = (N_LINES > 1) ? $clog2(N_LINES) : 1;
  localparam int RAW_AW = $clog2(RAW_DEPTH);
  localparam int RES_AW = $clog2(RES_DEPTH);
  localparam int RAW_W  = 2 * LANES * AW;
  localparam int RES_W  = 3 * ACC_W + 1;

  wire        wr = host_req.we;
  wire [15:0] a  = host_req.addr;
  wire [31:0] d  = host_req.wdata;

  logic [LW-1:0]  fb_sel_q;
  logic [31:0]    seq_start_q, seq_al_q, spi_data_q;
  logic [31:0]    spi_rdata;
  logic           spi_busy, spi_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb_sel_q    <= '0;
      seq_start_q <= '0;
      seq_al_q    <= '0;
      spi_data_q  <= '0;
    end else if (wr) begin
      if (a == 16'h0000) fb_sel_q    <= d[LW-1:0];
      if (a == 16'h0002) seq_start_q <= d;
      if (a == 16'h0003) seq_al_q    <= d;
      if (a == 16'h0F00) spi_data_q  <= d;
    end
  end

  // per-line read-back words, indexed by the low 7 address bits
  logic [N_LINES-1:0][127:0][31:0] rd_line;

  for (genvar L = 0; L < N_LINES; L++) begin : g_line
    localparam logic [7:0] BASE = 8'(L + 1);

    logic signed [ACC_W-1:0]       x0_q, y0_q, thr_q;
    logic signed [15:0]            cos_q, sin_q;
    logic [7:0]                    fbw_q;
    logic [SAW:0]                  seqn_q;
    logic [N_MCH-1:0][31:0]        fw_q;
    logic [RAW_AW-1:0]             raw_ra_q;
    logic [RES_AW-1:0]             res_ra_q;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x0_q <= '0; y0_q <= '0; thr_q <= '0;
        cos_q <= 16'sh7FFF; sin_q <= '0;
        fbw_q <= 8'd4; seqn_q <= '0; fw_q <= '0;
        raw_ra_q <= '0; res_ra_q <= '0;
      end else if (wr && a[15:8] == BASE) begin
        unique case (a[7:0])
          8'h00: x0_q  <= d;
          8'h01: y0_q  <= d;
          8'h02: begin cos_q <= d[15:0]; sin_q <= d[31:16]; end
          8'h03: thr_q <= d;
          8'h04: fbw_q <= d[7:0];
          8'h05: seqn_q <= d[SAW:0];
          8'h08: raw_ra_q <= d[RAW_AW-1:0];
          8'h09: res_ra_q <= d[RES_AW-1:0];
          default: ;
        endcase
        for (int c = 0; c < N_MCH; c++)
          if (a[7:0] == 8'h10 + 8'(c)) fw_q[c] <= d;
      end
    end

    // level-2 trigger and window
    seq_entry_t  entry;
    logic        l2_trig, running;
    logic [15:0] l2_tag, l2_len;
    logic [15:0] win_left_q;
    logic        win_v_q, win_f_q, win_l_q;

    assign entry = '{start: seq_start_q, addr: seq_al_q[15:0], len: seq_al_q[31:16]};

    l2_trigger_seq #(.DEPTH(SEQ_DEPTH)) u_seq (
      .clk       (clk),
      .rst_n     (rst_n),
      .tab_we    (wr && a == 16'h0001 && d[8] == 1'(L)),
      .tab_idx   (d[SAW-1:0]),
      .tab_entry (entry),
      .n_entries (seqn_q),
      .l1_trig   (l1_trig),
      .l2_trig   (l2_trig),
      .l2_addr   (l2_tag),
      .l2_len    (l2_len),
      .running   (running)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        win_left_q <= '0;
        win_v_q    <= 1'b0;
        win_f_q    <= 1'b0;
        win_l_q    <= 1'b0;
      end else if (l2_trig && l2_len != 0) begin
        win_v_q    <= 1'b1;
        win_f_q    <= 1'b1;
        win_l_q    <= (l2_len == 16'd1);
        win_left_q <= l2_len - 1'b1;
      end else if (win_v_q && win_left_q != 0) begin
        win_f_q    <= 1'b0;
        win_l_q    <= (win_left_q == 16'd1);
        win_left_q <= win_left_q - 1'b1;
      end else begin
        win_v_q    <= 1'b0;
        win_f_q    <= 1'b0;
        win_l_q    <= 1'b0;
      end
    end

    // low-latency path
    logic [LANES-1:0][AW:0]  mi, mq;
    logic                    mv, mf, ml;
    logic signed [ACC_W-1:0] acc_i, acc_q, proj;
    logic                    acc_done, st, st_v;

    daq_fs4_mixer #(.LANES(LANES), .IW(AW)) u_mix (
      .clk (clk), .rst_n (rst_n),
      .i_in (adc_i[L]), .q_in (adc_q[L]),
      .in_valid (win_v_q), .in_first (win_f_q), .in_last (win_l_q),
      .i_out (mi), .q_out (mq),
      .out_valid (mv), .out_first (mf), .out_last (ml)
    );

    daq_accumulator #(.LANES(LANES), .IW(AW + 1), .ACC_W(ACC_W)) u_acc (
      .clk (clk), .rst_n (rst_n),
      .i_in (mi), .q_in (mq),
      .in_valid (mv), .in_first (mf), .in_last (ml),
      .acc_i (acc_i), .acc_q (acc_q), .acc_done (acc_done)
    );

    daq_state_disc #(.ACC_W(ACC_W)) u_disc (
      .clk (clk), .rst_n (rst_n),
      .acc_i (acc_i), .acc_q (acc_q), .acc_done (acc_done),
      .x0 (x0_q), .y0 (y0_q), .cos_t (cos_q), .sin_t (sin_q),
      .threshold (thr_q), .fb_width (fbw_q),
      .state (st), .state_valid (st_v), .proj (proj), .fb (line_fb[L])
    );

    assign line_state[L]       = st;
    assign line_state_valid[L] = st_v;

    // multi-channel path
    logic signed [N_MCH-1:0][ACC_W-1:0] m_i, m_q;
    logic                               m_done;

    daq_multich_demod #(.N_CH(N_MCH), .LANES(LANES), .IW(AW + 1), .ACC_W(ACC_W)) u_mch (
      .clk (clk), .rst_n (rst_n),
      .i_in (mi), .q_in (mq),
      .in_valid (mv), .in_first (mf), .in_last (ml),
      .fw (fw_q),
      .acc_i (m_i), .acc_q (m_q), .done (m_done)
    );

    // results for the host
    logic [31:0]                 res_cnt_q, mch_cnt_q;
    logic signed [ACC_W-1:0]     res_i_q, res_q_q, res_p_q;
    logic                        res_st_q;
    logic [N_MCH-1:0][ACC_W-1:0] mres_i_q, mres_q_q;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        res_cnt_q <= '0; mch_cnt_q <= '0;
        res_i_q <= '0; res_q_q <= '0; res_p_q <= '0; res_st_q <= 1'b0;
        mres_i_q <= '0; mres_q_q <= '0;
      end else begin
        if (acc_done) begin
          res_i_q <= acc_i;
          res_q_q <= acc_q;
        end
        if (st_v) begin
          res_st_q  <= st;
          res_p_q   <= proj;
          res_cnt_q <= res_cnt_q + 1'b1;
        end
        if (m_done) begin
          mres_i_q  <= m_i;
          mres_q_q  <= m_q;
          mch_cnt_q <= mch_cnt_q + 1'b1;
        end
      end
    end

    // capture buffers for upload; the buffers read at the address being
    // written, so the word is ready for a host read in the next bus cycle
    wire [RAW_AW-1:0] raw_ra = (wr && a == {BASE, 8'h08}) ? d[RAW_AW-1:0] : raw_ra_q;
    wire [RES_AW-1:0] res_ra = (wr && a == {BASE, 8'h09}) ? d[RES_AW-1:0] : res_ra_q;
    logic [RAW_AW:0]   raw_cnt;
    logic [RES_AW:0]   res_cnt;
    logic [RAW_W-1:0]  raw_rd;
    logic [RES_W-1:0]  res_rd;
    logic              raw_full, res_full;

    daq_capture_buf #(.W(RAW_W), .DEPTH(RAW_DEPTH)) u_raw (
      .clk (clk), .rst_n (rst_n),
      .arm (wr && a == {BASE, 8'h06}),
      .in_valid (win_v_q), .in_data ({adc_q[L], adc_i[L]}),
      .count (raw_cnt), .full (raw_full),
      .raddr (raw_ra), .rdata (raw_rd)
    );

    // one word per shot; the sums were registered with acc_done, one clock
    // before the state is valid
    daq_capture_buf #(.W(RES_W), .DEPTH(RES_DEPTH)) u_res (
      .clk (clk), .rst_n (rst_n),
      .arm (wr && a == {BASE, 8'h07}),
      .in_valid (st_v), .in_data ({st, proj, res_q_q, res_i_q}),
      .count (res_cnt), .full (res_full),
      .raddr (res_ra), .rdata (res_rd)
    );

    always_comb begin
      rd_line[L] = '0;
      rd_line[L][7'h00] = 32'(x0_q);
      rd_line[L][7'h01] = 32'(y0_q);
      rd_line[L][7'h02] = {sin_q, cos_q};
      rd_line[L][7'h03] = 32'(thr_q);
      rd_line[L][7'h04] = 32'(fbw_q);
      rd_line[L][7'h05] = 32'(seqn_q);
      rd_line[L][7'h20] = res_cnt_q;
      rd_line[L][7'h21] = 32'(res_st_q);
      rd_line[L][7'h22] = 32'(res_i_q);
      rd_line[L][7'h23] = 32'(res_q_q);
      rd_line[L][7'h24] = 32'(res_p_q);
      rd_line[L][7'h25] = mch_cnt_q;
      rd_line[L][7'h26] = 32'(raw_cnt);
      rd_line[L][7'h27] = 32'(res_cnt);
      rd_line[L][7'h28] = raw_rd[31:0];
      rd_line[L][7'h29] = raw_rd[63:32];
      rd_line[L][7'h2A] = 32'(raw_rd[RAW_W-1:64]);
      rd_line[L][7'h2B] = 32'(res_rd[ACC_W-1:0]);
      rd_line[L][7'h2C] = 32'(res_rd[2*ACC_W-1:ACC_W]);
      rd_line[L][7'h2D] = 32'(res_rd[3*ACC_W-1:2*ACC_W]);
      rd_line[L][7'h2E] = 32'(res_rd[RES_W-1]);
      rd_line[L][7'h06] = 32'(raw_full);
      rd_line[L][7'h07] = 32'(res_full);
      for (int c = 0; c < N_MCH; c++) begin
        rd_line[L][7'h10 + 7'(c)]   = fw_q[c];
        rd_line[L][7'h40 + 7'(2*c)] = 32'(mres_i_q[c]);
        rd_line[L][7'h41 + 7'(2*c)] = 32'(mres_q_q[c]);
      end
    end
  end

  assign fb_out = line_fb[fb_sel_q];

  // host read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rsp <= '0;
    end else begin
      host_rsp.rvalid <= host_req.re;
      host_rsp.rdata  <= '0;
      if (a == 16'h0000)      host_rsp.rdata <= 32'(fb_sel_q);
      else if (a == 16'h0F00) host_rsp.rdata <= spi_rdata;
      else if (a == 16'h0F01) host_rsp.rdata <= 32'(spi_busy);
      else
        for (int L = 0; L < N_LINES; L++)
          if (a[15:8] == 8'(L + 1) && !a[7]) host_rsp.rdata <= rd_line[L][a[6:0]];
    end
  end

  spi_master #(.FRAME_W(32), .N_CS(3), .CLK_DIV(4), .CPHA(1'b0)) u_spi (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (wr && a == 16'h0F01),
    .cs_sel (d[9:8]),
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
