// qc_system_top: the FPGA logic of a two-qubit control and readout system.
//
// One chassis with a timing control module (TCM), two waveform generators
// (AWG1, AWG2), one acquisition board (DAQ) and one bias voltage generator
// (BVG), as in the smallest configuration of the system. The boards share
// the 250 MHz clock that every board derives from the TCM's distributed
// reference, and are joined by backplane lines:
//   * level-1 triggers, TCM -> every slot (star);
//   * feedback, DAQ -> TCM, and feedback triggers, TCM -> AWGs.
// Slot numbers: 0 AWG1, 1 AWG2, 2 DAQ, 3 BVG (receives no trigger), 4..16
// are further modules, whose trigger and feedback lines are ports.
// Everything between the FPGAs and the qubits (serialisers, converters,
// mixers, clocks) is outside: the ports carry parallel DAC and ADC samples,
// SPI pins and the daisy-chain lines to other chassis. Each board keeps its
// own host register bus (the PCIe/PXIe link in the real system).
//
// Feedback loop inside this logic, from the last ADC word of a readout
// window to the first sample of the feedback pulse on an AWG's dac_data:
// DAQ 5 clocks + TCM router 1 clock + AWG 4 clocks = 10 clocks (40 ns).
module qc_system_top
  import qc_pkg::host_req_t, qc_pkg::host_rsp_t;
#(
  parameter int N_SLOTS   = qc_pkg::TCM_SLOTS,
  parameter int AWG_CH    = qc_pkg::AWG_CH,
  parameter int AWG_LANES = qc_pkg::AWG_LANES,
  parameter int DAC_W     = qc_pkg::DAC_W,
  parameter int ENV_DEPTH = 65536,
  parameter int SEQ_DEPTH = 256,
  parameter int DAQ_LINES = qc_pkg::DAQ_LINES,
  parameter int ADC_LANES = qc_pkg::ADC_LANES,
  parameter int ADC_W     = qc_pkg::ADC_W,
  parameter int N_MCH     = 8,
  parameter int BVG_CH    = qc_pkg::BVG_CH
) (
  input  logic                                              clk,
  input  logic                                              rst_n,
  // host buses
  input  host_req_t                                         tcm_host_req,
  output host_rsp_t                                         tcm_host_rsp,
  input  host_req_t                                         awg1_host_req,
  output host_rsp_t                                         awg1_host_rsp,
  input  host_req_t                                         awg2_host_req,
  output host_rsp_t                                         awg2_host_rsp,
  input  host_req_t                                         daq_host_req,
  output host_rsp_t                                         daq_host_rsp,
  input  host_req_t                                         bvg_host_req,
  output host_rsp_t                                         bvg_host_rsp,
  // converters
  output logic [AWG_CH-1:0][AWG_LANES-1:0][DAC_W-1:0]       awg1_dac,
  output logic [AWG_CH-1:0][AWG_LANES-1:0][DAC_W-1:0]       awg2_dac,
  input  logic [DAQ_LINES-1:0][ADC_LANES-1:0][ADC_W-1:0]    daq_adc_i,
  input  logic [DAQ_LINES-1:0][ADC_LANES-1:0][ADC_W-1:0]    daq_adc_q,
  output logic [DAQ_LINES-1:0]                              daq_state,
  output logic [DAQ_LINES-1:0]                              daq_state_valid,
  // chip configuration
  output logic [1:0]                                        awg_spi_sclk,
  output logic [1:0]                                        awg_spi_mosi,
  output logic [1:0][4:0]                                   awg_spi_cs_n,
  input  logic [1:0]                                        awg_spi_miso,
  output logic                                              daq_spi_sclk,
  output logic                                              daq_spi_mosi,
  output logic [2:0]                                        daq_spi_cs_n,
  input  logic                                              daq_spi_miso,
  output logic [BVG_CH-1:0]                                 bvg_spi_sclk,
  output logic [BVG_CH-1:0]                                 bvg_spi_mosi,
  output logic [BVG_CH-1:0]                                 bvg_spi_sync_n,
  input  logic [BVG_CH-1:0]                                 bvg_spi_miso,
  // other chassis and other slots
  input  logic                                              tcm_chain_in,
  output logic                                              tcm_chain_out,
  output logic [N_SLOTS-1:0]                                slot_trig,
  output logic [N_SLOTS-1:0]                                slot_fb_trig,
  input  logic [N_SLOTS-1:0]                                ext_fb_in
);
  localparam int SLOT_AWG1 = 0;
  localparam int SLOT_AWG2 = 1;
  localparam int SLOT_DAQ  = 2;

  logic               daq_fb;
  logic [N_SLOTS-1:0] fb_in;
  logic [DAQ_LINES-1:0] daq_line_fb;
  logic [AWG_CH-1:0]  awg1_busy, awg2_busy;

  always_comb begin
    fb_in           = ext_fb_in;
    fb_in[SLOT_DAQ] = daq_fb;
  end

  tcm_top #(.N_SLOTS(N_SLOTS)) u_tcm (
    .clk       (clk),
    .rst_n     (rst_n),
    .host_req  (tcm_host_req),
    .host_rsp  (tcm_host_rsp),
    .chain_in  (tcm_chain_in),
    .chain_out (tcm_chain_out),
    .trig_out  (slot_trig),
    .fb_in     (fb_in),
    .fb_trig   (slot_fb_trig)
  );

  awg_top #(.N_CH(AWG_CH), .LANES(AWG_LANES), .DW(DAC_W), .ENV_DEPTH(ENV_DEPTH),
            .SEQ_DEPTH(SEQ_DEPTH)) u_awg1 (
    .clk      (clk),
    .rst_n    (rst_n),
    .host_req (awg1_host_req),
    .host_rsp (awg1_host_rsp),
    .l1_trig  (slot_trig[SLOT_AWG1]),
    .fb_trig  (slot_fb_trig[SLOT_AWG1]),
    .dac_data (awg1_dac),
    .ch_busy  (awg1_busy),
    .spi_sclk (awg_spi_sclk[0]),
    .spi_mosi (awg_spi_mosi[0]),
    .spi_cs_n (awg_spi_cs_n[0]),
    .spi_miso (awg_spi_miso[0])
  );

  awg_top #(.N_CH(AWG_CH), .LANES(AWG_LANES), .DW(DAC_W), .ENV_DEPTH(ENV_DEPTH),
            .SEQ_DEPTH(SEQ_DEPTH)) u_awg2 (
    .clk      (clk),
    .rst_n    (rst_n),
    .host_req (awg2_host_req),
    .host_rsp (awg2_host_rsp),
    .l1_trig  (slot_trig[SLOT_AWG2]),
    .fb_trig  (slot_fb_trig[SLOT_AWG2]),
    .dac_data (awg2_dac),
    .ch_busy  (awg2_busy),
    .spi_sclk (awg_spi_sclk[1]),
    .spi_mosi (awg_spi_mosi[1]),
    .spi_cs_n (awg_spi_cs_n[1]),
    .spi_miso (awg_spi_miso[1])
  );

  daq_top #(.N_LINES(DAQ_LINES), .LANES(ADC_LANES), .AW(ADC_W), .N_MCH(N_MCH),
            .SEQ_DEPTH(SEQ_DEPTH)) u_daq (
    .clk              (clk),
    .rst_n            (rst_n),
    .host_req         (daq_host_req),
    .host_rsp         (daq_host_rsp),
    .l1_trig          (slot_trig[SLOT_DAQ]),
    .adc_i            (daq_adc_i),
    .adc_q            (daq_adc_q),
    .fb_out           (daq_fb),
    .line_fb          (daq_line_fb),
    .line_state       (daq_state),
    .line_state_valid (daq_state_valid),
    .spi_sclk         (daq_spi_sclk),
    .spi_mosi         (daq_spi_mosi),
    .spi_cs_n         (daq_spi_cs_n),
    .spi_miso         (daq_spi_miso)
  );

  bvg_top #(.N_CH(BVG_CH)) u_bvg (
    .clk        (clk),
    .rst_n      (rst_n),
    .host_req   (bvg_host_req),
    .host_rsp   (bvg_host_rsp),
    .spi_sclk   (bvg_spi_sclk),
    .spi_mosi   (bvg_spi_mosi),
    .spi_sync_n (bvg_spi_sync_n),
    .spi_miso   (bvg_spi_miso)
  );

endmodule
