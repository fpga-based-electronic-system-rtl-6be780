// qc_pkg: constants and types shared by the control and readout firmware.
//
// All boards (timing control module TCM, waveform generator AWG, data
// acquisition DAQ, bias voltage generator BVG) run their logic in one
// 250 MHz clock domain, so a clock carries 8 DAC samples (2 GSa/s) or
// 4 ADC samples per channel (1 GSa/s). The counts and widths below follow
// the hardware described for the system; the host bus is this design's
// own stand-in for the PCIe/PXIe DMA link: a word-addressed register bus
// with a one-cycle read response.
package qc_pkg;

  // Converters and lanes per 250 MHz clock
  localparam int AWG_CH    = 4;   // DAC channels per AWG board
  localparam int AWG_LANES = 8;   // 2 GSa/s / 250 MHz
  localparam int DAC_W     = 14;  // DAC resolution
  localparam int ADC_LANES = 4;   // 1 GSa/s / 250 MHz
  localparam int ADC_W     = 12;  // ADC resolution
  localparam int MIX_W     = ADC_W + 1; // after sign changes in the fs/4 mixer
  localparam int DAQ_LINES = 2;   // I/Q readout inputs per DAQ (4 ADC channels)
  localparam int TCM_SLOTS = 17;  // modules served by one TCM
  localparam int BVG_CH    = 6;   // precision DAC channels per BVG

  // Host register bus (one per board)
  typedef struct packed {
    logic        we;     // write strobe
    logic        re;     // read strobe
    logic [15:0] addr;   // word address
    logic [31:0] wdata;
  } host_req_t;

  typedef struct packed {
    logic        rvalid; // one cycle after re
    logic [31:0] rdata;
  } host_rsp_t;

  // One entry of a level-2 trigger sequence
  typedef struct packed {
    logic [31:0] start;  // clocks after the level-1 trigger
    logic [15:0] addr;   // envelope start word (AWG) / tag (DAQ)
    logic [15:0] len;    // length in clock words
  } seq_entry_t;

  // AD5791 register addresses (24-bit frame: R/W, 3-bit address, 20-bit data)
  localparam logic [2:0] AD5791_REG_DAC  = 3'b001;
  localparam logic [2:0] AD5791_REG_CTRL = 3'b010;
  localparam logic [2:0] AD5791_REG_CLR  = 3'b011;
  localparam logic [2:0] AD5791_REG_SW   = 3'b100;

endpackage
