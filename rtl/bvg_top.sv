// bvg_top: FPGA logic of the bias voltage generator board.
//
// The BVG holds the DC flux bias of the qubits. Each of its six outputs is a
// 20-bit precision DAC (AD5791) with its own SPI link, so all six can be
// updated at once. The host writes a complete 24-bit AD5791 frame per channel,
// {R/W, 3-bit register address, 20-bit data}: register 1 holds the DAC code,
// register 2 is the control register that the host sets once after power-up
// (the frame format is that of the AD5791, not something particular to this
// design). A frame written while its channel is busy is dropped; the host
// polls BUSY. SCLK is clk / 8 (31.25 MHz at 250 MHz), within the part's limit.
//
// Host registers (word addresses, this design's map):
//   0x0000+ch FRAME   write: send the 24-bit frame in [23:0] on channel ch
//   0x0010    BUSY    read: bit ch = channel busy
//   0x0020+ch RDBACK  read: last 24 bits clocked in on channel ch's SDO
// A 24-bit frame takes 24 * 8 + 1 = 193 clocks.
module bvg_top
  import qc_pkg::host_req_t, qc_pkg::host_rsp_t;
#(
  parameter int N_CH = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  host_req_t        host_req,
  output host_rsp_t        host_rsp,
  output logic [N_CH-1:0]  spi_sclk,
  output logic [N_CH-1:0]  spi_mosi,
  output logic [N_CH-1:0]  spi_sync_n,
  input  logic [N_CH-1:0]  spi_miso
);
  wire        wr = host_req.we;
  wire [15:0] a  = host_req.addr;
  wire [31:0] d  = host_req.wdata;

  logic [N_CH-1:0]        busy;
  logic [N_CH-1:0][23:0]  rdata;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic done;
    spi_master #(.FRAME_W(24), .N_CS(1), .CLK_DIV(4), .CPHA(1'b1)) u_spi (
      .clk    (clk),
      .rst_n  (rst_n),
      .start  (wr && a == 16'(c)),
      .cs_sel (1'b0),
      .len    (5'd24),
      .wdata  (d[23:0]),
      .rdata  (rdata[c]),
      .busy   (busy[c]),
      .done   (done),
      .sclk   (spi_sclk[c]),
      .mosi   (spi_mosi[c]),
      .cs_n   (spi_sync_n[c:c]),
      .miso   (spi_miso[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rsp <= '0;
    end else begin
      host_rsp.rvalid <= host_req.re;
      host_rsp.rdata  <= '0;
      if (a == 16'h0010) host_rsp.rdata <= 32'(busy);
      for (int c = 0; c < N_CH; c++)
        if (a == 16'h0020 + 16'(c)) host_rsp.rdata <= 32'(rdata[c]);
    end
  end

endmodule
