// tcm_top: FPGA logic of the timing control module.
//
// The TCM is the hub of a chassis. It generates (or, down a daisy chain,
// relays) the level-1 triggers that start each operation of the qubits and
// sends them to every slot on a star of backplane lines; and it receives the
// feedback lines of the DAQs and forwards them as feedback triggers to the
// AWGs that must act on a measurement result. See tcm_trigger_gen and
// tcm_fb_router for timing.
//
// Host registers (word addresses, this design's map):
//   0x0000 MASTER     bit 0: 1 = own generator, 0 = follow chain_in
//   0x0001 START      write: start the generator
//   0x0002 STOP       write: stop it
//   0x0003 PERIOD     clocks between level-1 triggers
//   0x0004 COUNT      number of triggers (0 = until STOP)
//   0x0005 DELAY      slot-trigger delay in clocks (daisy-chain equalisation)
//   0x0006 SLOT_MASK  slots that receive level-1 triggers
//   0x0010+j ROUTE    feedback route of output slot j: [8] enable, [4:0] source
//   read 0x0007 triggers sent, 0x0008 running
module tcm_top
  import qc_pkg::host_req_t, qc_pkg::host_rsp_t;
#(
  parameter int N_SLOTS = 17
) (
  input  logic                clk,
  input  logic                rst_n,
  input  host_req_t           host_req,
  output host_rsp_t           host_rsp,
  input  logic                chain_in,
  output logic                chain_out,
  output logic [N_SLOTS-1:0]  trig_out,
  input  logic [N_SLOTS-1:0]  fb_in,
  output logic [N_SLOTS-1:0]  fb_trig
);
  localparam int SW = $clog2(N_SLOTS);

  wire        wr = host_req.we;
  wire [15:0] a  = host_req.addr;
  wire [31:0] d  = host_req.wdata;

  logic                       master_q;
  logic [31:0]                period_q, count_q;
  logic [5:0]                 delay_q;
  logic [N_SLOTS-1:0]         mask_q;
  logic [N_SLOTS-1:0][SW-1:0] rsrc_q;
  logic [N_SLOTS-1:0]         ren_q;
  logic                       running;
  logic [31:0]                n_sent;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      master_q <= 1'b1;
      period_q <= 32'd1000;
      count_q  <= '0;
      delay_q  <= '0;
      mask_q   <= '1;
      rsrc_q   <= '0;
      ren_q    <= '0;
    end else if (wr) begin
      if (a == 16'h0000) master_q <= d[0];
      if (a == 16'h0003) period_q <= d;
      if (a == 16'h0004) count_q  <= d;
      if (a == 16'h0005) delay_q  <= d[5:0];
      if (a == 16'h0006) mask_q   <= d[N_SLOTS-1:0];
      for (int j = 0; j < N_SLOTS; j++)
        if (a == 16'h0010 + 16'(j)) begin
          rsrc_q[j] <= d[SW-1:0];
          ren_q[j]  <= d[8];
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rsp <= '0;
    end else begin
      host_rsp.rvalid <= host_req.re;
      unique case (a)
        16'h0000: host_rsp.rdata <= 32'(master_q);
        16'h0003: host_rsp.rdata <= period_q;
        16'h0004: host_rsp.rdata <= count_q;
        16'h0007: host_rsp.rdata <= n_sent;
        16'h0008: host_rsp.rdata <= 32'(running);
        default:  host_rsp.rdata <= '0;
      endcase
    end
  end

  tcm_trigger_gen #(.N_SLOTS(N_SLOTS), .TIME_W(32), .MAX_DELAY(64)) u_trig (
    .clk       (clk),
    .rst_n     (rst_n),
    .master    (master_q),
    .start     (wr && a == 16'h0001),
    .stop      (wr && a == 16'h0002),
    .period    (period_q),
    .count     (count_q),
    .delay     (delay_q),
    .slot_mask (mask_q),
    .chain_in  (chain_in),
    .chain_out (chain_out),
    .trig_out  (trig_out),
    .running   (running),
    .n_sent    (n_sent)
  );

  tcm_fb_router #(.N_SLOTS(N_SLOTS)) u_fb (
    .clk       (clk),
    .rst_n     (rst_n),
    .fb_in     (fb_in),
    .route_src (rsrc_q),
    .route_en  (ren_q),
    .fb_trig   (fb_trig)
  );

endmodule
