// nectar_module: one seven-pixel read-out module of the camera.
//
// The module holds, for each of its NPIX pixels, a NECTAr chip that keeps
// the high- and low-gain samples in its switched capacitor array, and a
// FIFO that takes the chip's converted cells. The trigger channels of the
// pixels feed the module-level L0 trigger, whose output goes to the
// backplane. The camera-level L1 accept comes back from the backplane to
// the front-end FPGA, which starts the read-out of all chips at once and
// then sends the event on the network link. A slow-control register bus
// configures the trigger, the read-out and the output mode.
//
// Interface: per pixel, hg_i/lg_i are the two gain samples and trig_i the
// trigger-channel sample of the current clock (digitised; the amplifiers
// and the analogue storage are outside this model). l0_o/npix_o go to the
// camera trigger; l1_accept_i comes from it; ts_i is the camera time. The
// output is a 16-bit valid/ready word stream (see fe_fpga for the packet).
//
// Timing: L0 two cycles after the sample; read-out request one cycle after
// L1 accept; the chips are busy WIN*CONV_CYCLES cycles (2 us at the
// defaults); then the packet is sent. busy_o is the module's dead time.
//
// From the paper: 7 pixels, one NECTAr chip per pixel, FIFOs in front of
// the FPGA, L0 on the board, L1 accept from the backplane. Own choices: the
// FIFO depth (one window), the common read-out of all chips, the register
// bus in place of the SPI links.
module nectar_module
  import nectar_pkg::*;
#(
  parameter int unsigned NPIX        = N_PIX,
  parameter int unsigned W           = SAMPLE_W,
  parameter int unsigned DEPTH       = SCA_DEPTH,
  parameter int unsigned WIN         = WIN_CELLS,
  parameter int unsigned CONV_CYCLES = SCA_CONV
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NPIX-1:0][W-1:0]    hg_i,
  input  logic [NPIX-1:0][W-1:0]    lg_i,
  input  logic [NPIX-1:0][W-1:0]    trig_i,
  input  logic [TS_W-1:0]           ts_i,
  output logic                      l0_o,
  output logic [$clog2(NPIX+1)-1:0] npix_o,
  input  logic                      l1_accept_i,
  input  logic [2:0]                sc_addr_i,
  input  logic [15:0]               sc_wdata_i,
  input  logic                      sc_we_i,
  output logic [15:0]               sc_rdata_o,
  output logic                      out_valid_o,
  output logic [WORD_W-1:0]         out_data_o,
  output logic                      out_last_o,
  input  logic                      out_ready_i,
  output logic                      busy_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  module_cfg_t             cfg;
  logic [31:0]             evt_count, dropped;
  logic                    rd_req;
  logic [NPIX-1:0]         chip_busy, cell_valid, chip_done;
  logic [NPIX-1:0][2*W-1:0] cell_d, fifo_data;
  logic [NPIX-1:0]         fifo_empty, fifo_full, fifo_pop;
  logic [AW-1:0]           lookback;

  assign lookback = AW'(cfg.lookback);

  slow_control u_sc (
    .clk, .rst_n, .addr_i(sc_addr_i), .wdata_i(sc_wdata_i), .we_i(sc_we_i),
    .rdata_o(sc_rdata_o), .evt_count_i(evt_count), .dropped_i(dropped), .cfg_o(cfg)
  );

  l0_trigger #(.NPIX(NPIX), .W(W)) u_l0 (
    .clk, .rst_n, .enable_i(cfg.l0_enable), .thresh_i(cfg.l0_thresh[W-1:0]),
    .mult_i(($clog2(NPIX+1))'(cfg.l0_mult)), .trig_i, .l0_o, .npix_o
  );

  for (genvar p = 0; p < NPIX; p++) begin : g_pix
    nectar_chip #(.DEPTH(DEPTH), .WIN(WIN), .CONV_CYCLES(CONV_CYCLES), .W(W)) u_chip (
      .clk, .rst_n, .hg_i(hg_i[p]), .lg_i(lg_i[p]), .rd_req_i(rd_req),
      .lookback_i(lookback), .busy_o(chip_busy[p]), .cell_valid_o(cell_valid[p]),
      .cell_o(cell_d[p]), .done_o(chip_done[p])
    );
    sync_fifo #(.WIDTH(2*W), .DEPTH(WIN)) u_fifo (
      .clk, .rst_n, .push_i(cell_valid[p]), .wr_data_i(cell_d[p]), .pop_i(fifo_pop[p]),
      .rd_data_o(fifo_data[p]), .empty_o(fifo_empty[p]), .full_o(fifo_full[p]),
      .count_o()
    );
  end

  fe_fpga #(.NPIX(NPIX), .W(W), .WIN(WIN)) u_fpga (
    .clk, .rst_n, .cfg_i(cfg), .l1_accept_i, .ts_i, .rd_req_o(rd_req),
    .chip_busy_i(chip_busy), .fifo_data_i(fifo_data), .fifo_empty_i(fifo_empty),
    .fifo_pop_o(fifo_pop), .out_valid_o, .out_data_o, .out_last_o, .out_ready_i,
    .busy_o, .evt_count_o(evt_count), .dropped_o(dropped)
  );

endmodule
