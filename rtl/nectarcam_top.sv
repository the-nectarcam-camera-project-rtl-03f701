// nectarcam_top: read-out and trigger electronics of the NectarCAM camera.
//
// NMOD read-out modules of NPIX pixels each (about 250 modules and 1800
// pixels in the camera) sit on a backplane that distributes three things:
// the camera time (a counter kept in step by the 0.1 pulse-per-second
// synchronisation of the clock distribution system), the module-level L0
// triggers going to the camera-level L1 trigger, and the L1 accept going
// back to every module. Each module, on L1 accept, reads the window around
// the trigger out of its switched capacitor arrays and sends a time-stamped
// event on its own network link.
//
// Interface: per module and pixel, hg_i/lg_i/trig_i are the digitised
// high-gain, low-gain and trigger-channel samples of this clock. pps_i is
// the synchronisation pulse. l1_enable_i/l1_mult_i configure the camera
// trigger. A slow-control bus reaches the registers of one module
// (sc_sel_i) or, for writes with sc_bcast_i, of all modules. Each module's
// packet stream (out_*) goes to the network switches, which are outside
// this design.
//
// Timing: one 1 GHz clock. A shower sample reaches L0 after 2 cycles, L1
// accept after 3 more, the chips' read-out request after 1 more; the
// read-out dead time is 2 us; the packets follow.
//
// From the paper: the module count, the pixels per module, the L0/L1
// hierarchy with L1 on the backplane, the time-stamping with the 0.1 pps
// synchronisation, one network link per module. Own choices: a single
// camera-wide L1 (not per backplane sector), the slow-control bus, and
// bringing the L1 configuration out as ports.
module nectarcam_top
  import nectar_pkg::*;
#(
  parameter int unsigned NMOD        = N_MODULES,
  parameter int unsigned NPIX        = N_PIX,
  parameter int unsigned W           = SAMPLE_W,
  parameter int unsigned DEPTH       = SCA_DEPTH,
  parameter int unsigned WIN         = WIN_CELLS,
  parameter int unsigned CONV_CYCLES = SCA_CONV,
  parameter int unsigned GATE        = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                pps_i,
  input  logic [NMOD-1:0][NPIX-1:0][W-1:0]    hg_i,
  input  logic [NMOD-1:0][NPIX-1:0][W-1:0]    lg_i,
  input  logic [NMOD-1:0][NPIX-1:0][W-1:0]    trig_i,
  input  logic                                l1_enable_i,
  input  logic [$clog2(NMOD+1)-1:0]           l1_mult_i,
  input  logic [$clog2(NMOD)-1:0]             sc_sel_i,
  input  logic                                sc_bcast_i,
  input  logic [2:0]                          sc_addr_i,
  input  logic [15:0]                         sc_wdata_i,
  input  logic                                sc_we_i,
  output logic [15:0]                         sc_rdata_o,
  output logic [NMOD-1:0]                     out_valid_o,
  output logic [NMOD-1:0][WORD_W-1:0]         out_data_o,
  output logic [NMOD-1:0]                     out_last_o,
  input  logic [NMOD-1:0]                     out_ready_i,
  output logic [NMOD-1:0]                     busy_o,
  output logic                                l1_accept_o,
  output logic [31:0]                         l1_count_o,
  output logic [TS_W-1:0]                     ts_o,
  output logic                                pps_missed_o
);
  logic [NMOD-1:0]                        l0;
  logic [NMOD-1:0][$clog2(NPIX+1)-1:0]    npix;
  logic [NMOD-1:0][15:0]                  sc_rdata;

  timestamp_counter u_time (
    .clk, .rst_n, .pps_i, .ts_o, .missed_o(pps_missed_o)
  );

  l1_trigger #(.NMOD(NMOD), .GATE(GATE)) u_l1 (
    .clk, .rst_n, .enable_i(l1_enable_i), .mult_i(l1_mult_i), .l0_i(l0),
    .l1_accept_o, .accept_count_o(l1_count_o)
  );

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    nectar_module #(
      .NPIX(NPIX), .W(W), .DEPTH(DEPTH), .WIN(WIN), .CONV_CYCLES(CONV_CYCLES)
    ) u_mod (
      .clk, .rst_n,
      .hg_i(hg_i[m]), .lg_i(lg_i[m]), .trig_i(trig_i[m]), .ts_i(ts_o),
      .l0_o(l0[m]), .npix_o(npix[m]), .l1_accept_i(l1_accept_o),
      .sc_addr_i, .sc_wdata_i,
      .sc_we_i(sc_we_i && (sc_bcast_i || sc_sel_i == ($clog2(NMOD))'(m))),
      .sc_rdata_o(sc_rdata[m]),
      .out_valid_o(out_valid_o[m]), .out_data_o(out_data_o[m]),
      .out_last_o(out_last_o[m]), .out_ready_i(out_ready_i[m]), .busy_o(busy_o[m])
    );
  end

  assign sc_rdata_o = sc_rdata[sc_sel_i];

endmodule
