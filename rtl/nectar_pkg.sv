// nectar_pkg: constants and types shared by the NectarCAM read-out electronics.
//
// The camera is built from read-out modules of seven pixels. Each pixel has a
// high-gain and a low-gain channel (relative gain 16) sampled into a switched
// capacitor array (SCA) of 1024 cells that is digitised only for the 16 cells
// around a camera trigger. A front-end FPGA per module sends either the
// samples or per-pixel charge and arrival time over the network link.
//
// From the paper: 7 pixels per module, 1024-cell SCA, 16-cell read-out
// window, 2 us dead time for a 16-cell read-out, ~250 modules.
// Own choices: one clock of 1 GHz that is both the sampling clock and the
// logic clock (so one cycle is 1 ns), 12-bit ADC codes (the chip's dynamic
// range is 11.3 bits), 16-bit words on the network link, 48-bit time stamps.
package nectar_pkg;

  localparam int unsigned N_PIX       = 7;     // pixels per module
  localparam int unsigned SAMPLE_W    = 12;    // ADC code width
  localparam int unsigned SCA_DEPTH   = 1024;  // SCA cells per channel
  localparam int unsigned WIN_CELLS   = 16;    // cells read out per trigger
  localparam int unsigned SCA_CONV    = 125;   // 2000 ns / 16 cells at 1 GHz
  localparam int unsigned WORD_W      = 16;    // network word width
  localparam int unsigned TS_W        = 48;    // time stamp width
  localparam int unsigned N_MODULES   = 250;   // modules in the camera
  localparam int unsigned LB_W        = 10;    // look-back field width

  // What the front-end FPGA sends for each event.
  typedef enum logic {
    MODE_CHARGE = 1'b0,   // header + charge (HG, LG) and arrival time per pixel
    MODE_FULL   = 1'b1    // header + every sample of the window
  } out_mode_e;

  // One SCA cell after conversion: both gains of one pixel.
  typedef struct packed {
    logic [SAMPLE_W-1:0] hg;
    logic [SAMPLE_W-1:0] lg;
  } gain_pair_t;

  // Configuration held by the module's slow control.
  typedef struct packed {
    logic                l0_enable;
    out_mode_e           mode;
    logic [SAMPLE_W-1:0] l0_thresh;     // trigger-channel threshold (ADC codes)
    logic [2:0]          l0_mult;       // pixels over threshold for an L0
    logic [LB_W-1:0]     lookback;      // cells back from the stop point
    logic [SAMPLE_W-1:0] ped_hg;        // pedestal subtracted from HG charge
    logic [SAMPLE_W-1:0] ped_lg;        // pedestal subtracted from LG charge
  } module_cfg_t;

endpackage
