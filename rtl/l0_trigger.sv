// l0_trigger: module-level (L0) trigger of one 7-pixel read-out module.
//
// Each pixel's trigger channel (the third output of its amplifier) is
// compared with a common threshold; the module fires L0 when at least
// mult_i pixels are over threshold in the same sample. The number of pixels
// over threshold is also sent out (npix_o): it is the "L1 data" the module
// passes to the camera-level trigger.
//
// Timing: two register stages, so a sample on trig_i produces l0_o two
// cycles later. l0_o is high for as long as the condition holds.
//
// The paper says only that L0 is a module-level trigger and that it may be
// analogue or digital. The digital threshold-and-multiplicity rule, the
// shared threshold and the two-stage pipeline are this design's choices.
// mult_i = 0 disables the trigger.
module l0_trigger
  import nectar_pkg::*;
#(
  parameter int unsigned NPIX = N_PIX,
  parameter int unsigned W    = SAMPLE_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      enable_i,
  input  logic [W-1:0]              thresh_i,
  input  logic [$clog2(NPIX+1)-1:0] mult_i,
  input  logic [NPIX-1:0][W-1:0]    trig_i,
  output logic                      l0_o,
  output logic [$clog2(NPIX+1)-1:0] npix_o
);
  localparam int unsigned CW = $clog2(NPIX + 1);

  logic [NPIX-1:0] over_q;
  logic [CW-1:0]   n_over;

  // Stage 1: discriminators.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) over_q <= '0;
    else for (int i = 0; i < NPIX; i++) over_q[i] <= trig_i[i] > thresh_i;
  end

  always_comb begin
    n_over = '0;
    for (int i = 0; i < NPIX; i++) n_over += CW'(over_q[i]);
  end

  // Stage 2: multiplicity.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l0_o   <= 1'b0;
      npix_o <= '0;
    end else begin
      l0_o   <= enable_i && (mult_i != '0) && (n_over >= mult_i);
      npix_o <= n_over;
    end
  end

endmodule
