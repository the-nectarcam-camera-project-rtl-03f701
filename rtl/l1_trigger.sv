// l1_trigger: camera-level (L1) trigger on the backplane.
//
// Combines the L0 signals of all modules. Each L0 is stretched to a
// coincidence gate of GATE cycles, so that modules whose signals arrive a
// few nanoseconds apart still count together. When the number of open
// gates reaches mult_i, the L1 accept is issued to every module for one
// cycle. A new accept needs the count to fall below mult_i first, so one
// shower gives one accept. accept_count_o counts the accepts issued.
//
// Timing: three register stages (gate, count, decision), so l1_accept_o
// follows the first L0 edge that completes the coincidence by 3 cycles,
// far below the paper's bound of 400 ns on the camera trigger latency.
//
// The paper says only that L1 combines the information of several modules,
// is distributed by the backplane and may be analogue or digital. Counting
// gated L0s over the whole camera, the gate length and the re-arm rule are
// this design's choices; the paper's sector or neighbour schemes are not
// described there and are not modelled.
module l1_trigger #(
  parameter int unsigned NMOD  = nectar_pkg::N_MODULES,
  parameter int unsigned GATE  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      enable_i,
  input  logic [$clog2(NMOD+1)-1:0] mult_i,
  input  logic [NMOD-1:0]           l0_i,
  output logic                      l1_accept_o,
  output logic [31:0]               accept_count_o
);
  localparam int unsigned CW = $clog2(NMOD + 1);
  localparam int unsigned GW = $clog2(GATE + 1);

  logic [NMOD-1:0][GW-1:0] gate_cnt;
  logic [NMOD-1:0]         gate_open;
  logic [CW-1:0]           n_open_c, n_open_q;
  logic                    cond_q;

  // Stage 1: coincidence gates, restarted by every L0 sample.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gate_cnt <= '0;
    else for (int m = 0; m < NMOD; m++)
      if (l0_i[m])               gate_cnt[m] <= GW'(GATE);
      else if (gate_cnt[m] != 0) gate_cnt[m] <= gate_cnt[m] - 1'b1;
  end

  always_comb begin
    for (int m = 0; m < NMOD; m++) gate_open[m] = (gate_cnt[m] != '0);
    n_open_c = '0;
    for (int m = 0; m < NMOD; m++) n_open_c += CW'(gate_open[m]);
  end

  // Stage 2: module count; stage 3: decision on the rising edge.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_open_q       <= '0;
      cond_q         <= 1'b0;
      l1_accept_o    <= 1'b0;
      accept_count_o <= '0;
    end else begin
      n_open_q    <= n_open_c;
      cond_q      <= enable_i && (mult_i != '0) && (n_open_q >= mult_i);
      l1_accept_o <= 1'b0;
      if (enable_i && (mult_i != '0) && (n_open_q >= mult_i) && !cond_q) begin
        l1_accept_o    <= 1'b1;
        accept_count_o <= accept_count_o + 1'b1;
      end
    end
  end

endmodule
