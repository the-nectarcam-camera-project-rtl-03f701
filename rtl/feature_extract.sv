// feature_extract: charge and arrival time of one channel over the window.
//
// Fed with the WIN samples of one channel, one per valid_i, it accumulates
// their sum and tracks the largest sample. After the last sample it gives
// the integrated charge, sum - WIN*pedestal, saturated to a signed 16-bit
// number, and the arrival time as the index (0..WIN-1) of the first sample
// that holds the maximum. start_i clears the unit for a new window.
//
// Timing: one sample per cycle at most; done_o pulses on the clock edge
// after the WIN-th sample, with charge_o and time_o valid from then until
// the next start_i.
//
// The paper says that the FPGA can compute the integrated charge over the
// read-out window and the arrival time of the signal. The pedestal
// subtraction, taking the peak position as the arrival time, and the 16-bit
// saturated charge are this design's choices.
module feature_extract
  import nectar_pkg::*;
#(
  parameter int unsigned W   = SAMPLE_W,
  parameter int unsigned WIN = WIN_CELLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start_i,
  input  logic                      valid_i,
  input  logic [W-1:0]              sample_i,
  input  logic [W-1:0]              pedestal_i,
  output logic                      done_o,
  output logic signed [15:0]        charge_o,
  output logic [$clog2(WIN)-1:0]    time_o
);
  localparam int unsigned IW = $clog2(WIN);
  localparam int unsigned NW = $clog2(WIN + 2);
  localparam int unsigned SW = W + NW + 2;   // room for the signed result

  logic [SW-1:0]  sum;
  logic [W-1:0]   peak;
  logic [IW-1:0]  peak_idx;
  logic [NW-1:0]  n;
  logic signed [SW-1:0] q;

  assign q = $signed(sum) - $signed(SW'(pedestal_i) * SW'(WIN));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum      <= '0;
      peak     <= '0;
      peak_idx <= '0;
      n        <= '0;
      done_o   <= 1'b0;
      charge_o <= '0;
      time_o   <= '0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        sum      <= '0;
        peak     <= '0;
        peak_idx <= '0;
        n        <= '0;
      end else if (valid_i && n < NW'(WIN)) begin
        sum <= sum + SW'(sample_i);
        if (n == '0 || sample_i > peak) begin
          peak     <= sample_i;
          peak_idx <= IW'(n);
        end
        n <= n + 1'b1;
      end else if (n == NW'(WIN)) begin
        // Window complete: publish once.
        n      <= n + 1'b1;
        done_o <= 1'b1;
        time_o <= peak_idx;
        if (q > 32767)       charge_o <= 16'sd32767;
        else if (q < -32768) charge_o <= -16'sd32768;
        else                 charge_o <= q[15:0];
      end
    end
  end

endmodule
