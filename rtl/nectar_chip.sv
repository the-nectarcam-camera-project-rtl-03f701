// nectar_chip: digital model of one NECTAr chip (switched capacitor array + ADC).
//
// The chip records the high-gain and low-gain signals of one pixel in a
// circular buffer of DEPTH cells, one cell per sample clock. When the
// front-end FPGA requests a read-out, writing stops, the chip converts WIN
// consecutive cells starting LOOKBACK cells before the stop point and hands
// them out one by one; when the last cell is out, writing resumes. The time
// spent converting is the read-out dead time.
//
// Interface: hg_i/lg_i are the samples of this clock (here already
// digitised: the analogue storage and the ADC itself are not modelled).
// rd_req_i is a one-cycle request, honoured only while busy_o is low.
// Each converted cell appears on cell_o with cell_valid_o for one cycle;
// done_o pulses with the last cell.
//
// Timing: busy_o rises on the clock after rd_req_i and stays high for exactly
// WIN*CONV_CYCLES cycles; cell k (k = 0..WIN-1) comes out (k+1)*CONV_CYCLES
// cycles after the request edge. With the defaults (16 cells, 125 cycles per
// cell at 1 GHz) the dead time is 2 us, as the paper gives for a 16-cell
// read-out. The depth of 1024 cells is the paper's. That sampling stops
// during the read-out, that cells are converted one after the other at a
// constant rate and that both gains are converted together are this
// design's choices; so is clamping the look-back to at least WIN cells, so
// that a window never runs into cells not yet written.
module nectar_chip
  import nectar_pkg::*;
#(
  parameter int unsigned DEPTH       = SCA_DEPTH,
  parameter int unsigned WIN         = WIN_CELLS,
  parameter int unsigned CONV_CYCLES = SCA_CONV,
  parameter int unsigned W           = SAMPLE_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [W-1:0]             hg_i,
  input  logic [W-1:0]             lg_i,
  input  logic                     rd_req_i,
  input  logic [$clog2(DEPTH)-1:0] lookback_i,
  output logic                     busy_o,
  output logic                     cell_valid_o,
  output logic [2*W-1:0]           cell_o,      // {hg, lg}
  output logic                     done_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = (CONV_CYCLES > 1) ? $clog2(CONV_CYCLES) : 1;
  localparam int unsigned NW = $clog2(WIN + 1);

  logic [2*W-1:0] mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;
  logic [CW-1:0]  conv_cnt;
  logic [NW-1:0]  n_done;
  logic [AW-1:0]  lb_eff;

  assign lb_eff = (lookback_i < AW'(WIN)) ? AW'(WIN) : lookback_i;

  // Sampling: the circular buffer is written while no read-out is running.
  always_ff @(posedge clk) begin
    if (!busy_o) mem[wr_ptr] <= {hg_i, lg_i};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr       <= '0;
      rd_ptr       <= '0;
      conv_cnt     <= '0;
      n_done       <= '0;
      busy_o       <= 1'b0;
      cell_valid_o <= 1'b0;
      cell_o       <= '0;
      done_o       <= 1'b0;
    end else begin
      cell_valid_o <= 1'b0;
      done_o       <= 1'b0;
      if (!busy_o) begin
        if (rd_req_i) begin
          // wr_ptr is the next cell to be written, so the window ends on the
          // newest stored sample when lb_eff equals WIN.
          busy_o   <= 1'b1;
          rd_ptr   <= wr_ptr - lb_eff;
          conv_cnt <= '0;
          n_done   <= '0;
        end else begin
          wr_ptr <= wr_ptr + 1'b1;
        end
      end else if (conv_cnt == CW'(CONV_CYCLES - 1)) begin
        conv_cnt     <= '0;
        cell_o       <= mem[rd_ptr];
        cell_valid_o <= 1'b1;
        rd_ptr       <= rd_ptr + 1'b1;
        n_done       <= n_done + 1'b1;
        if (n_done == NW'(WIN - 1)) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
        end
      end else begin
        conv_cnt <= conv_cnt + 1'b1;
      end
    end
  end

endmodule
