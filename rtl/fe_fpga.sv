// fe_fpga: control logic of the front-end FPGA of one read-out module.
//
// On an L1 accept from the backplane, when the module is idle, the FPGA
// counts the event, latches the time stamp and asks all NECTAr chips of
// the module to read out their window. When the chips have finished (their
// samples are then in the per-chip FIFOs) it sends the event on the
// network link as a packet of 16-bit words:
//
//   header (both modes):  {mode, event count[14:0]}, ts[47:32], ts[31:16], ts[15:0]
//   MODE_FULL:   for each pixel p, each cidx c: {0, p, HG sample}, {1, p, LG sample}
//                (bit 15 = gain, bits 14:12 = pixel, bits 11:0 = ADC code)
//   MODE_CHARGE: for each pixel: HG charge, LG charge, HG arrival time (cidx index)
//
// out_last_o marks the last word. An L1 accept that arrives while an event
// is still being read out or sent is dropped and counted (dead time).
//
// Interface: the link is a valid/ready stream; a word moves when both are
// high. FIFO heads are read show-ahead and popped by fifo_pop_o.
//
// Timing: rd_req_o follows an accepted L1 by one cycle. With WIN = 16 and
// seven pixels a packet is 4 + 7*3 = 25 words (400 bits) in charge mode and
// 4 + 7*16*2 = 228 words in full mode; a charge-mode pixel takes WIN + 6
// cycles, a full-mode word one cycle when the link is ready.
//
// The paper gives the roles: read the NECTAr chips into FIFOs on L1 accept,
// count and time-stamp events, optionally replace the samples by the
// integrated charge and arrival time, send over Ethernet. The packet format,
// the sequential (read-out, then send) operation and the drop-while-busy
// rule are this design's choices. The Ethernet MAC is not modelled.
module fe_fpga
  import nectar_pkg::*;
#(
  parameter int unsigned NPIX = N_PIX,
  parameter int unsigned W    = SAMPLE_W,
  parameter int unsigned WIN  = WIN_CELLS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  module_cfg_t                 cfg_i,
  input  logic                        l1_accept_i,
  input  logic [TS_W-1:0]             ts_i,
  output logic                        rd_req_o,
  input  logic [NPIX-1:0]             chip_busy_i,
  input  logic [NPIX-1:0][2*W-1:0]    fifo_data_i,   // {hg, lg}
  input  logic [NPIX-1:0]             fifo_empty_i,
  output logic [NPIX-1:0]             fifo_pop_o,
  output logic                        out_valid_o,
  output logic [WORD_W-1:0]           out_data_o,
  output logic                        out_last_o,
  input  logic                        out_ready_i,
  output logic                        busy_o,
  output logic [31:0]                 evt_count_o,
  output logic [31:0]                 dropped_o
);
  typedef enum logic [3:0] {
    S_IDLE, S_ARM, S_WAIT_RO, S_HDR, S_FULL, S_START, S_SUM, S_FXW, S_OUT
  } state_e;

  localparam int unsigned PW = $clog2(NPIX);
  localparam int unsigned CW = $clog2(WIN + 1);

  state_e          state;
  logic [PW-1:0]   pix;
  logic [CW-1:0]   cidx;
  logic [1:0]      widx;        // header word or charge-mode word index
  logic            half;        // full mode: 0 = HG word, 1 = LG word
  logic [TS_W-1:0] ts_q;
  out_mode_e       mode_q;
  logic            fire;
  logic            xfer;
  logic            last_pix;

  logic [2*W-1:0]  head;
  logic [W-1:0]    head_hg, head_lg;
  logic            fx_start, fx_valid, fx_done_hg, fx_done_lg;
  logic signed [15:0] q_hg, q_lg;
  logic [$clog2(WIN)-1:0] t_hg, t_lg;

  assign head     = fifo_data_i[pix];
  assign head_hg  = head[2*W-1:W];
  assign head_lg  = head[W-1:0];
  assign fire     = l1_accept_i && (state == S_IDLE);
  assign xfer     = out_valid_o && out_ready_i;
  assign last_pix = (pix == PW'(NPIX - 1));
  assign busy_o   = (state != S_IDLE);
  assign fx_start = (state == S_START);
  assign fx_valid = (state == S_SUM);

  feature_extract #(.W(W), .WIN(WIN)) u_fx_hg (
    .clk, .rst_n, .start_i(fx_start), .valid_i(fx_valid), .sample_i(head_hg),
    .pedestal_i(cfg_i.ped_hg), .done_o(fx_done_hg), .charge_o(q_hg), .time_o(t_hg)
  );
  feature_extract #(.W(W), .WIN(WIN)) u_fx_lg (
    .clk, .rst_n, .start_i(fx_start), .valid_i(fx_valid), .sample_i(head_lg),
    .pedestal_i(cfg_i.ped_lg), .done_o(fx_done_lg), .charge_o(q_lg), .time_o(t_lg)
  );

  // Output word and FIFO pops.
  always_comb begin
    out_valid_o = 1'b0;
    out_data_o  = '0;
    out_last_o  = 1'b0;
    fifo_pop_o  = '0;
    case (state)
      S_HDR: begin
        out_valid_o = 1'b1;
        case (widx)
          2'd0:    out_data_o = {mode_q, evt_count_o[14:0]};
          2'd1:    out_data_o = ts_q[47:32];
          2'd2:    out_data_o = ts_q[31:16];
          default: out_data_o = ts_q[15:0];
        endcase
      end
      S_FULL: begin
        out_valid_o = 1'b1;
        out_data_o  = {half, 3'(pix), half ? head_lg : head_hg};
        out_last_o  = half && last_pix && (cidx == CW'(WIN - 1));
        fifo_pop_o[pix] = half && out_ready_i;
      end
      S_SUM:   fifo_pop_o[pix] = 1'b1;
      S_OUT: begin
        out_valid_o = 1'b1;
        case (widx)
          2'd0:    out_data_o = q_hg;
          2'd1:    out_data_o = q_lg;
          default: out_data_o = 16'(t_hg);
        endcase
        out_last_o = last_pix && (widx == 2'd2);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pix         <= '0;
      cidx        <= '0;
      widx        <= '0;
      half        <= 1'b0;
      ts_q        <= '0;
      mode_q      <= MODE_CHARGE;
      rd_req_o    <= 1'b0;
      evt_count_o <= '0;
      dropped_o   <= '0;
    end else begin
      rd_req_o <= 1'b0;
      if (l1_accept_i && state != S_IDLE) dropped_o <= dropped_o + 1'b1;
      case (state)
        S_IDLE: if (fire) begin
          ts_q        <= ts_i;
          mode_q      <= cfg_i.mode;
          evt_count_o <= evt_count_o + 1'b1;
          rd_req_o    <= 1'b1;
          state       <= S_ARM;
        end
        S_ARM:     state <= S_WAIT_RO;   // the chips see the request now
        S_WAIT_RO: if (chip_busy_i == '0) begin
          state <= S_HDR;
          widx  <= '0;
        end
        S_HDR: if (xfer) begin
          widx <= widx + 1'b1;
          if (widx == 2'd3) begin
            pix   <= '0;
            cidx  <= '0;
            half  <= 1'b0;
            widx  <= '0;
            state <= (mode_q == MODE_FULL) ? S_FULL : S_START;
          end
        end
        S_FULL: if (xfer) begin
          half <= ~half;
          if (half) begin
            if (cidx == CW'(WIN - 1)) begin
              cidx <= '0;
              if (last_pix) state <= S_IDLE;
              else pix <= pix + 1'b1;
            end else begin
              cidx <= cidx + 1'b1;
            end
          end
        end
        S_START: begin
          cidx  <= '0;
          state <= S_SUM;
        end
        S_SUM: begin
          cidx <= cidx + 1'b1;
          if (cidx == CW'(WIN - 1)) state <= S_FXW;
          widx <= '0;
        end
        S_FXW: if (fx_done_hg) state <= S_OUT;
        S_OUT: if (xfer) begin
          widx <= widx + 1'b1;
          if (widx == 2'd2) begin
            widx <= '0;
            if (last_pix) state <= S_IDLE;
            else begin
              pix   <= pix + 1'b1;
              state <= S_START;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The read-out leaves exactly WIN cells per chip, so a pop never finds an
  // empty FIFO.
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    (fifo_pop_o & fifo_empty_i) == '0) else $error("fe_fpga: pop of an empty FIFO");

endmodule
