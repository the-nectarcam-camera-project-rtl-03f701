// slow_control: configuration and status registers of a front-end FPGA.
//
// A simple register bus (address, write data, write strobe, read data)
// gives access to the module's settings: the L0 trigger (enable, threshold,
// multiplicity), the read-out (look-back into the SCA, pedestals used by the
// charge computation) and the output mode (full samples or charge and
// time). Two read-only registers return the event and dropped-trigger
// counts. The settings are presented to the rest of the module as one
// module_cfg_t struct.
//
// Register map (16-bit registers):
//   0 CTRL      [0] l0_enable  [1] mode (0 charge+time, 1 full samples)
//   1 L0_THR    [11:0] trigger threshold
//   2 L0_MULT   [2:0]  pixels over threshold for an L0
//   3 LOOKBACK  [9:0]  cells back from the SCA stop point
//   4 PED_HG    [11:0]
//   5 PED_LG    [11:0]
//   6 EVT_CNT   read only, low 16 bits of the event counter
//   7 DROPPED   read only, low 16 bits of the dropped-trigger counter
// Writes take effect on the next clock; read data is combinational.
//
// The paper says the FPGA controls the NECTAr chips, the L0/L1 trigger
// configuration and the high voltage, through links drawn as SPI in its
// read-out diagram. The register map, the reset values and the parallel bus
// are this design's choices; the SPI links and the high-voltage control are
// not modelled.
module slow_control
  import nectar_pkg::*;
#(
  parameter logic [SAMPLE_W-1:0] RST_THRESH   = 12'd400,
  parameter logic [2:0]          RST_MULT     = 3'd2,
  parameter logic [LB_W-1:0]     RST_LOOKBACK = 10'd16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [2:0]   addr_i,
  input  logic [15:0]  wdata_i,
  input  logic         we_i,
  output logic [15:0]  rdata_o,
  input  logic [31:0]  evt_count_i,
  input  logic [31:0]  dropped_i,
  output module_cfg_t  cfg_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_o.l0_enable <= 1'b1;
      cfg_o.mode      <= MODE_CHARGE;
      cfg_o.l0_thresh <= RST_THRESH;
      cfg_o.l0_mult   <= RST_MULT;
      cfg_o.lookback  <= RST_LOOKBACK;
      cfg_o.ped_hg    <= '0;
      cfg_o.ped_lg    <= '0;
    end else if (we_i) begin
      case (addr_i)
        3'd0: begin
          cfg_o.l0_enable <= wdata_i[0];
          cfg_o.mode      <= out_mode_e'(wdata_i[1]);
        end
        3'd1: cfg_o.l0_thresh <= wdata_i[SAMPLE_W-1:0];
        3'd2: cfg_o.l0_mult   <= wdata_i[2:0];
        3'd3: cfg_o.lookback  <= wdata_i[LB_W-1:0];
        3'd4: cfg_o.ped_hg    <= wdata_i[SAMPLE_W-1:0];
        3'd5: cfg_o.ped_lg    <= wdata_i[SAMPLE_W-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    case (addr_i)
      3'd0:    rdata_o = {14'd0, cfg_o.mode, cfg_o.l0_enable};
      3'd1:    rdata_o = 16'(cfg_o.l0_thresh);
      3'd2:    rdata_o = 16'(cfg_o.l0_mult);
      3'd3:    rdata_o = 16'(cfg_o.lookback);
      3'd4:    rdata_o = 16'(cfg_o.ped_hg);
      3'd5:    rdata_o = 16'(cfg_o.ped_lg);
      3'd6:    rdata_o = evt_count_i[15:0];
      default: rdata_o = dropped_i[15:0];
    endcase
  end

endmodule
