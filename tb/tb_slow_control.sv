// tb_slow_control: self-checking test of the module's configuration registers.
//
// Checks the reset values, then writes random values to every register,
// reads them back through the bus and checks the configuration struct
// field by field (including the masking of unused bits), and reads the two
// read-only counters.
module tb_slow_control;
  import nectar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  logic we = 0;
  logic [31:0] evt = 32'h1234_5678, drop = 32'h0000_9abc;
  module_cfg_t cfg;
  int checks = 0, failures = 0;

  slow_control dut (.clk, .rst_n, .addr_i(addr), .wdata_i(wdata), .we_i(we), .rdata_o(rdata),
                    .evt_count_i(evt), .dropped_i(drop), .cfg_o(cfg));

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input logic [15:0] d);
    @(negedge clk); addr = 3'(a); wdata = d; we = 1;
    @(negedge clk); we = 0;
  endtask

  task automatic rdchk(input int a, input logic [15:0] exp, input string what);
    @(negedge clk); addr = 3'(a);
    @(posedge clk);
    check(rdata == exp, $sformatf("%s: %0h exp %0h", what, rdata, exp));
  endtask

  initial begin
    logic [15:0] v[6];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg.l0_enable == 1'b1 && cfg.mode == MODE_CHARGE, "reset control");
    check(cfg.l0_thresh == 12'd400 && cfg.l0_mult == 3'd2 && cfg.lookback == 10'd16, "reset trigger/readout");
    check(cfg.ped_hg == '0 && cfg.ped_lg == '0, "reset pedestals");
    for (int it = 0; it < 50; it++) begin
      for (int a = 0; a < 6; a++) begin v[a] = 16'($urandom); wr(a, v[a]); end
      @(negedge clk);
      check(cfg.l0_enable == v[0][0], "l0_enable");
      check(cfg.mode == out_mode_e'(v[0][1]), "mode");
      check(cfg.l0_thresh == v[1][11:0], "l0_thresh");
      check(cfg.l0_mult == v[2][2:0], "l0_mult");
      check(cfg.lookback == v[3][9:0], "lookback");
      check(cfg.ped_hg == v[4][11:0], "ped_hg");
      check(cfg.ped_lg == v[5][11:0], "ped_lg");
      rdchk(0, {14'd0, v[0][1:0]}, "read CTRL");
      rdchk(1, {4'd0, v[1][11:0]}, "read L0_THR");
      rdchk(2, {13'd0, v[2][2:0]}, "read L0_MULT");
      rdchk(3, {6'd0, v[3][9:0]}, "read LOOKBACK");
      rdchk(4, {4'd0, v[4][11:0]}, "read PED_HG");
      rdchk(5, {4'd0, v[5][11:0]}, "read PED_LG");
      evt = $urandom; drop = $urandom;
      rdchk(6, evt[15:0], "read EVT_CNT");
      rdchk(7, drop[15:0], "read DROPPED");
      // Writes to read-only addresses change nothing.
      wr(6, 16'hffff); wr(7, 16'hffff);
      check(cfg.l0_thresh == v[1][11:0] && cfg.ped_lg == v[5][11:0], "read-only writes ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
