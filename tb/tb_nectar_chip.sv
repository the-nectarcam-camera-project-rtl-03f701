// tb_nectar_chip: self-checking test of the NECTAr chip model.
//
// Drives a ramp on the high gain (and its complement on the low gain) so
// that every stored sample is known, keeps its own list of the samples the
// chip should have stored (those of cycles with no read-out running and no
// request), and checks after each read-out request: the WIN cells that come
// out against the list, the cycle at which each comes out
// ((k+1)*CONV_CYCLES after the request), and the dead time (busy for
// exactly WIN*CONV_CYCLES cycles = 2000 ns at the defaults). The first
// read-out happens after the buffer has wrapped around; the second uses a
// look-back below WIN, which the chip raises to WIN; a request during a
// read-out must be ignored.
module tb_nectar_chip;
  import nectar_pkg::*;
  localparam int unsigned DEPTH = SCA_DEPTH, WIN = WIN_CELLS, CONV = SCA_CONV, W = SAMPLE_W;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] hg = '0, lg = '0;
  logic rd_req = 0;
  logic [$clog2(DEPTH)-1:0] lookback = '0;
  logic busy, cv, done;
  logic [2*W-1:0] cdat;
  int checks = 0, failures = 0;
  int cyc = 0;
  int hist[$];

  nectar_chip dut (.clk, .rst_n, .hg_i(hg), .lg_i(lg), .rd_req_i(rd_req), .lookback_i(lookback),
                   .busy_o(busy), .cell_valid_o(cv), .cell_o(cdat), .done_o(done));

  always #1 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && !busy && !rd_req) hist.push_back(int'(hg));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue a request and check the whole read-out.
  task automatic readout(input int lb);
    int lb_eff, start, req_cyc, busy_cycles, k;
    int exp_v;
    lb_eff = (lb < WIN) ? WIN : lb;
    @(negedge clk);
    lookback = ($clog2(DEPTH))'(lb);
    rd_req = 1;
    req_cyc = cyc + 1;   // cycle count after the request edge
    @(posedge clk);
    start = hist.size() - lb_eff;
    @(negedge clk); rd_req = 0;
    check(busy, "busy after request");
    busy_cycles = 0; k = 0;
    while (busy || cv) begin
      if (busy) busy_cycles++;
      if (cv) begin
        exp_v = hist[start + k];
        check(cdat[2*W-1:W] == W'(exp_v), $sformatf("cdat %0d hg %0h exp %0h", k, cdat[2*W-1:W], exp_v));
        check(cdat[W-1:0] == ~W'(exp_v), $sformatf("cdat %0d lg", k));
        check(cyc - req_cyc == (k + 1) * CONV, $sformatf("cdat %0d at %0d exp %0d", k, cyc - req_cyc, (k+1)*CONV));
        if (k == WIN - 1) check(done, "done with last cdat");
        k++;
      end
      if (k == 3 && busy_cycles == 3 * CONV + 5) begin
        // A request in the middle of a read-out is ignored.
        rd_req = 1; @(negedge clk); rd_req = 0;
        continue;
      end
      @(negedge clk);
    end
    check(k == WIN, $sformatf("%0d cells read", k));
    check(busy_cycles == WIN * CONV, $sformatf("dead time %0d cycles", busy_cycles));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      forever begin @(negedge clk); hg = W'(cyc * 7 + 3); lg = ~hg; end
    join_none
    repeat (DEPTH + 100) @(negedge clk);
    readout(40);
    repeat (50) @(negedge clk);
    readout(3);
    repeat (300) @(negedge clk);
    readout(WIN);
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
