// tb_l0_trigger: self-checking test of the module-level L0 trigger.
//
// Random trigger-channel samples around the threshold, random multiplicity
// settings (including 0 = off) and the enable: the expected L0 and pixel
// count are computed from the inputs of two cycles earlier, the trigger's
// latency, and compared every cycle. Counts how often L0 fired.
module tb_l0_trigger;
  import nectar_pkg::*;
  localparam int unsigned NPIX = N_PIX, W = SAMPLE_W, CW = $clog2(N_PIX+1);
  logic clk = 0, rst_n = 0;
  logic en = 1;
  logic [W-1:0] thr = 12'd400;
  logic [CW-1:0] mult = 2;
  logic [NPIX-1:0][W-1:0] trig = '0;
  logic l0;
  logic [CW-1:0] npix;
  int checks = 0, failures = 0, fired = 0;
  int exp_n[$];
  bit exp_l0[$];

  l0_trigger dut (.clk, .rst_n, .enable_i(en), .thresh_i(thr), .mult_i(mult), .trig_i(trig),
                  .l0_o(l0), .npix_o(npix));

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // The pipeline holds one all-zero input when the loop starts.
    exp_n.push_back(0); exp_l0.push_back(0);
    for (int i = 0; i < 4000; i++) begin
      if (i % 500 == 0) begin mult = CW'($urandom % 8); en = ($urandom % 4) != 0; end
      for (int p = 0; p < NPIX; p++) trig[p] = W'(int'(thr) - 40 + int'($urandom % 80));
      if (i % 97 == 0) trig = '0;
      n = 0;
      for (int p = 0; p < NPIX; p++) if (trig[p] > thr) n++;
      exp_n.push_back(n);
      exp_l0.push_back(en && mult != 0 && n >= mult);
      @(posedge clk);
      @(negedge clk);
      // Outputs now reflect the inputs presented two cycles ago.
      begin
        int en_; bit el;
        en_ = exp_n.pop_front(); void'(exp_l0.pop_front());
        // The multiplicity stage uses the settings of the current cycle.
        el = en && mult != 0 && en_ >= int'(mult);
        check(npix == CW'(en_), $sformatf("npix %0d exp %0d", npix, en_));
        check(l0 == el, $sformatf("l0 %0b exp %0b", l0, el));
        if (l0) fired++;
      end
    end
    check(fired > 100, $sformatf("L0 fired %0d times", fired));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
