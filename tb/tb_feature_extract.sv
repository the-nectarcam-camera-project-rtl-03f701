// tb_feature_extract: self-checking test of the charge and arrival-time unit.
//
// Random windows of WIN samples, fed with random gaps, shaped as a pulse on
// a pedestal; some windows are chosen to saturate the charge in either
// direction. The expected charge (sum minus WIN times the pedestal,
// clipped to 16 signed bits) and arrival time (first index of the maximum)
// are computed in the testbench; done must come on the clock edge after the
// last sample's edge.
module tb_feature_extract;
  import nectar_pkg::*;
  localparam int unsigned W = SAMPLE_W, WIN = WIN_CELLS;
  logic clk = 0, rst_n = 0;
  logic start = 0, valid = 0;
  logic [W-1:0] sample = '0, ped = '0;
  logic done;
  logic signed [15:0] charge;
  logic [$clog2(WIN)-1:0] tm;
  int checks = 0, failures = 0, n_sat = 0;

  feature_extract dut (.clk, .rst_n, .start_i(start), .valid_i(valid), .sample_i(sample),
    .pedestal_i(ped), .done_o(done), .charge_o(charge), .time_o(tm));

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int s[WIN];
    int sum, q, pk, pki, amp, pos;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 400; ev++) begin
      ped = W'(100 + $urandom % 300);
      amp = $urandom % 3000;
      pos = $urandom % WIN;
      for (int k = 0; k < WIN; k++) begin
        int d; d = (k > pos) ? k - pos : pos - k;
        s[k] = int'(ped) + ((d < 3) ? amp / (1 + 2 * d) : 0) + int'($urandom % 8);
        if (s[k] > 4095) s[k] = 4095;
      end
      if (ev % 50 == 7)  for (int k = 0; k < WIN; k++) s[k] = 4095;          // huge signal
      if (ev % 50 == 9)  begin ped = 12'd4095; for (int k = 0; k < WIN; k++) s[k] = 0; end
      sum = 0; pk = -1; pki = 0;
      for (int k = 0; k < WIN; k++) begin sum += s[k]; if (s[k] > pk) begin pk = s[k]; pki = k; end end
      q = sum - WIN * int'(ped);
      if (q > 32767) begin q = 32767; n_sat++; end
      if (q < -32768) begin q = -32768; n_sat++; end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < WIN; k++) begin
        while ($urandom % 3 == 0) @(negedge clk);
        valid = 1; sample = W'(s[k]); @(negedge clk); valid = 0;
        if (k < WIN - 1) check(!done, "done before the last sample");
      end
      check(!done, "done not on the last sample's edge");
      @(negedge clk);
      check(done, "done one cycle after the last sample");
      check(charge == 16'(q), $sformatf("ev %0d charge %0d exp %0d", ev, charge, q));
      check(int'(tm) == pki, $sformatf("ev %0d time %0d exp %0d", ev, tm, pki));
    end
    check(n_sat >= 10, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
