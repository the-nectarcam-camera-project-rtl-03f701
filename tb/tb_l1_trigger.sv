// tb_l1_trigger: self-checking test of the camera-level L1 trigger.
//
// Sparse random L0 pulses from the modules, with occasional bursts where
// many modules fire within a few nanoseconds (a shower). A model that keeps
// the time of each module's last L0 decides which coincidence gates are
// open, and from that when an accept is due; the accept is checked every
// cycle, three cycles after the L0 edge that completes the coincidence
// (well under the 400 ns of the paper), and the accept counter at the end.
module tb_l1_trigger;
  import nectar_pkg::*;
  localparam int unsigned NMOD = N_MODULES, GATE = 8, CW = $clog2(N_MODULES+1);
  logic clk = 0, rst_n = 0;
  logic en = 1;
  logic [CW-1:0] mult = 3;
  logic [NMOD-1:0] l0 = '0;
  logic acc;
  logic [31:0] acc_cnt;
  int checks = 0, failures = 0;
  int last[NMOD];
  int edge_n = 0, n_exp = 0, n_bursts = 0;
  bit exp_acc[int];
  bit prev_c = 0;

  l1_trigger #(.NMOD(NMOD), .GATE(GATE)) dut (.clk, .rst_n, .enable_i(en), .mult_i(mult), .l0_i(l0),
    .l1_accept_o(acc), .accept_count_o(acc_cnt));

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference model, evaluated on each clock edge.
  always @(posedge clk) if (rst_n) begin
    int cnt; bit c;
    for (int m = 0; m < NMOD; m++) if (l0[m]) last[m] = edge_n;
    cnt = 0;
    for (int m = 0; m < NMOD; m++) if (last[m] >= 0 && edge_n - last[m] < GATE) cnt++;
    c = en && (mult != 0) && (cnt >= int'(mult));
    exp_acc[edge_n] = c && !prev_c;
    if (c && !prev_c) n_exp++;
    prev_c = c;
    edge_n++;
  end

  initial begin
    for (int m = 0; m < NMOD; m++) last[m] = -1000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      if (edge_n >= 3) check(acc == exp_acc[edge_n - 3], $sformatf("accept at edge %0d", edge_n));
      if (i % 1500 == 0) begin mult = CW'(1 + $urandom % 5); en = (i != 3000); end
      l0 = '0;
      if ($urandom % 200 == 0) begin
        // Shower: several neighbouring modules within a few cycles.
        n_bursts++;
        for (int k = 0; k < 6; k++) l0[$urandom % NMOD] = 1'b1;
      end else if ($urandom % 4 == 0) begin
        l0[$urandom % NMOD] = 1'b1;   // isolated L0 (night-sky background)
      end
    end
    repeat (5) @(negedge clk);
    check(acc_cnt == 32'(n_exp), $sformatf("accept count %0d exp %0d", acc_cnt, n_exp));
    check(n_exp > 10, $sformatf("%0d accepts expected", n_exp));
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
