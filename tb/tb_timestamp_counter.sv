// tb_timestamp_counter: self-checking test of the camera time counter.
//
// Uses a short synchronisation period (PERIOD = 1000 cycles instead of
// 10 s) so that the missed-pulse flag can be reached. Pulses come at
// irregular intervals; the testbench counts cycles and pulses itself and
// compares the full 48-bit stamp every cycle, and checks that the flag
// rises only in a period longer than PERIOD and falls at the next pulse.
module tb_timestamp_counter;
  localparam longint unsigned PERIOD = 1000;
  logic clk = 0, rst_n = 0, pps = 0;
  logic [47:0] ts;
  logic missed;
  int checks = 0, failures = 0, n_missed = 0;
  longint ns_m = 1, n_m = 0;   // one edge passes before the first check

  timestamp_counter #(.PERIOD(PERIOD)) dut (.clk, .rst_n, .pps_i(pps), .ts_o(ts), .missed_o(missed));

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int gaps[6] = '{500, 1000, 999, 1500, 37, 2000};
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (gaps[g]) begin
      for (int i = 0; i < gaps[g]; i++) begin
        @(negedge clk);
        check(ts == {n_m[13:0], ns_m[33:0]}, $sformatf("ts %0h exp %0h", ts, {n_m[13:0], ns_m[33:0]}));
        check(missed == (ns_m >= longint'(PERIOD)), $sformatf("missed %0b at %0d", missed, ns_m));
        if (missed) n_missed++;
        pps = (i == gaps[g] - 1);
        @(posedge clk);
        if (pps) begin ns_m = 0; n_m++; end else ns_m++;
      end
    end
    pps = 0;
    check(n_missed > 0, "missed-pulse flag exercised");
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
