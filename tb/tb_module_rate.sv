// tb_module_rate: one read-out module under the camera's typical trigger rate.
//
// Sends L1 accepts to one module (all parameters at their defaults) every
// 200 us, i.e. at 5 kHz, the typical single-telescope trigger rate, first
// in charge mode and then in full-sample mode, and measures the bits the
// module puts on its link per second of simulated time. In charge mode
// this must be 400 bits x 5 kHz = 2.0 Mbit/s. It also measures how long
// the module is busy per event (the dead time, at least the 2 us of the
// chip read-out) and, with a burst of accepts 1 us apart, checks that
// accepts arriving in the dead time are dropped and that the others are
// all taken.
module tb_module_rate;
  import nectar_pkg::*;
  localparam int unsigned NPIX = N_PIX, W = SAMPLE_W;
  localparam int PERIOD_5KHZ = 200_000;   // cycles of 1 ns
  localparam int N_EV = 10;               // events per mode

  logic clk = 0, rst_n = 0;
  logic [NPIX-1:0][W-1:0] hg, lg, trig;
  logic [TS_W-1:0] ts = '0;
  logic l0, l1 = 0;
  logic [$clog2(NPIX+1)-1:0] npix;
  logic [2:0] sc_addr = '0;
  logic [15:0] sc_wdata = '0, sc_rdata;
  logic sc_we = 0;
  logic ov, olast, busy;
  logic [WORD_W-1:0] od;
  int checks = 0, failures = 0;
  longint words = 0, busy_cycles = 0, cyc = 0;

  nectar_module dut (.clk, .rst_n, .hg_i(hg), .lg_i(lg), .trig_i(trig), .ts_i(ts), .l0_o(l0),
    .npix_o(npix), .l1_accept_i(l1), .sc_addr_i(sc_addr), .sc_wdata_i(sc_wdata), .sc_we_i(sc_we),
    .sc_rdata_o(sc_rdata), .out_valid_o(ov), .out_data_o(od), .out_last_o(olast),
    .out_ready_i(1'b1), .busy_o(busy));

  always #1 clk = ~clk;
  always @(posedge clk) begin
    ts <= ts + 1'b1;
    cyc++;
    if (ov) words++;
    if (busy) busy_cycles++;
  end
  always @(negedge clk)
    for (int p = 0; p < NPIX; p++) begin
      hg[p] = W'(200 + $urandom % 16); lg[p] = W'(50 + $urandom % 4); trig[p] = W'(100 + $urandom % 16);
    end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic sc_write(input int a, input int d);
    @(negedge clk); sc_addr = 3'(a); sc_wdata = 16'(d); sc_we = 1;
    @(negedge clk); sc_we = 0;
  endtask

  task automatic sc_read(input int a, output logic [15:0] d);
    @(negedge clk); sc_addr = 3'(a);
    @(posedge clk); d = sc_rdata;
  endtask

  // N_EV accepts at 5 kHz; returns link bits per event, rate and dead time.
  task automatic run_mode(input bit full, output real mbps, output real dead_per_ev, output longint bits_ev);
    longint w0, b0, c0;
    sc_write(0, {full, 1'b0});   // L0 off: the accepts come from the camera trigger
    w0 = words; b0 = busy_cycles; c0 = cyc;
    for (int e = 0; e < N_EV; e++) begin
      @(negedge clk); l1 = 1; @(negedge clk); l1 = 0;
      repeat (PERIOD_5KHZ - 2) @(negedge clk);
    end
    bits_ev = (words - w0) * WORD_W / N_EV;
    mbps = real'((words - w0) * WORD_W) / (real'(cyc - c0) * 1.0e-9) / 1.0e6;
    dead_per_ev = real'(busy_cycles - b0) / N_EV;
  endtask

  initial begin
    real mbps_c, mbps_f, dead_c, dead_f;
    longint bits_c, bits_f;
    logic [15:0] r;
    int dropped0, events0, n_burst;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (1100) @(negedge clk);
    run_mode(1'b0, mbps_c, dead_c, bits_c);
    run_mode(1'b1, mbps_f, dead_f, bits_f);
    $display("charge mode: %0d bit/event, %0.3f Mbit/s at 5 kHz, busy %0.0f ns/event", bits_c, mbps_c, dead_c);
    $display("full mode:   %0d bit/event, %0.3f Mbit/s at 5 kHz, busy %0.0f ns/event", bits_f, mbps_f, dead_f);
    check(bits_c == 400, "charge-mode packet is 400 bits");
    check(bits_f == 3648, "full-mode packet is 3648 bits");
    check(mbps_c > 1.99 && mbps_c < 2.01, "2.0 Mbit/s in charge mode at 5 kHz");
    check(dead_c >= 2000.0 && dead_c < 2300.0, "charge-mode dead time 2 us plus the packet");
    check(dead_f >= 2000.0 + 228.0 && dead_f < 2400.0, "full-mode dead time 2 us plus the packet");
    sc_read(7, r); dropped0 = int'(r);
    sc_read(6, r); events0 = int'(r);
    check(dropped0 == 0 && events0 == 2 * N_EV, "no accept lost at 5 kHz");
    // Burst: accepts every 1000 ns; each event takes ~2.2 us, so about two in three are dropped.
    sc_write(0, 0);
    n_burst = 30;
    for (int e = 0; e < n_burst; e++) begin
      @(negedge clk); l1 = 1; @(negedge clk); l1 = 0;
      repeat (998) @(negedge clk);
    end
    repeat (5000) @(negedge clk);
    sc_read(7, r); dropped0 = int'(r);
    sc_read(6, r); events0 = int'(r) - 2 * N_EV;
    $display("burst of %0d accepts 1 us apart: %0d taken, %0d dropped", n_burst, events0, dropped0);
    check(events0 + dropped0 == n_burst, "every burst accept either taken or dropped");
    check(events0 == 10, $sformatf("one accept in three taken (%0d)", events0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
