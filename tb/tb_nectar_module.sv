// tb_nectar_module: self-checking test of one seven-pixel read-out module.
//
// Drives noisy pedestals on every pixel's high and low gain and, at chosen
// times, a photon pulse on a few pixels (both gains and the trigger
// channel). The testbench plays the camera trigger: it answers the
// module's L0 with an L1 accept on the next cycle. It checks the L0 timing
// (two cycles after the pulse sample), that the read-out dead time is the
// 2000 cycles of a 16-cell read-out, that the packet words equal those
// computed from the testbench's own record of the samples it drove (the
// window is the LOOKBACK samples that end at the L1 edge), that an accept
// during an event is dropped and shows in the DROPPED register, and that
// both output modes work.
module tb_nectar_module;
  import nectar_pkg::*;
  localparam int unsigned NPIX = N_PIX, W = SAMPLE_W, WIN = WIN_CELLS;
  logic clk = 0, rst_n = 0;
  logic [NPIX-1:0][W-1:0] hg = '0, lg = '0, trig = '0;
  logic [TS_W-1:0] ts = '0;
  logic l0, l1 = 0;
  logic [$clog2(NPIX+1)-1:0] npix;
  logic [2:0] sc_addr = '0;
  logic [15:0] sc_wdata = '0, sc_rdata;
  logic sc_we = 0;
  logic ov, olast, ordy = 1, busy;
  logic [WORD_W-1:0] od;
  int checks = 0, failures = 0;
  int edge_n = 0, l1_edge = -1, first_word_edge = -1;
  int hist_hg[int][NPIX], hist_lg[int][NPIX];
  logic [WORD_W-1:0] got[$];

  nectar_module dut (.clk, .rst_n, .hg_i(hg), .lg_i(lg), .trig_i(trig), .ts_i(ts), .l0_o(l0),
    .npix_o(npix), .l1_accept_i(l1), .sc_addr_i(sc_addr), .sc_wdata_i(sc_wdata), .sc_we_i(sc_we),
    .sc_rdata_o(sc_rdata), .out_valid_o(ov), .out_data_o(od), .out_last_o(olast),
    .out_ready_i(ordy), .busy_o(busy));

  always #1 clk = ~clk;

  always @(posedge clk) begin
    ts <= ts + 1'b1;
    for (int p = 0; p < NPIX; p++) begin hist_hg[edge_n][p] = int'(hg[p]); hist_lg[edge_n][p] = int'(lg[p]); end
    if (l1 && l1_edge < 0) l1_edge = edge_n;
    if (ov && ordy) begin
      if (got.size() == 0) first_word_edge = edge_n;
      got.push_back(od);
    end
    edge_n++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic sc_write(input int a, input int d);
    @(negedge clk); sc_addr = 3'(a); sc_wdata = 16'(d); sc_we = 1;
    @(negedge clk); sc_we = 0;
  endtask

  function automatic logic [15:0] clip(input int v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  // Noisy pedestals, with a pulse on pixels 1, 3 and 4 when pulse_at hits.
  int pulse_at = -1;
  always @(negedge clk) begin
    for (int p = 0; p < NPIX; p++) begin
      int a, d;
      d = edge_n - pulse_at;
      a = (pulse_at >= 0 && (p == 1 || p == 3 || p == 4) && d >= 0 && d < 4) ? (1600 >> d) + 100 * p : 0;
      hg[p]   = W'(200 + $urandom % 16 + a);
      lg[p]   = W'(50 + $urandom % 4 + a / 16);
      trig[p] = W'(100 + $urandom % 16 + a / 2);
    end
  end

  task automatic run_event(input bit full, input int lb, input int ev);
    logic [WORD_W-1:0] exp_w[$];
    int t_pulse, t_l0, start;
    l1_edge = -1; got = {};
    sc_write(0, {full, 1'b1});
    sc_write(3, lb);
    repeat (40) @(negedge clk);
    pulse_at = edge_n + 1;  // samples presented at this negedge meet edge pulse_at
    t_pulse = pulse_at;
    // Wait for L0 and answer with L1 on the next cycle.
    while (!l0) @(negedge clk);
    t_l0 = edge_n;
    check(t_l0 - t_pulse == 2, $sformatf("L0 %0d cycles after the pulse sample", t_l0 - t_pulse));
    check(npix == 3, $sformatf("L1 data: %0d pixels over threshold", npix));
    l1 = 1; @(negedge clk); l1 = 0;
    pulse_at = -1;
    // A second accept during the read-out is dropped.
    repeat (100) @(negedge clk);
    l1 = 1; @(negedge clk); l1 = 0;
    while (!(got.size() > 0 && !busy)) @(negedge clk);
    check(first_word_edge - l1_edge >= WIN * SCA_CONV && first_word_edge - l1_edge <= WIN * SCA_CONV + 6,
          $sformatf("packet starts %0d cycles after L1", first_word_edge - l1_edge));
    // Expected packet from the recorded samples.
    start = l1_edge - lb + 1;
    exp_w.push_back({full, 15'(ev)});
    for (int i = 0; i < 3; i++) exp_w.push_back(got.size() > i + 1 ? got[i + 1] : '0);  // time stamp checked below
    for (int p = 0; p < NPIX; p++) begin
      if (full) begin
        for (int k = 0; k < WIN; k++) begin
          exp_w.push_back({1'b0, 3'(p), 12'(hist_hg[start + k][p])});
          exp_w.push_back({1'b1, 3'(p), 12'(hist_lg[start + k][p])});
        end
      end else begin
        int sh, sl, pk, pki;
        sh = 0; sl = 0; pk = -1; pki = 0;
        for (int k = 0; k < WIN; k++) begin
          sh += hist_hg[start + k][p]; sl += hist_lg[start + k][p];
          if (hist_hg[start + k][p] > pk) begin pk = hist_hg[start + k][p]; pki = k; end
        end
        exp_w.push_back(clip(sh - WIN * 200));
        exp_w.push_back(clip(sl - WIN * 50));
        exp_w.push_back(16'(pki));
        if (p == 1) check(pki == t_pulse - start, $sformatf("pulse found at cell %0d exp %0d", pki, t_pulse - start));
      end
    end
    check(got.size() == exp_w.size(), $sformatf("%0d words exp %0d", got.size(), exp_w.size()));
    for (int i = 0; i < exp_w.size() && i < got.size(); i++)
      check(got[i] == exp_w[i], $sformatf("ev %0d word %0d: %0h exp %0h", ev, i, got[i], exp_w[i]));
    // Time stamp = camera time at the L1 edge (ts and edge_n both count every edge).
    check({got[1], got[2], got[3]} == 48'(l1_edge),
          $sformatf("time stamp %0d at L1 edge %0d", {got[1], got[2], got[3]}, l1_edge));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    sc_write(1, 600);   // L0 threshold
    sc_write(2, 2);     // two pixels
    sc_write(4, 200);   // pedestals
    sc_write(5, 50);
    repeat (1100) @(negedge clk);   // let the SCA wrap once
    run_event(1'b0, 16, 1);
    run_event(1'b1, 18, 2);
    run_event(1'b0, 17, 3);
    @(negedge clk); sc_addr = 3'd7; @(posedge clk);
    check(sc_rdata == 16'd3, $sformatf("dropped triggers %0d", sc_rdata));
    @(negedge clk); sc_addr = 3'd6; @(posedge clk);
    check(sc_rdata == 16'd3, $sformatf("events %0d", sc_rdata));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
