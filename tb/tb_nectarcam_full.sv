// tb_nectarcam_full: end-to-end test of the camera at its full size.
//
// The same test as tb_nectarcam_top, but with the camera at every default
// parameter: 250 modules of 7 pixels, 1024-cell arrays, 16-cell windows,
// 2 us read-out. Every pixel gets a noisy pedestal; a "shower" puts a
// photon pulse on three pixels in each of a chosen set of modules, with a
// jitter of up to two nanoseconds between modules. The testbench records
// every sample it drives and, at the cycle the modules take the L1 accept,
// the window of samples each chip should read out; each module's packet is
// then compared word for word with one built from that record.
//
// Mechanisms made to happen and counted (a count of zero is a failure):
//   accept      a shower on enough modules gives an L1 accept (within 400 ns)
//   reject      a shower on too few modules gives none
//   dropped     a shower during the read-out dead time is dropped by every module
//   full/charge both output modes, switched by a broadcast register write
//   sync        0.1 pps synchronisation pulse, seen in the next time stamps
//   stall       back-pressure from the network side
module tb_nectarcam_full;
  import nectar_pkg::*;
  localparam int unsigned NMOD = N_MODULES;
  localparam int unsigned NPIX = N_PIX, W = SAMPLE_W, WIN = WIN_CELLS, MW = $clog2(NMOD+1);
  localparam int unsigned HW = 64;   // history ring, in cycles

  logic clk = 0, rst_n = 0, pps = 0;
  logic [NMOD-1:0][NPIX-1:0][W-1:0] hg, lg, trig;
  logic l1_en = 1;
  logic [MW-1:0] l1_mult = MW'(3);
  logic [$clog2(NMOD)-1:0] sc_sel = '0;
  logic sc_bcast = 0, sc_we = 0;
  logic [2:0] sc_addr = '0;
  logic [15:0] sc_wdata = '0, sc_rdata;
  logic [NMOD-1:0] ov, olast, ordy, busy;
  logic [NMOD-1:0][WORD_W-1:0] od;
  logic l1_acc, pps_missed;
  logic [31:0] l1_count;
  logic [TS_W-1:0] ts;

  nectarcam_top dut (
    .clk, .rst_n, .pps_i(pps), .hg_i(hg), .lg_i(lg), .trig_i(trig),
    .l1_enable_i(l1_en), .l1_mult_i(l1_mult), .sc_sel_i(sc_sel), .sc_bcast_i(sc_bcast),
    .sc_addr_i(sc_addr), .sc_wdata_i(sc_wdata), .sc_we_i(sc_we), .sc_rdata_o(sc_rdata),
    .out_valid_o(ov), .out_data_o(od), .out_last_o(olast), .out_ready_i(ordy), .busy_o(busy),
    .l1_accept_o(l1_acc), .l1_count_o(l1_count), .ts_o(ts), .pps_missed_o(pps_missed));

  int checks = 0, failures = 0;
  int n_accept = 0, n_reject = 0, n_dropped = 0, n_full = 0, n_charge = 0, n_sync = 0, n_stall = 0;
  int edge_n = 0, acc_edge = -1, lookback = 16;
  logic [W-1:0] h_hg[HW][NMOD][NPIX], h_lg[HW][NMOD][NPIX];
  logic [W-1:0] win_hg[NMOD][NPIX][WIN], win_lg[NMOD][NPIX][WIN];
  logic [TS_W-1:0] ts_at_acc;
  logic [WORD_W-1:0] got[NMOD][$];
  bit backpressure = 0;

  // Shower description.
  int shower_at = -1;
  bit in_shower[NMOD];
  int jitter[NMOD];

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Samples for the coming edge.
  always @(negedge clk) begin
    for (int m = 0; m < NMOD; m++)
      for (int p = 0; p < NPIX; p++) begin
        int a, d;
        d = edge_n - shower_at - jitter[m];
        a = (shower_at >= 0 && in_shower[m] && p >= 1 && p <= 3 && d >= 0 && d < 4) ? (1800 >> d) : 0;
        hg[m][p]   = W'(200 + $urandom % 16 + a);
        lg[m][p]   = W'(50 + $urandom % 4 + a / 16);
        trig[m][p] = W'(100 + $urandom % 16 + a / 2);
      end
    for (int m = 0; m < NMOD; m++) ordy[m] = backpressure ? (($urandom % 3) != 0) : 1'b1;
  end

  // Record, and take the window at the edge where the modules see L1.
  always @(posedge clk) begin
    for (int m = 0; m < NMOD; m++)
      for (int p = 0; p < NPIX; p++) begin
        h_hg[edge_n % HW][m][p] = hg[m][p];
        h_lg[edge_n % HW][m][p] = lg[m][p];
      end
    if (l1_acc) begin
      acc_edge = edge_n;
      if (busy == '0) ts_at_acc = ts;
      if (busy == '0)
        for (int m = 0; m < NMOD; m++)
          for (int p = 0; p < NPIX; p++)
            for (int k = 0; k < WIN; k++) begin
              win_hg[m][p][k] = h_hg[(edge_n - lookback + 1 + k) % HW][m][p];
              win_lg[m][p][k] = h_lg[(edge_n - lookback + 1 + k) % HW][m][p];
            end
    end
    for (int m = 0; m < NMOD; m++) begin
      if (ov[m] && ordy[m]) got[m].push_back(od[m]);
      if (ov[m] && !ordy[m]) n_stall++;
    end
    edge_n++;
  end

  function automatic logic [15:0] clip(input int v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  task automatic sc_write_all(input int a, input int d);
    @(negedge clk); sc_bcast = 1; sc_addr = 3'(a); sc_wdata = 16'(d); sc_we = 1;
    @(negedge clk); sc_we = 0; sc_bcast = 0;
  endtask

  task automatic sc_read(input int m, input int a, output logic [15:0] d);
    @(negedge clk); sc_sel = ($clog2(NMOD))'(m); sc_addr = 3'(a);
    @(posedge clk); d = sc_rdata;
  endtask

  task automatic shower(input int nmods);
    for (int m = 0; m < NMOD; m++) begin in_shower[m] = 0; jitter[m] = 0; end
    for (int i = 0; i < nmods; i++) begin
      int m;
      do m = $urandom % NMOD; while (in_shower[m]);
      in_shower[m] = 1;
      jitter[m] = $urandom % 3;
    end
    shower_at = edge_n + 1;
    repeat (8) @(negedge clk);
    shower_at = -1;
  endtask

  // One accepted event: shower, accept, packets checked.
  task automatic event_ok(input bit full, input int ev);
    int t0, acc_before;
    logic [15:0] r;
    for (int m = 0; m < NMOD; m++) got[m] = {};
    acc_before = int'(l1_count);
    t0 = edge_n + 1;
    acc_edge = -1;
    shower(4);
    repeat (12) @(negedge clk);
    check(acc_edge >= 0, "shower on 4 modules gives an L1 accept");
    check(acc_edge - t0 < 400, $sformatf("L1 latency %0d ns", acc_edge - t0));
    if (acc_edge >= 0) n_accept++;
    // A second shower while the modules are busy: accepted by L1, dropped by the modules.
    repeat (200) @(negedge clk);
    shower(5);
    check(int'(l1_count) == acc_before + 2, "second L1 issued during the dead time");
    sc_read(0, 7, r);
    if (r != 0) n_dropped++;
    while (busy != '0) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int m = 0; m < NMOD; m++) begin
      logic [WORD_W-1:0] e[$];
      e.push_back({full, 15'(ev)});
      e.push_back(ts_at_acc[47:32]); e.push_back(ts_at_acc[31:16]); e.push_back(ts_at_acc[15:0]);
      for (int p = 0; p < NPIX; p++) begin
        if (full) begin
          for (int k = 0; k < WIN; k++) begin
            e.push_back({1'b0, 3'(p), win_hg[m][p][k]});
            e.push_back({1'b1, 3'(p), win_lg[m][p][k]});
          end
        end else begin
          int sh, sl, pk, pki;
          sh = 0; sl = 0; pk = -1; pki = 0;
          for (int k = 0; k < WIN; k++) begin
            sh += int'(win_hg[m][p][k]); sl += int'(win_lg[m][p][k]);
            if (int'(win_hg[m][p][k]) > pk) begin pk = int'(win_hg[m][p][k]); pki = k; end
          end
          e.push_back(clip(sh - WIN * 200)); e.push_back(clip(sl - WIN * 50)); e.push_back(16'(pki));
        end
      end
      check(got[m].size() == e.size(), $sformatf("module %0d: %0d words exp %0d", m, got[m].size(), e.size()));
      for (int i = 0; i < e.size() && i < got[m].size(); i++)
        check(got[m][i] == e[i], $sformatf("ev %0d module %0d word %0d: %0h exp %0h", ev, m, i, got[m][i], e[i]));
    end
    if (full) n_full++; else n_charge++;
  endtask

  initial begin
    logic [15:0] r;
    for (int m = 0; m < NMOD; m++) begin in_shower[m] = 0; jitter[m] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    sc_write_all(1, 600);   // L0 threshold
    sc_write_all(2, 2);     // L0: two pixels
    sc_write_all(4, 200);   // pedestals
    sc_write_all(5, 50);
    repeat (1100) @(negedge clk);

    event_ok(1'b0, 1);
    // Too few modules: no camera trigger.
    begin
      int c0; c0 = int'(l1_count);
      shower(2);
      repeat (20) @(negedge clk);
      check(int'(l1_count) == c0, "shower on 2 modules rejected");
      if (int'(l1_count) == c0) n_reject++;
    end
    // Synchronisation pulse: the pulse count in the time stamp advances.
    @(negedge clk); pps = 1; @(negedge clk); pps = 0;
    @(negedge clk);
    check(ts[47:34] == 14'd1 && ts[33:0] < 34'd4, $sformatf("time after sync %0h", ts));
    if (ts[47:34] == 14'd1) n_sync++;
    // Mode switch by a broadcast write, with back-pressure on the links.
    sc_write_all(0, 3);
    backpressure = 1;
    event_ok(1'b1, 2);
    check(ts_at_acc[47:34] == 14'd1, "time stamp carries the sync count");
    backpressure = 0;
    sc_write_all(0, 1);
    event_ok(1'b0, 3);
    sc_read(3, 6, r);
    check(r == 16'd3, $sformatf("module 3 counted %0d events", r));

    check(n_accept > 0, $sformatf("accepts %0d", n_accept));
    check(n_reject > 0, $sformatf("rejected showers %0d", n_reject));
    check(n_dropped > 0, $sformatf("dropped during dead time %0d", n_dropped));
    check(n_full > 0 && n_charge > 0, $sformatf("full-mode events %0d, charge-mode %0d", n_full, n_charge));
    check(n_sync > 0, $sformatf("sync pulses %0d", n_sync));
    check(n_stall > 0, $sformatf("link stalls %0d", n_stall));
    $display("mechanisms: accept=%0d reject=%0d dropped=%0d full=%0d charge=%0d sync=%0d stall=%0d",
             n_accept, n_reject, n_dropped, n_full, n_charge, n_sync, n_stall);
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
