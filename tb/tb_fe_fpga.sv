// tb_fe_fpga: self-checking test of the front-end FPGA control.
//
// The NECTAr chips and their FIFOs are replaced by testbench queues: on the
// read-out request the "chips" stay busy for a while and then each queue
// holds WIN random {HG, LG} cells. Events alternate between the two output
// modes; the link applies random back-pressure. Every word of each packet
// is compared with a packet built independently from the queues, the time
// stamp and the event number (charge = sum - WIN*pedestal clipped to 16
// bits, time = first index of the HG maximum). L1 accepts sent during an
// event must be dropped and counted.
module tb_fe_fpga;
  import nectar_pkg::*;
  localparam int unsigned NPIX = N_PIX, W = SAMPLE_W, WIN = WIN_CELLS;
  logic clk = 0, rst_n = 0;
  module_cfg_t cfg;
  logic l1 = 0;
  logic [TS_W-1:0] ts = 48'h1234_5678_9abc;   // all three stamp words non-zero
  logic rd_req;
  logic [NPIX-1:0] chip_busy = '0, fifo_empty, fifo_pop;
  logic [NPIX-1:0][2*W-1:0] fifo_data;
  logic ov, olast, ordy = 1, busy;
  logic [WORD_W-1:0] od;
  logic [31:0] evt_cnt, dropped;
  int checks = 0, failures = 0, n_drop_sent = 0, n_req = 0;
  logic [2*W-1:0] q[NPIX][$];
  logic [WORD_W-1:0] got[$];

  fe_fpga dut (.clk, .rst_n, .cfg_i(cfg), .l1_accept_i(l1), .ts_i(ts), .rd_req_o(rd_req),
    .chip_busy_i(chip_busy), .fifo_data_i(fifo_data), .fifo_empty_i(fifo_empty),
    .fifo_pop_o(fifo_pop), .out_valid_o(ov), .out_data_o(od), .out_last_o(olast),
    .out_ready_i(ordy), .busy_o(busy), .evt_count_o(evt_cnt), .dropped_o(dropped));

  always #1 clk = ~clk;
  always @(posedge clk) ts <= ts + 1'b1;

  always_comb
    for (int p = 0; p < NPIX; p++) begin
      fifo_empty[p] = (q[p].size() == 0);
      fifo_data[p]  = fifo_empty[p] ? '0 : q[p][0];
    end

  always @(posedge clk) begin
    for (int p = 0; p < NPIX; p++) if (fifo_pop[p] && q[p].size() > 0) void'(q[p].pop_front());
    if (ov && ordy) got.push_back(od);
    if (rd_req) n_req++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] clip(input int v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  initial begin
    logic [WORD_W-1:0] exp_w[$];
    logic [2*W-1:0] cells[NPIX][WIN];
    logic [TS_W-1:0] ts_at;
    cfg = '0;
    cfg.ped_hg = 12'd200;
    cfg.ped_lg = 12'd50;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ev = 1; ev <= 12; ev++) begin
      int wait_c;
      cfg.mode = out_mode_e'(ev % 2);
      @(negedge clk);
      l1 = 1; ts_at = ts;
      @(negedge clk);
      l1 = 0;
      check(rd_req, "read-out request one cycle after L1");
      check(busy, "busy after L1");
      // The chips convert; an L1 during that time is dropped.
      chip_busy = '1;
      wait_c = 20 + $urandom % 50;
      for (int c = 0; c < wait_c; c++) begin
        @(negedge clk);
        if (c == 5) begin l1 = 1; n_drop_sent++; end else l1 = 0;
      end
      l1 = 0;
      for (int p = 0; p < NPIX; p++)
        for (int k = 0; k < WIN; k++) begin
          int h, l;
          h = 150 + $urandom % 200 + ((k == (p + ev) % WIN) ? 1500 + 300 * p : 0);
          l = 40 + $urandom % 30;
          if (ev == 5) h = 4095;   // saturates the HG charge
          cells[p][k] = {W'(h), W'(l)};
          q[p].push_back(cells[p][k]);
        end
      chip_busy = '0;
      // Expected packet.
      exp_w = {};
      exp_w.push_back({1'(ev % 2), 15'(ev)});
      exp_w.push_back(ts_at[47:32]); exp_w.push_back(ts_at[31:16]); exp_w.push_back(ts_at[15:0]);
      for (int p = 0; p < NPIX; p++) begin
        if (ev % 2 == 1) begin
          for (int k = 0; k < WIN; k++) begin
            exp_w.push_back({1'b0, 3'(p), cells[p][k][2*W-1:W]});
            exp_w.push_back({1'b1, 3'(p), cells[p][k][W-1:0]});
          end
        end else begin
          int sh, sl, pk, pki;
          sh = 0; sl = 0; pk = -1; pki = 0;
          for (int k = 0; k < WIN; k++) begin
            sh += int'(cells[p][k][2*W-1:W]); sl += int'(cells[p][k][W-1:0]);
            if (int'(cells[p][k][2*W-1:W]) > pk) begin pk = int'(cells[p][k][2*W-1:W]); pki = k; end
          end
          exp_w.push_back(clip(sh - WIN * 200));
          exp_w.push_back(clip(sl - WIN * 50));
          exp_w.push_back(16'(pki));
        end
      end
      // Drain with random back-pressure until the last word.
      got = {};
      while (1) begin
        @(negedge clk);
        ordy = ($urandom % 4) != 0;
        if (got.size() > 0 && !busy) break;
      end
      ordy = 1;
      check(got.size() == exp_w.size(), $sformatf("ev %0d: %0d words, exp %0d", ev, got.size(), exp_w.size()));
      for (int i = 0; i < exp_w.size() && i < got.size(); i++)
        check(got[i] == exp_w[i], $sformatf("ev %0d word %0d: %0h exp %0h", ev, i, got[i], exp_w[i]));
      check(evt_cnt == 32'(ev), "event counter");
      for (int p = 0; p < NPIX; p++) check(q[p].size() == 0, "FIFOs emptied");
    end
    check(dropped == 32'(n_drop_sent), $sformatf("dropped %0d exp %0d", dropped, n_drop_sent));
    check(n_req == 12, "one read-out request per accepted event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The last word is flagged.
  always @(posedge clk) if (ov && ordy && olast) begin
    checks++;
    if (busy !== 1'b1) begin failures++; $display("FAIL: last word while idle"); end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
