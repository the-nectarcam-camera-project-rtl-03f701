// tb_sync_fifo: self-checking test of the read-out FIFO.
//
// Random pushes and pops (never pushing into a full FIFO unless it pops in
// the same cycle, never popping an empty one) against a queue model:
// checks every popped word, the occupancy count and the empty and full
// flags, and fills the FIFO to full at least once.
module tb_sync_fifo;
  localparam int unsigned WIDTH = 24, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [WIDTH-1:0] wd = '0, rd;
  logic empty, full;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, n_full = 0;
  logic [WIDTH-1:0] model[$];

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push_i(push), .wr_data_i(wd),
    .pop_i(pop), .rd_data_o(rd), .empty_o(empty), .full_o(full), .count_o(count));

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check(count == ($clog2(DEPTH+1))'(model.size()), $sformatf("count %0d exp %0d", count, model.size()));
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == DEPTH), "full flag");
      if (full) n_full++;
      if (model.size() > 0) check(rd == model[0], $sformatf("head %0h exp %0h", rd, model[0]));
      // Phases: fill (mostly push), drain (mostly pop), mixed.
      pop  = (model.size() > 0) && (($urandom % 100) < ((i / 300) % 3 == 0 ? 20 : (i / 300) % 3 == 1 ? 80 : 50));
      push = ((model.size() < DEPTH) || pop) && (($urandom % 100) < 60);
      wd   = WIDTH'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wd);
    end
    check(n_full > 0, "FIFO reached full");
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
