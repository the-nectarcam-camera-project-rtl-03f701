// sync_fifo: first-in first-out buffer between a NECTAr chip and the FPGA.
//
// A circular array of DEPTH words with separate read and write pointers and
// an occupancy count. The head word is always visible on rd_data_o while
// empty_o is low (show-ahead); pop_i removes it at the clock edge. push_i
// stores wr_data_i at the clock edge. Pushing when full or popping when
// empty is an error of the user and is flagged by assertions; the FIFO then
// ignores the request.
//
// The paper names FIFOs between the chips and the FPGA but gives neither
// their depth nor their width; both are parameters here (the module uses one
// FIFO per chip, as deep as the read-out window).
module sync_fifo #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_i,
  input  logic [WIDTH-1:0]           wr_data_i,
  input  logic                       pop_i,
  output logic [WIDTH-1:0]           rd_data_o,
  output logic                       empty_o,
  output logic                       full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty_o   = (count_o == '0);
  assign full_o    = (count_o == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push   = push_i && (!full_o || do_pop);
  assign do_pop    = pop_i && !empty_o;
  assign rd_data_o = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wr_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count_o <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count_o <= count_o + 1'b1;
        2'b01:   count_o <= count_o - 1'b1;
        default: ;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push_i && full_o && !pop_i))
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop_i && empty_o))
    else $error("sync_fifo: pop while empty");

endmodule
