// instr_fifo: the instruction FIFO of the second level dispatch module.
//
// A synchronous first-in first-out queue of DEPTH instructions written by the first level
// decoder and read by the dependency scheduler of the same core. `dout` shows the oldest
// entry whenever `empty` is low (first-word fall-through); `pop` removes it and `push` adds
// `din` at the clock edge, both in one cycle if wanted. `flush` empties the queue and wins
// over a push in the same cycle; it is used by the context switch. The paper names this FIFO;
// its depth and the flush are this design's choice.
module instr_fifo
  import virt_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  logic    push,
  input  instr_t  din,
  output logic    full,
  input  logic    pop,
  output instr_t  dout,
  output logic    empty
);

  localparam int AW = $clog2(DEPTH);

  instr_t        mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign dout    = mem[rd_ptr];
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push && !flush) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
    end else if (flush) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));

endmodule
