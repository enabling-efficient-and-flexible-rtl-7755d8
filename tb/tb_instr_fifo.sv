// tb_instr_fifo: random pushes and pops against a queue model; checks order, the full and
// empty flags, simultaneous push/pop and the flush.
module tb_instr_fifo;
  import virt_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0, full, empty;
  instr_t din, dout;
  instr_t q [$];
  int checks = 0, failures = 0;

  instr_fifo #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == DEPTH)) begin
        failures++; $display("flags t=%0d size=%0d e=%b f=%b", t, q.size(), empty, full);
      end
      if (!empty) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("order t=%0d", t); end
      end
      flush = (t % 500 == 499);
      push = ($urandom_range(0, 99) < (t < 1500 ? 70 : 40)) && !full;
      pop  = ($urandom_range(0, 99) < (t < 1500 ? 40 : 70)) && !empty;
      din  = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
