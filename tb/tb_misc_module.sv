// tb_misc_module: programs max or average pooling with Poolinit, runs Pool instructions of
// random window length over random feature rows held in testbench arrays, and compares the
// written row with an element-wise max or shifted sum computed here. It also checks that
// `done` comes len + 1 cycles after issue.
module tb_misc_module;
  import virt_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, issue = 0, busy, done, we;
  instr_t instr;
  logic [15:0] frow, orow;
  logic [WORD_W-1:0] feat [PP], wdata [PP];
  logic [WORD_W-1:0] fmem [PP][ROWS];
  logic [WORD_W-1:0] omem [PP][ROWS];
  int checks = 0, failures = 0;

  misc_module dut (.*);

  always #5 clk = ~clk;
  always_comb for (int b = 0; b < PP; b++) feat[b] = fmem[b][frow % ROWS];
  always_ff @(posedge clk) if (we) for (int b = 0; b < PP; b++) omem[b][orow % ROWS] <= wdata[b];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (fmem[b, r]) fmem[b][r] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int avg, sh, src, dst, len, cyc;
      avg = t % 2; len = 1 << $urandom_range(0, 4); sh = $clog2(len);
      src = $urandom_range(0, 20); dst = $urandom_range(40, 63);
      @(negedge clk);
      instr = '0; instr.op = OP_POOLINIT; instr.aux = 16'(avg | (sh << 8));
      issue = 1; @(negedge clk); issue = 0;
      @(negedge clk);
      instr = '0; instr.op = OP_POOL; instr.src = 16'(src); instr.dst = 16'(dst); instr.len = 16'(len);
      issue = 1; @(negedge clk); issue = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != len + 1) begin failures++; $display("pool latency %0d for len %0d", cyc, len); end
      @(negedge clk);
      for (int p = 0; p < PP; p++)
        for (int c = 0; c < ICP; c++) begin
          int r, x; logic [7:0] exp8;
          r = avg ? 0 : -1000;
          for (int k = 0; k < len; k++) begin
            x = $signed(fmem[p][src + k][c*8 +: 8]);
            if (avg) r += x; else if (x > r) r = x;
          end
          if (avg) r = r >>> sh;
          exp8 = 8'(r);
          checks++;
          if (omem[p][dst][c*8 +: 8] !== exp8) begin
            failures++; $display("t%0d p%0d c%0d got %h exp %h", t, p, c, omem[p][dst][c*8 +: 8], exp8);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
