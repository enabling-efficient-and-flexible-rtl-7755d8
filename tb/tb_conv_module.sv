// tb_conv_module: programs the register file with Convinit (random shift, ReLU, rotation),
// runs Conv instructions of random length over random int8 feature and weight rows held in
// testbench arrays, and compares the written output row with a reference computed here:
// sum over steps and input channels, arithmetic shift, ReLU, int8 saturation, with PE p fed
// from bank (p + rot) mod PP. It also checks that `done` comes len + 1 cycles after issue.
module tb_conv_module;
  import virt_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, issue = 0, busy, done, we;
  instr_t instr;
  logic [15:0] frow, wrow, orow;
  logic [WORD_W-1:0] feat [PP], wgt [OCP], wdata [PP];
  logic [WORD_W-1:0] fmem [PP][ROWS];
  logic [WORD_W-1:0] wmem [OCP][ROWS];
  logic [WORD_W-1:0] omem [PP][ROWS];
  int checks = 0, failures = 0;

  conv_module dut (.*);

  always #5 clk = ~clk;
  always_comb begin
    for (int b = 0; b < PP; b++) feat[b] = fmem[b][frow % ROWS];
    for (int o = 0; o < OCP; o++) wgt[o] = wmem[o][wrow % ROWS];
  end
  always_ff @(posedge clk) if (we) for (int b = 0; b < PP; b++) omem[b][orow % ROWS] <= wdata[b];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (fmem[b, r]) fmem[b][r] = {$urandom, $urandom};
    foreach (wmem[o, r]) wmem[o][r] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int sh, relu, rot, src, wb, dst, len, cyc;
      sh = $urandom_range(0, 12); relu = $urandom_range(0, 1); rot = $urandom_range(0, PP-1);
      src = $urandom_range(0, 20); wb = $urandom_range(0, 20); dst = $urandom_range(40, 63);
      len = $urandom_range(1, 18);
      @(negedge clk);
      instr = '0; instr.op = OP_CONVINIT; instr.aux = 16'(sh | (relu << 5) | (rot << 8));
      issue = 1; @(negedge clk); issue = 0;
      checks++; if (!done) begin failures++; $display("convinit done missing"); end
      @(negedge clk);
      instr = '0; instr.op = OP_CONV; instr.src = 16'(src); instr.aux = 16'(wb);
      instr.dst = 16'(dst); instr.len = 16'(len);
      issue = 1; @(negedge clk); issue = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != len + 1) begin failures++; $display("conv latency %0d for len %0d", cyc, len); end
      @(negedge clk);
      for (int p = 0; p < PP; p++)
        for (int o = 0; o < OCP; o++) begin
          longint s; longint y; logic signed [7:0] exp8;
          s = 0;
          for (int k = 0; k < len; k++)
            for (int i = 0; i < ICP; i++)
              s += longint'($signed(fmem[(p + rot) % PP][src + k][i*8 +: 8])) *
                   longint'($signed(wmem[o][wb + k][i*8 +: 8]));
          y = s >>> sh;
          if (relu && y < 0) y = 0;
          if (y > 127) y = 127;
          if (y < -128) y = -128;
          exp8 = 8'(y);
          checks++;
          if (omem[p][dst][o*8 +: 8] !== exp8) begin
            failures++;
            $display("t%0d p%0d o%0d got %0d exp %0d", t, p, o, $signed(omem[p][dst][o*8 +: 8]), exp8);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
