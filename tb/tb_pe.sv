// tb_pe: feeds random int8 activations and weights for several accumulation runs and
// compares each output channel's accumulator with a reference dot-product sum, checking
// that the result appears one clock after the last enabled cycle.
module tb_pe;
  import virt_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic signed [DATA_W-1:0] act [ICP];
  logic signed [DATA_W-1:0] wgt [OCP][ICP];
  logic signed [ACC_W-1:0]  acc [OCP];
  longint ref_acc [OCP];
  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .en, .clr, .act, .wgt, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < ICP; i++) act[i] = '0;
    for (int o = 0; o < OCP; o++) for (int i = 0; i < ICP; i++) wgt[o][i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int steps;
      steps = 1 + run % 9;
      for (int o = 0; o < OCP; o++) ref_acc[o] = 0;
      for (int s = 0; s < steps; s++) begin
        @(negedge clk);
        en = 1; clr = (s == 0);
        for (int i = 0; i < ICP; i++) act[i] = DATA_W'($urandom);
        for (int o = 0; o < OCP; o++)
          for (int i = 0; i < ICP; i++) begin
            wgt[o][i] = DATA_W'($urandom);
            if (run == 0) wgt[o][i] = -8'sd128;      // extreme values once
          end
        for (int o = 0; o < OCP; o++)
          for (int i = 0; i < ICP; i++)
            ref_acc[o] += longint'(act[i]) * longint'(wgt[o][i]);
      end
      @(negedge clk);
      en = 0;
      // one clock after the last enabled edge the accumulator must hold the sum
      for (int o = 0; o < OCP; o++) begin
        checks++;
        if (longint'(acc[o]) != ref_acc[o]) begin
          failures++;
          $display("run %0d ch %0d: got %0d exp %0d", run, o, acc[o], ref_acc[o]);
        end
      end
      // hold while disabled
      @(negedge clk);
      checks++;
      if (longint'(acc[0]) != ref_acc[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
