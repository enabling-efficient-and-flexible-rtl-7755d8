// tb_instr_decoder: gives every core a region of instructions (a testbench array stands in
// for the instruction memory), starts a subset of the cores, applies random FIFO
// backpressure and checks that each started core receives exactly its region in order, that
// unstarted cores receive nothing, that at most one instruction is sent per cycle, that a
// halted core stops receiving and that a restart rewinds the core's pointer.
module tb_instr_decoder;
  import virt_pkg::*;
  localparam int NC = NUM_CORES, REGION = 16;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] start = 0, halt = 0, out_valid, out_ready;
  logic [4:0] count [NC];
  logic [3:0] rd_core, rd_idx;
  instr_t rd_data, out_instr;
  instr_t region [NC][REGION];
  instr_t got [NC][$];
  int checks = 0, failures = 0;

  instr_decoder #(.N_CORES(NC), .REGION(REGION)) dut (.*);
  always #5 clk = ~clk;
  assign rd_data = region[rd_core][rd_idx];
  always @(negedge clk) out_ready <= 16'($urandom) | 16'($urandom);

  always @(posedge clk) if (rst_n) begin
    checks++;
    if ($countones(out_valid) > 1) begin failures++; $display("two pushes in one cycle"); end
    for (int k = 0; k < NC; k++) if (out_valid[k]) begin
      if (!out_ready[k]) begin failures++; $display("push to full FIFO"); end
      got[k].push_back(out_instr);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_core(int k, int n);
    checks++;
    if (got[k].size() != n) begin failures++; $display("core %0d got %0d exp %0d", k, got[k].size(), n); end
    for (int i = 0; i < n && i < got[k].size(); i++) begin
      checks++;
      if (got[k][i] !== region[k][i]) begin failures++; $display("core %0d entry %0d", k, i); end
    end
  endtask

  initial begin
    for (int k = 0; k < NC; k++) begin
      count[k] = 5'($urandom_range(3, REGION));
      for (int i = 0; i < REGION; i++) begin
        region[k][i] = instr_t'({$urandom, $urandom, $urandom, $urandom});
        region[k][i].core = 4'(k);
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 16'h5A5A; @(negedge clk); start = '0;
    repeat (300) @(negedge clk);
    for (int k = 0; k < NC; k++) check_core(k, start_bit(k) ? int'(count[k]) : 0);
    // restart core 1 and halt it after a few cycles; restart core 3 fully
    for (int k = 0; k < NC; k++) got[k].delete();
    @(negedge clk); start = 16'h000A; out_ready = '1; @(negedge clk); start = '0;
    halt[1] = 1; @(negedge clk); halt = '0;
    repeat (100) @(negedge clk);
    checks++; if (got[1].size() > 2) begin failures++; $display("core 1 fed after halt: %0d", got[1].size()); end
    check_core(3, int'(count[3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit start_bit(int k);
    return (16'h5A5A >> k) & 1;
  endfunction
endmodule
