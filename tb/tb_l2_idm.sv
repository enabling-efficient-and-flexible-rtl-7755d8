// tb_l2_idm: drives the second level dispatcher with a two-layer program whose instructions
// carry token dependencies (Load -> Conv -> Save, Conv -> Pool, Poolinit/Convinit), against
// execution-module models with random latencies. Checks: every instruction is issued once to
// the right module and in program order per module; no consumer is issued before the
// producer it waits on has completed; nothing is issued while the core waits at a sync
// System instruction; sync_local/sync_layer behave and sync_global releases the core; the
// final System ends the task; a restart from layer 1 skips the layer-0 instructions; halt
// stops the core and empties the FIFO.
module tb_l2_idm;
  import virt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, start = 0, halt = 0, running, task_done, skipped;
  logic [7:0] start_layer = 0, sync_layer;
  logic sync_local, sync_global = 0;
  instr_t in_instr, issue_instr;
  logic [NUM_UNITS-1:0] unit_issue, unit_busy, unit_done;
  int checks = 0, failures = 0;
  int cyc = 0;

  l2_idm dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // execution-module models: busy for 1..6 cycles, done pulse after busy falls
  int remain [NUM_UNITS];
  int cur_id [NUM_UNITS];
  int issue_cyc [64];
  int done_cyc  [64];
  int issue_unit[64];
  int n_issued = 0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      unit_busy <= '0; unit_done <= '0;
      for (int u = 0; u < NUM_UNITS; u++) remain[u] <= 0;
    end else begin
      for (int u = 0; u < NUM_UNITS; u++) begin
        unit_done[u] <= 1'b0;
        if (unit_issue[u]) begin
          if (unit_busy[u]) begin failures++; $display("issue to busy unit %0d", u); end
          unit_busy[u] <= 1'b1;
          remain[u]    <= $urandom_range(1, 6);
          cur_id[u]    <= int'(issue_instr.aux);
          issue_cyc[issue_instr.aux]  <= cyc;
          issue_unit[issue_instr.aux] <= u;
          n_issued <= n_issued + 1;
        end else if (unit_busy[u]) begin
          if (remain[u] == 1) begin
            unit_busy[u] <= 1'b0; unit_done[u] <= 1'b1; done_cyc[cur_id[u]] <= cyc;
          end
          remain[u] <= remain[u] - 1;
        end
      end
    end
  end

  // nothing may issue while waiting for sync_global
  always @(posedge clk) if (rst_n && sync_local && unit_issue != 0) begin
    failures++; $display("issue while waiting at sync");
  end

  instr_t prog [$];
  int     exp_unit [64];

  function automatic instr_t mk(opcode_e op, int layer, int id, logic [3:0] w, logic [3:0] s,
                                logic [7:0] func = 0);
    instr_t i;
    i = '0; i.op = op; i.layer = 8'(layer); i.aux = 16'(id); i.dep_wait = w; i.dep_signal = s;
    i.func = func;
    return i;
  endfunction

  task automatic feed();
    foreach (prog[k]) begin
      in_instr = prog[k]; in_valid = 1;
      @(posedge clk iff in_ready); #1;
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nskip;
    in_instr = '0;
    foreach (issue_cyc[i]) begin issue_cyc[i] = -1; done_cyc[i] = -1; end
    // layer 0: ids 0..5, sync System (id 6); layer 1: ids 7..11, final System (id 12)
    prog.push_back(mk(OP_CONVINIT, 0, 0, 4'b0000, 4'b0000));
    prog.push_back(mk(OP_LOAD,     0, 1, 4'b0000, 4'b0100));   // -> CONV
    prog.push_back(mk(OP_LOAD,     0, 2, 4'b0000, 4'b0100));   // -> CONV
    prog.push_back(mk(OP_CONV,     0, 3, 4'b0001, 4'b0010));   // <- LOAD, -> SAVE
    prog.push_back(mk(OP_CONV,     0, 4, 4'b0001, 4'b0010));   // <- LOAD, -> SAVE
    prog.push_back(mk(OP_SAVE,     0, 5, 4'b0100, 4'b0000));   // <- CONV
    prog.push_back(mk(OP_SYSTEM,   0, 6, 4'b0000, 4'b0000, 8'h01));
    prog.push_back(mk(OP_POOLINIT, 1, 7, 4'b0000, 4'b0000));
    prog.push_back(mk(OP_LOAD,     1, 8, 4'b0000, 4'b1000));   // -> MISC
    prog.push_back(mk(OP_POOL,     1, 9, 4'b0001, 4'b0010));   // <- LOAD, -> SAVE
    prog.push_back(mk(OP_SAVE,     1, 10, 4'b1000, 4'b0000));  // <- MISC
    prog.push_back(mk(OP_SAVE,     1, 11, 4'b0100, 4'b0000));  // <- CONV (token left by id 4)
    prog.push_back(mk(OP_SYSTEM,   1, 12, 4'b0000, 4'b0000, 8'h00));
    exp_unit = '{default: 0};
    exp_unit[0] = U_CONV; exp_unit[1] = U_LOAD; exp_unit[2] = U_LOAD; exp_unit[3] = U_CONV;
    exp_unit[4] = U_CONV; exp_unit[5] = U_SAVE; exp_unit[7] = U_MISC; exp_unit[8] = U_LOAD;
    exp_unit[9] = U_MISC; exp_unit[10] = U_SAVE; exp_unit[11] = U_SAVE;

    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; start_layer = 0; @(negedge clk); start = 0;
    fork feed(); join_none
    // first sync point
    @(posedge clk iff sync_local);
    checks++; if (sync_layer != 0) begin failures++; $display("sync_layer %0d", sync_layer); end
    checks++; if (issue_cyc[7] != -1) begin failures++; $display("layer 1 started before sync"); end
    repeat (5) @(negedge clk);
    checks++; if (!sync_local) begin failures++; $display("sync_local dropped without sync_global"); end
    sync_global = 1; @(negedge clk); sync_global = 0;
    @(posedge clk iff task_done); @(negedge clk);
    checks++; if (running) begin failures++; $display("still running after final System"); end
    // issue bookkeeping and dependencies
    for (int id = 0; id <= 11; id++) begin
      if (id == 6) continue;
      checks++;
      if (issue_cyc[id] < 0 || issue_unit[id] != exp_unit[id]) begin
        failures++; $display("id %0d issued at %0d to %0d", id, issue_cyc[id], issue_unit[id]);
      end
    end
    checks++; if (n_issued != 11) begin failures++; $display("issued %0d", n_issued); end
    // program order per module and dependency order
    checks++; if (!(issue_cyc[1] < issue_cyc[2] && issue_cyc[3] < issue_cyc[4])) failures++;
    checks++; if (!(issue_cyc[3] > done_cyc[1])) begin failures++; $display("conv3 before load1 done"); end
    checks++; if (!(issue_cyc[4] > done_cyc[2])) begin failures++; $display("conv4 before load2 done"); end
    checks++; if (!(issue_cyc[5] > done_cyc[3])) begin failures++; $display("save5 before conv3 done"); end
    checks++; if (!(issue_cyc[9] > done_cyc[8])) begin failures++; $display("pool before load done"); end
    checks++; if (!(issue_cyc[10] > done_cyc[9])) begin failures++; $display("save before pool done"); end
    checks++; if (!(issue_cyc[7] > done_cyc[5])) begin failures++; $display("layer 1 before layer 0 drained"); end
    // restart from layer 1: the 7 layer-0 entries are skipped
    n_issued = 0; nskip = 0;
    @(negedge clk); start = 1; start_layer = 1; @(negedge clk); start = 0;
    prog.delete(11);    // its token came from layer 0, which is not re-run
    fork feed(); join_none
    while (!task_done) begin @(negedge clk); if (skipped) nskip++; end
    checks++; if (nskip != 7) begin failures++; $display("skipped %0d", nskip); end
    checks++; if (n_issued != 4) begin failures++; $display("restart issued %0d", n_issued); end
    // halt in the middle of a task
    n_issued = 0;
    @(negedge clk); start = 1; start_layer = 0; @(negedge clk); start = 0;
    fork feed(); join_none
    repeat (3) @(negedge clk);
    halt = 1; @(negedge clk); halt = 0;
    checks++; if (running) begin failures++; $display("running after halt"); end
    repeat (40) @(negedge clk);
    checks++; if (n_issued > 4) begin failures++; $display("issued %0d after halt", n_issued); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
