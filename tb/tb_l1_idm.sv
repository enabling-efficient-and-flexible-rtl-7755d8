// tb_l1_idm: the first level dispatcher with modelled second-level cores and a 128-bit
// instruction memory model (random ready, 5-cycle latency).
// Sequence: CFG cores 0-3 -> user 1 and 4-7 -> user 2; LOAD_INSTR of a file holding a
// three-layer program for each of the eight cores (hv_ready must be low during the fetch);
// START user 1, which must deliver each core exactly its own program in order and must pass
// both layer barriers only when all four cores are waiting; START user 2 with its cores
// stalled, a layer-level SWITCH, then release: the switch must complete at the first
// barrier, halt cores 4-7 and record layer 1; a new START must resume with start layer 1 so
// that the cores execute exactly the layer >= 1 part; finally a task-level SWITCH of the
// finished user 1 must complete at once with no recorded layer.
module tb_l1_idm;
  import virt_pkg::*;
  localparam int NC = NUM_CORES, NU = 16, LAT = 5, REGION = 32;
  logic clk = 0, rst_n = 0;
  logic hv_valid = 0; hv_cmd_t hv_cmd; logic hv_ready;
  logic [NU-1:0] switch_done; logic [7:0] next_layer [NU];
  logic fetch_busy, fetch_overflow;
  bus_req_t if_req; logic if_ready; bus_rsp_t if_rsp;
  logic [NC-1:0] core_in_valid, core_in_ready, core_start, core_halt, core_running;
  logic [NC-1:0] sync_local, sync_global;
  instr_t core_in_instr;
  logic [7:0] core_start_layer [NC], sync_layer [NC];
  int checks = 0, failures = 0;

  l1_idm #(.REGION(REGION)) dut (.*);
  always #5 clk = ~clk;

  // ---- instruction file memory ----
  logic [BUS_W-1:0] mem [256];
  logic [BUS_W-1:0] pd [LAT]; logic pv [LAT];
  logic rdy_q = 1;
  always @(negedge clk) rdy_q <= ($urandom_range(0, 3) != 0);
  assign if_ready = rdy_q;
  assign if_rsp.valid = pv[LAT-1];
  assign if_rsp.rdata = pd[LAT-1];
  always_ff @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= if_req.valid && if_ready && rst_n;
    pd[0] <= mem[if_req.addr[7:0]];
  end

  // ---- core models: accept instructions, wait at sync points, stop at end of task ----
  instr_t prog [NC][$];
  instr_t got [NC][$];          // instructions executed (not skipped)
  logic gate [NC];
  logic [7:0] start_layer_q [NC];
  int barriers [NU];
  logic rr [NC];
  always @(negedge clk) for (int k = 0; k < NC; k++) rr[k] <= ($urandom_range(0, 2) != 0);
  for (genvar k = 0; k < NC; k++) begin : g_core
    assign core_in_ready[k] = rst_n && gate[k] && rr[k] && !sync_local[k];
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        core_running[k] <= 0; sync_local[k] <= 0; sync_layer[k] <= 0; start_layer_q[k] <= 0;
      end else begin
        if (core_start[k]) begin core_running[k] <= 1; start_layer_q[k] <= core_start_layer[k]; end
        if (sync_global[k]) begin
          checks++;
          if (!sync_local[k]) begin failures++; $display("core %0d released while not waiting", k); end
          sync_local[k] <= 0;
        end
        if (core_in_valid[k] && core_in_ready[k]) begin
          checks++;
          if (core_in_instr.core != 4'(k)) begin failures++; $display("core %0d got core-%0d instr", k, core_in_instr.core); end
          if (core_in_instr.layer >= start_layer_q[k]) begin
            got[k].push_back(core_in_instr);
            if (core_in_instr.op == OP_SYSTEM) begin
              if (core_in_instr.func[F_SYNC]) begin sync_local[k] <= 1; sync_layer[k] <= core_in_instr.layer; end
              else core_running[k] <= 0;
            end
          end
        end
        if (core_halt[k]) begin core_running[k] <= 0; sync_local[k] <= 0; end
      end
    end
  end

  // barrier check: a core is released only when all cores of its user wait
  always @(posedge clk) if (rst_n) begin
    for (int u = 1; u <= 2; u++) begin
      int lo;
      lo = (u - 1) * 4;
      if (sync_global[lo]) begin
        barriers[u]++;
        checks++;
        if (sync_local[lo +: 4] != 4'hF || sync_global[lo +: 4] != 4'hF) begin
          failures++; $display("user %0d barrier opened with local=%b global=%b", u, sync_local[lo +: 4], sync_global[lo +: 4]);
        end
      end
    end
    checks++;
    if (sync_global[NC-1:8] != 0) begin failures++; $display("unused cores released"); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(hv_op_e op, int core, int user, bit en, bit mode, int addr, int count, int mask);
    @(negedge clk iff hv_ready);
    hv_valid = 1; hv_cmd = '0; hv_cmd.op = op; hv_cmd.core = 4'(core); hv_cmd.user = 4'(user);
    hv_cmd.enable = en; hv_cmd.mode = mode; hv_cmd.addr = 32'(addr); hv_cmd.count = 16'(count);
    hv_cmd.mask = 16'(mask);
    @(negedge clk); hv_valid = 0;
  endtask

  task automatic compare(int k, int from_layer);
    instr_t e [$];
    foreach (prog[k][i]) if (prog[k][i].layer >= 8'(from_layer)) e.push_back(prog[k][i]);
    checks++;
    if (got[k].size() != e.size()) begin
      failures++; $display("core %0d executed %0d instrs, expected %0d", k, got[k].size(), e.size());
    end else
      foreach (e[i]) if (got[k][i] !== e[i]) begin failures++; $display("core %0d instr %0d", k, i); break; end
  endtask

  initial begin
    int n;
    logic busy_seen;
    foreach (pv[i]) pv[i] = 0;
    foreach (gate[k]) gate[k] = 1;
    foreach (barriers[u]) barriers[u] = 0;
    hv_cmd = '0;
    // program: per core 3 instrs + sync (layer 0), 3 + sync (layer 1), 2 + end (layer 2);
    // the file interleaves the eight cores' instructions
    for (int k = 0; k < 8; k++)
      for (int l = 0; l < 3; l++) begin
        for (int j = 0; j < 3 - (l == 2); j++) begin
          instr_t i;
          i = instr_t'({$urandom, $urandom, $urandom, $urandom});
          i.op = opcode_e'($urandom_range(1, 6)); i.core = 4'(k); i.layer = 8'(l);
          prog[k].push_back(i);
        end
        begin
          instr_t s;
          s = '0; s.op = OP_SYSTEM; s.core = 4'(k); s.layer = 8'(l); s.func[F_SYNC] = (l < 2);
          prog[k].push_back(s);
        end
      end
    n = 0;
    for (int i = 0; i < prog[0].size(); i++)
      for (int k = 0; k < 8; k++) begin mem[n] = BUS_W'(prog[k][i]); n++; end
    repeat (3) @(posedge clk); rst_n = 1;

    for (int k = 0; k < 8; k++) send(HV_CFG_CORE, k, (k < 4) ? 1 : 2, 1, 0, 0, 0, 0);
    send(HV_LOAD_INSTR, 0, 0, 0, 0, 0, n, 'hFFFF);
    busy_seen = 0;
    repeat (3) @(negedge clk) if (!hv_ready && fetch_busy) busy_seen = 1;
    checks++; if (!busy_seen) begin failures++; $display("hv_ready not low during fetch"); end
    @(negedge clk iff hv_ready);
    checks++; if (fetch_overflow) begin failures++; $display("fetch overflow"); end

    // user 1
    send(HV_START, 0, 1, 0, 0, 0, 0, 0);
    repeat (2) @(negedge clk);
    wait (core_running[3:0] == 0);
    repeat (5) @(negedge clk);
    for (int k = 0; k < 4; k++) compare(k, 0);
    checks++; if (barriers[1] != 2) begin failures++; $display("user 1 barriers %0d", barriers[1]); end
    for (int k = 4; k < NC; k++) begin
      checks++; if (got[k].size() != 0) begin failures++; $display("core %0d ran without START", k); end
    end

    // user 2: layer-level switch requested before the first barrier
    for (int k = 4; k < 8; k++) gate[k] = 0;
    send(HV_START, 0, 2, 0, 0, 0, 0, 0);
    send(HV_SWITCH, 0, 2, 0, MODE_LAYER, 0, 0, 0);
    for (int k = 4; k < 8; k++) gate[k] = 1;
    fork
      begin @(negedge clk iff switch_done[2]); end
      begin repeat (2000) @(negedge clk); end
    join_any
    disable fork;
    checks++; if (!switch_done[2]) begin failures++; $display("layer switch did not finish"); end
    checks++; if (next_layer[2] != 1) begin failures++; $display("recorded layer %0d", next_layer[2]); end
    checks++; if (barriers[2] != 0) begin failures++; $display("barrier passed during switch"); end
    repeat (3) @(negedge clk);
    checks++; if (core_running[7:4] != 0) begin failures++; $display("user 2 cores not halted"); end
    for (int k = 4; k < 8; k++) begin
      checks++;
      if (got[k].size() != 4) begin failures++; $display("core %0d ran %0d instrs before switch", k, got[k].size()); end
      got[k].delete();
    end
    // resume from layer 1
    send(HV_START, 0, 2, 0, 0, 0, 0, 0);
    repeat (2) @(negedge clk);
    wait (core_running[7:4] == 0);
    repeat (5) @(negedge clk);
    for (int k = 4; k < 8; k++) compare(k, 1);
    checks++; if (barriers[2] != 1) begin failures++; $display("user 2 barriers %0d", barriers[2]); end

    // task-level switch of the finished user 1 completes at once
    send(HV_SWITCH, 0, 1, 0, MODE_TASK, 0, 0, 0);
    repeat (2) @(negedge clk);
    checks++; if (!switch_done[1] || next_layer[1] != 0) begin failures++; $display("task switch of idle user"); end

    $display("barriers user1=%0d user2=%0d", barriers[1], barriers[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
