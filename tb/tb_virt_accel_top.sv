// tb_virt_accel_top: end-to-end run of the whole accelerator at its default sizes (16 cores,
// 4 DDR banks) with behavioural DDR banks and a scripted hypervisor.
//
// Scenario:
//  1. Three users: user 1 owns cores 0-3, user 2 cores 4-11, user 3 cores 12-15. Every core
//     gets a two-layer program (two conv_jobs: layer 0 ends in a sync System, layer 1 in the
//     final System). The instruction file is placed in bank 0 and fetched with one
//     LOAD_INSTR; the fetch interleaves all cores' instructions.
//  2. Users 1 and 2 are started. Both layers of every core are checked against the reference.
//     User 2's barrier spans cores on two DDR banks.
//  3. User 3 is started and immediately given a layer-level SWITCH: it must stop at its
//     layer-0 barrier, record layer 1 as the restart point and report switch_done. It is then
//     re-allocated to cores 12-13 only, gets a new two-layer file (fetched with a clear mask
//     for its cores only) and is restarted: layer 0 must be skipped (never written) and
//     layer 1 computed.
//  4. User 1 is started again and given a task-level SWITCH while running: switch_done must
//     come only after its task has finished.
// Mechanisms counted (each must occur): barrier releases, DDR-port contention between cores
// in a memory controller, layer-level switch, task-level switch, skipped instructions,
// instruction-FIFO backpressure, per-region fetch clear.
module tb_virt_accel_top;
  import virt_pkg::*;
  import tb_job_pkg::*;

  logic clk = 0, rst_n = 0;
  logic hv_valid = 0, hv_ready, fetch_busy, fetch_overflow;
  hv_cmd_t hv_cmd;
  logic [15:0] switch_done;
  logic [7:0] next_layer [16];
  logic [NUM_CORES-1:0] core_running, core_task_done, core_skipped, core_sync_local;
  ddr_req_t ddr_req [NUM_DDR];
  logic ddr_ready [NUM_DDR];
  ddr_rsp_t ddr_rsp [NUM_DDR];
  int checks = 0, failures = 0;

  virt_accel_top dut (.*);

  for (genvar b = 0; b < NUM_DDR; b++) begin : g_ddr
    ddr_model #(.LAT(8), .STALL_PCT(10)) u_ddr (.clk, .req(ddr_req[b]), .ready(ddr_ready[b]), .rsp(ddr_rsp[b]));
  end

  always #5 clk = ~clk;

  task automatic ddr_w(int b, int a, logic [BUS_W-1:0] d);
    case (b)
      0: g_ddr[0].u_ddr.write128(a, d);
      1: g_ddr[1].u_ddr.write128(a, d);
      2: g_ddr[2].u_ddr.write128(a, d);
      default: g_ddr[3].u_ddr.write128(a, d);
    endcase
  endtask
  function automatic logic [BUS_W-1:0] ddr_r(int b, int a);
    case (b)
      0: return g_ddr[0].u_ddr.read128(a);
      1: return g_ddr[1].u_ddr.read128(a);
      2: return g_ddr[2].u_ddr.read128(a);
      default: return g_ddr[3].u_ddr.read128(a);
    endcase
  endfunction

  // ---------------- mechanism counters ----------------
  int n_barrier = 0, n_contention = 0, n_skipped = 0, n_fifo_full = 0;
  int n_layer_switch = 0, n_task_switch = 0, n_clear = 0;
  logic [NUM_CORES-1:0] sync_q = '0;
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NUM_CORES; k++) if (core_sync_local[k] && !sync_q[k]) n_barrier++;
    sync_q <= core_sync_local;
    n_skipped += $countones(core_skipped);
    n_fifo_full += $countones(~dut.in_ready & dut.core_running);
    for (int b = 0; b < NUM_DDR; b++) begin
      int nv;
      nv = 0;
      for (int j = 0; j < CORES_PER_DDR; j++) if (dut.core_req[b*CORES_PER_DDR + j].valid) nv++;
      if (nv > 1) n_contention++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- hypervisor ----------------
  task automatic hv(hv_op_e op, int core = 0, int user = 0, bit en = 0, bit mode = 0,
                    int addr = 0, int count = 0, int mask = 0);
    @(negedge clk);
    hv_cmd = '0; hv_cmd.op = op; hv_cmd.core = 4'(core); hv_cmd.user = 4'(user);
    hv_cmd.enable = en; hv_cmd.mode = mode; hv_cmd.addr = 32'(addr); hv_cmd.count = 16'(count);
    hv_cmd.mask = 16'(mask);
    hv_valid = 1;
    @(posedge clk iff hv_ready); #1;
    hv_valid = 0;
  endtask

  localparam int IADDR = 'h8000;     // instruction files in bank 0 (128-bit word address)
  int iaddr_next = IADDR;

  // place the programs of a set of cores in bank 0, interleaved, and fetch them
  task automatic load_programs(instr_t progs[NUM_CORES][$], int mask);
    int start_a, n, idx;
    bit more;
    start_a = iaddr_next; n = 0; idx = 0;
    do begin
      more = 0;
      for (int k = 0; k < NUM_CORES; k++)
        if (idx < progs[k].size()) begin
          ddr_w(0, iaddr_next, BUS_W'(progs[k][idx])); iaddr_next++; n++; more = 1;
        end
      idx++;
    end while (more);
    hv(HV_LOAD_INSTR, .addr(start_a), .count(n), .mask(mask));
    if (mask != 'hFFFF) n_clear++;
    @(negedge clk iff !fetch_busy);
    checks++; if (fetch_overflow) begin failures++; $display("instruction region overflow"); end
  endtask

  conv_job jobs [NUM_CORES][2];

  function automatic int job_base(int k, int layer, int gen);
    return (k % CORES_PER_DDR) * 'h800 + layer * 'h400 + gen * 'h2000;
  endfunction

  task automatic make_jobs(int k, int gen, ref instr_t progs[NUM_CORES][$]);
    for (int l = 0; l < 2; l++) begin
      jobs[k][l] = new(k, l, 4 + (k + l) % 3, job_base(k, l, gen), l == 0);
      for (int b = 0; b < jobs[k][l].n_beats() - 3*PP/2; b++)
        ddr_w(k / CORES_PER_DDR, jobs[k][l].base + b, jobs[k][l].in_beat(b));
      jobs[k][l].gen_program(progs[k]);
    end
  endtask

  task automatic check_job(int k, int l, bit expect_written);
    for (int b = 0; b < 3*PP/2; b++) begin
      logic [BUS_W-1:0] got;
      got = ddr_r(k / CORES_PER_DDR, jobs[k][l].out_base() + b);
      checks++;
      if (expect_written ? (got !== jobs[k][l].out_beat(b)) : (got !== '0)) begin
        failures++;
        $display("core %0d layer %0d beat %0d: got %h exp %h", k, l, b, got,
                 expect_written ? jobs[k][l].out_beat(b) : '0);
      end
    end
  endtask

  task automatic wait_users_idle(int lo, int hi);
    bit busy;
    do begin
      @(negedge clk);
      busy = 0;
      for (int k = lo; k <= hi; k++) if (core_running[k]) busy = 1;
    end while (busy);
  endtask

  initial begin
    instr_t progs [NUM_CORES][$];
    int t0;
    hv_cmd = '0;
    repeat (20) @(posedge clk); rst_n = 1;

    // 1. allocation and programs
    for (int k = 0; k < NUM_CORES; k++)
      hv(HV_CFG_CORE, .core(k), .user(k < 4 ? 1 : (k < 12 ? 2 : 3)), .en(1));
    for (int k = 0; k < NUM_CORES; k++) make_jobs(k, 0, progs);
    load_programs(progs, 'hFFFF);

    // 2. users 1 and 2
    hv(HV_START, .user(1));
    hv(HV_START, .user(2));
    repeat (5) @(negedge clk);
    wait_users_idle(0, 11);
    for (int k = 0; k < 12; k++) begin check_job(k, 0, 1); check_job(k, 1, 1); end

    // 3. user 3: layer-level switch at its first barrier, then shrink to cores 12-13
    hv(HV_START, .user(3));
    hv(HV_SWITCH, .user(3), .mode(MODE_LAYER));
    @(negedge clk iff switch_done[3]);
    n_layer_switch++;
    checks++; if (next_layer[3] != 8'd1) begin failures++; $display("recorded layer %0d", next_layer[3]); end
    repeat (3) @(negedge clk);
    checks++; if (core_running[15:12] != 0) begin failures++; $display("user 3 still running"); end
    for (int k = 12; k < 16; k++) begin check_job(k, 0, 1); check_job(k, 1, 0); end
    hv(HV_CFG_CORE, .core(14), .user(3), .en(0));
    hv(HV_CFG_CORE, .core(15), .user(3), .en(0));
    for (int k = 0; k < NUM_CORES; k++) progs[k].delete();
    for (int k = 12; k < 14; k++) make_jobs(k, 1, progs);
    load_programs(progs, 'hF000);
    hv(HV_START, .user(3));
    repeat (5) @(negedge clk);
    wait_users_idle(12, 15);
    for (int k = 12; k < 14; k++) begin check_job(k, 0, 0); check_job(k, 1, 1); end

    // 4. user 1 again, task-level switch while it runs
    for (int k = 0; k < 4; k++) for (int l = 0; l < 2; l++)
      for (int b = 0; b < 3*PP/2; b++) ddr_w(0, jobs[k][l].out_base() + b, '0);
    hv(HV_START, .user(1));
    repeat (20) @(negedge clk);
    hv(HV_SWITCH, .user(1), .mode(MODE_TASK));
    checks++; if (core_running[3:0] == 0) begin failures++; $display("user 1 finished too early for the test"); end
    @(negedge clk iff switch_done[1]);
    n_task_switch++;
    checks++; if (core_running[3:0] != 0) begin failures++; $display("task switch before task end"); end
    checks++; if (next_layer[1] != 0) begin failures++; $display("task switch recorded a layer"); end
    for (int k = 0; k < 4; k++) begin check_job(k, 0, 1); check_job(k, 1, 1); end

    // mechanism coverage
    $display("barriers=%0d contention=%0d skipped=%0d fifo_full=%0d layer_sw=%0d task_sw=%0d clear=%0d",
             n_barrier, n_contention, n_skipped, n_fifo_full, n_layer_switch, n_task_switch, n_clear);
    checks++; if (n_barrier == 0)      begin failures++; $display("no barrier"); end
    checks++; if (n_contention == 0)   begin failures++; $display("no port contention"); end
    checks++; if (n_skipped == 0)      begin failures++; $display("nothing skipped"); end
    checks++; if (n_fifo_full == 0)    begin failures++; $display("no FIFO backpressure"); end
    checks++; if (n_layer_switch == 0) failures++;
    checks++; if (n_task_switch == 0)  failures++;
    checks++; if (n_clear == 0)        failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
