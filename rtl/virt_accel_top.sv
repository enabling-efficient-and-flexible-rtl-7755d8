// virt_accel_top: the virtualized multi-core DNN accelerator.
//
// Sixteen small cores (PP=4, ICP=8, OCP=8, 512 ops/cycle each, 8192 in total) form the
// hardware resource pool. The first level IDM assigns them to users, feeds each core its
// instructions, runs layer barriers across the cores of a user and carries out context
// switches ordered by the hypervisor. Every core has a private memory pool and a 128-bit
// memory port; cores 4b .. 4b+3 share DDR bank b through that bank's memory controller
// (mpmc), whose 512-bit port the four 128-bit ports exactly fill. The instruction fetch of
// the first level IDM is a fifth port on bank 0. The DDR banks and the hypervisor are outside
// this module: their signals are the ports below. The structure follows the paper's
// hardware-architecture figure and its evaluated 16 x 512 configuration; the port protocols
// are this design's own.
//
// Ports: hypervisor command/status (see l1_idm), per-core status (running, task_done,
// skipped, sync_local) for monitoring, and one 512-bit request/response port per DDR bank
// (virt_pkg::ddr_req_t / ddr_rsp_t, tagged responses, in order per tag source).
module virt_accel_top
  import virt_pkg::*;
#(
  parameter int FEAT_ROWS  = 1024,
  parameter int WGT_ROWS   = 1024,
  parameter int FIFO_DEPTH = 16,
  parameter int REGION     = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // hypervisor
  input  logic                 hv_valid,
  input  hv_cmd_t              hv_cmd,
  output logic                 hv_ready,
  output logic [15:0]          switch_done,
  output logic [7:0]           next_layer [16],
  output logic                 fetch_busy,
  output logic                 fetch_overflow,
  // per-core status
  output logic [NUM_CORES-1:0] core_running,
  output logic [NUM_CORES-1:0] core_task_done,
  output logic [NUM_CORES-1:0] core_skipped,
  output logic [NUM_CORES-1:0] core_sync_local,
  // DDR banks
  output ddr_req_t             ddr_req   [NUM_DDR],
  input  logic                 ddr_ready [NUM_DDR],
  input  ddr_rsp_t             ddr_rsp   [NUM_DDR]
);

  logic [NUM_CORES-1:0] in_valid, in_ready, start, halt, sync_global;
  instr_t               in_instr;
  logic [7:0]           start_layer [NUM_CORES];
  logic [7:0]           sync_layer  [NUM_CORES];
  bus_req_t             core_req    [NUM_CORES];
  logic                 core_ready  [NUM_CORES];
  bus_rsp_t             core_rsp    [NUM_CORES];
  bus_req_t             if_req;
  logic                 if_ready;
  bus_rsp_t             if_rsp;

  l1_idm #(.N_CORES(NUM_CORES), .N_USERS(16), .REGION(REGION)) u_l1 (
    .clk, .rst_n, .hv_valid, .hv_cmd, .hv_ready, .switch_done, .next_layer, .fetch_busy,
    .fetch_overflow, .if_req, .if_ready, .if_rsp,
    .core_in_valid(in_valid), .core_in_instr(in_instr), .core_in_ready(in_ready),
    .core_start(start), .core_start_layer(start_layer), .core_halt(halt),
    .core_running, .sync_local(core_sync_local), .sync_layer, .sync_global);

  for (genvar k = 0; k < NUM_CORES; k++) begin : g_core
    vcore #(.FEAT_ROWS(FEAT_ROWS), .WGT_ROWS(WGT_ROWS), .FIFO_DEPTH(FIFO_DEPTH)) u_core (
      .clk, .rst_n, .in_valid(in_valid[k]), .in_instr, .in_ready(in_ready[k]),
      .start(start[k]), .start_layer(start_layer[k]), .halt(halt[k]),
      .running(core_running[k]), .task_done(core_task_done[k]), .skipped(core_skipped[k]),
      .sync_local(core_sync_local[k]), .sync_layer(sync_layer[k]),
      .sync_global(sync_global[k]),
      .bus_req(core_req[k]), .bus_ready(core_ready[k]), .bus_rsp(core_rsp[k]));
  end

  // bank 0: its four cores plus the instruction fetch
  begin : g_bank0
    bus_req_t preq [CORES_PER_DDR+1];
    logic     prdy [CORES_PER_DDR+1];
    bus_rsp_t prsp [CORES_PER_DDR+1];
    always_comb begin
      for (int j = 0; j < CORES_PER_DDR; j++) preq[j] = core_req[j];
      preq[CORES_PER_DDR] = if_req;
    end
    for (genvar j = 0; j < CORES_PER_DDR; j++) begin : g_p
      assign core_ready[j] = prdy[j];
      assign core_rsp[j]   = prsp[j];
    end
    assign if_ready = prdy[CORES_PER_DDR];
    assign if_rsp   = prsp[CORES_PER_DDR];
    mpmc #(.NPORTS(CORES_PER_DDR+1)) u_mpmc (
      .clk, .rst_n, .port_req(preq), .port_ready(prdy), .port_rsp(prsp),
      .ddr_req(ddr_req[0]), .ddr_ready(ddr_ready[0]), .ddr_rsp(ddr_rsp[0]));
  end

  for (genvar b = 1; b < NUM_DDR; b++) begin : g_bank
    bus_req_t preq [CORES_PER_DDR];
    logic     prdy [CORES_PER_DDR];
    bus_rsp_t prsp [CORES_PER_DDR];
    for (genvar j = 0; j < CORES_PER_DDR; j++) begin : g_p
      assign preq[j] = core_req[b*CORES_PER_DDR + j];
      assign core_ready[b*CORES_PER_DDR + j] = prdy[j];
      assign core_rsp[b*CORES_PER_DDR + j]   = prsp[j];
    end
    mpmc #(.NPORTS(CORES_PER_DDR)) u_mpmc (
      .clk, .rst_n, .port_req(preq), .port_ready(prdy), .port_rsp(prsp),
      .ddr_req(ddr_req[b]), .ddr_ready(ddr_ready[b]), .ddr_rsp(ddr_rsp[b]));
  end

endmodule
