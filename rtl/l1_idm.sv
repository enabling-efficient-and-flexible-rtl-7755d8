// l1_idm: the first level instruction dispatch module, the task-level scheduler shared by all
// cores.
//
// It holds the hypervisor's view of the hardware resource pool: which user every core
// belongs to (core_user, core_en, set by CFG_CORE commands). It contains the four parts the
// paper names: the instruction memory (fetches instruction files from DDR and caches them),
// the instruction decoder (routes each instruction to the second level IDM of the core named
// in it), the context-switch controller (starts users' tasks, task- and layer-level
// switching) and the multi-core synchronization controller (layer barriers per user).
//
// Hypervisor commands (virt_pkg::hv_cmd_t) are accepted when hv_valid and hv_ready are both
// high; hv_ready is low while an instruction fetch is in progress. Commands:
//   CFG_CORE   core -> user, enable        LOAD_INSTR  fetch `count` instructions at `addr`
//   START      start `user`'s task         SWITCH      context switch of `user`, `mode`
// Status: switch_done[u], next_layer[u] (recorded context), core_running, fetch_busy.
module l1_idm
  import virt_pkg::*;
#(
  parameter int N_CORES = NUM_CORES,
  parameter int N_USERS = 16,
  parameter int REGION  = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  // hypervisor
  input  logic               hv_valid,
  input  hv_cmd_t            hv_cmd,
  output logic               hv_ready,
  output logic [N_USERS-1:0] switch_done,
  output logic [7:0]         next_layer [N_USERS],
  output logic               fetch_busy,
  output logic               fetch_overflow,
  // instruction fetch port (to the memory controller of DDR bank 0)
  output bus_req_t           if_req,
  input  logic               if_ready,
  input  bus_rsp_t           if_rsp,
  // cores
  output logic [N_CORES-1:0] core_in_valid,
  output instr_t             core_in_instr,
  input  logic [N_CORES-1:0] core_in_ready,
  output logic [N_CORES-1:0] core_start,
  output logic [7:0]         core_start_layer [N_CORES],
  output logic [N_CORES-1:0] core_halt,
  input  logic [N_CORES-1:0] core_running,
  input  logic [N_CORES-1:0] sync_local,
  input  logic [7:0]         sync_layer [N_CORES],
  output logic [N_CORES-1:0] sync_global
);

  localparam int RW = $clog2(REGION);
  localparam int CW = $clog2(N_CORES);

  logic [3:0]         core_user [N_CORES];
  logic [N_CORES-1:0] core_en;
  logic               accept;

  assign hv_ready = !fetch_busy;
  assign accept   = hv_valid && hv_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_en <= '0;
      for (int k = 0; k < N_CORES; k++) core_user[k] <= '0;
    end else if (accept && hv_cmd.op == HV_CFG_CORE) begin
      core_user[hv_cmd.core[CW-1:0]] <= hv_cmd.user;
      core_en[hv_cmd.core[CW-1:0]]   <= hv_cmd.enable;
    end
  end

  // instruction memory and decoder
  logic [CW-1:0] rd_core;
  logic [RW-1:0] rd_idx;
  instr_t        rd_data;
  logic [RW:0]   count [N_CORES];

  instr_mem #(.N_CORES(N_CORES), .REGION(REGION)) u_imem (
    .clk, .rst_n, .load(accept && hv_cmd.op == HV_LOAD_INSTR), .addr(hv_cmd.addr),
    .count_in(hv_cmd.count), .clear_mask(N_CORES'(hv_cmd.mask)), .busy(fetch_busy),
    .overflow(fetch_overflow), .bus_req(if_req), .bus_ready(if_ready), .bus_rsp(if_rsp),
    .rd_core, .rd_idx, .rd_data, .count);

  instr_decoder #(.N_CORES(N_CORES), .REGION(REGION)) u_dec (
    .clk, .rst_n, .start(core_start), .halt(core_halt), .count, .rd_core, .rd_idx, .rd_data,
    .out_valid(core_in_valid), .out_instr(core_in_instr), .out_ready(core_in_ready));

  // context switch and synchronization
  logic [N_USERS-1:0] hold, user_at_sync;
  logic [7:0]         user_layer [N_USERS];

  ctx_switch_ctrl #(.N_CORES(N_CORES), .N_USERS(N_USERS)) u_ctx (
    .clk, .rst_n,
    .cmd_start(accept && hv_cmd.op == HV_START), .cmd_switch(accept && hv_cmd.op == HV_SWITCH),
    .cmd_user(hv_cmd.user), .cmd_mode(hv_cmd.mode), .core_user, .core_en, .core_running,
    .user_at_sync, .user_layer, .hold, .core_start, .core_start_layer, .core_halt,
    .switch_done, .next_layer);

  sync_ctrl #(.N_CORES(N_CORES), .N_USERS(N_USERS)) u_sync (
    .core_user, .core_en, .sync_local, .sync_layer, .hold, .sync_global, .user_at_sync,
    .user_layer);

endmodule
