// vcore: one small core of the multi-core hardware resource pool.
//
// A core is a complete ISA-driven CNN engine: its second level dispatch module (l2_idm)
// issues instructions to the LOAD/SAVE datamover, the CONV module (PP PEs of ICP x OCP MACs)
// and the MISC module, all of which work on the core's private on-chip memory pool. The only
// ways out of a core are its 128-bit memory port (to the memory controller of its DDR bank)
// and the dispatch/synchronization signals to the first level IDM, so one core can neither
// read another core's memory nor use its compute units: this is the resource isolation the
// paper builds its public-cloud argument on. The partition into these modules follows the
// paper's architecture figure; the internal interfaces are this design's own.
//
// Interface: instructions arrive on in_valid/in_instr (accepted when in_ready); `start` with
// `start_layer` begins a task, `halt` stops it; `running` is high while a task runs and
// `task_done` pulses at its final System instruction. sync_local/sync_layer/sync_global is
// the layer synchronization handshake with the first level IDM. `skipped` pulses for every
// instruction dropped by a layer-level restart.
module vcore
  import virt_pkg::*;
#(
  parameter int FEAT_ROWS  = 1024,
  parameter int WGT_ROWS   = 1024,
  parameter int FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  instr_t      in_instr,
  output logic        in_ready,
  input  logic        start,
  input  logic [7:0]  start_layer,
  input  logic        halt,
  output logic        running,
  output logic        task_done,
  output logic        skipped,
  output logic        sync_local,
  output logic [7:0]  sync_layer,
  input  logic        sync_global,
  output bus_req_t    bus_req,
  input  logic        bus_ready,
  input  bus_rsp_t    bus_rsp
);

  instr_t               issue_instr;
  logic [NUM_UNITS-1:0] unit_issue, unit_busy, unit_done;

  l2_idm #(.FIFO_DEPTH(FIFO_DEPTH)) u_idm (
    .clk, .rst_n, .in_valid, .in_instr, .in_ready, .start, .start_layer, .halt, .running,
    .task_done, .skipped, .sync_local, .sync_layer, .sync_global, .issue_instr, .unit_issue,
    .unit_busy, .unit_done);

  // memory pool wiring
  logic              ld_we [2];
  logic              ld_wgt;
  logic [15:0]       ld_idx [2];
  logic [WORD_W-1:0] ld_wdata [2];
  logic [15:0]       sv_idx [2];
  logic [WORD_W-1:0] sv_rdata [2];
  logic [15:0]       cv_frow, cv_wrow, cv_orow, ms_frow, ms_orow;
  logic [WORD_W-1:0] cv_feat [PP];
  logic [WORD_W-1:0] cv_wgt [OCP];
  logic [WORD_W-1:0] cv_wdata [PP];
  logic [WORD_W-1:0] ms_feat [PP];
  logic [WORD_W-1:0] ms_wdata [PP];
  logic              cv_we, ms_we;

  mem_pool #(.FEAT_ROWS(FEAT_ROWS), .WGT_ROWS(WGT_ROWS)) u_mem (
    .clk, .ld_we, .ld_wgt, .ld_idx, .ld_wdata, .sv_idx, .sv_rdata,
    .cv_frow, .cv_feat, .cv_wrow, .cv_wgt, .cv_we, .cv_orow, .cv_wdata,
    .ms_frow, .ms_feat, .ms_we, .ms_orow, .ms_wdata);

  datamover u_dm (
    .clk, .rst_n,
    .ld_issue(unit_issue[U_LOAD]), .ld_instr(issue_instr), .ld_busy(unit_busy[U_LOAD]),
    .ld_done(unit_done[U_LOAD]),
    .sv_issue(unit_issue[U_SAVE]), .sv_instr(issue_instr), .sv_busy(unit_busy[U_SAVE]),
    .sv_done(unit_done[U_SAVE]),
    .mp_ld_we(ld_we), .mp_ld_wgt(ld_wgt), .mp_ld_idx(ld_idx), .mp_ld_wdata(ld_wdata),
    .mp_sv_idx(sv_idx), .mp_sv_rdata(sv_rdata),
    .bus_req, .bus_ready, .bus_rsp);

  conv_module u_conv (
    .clk, .rst_n, .issue(unit_issue[U_CONV]), .instr(issue_instr), .busy(unit_busy[U_CONV]),
    .done(unit_done[U_CONV]), .frow(cv_frow), .feat(cv_feat), .wrow(cv_wrow), .wgt(cv_wgt),
    .we(cv_we), .orow(cv_orow), .wdata(cv_wdata));

  misc_module u_misc (
    .clk, .rst_n, .issue(unit_issue[U_MISC]), .instr(issue_instr), .busy(unit_busy[U_MISC]),
    .done(unit_done[U_MISC]), .frow(ms_frow), .feat(ms_feat), .we(ms_we), .orow(ms_orow),
    .wdata(ms_wdata));

endmodule
