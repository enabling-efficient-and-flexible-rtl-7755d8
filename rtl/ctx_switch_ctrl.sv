// ctx_switch_ctrl: the context-switch controller of the first level IDM.
//
// It starts users' tasks and carries out reconfiguration requests from the hypervisor, in one
// of the paper's two modes:
//   task level  : wait until the user's current inference task has finished (none of its
//                 cores is running), then report the switch as done;
//   layer level : hold the user's cores at their next layer barrier (a sync System
//                 instruction), record the layer index they finished, stop them, and report
//                 the switch as done.
// Intermediate feature maps are already in DDR at a layer boundary, so the layer index is the
// whole context. The hypervisor then loads the new instructions and core assignment and
// issues START; the controller restarts every enabled core of that user with start_layer =
// recorded layer + 1 (0 after a task-level switch or a normal start), and the cores skip the
// layers already done. The recorded layer is used once.
//
// Interface: one-cycle command strobes cmd_start / cmd_switch with cmd_user and cmd_mode;
// per-core pulses core_start (registered, with core_start_layer) and core_halt
// (combinational, in the cycle the switch completes); hold[u] to the sync
// controller; switch_done[u] stays high from the end of a switch until the user's next START.
// The paper gives the two modes and what is recorded; the command protocol is this design's.
module ctx_switch_ctrl
  import virt_pkg::*;
#(
  parameter int N_CORES = NUM_CORES,
  parameter int N_USERS = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_start,
  input  logic               cmd_switch,
  input  logic [3:0]         cmd_user,
  input  logic               cmd_mode,
  input  logic [3:0]         core_user [N_CORES],
  input  logic [N_CORES-1:0] core_en,
  input  logic [N_CORES-1:0] core_running,
  input  logic [N_USERS-1:0] user_at_sync,
  input  logic [7:0]         user_layer [N_USERS],
  output logic [N_USERS-1:0] hold,
  output logic [N_CORES-1:0] core_start,
  output logic [7:0]         core_start_layer [N_CORES],
  output logic [N_CORES-1:0] core_halt,
  output logic [N_USERS-1:0] switch_done,
  output logic [7:0]         next_layer [N_USERS]
);

  logic [N_USERS-1:0] pending, mode_q, user_running;
  logic [N_USERS-1:0] finish;       // switch completes this cycle

  always_comb begin
    for (int u = 0; u < N_USERS; u++) begin
      user_running[u] = 1'b0;
      for (int k = 0; k < N_CORES; k++)
        if (core_en[k] && int'(core_user[k]) == u && core_running[k]) user_running[u] = 1'b1;
      hold[u]   = pending[u] && (mode_q[u] == MODE_LAYER);
      finish[u] = pending[u] && (!user_running[u] || (mode_q[u] == MODE_LAYER && user_at_sync[u]));
    end
    // stop the user's cores in the cycle the switch completes, before the barrier can open
    for (int k = 0; k < N_CORES; k++) core_halt[k] = core_en[k] && finish[core_user[k]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0; mode_q <= '0; switch_done <= '0; core_start <= '0;
      for (int u = 0; u < N_USERS; u++) next_layer[u] <= '0;
      for (int k = 0; k < N_CORES; k++) core_start_layer[k] <= '0;
    end else begin
      core_start <= '0;
      for (int u = 0; u < N_USERS; u++) begin
        if (finish[u]) begin
          pending[u]     <= 1'b0;
          switch_done[u] <= 1'b1;
          next_layer[u]  <= (user_running[u] && mode_q[u] == MODE_LAYER) ? user_layer[u] + 8'd1
                                                                          : 8'd0;
        end
      end
      if (cmd_switch) begin
        pending[cmd_user]     <= 1'b1;
        mode_q[cmd_user]      <= cmd_mode;
        switch_done[cmd_user] <= 1'b0;
      end
      if (cmd_start) begin
        switch_done[cmd_user] <= 1'b0;
        next_layer[cmd_user]  <= '0;
        for (int k = 0; k < N_CORES; k++)
          if (core_en[k] && core_user[k] == cmd_user) begin
            core_start[k]       <= 1'b1;
            core_start_layer[k] <= next_layer[cmd_user];
          end
      end
    end
  end

endmodule
