// sync_ctrl: the multi-core synchronization controller of the first level IDM.
//
// The hypervisor assigns every core to a user (core_user, core_en). For each user the
// controller watches the sync_local signals of that user's cores; only when all of them are
// valid does it send sync_global to each of those cores, which then start the next layer.
// This is the paper's description taken as is. sync_global is combinational, so it is high
// in the same cycle as the last sync_local and the cores drop sync_local at the next edge.
// Two additions serve the layer-level context switch: `hold[u]` keeps user u's cores
// waiting at the barrier instead of releasing them, and `user_at_sync[u]` / `user_layer[u]`
// tell the context-switch controller that the user has reached a barrier and at which layer
// (the layer field of the lowest-numbered core's System instruction).
module sync_ctrl
  import virt_pkg::*;
#(
  parameter int N_CORES = NUM_CORES,
  parameter int N_USERS = 16
) (
  input  logic [3:0]         core_user   [N_CORES],
  input  logic [N_CORES-1:0] core_en,
  input  logic [N_CORES-1:0] sync_local,
  input  logic [7:0]         sync_layer  [N_CORES],
  input  logic [N_USERS-1:0] hold,
  output logic [N_CORES-1:0] sync_global,
  output logic [N_USERS-1:0] user_at_sync,
  output logic [7:0]         user_layer  [N_USERS]
);

  always_comb begin
    for (int u = 0; u < N_USERS; u++) begin
      logic any, all;
      any = 1'b0; all = 1'b1; user_layer[u] = '0;
      for (int k = N_CORES-1; k >= 0; k--) begin
        if (core_en[k] && int'(core_user[k]) == u) begin
          any = 1'b1;
          if (!sync_local[k]) all = 1'b0;
          user_layer[u] = sync_layer[k];
        end
      end
      user_at_sync[u] = any && all;
    end
    for (int k = 0; k < N_CORES; k++)
      sync_global[k] = core_en[k] && user_at_sync[core_user[k]] && !hold[core_user[k]];
  end

endmodule
