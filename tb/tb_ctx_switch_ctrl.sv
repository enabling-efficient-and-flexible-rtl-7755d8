// tb_ctx_switch_ctrl: drives the context-switch controller with modelled cores. Checks that
// START starts exactly the user's enabled cores with layer 0; a task-level SWITCH completes
// only once the user's cores stop running and records no layer; a layer-level SWITCH holds
// the user at its barrier, completes when the barrier is reached, halts the cores in that
// cycle and records barrier layer + 1, which the next START hands to the cores once.
module tb_ctx_switch_ctrl;
  import virt_pkg::*;
  localparam int NC = NUM_CORES, NU = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_start = 0, cmd_switch = 0, cmd_mode = 0;
  logic [3:0] cmd_user = 0;
  logic [3:0] core_user [NC];
  logic [NC-1:0] core_en, core_running, core_start, core_halt;
  logic [NU-1:0] user_at_sync, hold, switch_done;
  logic [7:0] user_layer [NU], core_start_layer [NC], next_layer [NU];
  int checks = 0, failures = 0;

  ctx_switch_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmd(bit st, bit sw, int u, bit m);
    @(negedge clk); cmd_start = st; cmd_switch = sw; cmd_user = 4'(u); cmd_mode = m;
    @(negedge clk); cmd_start = 0; cmd_switch = 0;
  endtask

  initial begin
    for (int k = 0; k < NC; k++) core_user[k] = (k < 6) ? 4'd2 : 4'd5;
    core_en = 16'hFFDF;             // core 5 (user 2) disabled
    core_running = '0; user_at_sync = '0;
    foreach (user_layer[u]) user_layer[u] = 8'd0;
    repeat (3) @(posedge clk); rst_n = 1;

    // START user 2: cores 0-4
    @(negedge clk); cmd_start = 1; cmd_user = 2;
    @(negedge clk); cmd_start = 0;
    checks++; if (core_start != 16'h001F) begin failures++; $display("start mask %h", core_start); end
    checks++; if (core_start_layer[3] != 0) failures++;
    core_running[4:0] = '1;
    @(negedge clk);
    checks++; if (core_start != 0) failures++;

    // task-level switch: not done while running
    cmd(0, 1, 2, MODE_TASK);
    repeat (5) @(negedge clk);
    checks++; if (switch_done[2]) begin failures++; $display("task switch finished early"); end
    checks++; if (hold[2]) begin failures++; $display("task switch holds the barrier"); end
    core_running[4:0] = '0;
    @(negedge clk);
    checks++; if (!switch_done[2] || next_layer[2] != 0) begin failures++; $display("task switch not done"); end

    // layer-level switch of user 5 (cores 6-15)
    cmd(1, 0, 5, 0);
    core_running[15:6] = '1;
    cmd(0, 1, 5, MODE_LAYER);
    repeat (3) @(negedge clk);
    checks++; if (!hold[5]) begin failures++; $display("no hold"); end
    checks++; if (switch_done[5]) failures++;
    user_layer[5] = 8'd6; user_at_sync[5] = 1;
    #1;
    checks++; if (core_halt != 16'hFFC0) begin failures++; $display("halt mask %h", core_halt); end
    @(negedge clk);
    user_at_sync[5] = 0; core_running[15:6] = '0;
    checks++; if (!switch_done[5] || next_layer[5] != 8'd7) begin failures++; $display("layer rec %0d", next_layer[5]); end
    checks++; if (hold[5]) failures++;
    // restart: cores get layer 7, then the record is consumed
    @(negedge clk); cmd_start = 1; cmd_user = 5;
    @(negedge clk); cmd_start = 0;
    checks++; if (core_start != 16'hFFC0 || core_start_layer[9] != 8'd7) begin
      failures++; $display("restart %h layer %0d", core_start, core_start_layer[9]);
    end
    checks++; if (switch_done[5] || next_layer[5] != 0) failures++;
    cmd(1, 0, 5, 0);
    checks++; if (core_start_layer[9] != 0) begin failures++; $display("record reused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
