// tb_sync_ctrl: random core-to-user assignments and random sync_local patterns; checks
// sync_global against a model of the rule "a user's cores are released only when all of
// that user's enabled cores have sync_local", plus hold and the reported barrier layer.
module tb_sync_ctrl;
  import virt_pkg::*;
  localparam int NC = NUM_CORES, NU = 16;
  logic [3:0] core_user [NC];
  logic [NC-1:0] core_en, sync_local, sync_global;
  logic [7:0] sync_layer [NC];
  logic [NU-1:0] hold, user_at_sync;
  logic [7:0] user_layer [NU];
  int checks = 0, failures = 0;
  int n_release = 0;

  sync_ctrl dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int nusers;
      nusers = $urandom_range(1, 4);
      for (int k = 0; k < NC; k++) begin
        core_user[k] = 4'($urandom_range(0, nusers - 1));
        sync_layer[k] = 8'($urandom_range(0, 200));
      end
      core_en = 16'($urandom);
      hold = 16'($urandom) & 16'($urandom);
      // bias towards complete barriers
      sync_local = ($urandom_range(0, 1) != 0) ? 16'hFFFF & ~(16'(1) << $urandom_range(0, 20)) : 16'($urandom);
      #1;
      for (int u = 0; u < NU; u++) begin
        bit any, all;
        int lay;
        any = 0; all = 1; lay = 0;
        for (int k = NC-1; k >= 0; k--)
          if (core_en[k] && core_user[k] == u) begin
            any = 1; if (!sync_local[k]) all = 0; lay = sync_layer[k];
          end
        checks++;
        if (user_at_sync[u] !== (any && all)) begin failures++; $display("at_sync u%0d", u); end
        if (any && all) begin
          checks++;
          if (user_layer[u] != 8'(lay)) begin failures++; $display("layer u%0d", u); end
        end
      end
      for (int k = 0; k < NC; k++) begin
        bit all, exp;
        all = 1;
        for (int j = 0; j < NC; j++)
          if (core_en[j] && core_user[j] == core_user[k] && !sync_local[j]) all = 0;
        exp = core_en[k] && all && !hold[core_user[k]];
        if (exp) n_release++;
        checks++;
        if (sync_global[k] !== exp) begin failures++; $display("t%0d core %0d sync_global %b", t, k, sync_global[k]); end
      end
    end
    checks++; if (n_release == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
