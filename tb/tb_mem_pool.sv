// tb_mem_pool: writes random words through the LOAD port to the feature and weight sides,
// reads them back through the SAVE, CONV and MISC ports using the bank/row mapping
// (bank = index mod PP or OCP, row = index / PP or OCP), and checks CONV and MISC row writes
// including the MISC-over-CONV priority on a collision. A scoreboard array models the pool.
module tb_mem_pool;
  import virt_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0;
  logic ld_we [2]; logic ld_wgt; logic [15:0] ld_idx [2]; logic [WORD_W-1:0] ld_wdata [2];
  logic [15:0] sv_idx [2]; logic [WORD_W-1:0] sv_rdata [2];
  logic [15:0] cv_frow, cv_wrow, cv_orow, ms_frow, ms_orow;
  logic [WORD_W-1:0] cv_feat [PP], cv_wgt [OCP], cv_wdata [PP], ms_feat [PP], ms_wdata [PP];
  logic cv_we, ms_we;
  logic [WORD_W-1:0] fref [PP*ROWS];
  logic [WORD_W-1:0] wref [OCP*ROWS];
  int checks = 0, failures = 0;

  mem_pool #(.FEAT_ROWS(ROWS), .WGT_ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input logic [WORD_W-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_we = '{0, 0}; ld_wgt = 0; cv_we = 0; ms_we = 0;
    ld_idx = '{0, 0}; sv_idx = '{0, 0};
    cv_frow = 0; cv_wrow = 0; cv_orow = 0; ms_frow = 0; ms_orow = 0;
    // fill the feature side, two words per cycle
    for (int g = 0; g < PP*ROWS; g += 2) begin
      @(negedge clk);
      ld_wgt = 0;
      for (int k = 0; k < 2; k++) begin
        ld_we[k] = 1; ld_idx[k] = 16'(g + k); ld_wdata[k] = {$urandom, $urandom};
        fref[g+k] = ld_wdata[k];
      end
    end
    for (int g = 0; g < OCP*ROWS; g += 2) begin
      @(negedge clk);
      ld_wgt = 1;
      for (int k = 0; k < 2; k++) begin
        ld_we[k] = 1; ld_idx[k] = 16'(g + k); ld_wdata[k] = {$urandom, $urandom};
        wref[g+k] = ld_wdata[k];
      end
    end
    @(negedge clk); ld_we = '{0, 0};
    // SAVE port reads
    for (int g = 0; g < PP*ROWS; g += 2) begin
      sv_idx[0] = 16'(g); sv_idx[1] = 16'(g + 1); #1;
      chk(sv_rdata[0], fref[g], "save0"); chk(sv_rdata[1], fref[g+1], "save1");
    end
    // CONV / MISC row reads
    for (int r = 0; r < ROWS; r++) begin
      cv_frow = 16'(r); cv_wrow = 16'(r); ms_frow = 16'(r); #1;
      for (int b = 0; b < PP; b++) begin
        chk(cv_feat[b], fref[r*PP+b], "conv feat");
        chk(ms_feat[b], fref[r*PP+b], "misc feat");
      end
      for (int o = 0; o < OCP; o++) chk(cv_wgt[o], wref[r*OCP+o], "conv wgt");
    end
    // CONV writes row 3, MISC writes row 5; then both write row 7 (MISC wins)
    @(negedge clk);
    cv_we = 1; cv_orow = 3; ms_we = 1; ms_orow = 5;
    for (int b = 0; b < PP; b++) begin
      cv_wdata[b] = {$urandom, $urandom}; ms_wdata[b] = {$urandom, $urandom};
      fref[3*PP+b] = cv_wdata[b]; fref[5*PP+b] = ms_wdata[b];
    end
    @(negedge clk);
    cv_orow = 7; ms_orow = 7;
    for (int b = 0; b < PP; b++) begin
      cv_wdata[b] = {$urandom, $urandom}; ms_wdata[b] = {$urandom, $urandom};
      fref[7*PP+b] = ms_wdata[b];
    end
    @(negedge clk); cv_we = 0; ms_we = 0;
    foreach (fref[g]) begin
      sv_idx[0] = 16'(g); #1; chk(sv_rdata[0], fref[g], "after row writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
