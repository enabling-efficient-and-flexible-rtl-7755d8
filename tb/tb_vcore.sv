// tb_vcore: runs one complete small convolution layer (tb_job_pkg::conv_job) on a core
// against a 128-bit memory model with random ready and a 4-cycle read latency, and compares
// the three result rows written back to memory with the reference. A second run uses a sync
// System instruction and checks the sync_local / sync_global handshake, then a restart from
// a later layer checks that the whole program is skipped.
module tb_vcore;
  import virt_pkg::*;
  import tb_job_pkg::*;
  localparam int LAT = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, start = 0, halt = 0, running, task_done, skipped;
  logic sync_local, sync_global = 0;
  logic [7:0] start_layer = 0, sync_layer;
  instr_t in_instr;
  bus_req_t bus_req; logic bus_ready; bus_rsp_t bus_rsp;
  logic [BUS_W-1:0] mem [4096];
  logic [BUS_W-1:0] pd [LAT];
  logic pv [LAT];
  int checks = 0, failures = 0;

  vcore #(.FEAT_ROWS(256), .WGT_ROWS(256)) dut (.*);
  always #5 clk = ~clk;

  logic rdy_q = 1'b1;
  always @(negedge clk) rdy_q <= ($urandom_range(0, 4) != 0);
  assign bus_ready = rdy_q;
  assign bus_rsp.valid = pv[LAT-1];
  assign bus_rsp.rdata = pd[LAT-1];
  always_ff @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= bus_req.valid && bus_ready && !bus_req.we && rst_n;
    pd[0] <= mem[bus_req.addr[11:0]];
    if (bus_req.valid && bus_ready && bus_req.we) mem[bus_req.addr[11:0]] <= bus_req.wdata;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_job(conv_job j, input int sl);
    instr_t q[$];
    for (int b = 0; b < j.n_beats() - 3*PP/2; b++) mem[j.base + b] = j.in_beat(b);
    j.gen_program(q);
    @(negedge clk); start = 1; start_layer = 8'(sl); @(negedge clk); start = 0;
    fork
      begin
        foreach (q[k]) begin
          in_instr = q[k]; in_valid = 1;
          @(posedge clk iff in_ready); #1;
        end
        in_valid = 0;
      end
    join_none
  endtask

  task automatic check_job(conv_job j);
    for (int b = 0; b < 3*PP/2; b++) begin
      checks++;
      if (mem[j.out_base() + b] !== j.out_beat(b)) begin
        failures++; $display("core result beat %0d: %h vs %h", b, mem[j.out_base() + b], j.out_beat(b));
      end
    end
  endtask

  initial begin
    conv_job j1, j2;
    int nskip;
    foreach (pv[i]) pv[i] = 0;
    foreach (mem[i]) mem[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    j1 = new(0, 0, 6, 0, 0);
    run_job(j1, 0);
    @(posedge clk iff task_done); @(negedge clk);
    check_job(j1);
    // second job ends with a sync System
    j2 = new(0, 3, 4, 1000, 1);
    run_job(j2, 3);
    @(posedge clk iff sync_local);
    checks++; if (sync_layer != 3) begin failures++; $display("sync_layer %0d", sync_layer); end
    repeat (4) @(negedge clk);
    checks++; if (!running || !sync_local) begin failures++; $display("core left the sync wait"); end
    check_job(j2);
    sync_global = 1; @(negedge clk); sync_global = 0;
    checks++; if (sync_local) begin failures++; $display("sync_local stuck"); end
    // restart at layer 4: every instruction of j2 (layer 3) is dropped
    j2.base = 2000;
    nskip = 0;
    run_job(j2, 4);
    repeat (60) @(negedge clk) if (skipped) nskip++;
    checks++; if (nskip != 10) begin failures++; $display("skipped %0d of 10", nskip); end
    checks++; if (mem[j2.out_base()] !== '0) begin failures++; $display("skipped layer wrote memory"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
