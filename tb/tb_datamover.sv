// tb_datamover: runs LOAD and SAVE instructions, alone and overlapping, against a 128-bit
// memory model with a random ready and a 3-cycle read latency. The pool is modelled by the
// testbench: LOAD writes are captured and compared with the memory words (two 64-bit words
// per beat, feature or weight side), SAVE reads are served from a reference array and the
// DDR writes are compared with it. It also checks that an uncontended LOAD of B beats
// completes in B + latency + 1 cycles (one request per cycle).
module tb_datamover;
  import virt_pkg::*;
  localparam int LAT = 3;
  logic clk = 0, rst_n = 0;
  logic ld_issue = 0, sv_issue = 0, ld_busy, sv_busy, ld_done, sv_done;
  instr_t ld_instr, sv_instr;
  logic mp_ld_we [2]; logic mp_ld_wgt; logic [15:0] mp_ld_idx [2]; logic [WORD_W-1:0] mp_ld_wdata [2];
  logic [15:0] mp_sv_idx [2]; logic [WORD_W-1:0] mp_sv_rdata [2];
  bus_req_t bus_req; logic bus_ready; bus_rsp_t bus_rsp;
  int checks = 0, failures = 0;

  logic [BUS_W-1:0] ddr [1024];
  logic [WORD_W-1:0] pool_f [4096];
  logic [WORD_W-1:0] pool_w [4096];
  logic [WORD_W-1:0] src_f [4096];
  logic [BUS_W-1:0] pipe_d [LAT];
  logic pipe_v [LAT];
  logic rand_ready = 1;

  datamover dut (.*);

  always #5 clk = ~clk;

  assign mp_sv_rdata[0] = src_f[mp_sv_idx[0][11:0]];
  assign mp_sv_rdata[1] = src_f[mp_sv_idx[1][11:0]];
  logic rdy_q = 1'b1;
  always @(negedge clk) rdy_q <= ($urandom_range(0, 3) != 0);
  assign bus_ready = rand_ready ? rdy_q : 1'b1;
  assign bus_rsp.valid = pipe_v[LAT-1];
  assign bus_rsp.rdata = pipe_d[LAT-1];

  always_ff @(posedge clk) begin
    for (int k = 0; k < 2; k++)
      if (mp_ld_we[k]) begin
        if (mp_ld_wgt) pool_w[mp_ld_idx[k][11:0]] <= mp_ld_wdata[k];
        else           pool_f[mp_ld_idx[k][11:0]] <= mp_ld_wdata[k];
      end
    for (int i = LAT-1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= bus_req.valid && bus_ready && !bus_req.we && rst_n;
    pipe_d[0] <= ddr[bus_req.addr[9:0]];
    if (bus_req.valid && bus_ready && bus_req.we) ddr[bus_req.addr[9:0]] <= bus_req.wdata;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_load(input int addr, input int dst, input int len, input bit wgt);
    ld_instr = '0; ld_instr.op = OP_LOAD; ld_instr.ddr_addr = 32'(addr);
    ld_instr.dst = 16'(dst); ld_instr.len = 16'(len); ld_instr.func[F_WEIGHT] = wgt;
    @(negedge clk); ld_issue = 1; @(negedge clk); ld_issue = 0;
  endtask

  task automatic do_save(input int addr, input int src, input int len);
    sv_instr = '0; sv_instr.op = OP_SAVE; sv_instr.ddr_addr = 32'(addr);
    sv_instr.src = 16'(src); sv_instr.len = 16'(len);
    @(negedge clk); sv_issue = 1; @(negedge clk); sv_issue = 0;
  endtask

  task automatic check_load(input int addr, input int dst, input int len, input bit wgt);
    for (int j = 0; j < len; j++) begin
      logic [WORD_W-1:0] exp, got;
      exp = ddr[(addr + j/2) % 1024][(j%2)*WORD_W +: WORD_W];
      got = wgt ? pool_w[(dst + j) % 4096] : pool_f[(dst + j) % 4096];
      checks++;
      if (got !== exp) begin failures++; $display("load word %0d: %h vs %h", j, got, exp); end
    end
  endtask

  initial begin
    int t0, t1;
    foreach (pipe_v[i]) pipe_v[i] = 0;
    foreach (ddr[i]) ddr[i] = {$urandom, $urandom, $urandom, $urandom};
    foreach (src_f[i]) src_f[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    // timed uncontended load: 16 beats
    rand_ready = 0;
    do_load(100, 0, 32, 0);
    t0 = $time;
    @(posedge clk iff ld_done); t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != 16 + LAT) begin
      failures++; $display("load latency %0d cycles", (t1 - t0) / 10);
    end
    check_load(100, 0, 32, 0);
    rand_ready = 1;
    // weight load with random stalls
    do_load(200, 40, 64, 1);
    @(posedge clk iff ld_done); @(negedge clk);
    check_load(200, 40, 64, 1);
    // save alone
    do_save(500, 8, 20);
    @(posedge clk iff sv_done); @(negedge clk);
    for (int b = 0; b < 10; b++) begin
      checks++;
      if (ddr[500+b] !== {src_f[8+2*b+1], src_f[8+2*b]}) begin failures++; $display("save beat %0d", b); end
    end
    // overlapping load and save
    fork
      do_load(300, 1000, 48, 0);
      do_save(700, 100, 48);
    join
    fork
      @(posedge clk iff ld_done);
      @(posedge clk iff sv_done);
    join
    @(negedge clk);
    check_load(300, 1000, 48, 0);
    for (int b = 0; b < 24; b++) begin
      checks++;
      if (ddr[700+b] !== {src_f[100+2*b+1], src_f[100+2*b]}) begin failures++; $display("save2 beat %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
