// tb_instr_mem: fetches a random instruction file (random core indices) from a 128-bit
// memory model with random ready and 5-cycle latency, then reads every region back and
// checks that each core's region holds exactly its instructions in file order. A second
// fetch with a clear mask must replace only the masked cores' regions and append to none of
// the others' except by core index; an over-long file must raise overflow.
module tb_instr_mem;
  import virt_pkg::*;
  localparam int NC = NUM_CORES, REGION = 16, LAT = 5;
  logic clk = 0, rst_n = 0, load = 0, busy, overflow;
  logic [31:0] addr; logic [15:0] count_in; logic [NC-1:0] clear_mask;
  bus_req_t bus_req; logic bus_ready; bus_rsp_t bus_rsp;
  logic [3:0] rd_core; logic [3:0] rd_idx; instr_t rd_data;
  logic [4:0] count [NC];
  logic [BUS_W-1:0] mem [1024];
  logic [BUS_W-1:0] pd [LAT]; logic pv [LAT];
  instr_t exp_q [NC][$];
  int checks = 0, failures = 0;

  instr_mem #(.N_CORES(NC), .REGION(REGION)) dut (.*);
  always #5 clk = ~clk;
  logic rdy_q = 1;
  always @(negedge clk) rdy_q <= ($urandom_range(0, 3) != 0);
  assign bus_ready = rdy_q;
  assign bus_rsp.valid = pv[LAT-1];
  assign bus_rsp.rdata = pd[LAT-1];
  always_ff @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= bus_req.valid && bus_ready && rst_n;
    pd[0] <= mem[bus_req.addr[9:0]];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fetch(int a, int n, int mask);
    @(negedge clk); load = 1; addr = 32'(a); count_in = 16'(n); clear_mask = 16'(mask);
    @(negedge clk); load = 0;
    @(negedge clk iff !busy);
  endtask

  task automatic check_all();
    for (int k = 0; k < NC; k++) begin
      checks++;
      if (count[k] != 5'(exp_q[k].size())) begin failures++; $display("core %0d count %0d exp %0d", k, count[k], exp_q[k].size()); end
      for (int i = 0; i < exp_q[k].size(); i++) begin
        rd_core = 4'(k); rd_idx = 4'(i); #1;
        checks++;
        if (rd_data !== exp_q[k][i]) begin failures++; $display("core %0d entry %0d", k, i); end
      end
    end
  endtask

  initial begin
    foreach (pv[i]) pv[i] = 0;
    rd_core = 0; rd_idx = 0; addr = 0; count_in = 0; clear_mask = 0;
    for (int a = 0; a < 1024; a++) begin
      instr_t i;
      i = instr_t'({$urandom, $urandom, $urandom, $urandom});
      mem[a] = BUS_W'(i);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // file 1: 100 instructions at address 10
    for (int a = 10; a < 110; a++) begin instr_t i; i = instr_t'(mem[a]); exp_q[i.core].push_back(i); end
    fetch(10, 100, 'hFFFF);
    check_all();
    checks++; if (overflow) begin failures++; $display("unexpected overflow"); end
    // file 2: 40 instructions, clear cores 0-7 only
    for (int k = 0; k < 8; k++) exp_q[k].delete();
    for (int a = 300; a < 340; a++) begin
      instr_t i; i = instr_t'(mem[a]);
      if (exp_q[i.core].size() < REGION) exp_q[i.core].push_back(i);
    end
    fetch(300, 40, 'h00FF);
    check_all();
    // file 3: 16 copies aimed at core 3 plus its existing entries overflow its region
    for (int a = 500; a < 520; a++) begin instr_t i; i = instr_t'(mem[a]); i.core = 3; mem[a] = BUS_W'(i); end
    fetch(500, 20, 'h0000);
    checks++; if (!overflow) begin failures++; $display("overflow not flagged"); end
    checks++; if (count[3] != 5'(REGION)) begin failures++; $display("core 3 count %0d", count[3]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
