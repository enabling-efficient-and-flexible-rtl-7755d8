// tb_mpmc: four 128-bit ports issue random reads and writes to their own address ranges
// through the memory controller into a behavioural DDR bank (random stalls, 8-cycle
// latency). Checks that every read returns the port's last written value (or the preloaded
// one) in request order, that writes touch only their 128-bit lane, that at least 1500 of 2000
// cycles carry a grant and every port gets 200+ reads answered, and that while all four
// ports request continuously each wins between 20% and 30% of the grants (round robin).
module tb_mpmc;
  import virt_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  bus_req_t port_req [NP];
  logic port_ready [NP];
  bus_rsp_t port_rsp [NP];
  ddr_req_t ddr_req; logic ddr_ready; ddr_rsp_t ddr_rsp;
  logic [BUS_W-1:0] ref_mem [NP][64];
  logic [BUS_W-1:0] exp_q [NP][$];
  int grants [NP];
  int reads [NP];
  int checks = 0, failures = 0;
  bit counting = 0, stop = 0;

  mpmc #(.NPORTS(NP)) dut (.*);
  ddr_model #(.LAT(8), .STALL_PCT(15)) u_ddr (.clk, .req(ddr_req), .ready(ddr_ready), .rsp(ddr_rsp));
  always #5 clk = ~clk;

  // port p owns 128-bit words p*64 .. p*64+63, interleaved with the other ports' words in
  // the same 512-bit DDR words: address = 4*i + p, so all four lanes are exercised
  function automatic logic [31:0] paddr(int p, int i); return 32'(4*i + p); endfunction

  for (genvar p = 0; p < NP; p++) begin : g_port
    always @(negedge clk) begin
      if (!rst_n) port_req[p] <= '0;
      else if (!port_req[p].valid || port_ready[p]) begin
        // the previous request (if any) was accepted at the last edge
        bus_req_t r;
        int i;
        i = $urandom_range(0, 63);
        r = '0;
        r.valid = stop ? 1'b0 : counting ? 1'b1 : ($urandom_range(0, 2) != 0);
        r.we    = ($urandom_range(0, 1) != 0);
        r.addr  = paddr(p, i);
        r.wdata = {$urandom, $urandom, $urandom, $urandom};
        port_req[p] <= r;
      end
    end
    always @(posedge clk) if (rst_n) begin
      if (port_req[p].valid && port_ready[p]) begin
        int i;
        i = int'(port_req[p].addr) / 4;
        grants[p]++;
        if (port_req[p].we) ref_mem[p][i] = port_req[p].wdata;
        else exp_q[p].push_back(ref_mem[p][i]);
      end
      if (port_rsp[p].valid) begin
        checks++;
        reads[p]++;
        if (exp_q[p].size() == 0) begin failures++; $display("port %0d: unexpected response", p); end
        else begin
          logic [BUS_W-1:0] e;
          e = exp_q[p].pop_front();
          if (port_rsp[p].rdata !== e) begin failures++; $display("port %0d: read data", p); end
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      grants[p] = 0; reads[p] = 0;
      for (int i = 0; i < 64; i++) begin
        ref_mem[p][i] = {$urandom, $urandom, $urandom, $urandom};
        u_ddr.write128(int'(paddr(p, i)), ref_mem[p][i]);
      end
    end
    repeat (20) @(posedge clk); rst_n = 1;
    repeat (3000) @(posedge clk);
    // fairness window: every port always requests
    counting = 1;
    repeat (5) @(posedge clk);
    for (int p = 0; p < NP; p++) grants[p] = 0;
    repeat (2000) @(posedge clk);
    begin
      int tot;
      tot = 0;
      for (int p = 0; p < NP; p++) tot += grants[p];
      // one grant per cycle unless the DDR stalls (15%)
      checks++;
      if (tot < 1500) begin failures++; $display("only %0d grants in 2000 cycles", tot); end
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (grants[p] * 100 < tot * 20 || grants[p] * 100 > tot * 30) begin
          failures++; $display("port %0d got %0d of %0d grants", p, grants[p], tot);
        end
      end
    end
    counting = 0;
    stop = 1;
    repeat (200) @(posedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (reads[p] < 200) begin failures++; $display("port %0d: only %0d reads answered", p, reads[p]); end
      checks++;
      if (exp_q[p].size() != 0) begin failures++; $display("port %0d: %0d reads unanswered", p, exp_q[p].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
