// mpmc: multi-port memory controller front end for one DDR bank.
//
// NPORTS 128-bit ports (the small cores assigned to this bank, plus on bank 0 the
// instruction fetch of the first level IDM) share the bank's single 512-bit data port. The
// paper requires that the total width of the user ports not exceed the DDR port (4 x 128 =
// 512) and that an arbiter keep users from disturbing each other; it leaves the arbiter to
// existing interconnect IP. This design uses a round-robin arbiter that grants one request
// per cycle, so a port that always has work gets at least 1/NPORTS of the cycles whatever
// the others do. A 128-bit request addresses one lane of a 512-bit DDR word: DDR word =
// addr / 4, lane = addr mod 4; writes drive only that lane's byte strobes. The request tag
// carries the port and lane, and read responses, which the DDR side returns with the tag,
// are routed back to their port and lane. Responses to a port come back in request order if
// the DDR side keeps order, which the cores rely on.
//
// Timing: a port's request is accepted (port_ready high) in the cycle it wins arbitration and
// the DDR side is ready; the response path is combinational.
module mpmc
  import virt_pkg::*;
#(
  parameter int NPORTS = CORES_PER_DDR
) (
  input  logic      clk,
  input  logic      rst_n,
  input  bus_req_t  port_req   [NPORTS],
  output logic      port_ready [NPORTS],
  output bus_rsp_t  port_rsp   [NPORTS],
  output ddr_req_t  ddr_req,
  input  logic      ddr_ready,
  input  ddr_rsp_t  ddr_rsp
);

  localparam int PW    = (NPORTS > 1) ? $clog2(NPORTS) : 1;
  localparam int LANES = DDR_W / BUS_W;

  logic [PW-1:0] last, pick;
  logic          found;
  logic [1:0]    lane;

  always_comb begin
    found = 1'b0; pick = '0;
    for (int i = 1; i <= NPORTS; i++) begin
      int k;
      k = (int'(last) + i) % NPORTS;
      if (!found && port_req[k].valid) begin found = 1'b1; pick = PW'(k); end
    end
    ddr_req = '0;
    lane    = port_req[pick].addr[1:0];
    if (found) begin
      ddr_req.valid   = 1'b1;
      ddr_req.we      = port_req[pick].we;
      ddr_req.addr    = {2'b00, port_req[pick].addr[31:2]};
      ddr_req.wdata   = {LANES{port_req[pick].wdata}};
      ddr_req.wstrb   = (DDR_W/8)'({(BUS_W/8){1'b1}}) << (int'(lane) * (BUS_W/8));
      ddr_req.tag     = TAG_W'({pick, lane});
    end
    for (int k = 0; k < NPORTS; k++) begin
      port_ready[k]     = found && (pick == PW'(k)) && ddr_ready;
      port_rsp[k].valid = ddr_rsp.valid && (ddr_rsp.tag[2 +: PW] == PW'(k));
      port_rsp[k].rdata = ddr_rsp.rdata[int'(ddr_rsp.tag[1:0]) * BUS_W +: BUS_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     last <= PW'(NPORTS - 1);
    else if (found && ddr_ready)    last <= pick;
  end

endmodule
