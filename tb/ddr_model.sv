// ddr_model: behavioural model of one DDR bank behind its 512-bit user port, for simulation
// only. Requests are accepted when `ready` is high (randomly withheld one cycle in
// STALL_PCT percent of cycles); read data returns LAT cycles later, in request order, with
// the request's tag. Writes honour the byte strobes. Storage is sparse. The backdoor tasks
// read and write 128-bit words (address in 128-bit words) for testbench setup and checking.
module ddr_model
  import virt_pkg::*;
#(
  parameter int LAT       = 8,
  parameter int STALL_PCT = 10
) (
  input  logic     clk,
  input  ddr_req_t req,
  output logic     ready,
  output ddr_rsp_t rsp
);

  logic [DDR_W-1:0] mem [int];
  ddr_rsp_t pipe [LAT];
  logic rdy_q = 1'b1;

  assign ready = rdy_q;
  assign rsp   = pipe[LAT-1];

  initial for (int i = 0; i < LAT; i++) pipe[i] = '0;

  function automatic logic [DDR_W-1:0] rd(int a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk) begin
    ddr_rsp_t r;
    r = '0;
    if (req.valid && ready) begin
      if (req.we) begin
        logic [DDR_W-1:0] w;
        w = rd(int'(req.addr));
        for (int b = 0; b < DDR_W/8; b++) if (req.wstrb[b]) w[b*8 +: 8] = req.wdata[b*8 +: 8];
        mem[int'(req.addr)] = w;
      end else begin
        r.valid = 1'b1; r.rdata = rd(int'(req.addr)); r.tag = req.tag;
      end
    end
    for (int i = LAT-1; i > 0; i--) pipe[i] <= pipe[i-1];
    pipe[0] <= r;
  end

  always @(negedge clk) rdy_q <= ($urandom_range(0, 99) >= STALL_PCT);

  task automatic write128(int a, logic [BUS_W-1:0] d);
    logic [DDR_W-1:0] w;
    w = rd(a / 4);
    w[(a % 4)*BUS_W +: BUS_W] = d;
    mem[a / 4] = w;
  endtask

  function automatic logic [BUS_W-1:0] read128(int a);
    logic [DDR_W-1:0] w;
    w = rd(a / 4);
    return w[(a % 4)*BUS_W +: BUS_W];
  endfunction

endmodule
