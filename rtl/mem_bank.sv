// mem_bank: one bank of the on-chip memory pool, a ROWS x W array with NW write ports and
// NR read ports. Reads are combinational; writes happen at the clock edge, a higher-numbered
// write port winning over a lower one on the same row. Contents are not reset.
module mem_bank #(
  parameter int W    = 64,
  parameter int ROWS = 1024,
  parameter int NW   = 2,
  parameter int NR   = 2,
  localparam int AW  = $clog2(ROWS)
) (
  input  logic           clk,
  input  logic           we    [NW],
  input  logic [AW-1:0]  waddr [NW],
  input  logic [W-1:0]   wdata [NW],
  input  logic [AW-1:0]  raddr [NR],
  output logic [W-1:0]   rdata [NR]
);

  logic [W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    for (int k = 0; k < NW; k++)
      if (we[k]) mem[waddr[k]] <= wdata[k];
  end

  always_comb begin
    for (int k = 0; k < NR; k++) rdata[k] = mem[raddr[k]];
  end

endmodule
