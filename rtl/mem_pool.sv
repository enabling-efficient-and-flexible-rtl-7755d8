// mem_pool: the on-chip memory pool of one small core.
//
// It holds PP feature banks and OCP weight banks. Every bank word is ICP bytes (64 bits at
// the default sizes): one pixel's worth of input channels in a feature bank, one output
// channel's ICP weights in a weight bank. A linear feature word index g lives in bank g mod PP
// at row g / PP, so PP consecutive words are the PP pixels the PEs work on together; a linear
// weight word index g lives in weight bank g mod OCP at row g / OCP.
//
// The paper names the memory pool and draws it as banks 0..P-1 on both sides of the PE
// array; the bank depths, the word layout and the port set are this design's choice. Ports:
//   LOAD  : two word writes per cycle (one 128-bit beat), feature or weight side
//   SAVE  : two feature word reads per cycle
//   CONV  : read of one row of all feature banks and one row of all weight banks, write of one
//           row of all feature banks
//   MISC  : read and write of one row of all feature banks
// Reads are combinational (distributed-RAM style); writes take effect at the clock edge. When
// two writers hit the same word in one cycle MISC wins over CONV, CONV over LOAD; the
// dependency scheduler is expected to keep them apart. Memory contents are not reset.
module mem_pool
  import virt_pkg::*;
#(
  parameter int P_PP      = PP,
  parameter int P_OCP     = OCP,
  parameter int P_W       = WORD_W,
  parameter int FEAT_ROWS = 1024,
  parameter int WGT_ROWS  = 1024
) (
  input  logic               clk,
  // LOAD writes
  input  logic               ld_we   [2],
  input  logic               ld_wgt,          // 1: weight banks, 0: feature banks
  input  logic [15:0]        ld_idx  [2],
  input  logic [P_W-1:0]     ld_wdata[2],
  // SAVE reads
  input  logic [15:0]        sv_idx  [2],
  output logic [P_W-1:0]     sv_rdata[2],
  // CONV
  input  logic [15:0]        cv_frow,
  output logic [P_W-1:0]     cv_feat [P_PP],
  input  logic [15:0]        cv_wrow,
  output logic [P_W-1:0]     cv_wgt  [P_OCP],
  input  logic               cv_we,
  input  logic [15:0]        cv_orow,
  input  logic [P_W-1:0]     cv_wdata[P_PP],
  // MISC
  input  logic [15:0]        ms_frow,
  output logic [P_W-1:0]     ms_feat [P_PP],
  input  logic               ms_we,
  input  logic [15:0]        ms_orow,
  input  logic [P_W-1:0]     ms_wdata[P_PP]
);

  localparam int FB = $clog2(P_PP);
  localparam int WB = $clog2(P_OCP);
  localparam int FRW = $clog2(FEAT_ROWS);
  localparam int WRW = $clog2(WGT_ROWS);

  logic [P_W-1:0] sv_bank [P_PP][2];   // SAVE-port read data of every feature bank

  // Feature bank b: write ports {LOAD word 0, LOAD word 1, CONV, MISC},
  //                 read ports  {SAVE word 0, SAVE word 1, CONV, MISC}.
  for (genvar b = 0; b < P_PP; b++) begin : g_feat
    logic           we    [4];
    logic [FRW-1:0] waddr [4];
    logic [P_W-1:0] wdata [4];
    logic [FRW-1:0] raddr [4];
    logic [P_W-1:0] rdata [4];

    always_comb begin
      for (int k = 0; k < 2; k++) begin
        we[k]    = ld_we[k] && !ld_wgt && (int'(ld_idx[k][FB-1:0]) == b);
        waddr[k] = ld_idx[k][FB +: FRW];
        wdata[k] = ld_wdata[k];
        raddr[k] = sv_idx[k][FB +: FRW];
      end
      we[2] = cv_we; waddr[2] = cv_orow[FRW-1:0]; wdata[2] = cv_wdata[b];
      we[3] = ms_we; waddr[3] = ms_orow[FRW-1:0]; wdata[3] = ms_wdata[b];
      raddr[2] = cv_frow[FRW-1:0];
      raddr[3] = ms_frow[FRW-1:0];
    end

    mem_bank #(.W(P_W), .ROWS(FEAT_ROWS), .NW(4), .NR(4)) u_bank (
      .clk, .we, .waddr, .wdata, .raddr, .rdata);

    assign sv_bank[b][0] = rdata[0];
    assign sv_bank[b][1] = rdata[1];
    assign cv_feat[b] = rdata[2];
    assign ms_feat[b] = rdata[3];
  end

  // SAVE reads pick the addressed bank.
  always_comb begin
    for (int k = 0; k < 2; k++) begin
      sv_rdata[k] = '0;
      for (int b = 0; b < P_PP; b++)
        if (int'(sv_idx[k][FB-1:0]) == b) sv_rdata[k] = sv_bank[b][k];
    end
  end

  // Weight bank o: write ports {LOAD word 0, LOAD word 1}, one CONV read port.
  for (genvar o = 0; o < P_OCP; o++) begin : g_wgt
    logic           we    [2];
    logic [WRW-1:0] waddr [2];
    logic [P_W-1:0] wdata [2];
    logic [WRW-1:0] raddr [1];
    logic [P_W-1:0] rdata [1];

    always_comb begin
      for (int k = 0; k < 2; k++) begin
        we[k]    = ld_we[k] && ld_wgt && (int'(ld_idx[k][WB-1:0]) == o);
        waddr[k] = ld_idx[k][WB +: WRW];
        wdata[k] = ld_wdata[k];
      end
      raddr[0] = cv_wrow[WRW-1:0];
    end

    mem_bank #(.W(P_W), .ROWS(WGT_ROWS), .NW(2), .NR(1)) u_bank (
      .clk, .we, .waddr, .wdata, .raddr, .rdata);

    assign cv_wgt[o] = rdata[0];
  end

endmodule
