// instr_mem: the on-chip instruction memory of the first level IDM.
//
// On a load command it fetches `count` 128-bit instructions from DDR, starting at 128-bit
// word `addr`, over its own memory port, and keeps them until the next reconfiguration. The
// memory is split into one region of REGION entries per core; each fetched instruction is
// appended to the region of the core named in its core-index field, so the decoder can feed
// every core from its own region without one core's backlog blocking another. Before the
// fetch, the regions of the cores set in `clear_mask` are emptied (their counts reset).
// Instructions that would overflow a region are dropped and flagged in `overflow`.
//
// The paper states that this memory fetches instructions from DDR and caches them until the
// next reconfiguration; the per-core regions and the command format are this design's own.
// Interface: `load` is accepted while `busy` is low; `busy` stays high until the last
// response is written. `rd_core`/`rd_idx` read one entry combinationally; `count[k]` is the
// number of valid entries of core k.
module instr_mem
  import virt_pkg::*;
#(
  parameter int N_CORES = NUM_CORES,
  parameter int REGION  = 256,
  localparam int RW     = $clog2(REGION),
  localparam int CW     = $clog2(N_CORES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [31:0]        addr,
  input  logic [15:0]        count_in,
  input  logic [N_CORES-1:0] clear_mask,
  output logic               busy,
  output logic               overflow,
  // DDR fetch port
  output bus_req_t           bus_req,
  input  logic               bus_ready,
  input  bus_rsp_t           bus_rsp,
  // read side
  input  logic [CW-1:0]      rd_core,
  input  logic [RW-1:0]      rd_idx,
  output instr_t             rd_data,
  output logic [RW:0]        count [N_CORES]
);

  instr_t      mem [N_CORES*REGION];
  logic [31:0] base_q;
  logic [15:0] total_q, issued_q, recv_q;
  instr_t      rsp_instr;
  logic [CW-1:0] wcore;

  assign rsp_instr = instr_t'(bus_rsp.rdata);
  assign wcore     = rsp_instr.core[CW-1:0];
  assign rd_data   = mem[{rd_core, rd_idx}];

  always_comb begin
    bus_req       = '0;
    bus_req.valid = busy && (issued_q != total_q);
    bus_req.addr  = base_q + 32'(issued_q);
  end

  always_ff @(posedge clk) begin
    if (busy && bus_rsp.valid && count[wcore] != (RW+1)'(REGION))
      mem[{wcore, count[wcore][RW-1:0]}] <= rsp_instr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; overflow <= 1'b0; base_q <= '0; total_q <= '0; issued_q <= '0; recv_q <= '0;
      for (int k = 0; k < N_CORES; k++) count[k] <= '0;
    end else if (!busy) begin
      if (load) begin
        busy     <= (count_in != 0);
        overflow <= 1'b0;
        base_q   <= addr;
        total_q  <= count_in;
        issued_q <= '0;
        recv_q   <= '0;
        for (int k = 0; k < N_CORES; k++) if (clear_mask[k]) count[k] <= '0;
      end
    end else begin
      if (bus_req.valid && bus_ready) issued_q <= issued_q + 16'd1;
      if (bus_rsp.valid) begin
        recv_q <= recv_q + 16'd1;
        if (count[wcore] != (RW+1)'(REGION)) count[wcore] <= count[wcore] + 1'b1;
        else                                 overflow <= 1'b1;
        if (recv_q + 16'd1 == total_q) busy <= 1'b0;
      end
    end
  end

endmodule
