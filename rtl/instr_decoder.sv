// instr_decoder: the instruction decoder of the first level IDM.
//
// It sends instructions to the second level IDM of the core named by each instruction's core
// index. Every core has a read pointer into its region of the instruction memory; `start[k]`
// rewinds it and activates the core, `halt[k]` deactivates it. Each cycle a round-robin
// arbiter picks one active core that has an instruction left and whose instruction FIFO has
// room, reads the entry and pushes it to that core. One instruction per cycle in total is
// enough because every instruction keeps a core busy for many cycles. The paper gives the
// routing by core index; the pointers and the arbitration are this design's own.
module instr_decoder
  import virt_pkg::*;
#(
  parameter int N_CORES = NUM_CORES,
  parameter int REGION  = 256,
  localparam int RW     = $clog2(REGION),
  localparam int CW     = $clog2(N_CORES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_CORES-1:0] start,
  input  logic [N_CORES-1:0] halt,
  input  logic [RW:0]        count [N_CORES],
  output logic [CW-1:0]      rd_core,
  output logic [RW-1:0]      rd_idx,
  input  instr_t             rd_data,
  output logic [N_CORES-1:0] out_valid,
  output instr_t             out_instr,
  input  logic [N_CORES-1:0] out_ready
);

  logic [RW:0]        ptr [N_CORES];
  logic [N_CORES-1:0] active, want;
  logic [CW-1:0]      last, pick;
  logic               found;

  always_comb begin
    for (int k = 0; k < N_CORES; k++)
      want[k] = active[k] && (ptr[k] != count[k]) && out_ready[k] && !start[k] && !halt[k];
    // round robin: first requester after the last one served
    found = 1'b0; pick = '0;
    for (int i = 1; i <= N_CORES; i++) begin
      int k;
      k = (int'(last) + i) % N_CORES;
      if (!found && want[k]) begin found = 1'b1; pick = CW'(k); end
    end
    rd_core   = pick;
    rd_idx    = ptr[pick][RW-1:0];
    out_instr = rd_data;
    out_valid = '0;
    if (found) out_valid[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0; last <= '0;
      for (int k = 0; k < N_CORES; k++) ptr[k] <= '0;
    end else begin
      if (found) begin
        ptr[pick] <= ptr[pick] + 1'b1;
        last      <= pick;
      end
      for (int k = 0; k < N_CORES; k++) begin
        if (halt[k]) active[k] <= 1'b0;
        if (start[k]) begin active[k] <= 1'b1; ptr[k] <= '0; end
      end
    end
  end

  // an instruction always goes to the core its core index names
  assert property (@(posedge clk) disable iff (!rst_n)
                   found |-> (rd_data.core[CW-1:0] == pick));

endmodule
