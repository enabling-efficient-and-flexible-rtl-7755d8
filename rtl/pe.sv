// pe: one processing element of the convolution module.
//
// A PE computes one output pixel. It has OCP parallel output-channel lanes; each lane
// multiplies the ICP input-channel activations of the pixel with that lane's ICP weights,
// sums the ICP products in an adder tree and adds the sum to its accumulator. So a PE does
// ICP*OCP multiply-accumulates per cycle, and PP PEs give the 2*PP*ICP*OCP ops/cycle of the
// paper's parallelism formula. The lane/adder-tree/accumulator structure follows the paper's
// PE figure; the widths (int8 operands, ACC_W accumulator) and the single register stage are
// this design's choice.
//
// Interface: with `en` high the accumulator takes this cycle's sum added to it, or, if
// `clr` is also high, the sum alone (start of a new output); with `en` low it holds. `acc` is registered:
// the sum of a cycle with `en` appears one clock later.
module pe
  import virt_pkg::*;
#(
  parameter int P_ICP   = ICP,
  parameter int P_OCP   = OCP,
  parameter int P_DW    = DATA_W,
  parameter int P_ACCW  = ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic                          clr,
  input  logic signed [P_DW-1:0]        act [P_ICP],
  input  logic signed [P_DW-1:0]        wgt [P_OCP][P_ICP],
  output logic signed [P_ACCW-1:0]      acc [P_OCP]
);

  logic signed [P_ACCW-1:0]   dot  [P_OCP];
  logic signed [2*P_DW-1:0]   prod [P_OCP][P_ICP];

  // ICP multipliers and an adder tree per output channel (written as a sum).
  always_comb begin
    for (int o = 0; o < P_OCP; o++) begin
      dot[o] = '0;
      for (int i = 0; i < P_ICP; i++) begin
        prod[o][i] = act[i] * wgt[o][i];
        dot[o]     = dot[o] + P_ACCW'(prod[o][i]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < P_OCP; o++) acc[o] <= '0;
    end else if (en) begin
      for (int o = 0; o < P_OCP; o++) acc[o] <= clr ? dot[o] : acc[o] + dot[o];
    end
  end

endmodule
