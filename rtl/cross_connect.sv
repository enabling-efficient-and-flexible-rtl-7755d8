// cross_connect: routes the PP feature-memory banks to the PP PEs of the convolution module.
//
// The paper's convolution-module figure draws a cross-connection network between the input
// memory banks and the PEs, without saying what routings it supports. This design uses the
// simplest network that lets one bank feed any PE: a rotation, PE p reads bank (p + rot) mod
// PP. The rotation amount comes from the Convinit register file. Purely combinational.
module cross_connect
  import virt_pkg::*;
#(
  parameter int P_N = PP,
  parameter int P_W = WORD_W
) (
  input  logic [$clog2(P_N)-1:0]  rot,
  input  logic [P_W-1:0]          bank_in [P_N],
  output logic [P_W-1:0]          pe_out  [P_N]
);

  always_comb begin
    for (int p = 0; p < P_N; p++)
      pe_out[p] = bank_in[(p + int'(rot)) % P_N];
  end

endmodule
