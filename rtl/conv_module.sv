// conv_module: the CONV module of one small core (register file, conv controller, cross
// connect and PP processing elements).
//
// Convinit writes the register file: requantization shift aux[4:0], ReLU enable aux[5] and
// the cross-connect rotation aux[15:8]. A Conv instruction computes PP output pixels x OCP
// output channels: for k = 0 .. len-1 it reads feature row src+k of all PP banks (routed to
// the PEs by the cross connect) and weight row aux+k of all OCP weight banks, and every PE
// accumulates ICP x OCP products. The compiler lays the kernel window and the input-channel
// groups of each output pixel out as these len rows, so len = Kh*Kw*Cin/ICP, which is the
// per-instruction term of the paper's latency model t = Cin*Cout/(ICP*OCP)*Wout*Kh*Kw*T.
// After the last step each accumulator is shifted right arithmetically by `shift`, clamped at
// zero if ReLU is on, saturated to int8 and the PP result words are written to row dst of the
// feature banks.
//
// Timing: an instruction is accepted on `issue` while `busy` is low; a Conv with len = K
// reads for K cycles, then writes its result in the next cycle with `done` high in that
// same cycle (the (K+1)-th cycle after the accepting edge); `busy` falls after it. Convinit
// raises `done` in the first cycle after it is accepted. The paper gives the PE organization and the Conv/Convinit split; the data layout,
// the requantization and the controller are this design's own.
module conv_module
  import virt_pkg::*;
#(
  parameter int P_PP  = PP,
  parameter int P_ICP = ICP,
  parameter int P_OCP = OCP
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               issue,
  input  instr_t             instr,
  output logic               busy,
  output logic               done,
  // memory pool
  output logic [15:0]        frow,
  input  logic [WORD_W-1:0]  feat  [P_PP],
  output logic [15:0]        wrow,
  input  logic [WORD_W-1:0]  wgt   [P_OCP],
  output logic               we,
  output logic [15:0]        orow,
  output logic [WORD_W-1:0]  wdata [P_PP]
);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_WRITE, S_INIT} state_e;
  state_e state;

  // register file (Convinit)
  logic [4:0]               r_shift;
  logic                     r_relu;
  logic [$clog2(P_PP)-1:0]  r_rot;

  logic [15:0] src_q, wbase_q, dst_q, len_q, step;

  logic [WORD_W-1:0]        pe_word [P_PP];
  logic signed [DATA_W-1:0] act     [P_PP][P_ICP];
  logic signed [DATA_W-1:0] w       [P_OCP][P_ICP];
  logic signed [ACC_W-1:0]  acc     [P_PP][P_OCP];
  logic                     pe_en, pe_clr;

  assign busy = (state != S_IDLE);
  assign done = (state == S_WRITE) || (state == S_INIT);
  assign frow = src_q + step;
  assign wrow = wbase_q + step;
  assign pe_en  = (state == S_ACC);
  assign pe_clr = (step == 16'd0);

  cross_connect #(.P_N(P_PP), .P_W(WORD_W)) u_xc (.rot(r_rot), .bank_in(feat), .pe_out(pe_word));

  always_comb begin
    for (int o = 0; o < P_OCP; o++)
      for (int i = 0; i < P_ICP; i++) w[o][i] = wgt[o][i*DATA_W +: DATA_W];
    for (int p = 0; p < P_PP; p++)
      for (int i = 0; i < P_ICP; i++) act[p][i] = pe_word[p][i*DATA_W +: DATA_W];
  end

  for (genvar p = 0; p < P_PP; p++) begin : g_pe
    pe #(.P_ICP(P_ICP), .P_OCP(P_OCP), .P_DW(DATA_W), .P_ACCW(ACC_W)) u_pe (
      .clk, .rst_n, .en(pe_en), .clr(pe_clr), .act(act[p]), .wgt(w), .acc(acc[p]));
  end

  // requantization to int8
  function automatic logic [DATA_W-1:0] requant(input logic signed [ACC_W-1:0] a,
                                                input logic [4:0] sh, input logic relu);
    logic signed [ACC_W-1:0] y;
    y = a >>> sh;
    if (relu && y < 0) y = '0;
    if (y > 127)       return 8'sd127;
    else if (y < -128) return -8'sd128;
    else               return y[DATA_W-1:0];
  endfunction

  always_comb begin
    we   = (state == S_WRITE);
    orow = dst_q;
    for (int p = 0; p < P_PP; p++)
      for (int o = 0; o < P_OCP; o++)
        wdata[p][o*DATA_W +: DATA_W] = requant(acc[p][o], r_shift, r_relu);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r_shift <= '0; r_relu <= 1'b0; r_rot <= '0;
      src_q <= '0; wbase_q <= '0; dst_q <= '0; len_q <= '0; step <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (issue) begin
          step <= '0;
          if (instr.op == OP_CONVINIT) begin
            r_shift <= instr.aux[4:0];
            r_relu  <= instr.aux[5];
            r_rot   <= instr.aux[8 +: $clog2(P_PP)];
            state   <= S_INIT;
          end else begin
            src_q   <= instr.src;
            wbase_q <= instr.aux;
            dst_q   <= instr.dst;
            len_q   <= instr.len;
            state   <= (instr.len == 16'd0) ? S_INIT : S_ACC;
          end
        end
        S_ACC: begin
          step <= step + 16'd1;
          if (step + 16'd1 == len_q) state <= S_WRITE;
        end
        S_WRITE: state <= S_IDLE;
        S_INIT:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   issue && !busy |-> (instr.op == OP_CONV || instr.op == OP_CONVINIT));

endmodule
