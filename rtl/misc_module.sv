// misc_module: the MISC (non-convolution) module of one small core, here pooling.
//
// Poolinit writes the register file: aux[0] selects max (0) or average (1) pooling and
// aux[12:8] is the right shift that turns the window sum into the average (the compiler sets
// it to log2 of the window size). A Pool instruction reads feature rows src .. src+len-1 of
// all PP banks and reduces them element-wise, per pixel and per channel byte, then writes the
// PP result words to row dst. The paper only says that MISC runs the non-convolution layers
// and that a Pool instruction produces one output line with all channels; the reduction
// engine and the encoding are this design's own.
//
// Timing: same as the CONV module. A Pool with len = K reads for K cycles and writes in the
// next one with `done` high (the (K+1)-th cycle after the accepting edge); Poolinit raises
// `done` in the first cycle after it is accepted.
module misc_module
  import virt_pkg::*;
#(
  parameter int P_PP = PP,
  parameter int P_CH = ICP
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
  output logic               we,
  output logic [15:0]        orow,
  output logic [WORD_W-1:0]  wdata [P_PP]
);

  localparam int SUM_W = 24;

  typedef enum logic [1:0] {S_IDLE, S_RED, S_WRITE, S_INIT} state_e;
  state_e state;

  logic       r_avg;
  logic [4:0] r_shift;
  logic [15:0] src_q, dst_q, len_q, step;

  logic signed [SUM_W-1:0] red [P_PP][P_CH];

  assign busy = (state != S_IDLE);
  assign done = (state == S_WRITE) || (state == S_INIT);
  assign frow = src_q + step;
  assign we   = (state == S_WRITE);
  assign orow = dst_q;

  always_comb begin
    for (int p = 0; p < P_PP; p++)
      for (int c = 0; c < P_CH; c++) begin
        logic signed [SUM_W-1:0] r;
        r = r_avg ? (red[p][c] >>> r_shift) : red[p][c];
        wdata[p][c*DATA_W +: DATA_W] = r[DATA_W-1:0];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r_avg <= 1'b0; r_shift <= '0;
      src_q <= '0; dst_q <= '0; len_q <= '0; step <= '0;
      for (int p = 0; p < P_PP; p++) for (int c = 0; c < P_CH; c++) red[p][c] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (issue) begin
          step <= '0;
          if (instr.op == OP_POOLINIT) begin
            r_avg   <= instr.aux[0];
            r_shift <= instr.aux[12:8];
            state   <= S_INIT;
          end else begin
            src_q <= instr.src;
            dst_q <= instr.dst;
            len_q <= instr.len;
            state <= (instr.len == 16'd0) ? S_INIT : S_RED;
          end
        end
        S_RED: begin
          for (int p = 0; p < P_PP; p++)
            for (int c = 0; c < P_CH; c++) begin
              logic signed [SUM_W-1:0] x;
              x = SUM_W'($signed(feat[p][c*DATA_W +: DATA_W]));
              if (step == 16'd0)  red[p][c] <= x;
              else if (r_avg)     red[p][c] <= red[p][c] + x;
              else if (x > red[p][c]) red[p][c] <= x;
            end
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
                   issue && !busy |-> (instr.op == OP_POOL || instr.op == OP_POOLINIT));

endmodule
