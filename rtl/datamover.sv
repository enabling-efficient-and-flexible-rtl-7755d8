// datamover: the LOAD and SAVE modules of one small core.
//
// LOAD copies `len` buffer words (64 bits each) from DDR, starting at 128-bit word
// `ddr_addr`, into the memory pool from linear word index `dst`; the function bit F_WEIGHT
// selects the weight banks instead of the feature banks. SAVE copies `len` feature words from
// index `src` to DDR. One 128-bit beat carries two buffer words, low half first, so `len` is
// expected to be even. The paper gives these modules' function (data movement between DDR and
// the memory pool, one 128-bit port per small core); the beat format and the engines below
// are this design's own.
//
// Both engines share the core's single memory port. Read requests are issued back to back
// and responses, which return in order, are written to the pool as they arrive; SAVE reads
// the pool combinationally and posts one write request per beat. When both engines request
// in the same cycle the port alternates between them. Each engine accepts an instruction on
// `*_issue` while its `*_busy` is low and pulses `*_done` in the cycle its last beat completes
// (the last read response written, or the last write request accepted).
module datamover
  import virt_pkg::*;
#(
  parameter int P_W = WORD_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // LOAD instruction
  input  logic              ld_issue,
  input  instr_t            ld_instr,
  output logic              ld_busy,
  output logic              ld_done,
  // SAVE instruction
  input  logic              sv_issue,
  input  instr_t            sv_instr,
  output logic              sv_busy,
  output logic              sv_done,
  // memory pool
  output logic              mp_ld_we    [2],
  output logic              mp_ld_wgt,
  output logic [15:0]       mp_ld_idx   [2],
  output logic [P_W-1:0]    mp_ld_wdata [2],
  output logic [15:0]       mp_sv_idx   [2],
  input  logic [P_W-1:0]    mp_sv_rdata [2],
  // core memory port
  output bus_req_t          bus_req,
  input  logic              bus_ready,
  input  bus_rsp_t          bus_rsp
);

  // ---------------- LOAD ----------------
  logic [31:0] ld_addr;
  logic [15:0] ld_dst, ld_beats, ld_issued, ld_recv;
  logic        ld_wgt_q;

  // ---------------- SAVE ----------------
  logic [31:0] sv_addr;
  logic [15:0] sv_src, sv_beats, sv_issued;

  logic ld_want, sv_want, grant_sv, last_sv;

  assign ld_want  = ld_busy && (ld_issued != ld_beats);
  assign sv_want  = sv_busy && (sv_issued != sv_beats);
  // alternate on contention; otherwise whoever wants the port gets it
  assign grant_sv = sv_want && (!ld_want || !last_sv);

  assign mp_sv_idx[0] = sv_src + {sv_issued[14:0], 1'b0};
  assign mp_sv_idx[1] = sv_src + {sv_issued[14:0], 1'b1};

  always_comb begin
    bus_req = '0;
    if (grant_sv) begin
      bus_req.valid = 1'b1;
      bus_req.we    = 1'b1;
      bus_req.addr  = sv_addr + 32'(sv_issued);
      bus_req.wdata = {mp_sv_rdata[1], mp_sv_rdata[0]};
    end else if (ld_want) begin
      bus_req.valid = 1'b1;
      bus_req.we    = 1'b0;
      bus_req.addr  = ld_addr + 32'(ld_issued);
    end
  end

  // read responses go straight into the pool
  assign mp_ld_wgt      = ld_wgt_q;
  assign mp_ld_we[0]    = bus_rsp.valid && ld_busy;
  assign mp_ld_we[1]    = bus_rsp.valid && ld_busy;
  assign mp_ld_idx[0]   = ld_dst + {ld_recv[14:0], 1'b0};
  assign mp_ld_idx[1]   = ld_dst + {ld_recv[14:0], 1'b1};
  assign mp_ld_wdata[0] = bus_rsp.rdata[P_W-1:0];
  assign mp_ld_wdata[1] = bus_rsp.rdata[2*P_W-1:P_W];

  logic ld_last_rsp, sv_last_req;
  assign ld_last_rsp = ld_busy && bus_rsp.valid && (ld_recv + 16'd1 == ld_beats);
  assign sv_last_req = grant_sv && bus_ready && (sv_issued + 16'd1 == sv_beats);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_busy <= 1'b0; ld_done <= 1'b0; ld_addr <= '0; ld_dst <= '0; ld_beats <= '0;
      ld_issued <= '0; ld_recv <= '0; ld_wgt_q <= 1'b0;
      sv_busy <= 1'b0; sv_done <= 1'b0; sv_addr <= '0; sv_src <= '0; sv_beats <= '0;
      sv_issued <= '0; last_sv <= 1'b0;
    end else begin
      ld_done <= 1'b0;
      sv_done <= 1'b0;
      // LOAD
      if (ld_issue && !ld_busy) begin
        ld_busy   <= (ld_instr.len[15:1] != 0);
        ld_done   <= (ld_instr.len[15:1] == 0);
        ld_addr   <= ld_instr.ddr_addr;
        ld_dst    <= ld_instr.dst;
        ld_beats  <= {1'b0, ld_instr.len[15:1]};
        ld_wgt_q  <= ld_instr.func[F_WEIGHT];
        ld_issued <= '0;
        ld_recv   <= '0;
      end else if (ld_busy) begin
        if (!grant_sv && ld_want && bus_ready) ld_issued <= ld_issued + 16'd1;
        if (bus_rsp.valid) ld_recv <= ld_recv + 16'd1;
        if (ld_last_rsp) begin ld_busy <= 1'b0; ld_done <= 1'b1; end
      end
      // SAVE
      if (sv_issue && !sv_busy) begin
        sv_busy   <= (sv_instr.len[15:1] != 0);
        sv_done   <= (sv_instr.len[15:1] == 0);
        sv_addr   <= sv_instr.ddr_addr;
        sv_src    <= sv_instr.src;
        sv_beats  <= {1'b0, sv_instr.len[15:1]};
        sv_issued <= '0;
      end else if (sv_busy) begin
        if (grant_sv && bus_ready) sv_issued <= sv_issued + 16'd1;
        if (sv_last_req) begin sv_busy <= 1'b0; sv_done <= 1'b1; end
      end
      if (bus_req.valid && bus_ready) last_sv <= grant_sv;
    end
  end

  // a read response only arrives for a LOAD that still waits for one
  assert property (@(posedge clk) disable iff (!rst_n)
                   bus_rsp.valid |-> (ld_busy && ld_recv < ld_issued));

endmodule
