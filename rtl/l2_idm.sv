// l2_idm: the second level instruction dispatch module, the module-level scheduler inside
// one small core.
//
// Instructions from the first level arrive in an instruction FIFO. The dependency scheduler
// looks at the oldest one and issues it to its execution module (LOAD, SAVE, CONV for
// Conv/Convinit, MISC for Pool/Poolinit) when that module is free and its dependencies are
// met. Dependencies use tokens: an instruction lists in dep_wait the modules it must hear
// from and in dep_signal the modules it will notify. A counter per (producer, consumer) pair
// is incremented when an instruction of the producer completes with the consumer in its
// dep_signal, and decremented when an instruction of the consumer with the producer in its
// dep_wait is issued; issue waits until every counter it needs is non-zero. Issue is in
// order, one instruction per cycle, and the modules run concurrently.
//
// The system synchronization controller handles a System instruction once every module is
// idle: with the sync bit set it raises sync_local (and reports the instruction's layer on
// sync_layer) and suspends dispatch until sync_global arrives, then moves on to the next
// layer; without it the task is finished, `running` falls and task_done pulses.
// The context-switch module restarts the core: `start` empties the FIFO, clears the tokens
// and runs from start_layer, dropping every instruction whose layer field is below it
// (`skipped` pulses for each); `halt` stops the core and empties the FIFO.
//
// The paper gives the four sub-blocks and the sync_local/sync_global behaviour; the token
// scheme, the in-order issue and the skip-by-layer restart are this design's reading of
// "dependency information" and "restarts the computation based on the context information".
module l2_idm
  import virt_pkg::*;
#(
  parameter int FIFO_DEPTH = 16,
  parameter int TOK_W      = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the first level IDM
  input  logic                  in_valid,
  input  instr_t                in_instr,
  output logic                  in_ready,
  input  logic                  start,
  input  logic [7:0]            start_layer,
  input  logic                  halt,
  output logic                  running,
  output logic                  task_done,
  output logic                  skipped,
  // multi-core synchronization
  output logic                  sync_local,
  output logic [7:0]            sync_layer,
  input  logic                  sync_global,
  // execution modules
  output instr_t                issue_instr,
  output logic [NUM_UNITS-1:0]  unit_issue,
  input  logic [NUM_UNITS-1:0]  unit_busy,
  input  logic [NUM_UNITS-1:0]  unit_done
);

  logic    fifo_full, fifo_empty, fifo_pop, fifo_flush;
  instr_t  head;

  instr_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .flush(fifo_flush), .push(in_valid), .din(in_instr), .full(fifo_full),
    .pop(fifo_pop), .dout(head), .empty(fifo_empty));

  assign in_ready    = !fifo_full;
  assign fifo_flush  = start || halt;
  assign issue_instr = head;

  logic [TOK_W-1:0]     tok    [NUM_UNITS][NUM_UNITS];   // [producer][consumer]
  logic [NUM_UNITS-1:0] sig_q  [NUM_UNITS];              // dep_signal of in-flight instr
  logic [7:0]           start_layer_q;
  logic                 waiting_sync;

  function automatic int unsigned unit_of(opcode_e op);
    unique case (op)
      OP_LOAD:              return U_LOAD;
      OP_SAVE:              return U_SAVE;
      OP_CONV, OP_CONVINIT: return U_CONV;
      default:              return U_MISC;    // Pool, Poolinit
    endcase
  endfunction

  logic         head_ok, is_sys, do_skip, deps_ok, all_idle, do_issue, sys_fire;
  int unsigned  m;

  always_comb begin
    head_ok  = running && !fifo_empty && !waiting_sync;
    is_sys   = (head.op == OP_SYSTEM);
    do_skip  = head_ok && (head.layer < start_layer_q);
    m        = unit_of(head.op);
    deps_ok  = 1'b1;
    for (int s = 0; s < NUM_UNITS; s++)
      if (head.dep_wait[s] && tok[s][m] == '0) deps_ok = 1'b0;
    all_idle = (unit_busy == '0) && (unit_done == '0);
    do_issue = head_ok && !do_skip && !is_sys && !unit_busy[m] && deps_ok;
    sys_fire = head_ok && !do_skip && is_sys && all_idle;
    unit_issue = '0;
    if (do_issue) unit_issue[m] = 1'b1;
    fifo_pop = do_skip || do_issue || (sys_fire && !head.func[F_SYNC]) ||
               (waiting_sync && sync_global);
  end

  assign skipped = do_skip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; task_done <= 1'b0; waiting_sync <= 1'b0; sync_local <= 1'b0;
      sync_layer <= '0; start_layer_q <= '0;
      for (int s = 0; s < NUM_UNITS; s++) begin
        sig_q[s] <= '0;
        for (int d = 0; d < NUM_UNITS; d++) tok[s][d] <= '0;
      end
    end else begin
      task_done <= 1'b0;
      // token counters: +1 on producer completion, -1 on consumer issue
      for (int s = 0; s < NUM_UNITS; s++)
        for (int d = 0; d < NUM_UNITS; d++)
          tok[s][d] <= tok[s][d] + TOK_W'(unit_done[s] && sig_q[s][d])
                                 - TOK_W'(do_issue && (m == d) && head.dep_wait[s]);
      if (do_issue) sig_q[m] <= head.dep_signal;

      if (sys_fire) begin
        if (head.func[F_SYNC]) begin
          waiting_sync <= 1'b1;
          sync_local   <= 1'b1;
          sync_layer   <= head.layer;
        end else begin
          running   <= 1'b0;
          task_done <= 1'b1;
        end
      end
      if (waiting_sync && sync_global) begin
        waiting_sync <= 1'b0;
        sync_local   <= 1'b0;
      end

      if (halt) begin
        running <= 1'b0; waiting_sync <= 1'b0; sync_local <= 1'b0;
      end
      if (start) begin
        running       <= 1'b1;
        waiting_sync  <= 1'b0;
        sync_local    <= 1'b0;
        start_layer_q <= start_layer;
        for (int s = 0; s < NUM_UNITS; s++)
          for (int d = 0; d < NUM_UNITS; d++) tok[s][d] <= '0;
      end
    end
  end

  // a token counter must never wrap: the compiler keeps at most 2**TOK_W-1 outstanding
  for (genvar s = 0; s < NUM_UNITS; s++) begin : g_tok_chk
    for (genvar d = 0; d < NUM_UNITS; d++) begin : g_d
      assert property (@(posedge clk) disable iff (!rst_n)
        !(unit_done[s] && sig_q[s][d] && tok[s][d] == '1));
    end
  end

endmodule
