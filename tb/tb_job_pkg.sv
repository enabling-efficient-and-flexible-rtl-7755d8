// tb_job_pkg: test-program generator and reference model shared by the core and top-level
// testbenches.
//
// A conv_job is one small convolution layer run on one core: it loads 2*K rows of random
// int8 features and K rows of random weights from DDR, runs Convinit and two Conv
// instructions of K steps (output rows 100 and 101), a max Pool over those two rows (row
// 200) and saves the three result rows back to DDR, followed by a System instruction (with or
// without the sync bit). Instructions carry the token dependencies the dispatcher needs. The
// job also computes the expected result beats with the same arithmetic the hardware is
// specified to use (sum of products, arithmetic shift, optional ReLU, int8 saturation, PE p
// fed from bank (p + rot) mod PP, element-wise max).
package tb_job_pkg;
  import virt_pkg::*;

  function automatic instr_t mk(opcode_e op, int core, int layer, logic [3:0] w, logic [3:0] s);
    instr_t i;
    i = '0; i.op = op; i.core = 4'(core); i.layer = 8'(layer); i.dep_wait = w; i.dep_signal = s;
    return i;
  endfunction

  class conv_job;
    int core, layer, K, base, shift, relu, rot;
    bit sync;
    logic [WORD_W-1:0] feat [];
    logic [WORD_W-1:0] wgt  [];
    logic [WORD_W-1:0] res  [3*PP];     // conv row 100, conv row 101, pool row 200

    function new(int core, int layer, int K, int base, bit sync);
      this.core = core; this.layer = layer; this.K = K; this.base = base; this.sync = sync;
      shift = $urandom_range(3, 8); relu = $urandom_range(0, 1); rot = $urandom_range(0, PP-1);
      feat = new[2*PP*K];
      wgt  = new[OCP*K];
      foreach (feat[i]) feat[i] = {$urandom, $urandom};
      foreach (wgt[i])  wgt[i]  = {$urandom, $urandom};
      compute();
    endfunction

    function int feat_beats(); return PP*K;      endfunction
    function int wgt_base();   return base + PP*K; endfunction
    function int out_base();   return wgt_base() + OCP*K/2; endfunction
    function int n_beats();    return out_base() - base + 3*PP/2; endfunction

    // DDR image of the inputs, beat b at address base + b
    function logic [BUS_W-1:0] in_beat(int b);
      if (b < PP*K) return {feat[2*b+1], feat[2*b]};
      b -= PP*K;
      return {wgt[2*b+1], wgt[2*b]};
    endfunction

    function logic [BUS_W-1:0] out_beat(int b);
      return {res[2*b+1], res[2*b]};
    endfunction

    function void compute();
      for (int r = 0; r < 2; r++)
        for (int p = 0; p < PP; p++)
          for (int o = 0; o < OCP; o++) begin
            longint s, y;
            s = 0;
            for (int k = 0; k < K; k++)
              for (int i = 0; i < ICP; i++)
                s += longint'($signed(feat[(r*K + k)*PP + (p + rot) % PP][i*8 +: 8])) *
                     longint'($signed(wgt[k*OCP + o][i*8 +: 8]));
            y = s >>> shift;
            if (relu != 0 && y < 0) y = 0;
            if (y > 127) y = 127;
            if (y < -128) y = -128;
            res[r*PP + p][o*8 +: 8] = 8'(y);
          end
      for (int p = 0; p < PP; p++)
        for (int c = 0; c < ICP; c++) begin
          logic signed [7:0] a, b;
          a = $signed(res[p][c*8 +: 8]); b = $signed(res[PP + p][c*8 +: 8]);
          res[2*PP + p][c*8 +: 8] = (a > b) ? a : b;
        end
    endfunction

    function void gen_program(ref instr_t q[$]);
      instr_t i;
      i = mk(OP_LOAD, core, layer, 4'b0000, 4'b0000);                 // features, no token
      i.ddr_addr = 32'(base); i.dst = 0; i.len = 16'(2*PP*K);
      q.push_back(i);
      i = mk(OP_LOAD, core, layer, 4'b0000, 4'b0100);                 // weights -> CONV
      i.ddr_addr = 32'(wgt_base()); i.dst = 0; i.len = 16'(OCP*K); i.func[F_WEIGHT] = 1'b1;
      q.push_back(i);
      i = mk(OP_CONVINIT, core, layer, 4'b0000, 4'b0000);
      i.aux = 16'(shift | (relu << 5) | (rot << 8));
      q.push_back(i);
      i = mk(OP_CONV, core, layer, 4'b0001, 4'b0000);                 // <- LOAD
      i.src = 0; i.aux = 0; i.dst = 100; i.len = 16'(K);
      q.push_back(i);
      i = mk(OP_CONV, core, layer, 4'b0000, 4'b1010);                 // -> SAVE, MISC
      i.src = 16'(K); i.aux = 0; i.dst = 101; i.len = 16'(K);
      q.push_back(i);
      i = mk(OP_POOLINIT, core, layer, 4'b0000, 4'b0000);
      q.push_back(i);
      i = mk(OP_POOL, core, layer, 4'b0100, 4'b0010);                 // <- CONV, -> SAVE
      i.src = 100; i.dst = 200; i.len = 2;
      q.push_back(i);
      i = mk(OP_SAVE, core, layer, 4'b0100, 4'b0000);                 // <- CONV
      i.ddr_addr = 32'(out_base()); i.src = 16'(100*PP); i.len = 16'(2*PP);
      q.push_back(i);
      i = mk(OP_SAVE, core, layer, 4'b1000, 4'b0000);                 // <- MISC
      i.ddr_addr = 32'(out_base() + PP); i.src = 16'(200*PP); i.len = 16'(PP);
      q.push_back(i);
      i = mk(OP_SYSTEM, core, layer, 4'b0000, 4'b0000);
      i.func[F_SYNC] = sync;
      q.push_back(i);
    endfunction
  endclass

endpackage
