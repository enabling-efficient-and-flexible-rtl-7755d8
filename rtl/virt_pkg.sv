// virt_pkg: shared constants and types of the virtualized multi-core DNN accelerator.
//
// The accelerator is a pool of small instruction-driven CNN cores (PP pixels x ICP input
// channels x OCP output channels each, 2*PP*ICP*OCP = 512 ops/cycle at the default sizes)
// scheduled by a two-level instruction dispatch module. The core sizes, the core count, the
// per-core 128-bit memory port and the 512-bit DDR port follow the paper's evaluated
// configuration. The instruction encoding below is this design's own: the paper lists the
// instruction set (System, Load, Save, Convinit, Conv, Poolinit, Pool), says every
// instruction carries dependency information, that System has a synchronization bit in its
// function field and that the first level dispatcher routes by a core index, but gives no
// bit layout. Every instruction is 128 bits, one memory-port beat.
package virt_pkg;

  // ---- sizes (paper: 16 small cores of parallelism 512, PP:4 ICP:8 OCP:8, 4 DDR banks,
  //      128-bit port per small core, four small cores per DDR, 512-bit DDR port) ----
  localparam int NUM_CORES     = 16;
  localparam int PP            = 4;
  localparam int ICP           = 8;
  localparam int OCP           = 8;
  localparam int NUM_DDR       = 4;
  localparam int CORES_PER_DDR = 4;
  localparam int DATA_W        = 8;     // activation / weight width (assumed int8)
  localparam int ACC_W         = 32;    // accumulator width (assumed)
  localparam int BUS_W         = 128;   // per-core memory port
  localparam int DDR_W         = 512;   // DDR data port
  localparam int WORD_W        = ICP * DATA_W;   // one on-chip buffer word: ICP (=OCP) bytes
  localparam int INSTR_W       = 128;

  // ---- execution modules of one core, used as bit positions of dependency masks ----
  localparam int NUM_UNITS = 4;
  localparam int U_LOAD = 0;
  localparam int U_SAVE = 1;
  localparam int U_CONV = 2;
  localparam int U_MISC = 3;

  typedef enum logic [3:0] {
    OP_SYSTEM   = 4'd0,
    OP_LOAD     = 4'd1,
    OP_SAVE     = 4'd2,
    OP_CONVINIT = 4'd3,
    OP_CONV     = 4'd4,
    OP_POOLINIT = 4'd5,
    OP_POOL     = 4'd6
  } opcode_e;

  // Function-field bits
  localparam int F_SYNC   = 0;   // System: layer synchronization point (else end of task)
  localparam int F_WEIGHT = 0;   // Load: 1 = weight buffer, 0 = feature banks

  // 128-bit instruction. Field use per opcode:
  //   Load : ddr_addr (128-bit words), dst (buffer word index), len (64-bit words, even)
  //   Save : ddr_addr, src (feature word index), len (64-bit words, even)
  //   Conv : src (input row), dst (output row), aux (weight row), len (accumulation steps)
  //   Pool : src (input row), dst (output row), len (window size)
  //   Convinit: aux[4:0] shift, aux[5] relu, aux[9:8] cross-connect rotation (log2(PP) bits)
  //   Poolinit: aux[0] 0=max 1=average, aux[12:8] average shift
  typedef struct packed {
    opcode_e      op;
    logic [3:0]   core;        // target core index (first level dispatch)
    logic [7:0]   layer;       // DNN layer index (layer-level context switch)
    logic [3:0]   dep_wait;    // tokens to consume, one bit per producing unit
    logic [3:0]   dep_signal;  // tokens to produce on completion, one bit per consuming unit
    logic [7:0]   func;
    logic [31:0]  ddr_addr;
    logic [15:0]  src;
    logic [15:0]  dst;
    logic [15:0]  len;
    logic [15:0]  aux;
  } instr_t;

  // ---- core <-> memory controller port (128-bit, in-order responses) ----
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [31:0]       addr;    // in 128-bit words
    logic [BUS_W-1:0]  wdata;
  } bus_req_t;

  typedef struct packed {
    logic              valid;
    logic [BUS_W-1:0]  rdata;
  } bus_rsp_t;

  // ---- memory controller <-> DDR port (512-bit, tagged responses) ----
  localparam int TAG_W = 8;
  typedef struct packed {
    logic                valid;
    logic                we;
    logic [31:0]         addr;    // in 512-bit words
    logic [DDR_W-1:0]    wdata;
    logic [DDR_W/8-1:0]  wstrb;
    logic [TAG_W-1:0]    tag;
  } ddr_req_t;

  typedef struct packed {
    logic              valid;
    logic [DDR_W-1:0]  rdata;
    logic [TAG_W-1:0]  tag;
  } ddr_rsp_t;

  // ---- hypervisor command port ----
  typedef enum logic [2:0] {
    HV_NOP        = 3'd0,
    HV_CFG_CORE   = 3'd1,   // core -> user, enable
    HV_LOAD_INSTR = 3'd2,   // fetch count instructions from DDR 0 at addr; clear regions in mask
    HV_START      = 3'd3,   // start user's task (from the recorded layer if any)
    HV_SWITCH     = 3'd4    // context switch of a user, mode 0 task-level, 1 layer-level
  } hv_op_e;

  typedef struct packed {
    hv_op_e        op;
    logic [3:0]    core;
    logic [3:0]    user;
    logic          enable;
    logic          mode;
    logic [31:0]   addr;
    logic [15:0]   count;
    logic [15:0]   mask;
  } hv_cmd_t;

  localparam logic MODE_TASK  = 1'b0;
  localparam logic MODE_LAYER = 1'b1;

endpackage
