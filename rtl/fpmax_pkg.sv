// fpmax_pkg: types and constants shared by the FPMax test harness and FPUs.
//
// The chip holds four multiply-add units (SP FMA, SP CMA, DP FMA, DP CMA)
// and a built-in test harness: an instruction RAM of 256 x 26-bit words,
// three operand RAMs of 64 x 64-bit words and a results RAM of 256 x
// 64-bit words. Those sizes are the chip's; the layout of the 26-bit
// instruction word below is this design's own (the chip's encoding is not
// given in a form that can be copied). Every FPU computes R = A + B * C.
package fpmax_pkg;

  localparam int INST_W      = 26;   // instruction RAM word width
  localparam int INST_DEPTH  = 256;  // instruction RAM depth
  localparam int OPND_DEPTH  = 64;   // depth of each operand RAM
  localparam int OPND_W      = 64;   // operand / result word width
  localparam int RES_DEPTH   = 256;  // results RAM depth
  localparam int NUM_FPU     = 4;

  // Partial-product reduction structure of a multiplier.
  typedef enum logic [1:0] {
    TREE_ARRAY   = 2'd0,   // linear array of carry-save adders
    TREE_WALLACE = 2'd1    // Wallace tree of carry-save adders
  } tree_e;

  // FPU numbering used by the selector and by the control register.
  typedef enum logic [1:0] {
    FPU_SP_FMA = 2'd0,
    FPU_SP_CMA = 2'd1,
    FPU_DP_FMA = 2'd2,
    FPU_DP_CMA = 2'd3
  } fpu_sel_e;

  // 26-bit test instruction (MSB first).
  //  valid : 0 = bubble, nothing is issued this cycle
  //  last  : stop fetching after this instruction
  //  a_byp : addend A is taken from the forwarded, unrounded result
  //  a_dist: issue distance (cycles) to the producer of A when a_byp = 1
  //  b_byp : multiplier input B is the forwarded result (distance = MAC latency)
  //  c_byp : multiplier input C is the forwarded result (distance = MAC latency)
  //  a/b/c_addr : operand RAM addresses
  typedef struct packed {
    logic       valid;
    logic       last;
    logic       a_byp;
    logic [2:0] a_dist;
    logic       b_byp;
    logic       c_byp;
    logic [5:0] a_addr;
    logic [5:0] b_addr;
    logic [5:0] c_addr;
  } inst_t;

  // One issued operation as seen by an FPU (64-bit operand words; the
  // single-precision units use bits [31:0]).
  typedef struct packed {
    logic        valid;
    logic        a_byp;
    logic [2:0]  a_dist;
    logic        b_byp;
    logic        c_byp;
    logic [63:0] a;
    logic [63:0] b;
    logic [63:0] c;
  } fpu_req_t;

  // Address spaces reachable from JTAG.
  typedef enum logic [2:0] {
    SP_INST = 3'd0,
    SP_OPA  = 3'd1,
    SP_OPB  = 3'd2,
    SP_OPC  = 3'd3,
    SP_RES  = 3'd4,
    SP_CTRL = 3'd5
  } space_e;

  // Register access request produced by the JTAG controller.
  typedef struct packed {
    logic        we;
    space_e      space;
    logic [7:0]  addr;
    logic [63:0] wdata;
  } acc_req_t;

  localparam int ACC_W = $bits(acc_req_t);  // 76-bit JTAG data register

endpackage
