// hdc_pkg: constants and types shared by the HDC Bound unit.
//
// The unit executes four RISC-V R-type custom instructions that operate on
// per-thread "Bound" (cumulative sum) registers. Encoding, following the
// paper's instruction table: opcode 0x0b (the RISC-V custom-0 slot),
// funct7 0x01, and funct3 selecting the operation:
//   1 vpopcnt.set rs1, rs2   write a Bound register
//   2 vpopcnt.get rd, rs1    read a Bound register
//   3 vpopcnt.add rs1        add a 32-bit bipolar bit array to the 32 counters
//   5 vpopcnt.geq rd, rs1    compare the 32 counters with a threshold
// An HV bit of 1 stands for +1 and a bit of 0 for -1. Counters are 32-bit,
// matching the GPU register width, and there are 32 of them per thread, one
// per bit of a register. Which operand of set/get carries the counter index
// is this design's choice (rs1, low 5 bits), as is two's-complement wrap on
// counter overflow.
package hdc_pkg;

  localparam int unsigned XLEN        = 32;  // GPU register width
  localparam int unsigned NUM_BOUND   = 32;  // Bound registers per thread
  localparam int unsigned BIDX_W      = $clog2(NUM_BOUND);

  localparam logic [6:0] OPCODE_HDC   = 7'h0b;
  localparam logic [6:0] FUNCT7_HDC   = 7'h01;

  typedef enum logic [2:0] {
    F3_SET = 3'd1,
    F3_GET = 3'd2,
    F3_ADD = 3'd3,
    F3_GEQ = 3'd5
  } funct3_e;

  typedef enum logic [1:0] {
    OP_SET,
    OP_GET,
    OP_ADD,
    OP_GEQ
  } hdc_op_e;

  typedef logic signed [XLEN-1:0] counter_t;
  typedef counter_t [NUM_BOUND-1:0] bound_vec_t;

  typedef struct packed {
    logic    valid;      // instruction is one of the four vpopcnt ops
    hdc_op_e op;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic    uses_rs2;   // only vpopcnt.set reads rs2
    logic    writes_rd;  // get and geq write rd
  } hdc_dec_t;

endpackage
