// mp_pkg -- shared encodings, widths and types of the mixed-precision MAC unit.
//
// The unit adds three R-type instructions to an RV32 core. Each takes four
// packed 8-bit activations in rs1 and 4, 8 or 16 packed weights (8, 4 or 2 bit)
// in rs2, and performs 4, 8 or 16 multiply-accumulates into four internal
// 32-bit accumulators. The funct7/funct3 values of those three instructions are
// the published ones. The major opcode (custom-0) and the two accumulator-access
// operations (bias load and result read) are this design's own choice: the
// published encoding table lists only the three MAC instructions.
package mp_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned XLEN     = 32;  // register width of the host core
  localparam int unsigned MUL_W    = 17;  // multiplier operand width (17x17)
  localparam int unsigned PROD_W   = 34;  // full product / partial-product adder width
  localparam int unsigned ACC_W    = 32;  // accumulator width
  localparam int unsigned N_MUL    = 4;   // parallel multipliers (3 original + 1 added)
  localparam int unsigned N_ACC    = 4;   // accumulators (output features per instruction)
  localparam int unsigned N_PHASE  = 2;   // fast cycles per core cycle (2x multi-pumping)

  // ---------------------------------------------------------------- encodings
  localparam logic [6:0] OPC_CUSTOM0 = 7'b000_1011;  // RISC-V custom-0 major opcode (assumed)

  localparam logic [2:0] F3_MAC      = 3'b010;       // all three nn_mac_* instructions
  localparam logic [6:0] F7_MAC_8B   = 7'b000_1000;  // nn_mac_8b, Mode-1
  localparam logic [6:0] F7_MAC_4B   = 7'b000_0100;  // nn_mac_4b, Mode-2
  localparam logic [6:0] F7_MAC_2B   = 7'b000_0010;  // nn_mac_2b, Mode-3

  // Accumulator access (this design's own encoding, same opcode).
  localparam logic [6:0] F7_ACC      = 7'b000_0001;
  localparam logic [2:0] F3_ACC_LD   = 3'b000;       // shift two biases (rs1, rs2) into the accumulators
  localparam logic [2:0] F3_ACC_RD   = 3'b001;       // rd <= accumulator rs1[1:0]

  // ---------------------------------------------------------------- types
  typedef enum logic [1:0] {
    MODE_8B = 2'd0,   // Mode-1: four 8-bit weights, packing only
    MODE_4B = 2'd1,   // Mode-2: eight 4-bit weights, packing + multi-pumping
    MODE_2B = 2'd2    // Mode-3: sixteen 2-bit weights, packing + multi-pumping + soft SIMD
  } mp_mode_e;

  typedef enum logic [1:0] {
    OP_NONE   = 2'd0,
    OP_MAC    = 2'd1,
    OP_ACC_LD = 2'd2,
    OP_ACC_RD = 2'd3
  } mp_op_e;

  typedef logic signed [MUL_W-1:0]  op17_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Operand pair of one 17x17 multiplier.
  typedef struct packed {
    op17_t w;   // weight side (possibly two soft-SIMD weights)
    op17_t a;   // activation side
  } mul_ops_t;

  // Operands of all multipliers for one fast cycle, and for one core cycle.
  typedef mul_ops_t [N_MUL-1:0]   mul_set_t;
  typedef mul_set_t [N_PHASE-1:0] mul_sets_t;

  // Four accumulator-sized results delivered per core cycle.
  typedef acc_t [N_ACC-1:0] acc_vec_t;

endpackage
