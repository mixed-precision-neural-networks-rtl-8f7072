// mp_decoder -- decoder extension for the mixed-precision instructions.
//
// Combinational. It recognises the three MAC instructions (funct3 = 010 and
// funct7 = 000_1000 / 000_0100 / 000_0010, as published) and the two
// accumulator-access operations of this design, and it divides the packed
// source registers into the operands of the four 17x17 multipliers for both
// fast cycles (phase 0 and phase 1) of the multi-pumped array.
//
// Packing (following the published operand-mapping figure; w_oi is the weight
// of output o and input i, A_i is byte i-1 of rs1, all values signed and
// sign-extended to 17 bits):
//   Mode-1 (8-bit weights w11,w22,w33,w44 in rs2 bytes 0..3):
//     phase 0: M1 = w11*A1, M2 = 0,      M3 = w22*A2, M4 = 0
//     phase 1: M1 = w33*A3, M2 = 0,      M3 = w44*A4, M4 = 0
//   Mode-2 (4-bit weights w11,w12,w21,w22,w33,w34,w43,w44 in nibbles 0..7):
//     phase 0: M1 = w11*A1, M2 = w12*A2, M3 = w21*A1, M4 = w22*A2
//     phase 1: M1 = w33*A3, M2 = w34*A4, M3 = w43*A3, M4 = w44*A4
//   Mode-3 (2-bit weights, field k = 4(o-1)+(i-1) holds w_oi):
//     phase 0: Mi = (w2i * 2^SIMD_SHIFT + w1i) * A_i
//     phase 1: Mi = (w4i * 2^SIMD_SHIFT + w3i) * A_i
// Weights arrive in rs2 and activations in rs1, as the published encoding
// table lists them. The opcode, the register-field positions (standard R-type)
// and the accumulator-access encodings are this design's choices.
module mp_decoder
  import mp_pkg::*;
#(
  parameter int unsigned SIMD_SHIFT = 12   // position of the upper soft-SIMD weight
) (
  input  logic             valid_i,     // instruction word is valid this cycle
  input  logic [31:0]      instr_i,     // instruction word
  input  logic [XLEN-1:0]  rs1_i,       // value of rs1 (packed activations / bias)
  input  logic [XLEN-1:0]  rs2_i,       // value of rs2 (packed weights / bias)
  output logic             is_mp_o,     // instruction belongs to this unit
  output mp_op_e           op_o,        // operation class
  output mp_mode_e         mode_o,      // precision mode of a MAC
  output logic [4:0]       rd_addr_o,   // destination register of an accumulator read
  output logic [1:0]       acc_sel_o,   // accumulator index of a read (rs1[1:0])
  output mul_sets_t        sets_o       // multiplier operands for both fast cycles
);

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;

  assign opcode    = instr_i[6:0];
  assign funct3    = instr_i[14:12];
  assign funct7    = instr_i[31:25];
  assign rd_addr_o = instr_i[11:7];
  assign acc_sel_o = rs1_i[1:0];

  // ---------------------------------------------------------------- instruction decode
  always_comb begin
    op_o   = OP_NONE;
    mode_o = MODE_8B;
    if (valid_i && opcode == OPC_CUSTOM0) begin
      if (funct3 == F3_MAC) begin
        unique case (funct7)
          F7_MAC_8B: begin op_o = OP_MAC; mode_o = MODE_8B; end
          F7_MAC_4B: begin op_o = OP_MAC; mode_o = MODE_4B; end
          F7_MAC_2B: begin op_o = OP_MAC; mode_o = MODE_2B; end
          default:   op_o = OP_NONE;
        endcase
      end else if (funct7 == F7_ACC && funct3 == F3_ACC_LD) begin
        op_o = OP_ACC_LD;
      end else if (funct7 == F7_ACC && funct3 == F3_ACC_RD) begin
        op_o = OP_ACC_RD;
      end
    end
  end

  assign is_mp_o = (op_o != OP_NONE);

  // ---------------------------------------------------------------- operand division
  function automatic op17_t sx8(input logic [7:0] v);
    return op17_t'($signed(v));
  endfunction
  function automatic op17_t sx4(input logic [3:0] v);
    return op17_t'($signed(v));
  endfunction
  function automatic op17_t sx2(input logic [1:0] v);
    return op17_t'($signed(v));
  endfunction
  // Two 2-bit weights packed into one multiplier operand with guard bits.
  function automatic op17_t simd2(input logic [1:0] hi, input logic [1:0] lo);
    return op17_t'((sx2(hi) <<< SIMD_SHIFT) + sx2(lo));
  endfunction

  op17_t act [4];      // A1..A4
  op17_t w8  [4];      // 8-bit fields of rs2
  op17_t w4  [8];      // 4-bit fields of rs2
  logic [1:0] w2 [16]; // 2-bit fields of rs2

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      act[i] = sx8(rs1_i[8*i +: 8]);
      w8[i]  = sx8(rs2_i[8*i +: 8]);
    end
    for (int k = 0; k < 8; k++)  w4[k] = sx4(rs2_i[4*k +: 4]);
    for (int k = 0; k < 16; k++) w2[k] = rs2_i[2*k +: 2];
  end

  always_comb begin
    sets_o = '0;
    unique case (mode_o)
      MODE_8B: begin
        sets_o[0][0] = '{w: w8[0], a: act[0]};   // w11 * A1
        sets_o[0][2] = '{w: w8[1], a: act[1]};   // w22 * A2
        sets_o[1][0] = '{w: w8[2], a: act[2]};   // w33 * A3
        sets_o[1][2] = '{w: w8[3], a: act[3]};   // w44 * A4
      end
      MODE_4B: begin
        sets_o[0][0] = '{w: w4[0], a: act[0]};   // w11 * A1
        sets_o[0][1] = '{w: w4[1], a: act[1]};   // w12 * A2
        sets_o[0][2] = '{w: w4[2], a: act[0]};   // w21 * A1
        sets_o[0][3] = '{w: w4[3], a: act[1]};   // w22 * A2
        sets_o[1][0] = '{w: w4[4], a: act[2]};   // w33 * A3
        sets_o[1][1] = '{w: w4[5], a: act[3]};   // w34 * A4
        sets_o[1][2] = '{w: w4[6], a: act[2]};   // w43 * A3
        sets_o[1][3] = '{w: w4[7], a: act[3]};   // w44 * A4
      end
      MODE_2B: begin
        for (int i = 0; i < 4; i++) begin
          sets_o[0][i] = '{w: simd2(w2[4+i],  w2[i]),   a: act[i]};  // (w2i,w1i) * Ai
          sets_o[1][i] = '{w: simd2(w2[12+i], w2[8+i]), a: act[i]};  // (w4i,w3i) * Ai
        end
      end
      default: sets_o = '0;
    endcase
  end

endmodule
