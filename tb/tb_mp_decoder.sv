// tb_mp_decoder -- self-checking test of the instruction decoder.
//
// Drives random rs1/rs2 values with each of the three MAC encodings, the two
// accumulator-access encodings and non-matching words, and compares the
// decoded class, mode and every multiplier operand with a reference written
// from the operand-mapping table (weight index and activation index per
// multiplier and phase).
module tb_mp_decoder;
  import mp_pkg::*;

  logic        valid;
  logic [31:0] instr, rs1, rs2;
  logic        is_mp;
  mp_op_e      op;
  mp_mode_e    mode;
  logic [4:0]  rd_addr;
  logic [1:0]  acc_sel;
  mul_sets_t   sets;

  int checks = 0, failures = 0;

  mp_decoder dut (.valid_i(valid), .instr_i(instr), .rs1_i(rs1), .rs2_i(rs2),
                  .is_mp_o(is_mp), .op_o(op), .mode_o(mode), .rd_addr_o(rd_addr),
                  .acc_sel_o(acc_sel), .sets_o(sets));

  function automatic logic [31:0] rtype(input logic [6:0] f7, input logic [2:0] f3,
                                        input logic [4:0] rd, input logic [6:0] opc);
    return {f7, 5'd11, 5'd10, f3, rd, opc};
  endfunction

  function automatic int sfield(input logic [31:0] v, input int bits, input int idx);
    logic [31:0] f;
    f = (v >> (bits*idx)) & ((32'd1 << bits) - 1);
    if (f[bits-1]) return int'(f) - (1 << bits);
    return int'(f);
  endfunction

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s  instr=%h rs1=%h rs2=%h", what, instr, rs1, rs2);
    end
  endtask

  // Reference: expected (weight, activation) of multiplier m in phase p.
  task automatic expect_ops(input int md, input int p, input int m, output int w, output int a);
    // Mode-1: M1/M3 active; weight byte index, activation index
    int w8_idx [2][4] = '{'{0, -1, 1, -1}, '{2, -1, 3, -1}};
    // Mode-2: nibble index and activation index
    int w4_idx [2][4] = '{'{0, 1, 2, 3}, '{4, 5, 6, 7}};
    int a4_idx [2][4] = '{'{0, 1, 0, 1}, '{2, 3, 2, 3}};
    w = 0; a = 0;
    case (md)
      0: if (w8_idx[p][m] >= 0) begin
           w = sfield(rs2, 8, w8_idx[p][m]);
           a = sfield(rs1, 8, m == 0 ? 2*p : 2*p + 1);
         end
      1: begin
           w = sfield(rs2, 4, w4_idx[p][m]);
           a = sfield(rs1, 8, a4_idx[p][m]);
         end
      default: begin
           // phase p: outputs 2p+1 (low field) and 2p+2 (high field), input m+1
           w = sfield(rs2, 2, 4*(2*p+1) + m) * 4096 + sfield(rs2, 2, 4*(2*p) + m);
           a = sfield(rs1, 8, m);
         end
    endcase
  endtask

  initial begin
    logic [6:0] f7s [3] = '{F7_MAC_8B, F7_MAC_4B, F7_MAC_2B};
    valid = 1'b1;
    for (int it = 0; it < 600; it++) begin
      int md, w, a;
      md  = it % 3;
      rs1 = $urandom; rs2 = $urandom;
      if (it % 50 == 7) begin rs1 = 32'h8080_8080; rs2 = (md == 2) ? 32'hAAAA_AAAA : 32'h8888_8888; end
      instr = rtype(f7s[md], F3_MAC, 5'(it), OPC_CUSTOM0);
      #1;
      chk(is_mp && op == OP_MAC, "MAC recognised");
      chk(int'(mode) == md, "mode");
      chk(rd_addr == 5'(it), "rd field");
      for (int p = 0; p < 2; p++)
        for (int m = 0; m < 4; m++) begin
          expect_ops(md, p, m, w, a);
          chk(int'(sets[p][m].w) == w && int'(sets[p][m].a) == a,
              $sformatf("operands mode%0d phase%0d M%0d got w=%0d a=%0d exp w=%0d a=%0d",
                        md+1, p, m+1, sets[p][m].w, sets[p][m].a, w, a));
        end
    end
    // accumulator-access encodings
    rs1 = 32'h2; rs2 = 0;
    instr = rtype(F7_ACC, F3_ACC_LD, 5'd3, OPC_CUSTOM0); #1;
    chk(op == OP_ACC_LD && is_mp, "bias load recognised");
    instr = rtype(F7_ACC, F3_ACC_RD, 5'd9, OPC_CUSTOM0); #1;
    chk(op == OP_ACC_RD && rd_addr == 5'd9 && acc_sel == 2'd2, "acc read recognised");
    // words that must not decode
    instr = rtype(F7_MAC_8B, F3_MAC, 5'd1, 7'b0110011); #1;       // OP major opcode
    chk(!is_mp && op == OP_NONE, "other opcode ignored");
    instr = rtype(F7_MAC_4B, 3'b011, 5'd1, OPC_CUSTOM0); #1;      // wrong funct3
    chk(!is_mp, "wrong funct3 ignored");
    instr = rtype(7'b000_0110, F3_MAC, 5'd1, OPC_CUSTOM0); #1;    // wrong funct7
    chk(!is_mp, "wrong funct7 ignored");
    instr = rtype(F7_MAC_2B, F3_MAC, 5'd1, OPC_CUSTOM0); valid = 1'b0; #1;
    chk(!is_mp, "invalid slot ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
