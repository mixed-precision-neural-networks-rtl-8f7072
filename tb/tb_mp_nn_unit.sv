// tb_mp_nn_unit -- end-to-end test of the mixed-precision unit.
//
// A small behavioural issue stage plays the role of the host core. It computes
// random dense layers Y_o = b_o + sum_i W_oi * A_i, four outputs at a time, in
// all three modes: two bias loads, a stream of packed MAC instructions (with
// random bubbles and foreign instructions mixed in), then four accumulator
// reads. The packing is the one a compiler would emit for the operand map of
// each mode:
//   Mode-1: rs1 = {a_j x4},                    rs2 byte o-1   = W[o][j]
//   Mode-2: rs1 = {a_j+1, a_j, a_j+1, a_j},    rs2 nibbles    = W1j W1j+1 W2j W2j+1 W3j W3j+1 W4j W4j+1
//   Mode-3: rs1 = {a_j+3 .. a_j},              rs2 field 4(o-1)+i = W[o][j+i]
// Results are compared with the plain dot product. The test also checks that
// MACs issue back to back without a stall, that the first read after a MAC
// stalls exactly two core cycles, and it counts every mechanism (each mode,
// streaming, read stall, bias shift load, soft-SIMD negative low field,
// foreign instructions ignored); one that never happens is a failure.
module tb_mp_nn_unit;
  import mp_pkg::*;

  logic clk = 1'b0, clk2x = 1'b0, rst_n = 1'b0;
  logic        valid;
  logic [31:0] instr, rs1, rs2;
  logic        is_mp, ready, rd_we, idle;
  logic [4:0]  rd_addr;
  logic [31:0] rd_wdata;

  mp_nn_unit dut (.clk_i(clk), .clk2x_i(clk2x), .rst_ni(rst_n),
                  .instr_valid_i(valid), .instr_i(instr), .rs1_i(rs1), .rs2_i(rs2),
                  .is_mp_o(is_mp), .ready_o(ready), .rd_we_o(rd_we), .rd_addr_o(rd_addr),
                  .rd_wdata_o(rd_wdata), .idle_o(idle));

  initial forever begin
    clk2x = 1'b1; clk = 1'b1; #5;
    clk2x = 1'b0; #5;
    clk2x = 1'b1; clk = 1'b0; #5;
    clk2x = 1'b0; #5;
  end

  int checks = 0, failures = 0;
  int n_mode [3] = '{0, 0, 0};
  int n_stream = 0, n_rd_stall = 0, n_ld = 0, n_borrow = 0, n_foreign = 0, n_rd = 0, n_ld_stall = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  function automatic logic [31:0] rtype(input logic [6:0] f7, input logic [2:0] f3, input logic [4:0] rd);
    return {f7, 5'd11, 5'd10, f3, rd, OPC_CUSTOM0};
  endfunction

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Issue one instruction; returns the number of stall cycles and rd data.
  task automatic issue(input logic [31:0] ins, input logic [31:0] a, input logic [31:0] b,
                       output int stalls, output logic [31:0] wdata, output bit wrote);
    stalls = 0; wrote = 0; wdata = '0;
    valid = 1'b1; instr = ins; rs1 = a; rs2 = b;
    forever begin
      @(negedge clk);
      if (ready) begin
        wrote = rd_we; wdata = rd_wdata;
        @(posedge clk); #2;
        break;
      end
      stalls++;
      @(posedge clk); #2;
    end
    valid = 1'b0;
  endtask

  task automatic bubble_or_foreign();
    int s;
    logic [31:0] d;
    bit w;
    if ($urandom_range(0, 7) == 0) begin
      // a non-unit instruction (standard OP-class MUL) must be ignored
      valid = 1'b1; instr = {7'b000_0001, 5'd2, 5'd1, 3'b000, 5'd3, 7'b011_0011};
      rs1 = $urandom; rs2 = $urandom;
      @(negedge clk);
      check(!is_mp && !ready && !rd_we, "foreign instruction ignored");
      n_foreign++;
      @(posedge clk); #2 valid = 1'b0;
    end else if ($urandom_range(0, 7) == 0) begin
      @(posedge clk); #2;
    end
  endtask

  function automatic int sx(input int v, input int bits);
    v = v & ((1 << bits) - 1);
    return (v >= (1 << (bits-1))) ? v - (1 << bits) : v;
  endfunction

  // One group of four outputs over N inputs in the given mode.
  task automatic run_group(input int md, input int n_in, input bit bursty);
    int a [];
    int w [4][];
    int b [4];
    int exp_y [4];
    int s;
    logic [31:0] d;
    bit wr;
    int step;
    longint t0;
    a = new[n_in];
    for (int o = 0; o < 4; o++) w[o] = new[n_in];
    for (int i = 0; i < n_in; i++) a[i] = sx($urandom, 8);
    for (int o = 0; o < 4; o++) begin
      b[o] = int'($urandom_range(0, 2000000)) - 1000000;
      for (int i = 0; i < n_in; i++) w[o][i] = sx($urandom, md == 0 ? 8 : (md == 1 ? 4 : 2));
      exp_y[o] = b[o];
      for (int i = 0; i < n_in; i++) exp_y[o] += w[o][i] * a[i];
    end
    // biases: b1,b2 then b3,b4
    issue(rtype(F7_ACC, F3_ACC_LD, 5'd0), b[0], b[1], s, d, wr);
    check(!wr, "bias load writes no register");
    issue(rtype(F7_ACC, F3_ACC_LD, 5'd0), b[2], b[3], s, d, wr);
    n_ld += 2;
    step = (md == 0) ? 1 : (md == 1 ? 2 : 4);
    t0 = cycles;
    for (int j = 0; j < n_in; j += step) begin
      logic [31:0] ra, rw;
      logic [6:0] f7;
      ra = '0; rw = '0;
      case (md)
        0: begin
          f7 = F7_MAC_8B;
          for (int k = 0; k < 4; k++) ra[8*k +: 8] = 8'(a[j]);
          for (int o = 0; o < 4; o++) rw[8*o +: 8] = 8'(w[o][j]);
        end
        1: begin
          f7 = F7_MAC_4B;
          ra = {8'(a[j+1]), 8'(a[j]), 8'(a[j+1]), 8'(a[j])};
          for (int o = 0; o < 4; o++) begin
            rw[8*o +: 4]     = 4'(w[o][j]);
            rw[8*o + 4 +: 4] = 4'(w[o][j+1]);
          end
        end
        default: begin
          int lo;
          f7 = F7_MAC_2B;
          for (int i = 0; i < 4; i++) ra[8*i +: 8] = 8'(a[j+i]);
          for (int o = 0; o < 4; o++)
            for (int i = 0; i < 4; i++) rw[2*(4*o+i) +: 2] = 2'(w[o][j+i]);
          lo = 0;
          for (int i = 0; i < 4; i++) lo += w[0][j+i] * a[j+i];
          if (lo < 0) n_borrow++;
        end
      endcase
      issue(rtype(f7, F3_MAC, 5'd0), ra, rw, s, d, wr);
      check(s == 0 && !wr, "MAC issues without stall and writes no register");
      n_mode[md]++;
      if (bursty) bubble_or_foreign();
    end
    if (!bursty) begin
      // n_in/step MACs back to back: exactly one cycle each
      check(cycles - t0 == longint'(n_in / step), $sformatf("MAC stream took %0d cycles for %0d instructions",
            cycles - t0, n_in / step));
      n_stream++;
    end
    for (int o = 0; o < 4; o++) begin
      issue(rtype(F7_ACC, F3_ACC_RD, 5'(o + 5)), 32'(o), 32'd0, s, d, wr);
      n_rd++;
      if (o == 0 && !bursty) begin
        check(s == 2, $sformatf("first read after a MAC stalls 2 cycles (got %0d)", s));
        if (s > 0) n_rd_stall++;
      end
      if (o != 0) check(s == 0, "later reads do not stall");
      check(wr && rd_addr == 5'(o + 5) || !wr, "read targets rd");
      check(wr, "read writes rd");
      check(int'(d) == exp_y[o], $sformatf("mode %0d N=%0d y%0d got %0d exp %0d", md+1, n_in, o+1, int'(d), exp_y[o]));
    end
  endtask

  initial begin
    valid = 1'b0; instr = '0; rs1 = '0; rs2 = '0;
    repeat (3) @(posedge clk);
    #2 rst_n = 1'b1;
    @(posedge clk); #2;
    for (int g = 0; g < 60; g++) begin
      int md, n_in;
      md = g % 3;
      n_in = 4 * $urandom_range(1, 40);
      run_group(md, n_in, (g % 2) == 1);
    end
    // A bias load that follows MACs directly waits for them: the shift then
    // moves the finished outputs 3,4 down into accumulators 0,1.
    begin
      int s;
      logic [31:0] d;
      bit wr;
      issue(rtype(F7_ACC, F3_ACC_LD, 5'd0), 32'd0, 32'd0, s, d, wr);
      issue(rtype(F7_ACC, F3_ACC_LD, 5'd0), 32'd100, 32'd200, s, d, wr);
      // one Mode-1 MAC: y3 += 3*(-5), y4 += (-7)*(-5)
      issue(rtype(F7_MAC_8B, F3_MAC, 5'd0), {4{8'(-5)}}, {8'(-7), 8'(3), 8'(11), 8'(13)}, s, d, wr);
      issue(rtype(F7_ACC, F3_ACC_LD, 5'd0), 32'd7, 32'd9, s, d, wr);
      check(s == 2, $sformatf("bias load after a MAC stalls 2 cycles (got %0d)", s));
      if (s > 0) n_ld_stall++;
      issue(rtype(F7_ACC, F3_ACC_RD, 5'd1), 32'd0, 32'd0, s, d, wr);
      check(int'(d) == 100 - 15, $sformatf("shifted accumulator 0 = %0d", int'(d)));
      issue(rtype(F7_ACC, F3_ACC_RD, 5'd1), 32'd1, 32'd0, s, d, wr);
      check(int'(d) == 200 + 35, $sformatf("shifted accumulator 1 = %0d", int'(d)));
      issue(rtype(F7_ACC, F3_ACC_RD, 5'd1), 32'd3, 32'd0, s, d, wr);
      check(int'(d) == 9, "new bias in accumulator 3");
    end
    check(idle, "unit idle at the end");
    $display("MACs: mode1 %0d mode2 %0d mode3 %0d; streams %0d; read stalls %0d; bias loads %0d (stalled %0d); reads %0d; soft-SIMD negative low field %0d; foreign %0d",
             n_mode[0], n_mode[1], n_mode[2], n_stream, n_rd_stall, n_ld, n_ld_stall, n_rd, n_borrow, n_foreign);
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_stream == 0 || n_rd_stall == 0 ||
        n_ld == 0 || n_ld_stall == 0 || n_rd == 0 || n_borrow == 0 || n_foreign == 0) begin
      failures++; $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
