// mp_pump_array -- multi-pumped multiplier array (runs on the 2x clock).
//
// Every core cycle the array receives the operands of one MAC instruction: two
// operand sets of four 17x17 multiplications, one per fast cycle. Four
// multipliers evaluate set 0 in the first half of the next core cycle and set 1
// in the second half, so one instruction issues per core cycle with no stall.
// Two partial-product adders (PPA) sum M1+M2 and M3+M4, giving two 32-bit
// results per fast cycle: outputs 1,2 in phase 0 and outputs 3,4 in phase 1.
// In Mode-3 (2-bit weights, soft SIMD) each product holds two fields, the low
// one in bits SIMD_SHIFT-1:0 and the high one above. The two PPA sums are added
// and the fields are separated: low field = sign-extended low SIMD_SHIFT bits,
// high field = (sum >>> SIMD_SHIFT) plus the borrow the negative low field took.
//
// Registers (all on clk2x_i):
//   ops_q  "17-bit Reg": operand sets, loaded at the fast edge that coincides
//          with a core-clock edge.
//   p0_q   holds the phase-0 results until the end of the core cycle.
//   res_q  "32-bit Reg": the four results, loaded at the core-clock-aligned
//          edge, stable for the whole following core cycle.
// Latency: operands presented in core cycle n are in res_q during cycle n+2
// (valid_o high) and reach the accumulators at the end of it.
//
// Phase: clk_i and clk2x_i are assumed rising-edge aligned. The core domain
// toggles tog_i every core cycle; the array samples it each fast cycle, and
// tog_i != its sampled copy marks the first half of a core cycle. This phase
// detector, p0_q and the adder joining the two PPA sums in Mode-3 are this
// design's own; multipliers, PPAs and both register stages follow the figure.
module mp_pump_array
  import mp_pkg::*;
#(
  parameter int unsigned SIMD_SHIFT = 12
) (
  input  logic      clk2x_i,     // 2x clock, rising edges aligned with the core clock
  input  logic      rst_ni,
  input  logic      tog_i,       // core-domain toggle (one flip per core cycle)
  input  logic      load_i,      // a MAC instruction is issued this core cycle
  input  mp_mode_e  mode_i,      // its mode
  input  mul_sets_t sets_i,      // its operands, both phases
  output logic      busy_o,      // an instruction is in the multipliers (ops_q valid)
  output logic      valid_o,     // res_q holds the results of an instruction
  output acc_vec_t  res_o        // res_q: outputs 1..4 of that instruction
);

  // ---------------------------------------------------------------- phase detector
  logic tog_d;
  logic first_half;   // high during the first fast cycle of a core cycle

  always_ff @(posedge clk2x_i or negedge rst_ni) begin
    if (!rst_ni) tog_d <= 1'b0;
    else         tog_d <= tog_i;
  end
  assign first_half = tog_i ^ tog_d;

  // ---------------------------------------------------------------- 17-bit Reg
  mul_sets_t ops_q;
  mp_mode_e  mode_q;
  logic      ops_v_q;

  always_ff @(posedge clk2x_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ops_q   <= '0;
      mode_q  <= MODE_8B;
      ops_v_q <= 1'b0;
    end else if (!first_half) begin           // core-clock-aligned edge
      ops_v_q <= load_i;
      if (load_i) begin
        ops_q  <= sets_i;
        mode_q <= mode_i;
      end
    end
  end

  // ---------------------------------------------------------------- phase mux + multipliers
  mul_set_t cur;
  prod_t    prod [N_MUL];
  prod_t    ppa  [2];

  assign cur = first_half ? ops_q[0] : ops_q[1];

  for (genvar m = 0; m < N_MUL; m++) begin : g_mul
    mp_mul17 u_mul (.a_i(cur[m].a), .b_i(cur[m].w), .p_o(prod[m]));
  end

  mp_ppa u_ppa0 (.a_i(prod[0]), .b_i(prod[1]), .s_o(ppa[0]));
  mp_ppa u_ppa1 (.a_i(prod[2]), .b_i(prod[3]), .s_o(ppa[1]));

  // ---------------------------------------------------------------- soft-SIMD field split
  prod_t simd_sum;
  acc_t  r [2];       // the two results of this fast cycle

  always_comb begin
    simd_sum = ppa[0] + ppa[1];
    if (mode_q == MODE_2B) begin
      r[0] = acc_t'($signed(simd_sum[SIMD_SHIFT-1:0]));
      r[1] = acc_t'(simd_sum >>> SIMD_SHIFT) + acc_t'(simd_sum[SIMD_SHIFT-1]);
    end else begin
      r[0] = acc_t'(ppa[0]);
      r[1] = acc_t'(ppa[1]);
    end
  end

  // ---------------------------------------------------------------- 32-bit Reg
  acc_t p0_q [2];
  logic res_v_q;

  always_ff @(posedge clk2x_i or negedge rst_ni) begin
    if (!rst_ni) begin
      p0_q[0] <= '0;
      p0_q[1] <= '0;
    end else if (first_half) begin            // mid-core-cycle edge: phase-0 results
      p0_q[0] <= r[0];
      p0_q[1] <= r[1];
    end
  end

  always_ff @(posedge clk2x_i or negedge rst_ni) begin
    if (!rst_ni) begin
      res_o   <= '0;
      res_v_q <= 1'b0;
    end else if (!first_half) begin           // core-clock-aligned edge: phase-1 results
      res_v_q <= ops_v_q;
      if (ops_v_q) begin
        res_o[0] <= p0_q[0];
        res_o[1] <= p0_q[1];
        res_o[2] <= r[0];
        res_o[3] <= r[1];
      end
    end
  end

  assign busy_o  = ops_v_q;
  assign valid_o = res_v_q;

endmodule
