// mp_mac_acc -- accumulator bank of the MAC unit (runs on the core clock).
//
// Holds the four 32-bit accumulators, one per output feature handled by an
// instruction. Each core cycle it does one of:
//   acc_en_i : acc[o] <= acc[o] + prod_i[o]   (the "+" and the feedback path)
//   ld_i     : bias load through the shift path: acc[0:1] <= acc[2:3],
//              acc[2] <= bias_lo_i, acc[3] <= bias_hi_i
//              (two loads put biases b1..b4 in place, b1/b2 first)
// and it returns the accumulator selected by sel_i combinationally on rdata_o.
// The published figure shows the biases arriving from rs1 and rs2 through a
// "32-bit Shift Op" and a multiplexer in front of the accumulators, but not
// how the four biases are sequenced; the two-per-load shift order, the
// read-out multiplexer and the wrap-around (non-saturating) addition are this
// design's choices. The two commands never coincide (the issue logic orders
// them); an assertion checks it.
module mp_mac_acc
  import mp_pkg::*;
#(
  parameter int unsigned NACC = N_ACC     // accumulators (4 in the paper)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    acc_en_i,   // add prod_i into the accumulators
  input  acc_t                    prod_i [NACC],
  input  logic                    ld_i,       // shift in two biases
  input  acc_t                    bias_lo_i,  // from rs1
  input  acc_t                    bias_hi_i,  // from rs2
  input  logic [$clog2(NACC)-1:0] sel_i,      // read-out select
  output acc_t                    rdata_o     // accumulator sel_i
);

  acc_t acc_q [NACC];

  // Bias shift path: the bank moves down by two and the new pair enters on top.
  acc_t shifted [NACC];
  always_comb begin
    for (int o = 0; o < NACC; o++) begin
      if (o + 2 < NACC)       shifted[o] = acc_q[o+2];
      else if (o == NACC - 2) shifted[o] = bias_lo_i;
      else                    shifted[o] = bias_hi_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int o = 0; o < NACC; o++) acc_q[o] <= '0;
    end else if (ld_i) begin
      for (int o = 0; o < NACC; o++) acc_q[o] <= shifted[o];
    end else if (acc_en_i) begin
      for (int o = 0; o < NACC; o++) acc_q[o] <= acc_q[o] + prod_i[o];
    end
  end

  assign rdata_o = acc_q[sel_i];

  a_no_overlap: assert property (@(posedge clk_i) disable iff (!rst_ni) !(ld_i && acc_en_i))
    else $error("bias load and accumulation in the same cycle");

endmodule
