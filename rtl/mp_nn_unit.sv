// mp_nn_unit -- mixed-precision MAC unit for an RV32 core (top level).
//
// The unit executes the three packed multiply-accumulate instructions
// nn_mac_8b / nn_mac_4b / nn_mac_2b (Mode-1/2/3) and two accumulator-access
// operations. It sits beside the ALU in the decode/execute stage: the core
// hands over the instruction word and the rs1/rs2 values, and the unit answers
// with ready_o (low = stall this instruction) and, for a read, a register write.
//
//   mp_decoder     divides rs1 (four 8-bit activations) and rs2 (4/8/16 packed
//                  weights) into two sets of four 17x17 multiplications
//   mp_pump_array  four multipliers on the 2x clock, two sets per core cycle,
//                  soft-SIMD field split in Mode-3, four 32-bit results
//   mp_mac_acc     four 32-bit accumulators on the core clock, bias shift-in
//
// Timing (core cycles): a MAC is accepted every cycle without stall; issued in
// cycle n, its results are added at the end of cycle n+2. A bias load or an
// accumulator read waits (ready_o low) while a MAC is still in the pipeline, so
// it sees every earlier MAC and no later MAC can be lost; a read issued right
// after a MAC therefore stalls two cycles. A read returns the accumulator
// selected by rs1[1:0] to rd in the cycle it is accepted (rd_we_o).
//
// Clocks: clk2x_i runs at twice clk_i with rising edges aligned (the paper
// uses 50/100 MHz on FPGA and 250/500 MHz in ASIC); both come from outside.
// rst_ni is asynchronous and must be released synchronously to clk_i.
// The accumulator-access operations, the interlock and the write-back of reads
// are this design's own; MAC instructions do not write a register.
// rd_addr_o is the instruction's rd field wired straight through; it is
// qualified by rd_we_o.
module mp_nn_unit
  import mp_pkg::*;
#(
  parameter int unsigned SIMD_SHIFT = 12    // soft-SIMD field offset (10-bit product + 2 guard bits)
) (
  input  logic            clk_i,          // core clock
  input  logic            clk2x_i,        // multi-pumping clock, 2x clk_i, aligned
  input  logic            rst_ni,
  // issue from the decode/execute stage
  input  logic            instr_valid_i,
  input  logic [31:0]     instr_i,
  input  logic [XLEN-1:0] rs1_i,
  input  logic [XLEN-1:0] rs2_i,
  output logic            is_mp_o,        // instruction is one of this unit's
  output logic            ready_o,        // instruction completes this cycle (low: stall)
  // register write-back
  output logic            rd_we_o,
  output logic [4:0]      rd_addr_o,
  output logic [XLEN-1:0] rd_wdata_o,
  // status
  output logic            idle_o          // no MAC in flight
);

  // ---------------------------------------------------------------- decode
  mp_op_e    op;
  mp_mode_e  mode;
  logic [1:0] acc_sel;
  mul_sets_t sets;

  mp_decoder #(.SIMD_SHIFT(SIMD_SHIFT)) u_dec (
    .valid_i  (instr_valid_i),
    .instr_i  (instr_i),
    .rs1_i    (rs1_i),
    .rs2_i    (rs2_i),
    .is_mp_o  (is_mp_o),
    .op_o     (op),
    .mode_o   (mode),
    .rd_addr_o(rd_addr_o),
    .acc_sel_o(acc_sel),
    .sets_o   (sets)
  );

  // ---------------------------------------------------------------- core-clock phase toggle
  logic tog_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) tog_q <= 1'b0;
    else         tog_q <= ~tog_q;
  end

  // ---------------------------------------------------------------- issue and interlock
  logic busy, res_valid, pending;
  logic mac_fire, ld_fire, rd_fire;

  assign pending  = busy | res_valid;
  assign mac_fire = (op == OP_MAC);
  assign ld_fire  = (op == OP_ACC_LD) && !pending;
  assign rd_fire  = (op == OP_ACC_RD) && !pending;
  assign ready_o  = mac_fire | ld_fire | rd_fire;
  assign idle_o   = !pending;

  // ---------------------------------------------------------------- multi-pumped array
  acc_vec_t res;

  mp_pump_array #(.SIMD_SHIFT(SIMD_SHIFT)) u_array (
    .clk2x_i(clk2x_i),
    .rst_ni (rst_ni),
    .tog_i  (tog_q),
    .load_i (mac_fire),
    .mode_i (mode),
    .sets_i (sets),
    .busy_o (busy),
    .valid_o(res_valid),
    .res_o  (res)
  );

  // ---------------------------------------------------------------- accumulators
  acc_t prod [N_ACC];
  acc_t rdata;

  always_comb for (int o = 0; o < N_ACC; o++) prod[o] = res[o];

  mp_mac_acc #(.NACC(N_ACC)) u_acc (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .acc_en_i (res_valid),
    .prod_i   (prod),
    .ld_i     (ld_fire),
    .bias_lo_i(acc_t'(rs1_i)),
    .bias_hi_i(acc_t'(rs2_i)),
    .sel_i    (acc_sel),
    .rdata_o  (rdata)
  );

  assign rd_we_o    = rd_fire;
  assign rd_wdata_o = rdata;

  // Handshake rules: MACs never stall, only the unit's own instructions
  // complete, and only reads write a register.
  a_mac_no_stall: assert property (@(posedge clk_i) disable iff (!rst_ni) (op == OP_MAC) |-> ready_o)
    else $error("MAC stalled");
  a_ready_own: assert property (@(posedge clk_i) disable iff (!rst_ni) ready_o |-> is_mp_o)
    else $error("ready for a foreign instruction");
  a_we_read: assert property (@(posedge clk_i) disable iff (!rst_ni) rd_we_o |-> (op == OP_ACC_RD))
    else $error("register write by a non-read");
  a_rd_ordered: assert property (@(posedge clk_i) disable iff (!rst_ni) rd_fire |-> !pending)
    else $error("accumulator read overtook a MAC");

endmodule
