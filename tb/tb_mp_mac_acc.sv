// tb_mp_mac_acc -- self-checking test of the accumulator bank.
//
// Random sequences of bias loads, accumulations and idle cycles are applied;
// a reference model of four 32-bit wrap-around accumulators (bias pairs shift
// in from the top, two places per load) is kept in the testbench, and every
// accumulator is compared through the read-out port after each cycle.
module tb_mp_mac_acc;
  import mp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic acc_en, ld;
  acc_t prod [N_ACC];
  acc_t bias_lo, bias_hi, rdata;
  logic [1:0] sel;

  int checks = 0, failures = 0, n_ld = 0, n_acc = 0;
  longint ref_acc [4];

  mp_mac_acc dut (.clk_i(clk), .rst_ni(rst_n), .acc_en_i(acc_en), .prod_i(prod), .ld_i(ld),
                  .bias_lo_i(bias_lo), .bias_hi_i(bias_hi), .sel_i(sel), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    acc_en = 0; ld = 0; sel = 0; bias_lo = 0; bias_hi = 0;
    for (int o = 0; o < 4; o++) begin prod[o] = 0; ref_acc[o] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      int kind;
      @(negedge clk);
      kind = $urandom_range(0, 9);
      ld = (kind < 2); acc_en = (kind >= 2 && kind < 9);
      bias_lo = $urandom; bias_hi = $urandom;
      for (int o = 0; o < 4; o++) prod[o] = (n % 500 < 20) ? acc_t'(32'h7fff_0000 + $urandom_range(0, 65535)) : acc_t'($urandom_range(0, 4095) - 2048);
      @(posedge clk); #1;
      if (ld) begin
        n_ld++;
        ref_acc[0] = ref_acc[2]; ref_acc[1] = ref_acc[3];
        ref_acc[2] = longint'(bias_lo); ref_acc[3] = longint'(bias_hi);
      end else if (acc_en) begin
        n_acc++;
        for (int o = 0; o < 4; o++) ref_acc[o] = longint'(acc_t'(ref_acc[o] + longint'(prod[o])));
      end
      ld = 0; acc_en = 0;
      for (int o = 0; o < 4; o++) begin
        sel = 2'(o); #1;
        checks++;
        if (longint'(rdata) != ref_acc[o]) begin
          failures++;
          $display("FAIL n=%0d acc%0d got %0d exp %0d", n, o, rdata, ref_acc[o]);
        end
      end
    end
    if (n_ld == 0 || n_acc == 0) failures++;
    $display("bias loads %0d, accumulations %0d", n_ld, n_acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
