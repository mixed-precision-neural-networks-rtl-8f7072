// tb_mp_pump_array -- self-checking test of the multi-pumped multiplier array.
//
// Generates a core clock and an aligned 2x clock, issues one random MAC
// operand bundle per core cycle (with random idle cycles), and checks that the
// four results appear exactly two core cycles after issue, equal to sums
// computed from the raw weights and activations: for Mode-1/2 outputs 1,2 are
// M1+M2 and M3+M4 of phase 0 and outputs 3,4 the same of phase 1; for Mode-3
// each output is the dot product of one weight row with the four activations,
// computed without any packing. Counts Mode-3 bundles whose low field is
// negative (borrow correction exercised).
module tb_mp_pump_array;
  import mp_pkg::*;

  logic clk = 1'b0, clk2x = 1'b0, rst_n = 1'b0, tog = 1'b0;
  logic load, busy, valid;
  mp_mode_e mode;
  mul_sets_t sets;
  acc_vec_t res;

  int checks = 0, failures = 0, borrow_cases = 0, mode_seen [3] = '{0, 0, 0};

  mp_pump_array dut (.clk2x_i(clk2x), .rst_ni(rst_n), .tog_i(tog), .load_i(load),
                     .mode_i(mode), .sets_i(sets), .busy_o(busy), .valid_o(valid), .res_o(res));

  // aligned clocks: both rise together every second fast edge
  initial forever begin
    clk2x = 1'b1; clk = 1'b1; #5;
    clk2x = 1'b0; #5;
    clk2x = 1'b1; clk = 1'b0; #5;
    clk2x = 1'b0; #5;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tog <= 1'b0; else tog <= ~tog;

  // expected results per issue cycle
  int exp_q [$][4];
  int vld_q [$];

  function automatic int sx(input int v, input int bits);
    v = v & ((1 << bits) - 1);
    return (v >= (1 << (bits-1))) ? v - (1 << bits) : v;
  endfunction

  task automatic make_bundle(output int e [4]);
    int md, a [4], w [8], w2 [16];
    md = $urandom_range(0, 2);
    mode = mp_mode_e'(md);
    mode_seen[md]++;
    for (int i = 0; i < 4; i++) a[i] = sx($urandom, 8);
    sets = '0;
    case (md)
      0, 1: begin
        for (int k = 0; k < 8; k++) w[k] = sx($urandom, md == 0 ? 8 : 4);
        for (int p = 0; p < 2; p++)
          for (int m = 0; m < 4; m++) begin
            int ww, aa;
            ww = (md == 0 && (m % 2 == 1)) ? 0 : w[4*p + m];
            aa = (md == 0 && (m % 2 == 1)) ? 0 : a[$urandom_range(0, 3)];
            sets[p][m].w = op17_t'(ww);
            sets[p][m].a = op17_t'(aa);
          end
        for (int p = 0; p < 2; p++) begin
          e[2*p]   = int'(sets[p][0].w) * int'(sets[p][0].a) + int'(sets[p][1].w) * int'(sets[p][1].a);
          e[2*p+1] = int'(sets[p][2].w) * int'(sets[p][2].a) + int'(sets[p][3].w) * int'(sets[p][3].a);
        end
      end
      default: begin
        for (int k = 0; k < 16; k++) w2[k] = sx($urandom, 2);
        // w2[4*o + i] = weight of output o, input i
        for (int p = 0; p < 2; p++)
          for (int i = 0; i < 4; i++) begin
            sets[p][i].w = op17_t'(w2[4*(2*p+1) + i] * 4096 + w2[4*(2*p) + i]);
            sets[p][i].a = op17_t'(a[i]);
          end
        for (int o = 0; o < 4; o++) begin
          e[o] = 0;
          for (int i = 0; i < 4; i++) e[o] += w2[4*o + i] * a[i];
        end
        if (e[0] < 0 || e[2] < 0) borrow_cases++;
      end
    endcase
  endtask

  int cycle = 0;
  initial begin
    load = 1'b0; mode = MODE_8B; sets = '0;
    repeat (3) @(posedge clk);
    #2 rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      int e [4];
      @(posedge clk); #2;
      load = ($urandom_range(0, 9) != 0);
      if (load) make_bundle(e); else e = '{0, 0, 0, 0};
      exp_q.push_back(e);
      vld_q.push_back(load);
    end
    @(posedge clk); #2 load = 1'b0;
    repeat (4) @(posedge clk);
    if (borrow_cases == 0 || mode_seen[0] == 0 || mode_seen[1] == 0 || mode_seen[2] == 0) begin
      failures++; $display("FAIL: a mode or the soft-SIMD borrow case never occurred");
    end
    $display("modes seen %0d/%0d/%0d, soft-SIMD borrow cases %0d",
             mode_seen[0], mode_seen[1], mode_seen[2], borrow_cases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor: sample at a time inside the core cycle (after inputs settle).
  always @(negedge clk) begin
    if (rst_n) begin
      cycle++;
      if (cycle > 2 && vld_q.size() >= 3) begin
        int e [4];
        int v;
        // element 0 is the bundle issued two cycles before the current one
        e = exp_q[0]; v = vld_q[0];
        void'(exp_q.pop_front()); void'(vld_q.pop_front());
        checks++;
        if (valid != v[0]) begin
          failures++; $display("FAIL cycle %0d: valid=%0b expected %0d", cycle, valid, v);
        end
        if (v != 0)
          for (int o = 0; o < 4; o++) begin
            checks++;
            if (int'(res[o]) != e[o]) begin
              failures++;
              $display("FAIL cycle %0d out %0d: got %0d exp %0d", cycle, o+1, res[o], e[o]);
            end
          end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
