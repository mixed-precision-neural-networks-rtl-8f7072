// tb_mp_workloads -- dense-layer workloads run through the mixed-precision unit.
//
// A behavioural issue stage executes whole fully-connected layers with the
// unit, the way the kernel library would: for every group of four outputs,
// two bias loads, the packed MAC stream, four accumulator reads. Activations
// are 8-bit, weights 8/4/2-bit as the layer's precision says. Between layers
// the host requantises (ReLU, arithmetic shift, clamp to 0..127).
//   1. A complete LeNet-5 inference on a random 32x32 image: conv 5x5 1->6
//      (8-bit weights), 2x2 max-pool, conv 5x5 6->16 (2-bit), 2x2 max-pool,
//      dense 400->120 (2-bit), 120->84 (4-bit), 84->10 (8-bit). Convolutions
//      run as dot products over im2col patches, padded with zero weights to
//      a multiple of four inputs.
//   2. A 5x5 convolution 32->16 channels on a 16x16 map (the second layer of
//      the CMSIS-NN CIFAR-10 network), once in each mode.
//   3. MobileNetV1 final dense layer, 1024 -> 1000, once in each mode.
// The per-layer precisions are an example mixed-precision configuration.
// Every output is compared with a plain dot product, and the number of core
// cycles spent issuing MACs is checked against the instruction count the mode
// implies: N*OUT/4 (Mode-1), N*OUT/8 (Mode-2), N*OUT/16 (Mode-3) per output
// position, i.e. one instruction per core cycle without a stall. Weights and
// inputs are random.
module tb_mp_workloads;
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
  longint macs_total = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  function automatic logic [31:0] rtype(input logic [6:0] f7, input logic [2:0] f3, input logic [4:0] rd);
    return {f7, 5'd11, 5'd10, f3, rd, OPC_CUSTOM0};
  endfunction

  function automatic int sx(input int v, input int bits);
    v = v & ((1 << bits) - 1);
    return (v >= (1 << (bits-1))) ? v - (1 << bits) : v;
  endfunction

  task automatic issue(input logic [31:0] ins, input logic [31:0] a, input logic [31:0] b,
                       output logic [31:0] wdata);
    valid = 1'b1; instr = ins; rs1 = a; rs2 = b;
    forever begin
      @(negedge clk);
      if (ready) begin
        wdata = rd_wdata;
        @(posedge clk); #2;
        break;
      end
      @(posedge clk); #2;
    end
    valid = 1'b0;
  endtask

  // One dense layer: y[o] = b[o] + sum_i w[o][i] * x[i]; md = 0/1/2 for 8/4/2-bit
  // weights. Returns the MAC-issue cycles spent.
  task automatic dense(input int md, input int n_in, input int n_out,
                       ref int x [], ref int w [][], ref int b [], ref int y [],
                       output longint mac_cycles);
    int step;
    logic [31:0] d;
    step = (md == 0) ? 1 : (md == 1 ? 2 : 4);
    mac_cycles = 0;
    y = new[n_out];
    for (int g = 0; g < n_out; g += 4) begin
      longint t0;
      int ob [4];
      for (int o = 0; o < 4; o++) ob[o] = (g + o < n_out) ? b[g+o] : 0;
      issue(rtype(F7_ACC, F3_ACC_LD, 5'd0), ob[0], ob[1], d);
      issue(rtype(F7_ACC, F3_ACC_LD, 5'd0), ob[2], ob[3], d);
      t0 = cycles;
      for (int j = 0; j < n_in; j += step) begin
        logic [31:0] ra, rw;
        logic [6:0] f7;
        int wv [4][4];
        for (int o = 0; o < 4; o++)
          for (int i = 0; i < 4; i++)
            wv[o][i] = (g + o < n_out && j + i < n_in) ? w[g+o][j+i] : 0;
        ra = '0; rw = '0;
        case (md)
          0: begin
            f7 = F7_MAC_8B;
            for (int k = 0; k < 4; k++) ra[8*k +: 8] = 8'(x[j]);
            for (int o = 0; o < 4; o++) rw[8*o +: 8] = 8'(wv[o][0]);
          end
          1: begin
            f7 = F7_MAC_4B;
            ra = {8'(x[j+1]), 8'(x[j]), 8'(x[j+1]), 8'(x[j])};
            for (int o = 0; o < 4; o++) rw[8*o +: 8] = {4'(wv[o][1]), 4'(wv[o][0])};
          end
          default: begin
            f7 = F7_MAC_2B;
            for (int i = 0; i < 4; i++) ra[8*i +: 8] = 8'(x[j+i]);
            for (int o = 0; o < 4; o++)
              for (int i = 0; i < 4; i++) rw[2*(4*o+i) +: 2] = 2'(wv[o][i]);
          end
        endcase
        issue(rtype(f7, F3_MAC, 5'd0), ra, rw, d);
      end
      mac_cycles += cycles - t0;
      for (int o = 0; o < 4; o++) begin
        issue(rtype(F7_ACC, F3_ACC_RD, 5'd1), 32'(o), 32'd0, d);
        if (g + o < n_out) y[g+o] = int'(d);
      end
    end
  endtask

  task automatic check_layer(input string name, input int md, input int n_in, input int n_out,
                             ref int x [], ref int w [][], ref int b [], ref int y [],
                             input longint mac_cycles);
    int step, errs;
    longint want;
    step = (md == 0) ? 1 : (md == 1 ? 2 : 4);
    errs = 0;
    for (int o = 0; o < n_out; o++) begin
      int r;
      r = b[o];
      for (int i = 0; i < n_in; i++) r += w[o][i] * x[i];
      checks++;
      if (r != y[o]) begin
        failures++; errs++;
        if (errs < 5) $display("FAIL %s y[%0d] got %0d exp %0d", name, o, y[o], r);
      end
    end
    want = longint'((n_out + 3) / 4) * longint'(n_in / step);
    macs_total += longint'(n_out) * n_in;
    checks++;
    if (mac_cycles != want) begin
      failures++;
      $display("FAIL %s: %0d MAC cycles, expected %0d", name, mac_cycles, want);
    end
    $display("%-26s N=%5d OUT=%5d Mode-%0d: %0d MAC instructions in %0d core cycles",
             name, n_in, n_out, md + 1, want, mac_cycles);
  endtask

  task automatic rand_layer(input int md, input int n_in, input int n_out,
                            ref int w [][], ref int b []);
    int bits;
    bits = (md == 0) ? 8 : (md == 1 ? 4 : 2);
    w = new[n_out];
    b = new[n_out];
    foreach (w[o]) begin
      w[o] = new[n_in];
      foreach (w[o][i]) w[o][i] = sx($urandom, bits);
      b[o] = int'($urandom_range(0, 4000)) - 2000;
    end
  endtask


  // Convolution, stride 1, no padding, through the unit. x is [C][H][W]
  // flattened, w is [K][C*R*R]; the result y is [K][H-R+1][W-R+1] flattened.
  task automatic conv(input string name, input int md, input int c, input int h, input int wd,
                      input int r, input int k, ref int x [], ref int w [][], ref int b [],
                      ref int y []);
    int oh, ow, n, np, step, errs;
    int patch [], yp [];
    int wp [][];
    longint mc, mc_all;
    oh = h - r + 1; ow = wd - r + 1;
    n = c * r * r;
    np = (n + 3) / 4 * 4;
    step = (md == 0) ? 1 : (md == 1 ? 2 : 4);
    wp = new[k];
    foreach (wp[o]) begin
      wp[o] = new[np];
      foreach (wp[o][i]) wp[o][i] = (i < n) ? w[o][i] : 0;
    end
    y = new[k * oh * ow];
    patch = new[np];
    mc_all = 0; errs = 0;
    for (int py = 0; py < oh; py++)
      for (int px = 0; px < ow; px++) begin
        int q;
        q = 0;
        for (int ci = 0; ci < c; ci++)
          for (int dy = 0; dy < r; dy++)
            for (int dx = 0; dx < r; dx++) patch[q++] = x[(ci * h + py + dy) * wd + px + dx];
        for (; q < np; q++) patch[q] = 0;
        dense(md, np, k, patch, wp, b, yp, mc);
        mc_all += mc;
        for (int o = 0; o < k; o++) begin
          int ref_v;
          ref_v = b[o];
          for (int i = 0; i < n; i++) ref_v += w[o][i] * patch[i];
          checks++;
          if (yp[o] != ref_v) begin
            failures++; errs++;
            if (errs < 5) $display("FAIL %s (%0d,%0d) ch %0d got %0d exp %0d", name, py, px, o, yp[o], ref_v);
          end
          y[(o * oh + py) * ow + px] = yp[o];
        end
      end
    checks++;
    if (mc_all != longint'(oh * ow) * longint'((k + 3) / 4) * longint'(np / step)) begin
      failures++;
      $display("FAIL %s: %0d MAC cycles", name, mc_all);
    end
    macs_total += longint'(oh * ow) * k * n;
    $display("%-26s %0dx%0dx%0d -> %0dx%0dx%0d, %0dx%0d kernel, Mode-%0d: %0d MAC instructions in %0d core cycles",
             name, c, h, wd, k, oh, ow, r, r, md + 1, longint'(oh * ow) * ((k + 3) / 4) * (np / step), mc_all);
  endtask

  // 2x2 max-pool followed by requantisation to 0..127, on [C][H][W].
  function automatic void pool_requant(ref int y [], input int c, input int h, input int wd,
                                       input int shift, ref int x []);
    x = new[c * (h / 2) * (wd / 2)];
    for (int ci = 0; ci < c; ci++)
      for (int py = 0; py < h / 2; py++)
        for (int px = 0; px < wd / 2; px++) begin
          int m, v;
          m = y[(ci * h + 2 * py) * wd + 2 * px];
          for (int d = 1; d < 4; d++) begin
            v = y[(ci * h + 2 * py + d / 2) * wd + 2 * px + d % 2];
            if (v > m) m = v;
          end
          v = (m < 0) ? 0 : (m >>> shift);
          x[(ci * (h / 2) + py) * (wd / 2) + px] = (v > 127) ? 127 : v;
        end
  endfunction

  function automatic void requant(ref int y [], input int shift, ref int x []);
    x = new[y.size()];
    foreach (y[o]) begin
      int v;
      v = (y[o] < 0) ? 0 : (y[o] >>> shift);
      x[o] = (v > 127) ? 127 : v;
    end
  endfunction

  initial begin
    int x [], y [], b [], x1 [], x2 [];
    int w [][];
    longint mc;
    valid = 1'b0; instr = '0; rs1 = '0; rs2 = '0;
    repeat (3) @(posedge clk);
    #2 rst_n = 1'b1;
    @(posedge clk); #2;

    // ---- LeNet-5, complete inference
    begin
      int img [], c1 [], p1 [], c2 [], p2 [];
      img = new[32 * 32];
      foreach (img[i]) img[i] = $urandom_range(0, 127);
      rand_layer(0, 25, 6, w, b);
      conv("LeNet-5 CONV1", 0, 1, 32, 32, 5, 6, img, w, b, c1);
      pool_requant(c1, 6, 28, 28, 8, p1);
      rand_layer(2, 150, 16, w, b);
      conv("LeNet-5 CONV2", 2, 6, 14, 14, 5, 16, p1, w, b, c2);
      pool_requant(c2, 16, 10, 10, 5, p2);
      x = p2;
    end
    rand_layer(2, 400, 120, w, b);
    dense(2, 400, 120, x, w, b, y, mc);
    check_layer("LeNet-5 FC1", 2, 400, 120, x, w, b, y, mc);
    requant(y, 6, x1);
    rand_layer(1, 120, 84, w, b);
    dense(1, 120, 84, x1, w, b, y, mc);
    check_layer("LeNet-5 FC2", 1, 120, 84, x1, w, b, y, mc);
    requant(y, 7, x2);
    rand_layer(0, 84, 10, w, b);
    dense(0, 84, 10, x2, w, b, y, mc);
    check_layer("LeNet-5 FC3", 0, 84, 10, x2, w, b, y, mc);
    $display("LeNet-5 inference: %0d multiply-accumulates", macs_total);
    checks++;
    if (macs_total != 416520) begin failures++; $display("FAIL LeNet-5 MAC total"); end

    // ---- CIFAR-10 CNN second convolution in each mode
    begin
      int fm [], out [];
      fm = new[32 * 20 * 20];
      foreach (fm[i]) fm[i] = $urandom_range(0, 127);
      for (int md = 0; md < 3; md++) begin
        rand_layer(md, 800, 16, w, b);
        conv("CIFAR-10 CNN CONV2", md, 32, 20, 20, 5, 16, fm, w, b, out);
      end
    end

    // ---- MobileNetV1 final dense layer in each mode
    x = new[1024];
    foreach (x[i]) x[i] = $urandom_range(0, 127);
    for (int md = 0; md < 3; md++) begin
      rand_layer(md, 1024, 1000, w, b);
      dense(md, 1024, 1000, x, w, b, y, mc);
      check_layer("MobileNetV1 FC", md, 1024, 1000, x, w, b, y, mc);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
