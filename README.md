# Mixed-precision MAC unit for a small RISC-V core

Quantised neural networks do not need the same precision in every layer: many
layers tolerate 4-bit or even 2-bit weights while the activations stay at 8 bits.
A plain 32-bit RISC-V core gains nothing from that, because each
multiply-accumulate still costs a load, an unpack and a `mul`/`add`. This unit
lets a small core (the design targets Ibex, a 2-stage RV32IMC core) execute one
instruction that performs **4, 8 or 16 multiply-accumulates**, depending on the
precision of the weights. The instruction takes four 8-bit activations in `rs1`
and 4, 8 or 16 packed weights in `rs2`. Throughput comes from three techniques,
one added per mode:

| Mode | instruction | weights in `rs2` | MACs / instruction | techniques |
|------|-------------|------------------|--------------------|------------|
| Mode-1 | `nn_mac_8b` | 4 x 8-bit  | 4  | operand packing, parallel multipliers |
| Mode-2 | `nn_mac_4b` | 8 x 4-bit  | 8  | + multi-pumping (multipliers run at 2x the core clock) |
| Mode-3 | `nn_mac_2b` | 16 x 2-bit | 16 | + soft SIMD (two 2-bit weights share one multiplier) |

Every instruction issues in one core cycle and never stalls. The results go into
four internal 32-bit accumulators, one per output feature. Biases are shifted
into the accumulators before a dot product starts, and the results are read out
after it ends.

The hardware is small. It has four 17x17 signed multipliers: the core's
one-cycle RV32M multiplier already has three, and one is added. It also has two
34-bit partial-product adders, four accumulators and a few pipeline registers.

## Instruction encoding

All operations are R-type words in the custom-0 major opcode (`0001011`).

| operation | funct7 | funct3 | rs1 | rs2 | rd | effect |
|-----------|--------|--------|-----|-----|----|--------|
| `nn_mac_8b` | `000 1000` | `010` | 4 x 8-bit activations | 4 x 8-bit weights  | - | 4 MACs into acc0..3 |
| `nn_mac_4b` | `000 0100` | `010` | 4 x 8-bit activations | 8 x 4-bit weights  | - | 8 MACs into acc0..3 |
| `nn_mac_2b` | `000 0010` | `010` | 4 x 8-bit activations | 16 x 2-bit weights | - | 16 MACs into acc0..3 |
| `nn_acc_ld` | `000 0001` | `000` | bias | bias | - | shift two biases in: acc0,1 <= acc2,3; acc2 <= rs1; acc3 <= rs2 |
| `nn_acc_rd` | `000 0001` | `001` | index in bits 1:0 | - | dest. | rd <= acc[rs1[1:0]] |

The funct7/funct3 values of the three MAC instructions are the published ones.
The major opcode and both accumulator operations are this implementation's own.
The paper only states that biases enter from `rs1`/`rs2` through a shift path,
and that results are read from the 32-bit accumulators.

All values are two's complement. Activation `A1` is byte 0 of `rs1` and `A4` is
byte 3.

## How a packed instruction maps onto four multipliers

This is the core of the design. `w_oi` is the weight that output `o` gives to
input `i`. Each instruction runs the four multipliers M1..M4 twice per core
cycle: phase 0 and phase 1, one fast cycle each. The two partial-product adders
always sum M1+M2 and M3+M4. Phase 0 produces outputs 1 and 2. Phase 1 produces
outputs 3 and 4.

**Mode-1.** `rs2` holds the bytes `w11, w22, w33, w44` (lowest byte first).

| | M1 | M2 | M3 | M4 |
|--|--|--|--|--|
| phase 0 | w11 x A1 | 0 | w22 x A2 | 0 |
| phase 1 | w33 x A3 | 0 | w44 x A4 | 0 |

Output *o* receives `w_oo x A_o`. To feed one input to four outputs, software
puts the same activation in all four bytes of `rs1`.

**Mode-2.** `rs2` holds the nibbles `w11 w12 w21 w22 w33 w34 w43 w44`, nibble 0
first.

| | M1 | M2 | M3 | M4 |
|--|--|--|--|--|
| phase 0 | w11 x A1 | w12 x A2 | w21 x A1 | w22 x A2 |
| phase 1 | w33 x A3 | w34 x A4 | w43 x A3 | w44 x A4 |

Outputs 1 and 2 see activations A1 and A2. Outputs 3 and 4 see A3 and A4. So a
kernel places inputs *j* and *j+1* in `rs1` as `{a[j+1], a[j], a[j+1], a[j]}` and
covers two inputs of four outputs per instruction.

**Mode-3.** The 2-bit field *k* of `rs2` (bits `2k+1:2k`) holds `w_oi` with
`k = 4(o-1) + (i-1)`. So the first byte holds output 1's weights for inputs 1..4.
Each multiplier handles one activation and two outputs at a time:

| | M*i* (i = 1..4) |
|--|--|
| phase 0 | (w2i x 2^12 + w1i) x Ai |
| phase 1 | (w4i x 2^12 + w3i) x Ai |

One instruction therefore covers four inputs of four outputs.

Written as a dot product `y_o = b_o + sum_i W[o][i] * a[i]` over *N* inputs, a
group of four outputs costs *N*, *N/2* or *N/4* instructions in Mode-1, -2 or
-3. The test benches pack operands exactly this way; see `tb/tb_mp_nn_unit.sv`.

## Soft SIMD: two products in one multiplier

The product of an 8-bit activation and a 2-bit weight needs 10 bits. In Mode-3,
the weight operand of a multiplier is `w_hi x 2^12 + w_lo`. Both weights are
sign-extended, and `w_hi x 2^12` fits easily in a 17-bit operand. The product is

    A x w_hi x 2^12  +  A x w_lo

So the low product sits in bits 9:0, two guard bits follow, and the high
product starts at bit 12. The unit adds all four multiplier outputs first (both
PPAs, then one more adder). The low field of that sum is a four-term dot product
within +/-1024, which still fits in the 12 bits below the high field. The fields
are then separated:

    low  = sign-extend(sum[11:0])
    high = (sum >>> 12) + sum[11]

The `+ sum[11]` term restores the borrow that a negative low field took from
the high field. Without it the upper output is off by one whenever the lower dot
product is negative. The fault test of the array checks exactly this. The
offset of 12 is the parameter `SIMD_SHIFT`. The paper's formula writes the
offset as 2^11, but its bit-level figure and text (a 10-bit product plus a 2-bit
guard) give 12, which is what is built.

## Multi-pumping and timing

The multipliers and their registers run on `clk2x_i`, which is twice the core
clock `clk_i` with aligned rising edges. The reference operating points are
50/100 MHz on an FPGA and 250/500 MHz in a 7 nm standard-cell flow. Both clocks
are inputs: the clock generator is not part of this RTL.

To know which half of a core cycle it is in, the fast domain compares a
core-domain toggle flip-flop with its own copy of it, sampled one fast cycle
earlier. The two differ during the first half.

    core cycle        n          n+1                   n+2          n+3
    issue MAC k   decode ->|
    17-bit Reg              [ops of k     ]
    multipliers              ph0 | ph1
    p0_q                         [out1,2]
    32-bit Reg                           |[out1..4 of k          ]
    accumulators                                                  |acc += out  (end of n+2)

- A MAC issued in core cycle *n* is added to the accumulators at the end of
  cycle *n+2*. MACs issue every cycle, back to back.
- `nn_acc_ld` and `nn_acc_rd` wait (`ready_o` low) while any MAC is still in
  those stages. A read therefore always sees every earlier MAC. The first read
  after a MAC stream stalls exactly two core cycles, and the following reads do
  not stall.
- A read returns its accumulator combinationally, with `rd_we_o`, in the cycle
  it is accepted.

The holding register `p0_q` keeps the phase-0 results so that the whole
4 x 32-bit result register is stable for one full core cycle. The accumulators
in the core domain can then add it without a clock-domain hazard. The longest
fast-clock path is multiplier, PPA and (in Mode-3) the field split. The
accumulate has a whole core cycle.

## Modules

| file | role |
|------|------|
| `rtl/mp_pkg.sv` | encodings, widths, operand and result types |
| `rtl/mp_decoder.sv` | recognises the instructions, divides `rs1`/`rs2` into 2 x 4 multiplier operand pairs (tables above) |
| `rtl/mp_pump_array.sv` | 2x-clock datapath: operand register, phase multiplexer, 4 multipliers, 2 PPAs, soft-SIMD split, result register |
| `rtl/mp_mul17.sv` | one 17x17 signed multiplier |
| `rtl/mp_ppa.sv` | one 34-bit partial-product adder |
| `rtl/mp_mac_acc.sv` | four 32-bit accumulators, bias shift path, read multiplexer |
| `rtl/mp_nn_unit.sv` | top: the three above plus the issue interlock and register write-back |

Ports of the top `mp_nn_unit`:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk_i`, `clk2x_i` | in | 1 | core clock and aligned 2x clock |
| `rst_ni` | in | 1 | asynchronous reset, active low; release it synchronously to `clk_i` |
| `instr_valid_i`, `instr_i` | in | 1, 32 | instruction in the execute stage |
| `rs1_i`, `rs2_i` | in | 32 | register operands |
| `is_mp_o` | out | 1 | the instruction belongs to this unit |
| `ready_o` | out | 1 | the unit's instruction completes this cycle (low: hold it) |
| `rd_we_o`, `rd_addr_o`, `rd_wdata_o` | out | 1, 5, 32 | register write of `nn_acc_rd` |
| `idle_o` | out | 1 | no MAC in flight |

Inside the core, `is_mp_o` steers the instruction to the unit, `ready_o` plays
the role of the execute stage's "done" signal, and the `rd_*` port goes to the
write-back multiplexer. `rd_addr_o` is the instruction's `rd` field wired
through.

## Simulating

Every test bench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/mp_pkg.sv rtl/mp_mul17.sv rtl/mp_ppa.sv \
        rtl/mp_decoder.sv rtl/mp_pump_array.sv rtl/mp_mac_acc.sv rtl/mp_nn_unit.sv \
        tb/tb_mp_nn_unit.sv --top-module tb_mp_nn_unit
    ./obj_dir/Vtb_mp_nn_unit

| test bench | what it checks |
|------------|----------------|
| `tb_mp_decoder` | every operand of every multiplier and phase, for random `rs1`/`rs2` in all modes; encodings that must not decode |
| `tb_mp_pump_array` | results and their exact two-cycle latency against sums of the raw weights; Mode-3 with negative low fields |
| `tb_mp_mac_acc` | accumulate, bias shift order and 32-bit wrap against a reference model |
| `tb_mp_nn_unit` | end to end: random dense layers in all modes with bubbles and foreign instructions; no stall on MAC streams; two-cycle read and bias-load interlock; counts that every mechanism occurred |
| `tb_mp_workloads` | a complete LeNet-5 inference (416,520 MACs, conv layers via im2col); a 5x5 32->16 convolution and the MobileNetV1 1024->1000 dense layer in each mode; one MAC instruction per core cycle |

Instruction counts measured by `tb_mp_workloads` equal the number of core
cycles spent issuing MACs. No MAC stalls, so this is the whole cost of the
multiply-accumulate part of each layer:

| layer | Mode-1 | Mode-2 | Mode-3 |
|-------|--------|--------|--------|
| dense 1024 -> 1000 (MobileNetV1 classifier) | 256,000 | 128,000 | 64,000 |
| conv 5x5, 32 -> 16 channels, 16x16 output | 819,200 | 409,600 | 204,800 |

In the LeNet-5 run, the layer precisions are 8/2/2/4/8 bit. It takes 43,904 +
15,200 + 3,000 + 1,260 + 252 = 63,616 MAC instructions for 416,520
multiply-accumulates. Bias loads, reads, requantisation and loop overhead run
on the host core and are not counted.

The test benches generate `clk` and `clk2x` from one process, so that both
rising edges fall in the same time step. Do the same in any other environment,
or derive the core clock from the fast clock in the same time step.

## What this RTL is and is not

Built as the paper describes it:
- the instruction encodings of the three MAC instructions;
- the operand split per multiplier and fast cycle for the three modes;
- four 17x17 multipliers on a doubled clock;
- two 34-bit partial-product adders;
- the 2-bit soft-SIMD packing with a 12-bit field offset;
- four 32-bit accumulators loaded with biases from `rs1`/`rs2`.

This implementation's own choices, where the paper gives no detail:
- the custom-0 opcode;
- the two accumulator operations and their encodings;
- the order in which biases shift in;
- MAC instructions write no register;
- the phase detector and `p0_q`;
- the extra adder that joins the two PPA sums in Mode-3, and the borrow correction;
- the two-cycle pipeline and the interlock;
- asynchronous reset, and 32-bit wrap-around (no saturation).

Known departures and open points:
- The published figure feeds `rs1` to the weight input and `rs2` to the
  activation input of the decoder. Its encoding table says the opposite, and
  this design follows the table.
- The same figure labels the multiplexer in front of the multipliers `funct3`.
  Here it selects the fast-cycle phase.
- In Mode-1, the paper says multi-pumping brings nothing. The operand map used
  here (from the paper's mapping figure) still spreads the four products over
  two multipliers and two fast cycles. The throughput is the same, one
  instruction per core cycle.
- The paper's operand figure shows 4-bit activations in Mode-2. The text and
  the encoding table say activations are always 8-bit, and that is what is
  built.
- The rest of the core is not here: fetch, register file, controller, CSRs,
  load/store unit, and the base ALU and RV32M multiplier/divider. In the paper
  these stay unchanged. Sharing the four multipliers with RV32M `mul` is not
  built either, because the paper does not say how those operands are routed.
- Frequency, power and area claims depend on the FPGA/ASIC flow and are not
  reproduced here.
