# SPARX — a secure, approximate CNN accelerator inside a RISC-V pipeline

SPARX adds a single custom RISC-V instruction that runs a whole quantised CNN
inference on a tightly coupled accelerator. Three bits of the instruction choose
how the inference is done:

- **privacy**: whether the answer is obfuscated with pseudo-random noise and the
  request must first pass a challenge–response check;
- **approximation**: whether the multipliers are exact or a cheap logarithmic
  approximation;
- **model variant**: whether the network is the MNIST one or the CIFAR-10 one.

This gives eight modes, from plain exact MNIST up to secure approximate
CIFAR-10. The processor stalls in its execute stage while the accelerator
works. The class (or a denial word) then goes into the destination register
like any other ALU result.

This repository is a synthesizable SystemVerilog model of that system:

- a five-stage RV32IMC core;
- the accelerator, built from
  - an 8×8 systolic array of dual-mode MAC elements,
  - batch norm, ReLU and a pooling unit made of "AAD" cells,
  - a fully connected stage and an argmax,
  - a signature verifier and an LFSR noise injector;
- small SoC glue: instruction and data RAMs, an interconnect, an LED register
  and an AXI-Lite port through which a host loads images and weights.

## The instruction

```
 31   28 27   24 23   20 19  15 14 12 11   7 6       0
+-------+-------+-------+------+-----+------+---------+
|  key  | chal. |  sig. | rs1  | abc |  rd  | 1111011 |
+-------+-------+-------+------+-----+------+---------+
```

The fields:

- `a` (bit 14) is privacy, `b` (bit 13) is approximate and `c` (bit 12) is
  CIFAR-10.
- The top twelve bits (the I-type immediate) carry a 4-bit user key, a 4-bit
  challenge and a 4-bit signature.
- `rs1[11:0]` is the byte address of the image in the accelerator's input bank.
- `rd` receives the result:
  - `{28'b0, class}` for a normal inference;
  - `32'h8000_0000` when the request was refused.

A program can branch on the sign of the result to tell a refusal from a class.

In EX the core raises `acc_req` with the instruction and the forwarded `rs1`.
It holds PC, IF/ID and ID/EX for as long as `acc_req && !acc_done`, and sends
bubbles into MEM so that older instructions drain. While the core is stalled,
the held operands are refreshed from the forwarding network. This is needed
because the instruction that produced `rs1` may retire during the stall. In the
cycle `acc_done` rises, the result takes the normal write-back path, and a
dependent instruction right behind it is forwarded as usual.

## Arithmetic: one PE, two multipliers

Each processing element (`mac_pe`) registers its weight (arriving from the
left) and its input (arriving from above), and passes both on to its
neighbours. It multiplies the registered pair and adds the product into a
16-bit accumulator.

- **Exact mode (`b = 0`)**: a signed radix-4 Booth multiplier (`booth_mult`).
- **Approximate mode (`b = 1`)**: the first term of the Iterative Logarithmic
  Multiplier (`ilm_mult`), applied to the operand magnitudes. The sign is put
  back afterwards.

The ILM writes each operand as `N = 2^k + r`. A leading-one detector and a
priority encoder give `k`, and an XOR gives the residue `r`. The product is
then approximated as

```
P0 = 2^(k1+k2) + r1·2^k2 + r2·2^k1   (= N1·N2 − r1·r2)
```

This takes one decoder, two barrel shifters and two adders, and no
multiplier. The dropped term `r1·r2` makes the result always low, by at most
about a quarter of the product. For example, 7·5 gives 32 instead of 35.
Zero operands are forced to a product of 0.

Two "bit quantisation" stages narrow the datapath:

- the product is saturated to 16 bits;
- the accumulator add saturates at the 16-bit signed limits.

A `clr` flag travels with the operands and starts a new sum, so the array can
run back-to-back tiles without a separate reset cycle.

## Systolic array and the inference schedule

`systolic_array` is an 8×8 output-stationary grid.

- Row `r` carries the weights of output channel `r`. Column `c` carries the
  inputs of output pixel `c`.
- The caller presents one aligned reduction step per cycle. Skew registers
  inside the array delay row `r` by `r` cycles and column `c` by `c` cycles.
- A step presented in cycle `t` reaches `acc[r][c]` at the end of cycle
  `t + r + c + 2`. The whole array has therefore settled **16 cycles
  (2N)** after the last step.

The accelerator runs one fixed network on this array. The network shape is a
choice of this design; it was picked as the smallest one that uses every unit
of the accelerator.

| stage | MNIST (`c = 0`) | CIFAR-10 (`c = 1`) |
|---|---|---|
| input | 28×28×1, 784 B | 32×32×3, 3072 B |
| 3×3 conv, stride 1, zero padding, 8 channels | K = 9 | K = 27 |
| batch norm `y = sat16((acc·scale) >>> 8 + bias)` | per channel | per channel |
| ReLU, clipped to 0…127 | | |
| 2×2 AAD pooling | 8×14×14 = 1568 | 8×16×16 = 2048 |
| fully connected to 10 classes | 15 680 weights | 20 480 weights |
| argmax (ties go to the lower index) | | |

The control engine (`control_engine`) sequences the network as follows.

- **Convolution.** The network runs in tiles of 8 consecutive output pixels.
  For each tile:
  1. K feed cycles. `conv_unit` turns (pixel, k) into an input-bank address,
     or a padding zero.
  2. 16 settle cycles.
  3. 64 drain cycles. Each drain cycle sends one accumulator through batch
     norm and ReLU into the activation buffer.
- **Pooling.** One 2×2 window per cycle goes through `aad_pool` into the
  pooled buffer.
- **Fully connected.** The same array computes the FC layer: rows are classes
  and column 0 carries the pooled feature. It needs two tiles (classes 0–7
  and 8–9). Each tile takes NPOOL feed cycles, 16 settle cycles and one cycle
  to capture the biased logits.
- **Result.** Argmax, then the privacy stage.

The latency from the cycle in which a request is accepted to `done` is

```
(a ? 2 : 0) + (H·H/8)·(K + 16 + 64) + NPOOL + 2·(NPOOL + 17) + 3
```

| mode | cycles |
|---|---|
| MNIST, exact or approximate | 13 463 |
| CIFAR-10, exact or approximate | 19 877 |
| secure (add to the above) | +2 |
| refused: failed signature or key | 3 |
| refused: invalid AXI ID | 1 |

The testbenches check these numbers.

## AAD pooling

An AAD cell takes two values and computes their difference `d`. A threshold
at zero gives the sign of `d`, and multiplying `d` by that sign gives `|d|`.
The cell then outputs

```
y = (I0 + I1 + |I0 − I1|) / 2 = max(I0, I1)
```

so the pool selects the larger value with adders and no comparator-driven
multiplexer. A 2×2 window uses three cells: one for each row pair, then one
for the two winners. The cell also exposes `|I0 − I1| / 2` as `absdiff`.

The exact meaning of "AAD" is this design's reading of the subtract /
threshold / multiply / divide chain: average plus absolute deviation. With
that reading the unit behaves as a max pool.

## Authentication and privacy

`security_unit` holds a 4-bit device key. The key resets to `4'hA`, and the
host can rewrite it through the AXI-Lite register at `0xC0000`.

For a secure request (`a = 1`), `sig_verifier` compares the user key with the
device key. The request is granted only if the keys match and

```
signature == (challenge >> 1) ^ key
```

A plain clock-enabled `sign_valid` flop would keep an earlier success after a
wrong key. A second flop therefore records the key match of the same request,
and `grant = key_ok & sign_valid`. A refused request never touches the array.
Neither does any request made while the system drives `invalid_axi_id`.

In the privacy modes the 4-bit class is XORed with the state of a
free-running 4-bit LFSR:

- polynomial x⁴ + x³ + 1;
- seed `4'h9`;
- steps every clock.

The result is registered. Because the LFSR never passes through zero, a
secure result always differs from the plain class. Undoing it requires knowing
the LFSR phase at the moment the result was produced. Only the class is
noised. The denial word is returned as is.

## Host port and accelerator memory map

The accelerator's banks are filled over AXI4-Lite (`axi_lite_slave`).

- The port takes 20-bit byte addresses. Bits [19:18] select the region and
  bits [17:2] the entry, one entry per 32-bit access.
- Writes complete in one cycle after AW and W are both valid. `BVALID` and
  `RVALID` are held until accepted; assertions in the slave check this.
- The response is always OKAY.

| region (addr[19:18]) | contents | entry layout |
|---|---|---|
| 0 (0x00000) | input bank, 4096 × 8 bit | image bytes `[channel][y][x]` from the base given in `rs1` |
| 1 (0x40000) | weight bank, 32768 × 8 bit | conv weight `k·8 + ch` (k = (ci·3+ky)·3+kx); FC weight `256 + feature·10 + class` |
| 2 (0x80000) | bias bank, 64 × 16 bit | BN scale 0–7, BN bias 8–15, FC bias 16–25 |
| 3 (0xC0000) | registers | 0 device key, 1 busy, 2 last result |

Pooled features are indexed `channel·(H/2)² + y·(H/2) + x`.

The bank sizes are set so that the CIFAR-10 variant fits exactly. The
activation buffer (8192 B) and the pooled buffer (2048 B) are internal.

## The processor

`rv32_core` is a classic five-stage RV32IMC pipeline.

- **Compressed instructions**: handled entirely in fetch.
  - The instruction RAM has a second read port. IF sees the word holding the
    PC and the word after it, so a 32-bit instruction that starts on a
    halfword boundary and spans two words is still fetched in one cycle.
  - A halfword whose two low bits are not `11` goes through `rv32_rvc_expand`.
    That module rewrites it as the equivalent 32-bit instruction, so the
    decoder and everything after it only ever see full-size instructions.
  - The PC advances by 2 or 4. JAL and JALR link to PC+2 after a compressed
    jump.

- **Forwarding**: from EX/MEM and from MEM/WB to both ALU operands, the branch
  unit, the store data and the accelerator's `rs1`.
- **Register file**: writes through to its read ports in the same cycle.
- **Load-use hazard**: a one-cycle stall.
- **Branches and jumps**: resolved in EX, so a taken one flushes the two
  younger instructions.
- **M extension**: single-cycle and combinational.
- **ECALL / EBREAK**: stops fetching; `halted` rises once the pipeline is
  empty. There are no CSRs or traps.
- **`en = 0`**: freezes the pipeline, so a host can load the instruction RAM
  through the `imem_*` port.

`sparx_soc` connects:

- 16 KiB instruction RAM;
- 16 KiB data RAM at 0x0000_0000;
- LED register at 0x8000_0000 (byte lane 0), through `soc_interconnect`;
- the accelerator in EX, with its AXI-Lite port and `invalid_axi_id` brought
  out as top-level ports.

## Where this model departs from the description it is based on

- **Branch resolution.** Branches resolve in EX rather than in decode.
- **Network shape.** The network is this design's own. The source names the
  units (conv, batch norm, ReLU, AAD pool, MLP, argmax) and the two dataset
  variants, but no layer list. A deep network such as ResNet-20 (about
  0.27 M weights) does not fit the 32 KiB weight bank or the single-network
  sequencer.
- **Only the first ILM term.** Only `P0` of the ILM is built, with no
  correction iterations.
- **Choices where the source is silent:**
  - the LFSR taps and seed;
  - the challenge shift (1 bit);
  - the device key reset value;
  - the batch-norm shift (8);
  - the ReLU clip (127);
  - the 16-bit saturation points;
  - the result word encoding;
  - the AXI-Lite map.
- **Off-chip and board parts are not modelled.** These are the camera, I2S,
  down-scaling, on-screen display, USB, flash, external RAM and UART. Images
  and weights arrive through the AXI-Lite port instead.
- **Multiplier and dataflow variants.** Eleven approximate multipliers exist
  as alternatives. Only the chosen ILM and the exact Booth design are
  implemented. The array's output-stationary dataflow and the schedule above
  are choices of this design.

## Verifying and simulating

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one:

- compares against values computed independently;
- prints `TB_RESULT checks=N failures=M`;
- has a watchdog.

The key ones are:

- `tb_ilm_mult` and `tb_booth_mult`: exhaustive checks over all operand
  pairs.
- `tb_systolic_array`: random matrices against a software matrix product,
  plus the 2N settle time.
- `tb_sparx_accel`: loads random networks over AXI-Lite and runs all eight
  modes against `tb_sparx_ref_pkg`. That package is a software model of the
  same network with the same saturation and approximation rules. The test also
  checks latency, denials, key rewriting and the noise value.
- `tb_rv32_core`: runs two programs with behavioural memories and a
  behavioural accelerator.
  - The first covers forwarding, load-use, loops, calls, M ops, sub-word
    memory access, back-to-back accelerator instructions and halt.
  - The second mixes compressed and 32-bit code, including 32-bit
    instructions (one of them an accelerator instruction) at halfword
    addresses.
- `tb_rv32_rvc_expand`: checks every compressed form against the 32-bit
  instruction it must become, plus the illegal encodings.
- `tb_sparx_soc`: runs the full SoC at its default sizes. It loads a
  program and a random network, then issues seven accelerator instructions:
  MNIST, CIFAR-10, approximate, secure, wrong key, base from a load, and
  invalid ID. It checks:
  - the results;
  - the ten class scores of each granted mode, which show the approximate
    arithmetic even where the winning class is unchanged;
  - the data RAM and LED contents;
  - the retired count;
  - the latency of each request.

  It also counts each mechanism: accelerator stall, load-use stall, branch
  redirect, denial, invalid-ID denial, granted request, noise, approximate
  mode, exact mode, model switch, LED write and compressed instruction. A mechanism that never
  happens counts as a failure. The test takes about 20 s of simulation time
  with Verilator.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sparx_pkg.sv rtl/rv32_pkg.sv tb/tb_sparx_soc.sv --top tb_sparx_soc
./obj_dir/Vtb_sparx_soc
```

To run another test, replace `tb_sparx_soc` with any other `tb_<module>`.
Shared packages live in `rtl/sparx_pkg.sv` (modes, fields, sizes, bank
layout) and `rtl/rv32_pkg.sv` (opcodes, control and pipeline-register
structs). Testbench helpers are:

- `tb/tb_macros.svh`: check and watchdog macros;
- `tb/tb_axi_tasks.svh`: AXI-Lite master tasks and the network loader;
- `tb/tb_rv32_asm_pkg.sv`: an instruction encoder.
