# Bit-serial GF(2^m) multiplier with NAND-only field addition

Elliptic-curve cryptography over binary fields does almost all of its work
with one operation: multiplying two elements of GF(2^m) and reducing the
result modulo the field polynomial f(x). In a smart card or an implant, the
area of that multiplier matters more than its speed. This design is a
**serial-in, parallel-out** multiplier. It takes one operand A in parallel
and the other, B, one bit per clock, most significant bit first. After m
iterations it presents the m-bit product in parallel. The datapath is two
m-bit registers and 2m AND gates. Every GF(2) addition is a cell of four
2-input NAND gates, so there is no XOR gate in the design. That adds up to
8m NAND gates.

The field size defaults to m = 163, the smallest NIST binary field. Any field
degree can be set with the parameter `M`, and the field polynomial is a run-time
input, so any f(x) of degree m can be used.

## The arithmetic

Elements are polynomials over GF(2) of degree below m in the polynomial
(standard) basis. Bit i of a vector is the coefficient of x^i. The field is
defined by

    f(x) = x^m + f_{m-1} x^{m-1} + ... + f_1 x + f_0

The hardware takes f as the m-bit vector `{f_{m-1}, ..., f_0}`. The leading
x^m term is implied and not stored.

The product C = A·B mod f is computed with Horner's rule over the bits of B,
and the reduction is done in every step rather than once at the end
(interleaved reduction):

    P^0 = 0
    P^k = (x · P^(k-1) mod f)  +  b_{m-k} · A        k = 1 .. m
    C   = P^m

Two small facts keep each step cheap:

* **x · P mod f costs m AND gates.** Shifting P left by one place makes a
  term p_{m-1} x^m. Because f(x) = 0 in the field, x^m equals
  f_{m-1}x^{m-1} + ... + f_0, so that term is replaced by p_{m-1}·f. Output
  bit i is `(p_{m-1} AND f_i) + p_{i-1}`, with p_{-1} = 0. The shift itself is
  only wiring.
* **b·A costs m AND gates.** Each bit of A is gated by the current bit of B.

Addition in GF(2) is XOR. Here each XOR is four NAND gates in three levels:

    n1 = NAND(a, b)
    n2 = NAND(a, n1)
    n3 = NAND(b, n1)
    y  = NAND(n2, n3)        = a XOR b

The reason is area. In the 65 nm standard-cell library used for the
transistor counts, a 2-input NAND takes 4 transistors and a 2-input XOR takes
12. Four NANDs (16 transistors) are compared against that XOR. The design's
area claim rests on this transistor arithmetic. Whether a given synthesis flow
keeps the NAND structure or maps it back to XOR cells depends on the flow and
its constraints. The RTL writes each NAND gate out so that its structure can
be seen.

### A worked example in GF(2^4)

f = x^4 + x + 1 (`f = 4'b0011`), A = x^3 + 1 (`1001`), B = x^2 + x (`0110`):

| k | bit of B | x·P^(k-1) mod f | + b·A  | P^k    |
|---|----------|-----------------|--------|--------|
| 1 | b3 = 0   | 0000            | 0000   | 0000   |
| 2 | b2 = 1   | 0000            | 1001   | 1001   |
| 3 | b1 = 1   | 0001 (overflow bit set: 0010 + 0011) | 1001 | 1000 |
| 4 | b0 = 0   | 0011 (overflow bit set: 0000 + 0011) | 0000 | 0011 |

C = x + 1. A direct check agrees: (x^3+1)(x^2+x) = x^5 + x^4 + x^2 + x, and
with x^4 = x+1 and x^5 = x^2+x that reduces to x + 1.

## Datapath

```
            a_in                                   b_bit (serial, MSB first)
             |                                        |
         +--------+      A        +---------+         |
         |  Reg1  |-------------->| block H |<--------+
         +--------+               |  m AND  |
                                  |  m XOR  |----+ P^k
     f ---------+                 +---------+    |
                |                      ^         v
                v                      |     +--------+
           +---------+   x·P mod f     |     |  Reg2  |----> c
           | block G |-----------------+     +--------+
           |  m AND  |                           |
           |  m XOR  |<----- SL (wiring) <-------+ P^(k-1)
           +---------+
```

(each "XOR" is a four-NAND cell)

| Part | Module | What it holds or computes |
|------|--------|---------------------------|
| Reg1 | `gf2m_operand_reg` | Operand A. Loaded once and stable for all m iterations. |
| Reg2 | `gf2m_accum_reg` | Partial product P. Cleared at start. After the last iteration it holds C. |
| SL | wiring inside `gf2m_block_g` | P shifted left one place. |
| G | `gf2m_block_g` | x·P mod f: m ANDs form p_{m-1}·f, and m NAND-XOR cells add the shifted P. |
| H | `gf2m_block_h` | P^k: m ANDs form b·A, and m NAND-XOR cells add it to G's output. |
| NAND-XOR | `gf2m_nand_xor` | The four-NAND XOR cell. |
| Control | `gf2m_ctrl` | Load cycle, m iteration cycles, done pulse. |
| Top | `gf2m_sipo_mult` | Wires the parts above together. |

`gf2m_pkg` holds the default size, the controller's state type, and
`nist_poly(m)`. That function returns f for the five NIST binary fields:

| m | f(x) |
|---|------|
| 163 | x^163 + x^7 + x^6 + x^3 + 1 |
| 233 | x^233 + x^74 + 1 |
| 283 | x^283 + x^12 + x^7 + x^5 + 1 |
| 409 | x^409 + x^87 + 1 |
| 571 | x^571 + x^10 + x^5 + x^2 + 1 |

Bit 0 of block G always adds a constant 0. It still goes through a NAND-XOR
cell, so that each block has exactly m AND gates and 4m NAND gates. Synthesis
is free to remove that cell.

## Using the multiplier: interface and timing

`gf2m_sipo_mult #(.M(m))` has these ports:

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | Clock, and an asynchronous active-low reset that clears both registers and the controller. |
| `start` | in | 1 | Starts a multiplication. Accepted only when idle; `a_in` is captured in the same cycle. |
| `a_in` | in | M | Operand A. It only needs to be valid in the start cycle. |
| `f` | in | M | `{f_{M-1}..f_0}`. Must be held stable while `busy` is high. |
| `b_bit` | in | 1 | Operand B, serially. It is consumed at each clock edge where `b_req` is high. |
| `b_req` | out | 1 | High in the M iteration cycles. |
| `busy` | out | 1 | Same as `b_req`. |
| `done` | out | 1 | One-cycle pulse. `c` is the product. |
| `c` | out | M | Reg2. Holds the product until the next start. |

Cycle by cycle:

```
clock edge     E0       E1       E2     ...     EM      EM+1
start        ‾‾‾‾‾\__________________________________________
b_req        _____/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\__________
b_bit             | b_{M-1}| b_{M-2}|  ...  | b_0 |
done         _____________________________________/‾‾‾‾‾\____
c                                                 = A·B mod f
```

The cycle with `start` high is the load cycle: Reg1 takes A and Reg2 is
cleared. Then come the M iteration cycles. The bit on `b_bit` in the first one
is b_{M-1}, and in the last one b_0. Edge E0 samples `start`. Edges E1 to EM
are the iterations, and `done` is high from EM to EM+1. Counting E0, a product
takes M+1 clock edges. A new `start` may be given in the cycle
in which `done` is high, so throughput is one product every M+1 cycles. A
`start` while `busy` is ignored.

## Cost and speed

| | Datapath (as published) | This RTL at m = 163 |
|---|---|---|
| Register bits | 2m = 326 | 326, plus 10 controller flip-flops |
| AND gates | 2m = 326 | 326 |
| NAND gates | 8m = 1304 | 1304 |
| XOR gates | 0 | 0 |
| Iteration latency | m = 163 cycles | 163 cycles, plus 1 load cycle |

The published transistor count is 16,952 at m = 163: 30 transistors per flip-flop, 6 per
AND and 4 per NAND, over the numbers above. For comparison, a comparable
design with XNOR-based addition needs 14,996, and a design with plain AND/XOR
needs 20,538.

The longest path runs from Reg2's top bit, p_{m-1}, through an AND and one
NAND-XOR cell in block G, then through the NAND-XOR cell in block H, back
into Reg2. That is T_AND + 6·T_NAND. The published analysis gives the path
inconsistently: "at most 6 T_NAND" in one place, 2·T_AND + 4·T_NAND in
another, and 0.14 ns in a 65 nm library. This RTL follows the published
gate structure, and its path is the one stated above.

## Where this RTL departs from, or adds to, the published design

* **Controller and handshake.** The published design specifies only that the
  product is in Reg2 after m clock cycles. `gf2m_ctrl` is this design's own:
  a two-state machine with a ⌈log2 m⌉-bit down counter, start/done pulses, and a
  `b_req` strobe for the serial source.
* **Separate load cycle.** Loading A and clearing Reg2 takes one cycle before
  the m iterations, so a multiplication takes m+1 cycles from start to done.
* **Reset and enables.** The asynchronous active-low reset, the load enable
  of Reg1, and the clear/enable of Reg2 (clear has priority) are choices of
  this design.
* **Field polynomial as an input.** f is a port, not a constant, so one
  instance works for any polynomial of degree M. With a fixed f, tie the port
  to a constant. Synthesis then removes the ANDs of block G wherever f_i = 0.
* **Gate types.** The published analysis mentions 3-input NAND gates in one
  place. Its gate counts and transistor counts fit 2-input NANDs only, and
  those are used here.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F`.

| Testbench | What it checks |
|-----------|----------------|
| `tb_gf2m_nand_xor` | All input pairs of the NAND-XOR cell against the XOR truth table. |
| `tb_gf2m_block_g` | 500+ random P and f (NIST and random) against a reference x·P mod f. |
| `tb_gf2m_block_h` | Random r, A, and b against a bitwise model. |
| `tb_gf2m_operand_reg`, `tb_gf2m_accum_reg` | Random load/clear/enable sequences against a register model. |
| `tb_gf2m_ctrl` | For m = 2, 5, 64, 163: load with start, exactly m step cycles, done M+1 edges after start, start ignored while busy, restart in the done cycle. |
| `tb_gf2m_sipo_mult` | End to end at the default m = 163 with no overrides. Corner operands, 200+ random products, NIST and random f, the latency, and the result held after done. It counts and requires iterations where the reduction fires, ignored starts, back-to-back operations, and generic polynomials. |
| `tb_gf2m_nist_fields` | One instance for each NIST field, m = 163, 233, 283, 409 and 571: random products, latency, x^(m-1)·x = f − x^m, and associativity (a·b)·c = a·(b·c) on the hardware. |

The expected products come from `gf2m_ref_pkg::gf_mul`. It multiplies
LSB first, right to left, so it shares no structure with the MSB-first
hardware. It works for any f, irreducible or not.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/gf2m_pkg.sv tb/gf2m_ref_pkg.sv tb/tb_gf2m_sipo_mult.sv \
    --top-module tb_gf2m_sipo_mult -o sim
./obj_dir/sim
```

Use the same command for any other testbench, with its file and top-module
name in place of `tb_gf2m_sipo_mult`. Verilator finds the other modules in
`rtl/` through `-Irtl`. Every testbench runs in well under a second.

## Changing it

* **Field size:** set `M` on `gf2m_sipo_mult`. Nothing else depends on it. The
  counter width follows from `$clog2(M)`.
* **Field polynomial:** drive `f`. For NIST fields use
  `gf2m_pkg::nist_poly(M)[M-1:0]`.
* **Plain XOR:** to compare the NAND-only adder with a plain one, replace the
  four assigns in `gf2m_nand_xor` with `assign y = a ^ b;`. Nothing else
  changes.
