# FBHA: a 32-bit adder split into a lookahead half and a carry-select half

The fast bipartitioned hybrid adder (FBHA) is a purely combinational N-bit
adder made of two different adders placed side by side:

```
            a[N-1:K] b[N-1:K]                      a[K-1:0] b[K-1:0]
                 |      |                                |      |
      +----------v------v-----------+         +---------v------v----------+
      |  carry-select part (csla)   |         |  carry-lookahead part     |
      |  rca (cin=0)   rca (cin=1)  |  sel    |  (cla): chain of lookahead|
      |        \         /          |<--------|  modules, LSB module has   |
      |      N-K+1 x mux21          | cla_cout|  no carry input           |
      +-------------+---------------+         +------------+--------------+
                    |                                      |
            {cout, sum[N-1:K]}                        sum[K-1:0]
```

* The low K bits go to a carry-lookahead adder. Its delay grows slowly with
  width.
* The high N-K bits go to a carry-select adder. Two ripple carry adders
  compute the upper sum for an incoming carry of 0 and of 1. They run while
  the lookahead part is still busy.
* The lookahead part's carry out then selects one of the two upper results
  through a row of 2-to-1 multiplexers.

If the ripple adders finish no later than the lookahead part, the adder's
delay is the K-bit lookahead delay plus one multiplexer. That is shorter
than an N-bit lookahead adder, and shorter than a carry-select adder whose
blocks all ripple. The sum is simply `{csla sum, cla sum}`.

The default configuration is the one the design study found fastest for 32
bits, named **FBHA_844422**:

* an 8-bit carry-select part;
* a 24-bit lookahead part built from six modules of 8, 4, 4, 4, 2 and 2 bits.

The source reports 0.93 ns, 635.99 µm² and 60.07 µW for it, from a 28-nm
standard-cell synthesis. These numbers belong to that synthesis flow. This
RTL cannot reproduce them.

## Choosing K: why the split is 8/24

The split only pays off if the carry-select half is hidden behind the
lookahead half. The slowest path in the upper half is an (N-K)-bit ripple
carry. The slowest path in the lower half is the carry crossing every
lookahead module. In the reported study with 4-bit modules:

| partition (CSLA_CLA) | delay (ns) | what dominates |
|---|---|---|
| 4_28  | 1.09 | 7 lookahead modules |
| 8_24  | 1.03 | 6 lookahead modules, ripple hidden |
| 12_20 | 1.14 | 12-bit ripple adder |
| 16_16 | 1.41 | 16-bit ripple adder |

Mixing module sizes inside the 24-bit part shortened it further. The delay
went from 1.03 ns (six 4-bit modules) to 0.93 ns (8,4,4,4,2,2). All of
these variants are parameter settings of the RTL; see *Configurations*.

## The lookahead part (`cla`, `cla_module_cin`, `cla_module_nocin`)

Each lookahead module of width W forms, per bit:

* generate `G_i = A_i & B_i`;
* propagate `P_i = A_i ^ B_i`.

Each carry inside the module is then its own two-level sum of products:

```
C_{i+1} = G_i | P_i G_{i-1} | P_i P_{i-1} G_{i-2} | ... | P_i..P_1 G_0 | P_i..P_0 C_0
Sum_i   = P_i ^ C_i
```

No carry waits for another inside a module. A carry entering a module
therefore reaches that module's carry out through a single AND and OR level.
`cla_module_cin` implements these equations. `cla_module_nocin` implements
them with `C_0 = 0`, so every term holding `C_0` disappears. Only the least
significant module of the chain uses the `nocin` version, because the FBHA
has no carry input.

`cla` chains NMOD modules of widths `MSIZE[0..NMOD-1]`, where `MSIZE[0]` is
the least significant. Each module's carry out feeds the next module's carry
input. The last carry out is `cla_cout`, the select of the carry-select
part. `cla` stops elaboration with an error if the widths do not add up to
K.

**Module order.** The study names a module list, such as 844422, but does not
say which end of the chain each module sits at. This RTL reads the name most
significant module first, the same way `FBHA_8_24` names the upper part
first. Bits 3:0 are therefore two 2-bit modules, bits 15:4 three 4-bit
modules and bits 23:16 the 8-bit module. The order does not change the
function, only the timing. To try another order, reverse `MSIZE`.

**Gate structure.** The source uses a published "delay-optimized" gate
arrangement of the 4-bit module, and its gate-level drawing is not
reproduced here. The modules here state the same Boolean function as flat
sums of products and leave gate mapping to synthesis. The 2-, 6- and 8-bit
modules use the same equations at other widths.

## The carry-select part (`csla`, `rca`, `mux21`, `full_adder`, `half_adder`)

`rca` is a ripple carry adder with a constant carry input `CIN`:

* In the `CIN=0` adder, bit 0 is a half adder and the rest are full adders.
  The 8-bit adder is thus seven full adders and one half adder.
* In the `CIN=1` adder, bit 0 is a full adder with its carry input tied to 1.
  Synthesis reduces that cell to an XNOR and an OR.

`csla` holds one of each. It passes every sum bit through a `mux21` selected
by `cla_cout`. One more `mux21` selects the carry out of the two ripple
adders. That carry out becomes the adder's `cout`.

## Parameters and interface

Top module `fbha` (package `fbha_pkg` holds the defaults):

| parameter | default | meaning |
|---|---|---|
| `N` | 32 | adder width |
| `K` | 24 | width of the lookahead part, 1..N-1 |
| `NMOD` | 6 | number of lookahead modules |
| `MSIZE` | `'{2,2,4,4,4,8}` | module widths, least significant first, summing to K |

| port | dir | width | meaning |
|---|---|---|---|
| `a`, `b` | in | N | addends |
| `sum` | out | N | a + b modulo 2^N |
| `cout` | out | 1 | carry out of bit N-1 |

There is no clock, reset or carry input. The outputs follow the inputs
combinationally.

## Configurations

Each configuration from the design-space study is one parameter setting:

| name | K | NMOD | MSIZE (LSB first) |
|---|---|---|---|
| FBHA_4_28 | 28 | 7 | 4,4,4,4,4,4,4 |
| FBHA_8_24 (= 4x6) | 24 | 6 | 4,4,4,4,4,4 |
| FBHA_12_20 | 20 | 5 | 4,4,4,4,4 |
| FBHA_16_16 | 16 | 4 | 4,4,4,4 |
| FBHA_2x12 | 24 | 12 | 2 x 12 |
| FBHA_6x4 | 24 | 4 | 6,6,6,6 |
| FBHA_8x3 | 24 | 3 | 8,8,8 |
| FBHA_84444 | 24 | 5 | 4,4,4,4,8 |
| FBHA_66444 | 24 | 5 | 4,4,4,6,6 |
| **FBHA_844422** (default) | 24 | 6 | 2,2,4,4,4,8 |
| FBHA_664422 | 24 | 6 | 2,2,4,4,6,6 |

An example override:

```systemverilog
localparam int unsigned SIZES [5] = '{4, 4, 4, 6, 6};
fbha #(.K(24), .NMOD(5), .MSIZE(SIZES)) u_add (.a(a), .b(b), .sum(s), .cout(c));
```

Verilator 5 rejects a cast assignment pattern written directly in the
parameter list. Declare a typed localparam, as above.

## Where this RTL departs from the source description

* **Carry out and its multiplexer.** The source describes only the sum bits
  going through multiplexers, and names only `Sum` as the adder output.
  `cout` and its extra `mux21` are additions here. Remove them and the sum
  logic is unchanged.
* **Gate structure of the lookahead modules.** This RTL gives the Boolean
  function, not the delay-optimized gate netlist. A synthesis tool's result
  will have a different structure and delay.
* **Module order within the lookahead chain.** The order is an assumption, as
  explained above.
* **Propagate.** XOR is used for both the carry and the sum. The source does
  not say whether its modules use an OR propagate for the carries.

## Verification

Each file in `tb/` is a self-checking Verilator testbench. Each one ends
with a line `TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

| testbench | block | stimulus |
|---|---|---|
| `tb_full_adder`, `tb_half_adder`, `tb_mux21` | cells | exhaustive |
| `tb_rca` | 8-bit ripple adders, cin 0 and 1 | exhaustive, 65536 pairs each |
| `tb_csla` | 8-bit carry-select part | exhaustive over a, b and select |
| `tb_cla_module_cin`, `tb_cla_module_nocin` | lookahead modules at widths 2, 4, 6, 8 | exhaustive |
| `tb_cla` | 24-bit lookahead part | corners and 200k random vectors; every module boundary must see a carry and no carry |
| `tb_fbha` | whole adder, default parameters | 1000 random vectors at 4 ns, corners, 100k random vectors |
| `tb_fbha_variants` | the eleven configurations above | corners, a walking 1 and 1000 random vectors |

The reference in every testbench is integer addition. `tb_fbha` also counts
how often each mechanism was used and fails if any never occurred:

* the carry-0 result was selected;
* the carry-1 result was selected;
* the adder produced a carry out;
* a carry born in bit 0 travelled through all 32 bits.

The testbenches check function only. Propagation delay is a property of a
synthesized netlist, and nothing here measures it.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fbha_pkg.sv tb/tb_fbha.sv \
          --top-module tb_fbha --Mdir obj_tb_fbha
./obj_tb_fbha/Vtb_fbha
```

Files are found by module name (`-Irtl -Itb`). The package must come first
on the command line.
