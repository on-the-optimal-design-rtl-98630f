# A triple-modular-redundant FIR filter with voter barriers (TMR_p2)

Triple modular redundancy (TMR) runs three copies of a circuit and takes a
bit-by-bit majority of their results, so one faulty copy never shows at the
output. On an SRAM-based FPGA most configuration bits control routing, and
an upset in one of them can open a wire or join two wires. When the two
joined wires belong to *different* copies, two of the three copies can go
wrong at once, and a single majority vote at the output no longer helps.

The cure studied in *On the Optimal Design of Triple Modular Redundancy
Logic for SRAM-based FPGAs* (Kastensmidt, Sterpone, Carro, Sonza Reorda) is
to place majority voters inside the logic as well, cutting each copy into
partitions. A bridge between copy 1 in one partition and copy 2 in another
then corrupts one copy at each of two different voters, and both voters
outvote it. Smaller partitions block more of these bridges but add voters,
area and delay; the paper found a medium size best for its test circuit.

This repository gives synthesizable SystemVerilog for that test circuit in
its best configuration: an 11-tap, 9-bit low-pass FIR filter in which every
multiplier+adder pair is one partition ("TMR_p2"). It is an independent
implementation written from the paper's description; the choices the paper
leaves open are listed in [Choices made here](#choices-made-here).

## The filter

    y(n) = sum_{k=0..10} C[k] * x(n-k)
    C    = 1, -1, -9, 6, 73, 120, 73, 6, -9, -1, 1

The coefficients are those of the paper (a low-pass design scaled by 512);
they are symmetric around the centre tap 120. Samples are 9-bit two's
complement, products and partial sums 18-bit. The largest possible output
magnitude is 256 x 300 = 76,800, well inside 18 signed bits, so the adders
never wrap.

The structure is the direct form: a delay line of ten 9-bit registers,
eleven multipliers and a chain of ten adders. With triplication, each of
these exists three times, once in each redundant part tr0, tr1, tr2:

```
 din[i] ──┬──────────────[R]──────────[R]── ... ──[R]
          │                │            │            │
         (x C1)          (x C2)       (x C3)       (x C1)
          │                │            │            │
          └──────────────( + )──[V]───( + )──[V]── ( + )──[OV]── dout[i]
                        partition 1   partition 2   partition 10
   [R]  voted register with refresh (tmr_voted_register)
   [V]  triplicated majority voter: the voter barrier (tmr_majority_voter)
   [OV] output voters, one per output pin (tmr_output_voter)
```

The tap-0 product enters the first adder without a voter, so partition 1
holds two multipliers and one adder; partitions 2 to 10 hold one of each.
Partitions 1 to 9 end in a voter barrier. Partition 10 ends in the output
voters.

## Three parts, three of everything

No wire, pin or clock is shared by the three parts, because a fault on a
shared one would reach all three copies. The top module `tmr_p2_fir`
therefore has one set of ports per part:

| port | width | meaning |
| --- | --- | --- |
| `clk[2:0]` | 3 x 1 | clock of part i |
| `rst_n[2:0]` | 3 x 1 | synchronous reset of part i, active low |
| `ce[2:0]` | 3 x 1 | sample enable of part i: 1 shifts the delay line |
| `din[3]` | 3 x 9 | input sample on part i's pins, two's complement |
| `dout[3]` | 3 x 18 | filter output on part i's pins, two's complement |

In normal use the three sets carry the same signals. On the board the three
output pins of each bit are joined into one output; the three input pins of
each bit are driven from one source.

Timing: `dout` is combinational from `din` and the delay registers. While
sample x(n) is on `din`, `dout` shows y(n). A rising clock edge with `ce`
high moves x(n) into the delay line. There is no output register and no
pipelining, as in the paper's figure, so the longest path runs from `din`
through the tap-0 multiplier, all ten adders and nine voter barriers to the
output voters.

## The voted register with refresh

Flip-flop upsets need their own treatment. A wrong value in a register of a
delay line is pushed out within a few samples, but a register that is only
rewritten from its own output would keep a wrong value forever.
`tmr_voted_register` follows the paper's structure:

```
            ┌──────────────── voted q[i] ─────────────┐
 d[i] ──► [MUX] ──► FF_i (clk[i]) ──► voter_i(FF_0, FF_1, FF_2) ──► q[i]
          load[i]
```

Each part has its own flip-flop on its own clock and its own voter reading
all three flip-flops. The voter output is the register's output for that
part, and it is also fed back to a multiplexer in front of the flip-flop.
With `load` (the filter's `ce`) high the flip-flop takes new data. With
`load` low it takes the voted value, so a flip-flop that was upset is
rewritten with the majority at the next edge instead of waiting for new
data. Because every part's next register stage reads the *voted* output,
an upset in one flip-flop never travels down the delay line.

Data loaded at an edge is on `q` right after that edge. Reset clears the
flip-flops.

## What the voters cover, and what they cannot

| fault | example | result |
| --- | --- | --- |
| wrong value inside one part | upset LUT, open wire, bad input pin | masked by the next voter |
| flip-flop upset in one part | | masked, then repaired by the refresh |
| bridge between two parts in different partitions | tr1 of partition 3 joined to tr2 of partition 2 | masked: each barrier sees one wrong copy |
| bridge between two parts in the same partition | tr1 and tr2 both in partition 5 | **not masked** |
| upset in one voter | | corrupts one part only, masked at the next barrier; an upset output voter spoils one of the three output pins |

The bridge inside one partition is the weakness left over, and it is what
the size of a partition trades against: the smaller the partition, the
fewer wire pairs can form such a bridge, but every partition costs three
voters per bit, and the extra voters and their wiring bring new routing of
their own. The paper's measurements on a Spartan-II E device, by flipping
random configuration bits, put numbers on this for the filter:

| version | voters | slices | est. clock | upsets giving a wrong output |
| --- | --- | --- | --- | --- |
| no TMR | none | 150 | 154 MHz | 97.10 % |
| after every multiplier and every adder | most | 560 | 123 MHz | 4.03 % |
| after every multiplier+adder pair (this design) | medium | 504 | 137 MHz | 0.98 % |
| at the output only | fewest | 498 | 153 MHz | 1.56 % |

So more voters did not mean more protection; the medium partition was best.
All TMR versions in that comparison used the voted registers with refresh;
a further version whose registers were only triplicated, not voted, fared
much worse (12.60 %).

Generic synthesis deserves care. The three voters of a barrier compute the
same function of the same three inputs, so an optimiser that merges
identical logic folds them into one and then folds the three copies of all
downstream logic into one, undoing the redundancy. The voters are kept as
separate `majority_voter` instances so that the FPGA flow's keep, dont-touch
or keep-hierarchy constraints can be attached to them; without such
constraints the netlist is not triple-redundant.

## Modules

| file | module | role |
| --- | --- | --- |
| `rtl/fir_pkg.sv` | package | widths, tap count, coefficient table |
| `rtl/majority_voter.sv` | `majority_voter` | one bitwise 2-of-3 voter (one LUT per bit) |
| `rtl/tmr_majority_voter.sv` | `tmr_majority_voter` | voter barrier: three voters, one per part |
| `rtl/tmr_output_voter.sv` | `tmr_output_voter` | one voter per output pin |
| `rtl/tmr_voted_register.sv` | `tmr_voted_register` | triplicated register with voters and refresh |
| `rtl/tap_multiplier.sv` | `tap_multiplier` | one copy of a 9 x 9 signed multiplier |
| `rtl/tap_adder.sv` | `tap_adder` | one copy of an 18-bit adder |
| `rtl/tmr_p2_partition.sv` | `tmr_p2_partition` | three multiplier+adder copies and their voter barrier |
| `rtl/tmr_p2_fir.sv` | `tmr_p2_fir` | the whole filter (top) |

Parameters: `DATA_W` (9), `COEF_W` (9) and `ACC_W` (18) on the top and the
modules below it. The tap count and coefficients live in `fir_pkg`; changing
the tap count means changing the coefficient table with it.
`tmr_p2_partition`'s `OUT_VOTE` parameter drops the barrier for the last
partition.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops with a watchdog if it hangs.
The expected values are computed in the testbenches from integers, not by
reusing the design's modules or its coefficient table.

- `majority_voter_tb`, `tmr_majority_voter_tb`, `tmr_output_voter_tb`:
  random words and one corrupted copy in each position; the single voter
  also gets all eight bit patterns.
- `tap_multiplier_tb`: all 262,144 sample/coefficient pairs.
- `tap_adder_tb`: random sums and the wrap at both ends of the range.
- `tmr_voted_register_tb`: reset, load, hold, an upset of one flip-flop
  (made by clocking one part alone with other data), its repair by one
  refresh edge, and two upset parts winning the vote.
- `tmr_p2_partition_tb`: the sum, with and without the barrier, and one
  corrupted part that the barrier must hide and that stays in its own part
  without it.
- `tmr_p2_fir_tb`: the whole filter at its default size against a
  reference filter: impulse response equal to the coefficients, full-scale
  inputs, 2,000 random samples, and each mechanism counted: wrong input
  pins of one part, hold with `ce` low, upset and refresh of a whole part's
  delay line, a bridge across a barrier, a wrong output from one voter of a
  barrier, a wrong final sum in one part, and a two-part fault inside one
  partition that must reach the output.
- `tmr_p2_fault_campaign_tb`: a simulated fault campaign. It places 4,000
  faults, one at a time, on the 33 arithmetic nets (tap-0 multiplier and
  every adder output, each part), holds each for 24 samples and compares the
  pins with a reference every cycle. Single-part bit flips and wired-OR
  bridges across partitions must give no wrong answer; bridges inside one
  partition do give some (typically about one in five of them), which the
  testbench prints. These are signal-level stand-ins for configuration
  upsets, so the rate is not comparable with a bitstream campaign on a
  real device.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fir_pkg.sv \
    tb/tmr_p2_fir_tb.sv --top-module tmr_p2_fir_tb
./obj_dir/Vtmr_p2_fir_tb
```

Each testbench runs in well under a second. The fault testbenches use
`force` on internal nets, reached by hierarchical names such as
`dut.g_tap[3].g_partition.u_part.g_part[1].u_add.s`; renaming generate
blocks or instances breaks them.

## Choices made here

The paper fixes the filter's size, coefficients, structure and voter
placement. It leaves the following open; each is this implementation's
choice.

- **Coefficient order.** Six coefficient values are given for eleven
  multipliers, and the paper's drawing labels the first and last multiplier
  with the same coefficient. The set is taken as symmetric around 120.
- **Number format.** Samples and coefficients are two's complement, with a
  9-bit coefficient width.
- **Register multiplexer select.** The drawing of the voted register shows a
  multiplexer with an unlabelled select. Here it is a load enable, brought
  out of the top as `ce`. A filter that takes a sample every clock ties it
  high; an upset flip-flop is then overwritten by the next sample, which
  already arrives voted from the stage before.
- **Reset.** Not described; a synchronous active-low reset per part is added.
- **Output buffers.** The output voters are drawn followed by buffers on
  three pins that are joined outside the chip. How the buffers are
  controlled is not described; here the voted values drive the three pins
  directly and the joining is left to the board.
- **No output register**, matching the drawing; `dout` is combinational.
- **Only TMR_p2.** The paper also built an unprotected filter and three
  other voter placements (a voter after every multiplier and adder, voters
  only at the output, and voters only at the output with unvoted registers)
  to compare against; those are not included. Passing `OUT_VOTE = 0` to
  every partition in `tmr_p2_fir` turns it into the output-only variant.
- **Not part of this RTL:** the pads and I/O buffers, configuration
  scrubbing (a function of the FPGA's configuration port), and the
  fault-injection equipment the paper used to evaluate the design.
