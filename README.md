# Totem: a neural-network co-processor in SystemVerilog

Totem is a digital neurochip built for one job: evaluating multi-layer
perceptrons (MLPs) fast enough for event selection in high-energy physics.
Its networks are trained by Reactive Tabu Search, an optimisation method
that needs no derivatives. The search flips single bits of the weight
string and re-evaluates the network each time. Weights of a few bits are
enough, so the chip can use short weight words and small multipliers, and
the host leaves every network evaluation to the chip.

The chip is a SIMD array. Thirty-two processors each keep their own
128-word weight memory. They all see the same input sample on a broadcast
bus, in the same clock, so each processor builds one neuron's weighted sum
in parallel with the others. That is 32 multiply-accumulates per clock,
about 1 GMAC/s at 30 MHz. Finished sums are parked in a 32-bit storage
register per processor. An output bus reads them out while the array is
already accumulating the next set of neurons. The non-linearity (the
sigmoid) is not on the chip: a RAM look-up table on the board applies it.
Up to four chips work side by side on one layer.

This RTL describes the chip and the board around it:

- `totem_chip`: the processor array, its sequencer and its two buses;
- `totem_board` (the top): four chips, the activation table and a path
  that feeds one layer's activations back as the next layer's inputs;
- an alternative processor arithmetic, selected by a parameter. In it, the
  logarithmic "plog" code replaces each multiplier by an adder.

```
                 host samples            activations fed back (PORT_LOOP)
                      |                 +-------------------------------+
                      v                 v                               |
               +--------------- broadcast bus (16 bit) ---------+       |
               |            |            |            |         |       |
           +-------+    +-------+    +-------+    +-------+     |       |
           | chip0 |    | chip1 |    | chip2 |    | chip3 |  (same pass command)
           +-------+    +-------+    +-------+    +-------+             |
               |  output bus |           |            |                 |
               +------+------+-----+-----+------------+                 |
                      | drain arbiter: chip 0, then 1, 2, 3             |
                      v                                                 |
              +----------------+   activation  +-----------+            |
              | activation RAM |-------------->| PORT_HOST |-> host     |
              | (sigmoid LUT)  |---------------+-----------------------+
              +----------------+        (destination chosen per pass)

  inside a chip:
      broadcast reg --> PE0  PE1 ... PE31     each PE: 128x8 weight RAM,
                         |    |        |       multiplier, 32-bit acc,
      sequencer -------> weight address, stage enables, transfer
                         |    |        |
      output bus <----- storage registers (32 bit), one per PE
```

## Files

| file | contents |
|---|---|
| `rtl/totem_pkg.sv` | sizes, the pass command struct, arithmetic and routing enums |
| `rtl/totem_weight_mem.sv` | 128 x 8-bit weight memory of one processor |
| `rtl/totem_pe.sv` | one processor: memory, multiplier, accumulator, storage register |
| `rtl/totem_ctrl.sv` | the chip sequencer (passes, pipeline controls, transfer, drain) |
| `rtl/totem_chip.sv` | the chip: 32 processors, broadcast bus, output bus |
| `rtl/plog_encode.sv` | binary to plog code |
| `rtl/plog_decode.sv` | plog to binary |
| `rtl/plog_mult.sv` | plog multiplier: adder plus plog-to-binary |
| `rtl/sigmoid_lut.sv` | the activation table on the board |
| `rtl/totem_board.sv` | top: chips, drain arbiter, table, feedback path |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_totem_board_full` |
| `tb/tb_totem_ref_pkg.sv` | reference arithmetic shared by the testbenches |

## The pass: how one layer is computed

Everything the chip does is a *pass*, set up by one command (`pass_cmd_t`):

| field | meaning |
|---|---|
| `n_inputs` | number of broadcast samples, 1..128 |
| `base_addr` | weight address used with the first sample |
| `n_out` | how many neurons to read out after the pass |
| `in_src`, `out_dst` | board only: where samples come from and where results go |

Sample *k* of the pass is multiplied, in every processor at once, by the
weight word at `base_addr + k`. Weights are only ever read in this
sequence, so the memory layout is free. A neuron can have any number of
inputs up to 128. The memory can also hold several layers one after
another, each used through its own `base_addr`. For the 10-100-1 network
used in the full-size test, words 0-9 of processor *p* hold the weights of
hidden neuron *p*. Words 10-109 hold the weights of the output neuron,
which only processor 0 of chip 0 uses.

Each processor is a three-stage pipeline. The sequencer drives every
stage, so a processor has no control state of its own:

| cycle | stage | action |
|---|---|---|
| t | 0 | sample accepted; weight word read; sample loaded into the broadcast register |
| t+1 | 1 | product = sample x weight |
| t+2 | 2 | acc = first ? product : acc + product |

After the last sample has cleared stage 2, the *transfer* copies every
accumulator into its storage register, and the output bus starts to
*drain* registers 0..n_out-1, one per clock (`out_valid`/`out_ready`).
The drain runs on its own. A new pass can be commanded and computed while
it goes on. The one rule: a transfer must not overwrite registers that
have not been read yet. If a pass reaches its transfer while the previous
drain is still running, the transfer waits and `stall` is high. The last
beat of a drain and the next transfer may happen in the same cycle.

With samples every clock and no stall, a pass of *n* samples occupies the
sequencer for *n* + 3 cycles. That is *n* cycles of streaming, two to
empty the pipeline and one for the transfer. The next command can be
accepted in the cycle after that. All handshakes are valid/ready: a beat
moves in a cycle where both are high.

## Layers, the feedback path and several chips

The four chips get the same command and the same samples. Chip *c*
therefore computes neurons 32*c* .. 32*c*+31 of the layer. The board
splits `n_out` among them: a chip drains at most 32 registers, and none
if the layer has fewer neurons than its range starts at. The drain
arbiter passes chip 0's beats first, then chip 1's, and so on. It stops
after the chip that holds neuron `n_out`-1, so the host or the next layer
sees one stream of neuron indices 0..n_out-1.

That stream goes through the activation table. Each pass then sends it
on to one of two places:

- `out_dst = PORT_HOST`: to the host output port, with the activation, the
  raw 32-bit sum and the neuron index;
- `out_dst = PORT_LOOP`: back onto the broadcast bus, as the samples of the
  next pass. That pass must have `in_src = PORT_LOOP` and `n_inputs` equal
  to this pass's `n_out`; an assertion in `totem_board` checks this.

In loop mode the storage registers do their real job. Layer 2 starts as
soon as layer 1 has been transferred. Each hidden activation is drained,
looked up and multiplied into layer 2 in the same clock it reaches the
bus. A two-layer network therefore costs one broadcast cycle per input
and per hidden neuron, plus a few pipeline cycles, and the host never
touches the hidden values. The board accepts a new command once every
chip is idle. It keeps up to four drain records: one per pass still to be
read out, with its `n_out` and destination.

## Arithmetic

`ARITH = ARITH_MULT`, the default, is the arithmetic of the chip as
described:

- samples are 16-bit two's complement and weights 8-bit two's complement;
- products are 24 bits;
- the accumulator and the storage register are 32 bits, so 128 full-scale
  products cannot overflow.

With 4-bit weights, which are enough for many problems trained this way,
the upper bits of the weight word are sign copies.

`ARITH = ARITH_PLOG` is the proposed next step. It replaces the
multipliers, which take much of the chip's area, by adders working on
logarithms. For *x* > 0, let η(*x*) be the position of the leading one.
Then

    plog(x) = η(x) + x / 2^η(x) − 1

is within 0.0861 of log2(*x*). Its bits come for free:

- the integer part is η(*x*);
- the fraction bits are the bits of *x* just below the leading one.

An 8-bit code `{sign, η[3:0], frac[2:0]}` therefore covers 16-bit
magnitudes. A product is formed in three steps:

1. the two 7-bit log magnitudes are added (a fraction carry moves into
   the integer part);
2. the sum is turned back into binary as (1 + frac/8) · 2^int, a shift;
3. the sign is the XOR of the two signs.

In the plog processor, the weight memory holds plog codes. The chip
converts each broadcast sample once, in a single `plog_encode` on the
broadcast bus, before the broadcast register. Accumulation stays binary.

Zero has no logarithm. The code with every bit set (`8'hFF`, the most
negative value) is reserved for it. A 16-bit input can never produce that
code, and a zero operand gives a zero product.

Accuracy, measured exhaustively or on large random samples:

- the code's error against log2|*x*| is at most 0.210 (0.0861 from the
  approximation plus up to 1/8 from truncation);
- for 16-bit samples times 8-bit weights, the product is off by 10.5 % on
  average and 23.5 % at worst, and 45 % of products are within 10 %.

An error of about 10 % is comparable to what 4-bit weights already cost
in the multiplier version. Truncating to three fraction bits is what
keeps the code at 8 bits, one weight word. A wider `PLOG_F` would make it
more accurate.

In the plog variant, weights of up to 2^15 · 1.875 meet samples of up to
2^15, and products reach 2^31. Keeping 128 such products inside the
32-bit accumulator is left to the scaling of the weights: the
accumulator wraps, exactly as in the multiplier variant.

## The activation table

`sigmoid_lut` is a 4096 x 16-bit RAM that the host loads, with a sigmoid
or any other function. The 32-bit sum is first shifted right by
`lut_shift` bits (arithmetic shift, 0-31). It is then saturated to the
range −2048..2047 and offset by 2048. Entry 2048 + *s* therefore holds
f(*s* · 2^lut_shift). The table takes one sum per clock and returns the
activation one clock later, with the raw sum alongside. Its 16-bit output
feeds the broadcast bus directly in loop mode.

## Host-side ports of `totem_board`

| port | dir | width | meaning |
|---|---|---|---|
| `w_we, w_chip, w_pe, w_addr, w_data` | in | 1, 2, 5, 7, 8 | write one weight word |
| `lut_we, lut_addr, lut_data` | in | 1, 12, 16 | write one table entry |
| `lut_shift` | in | 5 | sum scaling before the table |
| `cmd_valid, cmd_ready, cmd` | in/out | 1, 1, 25 | pass command |
| `in_valid, in_ready, in_data` | in/out | 1, 1, 16 | samples (only taken by `PORT_HOST` passes) |
| `out_valid, out_ready` | out/in | 1, 1 | result handshake |
| `out_data, out_acc, out_idx` | out | 16, 32, 8 | activation, sum, neuron index |
| `stall` | out | 1 | some chip is holding a transfer |
| `loop_beat` | out | 1 | a fed-back sample was taken this cycle |

Reset (`rst_n`) is asynchronous and active low. It clears the control
state and the registers, but not the memories, which must be loaded
before use.

Parameters: `ARITH`, `NUM_CHIPS` (default 4), `NUM_PE` (32, must be a
power of two), `DEPTH` (128). Write weights and the table while no pass
is running.

## Performance

| quantity | value |
|---|---|
| MAC per clock, one chip | 32 (0.96 GMAC/s at 30 MHz) |
| MAC per clock, board | 128 |
| pass of *n* inputs | *n* + 3 cycles |
| drain | one neuron per clock, overlapped with the next pass |
| 10-100-1 network, streamed events | 120 cycles per event in the full-size test, i.e. ~250 k events/s at 30 MHz |

The 10-100-1 network has the shape of the classifier used for
Higgs-boson selection: 10 kinematic observables in, one discriminant
out. The hidden size of 100 is this test's choice. Events are streamed,
so test sets of hundreds of thousands of events need no storage on the
board. The input broadcast (one sample per clock) sets the event rate.
That rate is far below the ~10^7 events/s foreseen for a future chip
with hundreds of processors at 100 MHz. Such a chip would need
organisation beyond the one given here.

## Choices made here, and departures from the original description

What comes from the chip's published description:

- 32 processors;
- 128 x 8-bit weight memories with sequential access, shared between
  layers;
- a 32-bit storage register that lets read-out overlap computation;
- broadcast and output buses;
- an off-chip RAM sigmoid table;
- up to four chips per layer;
- 1 GMAC/s at 30 MHz;
- the plog code and the replacement of the multiplier by an adder and a
  plog-to-binary unit.

Everything else is this design's own choice:

- the 16-bit sample width, which makes 128 full-scale products fit the
  32-bit register exactly;
- the three-stage pipeline and the valid/ready handshakes;
- the pass command and the base-address mechanism;
- the stall rule and the drain order;
- the feedback path on the board;
- the size and addressing of the table;
- plog with W = 16 and f = 3, the zero code, and a single shared encoder
  on the broadcast bus;
- the chord-based plog-to-binary converter;
- the wrapping (not saturating) accumulator.

Known departures and omissions:

- The plog magnitude is taken from a two's complement sample. The plog
  scheme itself is defined on sign-magnitude numbers.
- No host bus logic (ISA, VME or PCI) is included: the board's host side
  is the plain ports above.
- Reactive Tabu Search runs on the host and is not part of this RTL.
- The full-custom circuits, the 1.2 µm process, and the announced move to
  0.8 µm with twice the processor density are physical matters. A denser
  chip is `NUM_PE = 64` here.
- The area, power and speed factors claimed for plog (10x, 12x, 3x) are
  not something RTL can show.
- The classification threshold δ applied to the network output is host
  software.
- The chip clock is not modelled: all figures above are in cycles.

## Simulation

Each testbench checks its module against reference arithmetic written
independently in `tb/tb_totem_ref_pkg.sv`, counts checks and failures,
and ends with a `TB_RESULT checks=N failures=M` line. A watchdog stops a
run that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  --top-module tb_totem_board rtl/totem_pkg.sv tb/tb_totem_ref_pkg.sv tb/tb_totem_board.sv
./obj_dir/Vtb_totem_board
```

Verilator finds the other modules by name in `rtl/` and `tb/`. The two
packages are listed first because they are imported, not instantiated.
For another test, change the top module and its file.

| testbench | what it covers |
|---|---|
| `tb_totem_weight_mem` | write/read, read latency, hold, read during write |
| `tb_plog_encode` | all 65536 samples; error bound against log2 |
| `tb_plog_decode` | all 256 log values, including saturation |
| `tb_plog_mult` | all 65536 code pairs bit-exact; accuracy on real products |
| `tb_totem_pe` | both arithmetics; storage register held during the next neuron |
| `tb_totem_ctrl` | address sequence, stage timing, *n* + 3 pass length, stall, drain order |
| `tb_totem_chip` | full-size chip in both arithmetics; input gaps, output back-pressure, timing |
| `tb_sigmoid_lut` | addressing, both saturation ends, one look-up per clock |
| `tb_totem_board` | 3 chips x 8 processors in both arithmetics; two-layer networks over the loop and single passes. It counts stalls, loop beats, chip-to-chip drains, short drains, overlap, back-pressure and gaps, and fails if any never occurs |
| `tb_totem_board_full` | default parameters: a 128-input, 128-neuron pass, then 200 events of a 10-100-1 network, with the cycles per event checked |

All of them run in a few seconds.
