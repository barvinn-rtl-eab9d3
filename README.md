# BARVINN in SystemVerilog: a bit-serial, arbitrary-precision DNN accelerator

BARVINN runs quantised neural networks whose weights and activations may have
any precision from 1 to 16 bits, chosen per layer at run time, without
rebuilding the hardware. It does this by computing bit-serially. Each operand
is split into bit planes, and a product of a b_w-bit weight and a b_a-bit
activation becomes b_w x b_a one-bit dot products that are shifted and added.
Lower precision then simply takes fewer cycles. The array has eight Matrix
Vector Units (MVUs). Each is a 64-lane pipeline that multiplies a 64x64 weight
tile by a 64-element vector. A small RISC-V core controls them: it has eight
hardware threads, one per MVU, and programs each MVU's job registers in
software.

This RTL follows the architecture of the BARVINN paper (Askarihemmat et al.).
It fills in the many details the paper leaves open: register map, handshakes,
memory depths, pipeline timing. The section "Where this design departs from
or adds to the paper" lists those choices.

## 1. The bit-serial dot product

For 64-element vectors x (b_a bits) and w (b_w bits):

    x . w = sum over (j,k) of  s(j,k) * 2^(j+k) * popcount(x_j AND w_k)

Here x_j is the 64-bit plane that holds bit j of every element. The sign
s(j,k) is -1 when exactly one of j and k is the sign bit of a 2's-complement
operand, and +1 otherwise.

A VVP (`vvp.sv`) evaluates this expression with a single adder tree and a
single shift-by-one accumulator. The bit combinations arrive in order of
falling magnitude i = j + k. Inside each magnitude, every block of the dot
product is read, so dot products longer than 64 elements are also handled.
The accumulator works as follows:

* `clr`: on the first partial sum of a dot product, the accumulator restarts
  from 0.
* `shift`: on the first partial sum of each lower magnitude, the accumulator
  is shifted left by one before the add.
* `neg`: for sign-bit combinations, the count is subtracted.

A tile therefore takes b_a x b_w x blocks cycles. Every cycle delivers 64
lanes x 64 VVPs = 4096 one-bit multiply-accumulates per MVU.

`mvp.sv` places 64 VVPs side by side. The activation plane is broadcast to
all of them, and row r of the weight tile goes to VVP r. The result is 64
32-bit dot products.

## 2. Data layout (bit-transposed)

An activation block is 64 elements at b bits. It occupies b consecutive
64-bit words: the MSB plane is at the lowest address and the LSB plane at
address + b - 1. A weight tile is 64 output channels x 64 input channels, so
one weight word is 4096 bits. Bit `[r*64 + l]` of that word is input lane l
of output channel r, and a tile at b_w bits uses b_w consecutive words. For
convolutions, activations are stored NHWC with channels in blocks of 64.

The MVU writes its results back in the same layout: the quantiser emits one
plane per cycle, MSB first. The output of one layer is therefore directly the
input of the next. Only host data needs converting. `transposer.sv` does
that: it takes 64 elements, one per cycle, and writes b plane words.

## 3. Inside an MVU (`mvu.sv`)

    mvu_ctrl --> act RAM (32K x 64) ---\
             --> weight RAM (1K x 4096) --> MVP --> scaler --> pool/ReLU --> quantser --> write-back
             --> scaler RAM / bias RAM -----------^ (64 x 16 b, 64 x 32 b per word)

The stages after the MVP work on 32-bit values per lane:

* `scaler.sv`: y = x * s + b. The 16-bit s is signed, and x enters through a
  27-bit multiplier port. This stage serves batch norm and LSQ scaling. It
  can be bypassed.
* `pool_relu.sv`: one comparator and one register per lane. The register
  starts each window at 0 (ReLU) or at the most negative value (plain max
  pool). After `pool_len` consecutive tiles it outputs the maximum. Max
  pooling therefore works by ordering the tiles of one window one after
  another.
* `quantser.sv`: emits `oprec` planes, taking bit `qmsb`, then `qmsb-1`, and
  so on, from each lane. There is no rounding and no saturation. Together
  with the scaler, this gives the quantisation step.

Planes go either to the MVU's own activation RAM (`DEST` = 0) or to the
crossbar with a destination mask. Three writers share the activation RAM
write port. `act_wr_arbiter.sv` grants them in a fixed order: the
interconnect first, then the host/controller, then the MVU's own output.

**Stalls.** The quantiser cannot always take a finished tile. It may still
be sending the previous tile (many output bits, short tiles), or its write
may not be granted (lost crossbar arbitration, or a higher-priority writer on
its own RAM). In either case every stage before it freezes: the RAMs hold
their outputs and the sequencer holds its position.

**Latency.** The sequencer issues one read per cycle. A tile's result reaches
the quantiser 6 cycles after the tile's last read. It then takes `oprec`
cycles to leave.

## 4. Programming a job (`mvu_ctrl.sv`, `agu.sv`)

The sequencer fixes the bit-combination order in hardware. Everything
tensor-shaped comes from address generation units. Each AGU is a nest of up
to five loops, and each loop has an iteration count and a signed jump. On
each step, the innermost loop that is not yet on its last iteration advances
and adds its jump to the address. Loops inside it restart. Because the jump
is signed, an outer loop's jump also undoes the inner loops' travel.

Two nests are used:

* **Inner nest (`ICNT`, `IAJUMP`, `IWJUMP`):** walks the blocks of one dot
  product, e.g. input-channel blocks x 3x3 kernel positions. It is replayed
  for every bit combination. Jumps are in words, so they include the bit
  depth.
* **Outer nest (`OCNT`, and `OAJUMP`, `OWJUMP`, `OSJUMP`, `OBJUMP` for the
  activation, weight, scaler and bias bases):** steps once per output tile,
  e.g. along an output row and over output-channel sets.

The address of bit j of the current activation block is
`ABASE + outer + inner + (aprec-1-j)`. Weights use the same formula with
`WBASE` and `wprec`. Output tile n goes to `OBASE + n*OJUMP`, or once per
pooling window.

Registers are 32 bits each, accessed as CSR `0x7C0 + n`:

| n | name | meaning |
|---|------|---------|
| 0, 1, 2 | APREC, WPREC, OPREC | activation / weight / output bits (1..16) |
| 3 | QUANT | [4:0] MSB taken by the quantiser, [8] activations signed, [9] weights signed |
| 4 | MODE | [0] scaler on, [1] ReLU, [15:8] pooling window length (0 = 1) |
| 5 | DEST | 0 = own RAM, otherwise a mask of destination MVUs |
| 6..11 | ABASE, WBASE, SBASE, BBASE, OBASE, OJUMP | base addresses, output step |
| 12 | COMMAND | write [0] start, [1] clear interrupt |
| 13 | STATUS | read [0] busy, [1] interrupt |
| 14..18 / 29..33 | ICNT0-4 / OCNT0-4 | loop counts (0 reads as 1) |
| 19..23 / 24..28 | IAJUMP / IWJUMP | inner jumps |
| 34..53 | OAJUMP, OWJUMP, OSJUMP, OBJUMP | outer jumps, 5 each |

Job registers are copied on start. While a job runs, software can already
write the next job's registers and its start. That start waits until the
MVU has drained. At completion the MVU raises its interrupt, which stays
high until cleared.

**Example: GEMV.** y = W x with x of 128 elements (2 blocks) and W of
128x128 (2x2 tiles):

* Inner loop: `ICNT0` = 2, `IAJUMP0` = aprec, `IWJUMP0` = wprec.
* Outer loop: `OCNT0` = 2, `OAJUMP0` = 0, `OWJUMP0` = 2*wprec,
  `OSJUMP0` = `OBJUMP0` = 1.

## 5. The controller (`pito.sv`)

The controller is an RV32I core with eight harts in a barrel. The scheduler
gives the pipeline to hart 0, 1, ..., 7 in turn, one per cycle. The five
stages are fetch, decode, execute, memory and commit. Because a hart returns
only every 8 cycles, each of its instructions has finished before its next
one is fetched. So there is no forwarding, no interlock and no branch
prediction.

* Each hart has its own PC, 32 registers and machine CSRs: `mstatus` (MIE,
  MPIE), `mie`, `mip`, `mtvec`, `mepc`, `mcause`, `mscratch`, `mhartid`, and
  the shared `cycle`.
* The instruction memory and the data memory are 8 KB each and shared by all
  harts. All harts start at address 0 and branch on `mhartid`.
* In the execute stage, a CSR access to `0x7C0..0x7F5` by hart h reaches the
  registers of MVU h.
* MVU h's interrupt is hart h's machine external interrupt (cause
  `0x8000000B`).
* ECALL, EBREAK and illegal instructions trap to `mtvec`. MRET returns.
* Not implemented: FENCE (decoded as a no-op), counters other than `cycle`,
  and user mode.

## 6. The array (`barvinn_top.sv`, `crossbar.sv`)

`crossbar.sv` connects the eight MVUs. Each source offers one write with a
destination mask; several bits in the mask broadcast the write.

* Each destination takes the lowest-numbered source that addresses it.
* A source is granted only when it has won all its destinations. Until then
  it stalls.
* A broadcast that was only partly granted is repeated later. The repeat
  writes the same word to the same address again, which is harmless.

With this crossbar, a chain of MVUs can run consecutive layers ("pipelined
mode"), or several MVUs can share a layer ("distributed mode"). Both are
matters of software.

The host side is a set of plain ports:

* loading the instruction and data memories;
* an element stream through the transposer into a chosen MVU's activation
  RAM;
* writes of weight tiles, scalers and biases;
* activation read-back, only while that MVU is idle.

## 7. Sizes

| item | default | from |
|------|---------|------|
| MVUs, lanes, tile | 8, 64, 64x64 | paper |
| operand precision | 1..16 bits, independent for weights / activations / outputs | paper |
| lane width after MVP, scaler, bias | 32, 16, 32 bits | paper |
| activation RAM | 32 banks x 1024 words x 64 bits (one flat array) | paper figure |
| weight RAM | 1024 tiles of 4096 bits | this design |
| scaler / bias RAM | 256 words | this design |
| controller memories | 8 KB + 8 KB | paper |
| AGU loops | 5 | paper |

With these sizes, here is how the networks the paper evaluates fit:

* **ResNet9 (2-bit):** activations fit. The weights of conv8 (1152 words)
  exceed one MVU's weight RAM, so that layer has to be split over two MVUs
  or have its weights reloaded during the layer.
* **FINN's CNV:** fits entirely.
* **ResNet-50 at 1/2 bits:** fits one layer at a time.
* **Speed:** conv1 of ResNet9 takes 36 cycles per output pixel, the same
  rate as the paper's cycle table.

## 8. Where this design departs from or adds to the paper

* **Bit-combination order.** The paper says the loops of the AGUs cover bit
  depth and bit combinations. Here the order of falling magnitude is fixed
  in logic, and the AGUs only cover tensor dimensions. The reason is that
  the magnitude-diagonal order cannot be written as fixed loop jumps.
* **Shift in the accumulator.** The paper's pseudo-code shifts after the
  last magnitude as well, which would double the result. Here the shift
  comes before each lower magnitude, which gives exact products.
* **Signed operands.** Their handling (subtracting sign-bit partial sums) is
  this design's.
* **Register map.** The paper mentions 74 MVU registers without listing
  them. This design has 54.
* **Controller-to-MVU link.** The paper draws it as an APB bus. Here it is a
  single-cycle register write from the executing hart.
* **Not modelled:** the AXI memory interface, the UART and the APB bus.
* **Memory depths.** Weight, scaler and bias RAM depths, read latencies and
  the stall scheme are this design's choices.
* **Rounding.** The scaler and quantiser have no rounding or saturation,
  because the paper describes none.
* **Adder tree.** The paper's VVP figure caption calls the adder tree 5 deep.
  A pairwise tree over 64 inputs has 6 levels, and that is what is built.
* **Quantisers.** The paper's MVU figure shows a Pool/ReLU box where lane
  63's quantiser would be. Every lane here has a quantiser.

## 9. Files and simulation

Design files (`rtl/`): `barvinn_pkg.sv` (sizes, types, register numbers),
`vvp`, `mvp`, `agu`, `mvu_ctrl`, `ram_1r1w`, `scaler`, `pool_relu`,
`quantser`, `act_wr_arbiter`, `crossbar`, `transposer`, `mvu`, `pito` and
`barvinn_top`. Every module begins with a comment that gives its interface
and timing.

Testbenches (`tb/`) are self-checking and print `TB_RESULT checks=N
failures=M`. `rv32_asm.sv` provides RV32I encoders for building test
programs.

* `tb_barvinn_top` runs the whole design at its default size. The controller
  runs a two-layer pipeline: one MVU broadcasts its layer over the crossbar
  to two others, a second MVU competes for the same destination and stalls,
  and a third MVU computes the next layer once it is signalled through data
  memory.
* The other testbenches each test one module against integer models.

Example:

    verilator --binary --timing -Irtl -Itb rtl/barvinn_pkg.sv tb/rv32_asm.sv rtl/*.sv \
        tb/tb_barvinn_top.sv --top tb_barvinn_top -o sim && ./obj_dir/sim

The full-size top-level simulation builds and runs in about 2.5 minutes.
Smaller tests take seconds.
