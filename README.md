# LUT-based processing-in-memory bank for CNN malware detection

Malware can be detected by turning a program binary into a grayscale image
(one byte per pixel) and classifying the image with a convolutional neural
network. Almost all of the work in such a network is multiply-accumulate
(MAC) on small integers. This design does that work inside a DRAM bank, so
the images and weights never cross a memory bus.

The main idea is that the compute elements do not calculate. Each one is a
look-up table (LUT) core. It holds the full answer table of some function of
two 4-bit operands and reads the answer out. A table lives in DRAM rows like
any other data and is loaded into a core straight from a subarray's sense
amplifiers. So a core can be turned from a multiplier into an adder, or into
anything else that takes two nibbles and returns one byte, by reading a
different row. Nine cores, a router and a small memory form a cluster. A
cluster chains 4-bit look-ups into 8-bit MACs. Clusters sit under the
subarrays of the bank: 256 of them with the default parameters.

Data can be stored at reduced precision. A quantizer turns stored bytes into
8-bit or 4-bit codes. A 4-bit MAC takes 5 look-up steps where an 8-bit MAC
takes 8. The same cores also do max pooling. Loading comparison tables in
place of the multiply tables lets a cluster take a running maximum of bytes.

## Hierarchy

```
pim_bank                       top: command port, decoding, responses
├── global_row_decoder  (x2)   row address -> subarray select + local row
├── precision_scaler           row-wide uniform quantizer
└── per subarray (NUM_SUB = 16)
    ├── dram_subarray          ROWS x ROW_BITS storage + row buffer
    └── pim_cluster (CL_PER_SUB = 16 per subarray)
        ├── pim_router         nibble crossbar: cluster memory <-> cores
        └── lut_core (x9)      8 x 256-bit function words, 256:1 x 8 mux
pim_pkg                        shared types, command format, micro-programs
```

| Parameter      | Default | Where it comes from |
|----------------|---------|---------------------|
| cores/cluster  | 9       | the source architecture |
| function words | 8 x 256 bits | the source architecture |
| operands       | 2 x 4 bits | the source architecture |
| clusters       | 256 = 16 subarrays x 16 | 256 is given; the split is a choice |
| `ROWS`         | 512     | choice |
| `ROW_BITS`     | 2048    | choice: one row = one core's eight function words |
| accumulator    | 16 bits, unsigned, wraps | choice |

## The LUT core (`lut_core`)

A function f(x, y) of two 4-bit operands with an 8-bit result has 256
entries. The core stores it "bit-sliced" as eight 256-bit function words:

    word j, bit (16*x + y)  =  bit j of f(x, y)

Operand registers A and B form the 8-bit select `{A, B}` of a 256:1
multiplexer that is eight bits wide. It takes bit `{A,B}` of every word, so
the output is f(A, B). The operands are loaded with `op_load`. The result
follows from the registers without a clock, so it is valid in the next cycle.
`fw_load` replaces all eight words in one cycle from a 2048-bit row. Word j of
the row is `row[256*j +: 256]`.

To build a table, set bit `16*x+y` of word j to bit j of f(x,y) for every x
and y. The testbenches do this in `pim_tb_pkg::make_fw` for x*y and x+y.

## The cluster and its micro-programs (`pim_cluster`, `pim_router`, `pim_pkg`)

This section covers the least obvious part of the design.

A cluster has nine cores. It also has a 32-nibble register file (the
*cluster memory*) and a row-wide operand buffer. The router is a full
crossbar, four bits wide. In a single cycle it can give every core any two
nibbles of cluster memory. In a later cycle it can write the low and high
result nibbles of every core into any nibbles of cluster memory. So cores
talk to each other through cluster memory.

A MAC is a fixed *micro-program*. Each step lists, for each core: whether it
is used, the two source nibbles, and where the low and high result nibbles go.
A step takes two clock cycles: route the operands into A/B, then write the
results back. The MAC programs assume cores 0-3 hold the table of x*y and
cores 4-8 the table of x+y. The accumulator is kept in cluster-memory nibbles
4..7. It therefore persists from one operand pair to the next and from one
command to the next.

**8-bit MAC** (`acc += a*b`, 8 steps). With a = aH:aL and b = bH:bL:

| step | cores 0-3 (x*y)           | cores 4-8 (x+y) |
|------|---------------------------|-----------------|
| 1    | aL*bL, aL*bH, aH*bL, aH*bH | –              |
| 2    | – | column 0 is finished (acc0 + p0.lo); four more column sums, each giving a sum nibble and a carry |
| 3    | – | column 1 sum of sums; the carries are paired up |
| 4–8  | – | carries ripple into columns 1, 2 and 3; each add gives one nibble and one carry |

The partial product of weight 16^k adds into nibble column k. Every add
returns a 5-bit sum. Its low nibble stays in the column and its high nibble
(the carry, 0 or 1) becomes a term of the next column. Column 3 keeps only its
low nibble, which makes the sum modulo 2^16. The exact register allocation is
in `pim_pkg::mac_step`, one commented line per core operation. No step uses
more than five adders or has two writers to one nibble. The router asserts the
second rule.

**Max pooling** (4 steps per byte, `acc[7:0] = max(acc[7:0], x)`). This
program needs other tables, so cores 0-5 must be reprogrammed first:

| step | core: table | operation |
|------|-------------|-----------|
| 1 | 0, 1: compare (0 <, 1 =, 2 >); 2: max | compare the high nibbles and the low nibbles of x and acc; the new high nibble is max(xH, accH) |
| 2 | 3: "x wins" = (cH == 2) or (cH == 1 and cL != 0) | decide whether x ≥ acc |
| 3 | 4: w ? y : 0; 5: w ? 0 : y | keep xL or accL; the other becomes 0 |
| 4 | 6: x+y | the sum of the two picks is the new low nibble |

Element i of the row is `row[8i +: 8]` (256 per row). A command over `count`
bytes takes `count*9` cycles. Switching a cluster between convolution and
pooling costs six `OP_PROGRAM` commands, for cores 0-5; core 6 keeps its x+y table.

**4-bit MAC** (5 steps): one product aL*bL, then four additions. Each adds one
nibble column of the accumulator and takes the carry of the column below.

Timing: one pair costs 1 cycle to load its operands plus 2 cycles per step.
That is 17 cycles in 8-bit mode and 11 in 4-bit mode. A command over `count`
pairs keeps `busy` high for exactly `count*(1+2*steps)` cycles, and then
`done` pulses. In look-up steps, the 8-bit MAC is 8 core operations deep. That
matches the published cluster MAC delay of 6.4 ns, which is eight times the
0.8 ns core delay.

Operand layout in a row: pair i has a = `row[16i +: 8]` and b =
`row[16i+8 +: 8]`. A 2048-bit row holds 128 pairs. In 4-bit mode only the low
nibble of each byte is used.

## The bank (`pim_bank`) and its commands

Row addresses are `{subarray, local row}` (9 local bits by default). A
command is a `pim_pkg::bank_cmd_t`. It is accepted when `cmd_valid` and
`cmd_ready` are both high:

| op           | effect |
|--------------|--------|
| `OP_WRITE`   | `row <= wdata` |
| `OP_READ`    | `rsp_row <= row` |
| `OP_PROGRAM` | core `core` of cluster `cluster` (under the row's subarray) loads its function words from `row` |
| `OP_MAC`     | that cluster copies `row` and runs `count` MACs in `prec` mode, first clearing its accumulator if `clear` is set |
| `OP_MAX`     | that cluster takes the maximum of the first `count` bytes of `row` into `acc[7:0]`, first clearing the accumulator if `clear` is set |
| `OP_RDACC`   | `rsp_acc <=` that cluster's accumulator |
| `OP_QUANT`   | `dst_row <= quantize(row)`, same subarray |

Timing:
- Each command activates its row in the cycle it is accepted. The row is
  used in the next cycle. `cmd_ready` is low in that second cycle.
- `OP_READ` and `OP_RDACC` set `rsp_valid` two cycles after acceptance.
- A cluster runs on its own once it starts, so many clusters can compute at
  once while the bank takes other commands.
- An `OP_MAC`, `OP_MAX`, `OP_PROGRAM` or `OP_RDACC` that names a busy
  cluster stalls:
  `cmd_ready` stays low until that cluster is done.
- A command with an out-of-range row, destination, cluster, core or count
  does nothing. `err` pulses when its response would have come.

A typical sequence of commands:
1. Write the x*y and x+y tables to two rows of each subarray.
2. Program cores 0-3 of each cluster from the first row and cores 4-8 from
   the second.
3. Write operand rows: im2col-style pairs of activation and weight.
4. Issue `OP_MAC` to many clusters.
5. Collect the results with `OP_RDACC`.

## Precision scaling (`precision_scaler`)

Uniform quantization relates a value r to its N-bit code q by
r = S·(q − Z). The scaler inverts this for each byte of a row:

    q = min( ((r * q_mult + 2^(q_shift-1)) >> q_shift) + q_zero , 2^N - 1 )

Here 1/S = q_mult / 2^q_shift, and there is no rounding term when
q_shift = 0. N is 8 or 4. Each code is written into the byte it came from,
zero-extended. A 4-bit code therefore sits where the 4-bit MAC mode reads it.

## Departures from the source architecture and open points

- **Output width of a core.** The source describes the core both as giving a
  4-bit output and as reading 8 bits out of eight latches. The design follows
  the 8-bit reading. A 4x4 product needs 8 bits.
- **MAC schedule.** The source says a cluster does 8-bit MACs with its nine
  cores and router, but not how. The schedule, the fixed placement of the
  tables (4 multipliers, 5 adders), the cluster memory and the two-cycle step
  are this design's own.
- **Arithmetic.** MACs are unsigned, into a 16-bit accumulator that wraps.
  A 3x3 convolution of 8-bit data can already overflow it. Signed data,
  wider accumulation and requantization between layers are not built. With
  unsigned data a ReLU activation does nothing, so none is built. The cores
  could do all of these given suitable tables and programs. Max pooling is
  built, with the table set and schedule above as this design's own choice.
- **Quantizer scope.** The source quantizes 32-bit floats to 16, 8 or 4 bits.
  Here the stored data are bytes, and the scaler produces 8- or 4-bit codes.
  There is no 16-bit mode.
- **Bank organisation.** The source gives 256 clusters per DRAM chip. The
  split into 16 subarrays of 16 clusters, the row count and width, the command
  set and all timing are choices. The DRAM is a plain array with a row buffer.
  Refresh, DRAM timing and the row-copy links between subarrays are not
  modelled.
- **CNN mapping.** The host decides how network layers are laid out as
  operand rows and spread over clusters. No layer controller is built.

## Workload capacity

With the default parameters, the bank stores 16 x 512 x 2048 bits = 2 MiB.
The networks used with this architecture (AlexNet, ResNet-18/34/50, VGG-16,
MobileNetV2) have between about 3.5 M and 138 M weights. Those figures are
general knowledge, not from the source. Even at 8 bits per weight, no whole
network fits in one bank of this size. A 32x32 input image (1 KiB) fits in
four rows. A full DRAM chip of the intended kind is hundreds of times larger.
Running a network here means streaming it layer by layer through the bank.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `lut_core_tb` | every entry of a random table, the x*y and x+y tables, 1-cycle latency |
| `pim_router_tb` | random selects and destinations: routed operands, write-back data and enables, no writes outside the write phase |
| `pim_cluster_tb` | 8- and 4-bit MACs against a reference sum, exact busy duration, one `done` pulse, clear vs. accumulate, start ignored while busy; max pooling after reprogramming, then MACs again |
| `dram_subarray_tb` | write-through, activation into the row buffer, unselected subarray ignores commands |
| `global_row_decoder_tb` | every address of a small bank and beyond it |
| `precision_scaler_tb` | every byte against the quantization formula, both precisions |
| `pim_bank_tb` | end to end at 2x2 clusters: programming, reads, parallel MACs, stalls, mode switches, quantize then MAC, rejected commands, reprogramming for max pooling and back; it counts each of these and fails if one never happens |
| `pim_conv_tb` | a 3x3 convolution over a 4x4 tile of a 32x32 byte image, 8 clusters in parallel, at 8 bits and again after quantizing every operand row to 4 bits in memory |
| `pim_bank_full_tb` | the default 256-cluster bank: program two clusters at opposite corners, two full-row MACs at once, duration 128 x 17 cycles |

To simulate, for example the cluster:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pim_pkg.sv tb/pim_tb_pkg.sv rtl/lut_core.sv rtl/pim_router.sv \
  rtl/pim_cluster.sv tb/pim_cluster_tb.sv --top-module pim_cluster_tb
./obj_dir/Vpim_cluster_tb
```

For the bank, also add `rtl/dram_subarray.sv`, `rtl/global_row_decoder.sv`,
`rtl/precision_scaler.sv` and `rtl/pim_bank.sv`. Building the full-size bank
takes 5 to 11 minutes on a 4-core machine, because 256 clusters, each with
18 kbit of function-word storage, are flattened into one model. The
simulation then runs in seconds.
