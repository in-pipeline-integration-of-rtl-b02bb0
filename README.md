# A digital in-memory-computing tile as a RISC-V vector execution lane

Convolution and fully connected layers spend most of their energy and time moving
weights and activations, not multiplying them. A digital in-memory-computing (DIMC)
macro removes most of that movement: the weights stay in an SRAM array whose read
path multiplies them with an input vector and adds the products, so one read of a
1024-bit row is 256 4-bit multiply-accumulates.

This RTL places such a macro *inside* the execute stage of a RISC-V vector unit, as
one more execution lane next to the ordinary vector lanes, instead of hanging it on
a bus as a memory-mapped accelerator. Four custom instructions move data between the
vector register file (VRF) and the tile and start computations. All data go through
the VRF, so the vector unit's normal instructions can reshape tensors (fold, pack,
transpose, pad) before they reach the tile, and no DMA or coherence is needed.

The vector unit follows the Zve32x profile with VLEN = 64 and ELEN = 32. The tile is
a 4 KiB array of 32 rows x 1024 bits with a 1024-bit feature buffer. It computes 256
4-bit, 512 2-bit or 1024 1-bit MACs per cycle, signed or unsigned, and returns 24-bit
partial sums.

## 1. The DIMC tile

```
             feature buffer (1024 b = 4 sectors x 256 b, 64-bit chunks with valid bits)
                 |sector 0        |sector 1        |sector 2        |sector 3
   row r ->  [sub-array 0]    [sub-array 1]    [sub-array 2]    [sub-array 3]     32 rows x 256 b each
             [MAC slice 0 ]   [MAC slice 1 ]   [MAC slice 2 ]   [MAC slice 3 ]   64 / 128 / 256 MACs
                 | INT_PS_0       | INT_PS_1       | INT_PS_2       | INT_PS_3
                 +---------------- recombination adder tree <------- PSIN (24 b)
                                          |
                                   PSOUT (24 b) ---> partial-sum output
                                          +--> ReLU + quantise --> 4-bit final output
```

**Storage.** A logical kernel row is 1024 bits and is split over the four sub-arrays:
bits `[256p +: 256]` of row `r` live in row `r` of sub-array `p`. In memory-mapped mode
the sub-arrays act as a single 128 x 256-bit memory with address `{p, r}`. It has one
masked 256-bit write and one 256-bit read per cycle (`dimc_array`, ports `wa/d/m` and
`ra/q`). In compute mode, row `r` is read in all four sub-arrays at once.

**MAC slices.** Each sub-array has a MAC slice (`dimc_mac_subarray`) that multiplies
its 256 weight bits with the 256 bits of the matching feature-buffer sector. The
operands are packed LSB first. The precision changes how the 256 bits are cut:

| precision | operands per sub-array | MACs per cycle (tile) | signed range |
|-----------|-----------------------|-----------------------|--------------|
| 4-bit     | 64                    | 256                   | -8 .. 7      |
| 2-bit     | 128                   | 512                   | -2 .. 1      |
| 1-bit     | 256                   | 1024                  | -1 .. 0      |

Signedness applies to the weights and the features together. A signed 1-bit operand
is a one-bit two's-complement number (0 or -1). A sub-array whose feature sector holds
no valid data is disabled and adds zero.

**Accumulation pipeline.** Two stages. At the end of the request cycle the four
sub-array sums `INT_PS_p` are registered. In the next cycle the adder tree adds them
and the incoming partial sum `PSIN`, and registers `PSOUT`. A compute requested in
cycle *t* is ready in cycle *t+2*, and one compute can be requested every cycle.
Arithmetic is modulo 2^24. The largest single computation is 256 x 225 = 57600, so
partial sums over hundreds of tiles fit.

**Final output.** `dimc_relu_quant` sets negative sums to zero and saturates the rest
to the output precision: 0..15, 0..3 or 0..1. The result is zero-padded to 4 bits, so
two results fit in one byte. The quantiser does not scale. A scale must be folded in
by software, for example through the partial-sum input or the weights.

## 2. The instructions

All four use the custom-0 opcode `0001011`. Bit positions:

```
        31  30 29 28 27 26 25 | 24..20 | 19..17 | 16 15 | 14..12 | 11..7 | 6..0
DL.I    nvec[3]   mask[4]     |  vs1   | width  |  sec  |  000   |   -   | 0001011
DL.M    nvec[3]   mask[4]     |  vs1   | width  |  sec  |  001   | m_row | 0001011
DC.P    sh  dh  m_row[5]      |  vs1   | width  |   -   |  010   |  vd   | 0001011
DC.F    sh  dh  m_row[5]      |  vs1   | width  | bidx  |  011   |  vd   | 0001011
```

* **DL.I** - feature load. Reads `nvec` (1..4) consecutive registers starting at `vs1`
  (register numbers wrap at 32). Register *k* becomes 64-bit chunk *k* of sector `sec`
  of the feature buffer if `k < nvec` and `mask[k]` is set. Every other chunk of that
  sector is cleared and marked invalid, so a partly loaded sector adds nothing from
  its stale chunks.
* **DL.M** - kernel load. Same source registers and mask, written into sector `sec` of
  kernel row `m_row`. Chunks that are not selected keep their old contents.
* **DC.P** - compute and store a partial sum. Multiplies the feature buffer with kernel
  row `m_row` at the precision given by `width`. `PSIN` is bits [23:0] of half `sh` of
  `vs1`. The 24-bit result is sign-extended to 32 bits and written into half `dh` of
  `vd`. The other half of `vd` is kept.
* **DC.F** - compute and store a final value. Same computation, then ReLU and
  quantisation. The 4-bit result goes into byte `bidx` of half `dh` of `vd`: the byte
  becomes `{old low nibble, new result}`. Two DC.F to the same byte therefore pack two
  results, the first one in the high nibble. The rest of `vd` is kept.
* **width**: `width[1:0]` selects the precision (`00` 4-bit, `01` 2-bit, `10` 1-bit).
  `width[2]` selects signed operands. The DL instructions ignore it.

A custom-0 word is dropped and `illegal` pulses when any of these holds:

* its funct3 is not one of the four above;
* it is a DL with `nvec` of 0 or more than 4;
* it is a DC with `width[1:0] = 11`.

## 3. Pipeline, timing and hazards

```
 cycle     t        t+1          t+2             t+3
         vID   ->   EX1     ->   EX2       ->    vWB
         decode     DL: write    adder tree      ReLU/quantise,
         hazard     buffer/row   + PSIN          merge into vd,
         VRF read   DC: MACs     -> PSOUT        VRF write
```

* `vID` decodes the word from the scalar core and reads the VRF in the same cycle. The
  VRF gives it `vs1..vs1+3`, which is 256 bits and matches the tile's load width, and
  the old value of `vd`.
* An instruction is accepted (`instr_ready` high) unless it reads or writes a register
  that a DC.P/DC.F still in EX1, EX2 or vWB will write. There is no forwarding. A chain
  of computes that accumulate into the same register issues every 4 cycles.
  Independent computes issue every cycle and write back 3 cycles after issue.
* A load is written at the end of EX1. The compute after it reaches EX1 one cycle
  later and sees the new data. No interlock is needed inside the tile.
* Words with another opcode go to the ordinary lanes on `fwd_valid/fwd_instr`. They get
  the same hazard check on their register fields [11:7], [19:15] and [24:20], so an
  ordinary instruction never reads a DIMC result before it is written. The DIMC lane
  and the ordinary lanes otherwise run in parallel.
* The rest of the core writes and reads the VRF through `ext_*`. Each DIMC write-back
  is shown on `wb_valid/wb_vd/wb_value` for that core's own scoreboard.
* `mm_*` reads the kernel memory memory-mapped, 256 bits per cycle, one cycle of
  latency. A compute in EX1 uses the read word lines, so `mm_rd_ready` is low and the
  read must be retried.

Throughput at 500 MHz: 256 4-bit MACs per cycle is 128 G MAC/s, or 256 GOPS if each
MAC counts as two operations. The speed of a real layer depends on how many cycles go
to loads. The load cost per output pixel is four DL.I, plus the ordinary vector
instructions that gather the patch. In return, the pixel's patch is used by up to 32
DC instructions.

## 4. Mapping a layer: tiling and grouping

The tile holds 32 kernels of up to 1024 bits each. A layer with a kernel of
KH x KW x ICH elements at *b* bits and OCH output channels is mapped as follows.
`tb/tb_conv_layer.sv` does exactly this.

1. Flatten each kernel, element `e = (kh*KW + kw)*ICH + c` at bits `[b*e +: b]`. If it
   is longer than 1024 bits, cut it into 1024-bit **tiles**.
2. Take the output channels in **groups** of 32, one kernel per row.
3. For each group and tile, load the tile of every kernel in the group with four DL.M
   (one per sector, four registers each).
4. For each output pixel, load the same tile of the input patch with four DL.I. Then
   issue one DC.P per row, passing the partial sum of the earlier tiles as `PSIN`. On
   the last tile, a DC.F gives the activated 4-bit output.

Each tile beyond the first costs a reload of the kernels and a pass over the pixels.
Each group beyond the first costs a reload of the kernels. Neither needs extra
hardware: the partial-sum input of DC.P carries the accumulation.

Capacity of the default configuration against the layers of ResNet-50. The layer
shapes are the standard ResNet-50 ones; weights and activations are 4-bit.

| layer   | kernel      | bits  | tiles | OCH  | groups |
|---------|-------------|-------|-------|------|--------|
| conv1   | 7x7x3       | 588   | 1     | 64   | 2      |
| conv2_1 | 1x1x64      | 256   | 1     | 64   | 2      |
| conv2_2 | 3x3x64      | 2304  | 3     | 64   | 2      |
| conv2_3 | 1x1x64      | 256   | 1     | 256  | 8      |
| conv3_1 | 1x1x256     | 1024  | 1     | 128  | 4      |
| conv3_2 | 3x3x128     | 4608  | 5     | 128  | 4      |
| conv3_3 | 1x1x128     | 512   | 1     | 512  | 16     |
| conv4_1 | 1x1x512     | 2048  | 2     | 256  | 8      |
| conv4_2 | 3x3x256     | 9216  | 9     | 256  | 8      |
| conv4_3 | 1x1x256     | 1024  | 1     | 1024 | 32     |
| conv5_1 | 1x1x1024    | 4096  | 4     | 512  | 16     |
| conv5_2 | 3x3x512     | 18432 | 18    | 512  | 16     |
| conv5_3 | 1x1x512     | 2048  | 2     | 2048 | 64     |
| fc      | 2048        | 8192  | 8     | 1000 | 32     |

## 5. Files

| file | what it is |
|------|-----------|
| `rtl/dimc_pkg.sv` | sizes, opcode/funct3, precision enum, decoded-instruction struct |
| `rtl/dimc_mac_subarray.sv` | MAC slice of one sub-array, three precisions |
| `rtl/dimc_subarray.sv` | 32 x 256-bit 1R1W array + row decode + MAC slice |
| `rtl/dimc_predecoder.sv` | address split, sub-array write enables, read/compute priority |
| `rtl/dimc_adder_tree.sv` | sum of the four sub-array results and PSIN |
| `rtl/dimc_array.sv` | the macro: four sub-arrays, pre-decoder, two-stage pipeline |
| `rtl/dimc_feature_buffer.sv` | 1024-bit input buffer with chunk valid bits |
| `rtl/dimc_relu_quant.sv` | ReLU and saturating quantiser |
| `rtl/dimc_tile.sv` | buffer + macro + quantiser, the lane's view of the tile |
| `rtl/dimc_decoder.sv` | decoder of DL.I, DL.M, DC.P, DC.F |
| `rtl/dimc_vrf.sv` | 32 x 64-bit VRF with a 4-register group read port |
| `rtl/dimc_lane_ctrl.sv` | lane control: tile requests, write-back merging, in-flight tracking |
| `rtl/rvv_dimc_top.sv` | vID / EX1 / EX2 / vWB pipeline slice, the top |

Each module has a self-checking testbench `tb/tb_<module>.sv`; the top's is
`tb/tb_rvv_dimc_top.sv`. `tb/tb_dimc_ref_pkg.sv` holds the reference arithmetic.
`tb/tb_conv_layer.sv` runs whole convolution layers. Every testbench prints
`TB_RESULT checks=N failures=M`.

Simulating with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rvv_dimc_top \
    -y rtl -y tb +libext+.sv rtl/dimc_pkg.sv tb/tb_dimc_ref_pkg.sv tb/tb_rvv_dimc_top.sv
./obj_dir/Vtb_rvv_dimc_top
```

Replace the top-module name and the last file to run another testbench. Sizes are
`localparam`s in `dimc_pkg` and parameters with those defaults in the modules. The
instruction fields fix 32 rows (5-bit `m_row`), 4 sectors (2-bit `sec`) and 64-bit
registers, so changing them also means changing the encoding.

## 6. What was verified

* Each block's testbench checks it against arithmetic written separately in the
  testbench. This covers random and extreme operands in all precision and sign modes,
  masked writes, the pipeline latency to the cycle, and read/compute arbitration.
* `tb_rvv_dimc_top` runs the full-size design. An instruction-level model runs about
  3000 random instructions and predicts every write-back, including its cycle. At the
  end it compares the whole VRF and the whole kernel memory. It counts each mechanism
  (each instruction type, each precision, signed mode, masked loads, hazard stalls on
  DIMC and on forwarded words, forwarding, illegal words, ReLU clamping, saturation,
  nibble packing, memory-mapped reads and refused reads). Any mechanism that never
  occurs counts as a failure. It also checks that 8 independent computes issue in 8
  cycles and that a dependent chain issues every 4 cycles.
* `tb_conv_layer` checks every output of seven layers against a direct convolution:
  * a 1152-bit kernel needing two tiles;
  * 33 output channels needing two groups;
  * a signed 2-bit layer and a signed 1-bit layer;
  * three ResNet-50 shapes with their full kernels and channel counts:
    * conv1, 7x7x3 to 64 channels;
    * conv2_2, 3x3x64 to 64 channels, which needs three tiles and two groups;
    * conv3_1, 1x1x256, which fills exactly one row (32 of its 128 output channels).

  Each layer runs on a 2x2 output map at stride 1. The output map size does not change
  how one pixel is mapped. The testbench prints the cycles each layer takes.
* Each testbench was also shown to fail against a copy of its module with one
  deliberate bug.

Not verified: timing or area of a real implementation. The bitcell array is a
register array here, so its synthesis results say nothing about an 8T SRAM macro.

## 7. Where this design fills gaps

The published description gives the tile's organisation, the MAC counts per
precision, the 24-bit partial sums with a partial-sum input, the ReLU output stage,
the four instructions with their field positions, and the placement of the tile as a
lane in the vector execute stage. These parts are this design's own choices:

* funct3 values and the meaning of the 3-bit `width` field (precision + signedness);
* legal `nvec` range 1..4 and the handling of illegal words;
* clearing of unselected feature chunks, and the sub-array enables derived from them;
* sign extension of partial sums, `PSIN` taken from bits [23:0] of the selected half;
* the nibble order of packed final results (shift-in, first result high);
* the quantiser (ReLU + saturation, no scaling);
* the two-stage accumulation pipeline;
* the pipeline depth of the DIMC lane. The published pipeline has three vector stages:
  vID, vEX and vWB. Here the DIMC lane spends two cycles in vEX, EX1 and EX2, one for
  each register stage of the tile.
* stall-only hazard handling, without forwarding;
* the read/compute priority of the memory-mapped port;
* a VRF with a 4-register group read port plus one extra read port. The only thing
  the description says about the VRF is that it has enough ports for the tile.

There are two inconsistencies in the description. The memory size is given both as
"32 KiB" and as 4 KB. Both are said to be 32 rows of 1024 bits, which is 4 KiB, and
that is what is built here. The figure of the macro also labels two sub-arrays
"Feature enable<0>"; here each sub-array has its own enable.

Not built: the scalar RISC-V core and the ordinary vector lanes. Both come from an
existing industrial core and connect through the `instr_*`, `fwd_*`, `ext_*` and `wb_*`
ports. Also not built: the transistor-level bitcells and sense amplifiers of the
macro, and external memory.
