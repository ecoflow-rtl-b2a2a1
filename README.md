# EcoFlow: a zero-free dataflow for transposed and dilated convolutions

Training a CNN, and running the generator of a GAN, needs two kinds of convolution
that ordinary inference accelerators handle badly:

* **transposed convolution**: the input gradient of a strided layer, or the upsampling
  layer of a generator. It is usually computed by inserting S-1 zeros between the
  error elements, padding the border and running a normal convolution;
* **dilated convolution**: the filter gradient of a strided layer. The error map is used
  as a filter with S-1 zeros between its elements.

On a spatial array, most of the multiplications that padding creates are by zero. For a
3x3 filter with stride 2, fewer than a quarter of the padded multiplications are useful.
The PEs that do them are busy, but their work is wasted.

This design runs both convolutions on an Eyeriss-style array and multiplies only the
non-zero pairs. The hardware is the usual spatial accelerator with three small
extensions:

1. **Programmable PEs.** Each PE runs a short program written offline. The program says,
   step by step, which operands to take, which partial sum (psum) to accumulate into, and
   where to send a finished sum.
2. **Multi-group multicast.** The input network lets an X-bus answer to up to five row
   IDs and a PE to up to five column IDs. A PE can then receive elements from several
   multicast groups.
3. **Column accumulation.** The existing vertical psum links add up products that were
   placed in PEs of one column.

All the cleverness is in the schedule. The hardware only has to carry it out.

## The two schedules

### Transposed convolution (input gradients)

Take an error map e of Ne x Ne, a filter w of K x K and stride S. The output has size
O = S(Ne-1)+K, and

    out[S*a + r][S*b + c] += w[r][c] * e[a][b]

The schedule works as follows:

* **Placement.** PE(a,b) is given error e[a][b], so the array holds one PE per error
  element.
* **Weights.** The weights are broadcast one per cycle, in the order w00, w10, w20, w01,
  w11, …, so index idx = r + K*c. Every PE uses the current weight in the same cycle.
* **The circular shift.** If every PE used its own error, products for one output would
  be spread over PEs in different columns, with no link between them. So in step idx,
  PE(a,b) uses instead the error of column (b - floor(c/S)) mod Ne of its own row. That
  is a shift of the PE row by one column every S filter columns.
* **Where products land.** After the shift, every product of output (y, x) falls in PE
  column floor(x/S) mod Ne. The products sit in the PE rows a with
  0 <= y - S*a < K, which are consecutive.
* **Sums within a PE.** Products of one output that land in the same PE are summed in one
  psum register. The program uses one register per distinct output, called a label.
* **Sums across rows.** Outputs spread over several rows are summed up the column. The
  bottom PE sends its sum up in the step of its last product for that output. Each PE
  above adds what arrives in an extra step, then sends on; the top PE writes the total
  to the buffer. The extra step goes after the later of two steps: the PE's own last
  product for that output, and the step in which the PE below sent. Sums are added in
  the order they were sent, because the link is a queue.
* **Error delivery.** Each PE needs the errors of one to ceil(K/S) columns of its row. The
  errors are multicast with tag (a, b). PE(a,b) subscribes to the columns it uses, so
  several PEs share each multicast group.

For the 2x2 error, 3x3 filter, stride 2 example, the 4 PEs do 36 multiplications in
9 cycles of weights. The whole run, with error loading, pipeline fill and result writes,
takes 38 cycles. Padding would run 25 x 9 = 225 multiplications.

### Dilated convolution (filter gradients)

Take an ifmap i of H x H, an error e of Ne x Ne and stride S. The gradient has size
Kf = H - S(Ne-1), and

    dw[r][c] = sum over a, b of i[r + S*a][c + S*b] * e[a][b]

The schedule works as follows:

* **Placement.** PE(r,c) computes dw[r][c] entirely in one psum register.
* **Errors.** The errors are broadcast in raster order.
* **Ifmap.** Ifmap elements are multicast in raster order with tag (y, x).
* **Subscriptions.** The X-bus of row r holds row IDs {r + S*a}, and PE(r,c) holds column
  IDs {c + S*b}. Each PE therefore receives exactly the Ne x Ne elements it needs, in the
  order it uses them.
* **Sharing.** An ifmap element is taken by every PE that needs it in the same transfer.
* **Result.** The PE writes its gradient to the buffer after its last product.

## Hardware

The blocks connect as follows:

    host/DRAM ──bc_*──► GIN broadcast ──────────┐
    buffer ──► gin_feeder ──► GIN multicast ────┼──► 13 x 15 PE array ──► GON ──► buffer
                                                │     (vertical psum links, up)
    cfg ──► PE programs, IDs, descriptors ──────┘

| Module | Function |
|---|---|
| `ecoflow_pkg` | Widths, PE instruction word, packets, configuration command, counters |
| `io_queue` | 8-entry first-word-fall-through FIFO, used for every PE queue |
| `mcast_id_match` | Compares a tag with five enabled 5-bit IDs |
| `pe` | Register files 75/224/24, a 2-stage multiplier plus 1-stage accumulator pipeline, four queues, the program |
| `pe_array` | 13 x 15 PEs, with the psum link from each PE to the one above |
| `gin` | Broadcast channel and Y-bus/X-bus multicast channel with multi-ID matching |
| `gin_feeder` | Reads the buffer words listed in a descriptor table and multicasts them with their tags |
| `gon` | Round-robin collection of PE results into the buffer write port |
| `global_buffer` | 27 banks x 2048 x 16 b = 108 KB |
| `ecoflow_top` | Wires the blocks together, decodes configuration, controls the run, counts events |

### The PE program

A program is up to 256 `pe_instr_t` steps, run once after `start`. The fields of a step
are independent, so one step can pop operands, multiply-accumulate, add a psum from below
and send a result.

| Field | Meaning |
|---|---|
| `w_pop`, `w_store`, `w_addr` | Take the weight from the broadcast queue and optionally keep it in the filter spad, or read it from the spad |
| `i_pop`, `i_store`, `i_addr` | The same for the ifmap/error operand and the multicast queue |
| `mac` | Add w*i |
| `acc_init` | Start a new label from 0 instead of from psum register `p_addr` |
| `add_in` | Pop the psum from the PE below and add it |
| `add_op` | Add the ifmap/error operand itself: a psum that an earlier pass stored in the buffer and the feeder multicast back |
| `out` | What happens to the sum: keep it (`OUT_NONE`), send it up (`OUT_UP`), or write it to buffer address `out_addr` through the GON (`OUT_GON`) |

The pipeline has four stages: issue, operand read, two multiplier stages, and an
accumulate stage.

* **Rate and latency.** With operands present, a PE issues one step per cycle. A sum is
  written three cycles after its step issues. Back-to-back steps on the same label need
  no bubble.
* **Stalls.** A step waits until the queues it pops are non-empty. The whole pipeline
  freezes while the accumulate stage waits for a psum from below or for room in an output
  queue.
* **Clock gating.** When an operand is zero, the multiplier registers are not loaded.
  The step still counts as a MAC, and it is also reported as gated.

### Input network timing

Each GIN channel has one register stage.

* **Delivery.** A word is delivered to all its destination queues in the same cycle, once
  all of them have room. Until then the channel stalls, and the stall is counted.
* **Broadcast.** Only PEs with their broadcast enable set take broadcast words. An idle PE
  therefore never holds the channel.
* **Unmatched words.** A multicast word that matches no PE is dropped.
* **Rate.** Both channels and the feeder sustain one word per cycle. The feeder's first
  word leaves two cycles after `start`.

### Using the top

1. **Load.** Write the input data through `host_wr_*`. Then send configuration commands on
   `cfg`, one per cycle:
   * `CFG_PROG`: a program word;
   * `CFG_PROG_LEN`: a program length;
   * `CFG_BC_EN`: a broadcast enable;
   * `CFG_ROW_ID` / `CFG_COL_ID`: an ID slot, with its enable in bit 5;
   * `CFG_DESC`: a feeder descriptor `{addr, row_tag, col_tag}`.

   Configuration persists, so PEs used by an earlier layer must be given length 0, and
   their IDs and broadcast enable must be cleared.
2. **Run.** Pulse `start` with `feed_count` set to the number of descriptors. Offer the
   broadcast words on `bc_*` in the order the programs consume them.
3. **Collect.** `busy` falls when every PE is done, the feeder is idle and the GON has
   drained. Results are 16-bit words, saturated from the 32-bit sums. Read them through
   `host_rd_*`, which has one cycle of latency.

`perf` counts cycles, MACs, gated MACs, broadcasts, multicasts, multicasts to more than one
PE, vertical psum transfers, GON writes and GIN stall cycles.

## Larger layers

A layer larger than the array is cut into tiles by the scheduler.

* **Transposed convolution.** Error tiles of up to 13 x 15 overlap by ceil(K/S)-1 rows
  and columns. Each tile then computes complete sums for its interior outputs and writes
  only those. This rule follows from the schedule, but the testbench does not simulate
  it: its largest transposed layer, 13 x 13, fits in one tile.
* **Filter gradients.** The error map is sent in blocks of at most 5 x 5, the limit set by
  the five IDs. Between blocks the psums go to the buffer through the GON. At the start
  of the next block, the feeder multicasts them back to their PEs, and an `add_op` step
  adds each one. A psum is a 16-bit buffer word, so it saturates there. The psum
  register file is also not cleared by `start`, so a program may instead continue a sum
  kept in the PE. The testbench runs a 6 x 6 error as four 3 x 3 blocks through the
  buffer. Each of those runs gives every X-bus and PE one extra ID for its psum.
* **Psum register limit.** At most 24 labels may be live in one PE. With the weight order
  above, a transposed layer needs K*S labels: 6 for 3x3/2, 8 for 4x4/2, and 44 for the
  11x11/4 first AlexNet layer. The last must run its filter rows in two passes.

Under these rules, every layer the paper evaluates fits the 13 x 15 array. That covers
the CNN layers (AlexNet, ResNet-50, ShuffleNet, Inception, Xception, MobileNet) and the
CycleGAN and pix2pix layers. Each fits within the five 5-bit IDs: a N x N filter with
stride S needs ceil(N/S) IDs of ceil(log2(2N-S)) bits.

## Where this RTL departs from the paper

* **Arithmetic.** It uses 16-bit integer operands and a 32-bit accumulator, where the
  paper trains in bfloat16. Results are exact and can be checked bit for bit. Changing
  the multiplier and adder in `pe` is all that a floating-point version needs.
* **Bus widths.** Each input channel, the local link and the GON move one value per
  cycle. The paper sizes the input network at 80+32 bits. That width lets several words
  travel per cycle, which it needs to keep every PE busy on all its networks.
* **Psums across passes.** Psums come back from the buffer on the multicast channel,
  through `add_op`. They are stored as saturated 16-bit words, not at full 32-bit
  precision. The paper does not say how the PEs receive them.
* **Expansion.** The paper's filter-gradient example spreads each gradient over two
  PEs ("expansion") to use more of the array. Here each gradient has one PE.
* **Output rate.** The GON writes one result per cycle. A layer with many outputs per
  weight, such as the 13x13 error below (729 outputs, 9 weights), is limited by it.
* **The top row.** The upward link of the top row is tied off. A program there must not
  send up.
* **Off-chip memory.** The DRAM and the offline compiler are not part of the RTL. The
  broadcast stream and buffer fill/drain are ports of the top.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | Checks |
|---|---|
| `tb_io_queue` | Random traffic against a model, full at 8, one word per cycle |
| `tb_mcast_id_match` | All tags against random ID sets |
| `tb_global_buffer` | Every bank at full size, 1-cycle read, read-during-write, out-of-range addresses |
| `tb_gin` | Multi-ID groups, broadcast enables, random backpressure, 1-cycle latency |
| `tb_gin_feeder` | Order, tags, start latency, 40 words in 40 cycles |
| `tb_gon` | No loss, round-robin fairness, one packet per cycle, hold under backpressure |
| `tb_pe` | 1 MAC per cycle with latency 3, interleaved labels, add-from-below with stall, gating, psum reload |
| `tb_pe_array` | Sums up a column, private labels, event counts |
| `tb_ecoflow_top` | End to end at the full default size (below) |

`tb_ecoflow_top` instantiates the top with no parameter overrides and acts as the
scheduler. It builds programs, IDs and descriptors for eight layers:

1. the 2x2-error, 3x3-filter, stride-2 transposed example;
2. a 5x5-ifmap, 2x2-error, stride-2 filter gradient;
3. a 4x4 error with a 4x4 filter, stride 2, and one zero weight;
4. a 3x3 error with a 4x4 filter, stride 4;
5. a 5x5 error with a 5x5 filter, stride 2, where sums pass through three PE rows;
6. a 13x13 error with a 3x3 filter, stride 2, on 169 PEs;
7. a 13x13-ifmap, 3x3-error filter gradient on 9x9 PEs;
8. a 13x13-ifmap, 6x6-error filter gradient, run as four 3x3 error blocks whose psums
   go to the buffer after each run and are multicast back, and added, at the start of
   the next.

For each layer it checks:

* every output against a direct convolution;
* that the number of MACs equals the number of non-padding products;
* for the first layer, that the run takes at most 9 + 30 cycles.

It counts a failure if any mechanism never occurs: multicast to several PEs, a PE in
several groups, vertical accumulation, clock gating, GIN backpressure, broadcast, GON
writes or a psum reloaded from the buffer.

To simulate, list the package first:

    verilator --binary --timing --assert --top-module tb_ecoflow_top \
        rtl/ecoflow_pkg.sv rtl/io_queue.sv rtl/mcast_id_match.sv rtl/pe.sv \
        rtl/pe_array.sv rtl/gin.sv rtl/gin_feeder.sv rtl/gon.sv \
        rtl/global_buffer.sv rtl/ecoflow_top.sv tb/tb_ecoflow_top.sv
    ./obj_dir/Vtb_ecoflow_top

The full-size end-to-end run takes about 20 s to build and under a second to simulate.
