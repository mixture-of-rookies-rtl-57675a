# A DNN accelerator that skips neurons predicted to output zero

In networks with ReLU activations, a large share of neurons output exactly
zero: their dot product (after batch norm and any residual addition) is
negative, and ReLU clamps it. Each of those neurons still costs a full dot
product and a full fetch of its weights. This accelerator predicts, before
computing a neuron, whether its ReLU output will be zero. When the prediction
is confident, it writes the 0 directly and never fetches the neuron's weights.

The prediction mixes two cheap "rookie" predictors. A neuron is skipped only
when both say zero:

* **Spatial (proxy) predictor.** Offline, the neurons of each layer are
  grouped into clusters of neurons with similar weight vectors. One neuron of
  each cluster, the *proxy*, is always computed exactly. If the proxy's ReLU
  input is positive, every member of its cluster is computed normally. If it
  is negative, the members become candidates for skipping.
* **Self-correlation (binary) predictor.** For a candidate, a small binary
  unit computes the dot product of only the sign bits of the inputs and the
  weights: +1 where the signs agree, -1 where they differ. Offline profiling
  has fitted a line, `estimate = m * p_bin + b`, from this binary dot product
  to the real one. It has also stored the Pearson correlation `c` between the
  two. The estimate goes through the neuron's batch norm and residual
  addition. If the result is negative and `c` reaches the layer threshold
  `T`, the neuron is skipped and a 0 byte is written as its output.
  Otherwise it goes to a compute unit.

Neurons with a weak correlation (`c < T`) are never skipped. `T` sets the
trade-off between skipped work and accuracy. The binary predictor needs no
extra weight traffic: its weights are the sign bits of the stored weights,
which are kept apart from the other 7 bits of each weight.

## Block structure

```
            start, desc_base, n_layers
                    |
            Layer Controller  --port NCU+2-->  descriptors
                    | layer descriptor
            Row Controller    --port NCU+1-->  input windows
             |            \ writes
             |             Input SRAM (16 KB, circular)
             | row context   |        |
            Neurons Controller        | inputs / sign bits
             |  jobs      \ members of negative clusters
       8 x Compute Unit    Binary Prediction Unit
       (8 MAC/cycle,       (binWeight SRAM 2 KB, 8 binCUs, loader)
        1 KB buffer)            --port NCU-->  header, signs, 0 writes
        --ports 0..7-->  weight rows, residuals, output bytes
```

| Module | Role |
|---|---|
| `mor_accel` | top level, wires everything, one external memory port per client |
| `layer_controller` | runs layers in order from a table of 4-word descriptors |
| `row_controller` | loads each output row's input window into the input SRAM, reusing the overlap with the previous window |
| `neurons_controller` | schedules proxies, cluster members and binary predictions onto the units |
| `compute_unit` | base-precision neuron: weight fetch, 8x8-bit MACs per cycle, batch norm, residual, ReLU, output write |
| `bin_pred_unit` | binary weight SRAM, 8 binCUs and the loader that feeds them |
| `bin_cu` | XNOR/count dot product, fitted line, batch norm, threshold test |
| `input_sram`, `binweight_sram` | on-chip memories (plain arrays, registered reads) |
| `sync_fifo` | queue used by the Neurons Controller |
| `mor_pkg` | shared types, the row and descriptor formats, shared arithmetic |

Default sizes are those of the main configuration:

* 8 compute units, each 8 MACs wide (64 MACs per cycle in total), 8-bit
  weights and inputs, and a 1 KB weight buffer each.
* 8 binCUs, a 2 KB binary weight SRAM and a 16 KB input SRAM.
* External memory with an 8-byte port and 64-byte bursts, at the same clock
  as the accelerator (1.2 GHz in the reference setup).

## Network format in memory

Every layer has two tables of fixed-length rows. A row is `2 + 8*KW` 64-bit
words, where `KW = ceil(K/64)` and `K` is the fan-in.

* **Proxy table**, one row per cluster:
  * Word 0 holds `idx` (the neuron's position in the layer's output, bits
    15:0) and the cluster size (bits 23:16).
  * Word 1 holds the folded batch-norm scale (Q8.8, bits 15:0) and bias
    (bits 31:16).
  * Then come `8*KW` words of 8-bit weights, weight `n` in byte `n%8` of word
    `n/8`, zero padded.
* **Non-proxy table**, sorted by cluster: the members of proxy 0 first, then
  those of proxy 1, and so on.
  * Word 0 holds `idx` and `c` (Q0.8, so `c` = 1.0 is stored as 255).
  * Word 1 holds batch-norm scale and bias, then `m` (Q8.8, bits 47:32) and
    `b` (bits 63:48, at accumulator scale).
  * Then come `KW` sign words (bit `i` of word `j` is the sign of weight
    `64j+i`), followed by `7*KW` words with the low 7 bits of every weight,
    packed back to back.

Both rows cost the same 8 words per 64 weights. The binary predictor reads
only the sign words. A compute unit reads everything and rebuilds the
two's-complement weights.

The clusters are never stored as a list. The first member of cluster `p` is
the sum of the sizes of clusters `0..p-1`, and the Neurons Controller keeps
that running sum.

A **layer descriptor** is 4 words, and descriptors sit 32 bytes apart:

| Word | Fields |
|---|---|
| 0 | `{out_base, in_base}` |
| 1 | `{np_base, proxy_base}` |
| 2 | `{n_out, n_rows, stride, k}` |
| 3 | `{n_proxy[63:48], res_en[46], relu_en[45], out_shift[44:40], thr[39:32], res_base[31:0]}` |

Outputs are bytes, at `out_base + row*n_out + idx`. The residual input, when
present, is laid out the same way at `res_base`.

### Arithmetic

For a real dot product `dot` (or the binary estimate in its place):

```
y   = (dot * bn_scale) >>> 8 + bn_bias + (res_en ? residual << out_shift : 0)
out = relu_en ? clamp(y >>> out_shift, 0, 127) : clamp(y >>> out_shift, -128, 127)
```

A proxy counts as negative when `y < 0` and the layer has a ReLU. A layer
without ReLU predicts nothing: all its neurons are proxies, or all clusters
are treated as positive.

## Scheduling inside a row (Neurons Controller)

Getting the order right is the subtle part of the design.

1. Proxies are sent to free compute units in table order, each with a
   sequence number. They can finish out of order, because fan-ins and memory
   stalls differ. A reorder table of 8 entries retires them in order, so that
   each cluster's first member (the running sum) is known when it retires.
2. A retired proxy turns into one entry `{first member, size}` in one of two
   small queues: positive clusters and negative clusters. These queues are
   the only bookkeeping of "which members are available". No per-row mask
   exists, so the size of a layer's output is not limited by an on-chip
   buffer.
3. Members of positive clusters go to compute units. Members of negative
   clusters go, one per cycle, to the Binary Prediction Unit.
4. The binary unit answers zero or non-zero for each member.
   * For a zero, it has already written the 0 byte itself.
   * For a non-zero, the member's row address goes into a third queue.
5. **Priority:** a free compute unit always takes a non-proxy neuron first:
   first from the predicted-non-zero queue, then from the positive clusters.
   Only when neither has work does it take the next proxy. This keeps the
   buffers small: members are drained as fast as proxies create them.
6. The row is done when every proxy has retired, every queue is empty and
   every unit is idle. The Row Controller then moves to the next row.

The binary predictor runs while proxies and other members are being computed.
So on a machine whose compute units are busy, its latency is hidden.

## Binary Prediction Unit

Each binCU owns one slot of the binary weight SRAM: a ring of 32 words (2048
sign bits) carved out of the 2 KB. When a member arrives, a free slot takes
it. The loader, one shared memory port with one read in flight, then does the
following:

1. It fetches the member's two header words.
2. If the layer has a residual, it fetches the residual byte.
3. It streams the sign words into the ring as the binCU frees space.

A binCU spends one cycle per sign word and eight cycles reading the eight
matching input words, which is 9 cycles per 64 inputs. It then needs two
cycles for the estimate and the batch norm. A neuron with `c < T` is
answered "non-zero" at once, without reading any sign words.

Because the ring streams, any fan-in works, including fan-ins larger than
2048. A predicted-zero neuron's 0 is written through the same port.

## Compute Unit

A compute unit receives a row address. It then issues, in order:

* the 2-word header read;
* the weight words, in groups of 8 words (64 weights) while its 1 KB buffer
  has room;
* the residual word.

The weight groups are:

* for a proxy, 8 words of 8-bit weights;
* for a non-proxy, 1 sign word plus 7 packed words.

Each complete group is decoded into 64 weights. These are multiplied over 8
cycles against 8 input words from the input SRAM, 8 products per cycle, and
summed into a 32-bit psum. The next group is gathered meanwhile.

The CU then computes `y` and the output byte, writes the byte, and reports the
following back to the Neurons Controller:

* the sequence number;
* the cluster size;
* whether `y < 0`.

With memory keeping up, a neuron takes about `K/8` cycles plus the memory
latency and a few cycles of overhead.

## Row Controller and input reuse

Row `r` of a layer reads the `K`-byte window starting at byte `r*stride` of
the layer's input. The window is rounded up to whole groups of 64.

The 16 KB input SRAM works as a circular buffer by input word: word `w` of the
input lives at SRAM word `w mod 2048`. When consecutive windows overlap,
which is the shifted window of a strided convolution over time, only the new
words are fetched. Counters report the words fetched and the words reused.

A window must fit the SRAM, so `K <= 16384`. Windows are contiguous byte
ranges. A 2-D convolution therefore needs its input stored per output
position (im2col order), and then the reuse between rows is lost.

## Memory interface

Every client has its own port: `mem_req_t {valid, we, addr, len, wdata}`
and `mem_rsp_t {ready, rvalid, rdata}`.

* A request is taken when `valid && ready`.
* A read returns `len` words (1 to 8), one per `rvalid` cycle, in order.
* A write stores one byte.

The DRAM and the arbitration between ports are outside the accelerator. The
testbenches use a behavioural model with a fixed latency and random `ready`
stalls.

## Where this RTL departs from, or goes beyond, the reference design

* The split of the weights into sign bits and 7-bit remainders, the idx and
  cluster-size fields, the three predictor parameters, the CU priority rule
  and the sizes are the reference design's. Everything else is this
  implementation's own:
  * the second header word and the word alignment;
  * the fixed-point formats of `c`, `m`, `b` and batch norm;
  * the descriptor;
  * the memory protocol;
  * the reorder table and queue depths;
  * the binCU rings and loader.
* The reference lists a 0.56 KB "binCU buffer" in its parameter table but
  describes binCUs without a weight buffer. Here the binCUs have no buffer.
  They work from their slot of the 2 KB binary weight SRAM.
* Weights of the binary unit are loaded by the unit itself, through its own
  memory port. The reference shows the binary weight SRAM connected to
  memory, but not how it is filled.
* The threshold test predicts when `c >= T`. The reference says both "lower
  than T is computed" and "higher than T is predicted". The two agree except
  at `c == T`.
* The MAC width is fixed at 8, the width of the memory port. The reference
  makes it a design parameter.
* One input window per row. The reference splits a row's inputs into blocks
  loaded in sequence. Here a window must fit the 16 KB SRAM.
* The offline steps (clustering, correlation, line fitting, building the
  tables) are software and are not part of the RTL.

## Verification

Every block has a self-checking testbench in `tb/`, and each ends by printing
`TB_RESULT checks=<n> failures=<n>`. The reference values come from
`tb/tb_mor_pkg.sv`: plain integer arithmetic and table encoders, independent
of the RTL.

| Testbench | What it checks |
|---|---|
| `tb_input_sram`, `tb_binweight_sram` | every read port against a reference array, with random concurrent writes |
| `tb_compute_unit` | proxy and non-proxy rows, fan-ins 64 to 1000, with and without residual or ReLU. Output byte, report, words fetched, and the cycle count against the 8 MAC/cycle rate |
| `tb_bin_cu` | predictions against the reference rule; the immediate answer for `c < T`; waiting for sign words not yet loaded; 9 cycles per 64 inputs |
| `tb_bin_pred_unit` | 120 random neurons, fan-ins up to 2500, stalled memory. Every prediction, the 0 writes, the words read, and several binCUs working in parallel |
| `tb_neurons_controller` | behavioural CUs and binary unit with random latencies. Each proxy computed once; each member routed right; the priority rule; done; counters |
| `tb_row_controller` | window contents at each row start, fetched and reused word counts, and the load rate |
| `tb_layer_controller` | descriptors decoded in order, and done / busy |
| `tb_mor_accel` | the whole accelerator at default sizes on a 3-layer network: every output byte against the reference, the event counters, weight traffic, and that every mechanism occurs (see its header) |

| `tb_mor_workloads` | the same at layer shapes of the evaluated networks: a speech-network FC layer (K = 1200), a ResNet18 3x3x512 convolution with residual (K = 4608, overlapping windows), a Darknet19 1x1x1024 convolution (K = 1024), with fewer neurons per layer |

`tb_mor_accel` is the end-to-end test. It has no parameter overrides and uses
`tb/ext_mem_model.sv` as the memory.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_mor_accel \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/mor_pkg.sv tb/tb_mor_pkg.sv tb/tb_mor_accel.sv
./obj_dir/Vtb_mor_accel
```

Substitute any other `tb_*` name. Each testbench finishes in seconds.
