# SpeedLLM accelerator core in SystemVerilog

SpeedLLM is an FPGA accelerator for small Llama2-family models (TinyLlama,
and the llama2.c "stories" checkpoints) on a board with HBM, such as the
Alveo U280. Decoding one token in such a model is dominated by memory
traffic: every weight matrix is streamed once per token, and the arithmetic
on each word is small. The design therefore centres on one question: how to
keep the operator units busy while operands stream in from HBM and results
stream back out. It answers with three ideas:

* **A read–compute–write pipeline.** An AXI reader loads operand chunks into
  on-chip buffers while the compute engine works on older chunks, and an AXI
  writer writes older results back at the same time.
* **Buffer recycling.** There are four read buffers and two write buffers.
  Each is a slot in a ring and is handed back the moment its own chunk has
  been used. It does not wait for the operator to finish, so the loader can
  refill it at once.
* **Operator fusion.** Two common pairs of Llama2 operators run as one
  instruction, so the intermediate vector never goes to memory and back.
  These are the matrix–vector product followed by the residual add, and SiLU
  followed by the gate multiply.

This repository holds a synthesizable RTL rendering of that architecture,
with one self-checking testbench per block. An end-to-end testbench runs a
complete decoder layer of the 15M-parameter TinyStories model. The SpeedLLM
paper gives the block structure and the three ideas, but it gives no widths,
number formats, instruction set or timing. Every such detail here was chosen
for this implementation. The section "Where this departs from, or goes
beyond, the paper" lists those choices.

## Block structure

```
              host (instruction queue)             HBM controller (AXI-style)
                        |                             ^ ar/r          | aw/w
                        v                             |               ^
                   +----------+   addresses   +------------+          |
                   | op_sched |-------------->|    agu     |          |
                   +----------+    start      +------------+          |
                        |                           | pairs of        |
                        | cur instruction           v addresses       |
                        |                     +------------+          |
                        |                     | dma_reader |          |
                        |                     +------------+          |
                        |                           | operand pairs   |
          +-------------|---------------------------v-----------+     |
          | mem_mgmt    |       read buffers 1..4 (buf_ring)    |     |
          |             |       write buffers 5..6 (buf_ring) --------+ dma_writer
          +-------------|---------------------------------------+
                        |          |                   ^
                        v          v                   |
          +-------------------------------------------------------+
          | mpe   buf_rd_mux -> mpe_read -> Add | Mul | Matmul |   |
          |                               RoPE | RMSNorm | Softmax|
          |                               (SiLU channel -> sfu_silu)
          |       mpe_write -> buf_wr_demux                        |
          +-------------------------------------------------------+
```

The names follow the paper's block diagram. That diagram shows a Matrix
Processing Engine (MPE) with a MUX, a Read stage, six operators (Add, Mul,
Matmul, RoPE, RMSNorm, Softmax), a Write stage and a second MUX. It shows a
memory-management block with "buffer1"–"buffer4" (read buffers) and
"buffer5"–"buffer6" (write buffers), and a special function unit (SFU)
containing SiLU. It also shows the path CPU –PCIe– HBM –AXI– memory
controller, with "read through AXI" into the read buffers and "write back"
from the write buffers. The host CPU, PCIe, HBM and the vendor memory
controller are outside this RTL. The top module's ports stand where they
connect.

| Module | Role |
|---|---|
| `speedllm_top` | Everything on the FPGA side of the memory controller |
| `op_sched` | Instruction queue (8 deep). Runs one instruction at a time |
| `agu` | Lists the operand addresses of an instruction, in the order the operators need them |
| `dma_reader` | Reads operand pairs over AXI and fills read buffers chunk by chunk |
| `mem_mgmt` | Six `dp_buffer` RAMs and two `buf_ring` allocators |
| `buf_ring` | Cyclic buffer allocator: fill pointer, drain pointer, per-buffer length and address |
| `dp_buffer` | Simple dual-port RAM, one-cycle read |
| `mpe` | Matrix Processing Engine: input mux, Read stage, six operators, Write stage, output mux |
| `buf_rd_mux`, `mpe_read` | Input multiplexer and Read stage (dispatch to the operator) |
| `unit_add`, `unit_mul`, `unit_matmul`, `unit_rope`, `unit_rmsnorm`, `unit_softmax` | The six MPE operators |
| `sfu_silu` | Special function unit: SiLU, optionally times a gate |
| `mpe_write`, `buf_wr_demux` | Write stage and output multiplexer |
| `dma_writer` | Writes full write buffers back over AXI |
| `seq_div`, `isqrt` | Bit-serial divider and square root used by RMSNorm, Softmax, SiLU |
| `speedllm_pkg` | Types, the instruction format, fixed-point helpers (`qmul`, `exp_neg`) |

## Number format

Every data word is a signed 32-bit Q16.16 fixed-point number. Adds wrap
around. A product is formed at full 64-bit precision and shifted back by 16
bits, which rounds toward minus infinity. The Matmul accumulator keeps the
full 64-bit Q32.32 sum and rounds only once per row. Reciprocals (Softmax,
RMSNorm) are kept as Q32.32, so that large sums keep their precision. The
paper states no number format. Q16.16 was chosen because it covers the
activations of the small models the paper targets without any scaling
logic.

## Instructions

The host pushes 228-bit instructions (`instr_t` in `speedllm_pkg`). Each one
is a single operator, or a fused pair, applied to vectors in HBM:

| op | result (k-th word goes to `dst_base + k`) | results |
|---|---|---|
| `OP_ADD` | `a[i] + b[i]` | n |
| `OP_MUL` | `a[i] * b[i]` | n |
| `OP_MATMUL` | `sum_i a[r*rs + i*cs] * b[i]`, plus `c[r]` if `fuse` | d |
| `OP_ROPE` | rotate each pair `(a[2j], a[2j+1])` by the angle in table `b` for `pos` | n |
| `OP_RMSNORM` | `b[i] * a[i] / sqrt(mean(a^2) + 1e-5)` | n |
| `OP_SOFTMAX` | `exp(a[i]-max) / sum exp(a-max)` | n |
| `OP_SILU` | `a[i] * sigmoid(a[i])`, times `b[i]` if `fuse` | n |

Fields: `op`, `fuse`, `a_base`, `b_base`, `c_base`, `dst_base` (32-bit word
addresses), and the 16-bit fields `n`, `d`, `pos`, `hs` (head size, for
RoPE), `rs` and `cs` (row and column address steps of the Matmul matrix).

With `rs = n, cs = 1`, Matmul is an ordinary row-major weight product. The
two strides let attention run as Matmul, without any transposes:

* **Scores over a head's K cache**, stored `[t][i]`: `rs = head_size, cs = 1`,
  with `d = positions`.
* **Weighted sum over the V cache**, stored the same way: `rs = 1,
  cs = head_size`, with `n = positions` and `d = head_size`.

RoPE reads its cos/sin values from a table in HBM, interleaved per position
as `tab[pos*hs + 2j] = cos`, `tab[pos*hs + 2j + 1] = sin`, for
`j = 0 .. hs/2-1`. The angle is `pos / 10000^(2j/hs)`, and the pair index
runs modulo `hs/2`, so a single instruction covers all heads of a vector.
This is how early llama2.c checkpoints stored the frequencies. It avoids
sine and cosine hardware.

## The operand stream

`agu`, `dma_reader` and `mpe_read` pass a single kind of item: an **entry**
`{tag, a, b}`, which is 67 bits wide. The three tag bits are:

* `row_end`: closes a Matmul row, so the result leaves the unit.
* `bias`: this entry's `a` is the residual `c[r]`. Matmul adds it instead of
  multiplying.
* `op_end`: the last entry of the instruction. RMSNorm and Softmax start
  their second phase on it.

Every operator takes one entry per handshake, so a single dispatch path
serves all of them. Operators with a scalar operand ignore `b`. RoPE uses
two entries per pair: `(x0, cos)` first, then `(x1, sin)`. A fused Matmul
row is `n` product entries followed by one bias entry.

`dma_reader` issues two single-word reads per entry (`a`, then `b`). It keeps
at most 8 entries in flight, and writes each completed entry into the current
read buffer. A chunk closes after 256 entries (`DEPTH`) or at `op_end`. The
reader then reports the chunk's length to the ring and moves to the next free
buffer. It does not issue the next chunk until the previous one has closed.
That costs one memory latency per 256 entries.

## Buffer recycling and overlap

This is the part of the design that needs the closest reading.

Each buffer group is a `buf_ring`. The producer always writes buffer
`fill_idx` and the consumer always reads buffer `drain_idx`. Both indices
advance cyclically. `used` counts the full buffers, and each full buffer
stores its length (and, for write buffers, its destination address). A
buffer returns to the pool on the consumer's `drain_done` pulse. That pulse
comes as soon as the consumer no longer needs the buffer:

* **Read side.** `mpe_read` raises `drain_done` in the same cycle that it
  issues the read address of the chunk's last entry. The RAM has already been
  read by the following edge, so the reader may start overwriting entry 0 of
  that buffer in the next cycle. No data is lost, because entries travel on
  through the input mux register and a 4-entry FIFO. The mux select is the
  buffer index *delayed by one clock* (`mux_sel`), because the ring's drain
  index has already moved on by the time the RAM data arrive.
* **Write side.** `dma_writer` releases a write buffer when the last word has
  been accepted on the write channel. `mpe_write` fills the next buffer
  meanwhile. If both write buffers are full, the Write stage lowers `ready`
  towards the operator, and the back-pressure propagates through the
  operator and the Read-stage FIFO to the read buffers.

As a result, three things happen at once during a long instruction: the
reader fills buffer k+1 or k+2, the MPE consumes buffer k, and the writer
drains an earlier result chunk. The Read stage keeps addresses flowing only
while its FIFO has room for everything already in flight. This gives one
entry per clock into an operator that accepts one per clock (checked in the
Read-stage testbench).

Between instructions, `op_sched` waits until every result has been placed
(`write_done`), every write buffer is empty and the writer is idle. Only
then does it start the next instruction. Consequently an instruction may
read what the previous one wrote, with no hazard logic. The cost is a pipe
drain between instructions. The paper does not say how it orders dependent
operators.

## Fused instructions

Setting `fuse` changes two operators:

* **Matmul.** The AGU appends a bias entry `(c[r], c[r])` after each row's
  products, and the Matmul unit adds it to the accumulator before it rounds.
* **SiLU.** The SFU multiplies each `silu(a[i])` by `b[i]` before the
  result leaves.

Neither needs a second pass over memory or any extra buffer.

What fusion saves, as measured in the layer test: the fused output
projection (288 x 288 plus residual) reads 166,464 words and writes 288. The
unfused pair, a Matmul and then an Add, would write 576 and read the same
amount. That is because a bias entry fetches the residual `c[r]` as both of
its operands, where the Add would read the intermediate word and the
residual. Fused SiLU*Mul reads 2n and writes n words. Unfused, it would read
4n and write 2n. Each fusion also saves one pipeline drain between
instructions.

## Operators

| Unit | Rate | How |
|---|---|---|
| Add, Mul | 1 entry/clock, 1 clock latency | registered output with valid/ready |
| Matmul | 1 MAC/clock | 64-bit accumulator. The row result is held until it is taken, and input stalls meanwhile |
| RoPE | 2 entries in, 2 words out | `y0 = x0 c - x1 s`, `y1 = x0 s + x1 c` |
| RMSNorm | load n, ~165 clocks, then n out at 1/clock | stores x and w (2 x 2048 words). Sum of squares in Q32.32. `mean = ss/n` (64-step divider), `root = isqrt(mean + eps)` (32 steps, Q16.16), `scale = 2^48/root` (64-step divider, Q32.32), `y = w * (x * scale)` |
| Softmax | load n, n clocks of exp, ~70 clocks, then n out | stores x (2048 words) and tracks the max. Replaces x by `exp(x - max)`, sums, forms one reciprocal `2^48/sum` (64-step divider), then multiplies |
| SiLU (SFU) | one element per ~36 clocks | `e = exp(-|x|)`, then one 33-step division: `sigmoid = 1/(1+e)` for x >= 0, `e/(1+e)` for x < 0 |

`exp_neg` (in the package) computes `exp(x)` for `x <= 0` as `2^(x log2 e)`.
The integer part becomes a right shift, and `2^f` for the fraction is the
cubic `1 + f(0.6951 + f(0.2262 + 0.0782 f))`, with a relative error of about
1e-4. RMSNorm and Softmax hold whole vectors, up to `VEC_MAX = 2048` words.
That covers the longest attention span evaluated in the paper (512 prompt
tokens plus 1536 generated).

The SFU is slow: one bit-serial divider. It was kept this simple because the
paper gives the SFU only by name, and SiLU runs over just the 768-word
hidden vector once per layer.

## Interfaces and timing

`speedllm_top` ports:

* `instr_valid`, `instr_ready`, `instr`: the instruction push, with a
  valid/ready handshake.
* `ar_valid`, `ar_addr`, `ar_ready`: single-word read requests. The address
  is held stable while `ar_valid` waits (this is asserted).
* `r_valid`, `r_data`: read data, in order, and always accepted. The reader
  never has more than 8 entries (16 words) outstanding.
* `aw_valid`, `aw_addr`, `w_data`, `aw_ready`: a single-beat write with
  address and data together. A write counts as done when it is accepted, so
  the memory must apply accepted writes before later reads of the same
  address.
* `idle`, `ops_done`: status and a count of completed instructions.

Addresses count 32-bit words. Reset is asynchronous and active low. All
state is reset, except RAM contents. In simulation, drive `rst_n` from high
to low rather than starting it low. An event-driven simulator applies an
asynchronous reset only on its falling edge, and until then the outputs may
hold random start-up values. For example, a stray `aw_valid` on the first
clock edge would write one garbage word into memory.

## Running a decoder layer

`tb/tb_speedllm_top.sv` shows the mapping of one Llama2 decoder layer of
stories15M (dim 288, hidden 768, 6 heads of 48) at token position 5. The
layer takes 47 instructions, in this order:

* RMSNorm.
* Matmul for q.
* Per head, Matmuls for k and v, written straight into a head-major K/V
  cache at the current position.
* RoPE on q and on each head's new k.
* Mul of q by `1/sqrt(48)`.
* Per head: a score Matmul over the K cache, Softmax, and a weighted-sum
  Matmul over the V cache.
* Output-projection Matmul fused with the residual add.
* RMSNorm.
* The two FFN Matmuls.
* SiLU fused with the gate multiply.
* The down-projection Matmul.
* A separate residual Add.

At the default sizes, with 10 % random AXI stalls and periodic write-channel
blackouts, the layer plus two long vector instructions takes about 2.36
million clocks. The run is about 2 million word reads: the design reads two
words per MAC, so Matmul is bound by memory reads. This is a property of the
single-word channel chosen here. The paper does not give its memory width.

## Context lengths of the evaluated workloads

The paper evaluates six generation runs of stories15M. Their [prompt :
generated] token counts are [128:512], [128:1024], [128:1536], [512:512],
[512:1024] and [512:1536]. The runs differ only in how far the KV cache
grows, and so in the length of the attention vectors. The last token of each
run attends over 640, 1152, 1664, 1024, 1536 or 2048 positions. The design
holds all of them:

* Softmax stores up to `VEC_MAX = 2048` words.
* Positions and lengths fit the 16-bit fields.
* The cache is addressed with the strides described above.

`tb/tb_speedllm_context.sv` runs, for each of the six lengths, the attention
of that last token:

* RoPE on q and on each head's new key, using table rows up to position 2047.
* Scaling of q.
* Per head, a score Matmul over the K cache, a Softmax and the weighted sum
  over the V cache.

At the default parameters, with the same memory stalls as the layer test,
this takes 0.86 million clocks at 640 positions and 2.73 million at 2048. It
matches a double-precision reference to within 0.001 + 2 %. A complete
generation run (every layer of every token) is far too long to simulate and
was not attempted.

## Where this departs from, or goes beyond, the paper

Taken from the paper:

* The block structure and block names.
* The six MPE operators, and SiLU in an SFU.
* Four read buffers and two write buffers.
* AXI read and write-back paths.
* Overlapping read, compute and write.
* Reusing each memory segment as soon as its data have been processed.
* Fusing operators to avoid intermediate writes and reads.

Chosen here:

* Q16.16 arithmetic, and the exp, division and square-root methods.
* The instruction format, including the Matmul strides.
* The entry/tag stream and the chunk size (256).
* The simplified single-word AXI channels.
* One instruction at a time.
* The choice of the two fused forms (Matmul+Add, SiLU*Mul).
* The RoPE table in memory.
* 1 MAC per clock.
* `VEC_MAX = 2048`.

Not built:

* The host program, PCIe, HBM and the vendor memory controller.
* The further SFU functions that the paper's figure only hints at with
  "...".
* Sampling, and the final classifier softmax, which the host does in
  llama2.c.

The paper's figure wires the SFU to the memory-management block. Here the
SFU takes its operands from the same Read-stage stream as the MPE operators
and returns results through the Write stage, so it shares the buffers
without extra ports.

How far to trust it: every block has a testbench that compares with values
computed independently, in real arithmetic or from a model. Each testbench
has been shown to catch a deliberately broken copy of its block. The
end-to-end layer matches a double-precision reference to within 0.02 + 2 %
on all 9,416 written words. The context-length test matches its reference
on 103,680 words, over attention spans of up to 2048 positions. Every
testbench also passes when all state that reset does not clear, including
RAM contents, starts at random values. No timing closure, resource fit or
power has been measured on an FPGA. Cycle counts are those of this RTL. The
paper reports only end-to-end latency and energy measured on the board, with
no per-block timing to compare against.

## Simulating

Any testbench builds with plain Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/speedllm_pkg.sv tb/tb_speedllm_top.sv --top-module tb_speedllm_top
./obj_dir/Vtb_speedllm_top
```

Each testbench ends with `TB_RESULT checks=N failures=M`. The full layer
runs in a few seconds. The context-length test (`tb_speedllm_context`)
builds the same way and runs in about ten seconds. The block testbenches
are `tb/tb_<module>.sv`. `tb/hbm_model.sv` is the behavioural memory, with configurable latency and
stall rate. Some block testbenches shrink `DEPTH` or `VEC_MAX` to reach
chunk boundaries quickly. The end-to-end one uses the defaults.

To change sizes, use the parameters on `speedllm_top`:

* `NRB` and `NWB`: the buffer counts.
* `DEPTH`: entries per buffer.
* `VEC_MAX`: the longest RMSNorm/Softmax vector.
* `QDEPTH`: the instruction queue depth.

`DEPTH` must be a power of two. `cnt_t` (16 bits) limits `n` and `d` to
65535.
