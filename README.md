# ViTA: an int8 vision-transformer encoder engine for small FPGAs

A ViT-B/16 encoder layer needs about 7 MB of int8 weights and, in its MLP, a 256 x 3072
hidden activation. Neither fits in the block RAM of a small FPGA such as a Zynq-7020.
This design keeps all activations on chip and streams only the weights. The weights arrive
one matrix column at a time, into buffers two columns deep. The next column is fetched while
the current one is used.

Two ideas keep the multipliers busy without extra memory:

* **Head-level pipeline in attention.** Compute engine 1 (PE blocks 1, 2 and 3) forms Q, K
  and V of head *h*. At the same time compute engine 2 (PE block 4, the softmax unit, PE
  block 5) computes softmax(QKᵀ)·V of head *h−1*. The array shapes are chosen so both
  engines take the same time per head: D/(k1·k2) = N/(k3·k4). With k1×k2 = 16×6 and
  k3×k4 = 8×4 this gives 768/96 = 256/32 = 8.
* **Inter-layer MLP.** The hidden layer is never stored. Half the rows of each PE block
  accumulate hidden units. Each finished hidden value goes through GELU and is broadcast to
  the other half of the rows. Those rows multiply it by the matching row of the second
  weight matrix and add the partial products into a staged output sum.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 256 | tokens (16×16 patches of a 256×256 image) |
| `D` | 768 | embedding width |
| `H`, `DH` | 12, 64 | heads, head width |
| `M` | 3072 | MLP hidden width |
| `K1`×`K2` | 16×6 | rows × multipliers of PE blocks 1–3 |
| `K3`×`K4` | 8×4 | rows × multipliers of PE blocks 4–5 |
| `WB` | 8 | bytes per off-chip weight word |

The defaults are the ViT-B/16 configuration at 256×256 input. Token count, widths and head
count are build-time parameters; the number of layers is a run-time input.

## Data flow of one encoder layer (`vita_top`)

The top runs these phases in order for each layer:

1. **LN1.** `layernorm_unit` normalises every token of the activation buffer into a separate
   LN buffer. The activation buffer is kept for the skip connection.
2. **MSA.** Engine 1 walks head by head. Each step takes one column each of Wq, Wk and Wv
   (one per PE block). It runs over all N tokens in groups of K1 rows, with K2 features per
   cycle. The results are requantised and written into the Q/K/V buffers. Each buffer has
   two halves: the head being produced and the head being consumed.
   Engine 2 starts one head later. For each query row:
   * PE block 4 produces the N scores of that row, K4 per cycle;
   * the softmax unit turns them into int8 probabilities;
   * PE block 5 multiplies them with V.

   The softmax has two score banks. Row *r+1* is scored while row *r* is normalised and
   consumed, so the three stages overlap by rows. Results go to the SA buffer.
3. **Concatenation.** The SA buffer (all heads side by side) is multiplied by Wmsa, three
   output columns per step, one per PE block. `adder_unit` adds the residual (the layer
   input) with saturation and writes the result back into the activation buffer.
4. **LN2.** Same as LN1.
5. **MLP.** Each step covers three hidden units, one per PE block:
   * the lower K1/2 rows of each block accumulate a hidden value for K1/2 tokens, using a
     W1 column;
   * the hidden values pass through `gelu_unit`;
   * the upper K1/2 rows multiply them with a W2 row (K2 outputs per cycle);
   * `adder_unit` adds the three blocks' products into an int32 staging buffer.

   The hidden layer only ever exists as K1/2 × 3 values in flight.
6. **Final.** Staging sum + b2 is requantised. The residual is added and the result
   overwrites the activation buffer. That buffer is the next layer's input.

The engine-1 busy time per layer is exact by construction:

    (H·DH + D/3)·(N/K1)·(D/K2) + (M/3·N/(K1/2) + 1)·(D/K2)

That is 6.29 M cycles at the defaults, about 42 ms per layer at 150 MHz. The end-to-end
testbench checks this count. `perf_cycles`, `perf_e1_busy`, `perf_e2_busy` and
`perf_wstall` report the total cycles, the busy cycles of each engine, and the cycles
engine 1 waited for weights.

## Weight streaming (`weight_loader`)

Every weight buffer holds two halves. The controller asks for the next step's columns as soon
as a half is free, so the fetch overlaps with the current step. It stalls (and counts
`perf_wstall`) only when the memory is slower than the computation.

The off-chip interface works like this:
* a request (`dram_req_valid/ready` with kind, layer and index);
* then the vectors as `D/WB` words each, at most one word per cycle;
* element 0 is in the low byte;
* QKV and concatenation requests return three vectors, MLP requests six (three W1 columns,
  then three W2 rows).

The memory holds matrices in whatever layout serves these vectors. Layer parameters (LN
gamma/beta, MLP biases, shifts) are ports, shared by all layers.

## Arithmetic

All of it is integer:

* **Data.** Weights and activations are int8. Products are 16 bits; accumulators and the
  MLP staging sums are 32 bits.
* **Requantisation.** Every int8 result is an arithmetic right shift with round-half-up and
  saturation. The six shift amounts are inputs: `sh_qkv`, `sh_sm` (score scale before
  softmax), `sh_sv`, `sh_o`, `sh_h` and `sh_out`.
* **Softmax.**
  * It subtracts the row maximum and works in base 2.
  * The exponent is split into an integer part (a shift) and a 3-bit fraction, which looks
    up an 8-entry table of 2^(−f/8) in Q16.
  * One sequential division forms R = 127·2²⁴/Σe. Each probability is (e·R)>>24 in Q7.
* **GELU.** The integer i-GELU form (a second-order polynomial for erf) in Q4.
* **LayerNorm.**
  * Exact integer mean and variance from Σx and Σx².
  * A digit-by-digit integer square root, then a 2¹⁶/σ reciprocal.
  * Gamma is Q6, beta is Q4, and the output is Q4.

## Where this departs from the paper it is based on

* The paper gives no insides for the softmax, LayerNorm, GELU or adder units. The
  arithmetic above is this design's own. The paper's softmax comes from other work.
* Q/K/V and W^msa have no biases. The MLP has b1 and b2.
* Word format, handshake and the split of a step into three vectors per PE block are choices
  of this design.
* The design runs the standard ViT encoder only. Swin's windows, shifted windows and patch
  merging are not built. Other sizes (N = 197 for 224×224, DeiT-S/T widths) need a rebuild
  with other parameters.
* Timing at 150 MHz and power have not been evaluated. Memories are behavioural arrays; on
  an FPGA they would have to map onto block RAM with the port counts used here.
* Input loading and result readout use a simple host port (`hst_*`, K2 elements per
  access, only while idle). In the real system a processor would do this.

## Files

| file | contents |
|---|---|
| `rtl/vita_pkg.sv` | default sizes, types, requantise/saturate functions |
| `rtl/pe_block.sv` | A×B multiplier array, adder trees, accumulators, split-weight mode |
| `rtl/softmax_unit.sv` | two-bank row softmax |
| `rtl/layernorm_unit.sv` | two-pass LayerNorm with `seq_div.sv` and `seq_isqrt.sv` |
| `rtl/gelu_unit.sv` | i-GELU lanes |
| `rtl/adder_unit.sv` | partial-product summation and skip connection |
| `rtl/vita_mem.sv` | multi-port array memory used for every buffer |
| `rtl/weight_loader.sv` | off-chip fetch into double-buffered weight buffers |
| `rtl/vita_top.sv` | the accelerator and its phase/engine controllers |
| `tb/tb_*.sv` | self-checking testbenches, one per module |

## Simulating

Every testbench ends with a line `TB_RESULT checks=<n> failures=<n>`. For example:

    verilator --binary --timing --top-module tb_vita_top -y rtl -y tb +libext+.sv \
        -Irtl rtl/vita_pkg.sv tb/tb_vita_top.sv -o sim && obj_dir/sim

`tb_vita_top` runs two encoder layers at a reduced size: N=16, D=24, H=2, DH=12, M=24,
K1×K2=4×3, K3×K4=2×2, WB=4. It uses random weights from a behavioural memory with random
latency. It compares the final activations, and intermediate buffers, bit for bit with a
reference model written in the testbench. It also counts each mechanism:
* cycles with both engines busy on different heads;
* cycles in which softmax and PE blocks 4/5 work on different rows;
* MLP cycles with hidden and output halves active together;
* skip-connection writes and final-stage writes;
* cycles engine 1 stalled for weights.

This is the largest size that has been simulated end to end. A single layer at the default
size is about 6.3 M cycles over multi-megabyte arrays, and has not been simulated.
