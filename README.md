# A stochastic-input binarized neural network on a 32 x 32 in-memory cell array

Binarized neural networks (BNNs) use weights and activations of ±1, so a
neuron needs no multiplier: the product of a weight and an input is an XNOR
and the weighted sum is a popcount, which is then compared with a trained
threshold. The exception is usually the first layer, whose inputs are
fixed-point pixel values and need wider arithmetic. This design removes that
exception with stochastic computing. Each grayscale pixel is turned into a
random bit that is 1 with a probability equal to its gray level. The same
image is shown T times in this form, and the first layer adds up the popcounts
of all T binary images before it applies its threshold. Every layer, the first
included, then runs on the same binary hardware.

That hardware is an array of 32 x 32 identical cells. Each cell stores 2 kbit of
weights in a memory next to its logic, which is MRAM in the original proposal.
It compares a 32-bit input word with a 32-bit weight word using XNOR gates and
counts the matches. The array runs a fully connected network one layer at a
time, with up to 1024 neurons per layer. The only hard limit is how many
weights fit in the cells.

The RTL is SystemVerilog (IEEE 1800-2017). It passes Verilator 5 lint with
-Wall, with warnings only for unused signal bits, and elaborates with the
slang front end of Yosys. Every module has a
self-checking testbench.

## The computation

With +1 coded as 1 and −1 as 0, a hidden neuron computes

    a = [ popcount(XNOR(W, x)) − μ  >= 0 ]

For the first layer, x_t (t = 1..T) are the T stochastic versions of the image:

    a = [ Σ_t popcount(XNOR(W, x_t)) − T·μ  >= 0 ]

The output layer is not thresholded. The class is the neuron with the largest
popcount − μ.

## The cell (`bnn_cell`)

A cell has two parts:

* **Upper part:** a 64 x 32-bit weight memory (`mram_array`), 32 XNOR gates
  and a 32-input popcount adder tree (`xnor_popcount`, `popcount_tree`). Each
  step produces a count `pc` from 0 to 32.
* **Sequential part:** an adder and a 14-bit register that add up `pc` over
  many steps, a 4-entry threshold memory, and a subtractor. The sign bit of
  `register − μ` goes into a flip-flop and becomes the cell's activation `act`
  (1 = +1).

Timing: the cycle with `step` reads weight word `step_addr` and registers the
data word. In the next cycle `pc` is valid, and the register loads `pc`
(first step) or `register + pc`. `eval` reads a threshold. Two cycles after
`eval`, `act` holds the comparison.

## Two ways to map a layer

The cells are used in one of two ways, chosen per layer:

* **Sequential mode: one neuron per cell.** The same 32-bit input word goes to
  every row. Cell (r, c) is neuron 32r + c, and address `base + k` holds its
  weights for inputs 32k..32k+31. A layer with n inputs takes ceil(n/32) steps
  per presentation, and all 1024 neurons work at once. This is the only mode
  with an accumulator, so the stochastic first layer always runs here: T
  presentations of 25 words for a 28 x 28 image.
* **Parallel mode: one neuron per column.** Row r receives activation word r
  (inputs 32r..32r+31), so a column sees 1024 inputs in one cycle. The 32 cell
  counts of a column are added by a popcount tree shared by the column
  (`column_neuron`), and a column threshold is subtracted. One step computes
  32 neurons, one per column: weight address `base + g` holds neuron group g.
  This suits small output layers. A 1024 → 10 layer is a single step using one
  weight word per cell.

Neuron and input numbering is the same in both modes: item i is bit i mod 32
of word i / 32. The output of one layer can therefore be the input of the next
in either mode.

## Around the array

| module | role |
|---|---|
| `data_controller` | Drives the 32 row buses: a broadcast word in sequential mode, word r to row r in parallel mode. It holds the activations in two 32-word buffers: a layer reads one and writes the other, and they swap at the end of the layer. The stochastic binarizer sits on its external input. |
| `stoch_binarizer`, `lfsr8` | 32 lanes, each with an 8-bit maximal-length LFSR (x^8+x^6+x^5+x^4+1). A lane's bit is `lfsr <= pixel`, which is 1 with probability pixel/255. Over any 255 consecutive words a pixel p gives exactly p ones. |
| `memory_controller` | Turns a host write into the write enable of one weight word, one cell threshold or one column threshold. During compute it gives every memory the same read address, `base + step`. |
| `column_neuron` (x32) | Column popcount tree (32 x 6 bits → 11 bits), a 64-entry column threshold memory addressed like the weights, the signed score z − μ and its sign bit. |
| `seq_output_ctrl` | Packs each parallel result of the 32 columns into activation word g and sends it back to the data controller. For an output layer it keeps the argmax of z − μ over the first `n_out` neurons, with ties going to the lower index. |
| `layer_sequencer` | Runs one layer per command: steps, stalls, eval, capture and swap. |
| `bnn_top` | Everything above, wired together, plus the host ports. |

## Using it

Host interface of `bnn_top` (everything is synchronous to `clk`; `rst_n` is an
asynchronous active-low reset):

1. **Program** weights and thresholds with `prog_valid/prog_ready` and a
   `prog_t` record: `sel` (weight, cell μ or column μ), `row`, `col`, `addr`
   and `data`. One write is accepted per cycle, and only while no layer runs.
   Thresholds are in popcount units. The first-layer threshold must be stored
   already multiplied by T.
2. **Run a layer** with `cmd_valid/cmd_ready` and a `layer_cmd_t` record:
   * `mode`
   * `src_ext`: sequential input comes from the pixel port
   * `w_base`
   * `n_steps_m1`: words − 1, or neuron groups − 1
   * `n_pres_m1`: T − 1, at most 7
   * `mu_addr`
   * `argmax` and `n_out`
3. **Feed pixels** when `src_ext` is set. Send 32 8-bit pixels per accepted
   cycle (`in_valid/in_ready`): the image's words in order, repeated T times.
   Pad unused pixels with 0 and give the matching weights the value 1, so that
   they never count. When `in_valid` is low the layer stalls.
4. `done` is high for one cycle at the end of each layer. A layer of S steps
   takes S + 3 cycles plus stall cycles. `buf_raddr/buf_rdata` then read the
   new activations. `result_valid/result_class/result_score` report the argmax
   of a parallel layer run with `argmax` set. `buf_we` lets the host write
   activations directly.

The weight memory map used for the Fashion-MNIST network (784 → 1024 →
1024 → 10) is:

| addresses | layer | mode | contents |
|---|---|---|---|
| 0–24 | layer 1 | sequential | neuron 32r+c, 25 input words |
| 25–56 | layer 2 | sequential | 32 input words |
| 57 | layer 3 | parallel | neuron c, input word r |

That is 58 of the 64 words in each cell. T can be 1 to 8. Larger T, such as
the 100 presentations that reach grayscale accuracy, would need a wider
presentation counter and an accumulator of about 17 bits. Convolutional
layers are not supported.

## Simulating

Each testbench `tb/tb_<module>.sv` prints `TB_RESULT checks=N failures=M`. For
example:

    verilator --binary --timing --assert -Wno-fatal -y rtl \
        rtl/bnn_pkg.sv tb/tb_bnn_top.sv --top-module tb_bnn_top
    ./obj_dir/Vtb_bnn_top

`tb_bnn_top` runs the whole array at full size. It builds the 784 → 1024 →
1024 → 10 network with hashed pseudo-random weights, thresholds and images and
programs about 75,000 words. It classifies three images, with T = 3, T = 8 and
T = 1. It withholds `in_valid` at random to force stalls. After each layer it
compares all activations with a reference model written in the testbench, and
at the end it also compares the class and score. It also checks the cycle count
of every layer. For the first image it also runs a 1024 → 192 parallel layer
(six neuron groups), then restores the buffer through the host write port. The
run takes about ten seconds. The other testbenches check one module each
against a model of its own, and each fails on a deliberately broken copy of
its module.

## What follows the published design and what does not

These parts follow the published design:

* the 32 x 32 array of identical cells
* 2 kbit of weights per cell, read as 32-bit words
* 32 XNOR gates and a popcount tree in each cell
* a register that adds up popcounts sequentially
* a threshold memory per cell and a sign bit taken from the subtraction
* a popcount tree per column for parallel operation
* the two operating modes
* a data controller, a memory controller and a sequential output controller
  around the array
* accumulation over T stochastic presentations in the first layer, with the
  design sized for T = 8
* an 8-bit LFSR as the random source
* up to 1024 neurons per layer

These are this design's own choices, because the source gives no details:

* **Popcount width:** the count is 6 bits. The source says 5 bits, but 0..32
  needs 6.
* **Timing:** one-cycle memory reads and the step/eval timing.
* **Sign at zero:** an activation is +1 when z − μ = 0.
* **Storage:**
  * the first-layer threshold is stored already multiplied by T
  * 4 threshold entries per cell
  * a column threshold memory of 64 entries
* **Activations:** a double buffer holds them, and the row bus is split into
  two one-way buses.
* **Stochastic inputs:**
  * the binarizer is placed at the external input
  * each lane has its own LFSR, seeded 8i+1; all lanes follow one sequence at
    different phases, so their bits are not fully independent
* **Argmax:** it sits in the sequential output controller.
* **Host side:** the host interface, the command format, the layer sequencer
  and the memory map.

The MRAM is modelled as an ordinary synchronous memory array. A real chip
would use a process macro with the same function. Area and energy, which the
source estimates for a 28 nm process, are not modelled here.
