# Incremental training on an inference-only datapath with an evolution strategy

A network deployed on an edge device sees its input statistics drift (a dirty
lens, smoke in the air, a failing sensor) and loses accuracy. Retraining it
with back-propagation would need a backward-pass datapath, gradients and
high-precision arithmetic that an inference accelerator does not have. This
design retrains one layer using only forward passes. It uses an evolution
strategy (ES):

1. Jitter the weights with random noise.
2. Run the jittered network over a small set of new training images.
3. Score each jittered copy by its error.
4. Move every weight towards the noise directions that scored better.

The forward pass is the existing inference layer. What the design adds is
small: a noise generator, a few adders, shifters and two accumulators per
trained weight, and a scheduler. Inference keeps priority over training the
whole time.

The RTL implements the incremental-training micro-architecture for the 2-input,
2-output fully connected layer used as the running example. It is
parameterised in the layer size and in the number of training blocks. The
default ES schedule is the one used in the experiments that motivated it:
population N = 100, K = 100 iterations and M = 10,000 training images.

## The algorithm as the hardware runs it

The ES gradient estimate for weights w, noise samples eps_i, noise scale sigma
and population size N is

    g = 1/(N sigma) * sum_i eps_i * F_i ,      w <- w + alpha * g

Here F_i is the fitness of the copy of the network whose weights are
w + sigma*eps_i. The fitness is the negative mean absolute error (MAE) over
the training images. The design uses the MAE because it needs no multiplier.

Three hardware simplifications turn this into shifts and adds:

* **Power-of-two fitness.** The accumulated error L of a population member is
  rounded down to 2^e, with e = floor(log2 L). So eps * F = -(eps << e): one
  barrel shift and a negation. A member with L = 0 contributes nothing.
* **One shift for all scale factors.** alpha, 1/(N sigma) and the 1/(M*N_OUT)
  that turns a sum of errors into a mean are all constants. They are merged
  into one arithmetic right shift of the gradient sum, `grad_shift`.
* **sigma as a shift.** The perturbation added to a weight is
  `eps >>> sigma_shift`, where eps is the raw 8-bit noise sample.

The weights are not perturbed all at once. Each incremental training block
serves one weight at a time. With P blocks, the W = N_IN*N_OUT weights are
visited in ceil(W/P) groups. Each group gets its own N population members,
and each member is evaluated over all M images. One training run therefore
costs exactly

    K * ceil(W/P) * N * M   forward passes,

which is the t_f * (W/P) * M * N * k training-time estimate of the method.
For example, with 1,000 blocks on a 157,000-weight layer, one iteration over
one image takes 15,700 passes. The testbenches count the passes and check this
number.

The loop nest for one training run:

    for t in 0..K-1                       iteration
      for g in 0..ceil(W/P)-1             group of P weights, one per block
        for i in 0..N-1                   population member
          every block b: eps_b <- next noise sample            (ST_DRAW)
          for m in 0..M-1: run image m with
              w[g*P+b] + (eps_b >>> sigma_shift) for the group (ST_EVAL)
              L += sum_o |yhat_o - y_o|
          every block b: acc_b += -(eps_b << floor(log2 L))    (ST_GRAD)
        every weight of the group: w += acc_b >>> grad_shift,
                                   acc_b <- 0                   (ST_UPDATE)

## Block map

    train_x/train_y (external store)      infer_x
          |                                  |
          +-------------+  +-----------------+
                        v  v
     weights --theta--> dense_layer --yhat--+--> infer_y (inference passes)
       ^   ^                                |
       |   | eps                            v  (training passes)
       |   |                          loss_accumulator <-- label (delayed 1 cycle)
       |   |                                | L
       |   +------ incr_training_block <----+
       |              noise_lfsr, eps register,
       |              loss_exp_quant + shift, 32-bit sum over N,
       +---- step --- >>> grad_shift
     weight_update_ctrl: weight array, w + sigma*eps adder, Training mux

     es_controller sequences all of it and arbitrates the layer.

| Module | Role |
|---|---|
| `es_pkg` | Widths (4-bit activations, 12-bit weights with 8 fraction bits, 8-bit noise, 32-bit accumulators), scheduler states, a 12-bit saturation function |
| `noise_lfsr` | 8-bit Fibonacci LFSR, polynomial x^8+x^6+x^5+x^4+1; the state read as a signed number is eps |
| `loss_exp_quant` | Leading-one detector: L -> e = floor(log2 L), plus a zero flag |
| `incr_training_block` | eps register, shift "multiplier", saturating 32-bit gradient sum, output shift by `grad_shift` |
| `loss_accumulator` | Sum of absolute errors over the outputs and the M images (32-bit, saturating), image counter, `done` |
| `weight_update_ctrl` | The trainable weights, the noise adder, the Training mux, the saturating update |
| `dense_layer` | Fully unrolled layer: one multiplier per weight, one adder tree per output, quantized ReLU, one register stage |
| `es_controller` | Loop counters, phase strobes, inference priority, pause |
| `es_train_top` | Wires the above together; P training blocks in a generate loop |

## Sharing the layer with inference

The layer stays an inference engine. Training only borrows cycles that
inference does not use:

* **Per-cycle priority.** In any cycle with `infer_valid` high, the layer
  takes the inference input with the unperturbed weights, and `train_ready`
  stays low. The result appears one cycle later on `infer_y` with
  `infer_out_valid`. Inference latency and throughput are therefore the same
  whether training runs or not. An assertion in `es_controller` checks that a
  training pass and an inference pass never share a cycle.
* **Pause.** `train_en` is the Training signal. When it goes low, the scheduler
  freezes in its current phase. The loop counters, the partial loss, the
  gradient sums and the noise state are all kept, and training resumes exactly
  where it stopped. Inference continues meanwhile.
* **Data gaps.** A training image is taken only in a cycle where both
  `train_ready` and `train_valid` are high. `train_img_idx` names the image the
  scheduler wants, 0..M-1 for every population member. The external store can
  take as long as it needs to answer.

After the last iteration the scheduler holds `done` (state `ST_DONE`) until
`train_en` is lowered. It then returns to `ST_IDLE`, and the next rising
`train_en` starts a new run from iteration 0. The weights carry over, and so
does the noise state.

## Timing

When nothing stalls, a population member takes M + 4 cycles:

* one cycle `ST_DRAW`;
* M issue cycles in `ST_EVAL`;
* 2 more cycles in `ST_EVAL` until the last error has passed through the
  layer register and the loss accumulator;
* one cycle `ST_GRAD`.

A group adds one `ST_UPDATE` cycle. From the cycle `train_en` rises in
`ST_IDLE` to `done`, a run therefore takes

    1 + K * ceil(W/P) * (N * (M + 4) + 1)  cycles.

At the defaults this is 400,160,401 cycles, or 4,001,604 per iteration. That
is within 0.05 % of the bare pass count, so training speed is set almost
entirely by the layer's initiation interval. Every inference request and every
data gap adds one cycle.

## Programming and number formats

* Inputs, activations and labels: 4-bit unsigned.
* Weights: 12-bit two's complement with 8 fraction bits (range -8 .. +7.996).
  The host loads the pre-trained values through `load_en`/`load_addr`/
  `load_data` before training. Weight j drives input i of output o, with
  j = o*N_IN + i.
* Layer output: yhat_o = min(15, max(0, sum_i x_i*theta_oi) >> 8).
* `sigma_shift`: the perturbation of a weight is eps >>> sigma_shift, with
  |eps| <= 128 LSBs. The shift is arithmetic, so it rounds towards minus
  infinity. sigma_shift = 2 gives perturbations of up to +-32/256 = +-0.125.
* `grad_shift`: choose it so that acc >>> grad_shift is a few weight LSBs. The
  size of acc grows with log2(M*N_OUT*typical error) (the fitness exponent)
  plus about 6 bits for |eps| and log2(sqrt N) for the sum. The testbenches use
  7 for M = 6, N = 4 and 17 for M = 10,000, N = 100.
* All sums saturate instead of wrapping:
  * the weights at 12 bits;
  * the gradient sums at +-2^31;
  * the loss at 2^32-1.

  At the defaults, the loss cannot reach its limit: the largest value is
  10,000 x 2 x 15 = 300,000. The gradient sum can saturate when large noise
  samples meet a large loss exponent.

## Where this RTL departs from the method, and what it adds

* **Noise is uniform, not Gaussian.** The method asks for normal noise but
  specifies an 8-bit LFSR as the generator. The LFSR state is used directly, so
  eps is uniform over [-128, 127] without 0. The polynomial and the seeds
  (((165 + 37*b) mod 255) + 1 for block b) are this design's choice. An 8-bit
  LFSR has only 255 states, so with more than 255 blocks some blocks repeat
  another block's noise sequence.
* **Perturbation per group of weights, not of the whole vector.** Each group
  of P weights gets its own N members. This is the reading that matches the
  stated training-time formula and area/time table. A textbook ES would
  perturb all weights at once.
* **Mean and learning rate as a shift.** There is no divider and no alpha
  register: alpha/(N*sigma*M*N_OUT) is approximated by 2^-grad_shift.
* **Weight storage is built.** The method puts the trained weights in block
  RAM. Here they are a register array inside `weight_update_ctrl`, read in
  parallel, because the layer is fully unrolled. The method's own
  implementation left this part out.
* **The layer is a stand-in.** The method uses an HLS4ML-generated layer. The
  activation is not specified: quantized ReLU and truncation are assumptions,
  and there are no biases, because the example layer has none.
* **Interface details are this design's own:**
  * the inference priority;
  * the `train_ready`/`train_valid` handshake;
  * the load port;
  * the status outputs;
  * the one-cycle phases;
  * the synchronous active-low reset.
* **Flip-flop counts.** A training block here has 48 flip-flops: LFSR 8,
  eps 8, sum 32. The loss accumulator has 46: loss 32 and a 14-bit image
  counter. The published implementation reports 68 and 37 flip-flops for these
  blocks, so its internals differ somewhat.

## Sizes

The defaults are the 2x2 example layer with one training block, which trains
all four weights in turn. The retraining experiment that motivated the method
worked on the 784 x 200 first layer of a 4-bit MNIST network (157,000
parameters including biases). That does not fit the defaults. The RTL is
written for any N_IN, N_OUT and P, but biases and the untrained later layers
are not part of it. `tb_es_mnist_layer` sets the top to 784 x 200 with 1,000
training blocks, so the 156,800 weights fall into 157 groups. It runs one
shortened iteration (2 members, 2 images) and checks every weight after every
update against the reference. It builds in about a minute and a half and runs
in about 20 seconds. A full iteration at N = 100 and M = 10,000 would take
157 x 100 x 10,004 cycles, about 1.6e8, and is far beyond what the
cycle-accurate simulation of a 156,800-multiplier layer can do.

## Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog. To build and run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/es_pkg.sv tb/es_ref_pkg.sv rtl/*.sv tb/tb_es_train_top.sv \
        --top-module tb_es_train_top -o sim
    ./obj_dir/sim

| Testbench | What it checks |
|---|---|
| `tb_noise_lfsr` | Every state against a separate LFSR model; period 255; no zero state |
| `tb_loss_exp_quant` | Exponent and zero flag for losses of every magnitude |
| `tb_incr_training_block` | eps, gradient sum (including saturation) and shifted step against a multiply-based model |
| `tb_loss_accumulator` | Running sum, count, `done` after M images, clear, saturation |
| `tb_dense_layer` | Outputs, clipping at both ends, latency, training tag |
| `tb_weight_update_ctrl` | Training mux, noise adder with sigma shift, group selection with a partial last group, saturating update |
| `tb_es_controller` | Loop counts, group order, exact unstalled cycle count, pause freezing, no issue during inference |
| `tb_es_train_top` | End to end at P = 2, N = 4, K = 3, M = 6. One unstalled run with an exact cycle count, then one with random inference, data gaps and pauses. Every member's loss, every weight update and every inference result is checked against a reference |
| `tb_es_mnist_layer` | The top at 784 x 200 with P = 1000, one shortened iteration |
| `tb_es_train_top_full` | The top at its default sizes: one complete iteration, 4,000,000 training passes. Runs in a few seconds |

The reference (`tb/es_ref_pkg.sv`) is written in plain integer arithmetic from
the equations above, with its own LFSR. The training data is generated on the
fly:

* inputs: a multiplicative hash of the image index, modulo 16;
* labels: a fixed "true" 2x2 layer applied to those inputs.

The pre-trained weights loaded at the start are that true layer offset by
-70/+90 LSBs, so training has something to recover.

The full 100-iteration run at the defaults is 400 million cycles, about
8 to 9 minutes in Verilator. The full-size testbench stops after the first
iteration; set `ITERS_CHECKED = KIT` in it to run the whole schedule.
