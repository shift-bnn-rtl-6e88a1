# Shift-BNN: a Bayesian-network training accelerator that regenerates its random numbers instead of storing them

A Bayesian neural network (BNN) keeps two numbers per weight: a mean mu and a
standard deviation sigma. Each training sample draws a fresh weight
`w = mu + eps * sigma`, where eps is a Gaussian random number. The backward
pass needs the same eps again to form the gradients of mu and sigma. A
straightforward accelerator therefore writes every eps to memory in the
forward pass and reads it back in the backward pass. For large models that
traffic dominates the energy.

This design does not store eps. Each Gaussian random number generator (GRNG)
is a linear-feedback shift register (LFSR), and an LFSR can be run backwards.
The backward pass visits the weights in exactly the reverse order of the
forward pass. Each LFSR steps back once per weight, so it reproduces the same
eps values in reverse order. No eps is ever written to memory.

The RTL in `rtl/` implements the accelerator:
- 16 Sample Processing Units (SPUs), each training one sampled copy of the network in lock-step;
- a shared weight parameter buffer (WPB) for mu and sigma;
- a central controller that turns layer-level instructions into a micro-operation stream;
- a gradient averager that updates mu and sigma in place.

Every module has a self-checking testbench in `tb/`.

## 1. The reversible GRNG (`grng.sv`)

The register is 256 bits wide, R1..R256.
- **Forward step:** shift toward R256. The new R1 is `R256 ^ R254 ^ R251 ^ R246`.
- **Backward step:** shift toward R1. The new R256 is `R1 ^ R247 ^ R252 ^ R255`.

The backward step works because each tap moves one position in a forward step. The bit that fell out at R256 can therefore be solved from the new R1 and the shifted taps. The two steps are exact inverses.

A Gaussian value comes from the number of ones in the register: `eps = (popcount - 128) / 8`.
- This is a binomial(256, 1/2) count, centred and scaled to unit variance. The popcount's standard deviation is 8.
- The output format is Q8.8 (16-bit signed, 8 fractional bits), so eps = (ones - 128) * 32.

Successive patterns share 255 bits, so successive eps values are strongly correlated. This is a property of the scheme, not of this RTL.

`mode` selects one of three actions: forward step, backward step or hold.

The tap positions (246, 251, 254, 256) come from the standard table of maximal-length LFSRs. The testbench additionally checks an 8-bit version (taps 4, 5, 6, 8) against a hand-worked sequence.

## 2. The function unit (`func_unit.sv`)

Each GRNG slice has one function unit. It has two parts.
- **Sampler:** forms `w = mu + eps * sigma` with one multiplier and one adder.
- **Updater:** in the backward pass it takes the likelihood gradient dw and forms:
  - `dmu = dw + d(prior)/dw`;
  - `dsigma = dmu * eps`.

For the prior term this design uses the gradient of a Gaussian prior with a fixed scale. That term is `4 * w`, computed by a shift with saturation. The prior, and therefore the constant, is this design's choice.

All arithmetic is Q8.8 with saturation. Products are rounded toward minus infinity (arithmetic shift).

## 3. The SPU and its 4-stage pipeline (`spu.sv`)

An SPU contains:
- NBin and NBout, the neuron buffers (`nbuf.sv`);
- 16 GRNG and function-unit slices;
- a 4x4 PE tile (`pe_tile.sv`, `pe.sv`);
- a 4x4 array of shift units (`shift_array.sv`, `shift_unit.sv`);
- a crossbar (`crossbar.sv`);
- a gradient buffer that holds the likelihood gradients from the gradient-calculation stage until the backward stage needs them.

All 16 SPUs execute the same micro-operation (`uop_t`) in the same cycle. Each SPU has its own GRNG seeds (a function of the SPU and slice number), so each works on a different weight sample.

The micro-operation enters at S0 and is delayed inside the SPU:

| stage | work |
|---|---|
| S0 | buffer row reads, WPB / gradient-buffer entry read, forward GRNG step |
| S1 | data arrive; shift network moves; sampler forms w; backward GRNG step; updater captures dmu/dsigma |
| S2 | PE operation with the registered weight; dmu/dsigma lanes leave the SPU |
| S3 | PE results written to NBin/NBout or to the gradient buffer |

The GRNG steps forward at S0 but backward at S1. As a result, the eps used with an entry read at S0 is always the pattern that entry saw in the forward pass.

**Convolutions** use one weight per cycle. Only slice 0 steps, and the crossbar broadcasts the sampled weight to all 16 PEs. **FC layers** use a whole WPB entry of 16 weights. All 16 slices step, and each PE gets its own weight.

## 4. Dataflow in the PE tile: shift units instead of a line buffer

A convolution output tile is 4x4 neurons. Each PE accumulates one output while the weights arrive one per cycle.

Moving from kernel position (ki, kj) to (ki, kj+1), each PE needs the neuron its right neighbour used. Moving to the next kernel row, it needs the neuron of the PE below.

Each PE has a shift unit beside it with three registers:
- Reg-H, passed left;
- Reg-V, passed up;
- Nout.

So the tile reuses neurons it already holds. Only the new column or row comes from the neuron buffer. The bottom row is fed from an eight-wide buffer read. The controller issues these moves:

| move | effect |
|---|---|
| `SH_LOADV_LO`, `SH_LOADV_HI` | load a fresh 4x4 window, two rows per cycle |
| `SH_LEFT` | shift the window one column |
| `SH_UP` | shift the window one row; the bottom row comes from the buffer |
| `SH_BCAST` | FC layers: one input neuron is broadcast to all PEs |

Each PE's accumulator has two modes:
- it keeps its own sum (forward convolution and GC);
- it starts from a partial sum read back from the buffer. The controller uses this in the backward convolution, where it loops over the error channels and must add each channel's contribution to the same output.

## 5. Buffers and layouts

**Neuron buffer (`nbuf.sv`).**
- There are 8 banks of `NB_DEPTH` = 6144 words (16 bits) per buffer. Two buffers of 8 banks fill the 48 block RAMs listed for one SPU.
- Neuron (y, x) of a map is in bank `x mod 8`, at address `base + y * pitch + x / 8`, with `pitch = ceil(w / 8)`.
- One read returns 8 consecutive neurons of a row at any x, aligned or not. Reads outside the map return zero, which gives zero padding for free.
- A write stores a PE row (4 neurons) with bounds masking. It can optionally keep only even (y, x), which implements 2x2 pooling as a stride-1 max followed by subsampling.

**WPB (`wpb.sv`).**
- Two sub-buffers, mu and sigma, each with 4096 entries x 16 lanes (65,536 weights).
- Linear weight j lives in lane `j mod 16` of entry `j / 16`.
- Reads take one cycle. The update port writes selected lanes of one entry.
- The host port loads single words. A host write in the same cycle as an update wins, so load weights only while the controller is idle.

**Gradient buffer.** This is an `nbuf`-like array inside each SPU with the same entry/lane mapping as the WPB. A layer's `g_base` must equal its `w_base`.

## 6. Instructions and the controller (`controller.sv`)

The host issues one `instr_t` per layer stage, using a valid/ready handshake. `done` pulses when the stage has finished. The fields are:
- opcode;
- kernel size k;
- padding;
- channel counts ci and co;
- source map size, buffer and base;
- destination buffer and base;
- an auxiliary map (errors for GC);
- `w_base`, `g_base`;
- `relu`;
- `update`.

| opcode | work |
|---|---|
| `OP_CONV_FW` | convolution forward, with stride 1 and padding |
| `OP_CONV_BW` | error propagation through a convolution, using the rotated kernel (see below) |
| `OP_CONV_GC` | kernel gradients, using the error map of the next layer as the weight operand (it is read from the neuron buffer in place of the WPB) |
| `OP_FC_FW` | FC forward |
| `OP_FC_GC` | FC gradients |
| `OP_FC_BW` | FC backward: weight regeneration and mu/sigma update |
| `OP_POOL` | 2x2 max pooling |

**Loop order, which is the hardest part to get right.**
- In a forward convolution the loops nest as output channel a, then output tiles, then input channel b and the kernel position (ki, kj). The GRNG therefore visits the weights in plain linear order.
- A map larger than 4x4 needs several tiles, and every tile must see the same weights. Between tiles, the controller winds slice 0 back over the ci * k * k weights of the current output channel. The net forward count over a layer is then exactly co * ci * k * k.
- The backward convolution runs the whole order in reverse:
  - error channels from last to first;
  - each kernel from its last element to its first, which is the rotated kernel the error propagation needs;
  - between tiles, the LFSR is wound forward again.
- For FC layers the backward pass walks the input index and the 16-output groups from last to first.

The testbenches check all of these orders.

**Update.** In a backward stage with `update = 1`:
1. Each SPU presents dmu and dsigma for the weights it regenerates.
2. `grad_avg.sv` adds the 16 SPUs' values and divides by 16.
3. It applies plain SGD with learning rate 2^-`LR_SHIFT` (default 2^-4): `mu' = mu - avg(dmu) >> 4`, and the same for sigma.
4. It writes the result back to the entry read two stages earlier, in the same pass.

## 7. Top level (`shift_bnn_top.sv`)

The top level wires together:
- the controller;
- `NSPU` = 16 SPUs;
- the WPB;
- the averager.

It has no DRAM interface. Two host ports stand in for it:
- `host_nb_*` reads and writes the neuron buffers of one selected SPU;
- `host_wpb_*` loads and reads mu and sigma.

Read data appear two cycles after the request.

The package `sbnn_pkg.sv` holds the shared types, the micro-operation and instruction structs, and the fixed-point helpers.

## 8. How far it can be trusted

**Checked by simulation.** Every module has a self-checking testbench. Each compares the module against an independent model written in the testbench. The key checks are:
- **GRNG:** forward/backward inversion over long random walks and the Gaussian mapping.
- **Function unit:** sampler and updater arithmetic.
- **PE and tile:** both accumulation modes, max, and ReLU.
- **Shift array:** every move.
- **Buffers:** layouts and padding.
- **Crossbar:** routing.
- **Controller:** weight visit order, tile rewinds, net step counts and coverage of every output.
- **SPU:** a padded multi-tile convolution, an FC layer and the backward gradient lanes.
- **Top (full size, default parameters):** one network pass:
  - conv forward over 16 SPUs with different samples, checked neuron by neuron;
  - pooling;
  - FC forward;
  - FC gradients;
  - FC backward with update, with the new mu and sigma compared against the averaged model;
  - conv gradients;
  - conv backward with update, zero padding 2 and four tiles.

  The top testbench also counts that each mechanism occurred:
  - forward and backward GRNG steps;
  - tile rewinds;
  - psum read-back;
  - zero padding;
  - left/up shifts, broadcast and vector load;
  - max pooling and ReLU clipping;
  - parameter updates.

Each testbench was also run against a deliberately broken copy of its module and reported failures.

**Not verified:** timing at the 200 MHz target, and any FPGA mapping.

## 9. Departures and gaps

- **FC backward does not propagate errors.** `OP_FC_BW` regenerates the weights and updates mu/sigma, but it does not propagate errors to the previous layer. That would need a reduction across the 16 PEs, which is not specified. A network with FC layers followed by earlier trainable layers cannot yet be trained end to end on chip.
- **Stride and shortcuts.** Convolutions have stride 1 only, and there are no residual (shortcut) additions. ResNet-style and AlexNet-style first layers do not run.
- **Off-chip tiling.** A layer must fit in the on-chip buffers:
  - 49,152 neurons per neuron buffer;
  - 65,536 weights per WPB sub-buffer.

  Larger layers have to be split by the host into several instructions with reloads in between. There is no automatic tiling from DRAM. Of the usual benchmark models, a LeNet-5 on CIFAR-10 fits entirely. An MLP with three hidden layers of 200 units fits if its first layer is split. AlexNet, VGG-16 and ResNet-18 do not fit.
- **One SPU per sample.** 16 samples run in parallel, one per SPU. Other sample counts need host passes: 32 samples take 2 passes, and so on.
- **Own choices.** The learning rate, optimiser, prior constant, seeds, LFSR taps, buffer mappings, pipeline staging and instruction format are all this design's own choices.

## 10. Simulating and changing it

Any testbench runs with plain Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl rtl/sbnn_pkg.sv rtl/*.sv tb/tb_spu.sv \
              --top-module tb_spu && ./obj_dir/Vtb_spu

Each testbench prints `TB_RESULT checks=N failures=M`. The full-size top-level test, `tb_shift_bnn_top`, takes about a minute to build and run.

**Sizes.** These are parameters of `shift_bnn_top`:
- `NSPU`;
- `NB_DEPTH`, `WPB_DEPTH`, `GB_DEPTH`;
- `LR_SHIFT`.

The PE tile size (4x4) and the lane count (16) are constants in `sbnn_pkg.sv`. The instruction field widths there bound the map and channel sizes.
