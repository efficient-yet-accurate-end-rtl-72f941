# A thermometer-coded stochastic-computing non-linear adder with a time-folded approximate sorting network

This is RTL for the core of an end-to-end stochastic-computing (SC) neural-network
datapath. Values never go back to binary here. Every operand is a *thermometer-coded*
bitstream: a value is the count of 1s in the stream, minus half the stream length.
The block computes one output activation of a convolution layer:

    y = act( sum_i  x_i * w_i  +  residual )

The multiplications are ternary. The sum is taken by *sorting* all product bits. The
activation (a batch-norm fused ReLU, or any other monotone staircase) comes from
wiring out chosen bits of the sorted result. The datapath has three main ideas:

1. **Sorting is addition.** A bitonic sorting network (BSN) moves all 1s to one end.
   The sorted stream is again a thermometer code, and its count of 1s is the sum of the
   inputs. So one network does the whole accumulation exactly, with no adders.
2. **Reading a sorted stream is an activation function.** In a sorted stream, bit
   `L-n` is 1 exactly when the sum is at least `n`. Each output bit can therefore copy
   the sorted bit at its own threshold. This *selective interconnect* (SI) realises any
   monotone staircase, including batch-norm fused into ReLU, at no arithmetic cost.
3. **The network is approximate and reused over time.** A full-precision BSN grows
   faster than linearly with its width. Here it is replaced by a small 576-bit network
   that sorts in stages and keeps only every s-th bit (and clips the tails) after each
   stage. Wider sums run through that one network over several cycles. Each cycle
   leaves a 72-bit partial sum in a buffer. A last cycle sorts the buffer (8 x 72 bits)
   again and produces a 256-bit result for the SI.

The datapath also takes a high-precision (16-bit stream, values -8..8) residual input.
The residual is re-scaled by a power of two to the scale of the convolution and then
sorted in together with the partial sums.

## Number formats

| stream | length | values | where |
|---|---|---|---|
| ternary operand / product | 2 | -1, 0, +1 (`00`, `10` or `01`, `11`) | weights, quantised activations, products |
| activation / residual | 16 | -8 .. 8 | `act_in`, `res_in`, `act_out` |
| BSN input | 576 | -288 .. 288 | 288 products per cycle |
| partial sum | 72 | clipped, scaled | buffer slots |
| final sum | 256 | clipped, scaled | SI input |

Bit `L-1` of a vector is the first stream position, and 1s fill from the top. A
stream with `k` ones is `{k{1'b1}, (L-k){1'b0}}` in sorted form. An unsorted stream is
worth the same as long as its count of 1s is the same.

## Datapath (`sc_nla_top`)

```
 act_in[288][16] --> act_quant --> mul_array <-- wgt_in[288][2]
                                      | 576 b
                                      v
                 psum_buf --576 b--> mux --> appr_bsn --256 b--> sel_interconnect --> act_out[16]
                 ^    ^                        | top 72 b
                 |    +------------------------+  (partial sums)
   res_in -> res_rescale (72 b residual slot)
```

* `act_quant` turns each 16-bit activation into a ternary one. It uses two
  thresholds, which are a 2-output SI per lane.
* `mul_array` has 288 ternary multipliers (`sc_mul`), which give 576 product bits.
* `appr_bsn` is stage 1 followed by stage 2. Stage 1 has nine 64-bit sub-BSNs, each
  keeping 1 bit of 2, which gives 288 bits. Stage 2 is one 288-bit sub-BSN whose
  sub-sampler is set at run time:
  * partial setting (clip 72, stride 2): 72 bits;
  * final setting (clip 16, stride 1): 256 bits.
* `psum_buf` has 8 slots of 72 bits. A slot that is not written reads as alternating
  1/0, which is worth zero. The last slot takes the residual.
* `res_rescale` handles the residual:
  * multiply by 2^N: replicate the stream 2^N times (N <= 2, so the copies fit one
    slot);
  * divide by 2^N: N cycles, each keeping the upper bit of every pair and appending
    `11110000`, which is worth zero.
* `sel_interconnect` has 16 outputs. Each picks one bit of `{1, sorted256, 0}`.
* `st_ctrl` is the sequencer.

## Operation and timing

1. Pulse `start` with `cfg` (`sc_pkg::nla_cfg_t`) and `res_in`. Hold `si_sel` and
   `aq_sel` stable for the whole operation.
2. Supply `cfg.n_beats` beats of 288 activations and weights. A beat is taken on each
   cycle where `in_valid && in_ready`. Bubbles are allowed.
3. If there is one beat and no residual (`n_beats = 1`, `res_en = 0`), that beat is
   sorted with the final setting straight into the SI. This is the *bypass*, and
   `out_valid` comes one cycle after the beat.
4. Otherwise each beat writes a 72-bit partial sum to slot 0, 1, ... The cycle after
   the last beat is the *final pass*: the buffer is sorted with the final setting.
   `out_valid` follows one cycle later. With 8 beats and no bubbles, the BSN is busy
   for 9 cycles (8 partial passes and 1 final pass).
5. With a residual, the final pass waits (`stall`) until the re-scaled residual is in
   its slot. Division by 2^N takes N+1 cycles before the slot is written.

Rules: `n_beats` is 1..8, and 1..7 with a residual. Assertions check both.

## Programming the activation

Let `c` be the number of 1s in the 256-bit final sum. Output level `m` (1..16)
should be on when `c >= n_m`. For that level, set
`si_sel[16-m] = 256 - n_m + 1`, or `257` for always on, or `0` for never on. For a
BN-fused ReLU, levels 1..8 are always on, and level `8+t` switches at the pre-BN
value `beta + t/gamma`, expressed in units of the final sum. The value of one unit of
the final sum follows from the settings: stage 1 halves, the partial setting halves
again and the final setting keeps scale. Software must also pick the residual's `N`
so that its scale matches. The testbench `tb_sel_interconnect` reproduces two
BN-ReLU curves, `y = floor((x+20)/15)` and `y = floor(x/5)` clipped to 0..8, on a
320-bit input.

## Accuracy of the approximation

All sub-sampling is deterministic, so results are exactly reproducible. The error
comes from two sources:

* rounding in each stride (the middle bit of each window is kept);
* saturation at the clipped ends.

In the final setting, a 576-bit single pass rounds up by at most one input bit in
each of its nine 64-bit groups. Away from saturation it is therefore off from the
exact count of 1s by at most 9 out of 576 (checked in `tb_appr_bsn`). The
clip widths suit sums that sit near zero, which is the case for partial sums over
many products. A sum far from zero saturates.

## Sizes and limits

* A beat carries 576 bits, which is 288 two-bit products. With at most 8 beats, one
  operation accumulates 2304 products: a 3x3x256 convolution, or a 3x3x128 one with
  a residual.
* A 3x3x512 convolution (4608 products) needs 16 beats and does not fit. Sizing it at
  9 cycles treats the sorter input as one bit per product. This RTL keeps the 2-bit
  ternary product code instead.
* The stage split (9 x 64, stride 2), the clip/stride settings and the residual slot
  are choices of this design. Only the 576/72/256/16-bit widths and the 8+1 cycle
  schedule are fixed by the design it implements.
* Not included:
  * weight and activation memories, layer scheduling and I/O (operands enter on
    ports every beat);
  * the transformer operators (GELU, softmax);
  * the FSM-based and exact-BSN baselines.

## Files

| file | content |
|---|---|
| `rtl/sc_pkg.sv` | widths, `ss_cfg_t`, `res_mode_e`, `nla_cfg_t` |
| `rtl/sc_mul.sv`, `rtl/mul_array.sv` | ternary multiplier and its 288-lane row |
| `rtl/bsn_sorter.sv` | bitonic sorter, AND/OR comparators, any width |
| `rtl/bsn_subsample.sv` | clip + stride sub-sampling |
| `rtl/appr_bsn.sv` | two-stage approximate BSN |
| `rtl/sel_interconnect.sv`, `rtl/act_quant.sv` | SI and the input quantiser |
| `rtl/res_rescale.sv`, `rtl/psum_buf.sv`, `rtl/st_ctrl.sv` | residual, buffer, sequencer |
| `rtl/sc_nla_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_ref_pkg.sv` holds shared reference arithmetic |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and stops itself. The full-size
end-to-end test (`tb_sc_nla_top`, default parameters, 40 random operations with a
bit-level reference model) runs in well under a second:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sc_pkg.sv tb/tb_ref_pkg.sv \
    rtl/*.sv tb/tb_sc_nla_top.sv --top tb_sc_nla_top -Wno-fatal
./obj_dir/Vtb_sc_nla_top
```

(`rtl/sc_pkg.sv` is listed first so the package is compiled before its users.)
Replace `tb_sc_nla_top` with any other `tb_<module>` to test a single block.
