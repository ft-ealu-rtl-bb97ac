# FT-EALU: a time-redundant ALU with diversified operands and per-bit weighted voting

A permanent defect in an ALU, such as a wire stuck at 0 or 1, corrupts the result
every time the operation runs. Running the operation again therefore does not help.
The FT-EALU runs each operation three times, one after another, on the *same* ALU.
Each run uses a differently encoded copy of the operands, so the defective physical
bit lands on a different bit of the data each time. The three decoded results are
then combined one bit at a time. The combination is a weighted vote, with one trust
weight per version and per result bit. The weights are learned once at design time,
by injecting faults and scoring which version was right at each bit. The point is to
get fault tolerance against permanent faults with no duplicated datapath. The price
is time: five clock cycles per operation instead of one.

This repository holds synthesizable SystemVerilog (IEEE 1800-2017) for the whole unit:

- the shared ALU;
- the operand encoder and the result decoder;
- the sequencer;
- the weight store and the weighted voter;
- a store of fault scenarios to apply while learning;
- a scoring unit that learns the weights in hardware;
- a min-max normalizer that turns the learned scores into weights on chip.

It also holds self-checking testbenches, a bit-exact reference model and a fault
campaign. The design follows the FT-EALU method published by A. Abdi and
S. Shahoveisi. Their work describes the method as an algorithm, gives one 4-bit
worked example, and runs the voter in software. Every hardware detail below the
algorithm level is this implementation's own choice. Each such choice is marked
below.

## 1. The three execution versions

Let `W` be the data width (default 16) and `H = W/2`. The shared ALU is `W+1` bits
wide. One spare bit lets the left-shifted operands fit.

| step | ALU operand A (B likewise) | decoding of ALU result `y` | cycles |
|------|---------------------------|----------------------------|--------|
| V1   | `{0, A}`                  | `R_V1 = y[W-1:0]`          | 1 |
| V2   | `{A, 0}` (A shifted left) | `R_V2 = y[W:1]`            | 1 |
| V3L  | `{0…, A[H-1:0], c0}`      | `R_V3[H-1:0] = y[H:1]`, carry/borrow `k = y[H+1]` | 1 |
| V3H  | `{0…, A[W-1:H], c0}`      | `R_V3[W-1:H] = y[H:1]`     | 1 |

- **V1** runs on the raw operands.
- **V2** runs on the operands shifted left by one. Its result is shifted right again.
- **V3** splits each operand into halves, shifts each half left by one, and runs the
  two halves as two separate half-width operations on the low `H+1` ALU bits. The
  low halves run first, then the high halves. The two decoded halves are joined into
  one word.

  The method calls V3 the "shifted and swapped" version. Here the swap amounts to
  computing the halves apart and putting them back in order. The published worked
  example shows the two halves this way: two 3-bit additions, each with the faulty
  bit at the same position.

### Carry between the halves of V3

For add and subtract, the carry or borrow `k` out of the low half must reach the
high half. The method only says the carry "is considered and adjusted". In the
shifted encoding the carry has weight two. This design therefore injects it twice:
once through operand bit 0 and once through the ALU carry input.

- add: A bit 0 = `k` and `cin = k`. This gives `(2a+k) + 2b + k = 2(a+b+k)`.
- sub: B bit 0 = `k` and `cin = k`. This gives `2a - (2b+k) - k = 2(a-b-k)`.

In both cases the result bit 0 stays 0, and shifting right yields the correct high
half. Logic operations pass no carry. `k` is read from the ALU's own result bit
`H+1`, so a fault on that bit disturbs the chain just as it would in silicon.

### Why this helps, and where it does not

A stuck bit at ALU position `p` corrupts these data bits:

| version | data bit hit by ALU bit `p` |
|---------|-----------------------------|
| V1      | `p`                          |
| V2      | `p-1`                        |
| V3      | `p-1` and `H+p-1` (for `1 ≤ p ≤ H`), none for `p > H+1` |

The three versions therefore rarely agree on the same wrong bit, and a bitwise vote
can outvote the broken one. The table also shows the scheme's blind spot: **V2 and
the low half of V3 map ALU bit `p` onto the same data bit `p-1`**. A fault there
makes two versions agree on a wrong value, and a plain majority vote then picks it.
This is exactly the situation in the worked example below. It is what the per-bit
weights are meant to repair, and it caps the coverage a pure majority can reach
(section 5).

## 2. Weighted vote

For each result bit `i` the voter computes the weighted average
`Σ_j W_ij·R_ij / Σ_j W_ij` over the three versions `j`. It outputs 1 when that
average is ≥ 0.5.

The hardware needs no divider. It compares the integers
`2·Σ_j W_ij·R_ij ≥ Σ_j W_ij`. With equal weights this is a majority vote.

Weights are unsigned fixed point with 4 fraction bits in 8 bits: 1.0 = 16, and the
largest weight is 15.94. A bit whose three weights are all zero votes 1.

The method states the threshold in two ways. One says "≥ 0.5 gives 1". The other
shows a block diagram with "> 0.5" and "< 0.5". This design uses ≥. The method also
divides by the sum of the weights in its text, but by 3 in its example; the two give
the same result there.

**Worked example (4-bit).** The operation is `1010 + 1100`, with ALU result bit 1
stuck at 1.

- V1 gives `0110`, which is correct.
- V2: `10100 + 11000` gives `01100`, which the fault turns into `01110`. Shifted
  back: `0111`.
- V3, high halves: `100 + 110` gives `010`, decoded as `01`.
- V3, low halves: `100 + 000` gives `100`, which the fault turns into `110`. Decoded
  as `11`.

So the three results are `0110, 0111, 0111`. Majority gives `0111`, which is wrong.
The example weights, listed MSB first, are V1 = (1.3, 1.3, 1.3, 2) and
V2 = V3 = (1.3, 1.3, 1.3, 0.5). Bit 0 is then `(2·0 + 0.5·1 + 0.5·1)/3 = 1/3 < 0.5`,
which gives 0. The output is the correct `0110`. `tb/tb_ftealu_example.sv` runs
exactly this case through the RTL.

## 3. Learning the weights

Weights come from fault-injection runs with a known correct result, repeated over
many operands and faults.

The faults can come from the fault masks on the ports, or from the fault scenario
store (`fault_injection_storage`). The store holds 512 entries by default: enough
for every single and double stuck-at fault on one 16-bit bus (2·16 + 4·120). Each
entry names one ALU bus (operand A, operand B or result) and holds a stuck-at-0
mask and a stuck-at-1 mask for it. Entries are loaded one per cycle. With
`fs_apply` high, the entry chosen by `fs_sel` is ORed into that bus's fault masks;
keep the selection steady for the whole operation. The store has no reset, so
select only entries that have been written.

The scoring unit (`score_accumulator`) examines each
result bit of each run:

- the versions that are right share a reward of +1;
- the versions that are wrong share a penalty of −1.

| right / wrong | score of a right version | score of a wrong version |
|---------------|--------------------------|--------------------------|
| 3 / 0         | +1/3                     | –                        |
| 2 / 1         | +1/2                     | −1                       |
| 1 / 2         | +1                       | −1/2                     |
| 0 / 3         | –                        | −1/3                     |

Sums are kept per bit and per version as signed 24-bit integers in units of 1/6, so
every share is exact (+2, +3, +6, −2, −3, −6). A scenario counter gives `N`.

The method's second step divides by `N` and normalizes the scores into weights. It
compares three normalizations. The first is linear (min-max) scaling, and this is
the one built in hardware (`weight_normalizer`). A pulse on `norm_start` makes it:

- scan all 3×W score sums, one per cycle, for the minimum and maximum;
- write `w = round(16·(s − min)/(max − min))` into each weight, one per cycle.

The weights run from 0 to 1.0 in Q4.4. If all scores are equal, every weight is
1.0. A pass takes 2·3·W cycles (96 at 16 bits). The division by `N` cancels in
min-max scaling, so the raw sums are used. The min and max are taken over all
versions and bits together; the method does not say which set to use.

The method prefers z-score standardization. It does not say over which set the mean
and deviation are taken, nor how signed z-scores become the positive weights of its
example, so standardization is not built. The score sums and count are brought out
as ports, and weights can be written through the external weight port, so any other
normalization can be done off chip.

A second, punitive scoring rule is selected with `punish_only`. Under it, right
versions score 0, and the −1 is shared among the wrong ones (−1, −1/2 or −1/3). The
method describes this rule first and then prefers reward/punishment.

## 4. Interface and timing (`ftealu_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `start`, `op`, `a`, `b` | in | 1, 3, W, W | request; `op`: 0 and, 1 or, 2 xor, 3 not (of `a`), 4 add, 5 sub |
| `busy`, `done`, `result` | out | 1, 1, W | status; `done` is a one-cycle pulse, `result` is held |
| `r_v1`, `r_v2`, `r_v3` | out | W each | decoded per-version results, for a software voter |
| `train`, `golden` | in | 1, W | learning mode, and the correct result (sampled with `start`) |
| `score_clr`, `punish_only` | in | 1, 1 | clear the scores and the count; select the punitive scoring rule |
| `score`, `score_count` | out | 3×W×24, 24 | learned score sums (units of 1/6), and `N` |
| `norm_start` | in | 1 | run the min-max normalizer on the current scores |
| `norm_busy`, `norm_done` | out | 1, 1 | normalizer running; one-cycle pulse when the last weight is written |
| `w_we`, `w_ver`, `w_idx`, `w_data` | in | 1, 2, log2 W, 8 | write one weight per cycle (ignored while `norm_busy`) |
| `fs_we`, `fs_waddr`, `fs_site`, `fs_sa0`, `fs_sa1` | in | 1, 9, 2, W+1, W+1 | load one fault scenario (bus: 0 operand A, 1 operand B, 2 result) |
| `fs_apply`, `fs_sel` | in | 1, 9 | apply stored scenario `fs_sel` to the ALU; tie `fs_apply` to 0 in use |
| `fa_sa0/1`, `fb_sa0/1`, `fy_sa0/1` | in | W+1 each | stuck-at-0/1 masks on ALU operand A, operand B and result; tie to 0 |

Timing of one operation:

- `start` is sampled at clock edge 0 while `busy` is low.
- Edges 1 to 4 capture V1, V2, V3L and V3H.
- Edge 5 registers the vote and raises `done` for one cycle.
- A new `start` may be given in the `done` cycle.

Throughput is one operation per 5 cycles. The serial order of the versions follows
the method. The split of V3 into two cycles and the handshake are this design's own.

After reset all weights are 1.0, so the unit votes by majority until learned weights
are loaded. The weights are kept in registers rather than a ROM because the method
publishes weights only for its 4-bit example.

The fault masks are there to reproduce the permanent faults the method studies. In a
product they are tied to zero.

## 5. What the fault campaign shows

`tb/tb_fault_campaign.sv` repeats the method's experiments on the RTL. It applies
every single and every double stuck-at fault to one ALU bus at bits `0..W-1`:
2W single and C(W,2)·4 double faults.

- The 4-bit unit is run on all 256 operand pairs, with the faults on the result bus.
- The 16-bit unit is run on 100 random pairs. It learns on 400 other pairs, with all
  six operations and all 512 faults, which is 1.2 million learning runs. During
  learning the faults are loaded into the fault scenario store and applied from it.
- The 16-bit campaign is run twice: once with the faults on the result bus and once
  with them on operand A.
- Weights come from the on-chip min-max normalizer, for each scoring rule.

Every run is compared bit-exactly with the reference model. "Correction coverage"
here is the share of runs in which the fault corrupted at least one version and the
vote was still right. The testbench prints these numbers (single / double stuck-at):

| unit, fault site | equal weights (majority) | learned, reward/punishment | learned, punitive |
|------------------|--------------------------|----------------------------|-------------------|
| 4-bit, result    | 62.7 % / 41.5 %          | 63.0 % / 42.4 %            | 58.6 % / 39.9 %   |
| 16-bit, result   | 66.8 % / 49.5 %          | 66.4 % / 49.0 %            | 64.2 % / 46.8 %   |
| 16-bit, operand A| 66.9 % / 51.0 %          | 66.3 % / 50.4 %            | 63.2 % / 47.4 %   |

The published figures come from the authors' own software model, whose fault sites
and exact metric are not fully specified:

- about 80 % for majority;
- about 85 % for learned weights (single faults), and about 70 % for double faults.

This RTL does not reach them. The structural reason is the V2/V3-low alignment of
section 1. Learned weights scaled by min-max do not overcome it either, and in this
RTL the punitive rule is again the weaker one. The learned weights do help in the
4-bit case. Treat the numbers as a property of this implementation, not as a
reproduction of the published ones.

## 6. Where this implementation departs from the method or fills gaps

- The voter is hardware. The method runs it in software and allows hardware when
  spare resources exist.
- Learning is hardware: the fault scenario store, both scoring rules and min-max
  normalization. The method learns offline in software; here it can run on the
  unit itself and then be frozen.
- Both scoring rules are hardware. Of the normalizations, only min-max is
  hardware; z-score standardization is not built (section 3).
- The ALU is `W+1` bits. The operation encoding, the carry folding in V3, the low
  half running first, and V3 taking two cycles are all this design's own choices.
- The `not` operation complements operand A.
- The final carry out of add/subtract is dropped, as in the worked example.
- Weights are 8-bit Q4.4, non-negative, and reset to 1.0.
- The five-version extension the method mentions is not built.
- Faults are modelled at the ALU's physical pins, so one fault hits all versions.
  This follows the worked example, which marks the same ALU bit faulty in every run.

## 7. Files

`rtl/` (one module or package per file):

| file | content |
|------|---------|
| `ftealu_pkg.sv` | operation and step enums, weight and score formats |
| `base_alu.sv` | shared `W+1`-bit ALU |
| `operand_diversifier.sv` | operand encodings and carry folding |
| `stuck_at_injector.sv` | stuck-at fault model on a bus |
| `result_adapter.sv` | decoding of the ALU result |
| `ftealu_ctrl.sv` | sequencer and result registers |
| `weight_store.sv` | per-bit weights |
| `weighted_voter.sv` | integer weighted vote |
| `score_accumulator.sv` | reward/punishment learning |
| `weight_normalizer.sv` | min-max scaling of scores into weights |
| `fault_injection_storage.sv` | stored fault scenarios for learning |
| `ftealu_top.sv` | the whole unit |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`). It also
holds these files:

| file | content |
|------|---------|
| `ftealu_ref_pkg.sv` | the untimed reference model |
| `tb_ftealu_top.sv` | end-to-end test at the default 16-bit size; it counts the carry/borrow chain, version disagreement, correction, learning, stored fault scenarios, on-chip normalization, weight writes and the weighted vote overruling the majority |
| `tb_ftealu_example.sv` | the 4-bit worked example |
| `tb_fault_campaign.sv` with `fault_campaign_runner.sv` | the campaign |

Every testbench ends by printing `TB_RESULT checks=N failures=M`.

To simulate with Verilator 5, run from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/ftealu_pkg.sv tb/ftealu_ref_pkg.sv tb/tb_ftealu_top.sv \
    --top-module tb_ftealu_top -o sim && ./obj_dir/sim
```

Replace `tb_ftealu_top` with any other testbench name. `tb_fault_campaign` runs
about 7 million operations in about 90 s. To change the width, set `WIDTH` on
`ftealu_top`; it must be even and at least 4. The reference model handles widths up
to 30.
