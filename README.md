# Kelle accelerator: attention with an evicting, adaptively refreshed eDRAM KV cache

When a large language model decodes, every new token attends to the keys and
values of all the tokens before it. Those key/value (KV) vectors are the
largest working set at the edge, and keeping them on chip is what saves DRAM
traffic. Kelle keeps them in embedded DRAM (eDRAM), which is dense but has to
be refreshed, and makes that affordable with two ideas:

* **AERP, attention-based eviction and recomputation.** Each head keeps at
  most N' tokens. Every token has a small *importance score*, the running
  sum of its attention logits q·k. When the cache is full, the token with
  the lowest score is evicted, except for the first few tokens of the
  sequence and a window of the most recent tokens. A token that most heads
  would keep ("popular") can be stored once, as its input vector x, rather
  than as one K and one V per head.
* **2DRP, two-dimensional adaptive refresh.** Refresh is adapted on two
  axes. By importance: high-score tokens (HST) are refreshed more often than
  low-score tokens (LST). By bit position: the upper byte of every 16-bit
  element is refreshed more often than the lower byte. A bit flip in a low
  byte of an unimportant token does little harm.

A **systolic evictor** sits beside the systolic array. It updates the
importance scores and finds the eviction victim while q·k is being computed,
so eviction adds no search time. A **scheduler** orders the operations of one
attention step so that the new K and V are used soon after they are
produced, which shortens how long they sit in eDRAM.

This repository is synthesizable SystemVerilog for that accelerator. It
covers one decoding step of self-attention for one head: projections, scores,
eviction, softmax, the weighted sum of values, and the cache update. 2DRP
runs continuously in the background.

## Main numbers

| Quantity | Default | Where it comes from |
|---|---|---|
| Systolic array | 32 x 32 PEs, weight stationary, transposable | Kelle |
| Weights / activations / KV | 8 bit / 16 bit / 16 bit | Kelle |
| Weight SRAM | 2 MB, 65536 words of 32 weights | Kelle (size), own (word) |
| Activation eDRAM | 256 KB, 4096 words of 32 x 16 bit | Kelle (size), own (word) |
| KV cache eDRAM | 4 MB, 32 banks x 8192 words x 128 bit | Kelle |
| Importance score | 4 bit, in a register file, one per KV address | Kelle |
| Token budget N' per head | 128 (`NSLOTS`) | Kelle main setting |
| Protected tokens | 10 initial, 64 most recent | Kelle main setting |
| Popularity threshold | stored as x if kept by > 50 % of heads | Kelle |
| Refresh intervals | MSB-HST 0.36 ms, LSB-HST 5.4 ms, MSB-LST 1.44 ms, LSB-LST 7.2 ms | Kelle |
| Activation eDRAM refresh | 45 us, uniform | Kelle (eDRAM retention) |
| Model shape | C = 4096, D = 128, H = 32 (LLaMA2-7B) | own choice of target |
| Clock | intervals counted at 1 GHz | Kelle |

The KV cache holds `LH = 64` layer-heads of 128 tokens each (64 x 128 x 128
elements x 2 (K, V) x 2 bytes = 4 MB). For LLaMA2-7B that is two of its 32
layers. As in Kelle, only a subset of layers lives on chip. The DRAM that
would hold the rest is not part of this RTL.

## One decoding step

`kelle_top` runs a step when it sees `start`. The step uses layer-head `lh`,
and the new token sits at position `cur_pos`. The host has already put that
token's input vector x (C values) in activation-memory words `0 .. C/N-1`.
The **scheduler** (`kelle_scheduler`) then runs these operations in order:

| Op | What happens | Array mode |
|---|---|---|
| MM_Q | q = x·Wq. There are C/N x D/N weight tiles; each tile is loaded from the weight SRAM and then x streams through it. The accumulator sums over input tiles. The result is requantised (`>>> PROJ_SHIFT`, saturated) into words `Q_BASE..`. | normal |
| MM_K | k = x·Wk, written to `K_BASE..` | normal |
| MM_QK | For each group of 32 cached slots, the slots' keys are read from the KV cache and loaded as array rows, one row per slot, and q streams through. The new token's own k forms one more group. Each complete q·k goes three ways: to the systolic evictor, to the softmax (pass 1), and to a score buffer. | normal |
| SM | The softmax normalises the buffered scores into probabilities (pass 2). | - |
| MM_V | v = x·Wv, written to `V_BASE..` | normal |
| MM_AV | y = Σ p_n·v_n. The array is transposed. Value vectors are loaded as rows and the probabilities stream in from the left. y is `>>> 15`, written to `Y_BASE..`. | transposed |
| UPDATE | The eviction controller picks a slot. The new k and v are written to that slot's KV address. Its importance score, its own q·k quantised, goes to the register file. | - |

The order Q, K, QK, SM, V, AV is Kelle's. K is consumed right after it is
made. V is made only when it is needed. The baseline order would compute
Q, K and V first. The scheduler measures each lifetime in cycles, from the
end of the op that produced the value to the end of the op that consumed it.
These are the `life_q/k/v` outputs. In the reduced end-to-end test, K lives
less than half as long as Q.

The step ends with a one-cycle `done`. With it come `wr_slot`, `evicted`,
`store_x` (the token is popular) and `no_victim` (the cache is full and every
token is protected, so the new token was not stored).

### Memory maps

* Activation eDRAM word w holds 32 consecutive 16-bit elements. x occupies
  words `0 .. C/N-1`. Then come q, k, v and y, D/N words each, at `Q_BASE =
  C/N`, `K_BASE`, `V_BASE` and `Y_BASE`.
* Weight SRAM word `mat*D*(C/N) + out*(C/N) + tile` holds the 32 weights
  `W[mat][out][tile*32 .. tile*32+31]`, where mat 0/1/2 = Q/K/V, for the
  head being run. One head needs 3 x 128 x 128 = 49152 words, 1.5 MB.
* KV cache address = `lh * NSLOTS + slot`. The same address selects the
  token in all 32 banks. The register-file entry at that address holds the
  token's score and a valid bit.

## Reconfigurable systolic array (`kelle_pe`, `kelle_rsa`)

Each PE holds one stationary value. It multiplies the activation passing
through it by that value and adds the product to the partial sum passing
through. Two modes exist:

* **Normal.** Activations enter at the top and move down. Partial sums move
  west to east and leave at the right edge, one per row. Row r is complete
  COLS + r cycles after its input vector entered.
* **Transposed.** Activations enter at the left and move east. Partial sums
  move down and leave at the bottom, one per column. Column c is complete
  ROWS + c cycles after input.

The array skews its edge inputs itself: column c is delayed by c cycles. A
caller therefore presents a whole vector at once. An assertion requires the
mode to stay fixed while data is in flight.

The transposed mode is what lets the same key/value tile layout serve both
K·q and pᵀ·V. In MM_QK a row of the array holds one token's key and
produces that token's score. In MM_AV a row holds one token's value, the
probabilities enter along the rows, and each column produces one element of
y.

**Operand width.** The PE multiplies 16 x 16 bits into a 40-bit partial sum.
Kelle describes its PEs as 8-bit MACs, but also keeps activations and KV
vectors in 16 bits. The q·k and p·v products need 16 x 16. Projections load
8-bit weights into the same 16-bit stationary register, sign-extended.

## Systolic evictor (`kelle_systolic_evictor`)

This is the part most worth understanding. The evictor is one column of
rows beside the array, one row per array row. Each row has:

* a register **S[i]** holding the importance score of the token in array
  row i. It is preloaded from the score register file before the group's
  scores arrive.
* an adder. When the array completes row i's q·k, the row computes
  S[i] ← sat₄(S[i] + clamp(q·k >>> QSHIFT, 0, 15)). The sum uses the raw
  q·k, not the softmax.
* a comparator and a register **M[i]**. M[i] holds the minimum so far as
  {score, index}: M[i] = S[i] if S[i] < M[i-1], otherwise M[i-1].

The array finishes row i exactly one cycle after row i-1, and M[i-1] is
registered. So the search moves down the column in lockstep with the
array. When the last row's score is out, the minimum is already known.

Details that are this design's own:

* **Protected or empty slots** carry a candidate bit of 0. They update their
  score but are never taken as the minimum. The eviction controller supplies
  the bits: a slot is a candidate if it is filled, not one of the first 10
  tokens, and not in the recent window.
* **Start of the chain.** The figure in Kelle shows the top of the M chain
  fed with "-inf". With a "keep the smaller" comparator that value would win
  every comparison. The chain starts instead with "no candidate yet", which
  acts as +inf. `min_vld` stays low if no candidate is seen at all.
* **Ties** keep the earlier row, so the lower slot index wins.
* **More than 32 tokens.** A head's 128 slots are scanned in 4 groups of
  32. The group minimum is carried from the bottom of the chain into the
  next group. `new_search` clears the carry at the start of a step.
* **Write-back.** Each updated S[i] is reported one cycle after its update
  (`upd_vld/upd_score`). The top writes it back to the register file.

The evictor runs on the completed q·k, after the accumulator. Kelle draws it
straight after the array. Here a head vector of 128 elements is folded over
4 passes of the 32-row array, and only the accumulator holds the full dot
product.

## Eviction controller (`kelle_eviction_ctrl`)

The controller keeps, for every layer-head, a token count and, per slot,
the token's position and storage format. During MM_QK it produces each
group's candidate bits from this rule:

    cand = slot < count  &&  pos >= N_SINK  &&  pos + N_RECENT <= cur_pos

At UPDATE it commits the new token:

* If the head has fewer than NSLOTS tokens, the token goes to the next free
  slot.
* Otherwise it replaces the evictor's minimum (`evicted`).
* If no candidate exists, `no_victim` is raised.

**Popularity** is decided from `retain_mask`, one bit per head that says
whether that head keeps the token. The token is popular if more than half
the bits are set. Per-head decisions come from other heads' steps, so they
are an input here. The decision is reported (`store_x`) and recorded per
slot (`fmt_x`). **Recomputing K and V from a stored x is not built.** K and
V are always stored. See *Departures*.

## KV cache eDRAM and its bit split (`kelle_edram_bank`, `kelle_kv_cache`)

`kelle_edram_bank` is a single-port memory with a second, refresh-only
request port. A refresh is granted only in a cycle with no access. It reads
the row into a buffer, then writes it back in the next free cycle and pulses
`ref_done`. If the host writes the same row in between, the stale write-back
is dropped. Charge loss is not modelled: the bank is ideal storage, and
refresh is there to be scheduled and counted.

`kelle_kv_cache` has 4 groups of 8 banks: Key-MSB, Value-MSB, Key-LSB and
Value-LSB. Every 16-bit element is split in two. Bits 15:8 go to an MSB
bank, and bits 7:0 to the LSB bank of the same index. Element e is in bank
e/16, byte e%16, so one access moves a whole 128-element K and V vector.
All MSB banks share one refresh request port, and all LSB banks share
another. This is what lets the two halves be refreshed at different rates.

The score register file (`kelle_score_rf`) holds 4-bit scores with a valid
bit. It has one write port, a 32-entry group read for the evictor preload,
and two single read ports, one for each refresh controller.

## 2DRP refresh (`kelle_refresh_ctrl`)

There is one controller for the MSB banks and one for the LSB banks. Each
has two interval counters, one for HST and one for LST. When one expires,
the controller sweeps all 8192 KV addresses. For each address it reads the
token's score from the register file and classifies it: score >= `HST_MIN`
(8) means HST, otherwise LST. It requests a refresh for every valid token of
the expired group. HST sweeps go first.

Requests are only made while `enable` is high. The top drives `enable` low
while the scheduler is in MM_QK, MM_AV or UPDATE, the operations that use the
KV cache, so refresh hides in the other phases. Cycles in which a request
waits for the cache are counted (`ref_stall_cycles`). A group that expires
again before its previous sweep began is counted as an overrun.

| Instance | HST interval | LST interval |
|---|---|---|
| MSB banks | 360 000 cycles (0.36 ms) | 1 440 000 (1.44 ms) |
| LSB banks | 5 400 000 (5.4 ms) | 7 200 000 (7.2 ms) |
| activation eDRAM | 45 000 (45 us), with `HST_MIN = 0` so that every word is in one group | — |

The HST/LST boundary at score 8 is this design's choice.

## Softmax (`kelle_softmax`)

The softmax reads each score once in pass 1. As in Softermax, it keeps a
running maximum m and a denominator d = Σ 2^(x−m). When a new maximum
appears, d is rescaled. The exponent base is 2.

Scores enter as q·k >>> `SM_SHIFT` and are read as fixed point with 4
fractional bits. 2^(−e) is a 16-entry table of 2^(−f/16) in Q15,
`32768·2^(−f/16)` rounded, shifted right by the integer part. `finalize`
computes 2³⁰/d once. Pass 2 gives p = 2^(x−m)·recip >> 15 in Q15, clamped to
32767. There is no 1/√D scaling. That, the shifts and the table size are this
design's choices.

## Fixed-point conventions (`kelle_pkg`)

* Partial sums are 40 bits.
* A projection result is `sat16(acc >>> PROJ_SHIFT)`.
* The score increment is `clamp(q·k >>> QSHIFT, 0, 15)`, added with 4-bit
  saturation.
* Probabilities are Q15. y = `sat16(Σ p·v >>> 15)`.

The default shifts (8, 16, 12) suit random 8-bit test data at C = 4096. A
real model would set them from its own scales.

## Departures from Kelle

* **No recomputation.** A popular token's x is not stored in place of its K
  and V, and no K/V is recomputed from x. The decision itself is computed
  and reported.
* **No output projection (MM_O), FFN, normalisation, activation function or
  positional embedding.** The special-function units other than softmax are
  only named in Kelle, and the step here ends at the per-head attention
  output.
* **No overlap** of weight-SRAM loads with KV loads. Operations run one
  after another. One step at full size takes about 154 000 cycles, mostly
  for the 3 x 512 weight tiles of the projections.
* **16 x 16 multipliers** in the PE instead of 8-bit MACs.
* **The evictor follows the accumulator**, not the array directly.
* **The DRAM, its controller and PHY** are not included. The host loads
  weights and activations through the `w_*` and `a_*` ports while the
  accelerator is idle.
* **eDRAM is ideal storage.** Retention failures are not modelled.
* **The number of heads that can be evaluated is fixed by `H`.** Models
  with grouped-query attention are run per query head, storing duplicate K
  and V.

## Top-level interface (`kelle_top`)

| Port | Dir | Meaning |
|---|---|---|
| `w_en, w_addr, w_wdata` | in | host write into the weight SRAM (32 x 8 bit) |
| `a_en, a_we, a_addr, a_wdata, a_rdata` | in/out | host access to activation eDRAM (32 x 16 bit, read data one cycle later) |
| `clear` | in | empty the whole KV cache (counts and valid bits) |
| `start, lh, cur_pos, retain_mask` | in | run one step for layer-head `lh`, new token at `cur_pos`, per-head keep votes |
| `busy, done` | out | step running; one-cycle end pulse |
| `wr_slot, evicted, store_x, no_victim, count` | out | result of the cache update; tokens now held by `lh` |
| `msb/lsb/act_ref_count, ref_stall_cycles` | out | refreshes done, cycles a refresh waited for the cache |
| `msb/lsb_expired_hst/lst` | out | interval expiries per group |
| `life_q, life_k, life_v` | out | lifetimes of the step's q, k, v in cycles |

The host must not touch the memories while `busy` is high.

## Testbenches and how to run them

Every block has a self-checking bench in `tb/`. Each checks against values
computed independently in the bench, and each ends with a
`TB_RESULT checks=.. failures=..` line and a watchdog. To run one with
Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/kelle_pkg.sv rtl/*.sv \
        tb/tb_kelle_top.sv --top-module tb_kelle_top -Mdir obj_top
    ./obj_top/Vtb_kelle_top

| Bench | What it covers |
|---|---|
| `tb_kelle_pe` | both modes, forwarding, weight load |
| `tb_kelle_rsa` | full 32 x 32, back-to-back vectors, both modes, exact latency COLS+r / ROWS+c |
| `tb_kelle_accumulator` | multi-pass sums, requantisation, saturation |
| `tb_kelle_systolic_evictor` | scores, minimum, candidate masking, carry across groups, against a model |
| `tb_kelle_softmax` | bit-exact fixed-point model plus error bound against real softmax |
| `tb_kelle_edram_bank`, `tb_kelle_kv_cache` | data integrity under refresh, grant only when idle, bank placement of MSB/LSB bytes (KV cache at full 4 MB) |
| `tb_kelle_score_rf`, `tb_kelle_weight_sram` | reads and writes against a shadow copy |
| `tb_kelle_eviction_ctrl` | candidate rule, fill, eviction, popularity vote |
| `tb_kelle_refresh_ctrl` | exact interval timing, refresh only when enabled, each sweep refreshes exactly its group |
| `tb_kelle_scheduler` | operation order, kv_busy, lifetimes |
| `tb_kelle_top` | reduced size (4 x 4 array, 8 slots, short intervals). 40 steps on two heads compared with a full reference model. Each of these must happen at least once: fill, eviction, protection of a low-score initial/recent token, a popular token, MSB and LSB refresh, HST and LST expiry in both controllers, refresh held off by a busy cache, and activation refresh. |
| `tb_kelle_top_full` | every parameter at its default. Loads one head's weights (49152 words), then runs 131 steps from an empty cache and checks y, the slot, the eviction flag and the count exactly. The first 128 steps fill the head's budget and the last 3 evict. A step takes 153 000 to 156 000 cycles; the whole run takes a few minutes of simulation. |

At full size the 131 steps take about 20 million cycles. That is long
enough for several MSB-HST intervals, but the full-size bench does not check
refresh. Refresh, the protection of low-score initial and recent tokens,
and a popular token are all checked at reduced size, with the same RTL.

## Using it for another model

Set `C`, `D` and `H` to the model's dimensions; C must be a multiple of N.
Set `NSLOTS`, `N_SINK` and `N_RECENT` to the eviction budget, and scale
`LH` so that `LH * NSLOTS * D * 4` bytes is the KV eDRAM size. For example,
N' = 512 with a 256-token window gives 16 layer-heads in 4 MB. Adjust the
three shifts to the model's numeric ranges.
