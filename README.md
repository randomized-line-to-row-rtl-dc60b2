# Rubix: randomized line-to-row mapping in the memory controller

Rowhammer mitigations act on *hot rows*. A hot row is a DRAM row that is
activated often enough within one refresh window to reach the Rowhammer
threshold. The usual memory-controller mapping puts many lines that are
neighbours in the address space into the same 8 KB row. This is done on
purpose, for row-buffer hits, but it lets one hot page make a hot row, and
ordinary programs then trigger mitigations (refreshes, throttling, row
migrations) all the time.

Rubix removes that cause. It scrambles the mapping from line address to
DRAM row, so that each row holds only a few small groups of unrelated
lines. Even at thresholds as low as 128 activations, hot rows become rare
in benign programs, and whatever mitigation sits behind the controller is
seldom invoked. Rubix keeps a little spatial locality on purpose. Lines are
moved in *gangs* of 2^k consecutive lines (4 by default), so a gang still
shares one row and gives a few row-buffer hits.

This RTL implements the two flavours:

* **Rubix-S (static):** the gang address is encrypted once with a block
  cipher keyed at boot. It adds 3 cycles and stores only a key.
* **Rubix-D (dynamic):** the gang address is xor-ed with per-group keys
  that keep rolling forward. Gangs are swapped in DRAM one pair at a time,
  at a rate of 1% of activations. It adds one cycle and about 250 bytes of
  registers. Its mapping changes all the time, so an attacker cannot learn
  it and keep using it.

## Address fields

A 16 GB memory of 64-byte lines has a 28-bit line address. From bit 0 up:

| bits    | field          | width (default) | role |
|---------|----------------|-----------------|------|
| [1:0]   | line-in-gang   | k = 2           | never changed: the 4 lines of a gang stay together |
| [6:2]   | gang-in-row    | p = 5           | Rubix-D only: selects the v-group (one of 32) |
| [27:7]  | row            | 21              | Rubix-D only: the part that is remapped |

Rubix-S treats everything above the line-in-gang bits, 26 bits, as one gang
address and encrypts it. Rubix-D keeps both low fields and remaps only the
21 row bits. Each gang-in-row slot has its own keys. A *v-group* is the set
of gangs at the same slot in every row. So the gangs that sat together in
one row under the plain mapping go to unrelated rows.

The DRAM scheduler downstream still sees an ordinary line address. Which
bits it takes as bank, row and column is up to it. The fields above describe
the rows of the baseline mapping (128 lines per 8 KB row).

## Rubix-S: an encrypted gang address (`rubix_s`, `gang_cipher`)

`rubix_s` splits off the k low bits and sends the remaining n-k bits
through `gang_cipher`. It then joins the encrypted gang address to the
untouched low bits. Any permutation would do. What matters is that it is
keyed and is a bijection on exactly n-k bits, so every gang lands somewhere
and no two collide.

The original scheme names a specific low-latency cipher of programmable
width, whose internals come from separate work. Those internals are not
reproduced here. `gang_cipher` is a stand-in with the same width, key size
and latency:

* an unbalanced Feistel network over an arbitrary width W;
* the word split into halves of ceil(W/2) and floor(W/2) bits, with the
  roles of the halves alternating;
* 12 rounds, 4 per pipeline stage, 3 stages, so a 3-cycle latency;
* a round function `f(x) = t ^ (rotl1(t) & rotl8(t)) ^ rotl2(t)`, where
  `t = x ^ round_key`;
* round key i equal to the 96-bit key rotated left by 7*i and cut to width,
  xor i.

This stand-in is a permutation for every key and width, and the testbench
checks that exhaustively on an 8-bit instance. **It is not a vetted cipher. Do
not rely on it for security.** Replace it with a real one of the same width
before using Rubix-S where the mapping must stay secret.

The key is set at boot. After reset, `rubix_s` takes two 64-bit words from
the PRNG and keeps 96 bits. `key_ready` rises two cycles after reset.
Requests are refused until then. The pipeline is valid/ready. The whole
pipeline stalls while its output is held. The request tag (write flag and
write data) travels alongside the address.

## Rubix-D: rolling xor keys (`rubix_d`, `xor_remap`, `remap_trigger`, `gang_swap_engine`)

### Translation

Each v-group g holds three registers:

* `currKey`: the key of the current placement;
* `nextKey`: the key being rolled in;
* `Ptr`: how far the roll has got.

The translation of a row address L (`xor_remap`, combinational) is:

```
L1 = L  ^ currKey[g]
L2 = L1 ^ nextKey[g]
physical row = (L1 < Ptr[g] || L2 < Ptr[g]) ? L2 : L1
```

At Ptr = 0 this is a plain xor with currKey. Once Ptr has passed all rows,
every line sits at `L ^ currKey ^ nextKey`. The two comparisons cover the
two halves of each swapped pair.

`rubix_d` registers the translated address, so it adds 1 cycle.

### Episodes

`remap_trigger` watches the activations reported by the scheduler. For each
one it draws a 16-bit random number. If the number is below `RR_THRESH`
(655/65536, about 1%), it starts an *episode* for the activated row's
v-group. An episode works as follows:

1. Set P = Ptr and D = P ^ nextKey.
2. If D > P, the gangs in physical rows P and D of this v-group trade
   places. `gang_swap_engine` does this:
   * it reads the 4 lines of P and the 4 lines of D into an 8-line buffer;
   * it writes each gang to the other's location;
   * in total: 8 reads and 8 writes, all on the controller's normal memory
     port.
3. If D <= P, the pair was already swapped earlier in this roll (or
   nextKey is 0). Nothing moves.
4. Ptr increments.
5. When Ptr has covered all 2^21 rows, the *epoch* ends:
   * `currKey ^= nextKey`;
   * `nextKey` gets a fresh PRNG value;
   * `Ptr = 0`.

### A worked example

Take 8 rows (3-bit row addresses), `currKey = 010` and `nextKey = 110`.
Line L starts at L ^ 010, so location 000 holds line 010.

* **Ptr = 0:** location 000 is swapped with 000 ^ 110 = 110. Location 000
  now holds line 100, location 110 holds line 010, and Ptr becomes 1.
  * Line 100 translates to L1 = 110, which is not below Ptr = 1.
  * But L2 = 000 is below Ptr, so line 100 is found at 000.
* **Ptr = 1:** 001 and 111 trade places, so location 001 holds 101 and
  location 111 holds 011.
* **Ptr = 2 to 7:** location 010 pairs with 100, and 011 with 101. Those
  pairs are swapped at Ptr = 2 and 3. At Ptr = 4 to 7 the partner is
  smaller, so those episodes move nothing.
* **End of the epoch:** every line L is at L ^ 100. That becomes the new
  currKey.

`tb/xor_remap_tb.sv` replays this example and checks every line at every
Ptr.

### Keeping requests and swaps consistent

A swap moves data that requests in flight may be aiming at. `rubix_d`
therefore runs an episode as a small state machine:

1. `RD_IDLE`: requests are accepted.
2. On a draw, it latches the v-group, P and D and stops accepting requests.
3. `RD_DRAIN` waits until its own output register is empty and the caller
   reports that nothing issued earlier is still outstanding (`drained`;
   `rubix_top` counts reads in flight).
4. `RD_SWAP` runs the swap engine, which owns the memory port until it
   finishes.
5. `RD_ADVANCE` bumps Ptr, or ends the epoch.

Because Ptr moves only after both gangs are written back, a request sees
either the old or the new placement of a gang, never half of each. A draw
that comes while an episode is under way is dropped (`ev_drop`). The episode
rate therefore falls slightly below 1% under heavy traffic.

### v-segments

With `SEG_BITS = s > 0`, each v-group is cut into 2^s v-segments. A segment
takes every 2^s-th row, chosen by the low s row bits. Each segment has its
own keys and Ptr, and only the row bits above the segment field are
remapped. An epoch then takes 2^(21-s) episodes instead of 2^21. The
default is `SEG_BITS = 0`, the configuration used for the performance
results. `SEG_BITS = 5` is the 32-segment option.

### Boot

After reset, `rubix_d` fills currKey and nextKey for every v-group (or
segment) from one PRNG word each, one per cycle. All Ptrs start at 0.
`init_done` rises after 2^(p+s) cycles, which is 32 by default.

## The random numbers (`prng`)

Both keys and remap draws come from `prng`, a 64-bit xorshift generator
(shifts 13, 7, 17) that advances on request. Its seed is an input sampled at
reset. A zero seed is replaced by a fixed constant, because xorshift would
stay at zero. The trigger uses its own generator, so that remap draws and
key values are independent streams. Any good hardware random source can
replace it. For real deployment the seed should come from a true-random
source.

## Top level (`rubix_top`)

`rubix_top` contains both mappers. The strap `cfg_dynamic` selects one: it
must be stable from reset onward. Switching at run time would need all data
moved, so it is not supported.

| port group | direction | meaning |
|------------|-----------|---------|
| `clk`, `rst_n` (async, active low) | in | |
| `seed[63:0]` | in | PRNG seed, sampled at reset |
| `cfg_dynamic` | in | 0 = Rubix-S, 1 = Rubix-D |
| `ready` | out | the selected mapper has its boot keys |
| `host_req_{valid,ready,write,addr,wdata}` | in / out | requests from the cache side, line address before remapping |
| `host_rsp_{valid,rdata}` | out | read data, in request order, no back-pressure |
| `mem_req_{valid,ready,write,addr,wdata}` | out / in | remapped requests to the DRAM scheduler |
| `mem_rsp_{valid,rdata}` | in | read data from DRAM, in order |
| `act_valid`, `act_addr` | in | each row activation the scheduler performs (physical line address) |
| `ev_swap`, `ev_skip`, `ev_drop`, `ev_epoch`, `ev_stall` | out | one-cycle event pulses for counters |

Latency from `host_req` to `mem_req` is 3 cycles with Rubix-S and 1 cycle
with Rubix-D, plus any stall. During a Rubix-D swap the memory port carries
the swap engine's 16 accesses, and their read data is kept away from
`host_rsp`. `host_rsp_rdata` is wired straight from `mem_rsp_rdata`. Only
the valid is gated.

The design assumes that the memory returns reads in the order they were
issued. It also assumes that writes accepted on `mem_req` are ordered with
later reads to the same address. An out-of-order scheduler must give that
guarantee, or tag its responses and count completions for `drained`.

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `LINE_ADDR_W` | 28 | line address bits (16 GB of 64 B lines) |
| `GANG_BITS` | 2 | k: lines per gang = 2^k (GS4) |
| `GIR_BITS` | 5 | p: gang slots per row, so 2^p v-groups |
| `SEG_BITS` | 0 | s: v-segments per v-group = 2^s |
| `LINE_BITS` | 512 | data bits per line |
| `RR_THRESH` | 655 | remap probability per activation, out of 65536 |

The cipher width follows from the address fields: `LINE_ADDR_W - GANG_BITS`
= 26. The Rubix-D row field is `LINE_ADDR_W - GANG_BITS - GIR_BITS` = 21.
Gang sizes 1 and 2 (GS1, GS2) use `GANG_BITS = 0/1` with
`GIR_BITS = 7/6`, keeping 128 lines per row.

At the defaults, a generic yosys synthesis of `rubix_top` gives:

* about 400 cells;
* 1,672 flip-flop bits;
* 7,604 bits of memory arrays, mostly the Rubix-D key/Ptr tables
  (32 x 63 = 2,016 bits) and the 8-line swap buffer (4,096 bits).

## What the randomization does to hot rows

`tb/rubix_top_kernels_tb.sv` runs a small experiment through `rubix_top`. The
memory is 4 GB in one bank with 4 KB rows (64 lines). Three kernels each
make 1M reads over a 4 MB footprint (64K lines):

* `stream` reads the lines in order;
* `stride-64` reads one line of each 4 KB page in turn;
* `random` reads a uniformly random line.

A row with 64 or more activations counts as hot. Measured with the
behavioural open-page memory, with single-line gangs (GS1):

| kernel    | plain mapping | Rubix-S | Rubix-D (host reads) | Rubix-D (with swap traffic) |
|-----------|---------------|---------|----------------------|-----------------------------|
| stream    | 0             | 0       | 0                    | about 150                   |
| stride-64 | 1024          | 0       | 0                    | about 150                   |
| random    | 1024          | 0 to 1  | 0                    | about 150                   |

Under the plain mapping, the 64 lines of a page share a row, so every
access of stride-64 or random adds up on one of only 1024 rows. Scrambled,
the footprint lands in about 63,500 distinct rows. A row then holds 1 to 3
of the kernel's lines, each read about 16 times, and stays below the
threshold.

The same run with larger gangs shows the price of row-buffer locality:

* **GS2:** stride-64 and random leave 34 and 183 hot rows under Rubix-S.
  Under Rubix-D they leave none, from host reads.
* **GS4:** each gang collects the activations of its 4 lines, about 61 in
  this run. Many gangs cross the threshold on their own: about 4,100 hot
  rows for stride-64 and 6,000 for random, in either flavour.
* **Stream:** stays at 0 for every gang size, because a gang is read in
  one burst.

The last column is an observation, not a target. Every v-group starts its
roll at Ptr = 0, and all v-groups advance at about the same pace. So the
swap sources of all 64 v-groups are the same few physical rows, and each
such row takes two activations per v-group as the pointers pass. Packing
1M activations into one bank makes this show. Starting the v-groups at
different Ptr values, or with different rates, would spread that traffic.
This RTL does not do it, because the original scheme does not call for it.

## Where this RTL departs from the original proposal

* **The cipher** is a stand-in Feistel network with the published width,
  key size and latency. It is not the original cipher (see above).
* **The PRNG algorithm, its seeding and the form of the 1% draw** (a 16-bit
  compare) are this design's own choices. Only "a hardware PRNG" and "1% of
  activations" are given.
* **Epoch-end key.** The worked example, as originally drawn, shows the new
  currKey as the old nextKey. The rule in the text is currKey xor nextKey.
  This RTL follows the xor rule, the only one under which lines are found
  where the swaps left them. The testbenches check it.
* **Stall, drain and drop policy.** How translation and a swap in progress
  are kept consistent is not specified. The stall, the wait for drain and
  the dropping of overlapping draws are this design's own choices.
* **Segment storage.** The 32-segment configuration is quoted at about
  16 KB of metadata. Here it takes 32 x 32 x (16 + 16 + 16) bits, about
  6 KB, because each segment's key and Ptr fields are only as wide as the
  row bits they cover.
* **Not included:**
  * the DRAM devices;
  * the DRAM scheduler (bank/row/column decode, FR-FCFS);
  * the Rowhammer mitigations that Rubix is meant to relieve;
  * the cores and caches.

  `rubix_top` exposes the ports where they connect. The testbenches use a
  small behavioural memory (`tb/mem_model.sv`) that reports an activation
  whenever the row changes.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `prng_tb` | the xorshift sequence against an independent model, zero-seed handling, hold when not advancing |
| `gang_cipher_tb` | bijection over all 256 inputs of an 8-bit instance, the 26-bit instance against an integer model, 3-cycle latency, stall, key sensitivity |
| `xor_remap_tb` | the worked example, random 6-bit rolls over 3 epochs, the 21-bit formula |
| `remap_trigger_tb` | over 200,000 activations the firing rate is 1% (and 50% at threshold 32768); never fires without an activation |
| `gang_swap_engine_tb` | the 16 accesses, data exchange, busy time `4*2^k + 1` cycles with an ideal memory |
| `rubix_s_tb` | mapping against a model, 3-cycle latency, back-pressure, bijection |
| `rubix_d_tb` | data integrity through thousands of swaps and many epochs at small sizes: no segments, 4 segments, GS1 |
| `rubix_top_tb` | both modes end to end with a random-ready memory; counts that each mechanism (stall, back-pressure, swap, skip, drop, epoch) happened; a third run with 32 v-segments at the full 28-bit width |
| `rubix_top_kernels_tb` | the hot-row experiment above; every read is also checked for data |
| `rubix_top_full_tb` | `rubix_top` at every default (28-bit addresses, 512-bit lines): 4,096 gangs of data, 20,000 random requests, about 200 swaps in Rubix-D mode |

At full size, an epoch takes 2^21 episodes per v-group, which is about
2 x 10^8 activations at 1%. That is not reachable in simulation. The
smaller testbenches cover epochs instead.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/rubix_pkg.sv tb/rubix_top_tb.sv --top-module rubix_top_tb
./obj_dir/Vrubix_top_tb
```

Replace `rubix_top_tb` with any testbench name from the table. The
simulator is 2-state, so every register the logic reads is reset.
