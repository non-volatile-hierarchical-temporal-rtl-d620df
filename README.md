# NVHTM: an HTM spatial pooler in the data path of a flash SSD

The spatial pooler of Hierarchical Temporal Memory (HTM) turns a binary input
vector into a sparse distributed representation (SDR): a small set of
"columns" that win a competition over the input. Each column has one proximal
segment, a vector of permanences with one entry per input bit. A synapse is
*connected* when its permanence is at or above a threshold `P_th`. The
column's overlap is the number of connected synapses whose input bit is set.
Overlaps below a minimum `A_th` are discarded. The rest are multiplied by a
per-column boost factor, and the columns with the largest boosted overlaps
become active (global inhibition). Learning then nudges the permanences of
the active columns towards the input, and updates each column's duty cycles
and boost factor.

The idea of this design is to leave the segments where they are stored. Every
column's proximal segment is one flash page, and the arithmetic is placed in
the SSD's own read and write paths. A page streams out of a flash channel one
16-bit word per clock. A small pipeline counts the overlap as the words go
by, so the pooler adds only tens of cycles to a read that already takes
hundreds. Learning works the same way in the write path: a page is re-read,
updated word by word and written back. The network can therefore be as large
as the flash. The RTL here is the datapath only. The SSD controller, DRAM,
flash devices and host link are not included; their signals are ports of the
top module.

## Block map

```
 flash ch 0 ──► ovpipe ─┐                        ┌─► sdr (to packet formatter)
 flash ch 1 ──► ovpipe ─┼─► charb ──► inheng ────┤
   ...                  │  (boost,   (insertion  │ queue indexes
 flash ch N-1 ► ovpipe ─┘  arbitrate) sort)      ▼
                                       controller ─► wbcntl = camharb ► wbcam ► camhit
                                                                              │ hit / timeout
 segment cache ──► wbpipe (per channel) ◄─────────────────────────────────────┘
                     └──► flash write
```

| file | block | role |
|---|---|---|
| `rtl/nvhtm_pkg.sv` | – | widths, number formats, record types, configuration struct |
| `rtl/ovpipe.sv` | OVPipe | per-channel overlap accumulator and request |
| `rtl/charb.sv` | Charb | channel arbiter, boost multiplier, back-pressure |
| `rtl/rr_arbiter.sv` | – | round-robin arbiter used by Charb and Camharb |
| `rtl/inheng.sv` | Inheng | insertion-sort inhibition queue |
| `rtl/camharb.sv` | Camharb | CAM request arbiter |
| `rtl/wbcam_unit.sv`, `rtl/wbcam.sv` | WBCam | chained CAM compare units |
| `rtl/camhit.sv` | Camhit | per-channel hit / timeout detector |
| `rtl/wbcntl.sv` | WBCntl | Camharb + WBCam + Camhit |
| `rtl/wbpipe.sv` | WBPipe | per-channel duty cycle / boost / permanence update |
| `rtl/nvhtm_top.sv` | top | everything wired together |

## Page layout and number formats

A proximal segment page is `3 + P_LEN` words of `C_W = 16` bits:

| word | content | format |
|---|---|---|
| 0 | overlap duty cycle `D_O` | unsigned Q12.4, in overlap counts |
| 1 | active duty cycle `D_A` | unsigned Q0.16 (0xFFFF ≈ 1) |
| 2 | boost factor `β` | unsigned Q8.8 (0x0100 = 1.0) |
| 3 … 3+P_LEN−1 | permanence of synapse j (input bit j) | unsigned Q0.16 |

The three header words come first, in this order. The formats are this
implementation's choice; only the value ranges come from the algorithm
(permanences in [0, 1], boost ≥ 1). Column indexes are `CIDX_W = 24` bits.

## Inference: overlap, boost, inhibition

**OVPipe** (one per channel) gets `page_start` with the column index, then
the page beats (`rd_valid`/`rd_data`; gaps are allowed). For each permanence
beat it compares the word with `P_th`. It picks input bit `X_t[j]` with a
pointer that counts the beats, and adds one when both are true. The header
boost word is kept. One cycle after the last beat, the overlap is written to
the overlap table port (`tbl_*`; the value is 0 when below `A_th`). If
`alpha' ≥ A_th`, the record `{alpha', β, index}` goes to the output register
and `d_req` rises. The unit can accumulate the next page while the previous
record waits for its grant. If a second page finishes before that grant,
`in_ready` (`rd_ready` at the top) drops, and the controller must not start
another page.

**Charb** grants one requesting channel at a time, round robin. It captures
the record and multiplies `alpha' × β`; the product is shifted right by 8 and
saturated to 16 bits. The result is offered to the inhibition engine. While
the engine is sorting, the record stays in Charb's stage register and no new
grant is issued. This back-pressure stalls the pipes upstream. An empty stage
still accepts a record, so gaps fill up.

**Inheng** is the hardest block to follow. It is a queue of `INH_DEPTH`
registers `D_0 … D_(DEPTH−1)`, each holding `{valid, boosted overlap, index}`.
The queue is kept in descending order, with the valid entries packed towards
`D_0`. Each register has a three-way multiplexer steered by a 2-bit code
`M_i`: bit 1 is the direction (0 = from the left neighbour or the input,
1 = from the right neighbour) and bit 0 is the enable.

* *Load*: all `M_i = 01`. Every entry shifts one place right, and the new
  entry enters `D_0`. The entry pushed out of the last register is invalid
  or the smallest one held.
* *Sort*: the new entry sits at position `p`. If `D_(p+1)` is valid and
  larger, `M_p = 11` and `M_(p+1) = 01` swap the two, and `p` moves on. This
  is one swap per cycle, and it stops at the first cycle in which no swap is
  possible.
* *Overflow*: if the queue is full and the new overlap is not larger than
  `D_(DEPTH−1)`, the entry is dropped at once (`inh_dropped`), and the queue
  is not disturbed.

One insertion therefore takes between 2 and `DEPTH + 1` cycles, and
`in_ready` is low meanwhile. A page takes about 790 cycles, so the engine
keeps up with 8 channels with room to spare. When the last column has been
processed, the valid entries (`sdr`) are the active columns. On equal
overlaps, the newer entry is kept ahead, and an equal entry is dropped from a
full queue. `xt_load` (a new input vector) clears OVPipe, Charb and Inheng.

## Learning: who learns, and how

Learning runs after inference, using the queue left in Inheng. The
controller re-reads every page. For each one, it first asks the CAM whether
the column is active:

1. The channel raises `cam_req` with the column index. **Camharb** grants one
   channel per cycle and registers `{channel id, index}`. It has no
   back-pressure, because the CAM accepts one item every cycle.
2. **WBCam** is a chain of `INH_DEPTH` compare units. Unit *k* compares the
   item with the index of queue entry *k*, qualified by that entry's valid
   bit. When unit *k* hits, the item is invalidated before unit *k+1*, so it
   cannot also be reported as a miss. An item that leaves the chain still
   valid goes through one more register and is reported as a timeout.
3. **Camhit** matches the channel id at every tap. It raises `chhit[ch]`
   2+k cycles after the grant (hit in entry *k*), or `chtimeout[ch]`
   2+`INH_DEPTH` cycles after the grant. Each channel may have only one index
   in flight, so the answer is unambiguous.

The same pulse sets or clears the channel's WBPipe learning flag (`active`).

**WBPipe** then gets the page. `d_dest` steers each input word, and `d_src`
picks each output word:

| step | input (`d_dest`) | what happens |
|---|---|---|
| seg_start | – | reset the synapse pointer and the header word order |
| word 0 | `DEST_DUTY` (D_O) | starts the duty cycle pipe |
| word 1 | `DEST_DUTY` (D_A) | |
| word 2 | `DEST_BOOST` (β) | kept in the old-boost staging register |
| wait | – | `duty_done` rises 5 cycles after word 0 |
| out | – | controller writes `SRC_DO`, `SRC_DA`, then `SRC_BNEW` if `boost_upd` else `SRC_BOLD` |
| words 3… | `DEST_SEG` | updated permanence on `dout` (`SRC_SEG`) one cycle later |

The update rules, with the host-computed constants
`y1 = (τ−1)/τ`, `y2 = 1/τ`, `y3 = (1−β_max)/D̃_A`, `y4 = β_max`,
`y5 = P_th/10`, `y6 = P_inc`, `y7 = P_dec` and `y8 = P_inc + P_th/10`:

```
D_O' = D_O·y1 + alpha·y2            alpha = overlap from the table (pre-boost)
D_A' = D_A·y1 + (active ? y2 : 0)
β'   = y4 + y3·D_A'                 used only if D_A' < D̃_A (boost_upd)
weak = D_O < D̃_O  (old D_O)         wk = weak and c > 0
c'   = active &  x :  c + (wk ? y8 : y6)
       active & !x :  c − y7 + (wk ? y5 : 0)
      !active      :  c + (wk ? y5 : 0)          saturated to [0, 0xFFFF]
```

These rules need no divider. The duty cycle pipe has a single multiplier,
which it uses in four consecutive cycles: `D_O·y1`, `alpha·y2`, `D_A·y1` and
`y3·D_A'`. `y3` is negative; it is stored as signed Q12.4, and
`β' = y4 + (y3·D_A') >>> 12`.

## Configuration (`cfg_t`)

`p_th`, `a_th`, `y1` … `y8`, `da_min` (`D̃_A`, Q0.16) and `do_min`
(`D̃_O`, Q12.4). The host precomputes them. They are held constant during
operation.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_CH` | 8 | the 8-channel configuration of the design |
| `C_W` (package) | 16 | 16-bit flash channel |
| `CIDX_W` (package) | 24 | 24-bit column index |
| `P_LEN` | 784 | input bits = synapses per segment; 28×28 MNIST images |
| `INH_DEPTH` | 16 | active columns kept by inhibition; chosen, about 2 % of 784 columns |

With the defaults, one 784-column network fits: each page is 787 words
(1574 bytes), far below a 32 kB flash page. The number of columns is limited
only by the flash and by the 24-bit index.

## Where this RTL departs from, or adds to, the description it follows

* The description defines a ninth constant, `y9 = P_dec + P_th/10`. Its own
  update equations give `c − P_dec + P_th/10` for an active column with an
  inactive input and a weak duty cycle. The RTL follows the equations and has
  no `y9`.
* The overlap duty cycle is updated with the pre-boost overlap written by
  OVPipe to the overlap table. The algorithm text is ambiguous here, calling
  it both the "pre-inhibited" and the "post-inhibition" overlap.
* The weak-column test uses the old `D_O` from the page header. The boost
  test uses the newly computed `D_A'`.
* Accepting or rejecting the new boost is left to the controller, as a
  choice of `d_src`; WBPipe only raises `boost_upd`.
* The following are all choices of this RTL: the arbitration order (round
  robin), all number formats, the reset (synchronous, active low), the
  `page_start` / `in_ready` handshake, the tie rules in Inheng, and a single
  X_t register shared by all channels.
* Only global inhibition is built. Local inhibition radii are not.
* The original work also reports area and power from a 180 nm full-custom
  layout. Nothing here reproduces those numbers.

## Verification

Each block has a self-checking testbench in `tb/` that compares the block
with values computed independently in the testbench. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_ovpipe`, `tb_charb`, `tb_inheng`, `tb_camharb`, `tb_wbcam`,
  `tb_camhit`, `tb_wbcntl`, `tb_wbpipe`: random stimulus, reference models,
  latency checks (table write 1 cycle after the last beat, duty results
  5 cycles after `D_O`, CAM answers at 2+k and 2+DEPTH cycles, at most
  DEPTH+1 busy cycles per Inheng insertion).
* `tb_nvhtm_top`: end to end at a reduced size (8 channels, 8 input bits,
  8-entry queue, 64 columns). The testbench plays the controller, the flash
  and the DRAM. It checks every overlap table entry, the SDR, every CAM
  answer and every written-back word. It also requires each mechanism to
  occur: Inheng back-pressure, queue overflow drops, `A_th` filtering, CAM
  hits and timeouts, boost taken and rejected, weak boosting, permanence
  saturation, and an OVPipe read stall.
* `tb_nvhtm_full`: the same test at the default size (784 inputs,
  784 columns, 16-entry queue, 8 channels). One inference takes about 77 k
  cycles and one learning pass about 79 k. The OVPipe stall cannot happen at
  this size and is not required.

Running one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/nvhtm_pkg.sv \
          tb/tb_nvhtm_full.sv --top-module tb_nvhtm_full -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. Each testbench has a
watchdog that reports a failure if the run does not finish.
