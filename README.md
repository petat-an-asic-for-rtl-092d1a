# PETAT readout logic: time-sorted hit collection over a daisy chain of chips

A PET scanner built from silicon photomultipliers has tens of thousands of
channels. Usually the front-end chips are read out by FPGAs near the detector,
and each FPGA needs its own power, configuration and cabling. PETAT removes
that layer. Every chip has one serial output link and a few serial input links
that speak the same format. A chip merges the records arriving on its inputs
with the hits of its own 32 channels and sends the result downstream. The chips
can be wired as a linear chain, as a binary tree, or as a mix of both. One link
at the end carries the data of the whole group.

What makes this more than a multiplexer is that the merged stream is **sorted
by time stamp**. Each chip sorts its own hits. Each input is already sorted,
because the upstream chip did the same. So the chip only has to forward, again
and again, the oldest of the records at the heads of its FIFOs. Downstream
processing, such as looking for coincidences, then sees a single sorted stream.

This RTL is the digital readout of one chip:

* link receivers and transmitter;
* FIFOs;
* age-based selection of local hits;
* timeout-event generation;
* time correction;
* the time-ordered merger;
* a JTAG configuration port;
* the chip's time counter.

The analog front end, the PLL, the AC-coupled input pads and the shunt
regulator are not included. Their digital signals are ports of the top.

## 1. Records and the link format

Each record is 45 bits (`hit_t` in `petat_pkg`):

| bits  | field | meaning |
|-------|-------|---------|
| 44    | `te`  | 1 = timeout event, 0 = real hit |
| 43:34 | `chip`| ID of the chip that produced it (10 bits, up to 1024 chips) |
| 33:29 | `chan`| SiPM channel inside that chip (32 channels) |
| 28:20 | `amp` | 9-bit ADC amplitude; for a timeout event, status flags |
| 19:0  | `ts`  | time stamp, 20 bits of about 50 ps, wraps every 2^20 bins (about 52 µs) |

The links use 8B10B coding and carry one bit per system clock:

* **Idle:** K28.5 characters, which also act as the comma the receiver
  aligns on.
* **Packet:** a K28.1 start character, then 7 data bytes, least significant
  byte first. The bytes hold the 45-bit record, padded with zeros to 56 bits.

A packet is therefore 8 characters, or 80 clocks. At 312.5 MHz that is 3.9
million records per second per link. This number is the capacity of a whole
readout tree, so everything else is measured against it.

## 2. Inside one chip

```
 sin[0] -> link_rx -> sync_fifo (64) ---------------------+
 sin[1] -> link_rx -> sync_fifo (64) ----------------+    |
                                                     v    v
 ch_valid/ts/amp -> hit_select -> time_corr -> sync_fifo (16) -> time_merge -> link_tx -> sout
                    (TE inject)   (+offset, chip ID)   (src 0)   (TE removal)
 tck/tms/tdi -> jtag_cfg -> synchroniser -> configuration of all of the above
 timebase -> now (to the front end and to hit_select)
```

| module | role |
|--------|------|
| `enc8b10b` / `dec8b10b` | Standard 8B10B tables with running disparity. The decoder recognises data characters and K28.x. |
| `link_tx` | Sends idles, or a packet when the merger offers a record. It accepts a new record only at a character boundary after the previous packet has gone out. |
| `link_rx` | Slides a 10-bit window over the serial input and aligns on the first K28.5. It drops idles and collects the 7 bytes after a K28.1. It then pulses `hit_valid` for one clock. A control character inside a packet aborts the packet and counts an error. |
| `sync_fifo` | First-word-fall-through FIFO. A write into a full FIFO is refused. This sets a sticky overflow flag and increments a drop counter. |
| `hit_select` | One pending register per channel. Releases the oldest pending hit once it is old enough. Injects timeout events (see 3.2). |
| `time_corr` | Adds the chip's configured time offset, modulo 2^20, and writes the chip ID. One register stage. |
| `time_merge` | Waits until every enabled FIFO has a head, then forwards the oldest head (see 3.1). |
| `timebase` | Counter of 3.2 ns clocks. `now = {coarse[13:0], 6'b0}`, so one clock is 64 bins of 50 ps. Cleared by the broadcast reset `sync_rst`. |
| `jtag_cfg` | IEEE 1149.1 TAP with the IDCODE, BYPASS and CONFIG instructions. |
| `petat_top` | Wires one chip together. It also moves the configuration into the system clock domain. |

## 3. Keeping the stream sorted

This is the core of the design. Four rules work together.

### 3.1 Wait for all sources, then take the oldest head

The merger may not forward anything while an enabled source is empty. An
older record could still arrive in that FIFO, and sending a younger one first
would break the order. So `time_merge` stalls until every enabled FIFO has a
head (the `stall` pulse). It then pops the head with the oldest time stamp and
loads it into its output register, at most one record per clock.

* **Ties:** equal stamps go to the lowest source index. The local FIFO is
  source 0. The `tie` pulse marks this case.
* **Unused inputs:** links with no chip behind them must be disabled with
  `src_en`. Otherwise the merger would wait for them for ever.

### 3.2 Local hits: release by age

The channels of the chip deliver hits out of order, because digitisation takes
a variable time. `hit_select` keeps one pending hit per channel. Every clock it
looks at the oldest pending hit and releases it once `now - ts >= age_min`. If
`age_min` is longer than the largest front-end latency, no older hit can still
come, so the local stream leaves in time order.

If a channel fires again while its register is still full, the new hit is
lost. This sets the sticky `lost` output.

### 3.3 Timeout events (TEs)

A quiet input would stall its merger for ever, and the FIFOs of the busy
inputs would overflow meanwhile. To prevent this, `hit_select` sends a timeout
event when nothing has left for `TE_INTERVAL` bins and no hit is ready.

* The TE's time stamp is `now - age_min`. No hit released later can be older,
  so the TE does not break the order.
* `TE_INTERVAL` is 2^18 − 64 bins. So every stream carries at least one packet
  per quarter of the wrap period.
* The TE's amplitude field carries status:
  * bit 0: a local hit was lost;
  * bit 1+i: FIFO i overflowed;
  * bit 8: input-link error.

TEs cost link bandwidth, and in a tree they would accumulate toward the root.
So a chip with `te_drop_en` set removes a TE when its stamp is less than
`TE_DROP_WIN` (2^17 bins) after the last record it forwarded. The TE counts as
consumed for the merge (it is popped), but it is not sent. A TE is dropped only
when a forwarded record lies less than 2^17 bins before it. So, as long as
the inputs carry a packet every 2^18 bins, the output gaps stay below
2^18 + 2^17 bins, under half the period.

### 3.4 Wrap-around

Stamps wrap every 2^20 bins, so "older" is only meaningful for stamps less
than half a period apart. The merger does not compare two heads directly. It
compares how far each lies **after the last forwarded record**:
`(a - last) < (b - last)`, modulo 2^20. Before the first record it uses the
sign of `a - b`.

A head whose stamp lies *before* the last forwarded record is discarded and
counted (`stale_drop`). Forwarding it would put the output out of order. This
does not happen in normal operation, because TEs keep all streams within a
fraction of a period of each other. It does happen in deep chains under heavy
overload: records sit in full FIFOs long enough for the simple signed
comparison to fail. The rule then keeps the output sorted at the cost of a few
records.

## 4. Configuration (JTAG)

The instruction register is 4 bits:

| instruction | code |
|-------------|------|
| IDCODE (selected after reset) | `0001` |
| CONFIG | `1000` |
| BYPASS | `1111` |

The IDCODE value is the parameter `IDCODE`, default `32'h1000_50A1`.

CONFIG is a 59-bit register. It is shifted in least significant bit first and
takes effect on Update-DR. Capture-DR loads the current value, so the register
can be read back.

| bits  | field | reset value |
|-------|-------|-------------|
| 58:49 | `chip_id`    | 0 |
| 48:41 | `src_en`, one bit per merger source (bit 0 = local FIFO, bit 1+i = input link i) | `8'h01` |
| 40    | `te_drop_en` | 0 |
| 39:20 | `ts_offset`, added to local time stamps | 0 |
| 19:0  | `age_min`, release age in bins | 4096 (64 clocks) |

The register lives in the TCK domain. On every update it flips a toggle. The
core synchronises the toggle through two flops and copies the whole register
when it sees a change. The register is stable by then. After `rst_n` the core
also copies it once, so the reset values apply without any JTAG access.

## 5. Timing and throughput

| item | value |
|------|-------|
| System clock | 312.5 MHz in the intended system; one clock = 64 time bins |
| Link | one bit per clock, 80 clocks per record, 3.9 M records/s |
| Merger | up to one record per clock; the output link is the bottleneck |
| Per-chip latency | at least 80 clocks: a record enters the FIFO only after its whole packet has arrived. The merger and FIFO add a few clocks. The transmitter waits for the next character boundary. |
| Local hit latency | `age_min` plus a few clocks |

## 6. Behaviour of chains and trees

The testbench `tb_workload_64chips` builds two systems of 64 chips at default
parameters:

* a linear chain: chip i takes chip i−1 on link 0;
* a binary tree: chip k takes chips 2k+1 and 2k+2.

All chips are configured over JTAG, and both systems get the same uniformly
random hits.

| offered load (of one link's capacity) | chain received | tree received |
|---------------------------------------|----------------|---------------|
| 0.9 | 100.0 % | 100.0 % |
| 2.0 | 56.8 % | 54.6 % |

The output stays time-sorted in every case. Below capacity, a link can
therefore be filled almost to its limit, in either topology.

In overload, the losses in this design are spread nearly evenly. Per group of
8 chips, the chain keeps 52–61 % and the tree 48–60 %. This is **not** the
picture reported for the original chip, where chips near the output end of a
chain clearly did better than upstream ones. Possible reasons, none of them
verified:

* uniform hits instead of a scanner geometry;
* deeper link FIFOs;
* the strict oldest-first merge, which is fair in time rather than in
  position.

`tb_workload_topology_c` builds the mixed topology: eight groups of eight
chips. Each group is a small binary tree, and a group's root feeds a leaf of
the next group, so the groups form a chain. It received 100.0 % of the hits at
0.9 load. At 2.0 load it received 58.5 %, with every group between 55 % and
61 %.

Smaller systems are exercised by `tb_petat_top`. It runs three chips at full
default size, first as a tree (A and B into C), then as a chain, then in
overload.

## 7. Where this RTL departs from the original design, and own choices

The published description gives the architecture and the main numbers:

* 20-bit 50 ps stamps;
* 8B10B with 8 characters per hit;
* 312.5 MHz;
* 32 channels;
* a TE at least every quarter period;
* waiting for all FIFOs and taking the oldest head;
* TE removal downstream;
* JTAG configuration.

Everything below was chosen here:

* **Record layout and width:**
  * field order;
  * 10-bit chip ID and 5-bit channel;
  * TE flag as the top bit;
  * 11 padding bits in the 56-bit payload.
* **Link characters:**
  * K28.5 idle and K28.1 packet start;
  * least significant byte first;
  * bit-synchronous sampling with the system clock, with no clock recovery;
  * alignment on any K28.5.

  The real chip's link start-up sequence is not described and is not
  modelled.
* **FIFO depths:**
  * 64 per input link;
  * 16 for the local hits, which are described only as "shorter".

  With 16-deep link FIFOs the 64-chip tree lost 1.4 % of its hits at 0.9 load.
* **Hit selection:** one register per channel, a programmable minimum age,
  and a TE stamp of `now - age_min`.
* **TE removal:** the window rule with `TE_DROP_WIN`. The description only
  says TEs are removed "when enough real events are available".
* **Wrap handling:** comparison relative to the last forwarded record, and
  discarding of stale records (section 3.4).
* **Time correction:** a constant per-chip offset. It is applied after the
  selection, which does not change the order.
* **JTAG:** instruction codes, IDCODE and register map.
* **Configuration transfer:** the toggle synchroniser and the copy at reset.
* **Broadcast reset:** the fast broadcast protocol that resets the time
  counters is not described. Only its effect, `sync_rst`, is a port.
* **Off-chip FPGA stage:** the final FPGA stage (epoch extension,
  coincidence filtering, clustering) is off-chip and not part of this RTL.
* **Chain overload:** as section 6 says, the uneven loss along an overloaded
  chain is not reproduced.

## 8. Simulating

Every testbench is self-checking. Each one ends with a line
`TB_RESULT checks=<n> failures=<m>`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Mdir obj_tb_petat_top \
    rtl/petat_pkg.sv tb/tb_petat_top.sv -y rtl --top-module tb_petat_top
./obj_tb_petat_top/Vtb_petat_top
```

Replace `tb_petat_top` with any other testbench in `tb/`. Modules are found in
`rtl/` through `-y`, and the package must come first.

| testbench | what it checks |
|-----------|----------------|
| `tb_enc8b10b`, `tb_dec8b10b` | Symbols from the standard tables, including the alternate D.x.7 form. A long random stream is checked for disparity and run length. The decoder gets every data byte and K28.1/.5/.7 in both disparities, and must flag invalid symbols. |
| `tb_link_tx`, `tb_link_rx` | Packet format and the 80-clock spacing. Alignment at a random bit offset. A 12-bit dropout inside packets must be counted as an error and never deliver a corrupted record. |
| `tb_sync_fifo` | Against a queue model, including overflow. |
| `tb_hit_select` | Release order, the age rule, TE spacing and lost hits. |
| `tb_time_corr`, `tb_timebase` | Offset arithmetic and wrap; counting and the broadcast reset. |
| `tb_time_merge` | Order, ties, stalls, TE removal, wrap, stale records. |
| `tb_jtag_cfg` | TAP states, IDCODE, BYPASS, CONFIG write and read-back. |
| `tb_petat_top` | Three full-size chips end to end. Sorting, TE insertion and removal, ties, stalls, overflows, time-stamp wrap and configuration are each counted, and a mechanism that never occurred counts as a failure. |
| `tb_workload_64chips` | The 64-chip chain and tree of section 6. Takes a few minutes. |
| `tb_workload_topology_c` | 64 chips as chained groups of trees (section 6). |

Compile times are short except for the 64-chip testbench, which takes about two
minutes to build and one to run.

## 9. Verification status and limits

All testbenches pass. Each block's testbench was also run against a
deliberately broken copy of the block and reported failures. Known limits:

* No gate-level or timing analysis was done.
* 312.5 MHz is the intended clock, not a verified one.
* The receiver assumes the same clock as the sender, with no phase
  difference.
* Only 8B10B code errors are detected, not disparity errors.
