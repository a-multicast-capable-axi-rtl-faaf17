# Multicast-capable AXI crossbar

Many-core machine-learning accelerators spend a large share of their on-chip
bandwidth sending the *same* data to many places. In a tiled matrix
multiplication, for example, every compute cluster needs the same block of
columns of the right-hand matrix. With an ordinary AXI interconnect, the
source has to write that block once per destination. This crossbar lets one
AXI write burst go to many slaves at once. The master sends the burst once.
The crossbar copies the AW request and every W beat to all addressed slaves,
then merges their B responses into one. The AXI protocol is unchanged except
for a mask carried in the AW `user` field, so a master or slave that knows
nothing about multicast still works as before.

This RTL implements the write path (AW, W, B) of an N-to-M crossbar with this
extension. The default size is 16 x 16 ports with 512-bit data. The read path
(AR, R) never multicasts and is not included; see "Departures and limits".

## 1. Addressing a set of locations with one address

A multicast write carries an ordinary address plus a mask as wide as the
address. A mask bit set to 1 makes the matching address bit "don't care", so
both 0 and 1 are addressed. With *n* mask bits set, the pair addresses 2^n
locations. Examples on three bits:

| address | mask | addressed set |
|---------|------|---------------|
| `101`   | `011` | 4, 5, 6, 7 (contiguous) |
| `110`   | `100` | 2, 6 (strided) |

Not every set can be written this way. However, the encoding is only twice
the width of an address, however many destinations it names. That is what
makes it fit a machine with hundreds of cores. In the target accelerator,
clusters sit at `0x0100_0000 + k * 0x4_0000`. Masking address bits 22:18
therefore selects any aligned group of 2, 4, 8, 16 or 32 clusters, at the
same offset inside each cluster.

## 2. Address decoding (`mcast_addr_decode`)

The address map is a list of rules `{idx, start_addr, end_addr}`, each mapping
the interval `[start, end)` to master port `idx`. Every rule must be a power
of two in size and aligned to its size. The decoder then rewrites each rule
in mask form:

```
rule.addr = start_addr
rule.mask = end_addr - start_addr - 1
```

A request `(req.addr, req.mask)` hits a rule when, at every bit position,
either side masks the bit or the two addresses agree:

```
hit = &( req.mask | rule.mask | ~(req.addr ^ rule.addr) )
```

For every port that is hit, the decoder also returns the part of the request
that falls inside the port. That part is again an address+mask pair. Bits
that the request masks but the rule fixes are resolved to the rule's value:

```
out.mask = req.mask & rule.mask
out.addr = (~req.mask & req.addr) | (req.mask & rule.addr)
```

So each slave receives only addresses that belong to it, and its own mask
describes the multicast inside its window, if any. The `select` vector has one
bit per port. A request with two or more bits set in it is a multicast. A
request that hits no rule is a decode error.

## 3. Structure

```
          master 0        master 1     ...      master N-1
             |               |                      |
        [mcast_axi_demux] [mcast_axi_demux] ... [mcast_axi_demux]   one per slave port
             | \  ...  /     |                      |
             |  full mesh: AW, W, B + is_mcast, commit
             | /  ...  \     |                      |
        [mcast_axi_mux]  [mcast_axi_mux]   ...  [mcast_axi_mux]     one per master port
             |               |                      |
          slave 0         slave 1       ...     slave M-1
```

`mcast_axi_xbar` connects every demux to every mux. Besides the three AXI
write channels, two 1-bit signals run along each demux-to-mux link:

* `is_mcast`: this AW is part of a multicast. The mux then handles it on its
  multicast path.
* `commit`: every mux this multicast addresses is ready for it. All of them
  take the AW in this cycle.

Each mux adds the index of the slave port a request came from to the top of
its AXI ID. It uses those bits to send the B response back to the right demux,
and removes them again on the way. Master-side IDs are therefore 4 bits wider
than slave-side IDs.

## 4. Why multicast needs an atomic commit (the hardest part)

AXI requires a slave to receive W data in the order in which it accepted the
AW requests. A multicast W beat can only move when *all* its slaves take it,
because the crossbar cannot buffer whole bursts. Now let masters A and B
both multicast to slaves 0 and 1. Suppose slave 0 accepts A's AW first and
slave 1 accepts B's AW first. Slave 0 now waits for A's data, which waits for
slave 1. Slave 1 waits for B's data, which waits for slave 0. This is a
deadlock.

The crossbar prevents this by letting a multicast take all its slaves in a
single cycle, or none of them:

1. The demux offers the AW (`valid`) to every addressed mux at the same time.
2. Each mux offers `ready` to exactly one multicast requester: the one with
   the lowest slave-port index (`mcast_lzc`). Because every mux uses the same
   fixed priority, the highest-priority multicast in the system gets `ready`
   from all its muxes as soon as their output registers have room.
3. The demux raises `commit` only in a cycle in which all its addressed muxes
   show `ready` together. In that cycle each of those muxes loads the AW into
   its output register and queues the master's index for W routing. In the
   next cycle the muxes are free for other requests.

No mux ever holds a partial multicast, so the wait-for cycle above cannot
form. Multicast requests also take precedence over unicasts in a mux, because
a multicast has to line up several muxes at once. Unicasts use a round-robin
arbiter (`mcast_rr_arb`) and need no commit.

The mux's `ready` depends only on its own registers and on the request
vector, never on the slave. Each mux has a two-entry register on its AW, W
and B outputs (`mcast_spill_reg`). These registers make the combinational
commit and the W fork free of loops through the slaves.

## 5. Ordering rules in the demux

B responses from different slaves may come back in any order. The demux keeps
enough order to pass them back correctly:

* **Unicast ID table.** For each AXI ID, the demux counts outstanding unicasts
  and records the port they went to. A unicast waits while earlier
  transactions with its ID are outstanding at another port. A slave answers a
  single ID in order, so responses for one ID always come back in order.
  `MaxTrans` caps the count per ID.
* **Unicasts and multicasts never overlap.** A multicast waits until no
  unicast is outstanding, and a unicast waits until no multicast is
  outstanding.
* **Multicasts stack only on the same port set.** A new multicast may start
  while others are outstanding only if it addresses exactly the same ports
  (`b_select`) and carries the same ID. The design adds the ID condition
  itself, so that slaves that reorder across IDs cannot mix up the joined
  responses. At most `MaxMcastTrans` multicasts may be outstanding
  (`mcast_cnt`).

## 6. Forking W, joining B

**W.** At each AW handshake, the demux queues the set of ports the AW went
to. Each W beat goes to every port in the set at the head of the queue. The
beat moves only in a cycle in which all of those ports are ready. The entry
leaves the queue on the beat marked `last`. At the mux, a second queue holds
the order in which AWs were accepted, so W bursts are taken from the masters
in that same order.

**B.** While multicasts are outstanding, `mcast_stream_join_dynamic` waits
for one response from each port in `b_select` and then acknowledges all of
them in the same cycle. The single response passed back to the master takes
its ID from the lowest-numbered port, found with the priority encoder. All
the IDs are equal anyway. The response code is SLVERR if any part answered
SLVERR or DECERR, and OKAY otherwise. Exclusive accesses are not allowed in
a multicast: the demux clears the `lock` bit of a multicast, so EXOKAY never
has to be merged. With no multicast outstanding, a round-robin arbiter passes
unicast responses back.

A request that hits no rule goes to a small error slave inside the demux
(`mcast_axi_err_slv`). The error slave takes the W burst and answers DECERR.

## 7. Interface

Shared types are defined in `mcast_axi_pkg`:

| type | fields |
|------|--------|
| `aw_t` (slave side) | `id[3:0]`, `addr[47:0]`, `mask[47:0]` (the AW user field), `len[7:0]`, `size[2:0]`, `burst[1:0]`, `lock` |
| `mst_aw_t` (master side) | the same, with `id[7:0]` = {slave-port index, original ID} |
| `w_t` | `data[511:0]`, `strb[63:0]`, `last` |
| `b_t` / `mst_b_t` | `id`, `resp` (`resp_e`: OKAY, EXOKAY, SLVERR, DECERR) |
| `rule_t` | `idx[31:0]`, `start_addr`, `end_addr` |

`mcast_axi_xbar` ports: `clk_i`, `rst_ni` (asynchronous, active low), and
`addr_map_i[NoAddrRules]`. Each slave port has
`slv_{aw,w,b}_{valid,ready}` bit vectors and `slv_aw_i[]`, `slv_w_i[]`,
`slv_b_o[]` arrays. Each master port has the same signals with prefix `mst_`.

| parameter | default | meaning |
|-----------|---------|---------|
| `NoSlvPorts` | 16 | slave ports (masters); at most 16 with the 4-bit ID extension |
| `NoMstPorts` | 16 | master ports (slaves) |
| `NoAddrRules` | `NoMstPorts` | rules in the address map |
| `MaxMstTrans` | 8 | outstanding unicasts per ID in each demux |
| `MaxMcastTrans` | 8 | outstanding multicasts in each demux |
| `MaxWTrans` | 8 | AWs whose W data is still pending, per demux and per mux |

To change the address, data or ID width, edit the constants in
`mcast_axi_pkg`. `SlvIdxWidth` must be at least `clog2(NoSlvPorts)`.

**Timing.** The demux is combinational from its slave port to the muxes.
Each mux registers AW, W and B once. A write therefore reaches a slave one
cycle after it is offered, if nothing blocks it. Its B response reaches the
master one cycle after the slave gives it. Every port sustains one W beat per
cycle, multicast included. A multicast of *b* beats to any number of
idle slaves takes about *b* + 5 cycles from the first AW to the B response.
Sending *k* unicasts takes about *k* times *b*.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it shows |
|-----------|---------------|
| `tb_mcast_lzc`, `tb_mcast_rr_arb`, `tb_mcast_stream_join_dynamic` | helpers against reference models; arbiter fairness |
| `tb_mcast_addr_decode` | random address/mask pairs on the 16-cluster map. The reference expands each set address by address and sorts the addresses into the intervals. |
| `tb_mcast_axi_err_slv` | DECERR for every burst, after its last beat |
| `tb_mcast_axi_demux` | directed: commit only when all ports are ready, W fork, B join with SLVERR, every stall rule, MaxMcastTrans, decode error |
| `tb_mcast_axi_mux` | directed: ID extension, round robin, multicast priority and commit, W order, B routing |
| `tb_mcast_axi_xbar` | full size, 16 random masters and 16 checking slave models with random back-pressure, 4800 transactions. Checks exact delivery sets, data, merged responses and per-ID order. It counts each mechanism and fails if one never occurs. |
| `tb_mcast_xbar_microbench` | full size: one DMA-like master copies 2/8/32 KiB to 2, 4, 8 or 16 ports, as *k* unicasts and as one multicast. Checks the data and a speedup of at least 0.8 *k*. It measures 1.97-2.00x, 3.92-3.99x, 7.81-7.99x and 15.59-15.97x. |

Run any of them with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/mcast_axi_pkg.sv tb/tb_mcast_axi_xbar.sv --top tb_mcast_axi_xbar
./obj_dir/Vtb_mcast_axi_xbar
```

## 9. Departures and limits

* **Write path only.** There are no AR/R channels. A complete crossbar would
  place an ordinary read crossbar next to this one. AW fields not needed for
  multicast (`cache`, `prot`, `qos`, `region`, `atop`, user bits other than the
  mask) are left out.
* **All address rules must be multicast-capable**, that is, power-of-two
  sized and aligned. Arbitrary intervals that only unicasts could reach are
  not supported.
* **Same-ID condition for stacked multicasts.** This condition is added by
  this design (section 5). It is stricter than allowing any multicast to the
  same port set.
* **How exclusive multicasts are refused is this design's choice.** The lock
  bit is cleared instead of, for example, returning an error.
* **The decode-error slave**, the ID extension, the round-robin arbitration of
  unicast B responses, the output registers in the mux and all queue depths
  are this design's choices. They follow common practice for AXI crossbars.
* **Widths.** The 512-bit data width is that of the accelerator's wide
  network. The 48-bit address and 4-bit ID are assumptions. The widths are
  package constants. A 64-bit crossbar for the accelerator's narrow control
  network uses the same RTL with `DataWidth = 64`, but one compile holds only
  one width.
* **Not included:** the accelerator around the crossbar (compute clusters, the
  DMA and load/store extensions that issue multicasts, the last-level
  scratchpad, and the two-level hierarchy of crossbars that joins 32
  clusters). A two-level network can be built from this crossbar. It needs
  up-link routing rules, which are not part of this design.
* **Not verified:** formal deadlock freedom, and area and timing after
  synthesis. The random end-to-end test ran many overlapping multicasts
  without a hang, but that is evidence, not proof.
