# relOBI: a soft-error-tolerant OBI interconnect in SystemVerilog

A radiation-induced upset in a processor's interconnect creates, drops or misroutes a bus
transaction, and the whole chip fails with it. relOBI fixes this without retransmission and
without adding a cycle of latency. It extends the OBI bus in two ways:

- **Handshake signals are triplicated.** `req`, `gnt` and `rvalid` each exist three times.
  Every receiver votes them, so a single wrong wire can neither invent nor lose a transaction.
- **Everything else carries ECC.** Address, data, byte enables and the optional fields carry a
  SECDED code (single error correction, double error detection). A single flipped bit is
  corrected where the word is used.

Inside the interconnect, only the *control* logic is triplicated. The wide payload passes
through once, protected by its own check bits. That makes the hardened crossbar much cheaper
than triplicating everything.

This repository holds synthesizable RTL for that scheme:

- encoder and decoder between plain OBI and relOBI;
- the hardened building blocks (demultiplexer, multiplexer, pipeline register);
- a 6-manager × 8-subordinate crossbar built from them;
- self-checking testbenches with fault injection.

## The bus

In the configuration used here, addresses and data are 32 bits wide. There are optional fields
as well: 24 bits on the request, 9 bits on the response, for example for atomics and IDs.

| field | OBI | relOBI | protection |
|---|---|---|---|
| req, gnt | 2 | 6 | three copies each |
| addr | 32 | 32 + 7 | own SECDED word |
| wdata | 32 | 32 + 7 | own SECDED word |
| we, be, a_optional | 1 + 4 + 24 | 29 + 7 | one shared SECDED word |
| rvalid | 1 | 3 | three copies |
| rdata | 32 | 32 + 7 | own SECDED word |
| r_optional | 9 | 9 + 6 | own SECDED word |
| **total** | **137** | **177** | |

The request payload is the struct `relobi_a_t` (114 bits). The response payload is `relobi_r_t`
(54 bits). Both are in `relobi_pkg`.

Address and data get separate codes because the interconnect must look inside the address, and
because shorter words keep the decoders small. The leftover fields are grouped per direction to
save check bits. The 9-bit `r_optional` group carries 6 check bits. That matches the 177-signal
total; a minimal code would need only 5.

**The code.** It is a Hsiao SECDED code:

- Check bit *i* is the XOR of the data bits whose parity-check column has bit *i* set.
- The column of data bit *j* is the *j*-th vector of odd weight ≥ 3 in ascending numeric order.
- `relobi_pkg::hsiao_columns` generates the matrix during elaboration, for any width up to 64
  data bits.

**Decoding.**

| syndrome | meaning | action |
|---|---|---|
| zero | clean word | none |
| equals a data column | single data-bit error | flip that bit |
| weight one | check-bit error | repair the check bit |
| anything else | double or worse error | report uncorrectable |

## Converting between OBI and relOBI

**`relobi_encoder`** sits at a manager:

- copies `req` three times;
- votes the three `gnt` and the three `rvalid` wires;
- adds check bits to the request;
- corrects the response.

**`relobi_decoder`** mirrors it at a subordinate. Both are purely combinational.

These two blocks are not hardened themselves. They are meant to sit inside a manager or
subordinate that is protected by its own means, for example a triplicated core. The hardened
part is everything between them.

## How the interconnect blocks are hardened

The same recipe runs through every block. It is the part that needs the most care.

1. **Three copies of the control logic, one per handshake copy.** Copy *k* of a block only
   sees `req[k]`, `gnt[k]` and `rvalid[k]`, and drives only copy *k*. A fault in one copy
   therefore disturbs one of three handshakes, and the next receiver outvotes it.
2. **Voted state.** Every state register exists three times (`relobi_tmr_reg`).
   - Each copy reads it back through its own voter.
   - A flipped flip-flop is outvoted immediately.
   - It is rewritten with the majority value on the next edge, so upsets do not accumulate.
   - A glitch in one voter reaches only one copy.
3. **Payload passes through.** Request and response packets are never triplicated. They are
   only selected, and their check bits travel with them.
4. **Decode per copy where control needs the payload.** The demultiplexer must know the target
   port, which depends on the ECC-protected address.
   - The crossbar holds three `relobi_addr_decode` blocks per manager.
   - Each corrects the address with its own SECDED decoder and looks it up in the address map.
   - Each feeds one control copy.
   - A transient inside one decoder therefore reaches only one of three selections.
5. **Per-bit voted selection of payload** (`relobi_voted_mux`). Selecting one of N packets is a
   single multiplexer, but its select comes from three control copies.
   - A shared voter on that select would be a single point of failure: one glitch would switch
     the whole packet.
   - So every output bit gets its own voter and its own select decode.
   - A glitch then flips at most one payload bit, which ECC corrects downstream.
   - In the RTL the select copies are expanded into bit-planes of the packet width and voted as
     one wide vector. This gives the same circuit as per-bit voters but is compact to write and
     to simulate.

Every block has an `err_o` report, ORed up through the hierarchy:

- `corrected`: a voter saw disagreement, or an ECC word had a single error.
- `uncorrectable`: an ECC word had a double error.

## Building blocks

### Demultiplexer (`relobi_demux`): one manager, NumSbr ports

- The request packet is broadcast to all ports. Copy *k* raises `req[k]` only at the port chosen
  by `sel_i[k]`.
- OBI returns responses in request order. A request to a different port than the outstanding
  ones therefore stalls until all of them have been answered.
- At most `NumMaxTrans` requests may be outstanding.
- The state is the port of the outstanding requests and their count. It is voted.
- Responses are picked with a `relobi_voted_mux` from the port held in the state.
- There are no registers on the data path; the block adds no latency.

### Multiplexer (`relobi_mux`): NumMgr inputs, one port

- Each copy holds a round-robin arbiter, `relobi_rr_arb`.
- The arbiter locks onto a request that is waiting for its grant, because OBI forbids changing
  a request before it is granted. After the grant, priority moves past the winner.
- Each granted request pushes the winner's index into a FIFO `NumMaxTrans` deep. Each response
  pops it and is routed to that input.
- While the FIFO is full, no request is forwarded. This back-pressure is the same as when
  another input holds the arbiter.
- Arbiter pointer, lock, FIFO contents, pointers and count all sit in one voted register.
- The request packet is chosen by a `relobi_voted_mux`.
- The response packet is broadcast to all inputs; only `rvalid` is routed.

### Pipeline register (`relobi_cut`)

- One request entry. Its valid flag is triplicated and voted.
- It accepts a new request whenever it is empty or is being granted downstream, so it runs at
  full throughput.
- The stored packet is loaded with a per-bit voted load enable, for the same reason as above.
- The response path is a one-cycle register.
- Latency is one cycle in each direction.

### Crossbar (`relobi_xbar`, `relobi_xbar_pipelined`)

- `relobi_xbar` wires NumMgr demultiplexers fully to NumSbr multiplexers. Requests between
  independent manager/subordinate pairs pass each other.
- `relobi_xbar_pipelined` adds a `relobi_cut` on each of the 6 + 8 links. This makes every
  internal path register-to-register. It is the unit whose area and timing the original
  evaluation reports.
- Address map (`relobi_pkg::DefaultAddrMap`): eight 512 MiB windows, so the port is
  `addr[31:29]`.
  - Rules are inclusive `[start_addr, end_addr]` ranges, and the first match wins.
  - An unmatched address goes to `DefaultIdx`.

### Top (`relobi_xbar_top`)

- Six encoders, the pipelined crossbar and eight decoders. The top has plain OBI ports (arrays of
  `obi_a_t` / `obi_r_t` and handshake bits) plus `err_o`.
- A request appears at a subordinate two cycles after the manager presents it, if it is not
  stalled.
- The response reaches the manager two cycles after the subordinate gives it.
- Encoding and decoding add no cycles.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NumMgr` | 6 | managers (crossbar inputs) |
| `NumSbr` | 8 | subordinates (crossbar outputs) |
| `NumMaxTrans` | 4 | outstanding requests per demultiplexer and FIFO depth per multiplexer |
| `NumRules`, `AddrMap` | 8, `DefaultAddrMap` | address map |
| `DefaultIdx` | 0 | port for unmatched addresses |

Field widths are package constants. Changing them means also changing the check-bit counts.
With *k* data bits, *r* check bits need 2^(r-1) ≥ *k* + *r* or more odd-weight columns.

## Where this RTL departs from, or goes beyond, the original description

- **Figures the description leaves open.** The Hsiao code, `NumMaxTrans = 4`, the address map,
  the arbiter's lock, the single-entry pipeline register and the error-report format are this
  implementation's own choices.
- **Timing-optimised variant not included.** The original work also shows a variant that checks
  the address ECC on a separate path, aborts a request on an error and lets the pipeline
  register correct its content. That variant cuts the critical path from 23.8 to 19.1 FO4. It
  is not implemented: how an aborted request is recovered is not specified.
- **Unhardened converters.** Encoder and decoder are not hardened, as explained above.
- **Area and timing not reproduced.** The reported figures come from a commercial 7 nm flow:
  123 kGE for the relOBI crossbar against 47 kGE for plain OBI, at 500 MHz. Generic open-source
  synthesis of the top gives about 2.7 k flip-flop bits but no comparable gate count.
- **Fault injection differs.** Fault tolerance was originally measured with a commercial fault
  simulator on the crossbar's internal nodes. Here it is tested in two ways:
  - The link-level testbenches flip one handshake copy, or one payload bit of a request or
    response, in about one cycle in eight.
  - `tb_relobi_xbar_top_seu` flips single bits in the crossbar's flip-flops.

  Glitches on individual gates inside the blocks are covered only through the voter and ECC
  unit tests.

## Verification

Every module has a self-checking testbench in `tb/`. Each one:

- compares against reference models written independently of the RTL (`tb_relobi_ref_pkg`
  holds its own SECDED encoder and decoder);
- has a watchdog;
- ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it shows |
|---|---|
| `tb_relobi_pkg` | code matrices (distinct odd-weight columns), 137/177 bus widths, default address map |
| `tb_relobi_tmr_voter`, `tb_relobi_tmr_reg` | majority, mismatch flag, correction of a flipped register copy |
| `tb_relobi_ecc_enc`, `tb_relobi_ecc_dec` | check bits against the reference; every single error corrected, double errors flagged |
| `tb_relobi_voted_mux` | selection with one select copy corrupted |
| `tb_relobi_encoder`, `tb_relobi_decoder` | round trip, faulted handshakes and payload bits |
| `tb_relobi_addr_decode`, `tb_relobi_rr_arb` | map lookup with corrupted addresses; fairness, lock |
| `tb_relobi_cut`, `tb_relobi_demux`, `tb_relobi_mux` | OBI traffic with random grants and latencies, link faults, exact latency |
| `tb_relobi_xbar`, `tb_relobi_xbar_pipelined` | 6×8 traffic with link faults; zero and two-cycle latency |
| `tb_relobi_xbar_top_seu` | same traffic on the default top, with a random bit of a random internal register flipped every 40–80 cycles (voted state copies and pipeline packet registers); all transactions must stay correct, corrections must be reported, nothing uncorrectable |
| `tb_relobi_xbar_top` | full default top, 6 × 1000 transactions; checks data, order and the 2+2 cycle latency |

`tb_relobi_xbar_top` also counts how often each mechanism occurred, and fails if any count
stays zero. The mechanisms are:

- arbitration contention;
- arbiter lock;
- ordering stall in a demultiplexer;
- the outstanding-request limit;
- a full response FIFO;
- a held pipeline entry;
- parallel transfers.

It runs in well under a second of simulation time.

To run a testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/relobi_pkg.sv tb/tb_relobi_ref_pkg.sv tb/tb_relobi_xbar_top.sv \
  --top-module tb_relobi_xbar_top -o sim && ./obj_dir/sim
```

Any other testbench works the same way. Replace the last file and the top module name.
`-Wno-fatal` is needed for two reasons:

- some testbench monitors trigger width warnings;
- the upset test's `force` on flip-flops makes Verilator report those registers as driven
  twice.

The RTL on its own builds without warnings under Verilator's default settings.

## Files

- `rtl/relobi_pkg.sv`: widths, packet structs, code generator, address map.
- `rtl/relobi_tmr_voter.sv`, `relobi_tmr_reg.sv`, `relobi_voted_mux.sv`: voting primitives.
- `rtl/relobi_ecc_enc.sv`, `relobi_ecc_dec.sv`: SECDED code.
- `rtl/relobi_encoder.sv`, `relobi_decoder.sv`: OBI ⇄ relOBI.
- `rtl/relobi_addr_decode.sv`, `relobi_rr_arb.sv`, `relobi_demux.sv`, `relobi_mux.sv`,
  `relobi_cut.sv`: interconnect blocks.
- `rtl/relobi_xbar.sv`, `relobi_xbar_pipelined.sv`, `relobi_xbar_top.sv`: crossbar and top.
- `tb/`: testbenches. `tb_rel_mgr`, `tb_rel_sbr`, `tb_obi_mgr` and `tb_obi_sbr` are the random
  traffic agents shared by the system-level tests.
