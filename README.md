# Blockchain Machine — block processor RTL

A Hyperledger Fabric peer spends most of its block-commit time on three
things:

- checking ECDSA signatures: the orderer's signature on the block, each
  client's signature on its transaction, and the endorsers' signatures;
- evaluating each chaincode's endorsement policy against those signatures;
- the multi-version concurrency check (MVCC), which asks whether each
  transaction's read set still matches the state database, followed by the
  write-back of valid transactions.

The Blockchain Machine moves this validation phase into an FPGA placed on
the network path. A protocol processor turns incoming block packets into
five streams of fixed-format records:

- one record per block;
- one per transaction;
- one per endorsement;
- one per read-set entry;
- one per write-set entry.

A block processor then validates them in a two-level pipeline. The host only
reads back one valid/invalid flag per transaction and commits the block to
its ledger.

This repository holds the SystemVerilog of the block processor and
everything around it up to the buffer write ports, plus the host register
interface. Of the packet side, only the three SHA-256 hash units are
included. The rest of it is not, nor are the ECDSA engines, which are a
licensed core. Their connections are ports of the top module `bmac`.

```
 protocol processor (outside)                                      host (outside)
   | blk | tx | ends | rdset | wrset                                     ^ AXI4-Lite
   v     v    v      v       v                                           |
 [block_fifo][tx_fifo][ends_fifo][rdset_fifo][wrset_fifo]            reg_map
   |                                                                     ^
   v                                                                     |
 block_processor:                                                   [res_fifo]
   block_verify --[2]--> block_validate ---------------------------> block_monitor
   (engine 0)            tx_scheduler                                 (adds timing)
                           |-> tx_verify[v] -> tx_vscc[v] -+
                           |   (1 engine)      (NENG engines,
                           |                    ends_scheduler +
                           |                    ends_policy_evaluator)
                           |                                 v
                           |                         tx_collector (restores order)
                           +-> block info ----------> tx_mvcc_commit <-> kv_database
```

## Two levels of pipelining

**Block level.** `block_verify` checks the orderer signature of block n+1
while `block_validate` works on block n. A two-entry FIFO between the stages
carries `{block_num, num_txs, block_valid}`. A block whose signature fails
is not dropped. It flows on with `block_valid = 0`, so its transactions are
still consumed from the buffers, every one is marked invalid, and the host
still gets a result for it.

**Transaction level.** Inside `block_validate` there are NTXV
*tx_validators* (default 8). Each one is a `tx_verify` with its own engine,
followed by a `tx_vscc` with NENG engines (default 2). The default is
therefore "8x2", with 1 + 8·(1+2) = 25 engines in all.

`tx_scheduler` walks the transactions of the current block in order. It
hands each one to the lowest-numbered free `tx_verify`, then copies that
transaction's endorsements from `ends_fifo` into the local endorsement FIFO
of the matching `tx_vscc`.

`tx_verify` checks the client signature. If the block is already invalid,
it passes the transaction on as invalid without using its engine, in zero
extra cycles.

`tx_vscc` verifies endorsements and evaluates the policy (next section).

Transactions with few endorsements, or whose policy is met early, overtake
older ones. MVCC, however, must see transactions in block order, so
`tx_collector` only accepts the output whose sequence number (and block
epoch, see below) is the next one expected.

`tx_mvcc_commit` then works through the transactions one by one:

1. It pops `rdset_size` entries from `rdset_fifo`.
2. It reads each key from `kv_database` and compares the stored version with
   the expected one.
3. If the transaction is still valid, it pops `wrset_size` entries and writes
   them with the new version `{block_num, tx_seq}`.

Entries of invalid transactions are popped and dropped, which keeps the
three streams aligned. The writes of transaction i land before the reads of
transaction i+1, so conflicts within one block are caught.

## Endorsement policies and short-circuit evaluation

This is the most specialised part of the design, and it is where the design
gains most over a software peer.

`ends_policy_evaluator` keeps one bit per (organisation, role): NUM_ORGS = 4
organisations × 4 roles. An endorser id is 16 bits: an 8-bit organisation,
a 4-bit role (orderer 0, admin 1, peer 2, client 3) and a 4-bit node number.
When an endorsement verifies, the bit for its organisation and role is set.
The bits are cleared when a new transaction starts.

Each policy is a combinational circuit over the peer bits, and the
transaction's `cc_id` (chaincode id) selects which circuit applies:

| cc_id | policy |
|---|---|
| 0, 1 | 2-of-2 (Org1 & Org2): the two benchmark chaincodes |
| 2 | 1-of-1 |
| 3 | 1-of-2 |
| 4 | 2-of-3 |
| 5 | 3-of-3 |
| 6 | 2-of-4 |
| 7 | 3-of-4 |
| 8 | 4-of-4 |
| 9 | (O1&O2) \| (O1&O4) \| (O2&O3) \| (O2&O4) \| (O3&O4) |

All sub-terms are evaluated in parallel, so a complex policy costs no more
time than a simple one. To support another chaincode, add a line to the
`circ` assignments and give it a `cc_id`. Unknown ids never satisfy a
policy.

`ends_scheduler` decides which endorsements are worth verifying at all. It
works in *rounds*:

- A round starts only when all NENG engines of the `tx_vscc` are idle. It
  issues one endorsement per cycle to the free engines.
- The next round starts only after every result of the current round has
  been written into the evaluator.
- Before each round it looks at the policy output. Once the policy is met,
  the remaining endorsements of the transaction are popped and discarded
  without verification. They are also discarded when the transaction is
  already invalid.

With two engines this gives the expected costs:

- 2-of-2 and 2-of-3: one round.
- 3-of-3: two rounds, so roughly twice the latency.

An endorsement with a bad signature simply leaves its bit clear. The
transaction fails when its endorsements run out and the policy is still
unmet.

Why rounds rather than "issue whenever an engine is free"? With 2-of-3, the
free-engine rule would start the third verification as soon as the first
result came back, before the second result could satisfy the policy. The
short-circuit would then save nothing.

## Ordering across blocks

The scheduler moves on to block n+1 as soon as every transaction of block n
has been *issued*, while block n's transactions may still be in the
validators. A sequence number alone would therefore be ambiguous in the
collector.

Each transaction carries a 6-bit block epoch, which advances after every
non-empty block. At most NTXV·2 transactions are in flight (one in each
`tx_verify` and one in each `tx_vscc`), so a 6-bit epoch cannot wrap onto a
live transaction for NTXV ≤ 31. A `$onehot0` assertion in `tx_collector`
checks that at most one input ever matches.

## State database

`kv_database` is a directly indexed memory of DB_SIZE = 8192 entries. Each
entry holds a 64-bit value and a 40-bit version `{block_num, tx_seq}`. The
key is the 13-bit slot index: the buffers are expected to carry keys that
the sender has already mapped to slots.

- **Reset.** A sweep clears every entry: 8192 cycles before `init_done`, and
  no access is accepted until then.
- **Reads** return one cycle after they are accepted.
- **Writes** are accepted, held for one cycle in a pending register, then
  written.
- **Locking.** A read of the key in the pending register is refused
  (`rd_ready` low, event `db_lock`) until the write has landed. This is the
  locking rule that stops a key from being read while it is written.
  `tx_mvcc_commit` always leaves two cycles between a write and the next
  read, so in the full pipeline the lock never has to act. It is exercised
  by the database's own test.

## Host interface

`reg_map` is an AXI4-Lite slave with 8-bit addresses. It holds one block
result at a time.

| address | register |
|---|---|
| 0x00 | STATUS (bit 0: result held) |
| 0x04 | RELEASE (write 1) |
| 0x08 | BLOCK_NUM |
| 0x0C | BLOCK_VALID |
| 0x10 | NUM_TXS |
| 0x14 | VERIFY_CYCLES |
| 0x18 | VALIDATE_CYCLES |
| 0x1C | TOTAL_CYCLES |
| 0x20 | VALID_TXS |
| 0x40 + 4i | TX_FLAGS word i (i = 0..7, bit = transaction valid) |

While a result is held, `res_fifo` is not read, so the host can never miss a
result. The pipeline backs up until the host writes RELEASE.

`block_monitor` fills in the cycle counts:

- VERIFY_CYCLES: orderer-signature check;
- VALIDATE_CYCLES: from the start of transaction issue to the result;
- TOTAL_CYCLES: from the block-FIFO pop to the result.

It also fills in the number of valid transactions. It matches time stamps
to results through small FIFOs, because several blocks are in flight at
once.

## Interfaces and timing

Every stream uses valid/ready. A transfer happens on a rising edge with both
high. Reset is asynchronous and active low (`rst_n`).

The FIFO records are the structs in `bmac_pkg`:

| record | fields |
|---|---|
| `blk_fifo_t` | block number, transaction count, orderer signature request |
| `tx_fifo_t` | chaincode id, client signature request, endorsement count, read/write set sizes |
| `ends_fifo_t` | endorser id, signature request |
| `rdset_fifo_t` | key, expected version |
| `wrset_fifo_t` | key, value |

A signature request `ecdsa_req_t` is `{r, s, key x, key y, hash}`, 256 bits
each. All hashes are computed upstream.

Each engine port has:

- `eng_req_valid` / `eng_req_ready` / `eng_req`;
- a one-cycle `eng_resp_valid` pulse with `eng_resp_ok`.

Each engine port has at most one request outstanding. Its index is fixed:

| engine index | used by |
|---|---|
| 0 | `block_verify` |
| 1 .. NTXV | `tx_verify` |
| NTXV+1+v·NENG .. | the engines of `tx_vscc` v |

Fixed costs, in addition to the engine time:

| operation | cycles |
|---|---|
| signature check in `tx_verify` / `block_verify` | engine time + 2 |
| database read in `tx_mvcc_commit` | 2 |
| database write or skipped entry | 1 |
| per transaction | 2 |
| per block | 2 |

A real ECDSA core takes roughly 360 µs (90,000 cycles at 250 MHz), so the
engines set the throughput. A 2-of-2 transaction occupies one validator for
about one engine time, since `tx_verify` and `tx_vscc` overlap. Eight
validators then give about 8 × 250 MHz / 90,000 ≈ 22,000 transactions/s.
MVCC, at a few cycles per database access, stays hidden behind this.

`ev` (type `bp_events_t`) reports events in each cycle:

- endorsements issued and skipped;
- transactions skipped;
- MVCC conflicts;
- lock stalls.

## SHA-256 hash units

Each signature check needs the SHA-256 digest of the signed data. The packet
side therefore has three streaming hash units: one for block data, one for
transaction data and one for endorsement data. They are instantiated in
`bmac` as `g_hash[0..2]`, and their streams are top ports (`hash_in_*`,
`hash_out_*`).

Each `hash_calculator` works as follows:

- It takes 32-bit big-endian words. The word marked last carries 0 to 4
  valid bytes.
- It compresses every 16 words in 64 cycles, one round per cycle, computing
  the message schedule in a 16-word sliding window.
- After the last word it appends the standard padding, one word per cycle.
- It holds the digest until it is taken.

A long message streams at 16 words per 81 cycles. A short message such as
"abc" gives its digest 79 cycles after the last word. The test checks it
against the standard examples: the empty message, "abc", the 56-byte
two-block case and 64 × 'a'.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| NTXV | 8 | bmac, block_processor, block_validate | tx_validators |
| NENG | 2 | same | engines per tx_vscc |
| ENDS_DEPTH | 16 | same, tx_vscc | local endorsement FIFO per validator; must hold twice the endorsements of one transaction |
| DB_SIZE | 8192 | same | database entries |
| BLK_DEPTH, TX_DEPTH, ENDS_FDEPTH, RW_DEPTH | 4, 256, 512, 1024 | bmac | input buffer depths |
| MAX_TXS | 256 | bmac_pkg | largest block; sets the flag vector and register map |
| NUM_ORGS | 4 | bmac_pkg | organisations in the policy register file |

Other configurations (4x2, 5x3, 12x2, 16x2) are a matter of NTXV and NENG.
The engine ports grow to 1 + NTXV·(1+NENG).

Synthesised at the defaults (generic yosys cells): about 3,300 coarse cells and
15,500 flip-flop bits. The memories hold about 2.2 Mbit, mostly the input
buffers and the 8192 × 104-bit database.

## What this RTL does not contain, and where it departs

**Not included:**

- Most of the packet side: UDP filtering, header parsing, the
  identity-certificate cache, field extraction, DER/X.509/protobuf decoding
  and the writer that fills the five buffers. The SHA-256 units are
  included (next section), but which bytes of a block they hash is not
  defined here, since that depends on the Fabric data layout.
- The ECDSA verification core.
- The NIC/PCIe shell.

The top has the buffer write ports and engine ports instead.

**Own choices** where the design description is silent or only names
things:

- the ECDSA handshake;
- all field widths other than the 256-bit crypto values and the 16-bit id;
- FIFO depths;
- the lowest-free-index scheduling;
- the block epoch;
- the direct-indexed database and its reset sweep;
- the register map and the release-by-write rule;
- the choice of statistics;
- early abort of the remaining reads after the first version mismatch.

**Endorsements are issued in rounds.** A scheduler that hands each
endorsement to an engine "as soon as one is free" keeps engines busiest. But
it cannot also check the policy before every new issue, and it would verify
the third endorsement of a 2-of-3 transaction. The round scheme described
above gives up some engine utilisation to keep the short-circuit. That
matters when results come back at different times; with equal engine
latencies the two schemes behave alike.

**More than two blocks can be in flight.** The block-level pipeline was
specified as handling two blocks at once. Here a two-entry FIFO sits between
`block_verify` and `block_validate`, and `tx_scheduler` may start the next
block while the previous one is still in the validators and in MVCC. So
`block_verify` can run up to three blocks ahead. Results still leave in
block order.

**Policies are fixed.** The ten circuits above are compiled into
`ends_policy_evaluator`; other chaincodes need new circuits.

**Endorser checks are limited.** An endorsement counts for its organisation
only in the peer role. There is no check for duplicate endorsers (the same
organisation twice counts once, because it sets the same bit).

**Sizes.** A block of more than 256 transactions, or more than 31
validators, needs MAX_TXS or EPOCH_W enlarged.

## Simulation

Every testbench is self-checking:

- it prints `TB_RESULT checks=N failures=M` and ends with `$finish`;
- a watchdog counts a failure if the run hangs.

It compares the design against independent models in `tb/tb_pkg.sv`:

- a reference policy evaluator written as counts and pair lists;
- a block generator with its own state-database model, which produces
  random blocks together with their expected flags.

`tb/ecdsa_engine_model.sv` stands in for the engines. It has a fixed
latency, and its validity rule is a toy one (a request is "valid" when
`r == hash ^ key_x`). It is not ECDSA.

`tb_bmac` runs the whole top at its default parameters, with 25 engine
models and a host that polls, reads and releases the registers. It sends 20
blocks, including:

- a 256-transaction block;
- an empty block;
- blocks with bad orderer signatures.

It checks every flag and fails if any mechanism never occurred:

- block rejection;
- client-signature skip;
- endorsement short-circuit;
- policy or MVCC rejection;
- MVCC conflict;
- out-of-order completion;
- register hold-off;
- a digest from each of the three hash units.

In the 256-transaction block, validation must be at least 3× faster than one
validator could manage. Measured with a 20-cycle engine model, it took 2,479
cycles against about 11,800 for one validator.

`tb_workloads` (with the helper `tb/bp_harness.sv`) reproduces the evaluated
workloads on two configurations side by side. It uses an engine latency of
2,000 cycles, so that signature checks dominate as they do with a real core.
Each block goes into an idle pipeline, and VALIDATE_CYCLES is measured:

| workload (150 transactions unless noted) | 8x2 | 5x3 |
|---|---|---|
| 2-of-3 | 40,190 | 62,258 |
| 3-of-3 | 78,209 | 62,258 |
| 3-of-4 | 78,228 | 62,288 |
| 2-of-4 / complex policy | 40,209 / 40,209 | — |
| 2-of-2, blocks of 50 / 150 / 250 | 321 / 267 / 264 per tx | — |
| 2-of-2, 3 → 13 reads+writes per tx | 40,189 → 40,369 | — |

What these numbers show:

- Short-circuit evaluation verifies exactly two endorsements for 2-of-3 and
  2-of-4.
- 3-of-3 needs a second engine round and nearly doubles the time.
- 8x2 is 55% faster than 5x3 for 2-of-3, and 5x3 is 26% faster for 3-of-3.
- The five-term policy costs the same as 2-of-4.
- Larger blocks amortise the pipeline fill.
- Database traffic stays hidden behind the engines.

The testbench checks all of these properties, with tolerances.

To run one test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/bmac_pkg.sv tb/tb_pkg.sv rtl/*.sv tb/ecdsa_engine_model.sv tb/bp_harness.sv tb/tb_bmac.sv \
  --top-module tb_bmac
./obj_dir/Vtb_bmac +verilator+rand+reset+2
```

Replace `tb_bmac` with any `tb_<module>` to test a single block. The unit
testbenches override parameters to stay small: for example, `tb_block_validate`
uses 2 validators and a 64-entry database.
