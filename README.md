# Two-thread reconfigurable AES-128 / AES-256 encryption pipeline

This design is a fully unrolled, pipelined AES encryption engine that serves two
independent threads at the same time. Each thread is either AES-128 or AES-256,
and software can change which one at run time. The two ciphers are not built as
two separate pipelines. Both encryption dataflows are merged into one network,
and the actors they have in common exist only once. A per-thread configuration
register decides which path a thread's blocks take through the shared network.
The saving is area. The cost is that the two threads share one block per clock.

The engine is built as a *tagged-token dataflow* network. Every datum (a
128-bit state or a round key) is a token carrying the number of the thread it
belongs to. Actors, the processing nodes, are joined only by FIFOs. There is no
central controller: an actor fires when its input FIFOs hold tokens of the same
thread, and it stamps its results with that thread's number.

## Tokens, tags and FIFOs

Three rules make the network safe for several threads:

1. **Tag propagation.** An actor's output token carries the tag of the tokens it consumed.
2. **Tag-matched firing.** A two-input actor (state and round key) fires only
   when both inputs hold a token of the *same* thread. A state of thread 0 never
   meets a key of thread 1.
3. **Semi-out-of-order FIFOs.** A FIFO holds the tokens of all threads. It keeps
   each thread's tokens in order, but the reader chooses which thread's head it
   pops. A reader that cannot fire thread 0 (its key is missing) can still fire
   thread 1, whose tokens sit behind thread 0's in the same FIFO.

`tagged_fifo` implements rule 3 with two memories:

- **Token memory.** `DEPTH` slots of data. A write takes the lowest free slot.
- **Order memory.** One ring per thread, holding slot indices in arrival order.
  `rd_data` is the token in the slot named at the head of the selected thread's
  ring. That thread's `avail` and `full` flags are reported separately.

Each thread may hold at most `DEPTH/N_THREADS` tokens. Without this limit, a
thread whose tokens cannot move could fill a shared FIFO and block the thread
that would free it. Reads and writes can happen in the same cycle.

`actor_fire_ctrl` implements rules 1 and 2 for every actor. It does four things:

- It ANDs the per-thread `avail` flags of all inputs.
- It uses a round-robin pointer to pick one ready thread.
- It drives `rd_en`/`rd_tag` of the input FIFOs.
- It keeps a valid bit and a tag beside each register stage of the actor's datapath.

The actor's whole pipeline advances together. It stalls only while its last
stage holds a token whose thread is full downstream. An actor with two
destinations writes both at once. Its `out_full` is the OR of the two
destinations' flags for that thread.

## The merged network

```
 pt ─► ARK0 ─► R1 ─► R2 ─► … ─► R9 ─┬─(AES-128)─────────────────────────┐
        ▲       ▲     ▲          ▲  └─(AES-256)─► R10 ─► … ─► R13 ──────┤
        │       │     │          │                ▲           ▲          ▼
       [M]     [M]   [M]        [M]               │           │   [M] SubBytes ─► ShiftRows ─► ARKf ─► ct
        │       │     │          │                │           │                                  ▲
 k128 ─►┼──EK1─►┼─EK2►┼─ … ─EK9─►┼─EK10────────────┼───────────┼─────────────────────────────────[M]
 k256 ─►┴──EK1─►┴─EK2►┴─ … ─EK9─►┴─EK10─► … ──────►┴─EK13────►┴─EK14──────────────────────────────┘
```

Each arrow is a `tagged_fifo`. `[M]` is a merging switching box. Keys are
shown entering the merges. The AES-128 chain is the top key row and the AES-256
chain the bottom one.

- **Shared actors.** Used by both ciphers:
  - the initial AddRoundKey (`aes_ark_actor`);
  - rounds 1 to 9 (`aes_round_actor`);
  - the final round, built from `aes_subbytes_actor`, `aes_shiftrows_actor` and `aes_ark_actor`.
- **AES-256 only.** Rounds 10 to 13.
- **Key schedules.** Kept as two separate chains, because they differ:
  - 10 `aes_expand_key128` stages;
  - 14 `aes_expand_key256` stages, passing a 256-bit window of the two latest round keys.

  Each stage sends its round key both to its round's key FIFO and to the next stage.
- **Switching boxes.** These are pure muxes on FIFO handshakes. They steer by
  `conf[tag]`, the configuration register of the token's own thread:
  - `mdc_sb_merge` sits on the key input of every shared actor. It also sits on
    the SubBytes input, which joins the outputs of rounds 9 and 13. A merge
    shows the reader the FIFO that belongs to the requesting thread's
    configuration.
  - `mdc_sb_split` sits after round 9. It sends AES-128 states to the final
    round and AES-256 states to round 10.
- **Configuration registers.** `thread_conf_regs` holds one 1-bit ID per thread:
  `AES_128 = 0`, `AES_256 = 1`. It is written through `cfg_we`, `cfg_thread` and `cfg_id`.

A switching box reads the configuration of each token's own thread. So the two
threads can run different ciphers at the same moment. An AES-128 block leaves
the shared rounds after round 9 while an AES-256 block of the other thread goes
on to round 10.

## Round actor and latency balancing

`aes_round_actor` is one full AES round in four register stages: SubBytes,
ShiftRows, MixColumns and AddRoundKey. The round key is read together with the
state when the actor fires, and is carried beside the state to the last stage.
Each round costs 5 cycles: 4 pipeline stages plus one FIFO cycle. The single-stage
actors (initial and final AddRoundKey, SubBytes, ShiftRows) cost 2 cycles each.

The key and state streams split at the input ports and meet again at every
round. If a round key arrived earlier or later than its state, the difference
would pile up in the FIFO where they meet. With small FIFOs, that skew turns
into back-pressure, and the ripples of back-pressure run down the two paths at
different speeds. The key-expansion stages are therefore padded so that each
key arrives in the same cycle as its state:

- stage 1 has 1 register stage;
- the middle stages have 4 (the same as a round);
- the last stage (10 or 14) has 8, which covers the final SubBytes, ShiftRows and their FIFOs.

The key computation itself is in the first register of each stage. The rest is delay.

Without stalls:

| | cycles from `pt` accepted to `ct` valid |
|---|---|
| AES-128 | 5·10 + 3 = **53** |
| AES-256 | 5·14 + 3 = **73** |

Once the pipeline is full, one block per clock enters and one leaves, and the two
threads share that rate. A thread's ciphertexts leave in the order of its
plaintexts. Between threads there is no order: an AES-128 block overtakes an
AES-256 block sent before it.

The S-box is not a pasted table. `aes_mt_pkg::gen_sbox()` computes it at
elaboration: the multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1, taken
through exp/log tables over the generator 0x03, then the affine map
b ⊕ rotl1(b) ⊕ rotl2(b) ⊕ rotl3(b) ⊕ rotl4(b) ⊕ 0x63. Each lookup becomes a
256-entry ROM.

## Interface of `aes_mt_accel`

Parameters: `N_THREADS = 2` and `DEPTH = 4`. `DEPTH` is the token slots per FIFO, split evenly among threads.

| port | dir | width | meaning |
|---|---|---|---|
| `cfg_we`, `cfg_thread`, `cfg_id` | in | 1, 1, 1 | write thread `cfg_thread`'s configuration ID |
| `pt_valid/tag/data`, `pt_ready` | in/out | 1/1/128, 1 | plaintext token |
| `k128_valid/tag/data`, `k128_ready` | in/out | 1/1/128, 1 | AES-128 cipher key, one per block |
| `k256_valid/tag/data`, `k256_ready` | in/out | 1/1/256, 1 | AES-256 cipher key, one per block |
| `ct_valid/tag/data`, `ct_ready` | out/in | 1/1/128, 1 | ciphertext token |

- **Handshake.** Every token port is valid/ready: a token moves in a cycle where both are high.
- **Keys.** A key is consumed with every block, so changing the key costs
  nothing. A host that keeps one key sends it again with each block.
- **Key port.** The key must arrive on the port matching the thread's
  configuration. A key sent on the other port stays unused in that port's input FIFO.
- **Reconfiguration.** Change a thread's configuration only while the thread has
  no blocks in flight. Switching boxes act on the current register value.
- **Reset.** `rst_n` is active low and asynchronous. It clears valid bits, FIFO
  pointers and counters, and sets every thread to `AES_128`. Datapath registers are not reset.
- **State layout.** Data follow FIPS-197 byte order: byte 0 of the
  block is bits [127:120], and the state is stored column by column.

## How this departs from the source description

The network structure comes from the published description. So do the
tag/FIFO rules, the two-memory FIFO, the per-thread configuration registers,
two threads, a four-step pipelined round and one key-expansion stage per round.
The following are this design's own choices, since the description does not give them:

- which actors the merged network shares (shown above);
- the FIFO depth and the per-thread reservation;
- round-robin choice between ready threads;
- the valid/ready port protocol, the ID encoding and the reset values;
- the key-path padding described above.

There are also three known differences:

- **Clock.** The published results give latency in ns (250 / 350) and
  throughput in Gbps, but no clock frequency. This design's 53 / 73 cycles have
  nearly the same ratio (0.726 against 0.714). A second table of the same
  source gives 166 / 233 ns and 32.25 Gbps for the same design. The cycle-level
  behaviour here (one block per cycle, latency set by the rounds) agrees with both.
- **No AES-192.** AES-192 is not built, and neither is decryption.
- **No host side.** The host side, meaning the processor and bus that would feed
  the ports and write the registers, is not part of this RTL.

## Verification

Each module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line. Expected values come from
`tb/aes_ref_pkg.sv`, an independent AES model. It uses a brute-force S-box
inverse and matrix-form round steps. It reproduces the FIPS-197 examples C.1
(AES-128) and C.3 (AES-256).

`tb_aes_mt_accel` runs the top at its default parameters:

- **Known-answer tests.** The FIPS-197 vectors, with exact latency checks (53 and 73 cycles).
- **Streaming.** 100 blocks through AES-128, then 100 through AES-256, checking one block per clock at the output.
- **Both threads at once.** 100 AES-128 blocks and 100 AES-256 blocks, with random output back-pressure.
- **Reconfiguration.** A swap of the two threads' configurations, with 30 blocks each.
- **Bypass.** Thread 0 is starved of keys while thread 1 streams past it through the same FIFOs.

The testbench counts each mechanism: concurrency, overtaking, output stalls,
input back-pressure, reconfigurations and bypass. It fails if any one never happened.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/aes_mt_pkg.sv tb/aes_ref_pkg.sv \
    -y rtl -y tb tb/tb_aes_mt_accel.sv --top-module tb_aes_mt_accel -Mdir obj
./obj/Vtb_aes_mt_accel
```

For a unit test, replace the testbench file and top-module name, for example
`tb/tb_tagged_fifo.sv` and `tb_tagged_fifo`. The full-design build elaborates
many S-box ROMs, so Verilator needs several minutes for it. The unit tests build in seconds.
