# A 4-stage RV32IM core with layered branch prediction

A short in-order pipeline loses a cycle every time the frontend fetches the
wrong instruction. This core aims to lose that cycle as seldom as possible.
Each instruction gets several predictions as it moves through the pipeline,
each one better informed than the last:

1. **Fetch.** Only the address is known. A branch target buffer (BTB)
   recognises control transfers seen before. A BATAGE-style predictor gives
   the direction of known conditional branches, and a return address stack
   (RAS) gives the target of returns.
2. **Decode.** The instruction word is known. Static rules fix what fetch got
   wrong or could not know:
   - direct jumps are always followed;
   - returns take the RAS top;
   - a branch unknown to the BTB follows BATAGE if BATAGE's answer came from
     a tagged (history-based) bank;
   - otherwise a backward branch is predicted taken and a forward one not
     taken.
3. **Execute.** The real outcome is computed. A wrong next PC sends the
   correct address to the instruction memory in the same cycle.

Each correction costs one lost cycle. Training happens at retirement
(writeback), where outcomes are final.

The organisation follows the design described by A. Saveau in "Branch
Prediction in Hardcaml for a RISC-V 32im CPU". That description gives the
mechanisms and the reasoning behind them. It gives no sizes, no hashes and no
bit-level formats. Those, and everything marked *design choice* below, belong
to this RTL.

## Pipeline

| stage | work | file |
|---|---|---|
| F | The fetch address goes to the instruction SRAM, both BTB halves and BATAGE. These choose the next fetch address. | `cpu_top`, `jump_btb`, `branch_btb`, `batage` |
| D | The SRAM word arrives. Decode and register read share this stage. The static predictor may redirect fetch. The RAS and global history are updated speculatively. | `decoder`, `regfile`, `static_predictor`, `ras`, `global_history` |
| E | ALU, multiplier, divider, load/store issue and branch verification. | `alu`, `multiplier`, `divider`, `branch_unit` |
| W | Load data arrives. The register file is written. The instruction retires: BATAGE trains and the BTBs insert. | `cpu_top` |

Both memories are single-cycle synchronous SRAMs (`sram`), so there are no
caches. The address goes in during one cycle and the data comes out in the
next. This sets the timing of the whole frontend:

- **Fetch prediction.** The BTB and BATAGE tables are read combinationally
  in the cycle the address goes to the SRAM. When the word reaches decode,
  the next address is already on its way.
- **Decode redirect.** When decode disagrees with fetch, the word fetched in
  that cycle is discarded. That is one bubble.
- **Execute redirect.** When execute finds a misprediction, the corrected PC
  bypasses the fetch PC register and drives the SRAM address directly. The
  correct instruction is in decode one cycle later. Only the instruction that
  was in decode is squashed, so the recovery penalty is one cycle.
- **Forwarding.** Writeback results go to execute, and the register file
  passes a same-cycle write through to decode. A load's data arrives in
  writeback, exactly when the next instruction is in execute, so there are no
  load-use stalls.
- **Stalls.** The only stall comes from the iterative divider (33 cycles).
  It holds F, D and E. A hold register keeps the decode word while the SRAM
  output moves on.

## Prediction structures

### Branch target buffer, split in two

Jumps and branches are kept in two separate direct-mapped tables. Both are
looked up with the fetch address.

- **`jump_btb`** stores a full 32-bit target and a *return* flag. On a hit
  to a return, fetch takes the RAS top instead of the stored target.
- **`branch_btb`** stores only the branch's 12-bit offset (immediate bits
  12:1). Fetch adds it to the PC, and BATAGE decides taken or not taken.

An entry describes static facts about an instruction, so it never needs
updating. Entries are written only at retirement:

- jumps are inserted when they missed at fetch;
- conditional branches are inserted only when they were taken. A branch that
  is never taken has no reason to take a slot.

Default size (design choice): 64 entries in each table.

### Return address stack (`ras`)

- **Updates happen at decode, not at retirement.** Calls and returns often
  follow each other within a few cycles.
- **Call and return detection** uses the RISC-V link-register convention
  (x1/x5):
  - a call pushes pc+4;
  - a return pops;
  - `jalr` between two different link registers does both in one cycle.
- **Overflow.** The stack is a circular array. On overflow the pointer
  wraps and the oldest entry is overwritten, so a deep call chain keeps its
  most recent return addresses.
- **Recovery.** Every instruction carries down the pipeline the stack
  pointer as it stood after its own decode. A misprediction restores only
  that pointer; entries are never copied. Pushes and pops from the wrong path
  can therefore lose at most an entry that was popped and then overwritten.
  In this 4-stage pipeline the only wrong-path instruction that can have
  touched the stack is the one in decode during the redirect.

Default depth (design choice): 16.

### Global history (`global_history`)

- **Contents.** A circular buffer of 64 single-bit outcomes with a write
  pointer.
- **Writes.** Decode appends one bit for every control transfer: the
  predicted direction for a branch, 1 for a jump.
- **Snapshot.** Fetch reads the newest 32 bits before the current pointer.
  It saves that pointer with the instruction.
- **Retirement read.** Retirement reads the same 32 bits through a second
  port at the saved pointer. Training therefore sees exactly the history
  the prediction saw.
- **Recovery.** A misprediction resets the write pointer to just after the
  mispredicted instruction's slot and rewrites that slot with the real
  outcome.
- **Bypass.** A read of the slot being rewritten in the same cycle sees the
  new bit. This matters because the corrected fetch happens in that very
  cycle.
- **Sizing rule.** The buffer must exceed the longest history (32) by at
  least the number of control transfers in flight (here at most 3), or
  speculative writes would overwrite history still in use.

### BATAGE direction predictor (`batage`, `batage_hash`, `batage_pkg`, `xorshift_prng`)

This is the most involved block. It has two parts.

**Tables** (all sizes are design choices):

- an untagged base table of 1024 entries, indexed by the PC;
- four tagged banks of 256 entries, with 8-bit tags.

Bank *b* hashes the PC with the newest 4·2^b history bits (4, 8, 16 and 32
bits). The history is folded by XOR down to the index width and to the tag
width. A second fold, shifted by one bit, goes into the tag so that index
and tag alias independently.

**Entry.** Each entry holds a *dual counter*: `n1` counts taken outcomes and
`n0` not-taken outcomes, both saturating at 7. The entry predicts taken when
`n1 > n0`. Its confidence has three levels:

- high if `2·min+1 < max`;
- medium if `2·min+1 == max`;
- low otherwise.

A fresh (1,0) entry is therefore medium, (0,0) is low, and (2,0) is high. A
tagged entry hits when its tag matches and its counter is not (0,0), so an
empty entry needs no valid bit.

**Prediction** is combinational, in the fetch cycle:

1. The base entry and every tagged hit are candidates.
2. The most confident candidate provides the direction.
3. Among equally confident candidates, the one with the longest history
   wins.
4. The output also says whether the provider was a tagged bank. Decode uses
   BATAGE only when that is true and the BTB missed, because a tagged entry
   exists only for a branch seen before.

**Training** happens at retirement, for every conditional branch:

1. The PC and the snapshot history are hashed again.
2. The provider and every hit in a longer bank learn the outcome.
3. If the provider was wrong, the predictor scans the longer banks that
   missed, starting with the bank just above the provider. One bit of random
   stream 0 sometimes skips that first bank.
4. The first victim that is not high-confidence is replaced by a new entry
   holding one observation of the outcome.
5. A high-confidence victim is not replaced. Instead it decays one step
   towards low confidence with probability ½, drawn from its bank's random
   stream, and the scan moves on.

**Randomness.** Five Marsaglia xorshift generators supply it. They use the
step function and seeds of the reference BATAGE model, and step once per
trained branch.

**What is this design's own.** The update and allocation rules, the
confidence thresholds and the stream assignments are this design's own
reading of the published BATAGE predictor. The description this RTL follows
says only:

- a list of bimodal-like entries;
- geometric history lengths;
- a confidence per entry;
- the most confident entry wins, with ties to the longer history;
- training at retirement with a matching history.

The tables are flip-flop arrays read in the same cycle. With large tables
this is the block that limits frequency.

### Decode-stage static prediction (`static_predictor`)

| instruction | decode's next PC | RAS | history bit |
|---|---|---|---|
| `jal` | pc + imm | push if rd is a link register | 1 |
| `jalr` return | RAS top | pop | 1 |
| other `jalr` | whatever fetch chose (jump-BTB target or pc+4) | push if rd is a link register | 1 |
| branch, branch-BTB hit | whatever fetch chose | – | predicted direction |
| branch, tagged BATAGE provider | BATAGE direction | – | predicted direction |
| other branch | taken if backward, else not taken | – | predicted direction |
| anything else | pc+4 | – | – |

When an indirect jump has no BTB entry, the frontend does not stall. It
simply continues at pc+4 and lets execute correct it.

## Memory map and I/O

- **Instruction memory.** Separate (Harvard), 64 KiB. It is loaded through
  the `prog_*` port, normally while `rst` is high. `prog_dmem` selects the
  data memory instead.
- **Data memory.** 64 KiB, word-indexed. Address bits above its size are
  ignored.
- **UART** at `0x1000_0000`–`0x1FFF_FFFF`, 8N1, 434 clocks per bit
  (115 200 baud at 50 MHz):
  - word 0: write sends a byte; read returns the last received byte and
    clears rx-valid;
  - word 1: status, bit 0 tx-busy and bit 1 rx-valid.
- **Retire trace.** `retire_*` reports every retiring instruction: PC,
  instruction word and register write.
- **Not implemented.** FENCE, ECALL, EBREAK and CSR instructions execute as
  no-operations. There are no exceptions, interrupts or CSRs.

All of the above is design choice; the description only mentions a
memory-mapped UART.

## Parameters (`cpu_top`)

| parameter | default | meaning |
|---|---|---|
| `IMEM_WORDS`, `DMEM_WORDS` | 16384 | SRAM sizes in 32-bit words |
| `RAS_DEPTH` | 16 | return address stack entries |
| `JBTB_ENTRIES`, `BBTB_ENTRIES` | 64 | BTB entries per half |
| `BAT_BASE_ENTRIES` | 1024 | BATAGE base table |
| `BAT_NUM_BANKS` | 4 | tagged banks; the longest history is `BAT_MIN_HIST << (BAT_NUM_BANKS-1)` |
| `BAT_BANK_ENTRIES`, `BAT_TAG_BITS` | 256, 8 | tagged bank size and tag width |
| `BAT_MIN_HIST` | 4 | history bits used by the shortest tagged bank |
| `GHIST_SIZE` | 64 | circular history buffer; must be at least the longest history plus 4 |
| `UART_CLKS_PER_BIT` | 434 | UART bit time |
| `RESET_PC` | 0 | first fetch address |

Power-of-two sizes are assumed for all tables.

## How far to trust it

**What is checked.** Every module has a self-checking testbench in `tb/`
that compares it with an independently written model. The end-to-end
testbench `tb_cpu_top`:

- runs the core at its default parameters on a program assembled in the
  testbench;
- compares every retiring instruction with an instruction-set model
  (`tb/rv_model_pkg.sv`).

That program covers:

- the even/odd loop below;
- a 20-deep recursion, which overflows the RAS;
- 160 random ALU, multiply and divide operations, including division by zero
  and −2³¹/−1;
- sub-word loads and stores;
- an indirect jump and an indirect call;
- two branches that evict each other from the BTB;
- UART transmit and receive.

The testbench also checks three things directly:

- the one-cycle penalty after every decode and execute redirect;
- that every mechanism above actually occurred;
- that the studied branch is never mispredicted once trained.

The studied branch is in the following loop. Its direction alternates, so it
can only be predicted from global history:

    loop: andi a1, a0, 1
          bne  a1, zero, odd     # alternates: needs global history
          j    even
    odd:  addi t1, t1, 1
          j    check
    even: addi t0, t0, 1
    check: addi a0, a0, -1
          bnez a0, loop

On the whole test the core retires about 0.90 instructions per cycle.
`tb_program1` runs the loop alone, with 50 iterations. The inner branch is
mispredicted twice, in iterations 2 and 4, and never after that.

**What is not checked:**

- no benchmark programs were run, so prediction accuracy on real code is
  unmeasured;
- BATAGE was not compared against the reference BATAGE simulator;
- nothing has been timed on an FPGA.

## Simulating

With plain Verilator (5.x). Packages come first, and the other sources are
found by module name:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/rv_pkg.sv rtl/batage_pkg.sv tb/rv_model_pkg.sv \
      -y rtl -y tb tb/tb_cpu_top.sv --top-module tb_cpu_top -o sim
    ./obj_dir/sim

Any other `tb/tb_<module>.sv` builds the same way with its own
`--top-module`; `tb_cpu_top` is the full end-to-end test and `tb_program1`
runs the alternating-branch loop on its own. Each testbench prints one line,
`TB_RESULT checks=N failures=M`, and a watchdog ends runs that hang. The
simulator is two-state, so the design resets every register it reads; only
the SRAM contents start undefined.

To run your own code, write words through `prog_*` while `rst` is high, then
release reset. The assembler class in `tb/rv_model_pkg.sv` shows how
instructions are encoded. The model in the same package can serve as the
reference for new tests.
