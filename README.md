# CD-PIM: a bank-level processing-in-memory LPDDR5 die in SystemVerilog

Token-by-token LLM decoding on a phone or an embedded board is limited by DRAM
bandwidth, not arithmetic: every generated token multiplies one vector by every
weight matrix and by the growing key/value (K/V) cache. CD-PIM moves those
matrix-vector products (GEMV) into the LPDDR5 die. It has three ideas:

* **Four pseudo-banks per bank.** The global bitline of every bank is cut into
  left/right halves and, with isolation transistors, into upper/lower halves.
  Each quarter (a *Pbank*: TL, TR, BL, BR) has its own global sense amplifier
  and can deliver a 32-byte word in the same memory cycle as the other three.
  That gives four times the internal bandwidth of an unmodified bank.
* **Two fast computing units (CUs) per bank.** CU_Top eats the words of TL and
  TR, CU_Bottom those of BL and BR. A CU runs at twice the DRAM core clock
  (400 MHz against 200 MHz). It takes the left word in its first cycle and the
  right word in its second. So one 32-lane INT8 multiplier array handles
  64 bytes of weights per memory cycle.
* **Two modes.** In HBCEM (high-bandwidth compute-efficient mode) all four
  Pbanks feed both CUs. In LBIM (low-batch interleaving mode) only one CU per
  bank computes. The processor meanwhile reads and writes the other half of
  the same bank, so prefill GEMMs of other requests overlap the decode.

This RTL models one die: sixteen such banks behind a command port and a
32-byte data bus. It is cycle-accurate for the PIM datapath. The DRAM array is
an ideal synchronous memory.

## Module map

```
cdpim_die                      top: 16 banks, command port, data bus
 ├─ pim_cmd_decode             PIM instruction -> MAC enables, SEL0/SEL1 register
 └─ pim_bank  x16              one bank
     ├─ pbank x4               Bank_TL, Bank_TR, Bank_BL, Bank_BR (array + global SA)
     └─ pim_cu x2              CU_Top (TL,TR), CU_Bottom (BL,BR)
         ├─ cu_input_buffer    64 B of input vector
         ├─ cu_mac_core        32 INT8 multipliers + adder tree, one register stage
         └─ cu_output_buffer   64 x 16-bit partial sums (128 B) + accumulators
cdpim_pkg                      shared constants, command struct, enums
```

## The computing unit: two words per memory cycle

`pim_cu` receives `w_valid` with two 256-bit words: the left and right Pbank
words of the column that the MAC instruction read. The timeline, in CU clocks:

| CU cycle | multiplier input | accumulate |
|---|---|---|
| n (w_valid) | left word, right word captured in `w_hold` | - |
| n+1 | `w_hold` (right word) | left products |
| n+2 | next pair may enter | right products |

A new pair may arrive every second CU clock, which is every memory cycle. An
assertion in `pim_cu` checks that a pair never arrives while a right word is
still pending. A run of 64 MACs takes 128 CU clocks plus a 2-clock drain.
`tb_pim_cu` checks that count.

A 6-bit `step` counter counts MACs and wraps after 64. `PIM_CLR` zeroes it,
clears the sums and selects the product mode.

## Outer product for K, inner product for V

The two attention GEMVs have different shapes. The CU supports both so that
neither one leaves CUs idle.

**Keys, outer product.** The score vector is q·K, with K of size Hdim x L.
K is stored column-wise: a 32-byte Pbank word holds 32 consecutive token
positions of one Hdim row. For one bank and one 64-row slice of K:

* Row k of the slice sits in column k of the four Pbanks. TL and TR hold
  tokens 0-31 and 32-63, BL and BR hold tokens 64-95 and 96-127.
* The bank's CUs hold q[64b .. 64b+63] in their input buffers (both CUs hold
  the same 64 elements).
* At step t the CU multiplies the scalar `IN[t]` by the left word and adds
  the products into sums 0-31. It then multiplies `IN[t]` by the right word
  and adds into sums 32-63.

After 64 steps each bank holds 128 partial scores over its 64 rows of Hdim.
The host reads them out and adds the sixteen banks' vectors. A die thus
covers a 1024 x 128 block of K per 1024-element query slice. Newly appended
tokens add columns, which spread over all banks, so each new token keeps
every CU busy.

**Values, inner product.** The output is a·V, with V of size L x Hdim. V is
stored row-wise: a Pbank word holds 32 consecutive *token* positions of one
Hdim column. TL holds tokens 0-31 and TR tokens 32-63 of the top CU's
column; BL and BR do the same for the bottom CU's column.

* All banks receive the same 64 attention weights (broadcast `PIM_LDIN`).
* At step t the CU dots `IN[0..31]` with the left word and `IN[32..63]` with
  the right word, and adds both into sum t.

After 64 steps each CU holds 64 finished dot products, one per Hdim column.
A bank holds 128 and the die 2048. The next 64 tokens of V use the next
attention slice, and the sums keep accumulating into the same entries.

Sums are 16 bits wide because 128 bytes hold 64 sums. They wrap on overflow.
Products and the 32-term dot product are computed at full width (16 and 21
bits) before they are truncated into the sum.

## Instructions, SEL multiplexers and the two modes

Each half of a bank has a 2:1 multiplexer in front of the data bus: input 1
is the CU's output buffer, input 0 is the Pbank word. SEL1 drives the top
half and SEL0 the bottom. The three MAC instructions set them as follows:

| instruction | SEL0 | SEL1 | computes | processor may use |
|---|---|---|---|---|
| `PIM_MAC_FM` | 1 | 1 | both CUs (HBCEM) | - |
| `MACT_LDB` | 0 | 1 | CU_Top | bottom Pbanks |
| `MACB_LDT` | 1 | 0 | CU_Bottom | top Pbanks |

SEL is held in a register, so after a run the host reads partial sums with
ordinary `MEM_RD` commands. Column bits [1:0] then pick one of the four
32-byte chunks (16 sums, sum 16·chunk in bits 15:0). `PIM_EXIT` returns both
SEL bits to 0. A command is decoded with the SEL value it sets itself, so a
`MACT_LDB` that follows `PIM_MAC_FM` already reads bank data from the bottom
half in its own memory cycle.

### Command port (this model's own format)

One `cmd_t` (see `cdpim_pkg`) is taken per memory cycle. `cmd_ready` is high
on every second CU clock, and a command fires on an edge where `cmd_valid`
and `cmd_ready` are both high. A held-off command must stay stable (checked
by an assertion). A command has two slots that execute in the same cycle:

* **pim:** `PIM_MAC_FM`, `PIM_MACT_LDB`, `PIM_MACB_LDT` read column
  `pim_col` of the open rows in *every* bank. `PIM_LDIN` writes `wdata` into
  32-byte chunk `chunk` of the input buffers of bank `bank`, or of all banks
  when `all_banks` is set. `PIM_CLR` clears all sums and sets the mode
  (`inner` = 1 for V, 0 for K). `PIM_EXIT` sets SEL to 0.
* **mem:** `MEM_ACT`/`MEM_PRE` open or close `row` in both Pbanks of `half`,
  in one bank or all banks. `MEM_WR` writes `wdata` to Pbank
  (`half`, `side`) at `col`. `MEM_RD` reads one.

If the mem slot targets a half whose CU is computing in that same command,
it is refused and `conflict` pulses. The same happens to a `PIM_LDIN`
combined with a write. LBIM is exactly a `MACT_LDB` (or `MACB_LDT`) command
whose mem slot targets the other half.

Read data appears on `rdata` with `rvalid` two CU clocks after the `MEM_RD`
fires. A column access to a Pbank whose row is closed is ignored, and `err`
pulses.

## Sizes and where they come from

| quantity | RTL default | design value |
|---|---|---|
| banks per die | 16 | 16 |
| Pbanks per bank | 4 | 4 |
| global SA word | 256 bit | 256 bit |
| CU lanes | 32 x INT8 | 32 B per compute cycle |
| CU clock / memory clock | 2 | 400 / 200 MHz |
| input buffer | 64 B | 64 B |
| output buffer | 64 x 16 bit | 128 B |
| columns per Pbank row | 32 | not given (LPDDR5 2 KB page) |
| rows per Pbank | **64** | not given; 32 Gb die => 65536 |

The one scaled size is the row count. A full 32 Gb die means 64 Pbanks of
65536 x 32 x 256 bit. Elaborating that in yosys took 16 GB and 27 minutes.
At the default of 64 rows a die stores 4 MiB. That holds the weights of a
full 64-step K or V run in every bank. It cannot hold whole LLaMA layers,
and all data movement beyond one die is left to the host. To model the real
capacity, set `ROWS` to 65536 on `cdpim_die`: nothing else depends on it.

## Where this model departs from the paper-level description

* **The design's own choices.** The split of a bank into Pbanks, the CU
  wiring (TL/TR to the top CU, BL/BR to the bottom), the serial left-then-right
  feed at twice the memory clock, the buffer sizes, the K/V mappings, and the
  three instructions with their SEL values all follow the design.
* **This model's choices:**
  * the command format and handshake;
  * the all-bank broadcast of MAC instructions;
  * `PIM_LDIN`, `PIM_CLR` and `PIM_EXIT`;
  * the conflict rule;
  * the one-stage multiplier pipeline;
  * signed INT8 arithmetic;
  * wrapping 16-bit sums;
  * a 32-byte data-bus word;
  * the read latency.
* **Not modelled:**
  * DRAM timing (tRCD, tRP, refresh);
  * the analog isolation transistors (their effect is the independent
    top/bottom row);
  * the LPDDR5 I/O and command protocol;
  * clock generation;
  * the host processor, including the cross-bank reduction of K-cache
    scores and the softmax.
* **Two trapezoid multiplexers per half** take the left and right SA words
  into the CU and towards the bus. Their select signals are not specified.
  Here the CU-side one alternates left/right on CU cycles, and the bus-side
  one is chosen by the `side` address bit.

## Simulating

Every module has a self-checking testbench in `tb/` that ends with a line
`TB_RESULT checks=N failures=M`. With plain Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/cdpim_pkg.sv rtl/cu_input_buffer.sv \
  rtl/cu_mac_core.sv rtl/cu_output_buffer.sv rtl/pim_cu.sv rtl/pbank.sv \
  rtl/pim_bank.sv rtl/pim_cmd_decode.sv rtl/cdpim_die.sv tb/tb_cdpim_die.sv \
  --top-module tb_cdpim_die -o sim && ./obj_dir/sim
```

`tb_cdpim_die` runs the die at its default size and acts as the host:

* It stores weights with ordinary writes.
* It runs a full K-cache outer-product slice in HBCEM, checks all 2048
  partial sums, and checks the host-side sum over the sixteen banks.
* It runs a V-cache inner-product slice in HBCEM.
* It runs 64 `MACT_LDB` cycles, each with a concurrent read of the bottom
  half, and 64 `MACB_LDT` cycles, each with a concurrent write to the top
  half.
* It provokes a refused access and a closed-row error.

It counts each of these mechanisms and fails if one never happened. It also
checks that MAC instructions issue at one per memory cycle. Verilator needs
about three minutes to build it; the simulation itself takes seconds. The
smaller testbenches (`tb_pim_bank`, `tb_pim_cu`, ...) build in seconds and
override `ROWS`/`COLS` only to keep their arrays small.
