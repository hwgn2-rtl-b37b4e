# HWGN2 garbled neural-network evaluator

A neural-network accelerator leaks its weights and its layer structure through
power and electromagnetic side channels: the same multiply-accumulate pattern
repeats once per neuron and once per layer, and the data-dependent switching
correlates with the weights. HWGN2 avoids masking. Instead, the network is
evaluated as a **garbled circuit**. The network's owner (the *garbler*) compiles
the network into a Boolean netlist, garbles it, and streams it to the chip. The
chip (the *evaluator*) never holds a plain bit of the weights, the activations
or the netlist. Every wire carries a random 128-bit *label* instead of a bit,
and every gate is a small encrypted table. What the chip's power trace could
reveal is labels and ciphertexts, which are fresh random strings for every
garbling.

Two more steps hide the *architecture* as well as the values:

* The netlist reaches the chip as **garbled instructions** of a MIPS-style
  instruction stream, four gates per instruction. Each instruction carries an
  opaque 32-bit *garbled code*. Only a per-session **decode mapping**, also sent
  by the garbler, tells the chip which operation a code stands for. Two
  instructions that do the same thing carry different codes, so no repeating
  pattern shows where one neuron or layer ends and the next begins.
* In the **resource-efficient mode** (the default), the chip holds **one
  instruction at a time**. For each OT interaction (one exchange over the
  garbler's oblivious-transfer link), the garbler sends the mapping, one
  instruction and the labels that instruction needs. The chip evaluates the
  instruction, the garbler takes the result labels back, and the chip
  **erases** the mapping and the instruction. The chip's memory then does not
  grow with the network, but communication does: BM1, a
  784-1024-1024-1024-10 MLP, needs 2345 instructions and so 2346 interactions.
  A parameter lets the chip hold the complete program instead, which costs
  memory and saves communication.

An optional **cut-and-choose** extension protects the evaluator's input from a
*malicious* garbler, meaning one that garbles a different function. The
garbler sends NUM_GC independently garbled copies. The evaluator opens 40 of
them and checks that they agree (the *XOR-tree*), then takes the bitwise
*majority* of all outputs as the answer.

This RTL builds the evaluator side: the garbled instruction evaluator, output
decryption, and the cut-and-choose check. Garbling, oblivious transfer and the
host link are software outside the chip, so their traffic appears as ports.

## Block structure

```
             garbler / OT link (off chip)
   mapping entries     garbled instructions     labels X, L_i     check_sel
        |                      |                     |                |
  +-----v-------------+  +-----v-----------+   +-----v---------+      |
  | garbled_instr_mem |->| instr_handler   |   | label_mem     |      |
  | code -> OP set    |  | INSTR_CAP cells |   | 32 x 128 bit  |      |
  +-------------------+  +--^-------+------+   +--+--------^---+      |
        ^ erase              |fd_en  |OP set       |a,b     |y         |
        +-------- erase_req -+       v             v        |          |
                         +-------------------+  +-----------+---+     |
                         | controller        |->| garbled_alu    |     |
                         | mode, operands,   |  | free XOR / GRR3|     |
                         | read/write        |  | + fixed-key AES|     |
                         +-------------------+  +----------------+     |
   hwgn2_top:  label_mem --> output_decoder (lsb xor d) --> result buffer [NUM_GC]
                                                            |            |
                                                   xor_tree (cheat) majority_output
```

`garbled_mips_evaluator` contains the upper part. `hwgn2_top` adds
decryption, the result buffer, the XOR-tree and the majority vote.

## How a garbled gate is evaluated (`garbled_alu`, `aes128_fixed_key`)

The garbling follows the usual JustGarble conventions. Each wire w has two
labels: `W0`, and `W1 = W0 ^ Δ`. The secret offset Δ is the same for every wire
and has its least significant bit set. Bit 0 of a label is therefore its
*permute bit*: it tells the evaluator which table row to use, and it says
nothing about the wire's value.

* **Free XOR** (`OP_XOR`): `Y = A ^ B`. It needs no table and takes one clock.
  XNOR gates run the same way: the garbler puts the inversion into the output
  wire's labels. An XNOR-based binarised network is therefore almost entirely
  free gates.
* **Table gate** (`OP_TAB`): any other two-input function (AND, OR, NAND, ...).
  The garbler sends three 128-bit rows. Row reduction makes the row for permute
  bits (0,0) implicit. The ALU computes

  ```
  K = (A << 1) ^ (B << 2) ^ T          T = gate index (tweak), 32 bits
  H = AES_k(K) ^ K                     fixed public key k (parameter HASH_KEY)
  Y = H                                if lsb(A) = 0 and lsb(B) = 0
  Y = H ^ gtab[2*lsb(A) + lsb(B) - 1]  otherwise
  ```

  The chip cannot tell which Boolean function it evaluated. `done` rises 12
  clock edges after the edge that samples `start`, counting that edge.

`aes128_fixed_key` is a standard iterative AES-128 encryptor. It runs one round
per clock and expands the round keys on the fly. It computes the S-box as a
GF(2^8) inverse plus the affine map, so it needs no table. `done` rises 10 edges
after the start edge. The testbench checks it against the FIPS-197 vectors.

## Garbled instructions and the decode mapping

Types are in `hwgn2_pkg`. One garbled instruction (`garbled_instr_t`, 1660 bits):

| field | bits | meaning |
|---|---|---|
| `code` | 32 | garbled opcode token, meaningless without the mapping |
| `gid` | 32 | gate index of slot 0; slot j uses tweak `gid + j` |
| `slot[0..3]` | 4 x 399 | `ra`, `rb`, `rd` (5-bit label registers), `gtab` (3 x 128-bit rows) |

A mapping entry (`map_entry_t`) is `{valid, code, ops[4]}`. Each OP is
`OP_NOP`, `OP_XOR` or `OP_TAB`. `garbled_instr_mem` holds MAP_DEPTH = 64
entries and compares a code against all of them at once. If several entries
match, the lowest index wins. The garbler can load decoy entries alongside the
real ones.

`instr_handler` holds the instruction cells (INSTR_CAP of them). On Fetch/Decode
EN it looks up the selected cell's code. On the next edge it presents the OP set
and the instruction's operands. A code with no match decodes as four NOPs and
sets `dec_err_seen`. When INSTR_CAP = 1, the handler clears its cell one clock
later and pulses `erase` into the mapping memory, which then holds nothing.
The erase is part of the one-instruction mode's security: after each
interaction, nothing of the program is left on the chip.

`controller` sequences the work. For each instruction it runs fetch, decode,
then the four slots. For each slot it reads the two operand labels from
`label_mem`, starts the ALU in the slot's mode, and writes the result to `rd`.
NOP slots are skipped.

## Driving the chip

One interaction in the default one-instruction mode, as `tb_hwgn2_top` does it:

1. Load the labels the instruction reads: `gin_we/gin_addr/gin_label`. These
   are the evaluator's garbled input X, obtained by OT, and the garbler's labels
   L_i. In the test, these are the weight labels of the neuron being computed.
2. Write mapping entries: `map_we/map_addr/map_wdata`.
3. Write the instruction into cell 0: `instr_we/instr_wdata`.
4. Pulse `run` with `n_instr = 1`. `done` pulses after
   `1 + 3 + Σ slot` edges, counting the edge that samples `run`. A slot costs
   1 edge for a NOP, 2 for an XOR and 13 for a table gate, so an instruction
   takes at most 56 edges.
5. Read result labels through `gout_addr/gout_label` (Y_i back to the
   garbler), or keep them in the label registers for later instructions.

After the last instruction, pulse `dec_start` with `out_base` (first of OUT_W
consecutive output registers), `d` (the permute bit of each output wire's
0-label) and `gc_idx`. OUT_W + 1 clocks later, `y_valid` pulses with
`y_j = lsb(Y_j) ^ d_j`, and the word is stored in result slot `gc_idx`. For
cut-and-choose, repeat this for each garbled set and then set `check_sel` to
the opened sets. `cheat` and `client_out` are combinational.

With `INSTR_CAP > 1`, write several cells and run them with one `run`. The erase
is then off.

## Cut-and-choose (`xor_tree`, `majority_output`)

`xor_tree` XORs every opened set's decrypted word with the first opened one and
ORs the differences together, so `cheat = 1` means two opened sets disagree.
This checks that all opened sets agree. A literal XOR of all the outputs would
not: it misses any even number of equal deviations. `majority_output` votes
per bit: an output bit is 1 when strictly more than half of the NUM_GC = 41
sets (the smallest count above 40) have it set. Both are combinational.

## Parameters

| parameter | default | where | notes |
|---|---|---|---|
| INSTR_CAP | 1 | evaluator, top | 1 = one instruction per interaction with erase; larger holds the complete program |
| MAP_DEPTH | 64 | mapping memory | own choice (the size of the MIPS 6-bit opcode space) |
| NREGS | 32 | label memory | own choice (MIPS register count) |
| NUM_GC | 41 | top | garbled sets for cut-and-choose, "more than 40" |
| OUT_W | 10 | top | raw output bits, one per output neuron |
| HASH_KEY | FIPS-197 example key | ALU | any public fixed key |

Synthesis of the top at the defaults gives about 11,700 word-level cells and
11,150 flip-flop bits. Most of it is the 4096-bit label memory, the 1660-bit
instruction cell, its decoded copy, and the 64-entry mapping. The source design
reported 1775 LUTs and 1278 FFs on an Artix-7 FPGA. That figure probably does
not include the 128-bit AES datapath, or the source keeps labels in block RAM.
Do not take this RTL's size as a reproduction of that number.

## What follows the source and what is this design's own

Taken from the source: the block split (mapping memory, instruction handler,
controller, ALU) and its names (Fetch/Decode EN, OP, Mode). Also: four gates per
garbled instruction; one instruction cell with an erase after each conversion,
versus the complete set; comparing a garbled instruction against the mapping to
obtain OPs; free-XOR, row reduction and a fixed-key block cipher for garbling;
decryption by XOR with d; an XOR-tree cheat check and majority output over more
than 40 sets; 32-bit garbled instruction words; 128-bit label matrices.

This design's own choices:

* the instruction and mapping bit formats;
* AES-128 as the block cipher, and the exact hash;
* a 32-entry label register file, through which garbled input enters the ALU.
  The source's diagram draws the input going straight into the ALU;
* the depth of the mapping memory and its compare-all lookup;
* the controller's state sequence and all cycle timing;
* bit-serial decryption into a result buffer;
* the XOR-tree's compare-to-first form, and per-bit majority;
* the format of d (output 0-label permute bits);
* OUT_W = 10 and NUM_GC = 41.

Not built: the garbler, the OT/host link, the evaluator's input encoding and
coin tossing. These are software or two-party protocols. The source's alternative
TinyGarble-style evaluator with a scheduler and an SCD netlist memory is also
not built.

Known gaps:

* **Complete-set mode at BM1 size.** The complete-set mode is only as large as
  INSTR_CAP and the 32 label registers allow. It does not hold BM1's 2345
  instructions or its roughly 10,000 live wires at the defaults.
* **Size of the cut-and-choose logic.** The source reports the XOR-tree at 2
  LUTs and the majority at 10. That is only possible if they see the outputs
  one word at a time. Here all NUM_GC x OUT_W decrypted bits are kept in a
  result buffer, and both units are combinational over all of it. This costs
  410 flip-flops and a few hundred gates. In exchange, the opened subset can
  be chosen after every set has been evaluated.
* **Evaluator only.** Nothing here garbles. Wrong tables from a garbler are
  caught only by the cut-and-choose check.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. The reference models
in `tb/gc_ref_pkg.sv` are written separately from the RTL:

* a table-based AES-128, checked against FIPS-197;
* the garbling hash;
* a row-reduced point-and-permute garbler.

`tb/gc_prog_pkg.sv` garbles whole gate lists into instructions and evaluates
them in plain bits.

* `tb_garbled_alu`: 24 randomly garbled gates of six kinds, all input
  combinations, exact output labels, and latencies.
* `tb_garbled_mips_evaluator`: random 24-gate netlists run in both modes.
  Every register's final label must equal the label of the plain result.
  Also checks cycle counts and erase.
* `tb_hwgn2_top`: the whole chip at default parameters. The workload is a
  garbled XNOR layer (10 binary neurons on 3 inputs), garbled 41 times, with
  one set garbled dishonestly. It checks every decrypted output, cheat
  detection with and without the bad set, and the majority. It also counts
  each mechanism: free and table gates, all four table rows, NOP slots, erase,
  decode miss, decryption, and both cheat outcomes. It runs in about 15 s.
* `tb_hwgn2_top_complete_set`: the whole chip built for the complete-set mode
  (16 instruction cells, 6 outputs, 3 garbled sets). A 6-neuron XNOR layer
  of 42 gates is sent as one program of 11 instructions, with its complete
  mapping shuffled among decoys, and evaluated by a single `run`. It checks
  the total cycle count, that no erase happens, the decrypted outputs, the
  cheat flag for both opened pairs, and the majority.
* `tb_bm_workloads`: the two small benchmark networks, 784-5-5-10 and
  784-6-5-5-10, streamed through the chip at default parameters, one
  instruction per interaction. The networks are binarised, with random
  weights and inputs. A neuron is an XNOR per input followed by a ripple
  popcount into an accumulator preset to 2^(W-1) - T, so its top bit is the
  sign. That gives 86,840 and 104,328 gates (21,710 and 26,082 interactions).
  The testbench keeps every wire's label between interactions, as the garbler
  would. Before each interaction it loads the group's input labels into the
  label registers, and afterwards it reads the results back. It checks every
  gate's output label, every interaction's cycle count, and the 10 outputs
  decrypted on chip. It runs in about 20 s. The 1024-wide network is far too
  large to simulate gate by gate (about 17 million gates in its first layer
  alone with this neuron circuit). Its streaming is the same as the small ones.

To simulate with Verilator (5.x) from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/hwgn2_pkg.sv tb/gc_ref_pkg.sv tb/gc_prog_pkg.sv tb/tb_hwgn2_top.sv \
    --top-module tb_hwgn2_top -o sim && ./obj_dir/sim
```

Replace `tb_hwgn2_top` with any other testbench name. For lint:
`verilator --lint-only -Wall -Irtl -y rtl rtl/hwgn2_pkg.sv rtl/hwgn2_top.sv`.
Three lint warnings remain and are harmless:

* an unconnected debug output (`valid_mask`);
* the controller not reading the instruction's `code` field;
* `rst_n` used both as the asynchronous reset and in an assertion's
  `disable iff`.
