# A rule-programmed packet classification engine

A packet filter has to decide, for every packet, whether a firewall policy
allows it. Such a policy is a list of rules over the IP 5-tuple: source address,
destination address, source port, destination port and protocol. A hardwired
matcher fixes the policy when the chip is built. This engine keeps the policy
as a *program* instead. The rules are compiled into a decision tree that looks
at one byte of the header at a time. Each node of the tree is a 24-bit
instruction, called a *sub-rule*. A small single-cycle processor walks the tree
and executes one sub-rule per clock: it fetches the sub-rule, compares one
header byte with the sub-rule's constant, and branches. The walk ends at a leaf
that says allow or deny. To change the policy you load a new program into the
rules memory. The hardware does not change.

The RTL follows the architecture of Wicaksana and Sasongko, "Fast and
reconfigurable packet classification engine in FPGA-based firewall". The
datapath, the sub-rule format, the example rule words and the control sequence
come from that paper. Where the paper leaves something open, the choice made
here is stated below and in the header comment of each file.

## The 5-tuple as thirteen bytes

The header fields are split into 8-bit *sub-fields*, most significant byte
first. This gives 13 sub-fields, numbered by the 4-bit selector of a sub-rule:

| selector | sub-field | selector | sub-field | selector | sub-field |
|---|---|---|---|---|---|
| 0 | PR_0 protocol | 5 | DA_1 dst ip [31:24] | 9 | SP_1 src port [15:8] |
| 1 | SA_1 src ip [31:24] | 6 | DA_2 | 10 | SP_2 src port [7:0] |
| 2 | SA_2 | 7 | DA_3 | 11 | DP_1 dst port [15:8] |
| 3 | SA_3 | 8 | DA_4 dst ip [7:0] | 12 | DP_2 dst port [7:0] |
| 4 | SA_4 src ip [7:0] | | | 13–15 | constant 0 |

## The sub-rule instruction

```
 23   22..19    18..17     16..9    8..1     0
JUMP  SELECTOR  OPERATION  HEADER   ADDRESS  ACTION
```

When ACTION = 0, the sub-rule is a compare-and-branch:

* The comparator sees sub-field `SELECTOR` and the constant `HEADER`, and
  evaluates `OPERATION`:

  | code | meaning |
  |---|---|
  | `01` | sub-field > HEADER |
  | `10` | sub-field < HEADER |
  | `11` | sub-field == HEADER |
  | `00` | never true |

* If the comparison is true, or JUMP is 1, the next PC is ADDRESS.
* Otherwise the next PC is PC+1, which is the next option at the same tree
  level. The all-zero word therefore does nothing and falls through.

When ACTION = 1, the sub-rule is a leaf and ends the inspection. Bit 19 (the
selector's LSB) is the verdict: 1 = allow, 0 = deny. The other bits are
ignored. `24'h000001` is "deny", and `24'h080001` is "allow".

`pce_pkg` holds the field types (`subrule_t`, `header_t`, `sel_e`, `op_e`). It
also has helper functions `cmp_rule`, `jump_rule` and `action_rule` for building
programs.

### Writing a program

A policy becomes one tree level per sub-field. A level is a run of compare
sub-rules, one per option. Each one branches to that option's subtree. The run
ends with a fallback, which is either a JUMP to the subtree that must still be
tried, or a deny leaf. Because the walk can never back up, a rule with a
wildcard has to be copied into every branch that an earlier, more specific rule
opens. Ranges are written with the ordering tests on the most significant byte
that decides them: for example, "port > 1023" becomes "SP_1 > 3". The protocol
check normally comes first, because it has the fewest options. Source address,
destination address, source port and destination port follow. The hardware does
not enforce that order.

`tb/tb_pce_top.sv` contains a hand-compiled example: the four-rule policy

| src ip | dst ip | sport | dport | proto | action |
|---|---|---|---|---|---|
| 167.205.3.11 | 167.205.65.32 | 25 | 8080 | TCP | allow |
| 192.168.\*.\* | \* | 80 | \* | TCP | deny |
| 167.205.65.5 | \* | \* | \* | UDP | allow |
| \* | 134.25.5.2 | >1023 | 80 | TCP | allow |

and default deny. It compiles to 61 sub-rules, and the longest path is 15
sub-rules. Compiling a policy is done outside the engine. No compiler is
included.

## Datapath

```
           +--------------------- ADDRESS [8:1] -------------------+
           |                                                       v
 PC --> rules memory --> SELECTOR [22:19] --> 13:1 sub-field mux --+   +-------+
 ^   (async read, 256x24)  HEADER [16:9]  ---------------------> comparator   |
 |                         OPERATION [18:17] -----------------------^   |      |
 |                         JUMP [23] ----------- OR ----- SEL_DECISION ---> next-PC mux
 |                         ACTION [0] --- hold PC, DONE to controller,  (ADDRESS / PC+1)
 |                         bit 19 ------- 1-bit decision register --> final compile unit --> VALID, FORWARD
 +----------------------------------------------------------------------+
```

| module | role |
|---|---|
| `subfield_mux` | Register for the five fields, loaded at START, so the inspection does not see inputs change. Feeds the 13:1 byte multiplexer. |
| `comparator` | 8-bit greater / less / equal test, selected by OPERATION. |
| `program_counter` | 8-bit PC, +1 adder, and a 2:1 multiplexer between PC+1 and ADDRESS. It is cleared by reset or by the controller, and held when a leaf is reached. |
| `rules_memory` | 256 × 24-bit program store. The read is asynchronous, so fetch, compare and branch all close in one clock. It has a synchronous write port for loading. |
| `decision_reg` | Captures bit 19 of the leaf. |
| `final_compile_unit` | Registers VALID (the verdict) and FORWARD (finished), and clears them while a new inspection runs. |
| `pce_ctrl` | The state machine described below. |
| `pce_top` | Wires these blocks together and exposes the engine's ports. |

The loop that sets the clock rate is: PC → memory read → selector → 13:1 mux →
compare → OR → next-PC mux → PC. Timing was not analysed here. The original
FPGA implementation reports 91 MHz on a Cyclone II.

## Control sequence and timing

`pce_ctrl` has four states:

* **IDLE** waits for START. On the clock where START is seen, it captures the
  header fields and clears VALID and FORWARD.
* **DATA_IN** resets the PC to 0 and empties the decision register.
* **PROCESS** executes one sub-rule per clock, with the outputs held low. When
  the current sub-rule is a leaf (ACTION = 1, the DONE condition), the PC
  freezes on it, the decision register takes bit 19, and the FSM moves on.
* **STOP** has the final compile unit publish VALID and FORWARD, then returns
  to IDLE.

If n sub-rules are executed, FORWARD rises **n + 3 clocks** after the clock in
which START was sampled. In the example policy above, a packet that is neither TCP nor UDP meets a
deny leaf after 3 sub-rules, which takes 6 clocks. On the example policy with the testbench's mixed
traffic, the mean is 10.7 clocks and the longest path gives 18. The paper quotes
an average of 13 clocks without saying which rule set it used.

After an inspection, VALID and FORWARD hold their values until the next START
is accepted. START is ignored while an inspection is running. The header inputs
may change freely once START has been sampled. Reset is synchronous and
abandons any inspection in progress.

## Ports of `pce_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock and synchronous reset (active high) |
| `start` | in | 1 | begin an inspection of the fields present in this clock |
| `src_ip`, `dst_ip` | in | 32 | IPv4 addresses |
| `src_port`, `dst_port` | in | 16 | TCP/UDP ports |
| `protocol` | in | 8 | IP protocol number |
| `valid` | out | 1 | verdict: 1 allow, 0 deny (meaningful while `forward` = 1) |
| `forward` | out | 1 | inspection finished |
| `rule_we`, `rule_waddr`, `rule_wdata` | in | 1, 8, 24 | rules memory write port |

The rules memory powers up holding the paper's four example words at addresses
0..3:

| address | word | meaning |
|---|---|---|
| 0 | `060208` | protocol == 1 → 4 |
| 1 | `062248` | protocol == 17 → 36 |
| 2 | `0618A8` | protocol == 12 → 84 |
| 3 | `000001` | deny |

Every other address holds the deny leaf. An engine that has not been loaded
therefore denies everything. To load a program, write every word you need
while the engine is idle. Word 0 is always the entry point.

## Where this RTL departs from, or adds to, the paper

* **One state for inspect-and-check.** The paper draws the processing loop as
  two states: process_1 inspects and process_2 checks whether the inspection is
  done. It also says that one sub-rule is compared with one header byte per
  clock. Here both happen in a single PROCESS state, which keeps the
  one-sub-rule-per-clock rate. The idle, data_in and stop states are kept as
  drawn.
* **Load enable instead of a gated clock.** The original clocks the field
  register through a gate. Here it is a normal register with a load enable.
  The original drawing also derives the output clear signal through a gate
  whose inputs it does not label clearly. Here both signals come from the
  state machine.
* **Operation codes.** The paper names the three criteria but not their codes.
  Here equal is `11`, which matches the example words. Greater is `01`, less is
  `10`, and `00` never matches. The comparison reads "header byte *op*
  constant".
* **Decision bit.** The architecture drawing takes the verdict from bit 19 of
  the leaf word, and `000…001` is the deny leaf. That is the reading used here.
* **Output enable.** The final compile unit is enabled by ACTION in the STOP
  state only. The decision register is enabled by ACTION in PROCESS. This
  gives the one-clock register stage that the drawing implies. CLEAR is
  asserted from START until the leaf is reached.
* **Rules loading.** The paper explicitly leaves rule update unimplemented. A
  plain synchronous write port is added so a host can load programs. There is
  no double-buffering: a write during an inspection affects that inspection.
* **No runaway guard.** A program that never reaches a leaf (a JUMP loop, or
  a run of non-leaf words that wraps past address 255) never finishes. Only
  forward branches plus a final leaf are guaranteed to end.
* **Source address width.** One sentence of the paper gives the source address
  as 23 bits. Every figure gives 32, and 32 is used.
* Not included: the soft-CPU system the engine was tested in (NIOS II, Avalon
  fabric, JTAG, on-chip memory), the packet FIFO that holds a packet while its
  header is checked, and the rule compiler. The engine's ports are what such a
  wrapper connects to.

## Verification

Each module has a self-checking testbench in `tb/`:

| testbench | what it checks |
|---|---|
| `tb_comparator` | All 4 × 256 × 256 input combinations. |
| `tb_subfield_mux` | Every selector code, against bytes cut from random headers. Also checks that the register holds and clears. |
| `tb_program_counter`, `tb_decision_reg`, `tb_final_compile_unit`, `tb_pce_ctrl` | Random stimulus, compared each clock with a reference model. |
| `tb_rules_memory` | The power-up image bit for bit, then random writes with read-back. |
| `tb_pce_top` | End to end at full size, in three phases (listed below). |

`tb_pce_top` runs three phases:

1. The power-up program.
2. The four-rule policy above, loaded through the write port and checked
   against a direct first-match evaluation of the policy.
3. 40 random forward-branching programs, checked against an
   instruction-level interpreter.

Every inspection's latency is checked against n + 3. The testbench also counts
each mechanism: compare-branch, fall-through, jump, each of the three
operations, allow, deny, default deny, START ignored while busy, inputs
changed after capture, reset during an inspection, and program loads. A
mechanism that never occurs counts as a failure. Each testbench ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

To simulate with Verilator 5 (two-state; the testbenches reset everything they
read):

```
verilator --binary --timing --assert -Irtl rtl/pce_pkg.sv $(ls rtl/*.sv | grep -v pce_pkg) \
          tb/tb_pce_top.sv --top-module tb_pce_top -Mdir obj && ./obj/Vtb_pce_top
```

For a block testbench, replace `tb_pce_top` with `tb_<module>` and give only
`rtl/pce_pkg.sv`, `rtl/<module>.sv` and the testbench.
