# ALL-MASK: a multicore CPU locked by a key that is never stored

Logic locking hides a circuit's true function behind a key: extra gates
compute the right function only if the right key bits reach them. The usual
design keeps the key in a non-volatile memory and feeds it to the locked
logic through a key port. That memory can be probed. The port also lets an
attacker try keys one after another, which is what SAT-style attacks rely on.

ALL-MASK removes both. In a chip with *n* cores, *n − 1* cores are locked
(the **rCores**). One core stays ordinary (the **normal core**). A chosen set
of the normal core's internal nodes *is* the key: the live value of a few
register bits. A designed **input instruction sequence (IIS)** run on the
normal core drives those nodes to the unlocking pattern. The pattern reaches
the locked gates over fixed on-chip wires. To configure the gates, the supply
is raised above the FeFETs' coercive voltage for a while. The locked gates
are **rGates**: ordinary CMOS gates extended with a pair of ferroelectric
FETs (FeFETs) whose threshold voltage picks between two logic functions.
Their configuration is non-volatile. It survives reset and power-down, and
it cannot be read from the layout.

An attacker who does not know the IIS has only one way to try a key: run
instructions, raise the supply, wait for the write, then test the rCores.
Every bit must be right at the same time, because all rGates in all rCores
are written in one event. Each attempt also uses up FeFET write endurance.

This repository gives synthesizable SystemVerilog for that scheme, built
around a 32-bit single-cycle MIPS core. The RTL has four parts: the rGate
model, the normal core and its key tap, the rCores, and the supply
controller that runs the reconfiguration.

```
            IIS (program)                              PUF verdict   raise request
                 |                                          |             |
          +------v-------+   key K1..K8 (8 live nodes)   +--v-------------v--+
          | normal core  |------------+                  |     vdd_ctrl      |--> vdd_at_vr
          | (mips_core,  |            |                  | V_WORK / V_R, write|    (to regulator)
          |  no rGates)  |     wire entanglement         +---+-----------+----+
          +--------------+   (KEY_MAP, per-rCore wiring)     | core_en   | fe_wr
                                      |                      | (halt)    | (write strobe)
             +------------------------+----------------------+-----------+
             |                        |                       |
      +------v------+          +------v------+         +------v------+
      |   rCore 1   |          |   rCore 2   |         |   rCore 3   |
      | 8 rGates    |          | 8 rGates    |         | 8 rGates    |
      +-------------+          +-------------+         +-------------+
```

## The reconfigurable gate

A static CMOS gate computes `F'` with pull-up network `F_p` and pull-down
network `F_n`. The rGate adds a second literal or term `G` with its own
`G_p` and `G_n`, plus two FeFETs that share the key line `K` as their gate.

| | structure | n-FeFET low V_T ("always on") | n-FeFET high V_T ("always off") |
|---|---|---|---|
| type-1 | `G_n` in series with `F_n`, shorted by the n-FeFET | `F'` | `(F·G)'` |
| type-2 | `G_n` in parallel with `F_n` through the n-FeFET | `(F+G)'` | `F'` |

The FeFET state is written only in **reconfiguring mode**, with the supply
at `V_R`. Key `K = 1` leaves the n-FeFET at low V_T and `K = 0` at high V_T.
In **computing mode** (supply at `V_WORK`, below the coercive voltage) the
state is only read.

`rtl/rgate.sv` reduces this to one polarization bit `pol`. The bit is loaded
from `k` on a single-cycle write strobe `wr` and otherwise kept. The output
`y_n` is a combinational function of `f`, `g` and `pol`. `pol` has no reset,
because a non-volatile device keeps its state across reset. During a write,
the real gate also needs its inputs biased so that `F_n` and `G_n` are both
on (for K = 1) or both off (for K = 0). The model assumes the write
circuitry provides that bias, so `f` and `g` do not matter during a write.

### Replacing a gate: policies A–D

Any AND or OR gate can become an rGate in one of four ways. Each way fixes
which key value restores the original gate:

| policy | gate | original function | other function | rGate | correct key |
|---|---|---|---|---|---|
| A (cut) | AND | `F·G` | `F` (drops a literal) | type-1 | 0 |
| B (expand) | OR | `F` | `F+G` (adds a term) | type-2 | 0 |
| C (expand) | AND | `F` | `F·G` (adds a literal) | type-1 | 1 |
| D (cut) | OR | `F+G` | `F` (drops a term) | type-2 | 1 |

The rCore inverts `y_n` once more, so a site gives back the AND/OR sense
that the surrounding logic expects. A designer who wants a given key bit at
a site picks a cut or an expand policy to match it. This is how the normal
core's key value is "programmed" into the rCores without being stored.

## Where the key comes from: the normal core

`normal_core` is `mips_core` with every lock site closed by its original
gate. Its `key` output is eight register-file bits, read live:

| key bit | K1 | K2 | K3 | K4 | K5 | K6 | K7 | K8 |
|---|---|---|---|---|---|---|---|---|
| node | `$v0[0]` | `$t1[0]` | `$a0[1]` | `$t2[3]` | `$a0[3]` | `$a2[0]` | `$t0[2]` | `$v1[0]` |

K1 is the most significant bit of `key`. These nodes were chosen so that the
12-instruction example sequence below, run from reset, ends with the key
`0000_1001`.

```
 [1] addi  $a0,$0,12345     a0 = 0x00003039   key 0000 1000 (K5 = a0[3] = 1)
 [2] addiu $a1,$0,-12345    a1 = 0xFFFFCFC7
 [3] sll   $a2,$a1,16       a2 = 0xCFC70000
 [4] sra   $a3,$a2,16       a3 = 0xFFFFCFC7
 [5] beq   $a3,$a1,L1       taken, [6] skipped
 [6] lui   $a0,-11111
 [7] L1: add $t0,$a2,$a0    t0 = 0xCFC73039
 [8] sra   $t1,$t0,8        t1 = 0xFFCFC730
 [9] addi  $t2,$0,-12345    t2 = 0xFFFFCFC7
[10] slt   $v0,$a0,$t2      v0 = 0
[11] sltu  $v1,$a0,$t2      v1 = 1            key 0000 1001
[12] Loop: j Loop           key held
```

The core retires one instruction per clock. The key therefore first equals
`0000_1001` exactly 10 cycles after reset, when `sltu` retires, and then
stays there. Most of the chosen bits never leave their reset value in this
sequence. A designer choosing nodes for real security would pick bits that
change often and depend on each other.

`mips_core` is a plain single-cycle MIPS. It implements `add addu sub subu
and or xor nor slt sltu sll srl sra addi addiu slti sltiu andi ori xori lui
lw sw beq bne j`. It has no exceptions (add/addi do not trap on overflow),
has 256-word instruction and data memories outside the core with
combinational reads, and has a clock enable `en` that halts it.

## The lock sites of an rCore

`mips_core` does not build eight of its decoder and ALU-control gates.
Instead it exports their operands (`site_f`, `site_g`) and takes their
results back (`site_y`). `normal_core` closes each site with the original
gate. `rcore` closes each site with an rGate:

| site | signal | original gate | policy | effect of a wrong key bit |
|---|---|---|---|---|
| 0 | beq taken | `is_beq · zero` | A | every beq is taken |
| 1 | register write | `wr_base` | B | sw also writes its address into rt |
| 2 | sign-extend imm | `is_itype · ¬is_logic_imm` | A | andi/ori/xori sign-extend |
| 3 | ALU subtract | `sub_base` | B | addiu subtracts |
| 4 | destination = rd | `is_rtype` | C | shifts write rt instead of rd |
| 5 | ALU B = immediate | `imm_base` | B | beq/bne compare rs with the immediate |
| 6 | right-shift fill | `rt[31] · is_sra` | A | srl fills with the sign |
| 7 | shift select | `(is_sll+is_srl) + is_sra` | D | sra becomes rd = rs + rt |

The correct site keys, site 0 first, are therefore `0 0 0 0 1 0 0 1`. A
single wrong bit leaves the core running but makes it compute wrong results.

Most of these gates sit on decode paths that are shorter than the longest
path, register file → ALU → write-back. Sites 0 and 6 take a data bit (the ALU zero flag, `rt[31]`),
so their slack would have to be checked before relying on the rule that
rGates must not lengthen the critical path. No timing analysis is part of
this RTL.

## Wire entanglement

Each rCore receives every key bit once, on a different site in each rCore
(`KEY_MAP` in `allmask_pkg`):

| site → | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| rCore 1 | K1 | K2 | K3 | K4 | K5 | K6 | K7 | K8 |
| rCore 2 | K2 | K3 | K4 | K6 | K8 | K7 | K1 | K5 |
| rCore 3 | K3 | K4 | K6 | K7 | K5 | K1 | K2 | K8 |

Zero key bits go only to A/B sites and one bits only to C/D sites, so all
three rCores unlock under the same key. Because the routing differs between
rCores, a wrong key damages different functions in each of them. The
routing is plain wiring inside `allmask_rcpu`.

## Reconfiguring: the supply controller

`vdd_ctrl` is a three-state machine:

* **`VDD_WORK`**: the supply is at V_WORK and the cores run (`core_en`). A
  raise request is honoured only when `licence_ok` is high. `licence_ok` is
  the verdict of the chip's PUF-based authentication, which is outside this
  RTL.
* **`VDD_WRITE`**: `vdd_at_vr` asks the regulator for V_R, and all cores
  are halted, so the key nodes stay still. In the `T_WRITE`-th cycle at
  V_R, `fe_wr` pulses once and every rGate of every rCore takes its key
  bit. If the request drops earlier, nothing is written.
* **`VDD_HOLD`**: the supply stays at V_R until the request drops. The
  cores resume in the next cycle.

`T_WRITE` defaults to 1000 cycles. That is 1 µs at a 1 GHz clock, the top
of the nanosecond-to-microsecond range of FeFET write times. Each completed
write counts against `ENDURANCE` (default 10⁵, the low end of quoted FeFET
endurance). After that many writes `worn_out` rises and writes no longer
take effect, which models the irreversible failure of worn devices. The
wear count is logic in this model, so it needs a reset. The top gives the
controller its own power-on reset `por_n`, separate from the core reset
`rst_n`, so that restarting the programs does not clear it. Two assertions
state the rules: the cores never run at V_R, and writes happen only at V_R.

## Top level: `allmask_rcpu`

Parameters: `N_RCORES = 3`, `IAW = DAW = 8` (256-word memories),
`T_WRITE = 1000` and `ENDURANCE = 100000`.

| port | dir | meaning |
|---|---|---|
| `clk`, `por_n`, `rst_n` | in | clock, power-on reset of the supply controller, core reset |
| `prog_we`, `prog_core[1:0]`, `prog_addr`, `prog_data` | in | write one instruction word into core `prog_core`'s memory (0 = normal core) |
| `raise_req`, `licence_ok` | in | ask for V_R; PUF verdict |
| `vdd_at_vr`, `worn_out` | out | supply request; endurance exhausted |
| `out_we[c]`, `out_addr[c]`, `out_data[c]` | out | store bus of core `c` (0 = normal core): the cores' visible results |

Unlocking from the pins works in five steps:

1. Load the IIS into core 0 and the application into cores 1–3.
2. Release `rst_n`.
3. After the IIS has formed the key (10 cycles for the example), hold
   `raise_req` with `licence_ok` for at least `T_WRITE + 1` cycles.
4. Drop `raise_req`.
5. Pulse `rst_n` to restart the applications on the now-configured rCores.

There is no key port, no key register and no scan access to the key nodes.

## Departures from the paper and open points

The paper gives the rGate structures and functions, the four replacement
policies, the principle of key nodes in a normal core, the supply-raising
reconfiguration, the three-rCore picture and an 8-bit example key with its
instruction sequence. The following are this design's own:

* the MIPS core itself, its instruction subset and its memories;
* which gates become rGates, and how many (8 per rCore);
* which register bits are the key nodes;
* the entanglement table;
* the controller's state machine, the halt during V_R, the write time, the
  licence input and the wear counter.

Not modelled:

* the input biasing that an FeFET write needs;
* the PUF and its certification;
* the analog supply;
* the secure scan interface;
* the FeFET's electrical behaviour: delay, energy, the different delays of
  the two states.

The key length is fixed at 8 bits. The paper also discusses 9-bit to 64-bit
keys; those need more nodes and more lock sites. `K_BITS`, `N_SITES`,
`SITE_REPL`, `NODE_REG`/`NODE_BIT`, `KEY_MAP` and the site wiring in
`mips_core` would all have to grow together.

## What random instruction sequences achieve

`tb_key_traversal` plays the attacker. It feeds the normal core 200,000
random ALU instructions. It counts how often `K1..Km` matches the example
key. It also records when every one of the 2^m patterns of `K1..Km` has
appeared. Typical run (the seed is fixed):

| m | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|---|---|---|---|---|---|---|---|---|
| fraction of cycles | 0.61 | 0.38 | 0.30 | 0.24 | 0.027 | 0.017 | 0.013 | 0.0042 |
| first hit (cycle) | 1 | 1 | 1 | 1 | 262 | 262 | 262 | 973 |
| all 2^m patterns seen by cycle | 99 | 120 | 316 | 2,362 | 2,654 | 8,004 | 27,399 | 99,612 |
| same, with a key port (2^m) | 2 | 4 | 8 | 16 | 32 | 64 | 128 | 256 |

The last two rows compare the cost of visiting every key pattern through
instructions with the cost through a directly driven key port. For 8 bits
the ratio is about 390, and it grows with the key length.

The first four bits match already at reset. The frequency drops sharply
once a 1-bit is required. The full 8-bit key comes up within about a
thousand random instructions, so at this length the protection rests on
three things:

* the attacker must recognise the right state without seeing the nodes;
* every attempt costs a full `T_WRITE` write;
* every attempt uses up endurance.

The exponential growth of the search only pays off with much longer keys.

## Simulating

All files are IEEE 1800-2017. Every module, package and testbench is in its
own file, so verilator can find them by name:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/allmask_pkg.sv tb/tb_mips_pkg.sv tb/tb_allmask_rcpu.sv \
    --top-module tb_allmask_rcpu -Mdir obj
obj/Vtb_allmask_rcpu
```

Each testbench prints `TB_RESULT checks=N failures=M`. All finish in well
under a second.

| testbench | what it shows |
|---|---|
| `tb_rgate` | both rGate types, both key values, all inputs; key line ignored without a write; the B'/(AB)' waveform example |
| `tb_mips_core` | lockstep with an instruction-set reference model (`tb_mips_pkg::iss`): the example sequence, the lock-site program under each wrong site, 40 random programs; halt |
| `tb_normal_core` | the key follows the model every cycle; `0000_1001` first appears at cycle 10 and holds |
| `tb_rcore` | correct key → correct results; each single wrong bit and 20 random keys → results exactly as the model predicts, and different; configuration kept across reset |
| `tb_vdd_ctrl` | licence gating, write after exactly `T_WRITE` cycles at V_R, abort, hold, wear-out |
| `tb_allmask_rcpu` | whole chip (`T_WRITE = 20`, `ENDURANCE = 4`): licence denied, failed unlock (raise before the key is formed), aborted raise, halt, unlock, wear-out, each counted |
| `tb_allmask_rcpu_full` | whole chip at default parameters: failed then successful unlock |
| `tb_key_traversal` | random-IIS key search and pattern coverage (above) |

The reference model's `obf` mask reproduces what each wrong site does.
Testbenches use it to predict, bit-exactly, the results of a core under any
key.

## Changing the design

* **Another IIS or key.** Change `NODE_REG`/`NODE_BIT` to the nodes you
  want. Then set `SITE_REPL` so that each site's correct key (0 for A/B, 1
  for C/D) equals the key bit routed to it, and adjust `KEY_MAP` to match.
* **More rCores.** Add rows to `KEY_MAP`, raise `MAX_RCORES`, and widen
  `prog_core` if more than four cores are needed.
* **More lock sites.** Export more gates from `mips_core` as `site_f`,
  `site_g`, `site_y`, and raise `N_SITES`. The reference model in
  `tb_mips_pkg` needs a matching `obf` bit.
