# A fuzzy control processor built on a parallel associative memory unit

A fuzzy controller decides what to do by recognising the current situation of
the plant it controls. Each situation is described by a chain of attributes,
for example the linguistic values ("low", "high", ...) of its input variables.
The situations known in advance, the *etalons*, each carry a decision. A
sequential computer has to compare the current chain with every etalon in
turn. This design compares it with all of them at once. It uses a *parallel
associative memory unit* (PAMU): a matrix whose columns hold the etalons,
and a row of one-bit coincidence detectors, one per column. One symbol of the
input chain is applied per clock. A detector stays at 1 only while its etalon
agrees with every symbol so far. When an etalon has been matched to its end,
the unit reports it, and a table gives the control value for that situation.

The structure is *rigid*: the etalons and decisions are programmed in before
operation and do not change during it. In exchange, a decision takes a fixed,
short number of clocks (6 plus one per input symbol) that does not depend on
how many etalons are stored. The design follows the structural schemes in
I. A. Magomedov and O. A. Khazamov, "Associative control processor with a
rigid structure". That paper gives the structure and how the PAMU works, but
no word widths, timing or programming interface. Those parts are this RTL's
own. They are listed in the section on departures below.

## How a decision is made

```
 x[0] ─► linguistic converter 0 ─► term t0 ┐
 x[1] ─► linguistic converter 1 ─► term t1 ┤ chain (t0, t1, ...)
   ...                                     ┘          │
                                                      ▼
             control device (CD) ── nu, K, symbol, d ──► PAMU
                    ▲                                  │
                    └──────────── K1, K2, end_hit ◄─────┘
                    │ matched etalon
                    ▼
       control-signal block: etalon → class k → u_k ─► u
```

1. Each numeric input `x[n]` goes to its own **linguistic converter**, which
   returns the term (symbol) that best describes it. All converters work in
   parallel.
2. The **control device** presents the chain of terms to the PAMU, input 0
   first, one symbol per clock.
3. The **PAMU** reports which etalon was matched completely, if any.
4. The **control-signal block** maps that etalon to its class and outputs the
   class's control value `u_k`. Several etalons can share one class.

## The PAMU

The PAMU is the hardest part to understand, so most of this section is about it.

### Parts

| Part | Module | What it is |
|---|---|---|
| Decoder DC | `pamu_decoder` | Turns the binary symbol code into unary code: one bus per symbol of the alphabet (`NSYM` buses). |
| Distributor | `pamu_distributor` | One-hot shift register with `M_LEN+1` digits. Digit r selects matrix row r, i.e. position r+1 in every etalon. |
| Matrix M | `pamu_matrix` | `M_LEN` rows × `N_ET` columns of deciding elements (DE). Column j is etalon j. The DE at row r stores the symbol at position r+1. It fires when its row is selected and its symbol's decoder bus is active. The DEs of a column are ORed into the column signal `col[j]`. |
| End gates B1 | `pamu_matrix` | One per column, in the row just after the etalon's last symbol. It fires when the distributor reaches that row and the column's detector is still 1. |
| Line of indication LI | `indication_line` | One indicator (`indicator`) per column, plus gates B2 (column signal AND detector), K1 (OR of all B2) and B3 (K AND K1). |
| Indicator IE | `indicator` | A set/reset trigger. `c` sets it. The step strobe `b` clears it when the column signal `l` is absent. The output is `s = T & d`. |

Writing a DE's symbol code, or the position of a B1 gate, is called
*flashing* the matrix.

### One step

Before a comparison, `nu` sets every detector to 1 and the distributor to
row 0. Then, in every clock in which the control device applies a symbol with
the strobe `K`:

* the decoder activates the symbol's bus;
* in the selected row, every DE flashed with that symbol raises its column
  signal;
* B2 passes the column signals of the columns whose detector is still 1, and
  `K1` is their OR: *some etalon that is still in the race accepts this
  symbol*;
* **with K1**, B3 passes `K` to the detectors. A detector whose column
  signal is absent drops to 0, and the others keep their value. At the same
  time the distributor moves to the next row;
* **without K1**, nothing changes. The symbol matches no live etalon. It is
  treated as interference and dropped, and the next symbol is compared at the
  same position. This is the unit's self-correction: one spurious symbol
  cannot clear all the detectors.

`K2` is the OR of the end gates B1. It is combinational in the state, so it
rises in the clock after the accepting step of an etalon's last symbol, and
`end_hit` names the column. Etalons may differ in length (1 to `M_LEN`): each
column's B1 sits at its own end row. That is why the distributor has one digit
more than the longest etalon.

### Worked example

The matrix holds three etalons over the alphabet a–e (codes 0–4):
E1 = (a,b,c,d,e), E2 = (e,a,b), E3 = (b,a,d,e). The B1 gates sit in rows 5, 3
and 4 (counting from 0). The input chain is b, c, a, d, e. Detector states are
listed as E1 E2 E3.

| Clock | Row | Symbol | Columns firing | K1 | Detectors after |
|---|---|---|---|---|---|
| init | 0 | – | – | – | 1 1 1 |
| 1 | 0 | b | E3 | 1 | 0 0 1 |
| 2 | 1 | c | none | 0 (dropped) | 0 0 1 |
| 3 | 1 | a | E2, E3 | 1 (E3 live) | 0 0 1 |
| 4 | 2 | d | E3 | 1 | 0 0 1 |
| 5 | 3 | e | E3 | 1 | 0 0 1 |
| 6 | 4 | – | B1 of E3 fires | K2 = 1 | result: E3 |

In clock 3 the symbol a also matches E2. E2's detector is already 0, so
only E3 keeps K1 alive. `pamu_tb` runs exactly this example and also random
etalon sets. `fig4_flashing_tb` runs it through the whole processor.

### Control device

`pamu_control` sequences one comparison:
IDLE → INIT (`nu` for one clock) → STEP → FINISH (`d` for one clock).
Each STEP clock first looks at `K2`. If `K2` is set, or the chain is used up,
it goes to FINISH. Otherwise it applies the next symbol with `K`. FINISH
captures `K2` (matched), the lowest-numbered etalon whose end gate fired, and
the detector read-out `S_j`. It also records how many symbols were dropped as
interference. From `start` to `done` takes
(symbols presented + 4) clocks.

Because the CD stops at the first `K2`, an etalon that is a prefix of the
input chain wins, even if a longer etalon could also have matched.

## The linguistic converter

`linguistic_converter` turns one `GAMMA`-bit number into a term index:

1. **Input register** (Rg), loaded with `x_valid`.
2. **Coordinate block**: `I_PTS` ascending grid points are compared with x in
   parallel. The point index i is that of the last grid point not above x.
3. **Fuzzy value**: table row i holds a fuzzy set A'(i) of `J_T` membership
   grades. A second table holds its complement.
4. **Similarity** to each of `J0` reference sets A_r, each also stored with
   its complement. The similarity is the degree of fuzzy equality:

   mu(A_r, A') = min over j of max( min(a_rj, a'_j), min(abar_rj, abar'_j) )

5. **Selection**: the reference with the largest degree is the output term.
   On a tie, the lowest index wins. The degree and the point index are also
   output.

Membership grades are unsigned `GAMMA`-bit numbers, with all ones standing for 1.
The complements are stored rather than computed, as in the source scheme.
They may be loaded with any values. The output follows `x_valid` by 2 clocks,
and the converter accepts one input per clock.

## Control-signal block

`control_signal_block` holds two tables: etalon → class (`N_ET` entries), and
class → `GAMMA`-bit control value (`K_CL` entries). It answers one clock after
the CD's `done`. Without a match, `hit` = 0 and `u` = 0.

## Top level, interface and timing

`fuzzy_assoc_processor` connects `N_IN` converters, the CD, the PAMU and the
control-signal block.

| Port | Dir | Meaning |
|---|---|---|
| `cfg` | in | table-write bus (`cfg_wr_t`, see below) |
| `x_valid`, `x[N_IN]` | in | start a decision; ignored while `busy` |
| `busy` | out | a decision is in progress; falls as `u_valid` rises |
| `terms[N_IN]` | out | terms chosen by the converters |
| `u_valid`, `u`, `k`, `hit` | out | control value, class, match flag (one-clock pulse) |
| `etalon`, `s_j`, `noise` | out | matched etalon, detector read-out, symbols dropped |

`u_valid` rises 6 + s clocks after the edge that accepts `x_valid`, where s is
the number of symbols presented (s ≤ `N_IN`). The 6 clocks are: converter,
CD start, INIT, the closing STEP, FINISH, and the control-signal block. At
the defaults a decision takes 7 or 8 clocks.

### Configuration bus

All tables are written through one bus, `cfg_wr_t` = {`we`, `sel`, `unit`,
`addr[15:0]`, `data[15:0]`}, defined in `assoc_pkg`:

| `sel` | Table | `addr` | `data` |
|---|---|---|---|
| `CFG_COORD` | grid point of converter `unit` | i | point |
| `CFG_MEMB`, `CFG_MEMB_C` | A'(i) and its complement | i·J_T + j | grade |
| `CFG_REF`, `CFG_REF_C` | reference r and its complement | r·J_T + j | grade |
| `CFG_FLASH` | PAMU matrix | {col, row} (8 bits each) | bit 8 = 0: DE symbol code in [7:0]; bit 8 = 1: place B1 of col at row |
| `CFG_CLASS` | etalon → class | etalon | k |
| `CFG_UTAB` | control value | k | u_k |

Writes take effect on the next clock. Reset clears every table, so a reset
processor matches nothing. An etalon of length L is flashed with L DE writes
(rows 0..L−1) and one B1 write at row L.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `N_IN` | 2 | two input variables in the source processor scheme |
| `N_ET` | 3 | three etalons in the worked flashing example |
| `M_LEN` | 5 | longest etalon of that example |
| `NSYM` | 5 | its alphabet a–e; also the number of terms per converter |
| `GAMMA` | 8 | assumed (word width is left open) |
| `I_PTS` | 16 | assumed (size of the universal set) |
| `J_T` | 4 | assumed (size of a fuzzy value) |
| `K_CL` | 3 | assumed (number of classes) |
| `CORRECTION` | 1 | PAMU with correction, as in the worked example; 0 = basic PAMU |

At the defaults the processor holds 3114 flip-flops, most of them in the two
converters' tables, which are 1472 bits each. Because `N_IN` = 2, the default
processor presents chains of two symbols. The worked example's longer etalons
can then be flashed but never completed. Build with `N_IN = 5` to run it
end to end, as `fig4_flashing_tb` does.

## Where this RTL departs from or fills in the source

* **Clocked logic.** The source describes the indicator as a trigger driven
  by signals at time points τ. Here every trigger is a flip-flop on one clock,
  with an asynchronous active-low reset. When `c` and a clear arrive together,
  `c` wins.
* **Flashing.** In the source, each DE is wired to one decoder bus. Here each
  DE holds the code of its bus in a register, so the same hardware can hold
  any etalon set.
* **Distributor length.** The text speaks of an m-digit shift register. The
  scheme with correction places a B1 gate above the longest etalon too, so
  the register here has m+1 digits.
* **No K1.** The source says both that the process repeats "until K2 … or
  there is no K1", and that without K1 the detectors are simply not updated
  (interference). This RTL does the latter and carries on with the next
  symbol. The comparison ends on K2 or at the end of the chain.
* **Gate types.** B1, B2 and B3 are taken as AND gates and K1, K2 as ORs, from
  the text's description of what each passes. The schemes do not print the
  gate types.
* **Converter internals.** The source shows the converter's stores (grid,
  fuzzy values and complements, reference sets and complements, similarity
  cells, a line of indication choosing j0) but gives no formulas. The grid
  search, the fuzzy-equality measure and the largest-degree rule are this
  design's reading.
* **How the converters feed the PAMU.** In the source's processor scheme the
  two converters meet at a decoder that yields the decision index k. Here the
  converters' terms form the PAMU's input chain, and the PAMU's matched etalon
  gives k through a class table. This follows the statement that the processor
  is built on the PAMU and implements "complete coincidence".
* **Timing.** The source's time estimate, τ(6 + 3γ), assumes bit-serial
  words. This RTL handles whole words in parallel, so its latency does not
  depend on `GAMMA`.
* **Uncorrected PAMU.** The source's simpler PAMU, which has no B1/B2/B3
  gates and needs etalons of equal length, is available as the parameter
  `CORRECTION = 0` (the default, 1, is the corrected unit). In that mode
  every symbol is strobed into the detectors, so one wrong symbol rejects the
  chain. `K2` stays 0, and the CD reads the answer from `S_j` after the whole
  chain.
* **Unclear phrases not modelled.** The source says the shift register is
  "controlled by the matrix X", and that at the first stage "all gates B1 at
  the matrix output are opened". Neither phrase is explained further. Here
  the register advances on K AND K1, and the B1 gates are always enabled.
* The flexible-structure processor, which the source uses for comparison, is
  not part of this design.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
block against a model written independently inside the testbench, and ends by
printing `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `indicator_tb` | set/clear rule, read-out, directed chains with and without a mismatch |
| `pamu_decoder_tb` | every code, enabled and disabled |
| `pamu_distributor_tb` | random init/shift against a position model |
| `pamu_matrix_tb` | worked-example etalons; random rows, buses and detector states |
| `indication_line_tb` | B2/K1/B3 and the detector update, including steps without K1 |
| `pamu_tb` | the worked example step by step (K1 and K2 every clock), then random etalon sets and chains with noise |
| `pamu_control_tb` | CD with a PAMU: result, noise count, start-to-done clock count |
| `linguistic_converter_tb` | streamed conversions against the grid/similarity model, 2-clock latency |
| `control_signal_block_tb` | table reads, no-match output, 1-clock latency |
| `fuzzy_assoc_processor_tb` | whole processor at default parameters, random configurations; counts complete matches, early completions on a short etalon, dropped symbols, no-match chains and inputs ignored while busy, and fails if any never happened |
| `pamu_basic_tb` | PAMU and CD with `CORRECTION = 0`: full-length etalons, a corrupted symbol rejects the chain, fixed M_LEN + 4 clock latency |
| `fig4_flashing_tb` | the worked example through the processor built with five inputs |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/assoc_pkg.sv tb/pamu_tb.sv --top-module pamu_tb
./obj_dir/Vpamu_tb
```

Each testbench finishes in well under a second. The RTL also carries a few
assertions: a one-hot distributor, K only with a symbol, detectors never all
cleared without `nu`, and `done` as a single-clock pulse.

The processor has been checked only in simulation. Nothing here has been
timed or built in hardware.
