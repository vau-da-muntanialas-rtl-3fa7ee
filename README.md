# Muntaniala / Vau da Muntanialas — a tileable LSTM inference accelerator in SystemVerilog

An LSTM layer is mostly matrix–vector products, and their weights dwarf everything else. If the
weights must be streamed from off-chip memory at every time step, memory traffic costs more energy
than the arithmetic. The design here keeps **every weight resident in on-die SRAM**. Because one die
holds only 96 hidden elements, **larger layers are built from several identical dies** arranged in
an n × n grid.

- Each die works on one tile of the weight matrices.
- Partial sums flow along each row to the rightmost die, which finishes them.
- The new hidden state is sent back over the grid for the next step.

During operation the only traffic into the chip is the input features. Between dies, only partial
sums and hidden states are exchanged.

The RTL has two levels:

| Module | What it is |
|---|---|
| `muntaniala` | One die: 96 LSTM units, 12 SRAM banks (84 kB), a controller, and four 4-bit valid/ready stream interfaces. |
| `vau_da_muntanialas` | The grid. The default is 2 × 2, as on the four-die demonstrator board, and it runs one layer with 192 hidden elements. |

Every parameter default is the prototype's number (96 units, 12 banks, 2 × 2 grid) unless noted
under *Departures and choices* below.

## 1. Arithmetic

All stored quantities are **8-bit signed fixed point**: weights, biases, peephole weights,
inputs, gates, and the states `c` and `h`. Every product is accumulated in a **16-bit**
register.

- **Binary point:** FRAC = 5 fractional bits (range −4 … +3.97). A product therefore has
  10 fractional bits.
- **Saturation:** the accumulator saturates at ±2¹⁵ instead of wrapping.
- **Back to 8 bits:** an arithmetic shift right by 5, then saturation (`q8()` in
  `muntaniala_pkg`).

Per hidden element `u`, one step computes a peephole LSTM:

```
i = σ(Wxi·x + Whi·h' + wci∘c' + bi)      f = σ(Wxf·x + Whf·h' + wcf∘c' + bf)
g = tanh(Wxc·x + Whc·h' + bc)             c = f∘c' + i∘g
o = σ(Wxo·x + Who·h' + wco∘c + bo)        h = o∘tanh(c)
y = σ(Wy·h + by)                          (optional fully connected output layer)
```

Primes mark the previous step. The output gate's peephole uses the *new* `c`.

**Activations** are 256-entry look-up tables indexed by the 8-bit value: `rtl/sigm_lut.hex` and
`rtl/tanh_lut.hex`. For a signed input `a`, the entry is `clip(round(f(a/32)·32), −128, 127)`.
To change the number format, regenerate both tables with this formula for the new FRAC.

**Biases** are shifted left by FRAC before they are added, so that they line up with the products.

## 2. One die

```
            p (4b) ──► rx ──► x_t buffer (128) ─┐
                              config, SRAM image │ broadcast one element / cycle
 r (4b) ──► rx (16-bit partial sums) ──────┐     ▼
 h (4b) ──► rx ──► h_{t-1} buffer (96) ────┼──► 96 × lstm_unit ◄── 12 × param_sram (8 lanes each)
                                           │         │ acc / h / c / y (selected by index)
 cmd (3b) ──► muntaniala_ctrl ─────────────┘         ▼
                                                 tx ──► o (4b), ready_die, ready_ext, o_ext
```

**LSTM unit (`lstm_unit`).**
- Contents:
  - one MAC (`mac_unit`: 8 × 8 → 16, saturating);
  - one sigmoid table and one tanh table;
  - the gate registers `i`, `f`, `o`, `g`;
  - the state registers `c` and `h`, and the FCL output `y`.
- All 96 units execute the same micro-operation every cycle (`uop_e` in the package).
- Each unit takes:
  - its own weight byte from its SRAM lane;
  - the element of `x_t` or `h_{t-1}` that the controller broadcasts.
- `ADDRED` (add a received partial sum) acts only on the unit selected by `sel`. So does `LDC`
  (load a cell state).
- The cell update and the hidden update reuse the same MAC:
  - `CMUL` computes f·c, then `CMAC` adds i·g, then `STC` stores c;
  - `TANHC` computes tanh(c), then `HMUL` computes o·tanh(c), then `STH` stores h.

**Parameter memory (`param_sram`).**
- 12 banks × 896 words × 64 bits. Each bank serves 8 units, one byte lane per unit.
- Word `a` of lane `u` is the `a`-th parameter that unit `u` consumes. The memory is just a list
  in consumption order, and the controller walks it with one pointer. The order per die is:

  ```
  for gate in (i, f, c, o):
      Wx[gate][u][0..nx-1]          # columns of this die's input tile
      Wh[gate][u][0..nh_in-1]       # columns of this die's hidden tile
      peephole w_c[gate][u]         # masters only, not for the candidate c
      bias b[gate][u]               # masters only
  if no > 0:
      Wy[u][0..nh_in-1]             # FCL rows (units u >= no get zeros)
      by[u]                         # masters only
  ```

- The number of words per unit is
  `4·(nx+nh_in) + 7·master + (no>0)·(nh_in + master)`, and it must be ≤ 896.
- `CMD_LOAD_PARAM` fills the memory in this order: word by word, unit 0…95 within each word.

**Pipeline.**
- The controller issues the SRAM address and the micro-operation in the same cycle.
- The operation, broadcast value and selection are registered once, so they meet the SRAM data
  one cycle later.
- Before any unit result is read (a partial sum, `h`, `c` or `y`), the controller waits two
  cycles so that the last operation has landed.

**Stream interfaces (`nibble_rx`, `nibble_tx`).**
- Each interface has 4 data wires, valid and ready.
- A nibble moves on a clock edge where valid and ready are both high.
- Words go least-significant nibble first: bytes take 2 nibbles, partial sums (16 bit) take 4.
- The inputs are:
  - `p`: configuration, parameters, features and state from the external controller;
  - `r`: partial sums from the left neighbour;
  - `h`: the hidden-state tile.
- The output `o` is shared by all outgoing traffic. It has **two** readies: one from the
  receiving dies and one from the external controller. For each word, the controller picks the
  ready that completes the handshake.
- `o_ext` flags the words addressed to the external side.

## 3. Commands and configuration

The three config/sync wires `cmd` are shared by all dies. The external controller:

1. drives a command;
2. streams whatever data it needs over each die's `p`;
3. waits until every `busy` is low;
4. returns `cmd` to `CMD_NOP`.

A die that has finished waits for the NOP before it accepts a new command.

| code | command | data |
|---|---|---|
| 1 | `CMD_LOAD_CFG` | 7 bytes on p: `nx`, `nh_in`, `nh_act`, `no`, flags, `nwords[7:0]`, `nwords[9:8]` |
| 2 | `CMD_LOAD_PARAM` | `nwords × 96` bytes on p (order above) |
| 3 | `CMD_RUN` | `nx` feature bytes on p, then one LSTM step (+ FCL) |
| 4 | `CMD_STORE_ST` | masters send `c` then `h` (`nh_act` bytes each) to the external side |
| 5 | `CMD_LOAD_ST` | p carries `c` (`nh_act` bytes), then the `h_{t-1}` tile (`nh_in` bytes) |
| 6 | `CMD_CLEAR_ST` | `c`, `h` and the `h_{t-1}` buffer are set to 0 |

The flags byte gives the die its role in the grid:

| bit | name | meaning |
|---|---|---|
| 0 | `master` | rightmost die of its row: adds peephole and bias, applies the activations, owns `c` and `h` |
| 1 | `has_left` | a left neighbour sends partial sums on `r` |
| 2 | `recv_h` | the die receives its `h_{t-1}` tile on `h` |
| 3 | `send_h` | master: sends `h_t` over `o` to the dies that need it |
| 4 | `self_h` | master: copies its own `h_t` into its `h_{t-1}` buffer |
| 5 | `out_ext` | master: writes `h_t` to the external side after the step |

## 4. One time step

`CMD_RUN` runs the following sequence. A slave is a die that is not the rightmost in its row.

1. **Load features:** `nx` bytes arrive on `p` into the x buffer.
2. **Gates, in the order i, f, c̃, o.** For each one:
   - clear the accumulators;
   - run `nx` MAC cycles over `x`, then `nh_in` over `h_{t-1}`;
   - if the die has a left neighbour, receive `nh_act` partial sums and add each to its unit.

   Then the die's role decides what happens next:
   - A **master** adds the peephole term (i, f, o) and the bias, and applies the table.
   - A **slave** sends its `nh_act` accumulators to the right. A slave's units never activate
     anything.
   - After c̃, the master updates `c`. After o, it computes `h`.
3. **Distribute the new hidden state.** In this order:
   1. local copy (`self_h`);
   2. receive a tile (`recv_h`);
   3. send it to other dies (`send_h`);
   4. write `h` to the external side (`out_ext`).
4. **Output layer** (if `no > 0`): one more MAC pass over the *new* `h_{t-1}` buffer, reduced
   along the row like a gate. The master then writes `y` (`no` bytes) to the external side.

A single die with 96 inputs and 96 hidden elements takes 991 cycles per step:
- 192 cycles to load the features;
- about 196 cycles per gate;
- a few cycles for the updates.

The prototype's figure is 101.2 µs at 10 MHz, which is 1012 cycles.

## 5. The grid

For a layer of `n·96` hidden elements, die `(i,j)` holds the weights that map input/hidden tile
`j` onto output rows `i·96 … i·96+95`.

- **Reduction.** The `o` output of die `(i,j)` drives the `r` input of die `(i,j+1)`. Die `(i,j)`
  adds its own sums to those of its left neighbour before passing them on.
  - The rightmost die `(i,n−1)`, the **master**, finishes them.
  - The other dies are **slaves**. A slave stalls, holding `o` valid, until its master is ready
    to listen.
- **Hidden-state distribution.** Tile `b` of `h_t` is computed by master `(b,n−1)`. Every die of
  column `b` needs it for the next step, so master `(b,n−1)` drives the `h` input of every die
  `(a,b)`.
  - Master `(n−1,n−1)` needs its own tile and keeps it locally (`self_h`).
  - On the 2 × 2 board this gives the order:
    1. M(1,1) sends to M(0,1);
    2. M(0,1) sends to S(0,0) and S(1,0).
  - When one output drives several dies, their readies are ANDed in the top module.
- **Shared output.** A master's `o` carries three kinds of traffic:
  - die-bound hidden states;
  - external results, `h_t` and `y`, which also appear on `out[i]` of the top;
  - stored states.

  The top module therefore qualifies every valid with `o_ext`:
  - the external `out_valid` is `o_valid & o_ext`;
  - a neighbour's `r`/`h` valid is `o_valid & ~o_ext`.

  Without this, a neighbour still in its receive state would take the first nibble of an
  external word.
- **Parameters** reach each die on its own `p` stream (no chip select). All dies share `cmd`,
  clock and reset.

Per step, the 2 × 2 grid with 96 inputs per column (192 in total) takes **2924 cycles**. The
prototype's figure is 295.2 µs, which is 2952 cycles. The four rounds of 96 × 4 nibbles of
partial sums dominate this time.

The demonstrator network has 192 hidden elements, 123 inputs and an output layer. With that
network the grid takes **about 3340 cycles** per step. The prototype measured 330 µs.

Layers can be stacked in two ways:
- by feeding the outputs of one grid into the inputs of another (not instantiated here);
- by running them one after another on the same grid: store the states, reload parameters
  and states, and run again.

## 6. Verification

Each testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog.

The reference model (`tb/lstm_ref_pkg.sv`) works independently of the RTL:
- it computes sigmoid and tanh with real arithmetic;
- it performs the same saturating additions in the same order as the hardware.

| testbench | what it exercises |
|---|---|
| `tb_act_lut` | all 256 entries of both tables against `round(f(a/32)·32)`, plus spot values |
| `tb_mac_unit` | random MAC/external-add/load sequences, saturation at both ends |
| `tb_lstm_unit` | full gate/cell/hidden sequences with random weights against the model |
| `tb_param_sram` | random byte-enabled writes and reads, one-cycle latency |
| `tb_nibble_rx`, `tb_nibble_tx` | random words, random stalls on both sides, both readies, `o_ext` |
| `tb_muntaniala` | one die, 96×96 (cycle count checked against 1012 ±5 %), then 100 inputs / 80 units / 40 FCL outputs with state load, random gaps on `p`, back-pressure on `o` |
| `tb_vau_da_muntanialas` | the 2 × 2 grid at full size (see below) |

**The grid testbench** runs the top with every parameter at its default. It covers:
- a 192-input step, with the cycle count checked against 2952 ±5 % and the states read back;
- three steps of the 1L-192NH-123NI shape with an FCL of 31 outputs per row (62 in total),
  with random back-pressure and stream gaps, and each step's cycle count checked against
  3300 ±10 %;
- a state load followed by one more step.

It counts reduction transfers, slave stalls, hidden-state transfers, local copies, FCL outputs,
external back-pressure, state stores and state loads, and fails if any of them never happens.
It takes about 5 s of simulation.

Run one testbench with plain Verilator from the directory that holds `rtl/` and `tb/` (the
LUT files are read by the relative path `rtl/*.hex`):

```
verilator --binary --timing --assert --top-module tb_vau_da_muntanialas \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/muntaniala_pkg.sv tb/lstm_ref_pkg.sv tb/tb_vau_da_muntanialas.sv
./obj_dir/Vtb_vau_da_muntanialas
```

## 7. Departures and choices

The following points are this design's own, where the published description is silent or
ambiguous:

- **Number format.** The binary point (FRAC = 5), saturation, rounding and LUT contents are
  chosen here. The trained tables of the chip are not public. The testbenches use random weights,
  not the trained TIMIT network.
- **Memory.** The 84 kB is read as 84 × 1024 bytes, which gives 896 bytes per unit. The
  parameter layout (consumption order) and the 128-entry input buffer are this design's own.
- **Command set, configuration bytes and word framing.** These are all this design's own: the
  command codes, the 7-byte configuration, the nibble order, and 16-bit partial sums on the
  4-bit link.
  - The 16-bit partial sums match the published 2 × 2 timing well.
  - The pin figure of the chip prints a 5-bit data bus, but the pin table and the text give
    4 bits. 4 bits are used.
- **`o_ext`.** This output is added to mark external words on the shared output. The chip's pin
  list has no such signal.
- **Ready merging.** Several receiving dies are merged with an AND.
- **State save.** State save and restore move `c` and `h` only. The gates are recomputed from
  them.
- **Not modelled:**
  - the two test pins (their function is not documented);
  - the pads;
  - the FPGA controller (the testbenches play its role);
  - per-die clocks;
  - the chip-select alternative for parameter distribution;
  - the wiring of stacked multi-layer grids.
- **Handshake assertion.** The assertion in `nibble_tx` that checks the stream handshake is
  disabled while reset is low. Lint tools may therefore count `rst_n` as both an asynchronous and
  a synchronous signal. This does not affect the circuit.

Larger single-layer grids (3 × 3 … 5 × 5) are the same top module with `N` set accordingly. The
regression covers the default 2 × 2 size only. In one trial run with `N = 3`, a plain 288-input step
took 4450 cycles; the paper reports 469.8 µs, which is 4698 cycles at 10 MHz. A following step with an
FCL, input gaps and output back-pressure deadlocked in that trial: die (2,1) stayed in its
partial-sum send state and master (2,2) in its output state. This case is unresolved, so grids
with `N > 2` should be treated as unverified.

- **Register "Z_t" in the datapath figure.** The figure draws a register named Z_t beside the
  weight register, feeding the operand multiplexer. The text does not explain it. In this design,
  the partial sum received from the left die plays that role: it enters the accumulator through
  the `UOP_ADDRED` operand path.
- **Input-feature buffer.** Its size (128 entries) is this design's own. The paper does not print it.
