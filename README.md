# A multi-style programmable logic block for a secure asynchronous FPGA

This is the logic block (PLB) of a clockless FPGA built for cryptographic work,
where resistance to side-channel attacks (timing, power analysis) matters more
than speed. Three ideas drive it:

* **Every logic signal is carried on several wires, and every new value moves
  exactly one wire.** A binary signal uses two wires, a ternary one three. No
  clock says when data is valid: the wires carry the request themselves.
  Because the same number of wires toggles for every value, the power drawn does
  not depend on the data. Timing does not either, provided the routing is
  balanced.
* **No early evaluation.** A gate fires only when every input has arrived and the
  gates it drives have acknowledged its last output. An AND gate never outputs
  '0' as soon as one input is '0', because that would leak timing.
* **One block, several asynchronous styles.** Four 6-input LUTs, a few C-elements
  and some configuration MUXes can be programmed as 4-phase dual-rail
  (return-to-zero) gates, 4-phase ternary gates, 2-phase LEDR gates or 2-phase
  edge (transition-signalling) gates. The styles can then be compared on silicon
  for how much they leak.

The RTL covers the PLB, its building blocks, and the asynchronous FIFO that
shifts in the configuration. It also has a top level `afpga_block`: one
independently programmable block of four PLBs with their programming chain. The
routing network between PLBs is not modelled. The PLB pins are ports, and the
testbenches play the role of the routing.

## 1. Signals, phases and acknowledges

A signal with *n* possible values uses *n* wires. Everything starts from reset
with all wires at 0.

| style | wires of a binary signal X | how a new value is signalled |
|---|---|---|
| 4-phase (return to zero) | `x0`, `x1` | wire *i* rises for value *i*. Between two values every wire returns to 0, the empty value Omega. `(1,1)` is forbidden. |
| 2-phase LEDR | `xd` (data), `xr` (repeat) | the value is `xd`. A different value toggles `xd`, a repeated value toggles `xr`. |
| 2-phase edge | `x0`, `x1` | wire *i* toggles (either edge) for value *i*. Levels mean nothing. |

The **phase** of a signal is the parity of its wires. Each new value flips the
phase in every style: under 4-phase, Omega is even and a valid value odd. The
**acknowledge** a gate sends back to its drivers is therefore the XOR of its
output wires. It is called `S_out` at the sender, and `S_in` or "ack" at the
gate that receives it. Under 4-phase an OR gate would give the same result.

Firing rules implemented by the LUT programmings:

* 4-phase: compute when every input is valid and `S_in = 0`. Return to Omega
  when every input is Omega and `S_in = 1`. Otherwise hold.
* 2-phase: compute when all inputs have the same phase *p* and `S_in` differs
  from *p*. `S_in` equal to the phase of the last output means it was
  acknowledged. Otherwise hold.

The **C-element** (`c_element`) is the rendez-vous gate. Its output becomes 1
when all inputs are 1, becomes 0 when all are 0, and holds otherwise. It is
written as a latch with reset.

## 2. The logic block

```
            I'[5:0] ──┬──────────────►[L0]──────────────────┐
                      ├──────────────►[L1]────────────┐     │
                      └──►(OR', polarity or_inv[0])─┐ │     │
                                                    ▼ ▼     ▼
                              L2 ─┐   ledr_rv  ┌─────────────────┐  O0 = C(L0, X0)
                              L3 ─┼──► MUX ───►│ memory point    │  O1 = C(L1, X1)
                                  │   X0,X1    │ (upper)         │  S_top = O0^O1
                                  │            └─────────────────┘
            I''[5:0] ─┬──────────────►[L2]──┐  ┌─────────────────┐  O2 = C(L2, OR'')
                      ├──────────────►[L3]──┼─►│ memory point    │  O3 = C(L3, OR'')
                      └──►(OR'', polarity or_inv[1])──►(lower)   │  S_bot = O2^O3
                                               └─────────────────┘
  ack_out[0] = tern_ack ? S_top^S_bot : S_top        ack_out[1] = S_bot
  LUT input k (k=0..3) of any LUT may be replaced by O_k (feedback MUX fb_sel)
```

* **LUTs L0..L3**: 6 inputs, 64 programming bits each. L0 and L1 read the
  upper six network wires `I'`, L2 and L3 read the lower six `I''`. Each wire
  drives both LUTs of its half and that half's OR gate, so the wires of a
  signal are loaded alike.
* **Feedback MUXes**: input *k* (0..3) of each LUT can take PLB output `O_k`
  instead of network wire *k*. There is one programming point per LUT and
  input, 16 in all. A LUT that reads its own output holds state, which is how
  a gate can be built from LUTs alone.
* **6-input OR gates**: each detects that its half's inputs have returned to
  Omega under 4-phase.
* **Memory points** (`memory_point`): each is two C-elements, a bypass MUX pair
  under one programming point, and an XOR giving the acknowledge of the pair.
  A bypassed memory point is transparent.
* **`ledr_rv` MUXes**: these feed L2/L3 instead of the upper OR gate into the
  upper memory point. The C-elements then form the rendez-vous of two LUTs.
* **`tern_ack` MUX**: it turns the two binary acknowledges into one acknowledge
  over all four outputs, for a ternary or quaternary output.
* **`hold`**: set while the block is being programmed. It forces all outputs
  and feedbacks to 0 and clears the memory points.

### Configuration word (`afpga_pkg::plb_cfg_t`, 288 bits, MSB first)

| field | bits | meaning |
|---|---|---|
| `lut[3:0]` | 4 x 64 | truth tables. LUT *l* outputs `lut[l][{in5..in0}]` |
| `fb_sel[3:0]` | 4 x 4 | `fb_sel[l][k]` = 1: input *k* of L*l* is `O_k` |
| `or_inv[1:0]` | 2 x 6 | per-wire inversion in front of the upper/lower OR |
| `mp_bypass[1:0]` | 2 | upper/lower memory point transparent |
| `ledr_rv` | 1 | upper memory point joins L0/L2 and L1/L3 |
| `tern_ack` | 1 | `ack_out[0]` covers all four outputs |

## 3. Mapping gates onto the block

This is the part that is not obvious from the hardware. The same PLB becomes
very different circuits depending on the LUT contents. `tb/plb_cfg_pkg.sv`
builds each of the configurations below from the gate equations. Use it as the
reference when writing a new gate. `f(x,y)` is any 2-input Boolean function.

### 3.1 4-phase binary gate from two LUTs with feedback (half a PLB)

`I' = {y1, y0, x1, x0, ack, ack}`. L0 drives rail '0' (`O0`) and reads its own
output on input 0. L1 drives rail '1' (`O1`) and reads its own output on input
1. The acknowledge is wired to both `I'0` and `I'1` because each LUT gives up a
different input to its feedback. Both memory points are bypassed.

```
O_r := (f(x,y) == r)  if x, y valid and ack = 0
       0              if x, y Omega and ack = 1
       O_r            otherwise               S_out = O0 ^ O1
```

### 3.2 4-phase gates with the memory point

The LUTs only compute "all inputs valid and the function". The OR gate
detects "all inputs back to Omega". The C-element of the memory point joins
the two. With an acknowledge input, `I' = {-, y1, y0, x1, x0, ack}`, and
`or_inv[0]` inverts the ack wire in front of the OR gate. The OR output then
falls only when the data is Omega *and* ack = 1. Without an acknowledge, six
data wires fit in each half. Inputs of mixed radix also fit, as long as the
wires add up to six: the testbench runs an acknowledge, a binary input and a
ternary input together. A full adder takes one PLB: sum in the upper half
(`O0`, `O1`), carry in the lower half (`O2`, `O3`), both halves reading
`{z1,z0,y1,y0,x1,x0}`.

A **ternary** 2-input gate reads `{y2,y1,y0,x2,x1,x0}` on both halves. L0..L2
give the three output rails through the memory points, L3 is filled with 0, and
`tern_ack` gives one acknowledge over all outputs. The testbench uses
z = (x + y) mod 3. A single **1-of-4 output** works the same way with all four
LUTs. The testbench uses a decoder, z = 2x + y.

### 3.3 2-phase LEDR gate

*With feedback:* wired like 3.1 with `I' = {yr, yd, xr, xd, ack, ack}`, memory
points bypassed. When ready (`phase(x) = phase(y) = p`, `ack != p`), the LUTs
set `Od = f(xd,yd)` and `Or = f` if p = 0, `~f` if p = 1, so that the phase of
`(Od,Or)` becomes p. Otherwise they hold.

*With the two-LUT rendez-vous* (`ledr_rv = 1`, upper memory point not bypassed):
`I' = I'' = {-, ack, yr, yd, xr, xd}`, no feedback. When ready, L0 and L2 both
output `Od`'s new value. When not ready, L0 outputs 0 and L2 outputs 1, so
their C-element holds. L1 and L3 do the same for `Or`.

### 3.4 2-phase edge gate (two PLBs)

An edge gate is split into detection, computation and synchronisation.

*PLB A, 2x2 decision wait:* four LUT C-elements `C_ij` coupled through all the
feedbacks, with both memory points bypassed, so `O0..O3 = C00, C01, C10, C11`.

```
C_ij = RV(A_i ^ C_i,1-j ,  B_j ^ C_1-i,j)          (RV = C-element, held by self-feedback)
I'  = {A1, A0, B0, B1, -, -}     I'' = {A1, A0, -, -, B0, B1}
L0 = C00(C00,C01,C10,B0,A0,A1)  fb_sel 0111     L1 = C01(C00,C01,B1,C11,A0,A1)  fb_sel 1011
L2 = C10(C00,B0,C10,C11,A0,A1)  fb_sel 1101     L3 = C11(B1,C01,C10,C11,A0,A1)  fb_sel 1110
```

After a toggle on `A_i` and one on `B_j`, exactly `C_ij` toggles. The XORs then
cancel the half-toggled inputs of its neighbours, so all C-elements again have
equal inputs.

*PLB B, computation and 2x1 decision wait:* `I'[3:0] = C00..C11`,
`I''4 = ack`, `ledr_rv = 1`, upper memory point active.
`L0 = XOR of the C_ij with f(i,j) = 1` and `L1 = XOR of the others`. `L2 =
~(O1 ^ ack)` (feedback of `O1` on input 1) and `L3 = ~(O0 ^ ack)` (feedback of
`O0` on input 0). `O0 = C(L0, L2)` is output wire '1' and `O1 = C(L1, L3)` is
wire '0'. After one output wire toggles, the other C-element is locked until
the receiver toggles ack.

## 4. The programming chain

Each block has one asynchronous FIFO (`prog_fifo`). Its stages are
dual-rail weak-condition half buffers: two C-elements per stage, each joining a
rail of the previous stage with the NOR of the next stage's rails. The
programmer sends each bit as rail 1 or rail 0, then Omega, under the 4-phase
handshake (`prog_ack`). The last stage is enabled by the inverse of the
external pin `last_ack`. While that pin is low the chain fills from the far
end. A full half-buffer chain holds values in every second stage, so the
programming points are rail 1 of stages 1, 3, 5, .... The FIFO has
2 x 288 x `NUM_PLB` stages.

* **Bit order**: the first bit sent ends in the last stage. Send the word of
  the last PLB first, MSB first. PLB *p* reads bits `[p*288 +: 288]`.
* **Clearing** (partial reconfiguration): keep `prog_mode` high and act as a
  4-phase receiver on `last_d`/`last_ack` until every bit has left, then send
  the new configuration.
* While `prog_mode` is high every PLB output is 0.

## 5. Modelling and simulation

The circuit has no clock. The RTL is zero-delay. C-elements are latches, and a
programmed gate that uses LUT feedback is a loop through a LUT. Lint and
synthesis tools report these loops (`UNOPTFLAT` in Verilator, combinational
loops in Yosys). They are the circuit's state, not mistakes. Verilator settles
them by iterating, which works because each correctly programmed gate has a
single stable state for a given set of inputs. A testbench must move inputs one
handshake step at a time, with a delay between steps, as a real neighbour
would. Reset (`rst`) clears every C-element. The two-state simulator starts
LUT feedback from random values, so keep `rst` or `hold` high until the
configuration is in place.

Simulate a block with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/afpga_pkg.sv tb/plb_cfg_pkg.sv tb/tb_plb.sv --top tb_plb
obj_dir/Vtb_plb
```

| testbench | what it checks |
|---|---|
| `tb_c_element` | random vectors against the C-element truth table, reset |
| `tb_plb_lut` | every address of random truth tables |
| `tb_memory_point` | C-element and bypass behaviour, acknowledge XOR |
| `tb_plb` | every style of section 3, including the 1-of-4 output: values, no early firing, receiver stalls |
| `tb_prog_fifo` | 288-bit load with the handshake, hold while the pin is low, clear order, reload |
| `tb_afpga_block` | full-size block: load 1152 bits, run edge/4-phase/LEDR gates, clear, reload, run full adder/ternary/C-element/LEDR rendez-vous gates. It counts every mechanism. |

Each prints `TB_RESULT checks=N failures=M`. The full-size testbench builds in
about two minutes and runs in about one.

## 6. Departures, choices and limits

What follows the source design: the encodings, the firing rules, the PLB
structure (four 6-LUTs split into two groups of six wires, per-input feedback,
two OR gates, two memory points with bypass, the LEDR rendez-vous MUXes, the
ternary acknowledge MUX), the 2x2 and 2x1 decision waits and their LUT wiring,
the FIFO programming chain with its external acknowledge pin, and outputs held
at 0 during programming.

Choices made here:

* **OR input polarity (`or_inv`)** is an addition. Under 4-phase the output
  must return to 0 when the data is Omega *and* the acknowledge is 1. A plain
  OR of all input wires including the acknowledge cannot detect that. One
  programming point per wire lets the acknowledge enter inverted.
* **Feedback is taken from the PLB output** (after the memory point), not from
  the raw LUT output. The two are the same when the memory point is
  transparent. The 2x1 decision wait needs the C-element output.
* **Output numbering**: `O_k` is the output fed by LUT `L_k`. Published
  drawings of this block label the upper pair inconsistently.
* The configuration layout, bit order, LUT index order, the tapped FIFO rail,
  the polarity of `last_ack`, the `prog_mode` pin and the block size
  (`NUM_PLB = 4`, a 2 x 2 square) are all choices made here.

Limits:

* A LUT has six inputs. A 3-input binary gate therefore has no room for an
  acknowledge input in either style: 6 data wires plus 1 acknowledge needs 7.
  The 4-phase full adder is run without one. The LEDR rendez-vous wiring is run
  as a 2-input gate with an acknowledge.
* The routing network is absent: no routing channels, connection boxes or
  switchboxes, and no switchbox insulation mode during reconfiguration.
* Security rests on physical properties that RTL cannot express: balanced wire
  lengths and loads, equal rise and fall times, equal driver strengths. A
  netlist from this RTL needs a custom, symmetric layout to keep them.
