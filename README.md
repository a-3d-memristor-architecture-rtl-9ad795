# SHA3 in crossbar arrays: a cycle-level RTL model

This RTL models the SHA3 accelerator of M. J. Aljafar, R. Joshi and J. M. Acken,
*A 3D Memristor Architecture for In-Memory Computing Demonstrated with SHA3*, at the level of
its digital behaviour. The accelerator keeps the 1600-bit Keccak state inside memristor crossbar
arrays and computes on it in place. The arrays are stacked so that their geometry matches the
5 x 5 x 64 shape of the Keccak state. The 64 bit-slices of the state sit side by side, so one
operation on a row or column of a slice acts on all 64 slices at once. The hardest part of SHA3
for a memristor array is the lane rotation of the Rho step. Here it is done by a small box of
CMOS multiplexers that links the state array to a second, perpendicular array, and every
rotation amount is fixed in the wiring. The rest of the round (Theta, Pi, Chi, Iota) is a fixed
sequence of array operations, one per clock cycle: 263 cycles per round, and 6326 cycles for
the first 1088-bit message block.

The RTL replaces each memristor by a flip-flop that holds its logic state (low resistance = 1,
high resistance = 0). Each analog gate becomes the logic function it computes. The external
control memory becomes a sequencer that issues the same operation in the same cycle. The result
is a bit-exact and cycle-exact model of the data movement and the schedule. It computes real
Keccak-f[1600] and has been checked against the SHA3 standard. It models no analog behaviour,
energy or area.

## The arrays and where the state lives

```
            Rho array R                 MUX box              state array        complement
     5 stacked planes of 5x64    5 lanes x 64 CMOS MUXs    A: 64 slices 5x5      array NA
   +-----------------------+     +------------------+     +--------------+   +--------------+
   | R[x][y], written one  |<----| sel = x : rotate |<----| A[x][y]      |   | NA[x][y]     |
   | sheet x per cycle     |     |  sheet x by r[x,y]|<---|              |   |              |
   +-----------------------+     | sel = 5 : rot 1  |    +--------------+   +--------------+
      |  routing sheet (Pi)      +------------------+       |   ^   column       |   ^
      +---------------------------------------------------->|---|--------------->|   |
                                                            v   |                v   |
                    64 Theta XOR gates (one per slice) <---- A, R     ----> NA lane writes
                    Chi array: 5 x 64 XNOR gates <--- plane y of A and NA, message X_i, RC
                    Iota array: 24 round constants ---> lane 0 of the Chi array
```

| array | size | role |
|---|---|---|
| A (`state_array`) | 5x5x64 | the Keccak state; the output of the accelerator |
| NA (`state_array`) | 5x5x64 | complement of A for Chi; also holds the Theta result and the Pi result |
| R (`rho_array`) | 5x5x64 | memory only: holds rot(A,1) during Theta and rho(state) after Rho |
| Theta XOR gates (`theta_xor_bank`) | 64 | running 10-input XOR per slice, plus a lane result gate |
| Chi array (`chi_array`) | 5x64 gates | AND-XOR of Chi, XOR of the message block, XOR of the round constant |
| Iota array (`iota_array`) | 24x64 | round constants |
| MUX box (`rho_mux_bank`, `rho_mux_lane`) | 5x64 MUXs | rotation between A/NA and R |
| routing sheet (`pi_router`) | | carries lanes of R back into NA for Pi |

Lanes are indexed `[x][y]` everywhere (x = sheet, y = plane), bit z = slice. The types are in
`sha3_pkg`: `lane_t` (64 bits), `sheet_t`/`plane_t` (5 lanes), `state_t` (5x5 lanes).

## The Rho multiplexer box

This is the central idea of the architecture. Lane y of the box has 64 multiplexers, one per
bit. Input x of the multiplexer for bit z is wired to bit (z - r[x][y]) mod 64 of lane (x, y),
where r is the standard Rho offset table:

| r[x][y] | x=0 | x=1 | x=2 | x=3 | x=4 |
|---|---|---|---|---|---|
| y=0 | 0 | 1 | 62 | 28 | 27 |
| y=1 | 36 | 44 | 6 | 55 | 20 |
| y=2 | 3 | 10 | 43 | 25 | 39 |
| y=3 | 41 | 45 | 15 | 21 | 8 |
| y=4 | 18 | 2 | 61 | 56 | 14 |

Every sheet has its own input, so all 320 multiplexers share one 3-bit select. Select x writes
sheet x of the source array, rotated, into sheet x of R in one cycle, and the whole Rho step takes
five cycles. Theta also needs every lane rotated by exactly 1. A sixth input (select 5) carries
a sheet rotated by one bit. The source description adds this input only to planes 1 to 4,
because plane 0 already has offset 1 at x = 1. That offset only covers sheet 1, though, and
Theta rotates all five sheets. In this RTL plane 0 gets the sixth input too. In the RTL the
rotations are `rotl(...)` calls on constants, so they synthesise to wiring.

The source array of the box is A for the Theta rotation and NA for Rho, because Rho runs on the
Theta result, which sits in NA. The column transmission gates under the A and NA columns make
that choice.

## One round, cycle by cycle

`keccak_ctrl` issues one micro-operation (`sha3_pkg::op_e`) per cycle:

| step | cycles | what happens |
|---|---|---|
| init (first block only) | 2 | A, NA, R to 0; then NA to 1 (so NA = ~A, A = 0) |
| map block | 3 per plane | G = A(plane) ^ X_i(plane) in the Chi gates; plane to 1; plane <= G |
| Theta | 175 | per sheet x: 35 cycles (below), result into NA |
| init R | 1 | R to 0 |
| Rho | 5 | sheet x of NA through the MUXs into sheet x of R |
| init A, NA | 2 | to 0, then to 1 |
| Pi | 25 | NA[y][2x+3y] <= ~R[x][y], one lane per cycle |
| complement | 5 | plane y of A <= ~plane y of NA |
| Chi | 45 | per plane: 9 cycles (below) |
| Iota | 5 | gate init; G0 = A[0,0] ^ RC; A[0,0] to 0, to 1; A[0,0] <= G0 |

The round is 175 + 1 + 5 + 2 + 25 + 5 + 45 + 5 = 263 cycles. A first block of 17 lanes (4
planes) takes 2 + 12 + 24 x 263 = 6326 cycles. A chained block takes 6324.

**Theta (35 cycles per sheet x).** Cycle 1 rotates sheet x+1 of A by one into R. The next 19
cycles fold ten operands into the 64 Theta gates: the five lanes A[x-1][y], then the five lanes
R[x+1][y]. The first operand loads in one cycle. Each later operand needs two cycles, one to
re-arm the gate and one to XOR. At the end the gates hold D[x] = C[x-1] ^ rot(C[x+1], 1). Then,
for each of the five lanes, three cycles initialise a result gate, compute D[x] ^ A[x][y] and
store it in NA[x][y]. The running value must survive those five lanes, so the RTL gives the
result its own gate T. The source does not say which gate holds it.

**Pi and the two complements.** The step list stores the Pi result in NA and then writes the
complement of NA into A. For A to end up holding the Pi result, the lanes must enter NA
inverted. The RTL therefore writes ~R into NA. After step 10, A = pi(rho(theta)) and NA = ~A,
which is exactly what Chi needs.

**Chi (9 cycles per plane).** One cycle initialises the five XNOR gates of the plane (64 rows
at once). Five cycles evaluate one horizontal wire each, in the array's order x = 3, 4, 0, 1, 2.
A wire is a diode wired-OR fed with negated inputs, so it yields ~A[x+1] & A[x+2], and its XNOR
gate stores A[x] ^ that term. The ~A[x+1] operand is read from NA. Two cycles reprogram the
plane (to 0, then to 1), and one cycle stores the gates into A.

## Interface of `sha3_accel`

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears all arrays) |
| `start_i` | in | 1 | start one block; only while `busy_o` is low |
| `first_i` | in | 1 | with `start_i`: first block of a message, run the initialisation |
| `block_i` | in | `RATE_LANES*64` | message block; bit i is bit i%64 of lane i/64, lane index x+5y |
| `busy_o` | out | 1 | from the cycle after `start_i` to the last Iota cycle |
| `done_o` | out | 1 | one-cycle pulse after the last Iota cycle |
| `state_o` | out | 1600 | A in the same bit order; reads zero while busy |

`block_i` must stay stable while the block is being absorbed. The accelerator does no padding
and no squeezing. For SHA3-256, pad the message (0x06 ... 0x80), send one block per `start_i`
(with `first_i` on the first), and read the digest from the low 256 bits of `state_o` after the
last `done_o`. `state_o` is masked while busy, which is how this RTL reads the source's claim
that intermediate values never reach the I/O.

Parameter: `RATE_LANES` (default 17 = 1088 bits). Mapping takes 3 cycles per plane touched,
ceil(RATE_LANES/5) planes: 12 cycles for 17 lanes, 6 for 9 lanes (576 bits), 3 for up to 5
lanes (320 bits), as the source gives.

## What is modelled and what is not

- **Memristors** are flip-flops. Programming a whole array or plane to HRS/LRS is a one-cycle
  clear or set. These initialisation cycles carry no data in the RTL, but they are kept so that
  the schedule is the source's.
- **Volistor XOR/XNOR and diode AND/NAND gates**, and the level-shifting inverters between
  cascaded XNOR gates, are modelled only by their logic function. Voltage levels (0, v+, 2v+),
  reference resistors and sneak-path behaviour are not modelled.
- **CMOS drivers and transmission gates** become multiplexing in `sha3_accel`. Which array
  feeds the MUX box, which plane drives the Chi array and which lanes reach the Theta gates are
  all decoded from the current micro-operation.
- **Control memory.** In the source, 178 control bits per cycle (140.754 KB in all) are read
  from an external memory. Their encoding is not given. `keccak_ctrl` generates an equivalent
  25-bit micro-operation from counters instead.
- **Round constants** are computed at elaboration by the SHA3 LFSR (`sha3_pkg::round_const`),
  rc(t) with x^8 + x^6 + x^5 + x^4 + 1, and are not typed in as a table.

## Where this RTL departs from, or had to interpret, the source

- Theta output: the step list puts it in NA. The Theta section first says "in the Rho array"
  and later moves it next to A. NA is used.
- Message mapping: the step list gives 3 cycles per plane (12 for 1088 bits), the mapping
  section 4 per plane. 3 is used, because only that gives the stated 6326-cycle latency.
- Initial state: the message must see a state of 0, while the initialisation is described as
  programming A and NA to LRS. The RTL clears everything, then sets only NA, so NA = ~A.
- Pi polarity and the sixth multiplexer input on plane 0: see above.
- The source states that the multiplexers are active in only 6 of the 6326 cycles. Its own
  schedule uses them 10 times per round (5 Theta rotations, 5 Rho sheets), 240 times per
  block. The RTL follows the schedule.
- Chi is said to take 50 cycles in its own section and 45 in the step list. The 50 includes
  the 5-cycle complement, which the step list counts separately. The totals agree.
- The order of sheets in Theta, of lanes in Pi and of planes in Chi is not given; index order
  is used.

## Files

`rtl/`: `sha3_pkg` (types, offsets, constants, cycle counts, micro-operations), `sha3_accel`
(top), `keccak_ctrl`, `state_array`, `rho_array`, `rho_mux_bank`, `rho_mux_lane`,
`theta_xor_bank`, `chi_array`, `iota_array`, `pi_router`.

`tb/`: one self-checking testbench per module (`tb_<module>`), `tb_sha3_rates` for the 576- and
320-bit block sizes, and `keccak_ref_pkg`, a plain Keccak-f reference model written from the
standard, independent of the RTL.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -yrtl -ytb \
    rtl/sha3_pkg.sv tb/keccak_ref_pkg.sv tb/tb_sha3_accel.sv --top-module tb_sha3_accel
./obj_dir/Vtb_sha3_accel
```

Replace `tb_sha3_accel` with any other testbench. Every testbench ends with a line
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

What the tests establish:

- `tb_sha3_accel`, at default parameters, hashes the empty message and matches the published
  SHA3-256 digest (a7ffc6f8...8434a). It absorbs a random three-block message and matches the
  reference model after each block. It measures 6326 / 6324 cycles per block, checks that
  `state_o` stays masked while busy, and counts every micro-operation type, failing if one is
  never issued. The run takes well under a second.
- `tb_sha3_rates` matches the SHA3-512 digest of the empty message at 9 lanes, and the
  reference model at 9 and 5 lanes, with 6320 and 6317 cycles.
- The unit testbenches check each array, gate bank and the multiplexers against values computed
  in the testbench. `tb_keccak_ctrl` checks the count of every operation per block, the step
  order within each round, the Rho sheet order, the Chi wire order and the Iota round index.

Not verified: anything analog (voltages, energy, device switching) and the raw 178-bit control
word of the source, which the source does not list.
