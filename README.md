# MADAR: an address-free processor in SystemVerilog

MADAR stores every value, data or code, in rings of slots that shift one
position per clock. No value has an address. A value is named by where it
sits in its orbit, given as a (ring, phase) coordinate. Fixed *stations*
beside the rings execute instructions as the instructions pass. An
instruction names its operands by how many slots ahead of it they ride. Rings
of increasing period (16, 256, 4K and 64K slots) take the place of a cache
hierarchy. Compile-time *transfer* instructions move packets between
neighbouring rings; there are no misses. The machine has no program counter,
no register file, no cache and no fetch. A loop body parked on a ring runs
once per revolution, and a loop ends when a *steer* station turns its
instructions into empty slots.

This RTL implements that execution model: rings that are register chains,
rings backed by swept SRAM, ALU, multiplier, steer, transfer and rendezvous
(I/O) stations, and a four-ring top level. The testbenches run the directed
behaviours of the architecture on the full-size machine: the counted-sum loop
with steered exit, collision execution, a move down the whole hierarchy and
a promotion back, host I/O, and a streaming inner product.

## 1. The packet

Every slot holds exactly one 81-bit packet (`madar_pkg::pkt_t`):

| field     | bits | meaning |
|-----------|------|---------|
| `kind`    | 2  | `K_BUBBLE` (empty, all zeros), `K_DATA`, `K_INSTR` |
| `op`      | 3  | `ADD`=0, `SUB`=1, `CMPLT`=2, `STEER`=3, `XFER`=4, `MUL`=5, `MAC`=6 |
| `src_a`   | 4  | operand A: offset 1..8 ahead (the operand window W=8) |
| `src_b`   | 4  | operand B: offset 1..8 ahead; for `XFER`, the destination selector |
| `dst`     | 4  | result offset 0..15 ahead; for `STEER`, the start of the kill run |
| `payload` | 64 | the value of a DATA packet; for `STEER`, the kill count |

The field widths, the three kinds and the first five opcodes come from the
architecture. The numeric encodings and the `MUL`/`MAC` opcodes are this
design's own. The architecture has a multiplier station and a
multiply-accumulate station but lists no opcode for either. The
architecture's prose also gives each instruction a predicate and each data
packet a small tag. Its fixed slot format has no field for either, and this
design follows the slot format. Conditional behaviour therefore goes through
`STEER`.

## 2. The one subtle rule: naming in pre-shift coordinates

On every advancing edge, slot *i* moves to slot *(i+1) mod P*. A station
at position *s* therefore sees packets go by in decreasing order of their
starting index. The packet at *offset k* is the one now in slot *s+k*: it
went past the station *k* cycles ago.

When an instruction fires at the station and names offset *k* as its
destination, the write and the shift happen on the **same** clock edge. So
the hardware clocks the result into register *s+k+1*, the register the named
packet moves into on that edge. The named packet is replaced, and the
register number is only an implementation detail. A result written at offset
*k* is at offset *k+1* on the next cycle, next to the packets that were its
neighbours. Both ring modules do exactly this (`madar_shift_ring`,
`madar_sram_ring`). The ring test checks it against a reference model on
random traffic.

Worked example (the counted sum, 16-slot ring, ALU at slot 0):

| seat | packet | note |
|------|--------|------|
| 5 | `DATA acc=0` | accumulator |
| 4 | `DATA i=0` | counter |
| 3 | `DATA one=1` | |
| 2 | `ADD a=3 b=2 d=3` | acc += i, reaches the ALU at cycle 14 |
| 1 | `ADD a=3 b=2 d=3` | i += one, reaches the ALU at cycle 15 |
| 0 | `CMPLT a=8 b=4 d=7` | flag = (lim < i), cycle 0 |
| 8 | `DATA lim=R-1` | |
| 7 | `DATA flag=0` | |
| 6 | `STEER a=1 d=0 count=15` | at the steer station (slot 8) at cycle 2: if flag, empty offsets 0..14 |

Both ADDs use the same relative offsets. They touch different packets only
because they sit in different slots. The acc-update reaches the station one
cycle before the counter-update, so it reads the old `i`, and after *R*
revolutions `acc = R(R-1)/2`. The compare and steer rows (seats 0, 6, 7 and
8) are this design's way of ending the loop. The steer fires on advance
`16R+2` and leaves exactly one packet, the accumulator. `tb_madar_top` runs
this program for R = 15 (105) and R = 10 (45) and checks that exit cycle.

## 3. Rings

**Register ring** (`madar_shift_ring`): *P* registers in a circle. Inputs:
`adv`, which shifts the ring on this edge; one `stn_wr_t` request per
station, which writes one packet and/or empties a mask of offsets; and a
seeding port. Outputs: the phase counter and a 16-packet window per station
(offsets 0..15). If `adv` is low the ring is *held*: nothing moves, and a
request lands at offset *k* itself (*s+k*, not *s+k+1*). Holds let the run
plan fire an inter-ring transfer exactly once (section 5). Two requests to
one slot on one edge: the higher port number wins. A correct schedule never
does that.

**SRAM ring** (`madar_sram_ring` + `madar_sweep_sram`): the same logical
ring, built differently. Slots `0..L-1` (L = 64) are a register window, and
all stations must sit inside it (`POS + 16 <= L - 1`). Slots `L..P-2` are
the words of a single SRAM bank. Slot `P-1` is the bank's output register,
which feeds slot 0. Nothing presents an address to the bank: an internal
pointer sweeps it. Each advance reads the word under the pointer into the
output register, writes slot `L-1` into the same word, and moves the pointer
on. The whole memory traffic is one read and one write of the same word per
advance, which a single port can do in read-first mode. After
reset the bank spends `P-L-1` clocks writing zeros (bubbles), and `ready`
is low until that ends. The seeding port reaches only the register window.
The rest of the ring is reached through a rendezvous station.

**Phase counter and coordinates.** Each ring counts its advances mod *P*. A
packet's coordinate, its *seat*, is the slot it would occupy at phase 0:
`seat = (register - phase) mod P`. The seat never changes while the packet
circulates.

## 4. Stations

All stations except the rendezvous station are combinational. A station
looks at its window, and on a clock where its ring advances (`en`) it
executes the instruction at offset 0 if the opcode is of its class. An
instruction whose operand offset is outside 1..8, or whose operands are not
DATA, does nothing.

| station | module | what fires it | effect |
|---------|--------|---------------|--------|
| ALU | `madar_alu_station` | `ADD`, `SUB`, `CMPLT` | packet at `dst` := DATA(A op B); CMPLT is a signed compare giving 1/0 |
| multiplier | `madar_mul_station` | `MUL`, `MAC` | `dst` := A*B, or `dst` := dst + A*B (dst must be DATA); low 64 bits |
| steer | `madar_steer_station` | `STEER` whose packet at `src_a` is non-zero DATA | offsets `dst .. dst+count-1` become bubbles (clipped to 0..15; may include the steer itself) |
| transfer | `madar_xfer_station` | `XFER` on either of its two rings | copies the non-bubble packet at `src_a` to offset `dst` of its *own* ring (`src_b`=0, a copy relay), of the next *shorter* ring (`src_b`=1, `XFER_IN`), or of the next *longer* ring (`src_b`=2, `XFER_OUT`) |
| rendezvous / I/O | `madar_rendezvous` | a host request | waits until the requested seat passes, then captures it or overwrites it |

**Transfer station.** It is mounted on two neighbouring rings and sees
both windows. A middle ring such as R1 passes two transfer stations, one on
each side. The direction in `src_b` makes sure a cross copy executes only at
the station on the side it names. It can copy in both directions on one edge. A copy goes to the
destination ring in that ring's pre-shift coordinates: one slot on if that
ring advances on the same edge, in place if it is held. If the ring's own
same-ring relay and an incoming cross copy target one ring on the same edge,
the relay wins and `clash` is raised.

**Rendezvous station.** It is the answer for a value whose place is known
only at run time. At request time it computes `target = POS - seat`
(mod *P*, with *P* a power of two), then compares that with the phase counter
every cycle. There is one subtractor and one comparator; there is no search
over slots. The wait is at most one revolution. The host side is a
valid/ready request (`req_write`, `req_seat`, `req_pkt`) and a one-cycle
`rsp_valid` with `rsp_pkt`. On the outermost ring this station is the
machine's only path to the host.

## 5. The machine (`madar_top`)

```
 R0  16 slots, registers : ALU@0   XFER01@4   STEER@8   MUL@12
 R1 256 slots, registers : ALU@0   STEER@32   XFER01@128   XFER12@192
 R2  4K slots, SRAM      : XFER12@8   XFER23@32
 R3 64K slots, SRAM      : XFER23@8   I/O (rendezvous)@32
```

(Positions for the default sizes; R0 and R1 positions scale with `P0`, `P1`.)

Ports: `adv[3:0]` is the run plan, one advance enable per ring, gated
internally by `ready`. The `seed_*` port seats one packet per clock into a
held ring. `host_*` is the I/O station. `phase[4]` gives the phase counters,
`fired[10:0]` has one strobe per station (bit order in the module header),
and `xfer_clash` flags a transfer conflict.

Normally every ring advances every clock. To move a value exactly once from
ring *a* to ring *b*, a program seats an XFER on ring *a*. The run plan then
advances ring *a* alone until the XFER reaches the station, advances *a* and
*b* together for one edge (the copy), and holds *a* afterwards, or clears the
XFER with a steer. Pairing the transfer with a steer that empties the source
makes it a *move*, which is an eviction. A transfer towards a longer ring is
a demotion; towards a shorter ring it is a promotion, the equivalent of a
cache fill.

**Copy relays.** An instruction reaches only 8 slots ahead. If a value is
needed further down the ring, a same-ring XFER (`src_b`=0) copies it forward
into a fresh slot, and later instructions read that copy. A chain of relays
can carry one value, such as a shared constant, past any number of
consumers. Each relay costs one slot. On R1 both transfer stations execute a
relay, so it runs twice per revolution; the second copy writes the same
value again. `tb_madar_accum` relies on this.

Where the architecture fixes things, this design follows it: the ring
periods, ALU and MUL on the shortest ring, STEER and ALU on the next, a
transfer station between each pair of neighbouring rings, and one I/O
station on the outermost ring. The following are this design's own choices:
- the slot positions;
- a second steer station on R0 (without it, a loop parked on the 16-slot
  ring could not end);
- which rings are registers and which are SRAM;
- the register-window length;
- the seeding port;
- the host handshake.

## 6. Departures and limits

- **Only R0 has a multiplier**, as in the architecture's machine diagram. A
  multiply kernel with more than 16 packets has nowhere to run. This rules
  out the degree-2 and degree-5 polynomials and flat dot products with N ≥ 4.
  Add-only kernels of up to 256 packets run on R1.
- The 32- and 64-slot rings that the scheduler lands some kernels on are not
  in the 16/256/4K/64K hierarchy. Such kernels go on R1.
- The streaming compute ring is R0 (16 slots), not a separate 8-slot ring.
  The matrix-vector reuse scheme, with one small compute ring per output, is
  not built. The outputs can run one after another on R0.
- The kill run of a steer is clipped to the 16 offsets a 4-bit `dst` can
  name. Longer runs take several steers.
- Clock gating of idle slots, which the energy model assumes, is not built:
  every register shifts on every advance.
- The run plan (`adv`) and the initial seating come from outside, because
  the scheduling compiler is software.
- There is no dynamic spill, no interrupt or context mechanism, and no
  stations for nonlinear functions, as in the architecture itself.

## 7. Simulation

Every file in `rtl/` is one module or package. `madar_pkg.sv` must be read
first. Testbenches print `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl -y rtl rtl/madar_pkg.sv \
          tb/tb_madar_top.sv --top-module tb_madar_top
./obj_dir/Vtb_madar_top
```

| testbench | what it shows |
|-----------|---------------|
| `tb_madar_shift_ring` | identity after one period, holds, pre-shift writes and kills against a reference array |
| `tb_madar_sram_ring`, `tb_madar_sweep_sram` | the same for the SRAM-backed ring; clearing sweep; delay of the bank |
| `tb_madar_alu_station`, `tb_madar_mul_station`, `tb_madar_steer_station`, `tb_madar_xfer_station` | each opcode's result and every no-fire case |
| `tb_madar_rendezvous` | random reads/writes by seat on a ring with random holds; wait ≤ one revolution |
| `tb_madar_top` | full-size machine, about 260k clocks, a few seconds: clearing, host I/O on R3, counted sum (105, 45, exit cycle, one survivor), MUL, move R0→R1, relay on R1, a full R1 orbit at a stable seat, demotion to R3 and host read of 135, promotion of 35 from the host back to R0, `7+35=42` replacing the named packet; every mechanism counted |
| `tb_madar_accum` | add-only dependence chains of 12 and 24 steps on R1, with a relay chain for the shared constant; every ADD on its predicted cycle; same result on a second revolution |
| `tb_madar_stream` | 16-pair streaming inner product at one MAC per R0 revolution, checked after every MAC |

To change the machine, edit the parameters of `madar_top`: `P0..P3` and `L`,
where `P2` and `P3` must be powers of two larger than `L+2`. Station
positions are in its ring instances. New opcodes go in `madar_pkg` and in a
station module.
