// madar_shift_ring: a short ring built as a literal register chain.
//
// The ring holds P packet slots. On every clock edge with `adv` high the
// contents of slot i move to slot (i+1) mod P, so packets pass a fixed
// station in order of decreasing initial index. Stations are attached at the
// fixed positions POS[p]; station p sees the packets at offsets
// 0..REACH-1 ahead of it on `win[p]` (offset k is slot (POS[p]+k) mod P).
//
// Station requests are in pre-shift coordinates: a write or kill aimed at
// offset k names the packet now at slot POS[p]+k, so on an advancing edge it
// is clocked into register POS[p]+k+1, exactly where that packet lands. On an
// edge without `adv` (the ring is held) the request lands in place. This is
// the addressing rule of the architecture. When two requests hit the same
// slot on one edge, the higher port number wins (a schedule should never
// do this; the choice is this design's own).
//
// `phase` is the ring's free-running phase counter: the number of advances
// since reset, mod P. A packet in register j has ring coordinate
// (j - phase) mod P, which never changes while it circulates.
//
// `seed_*` loads one slot per clock. It is the initial-seating port of this
// implementation (the architecture only says rings start with seeded
// contents); it is meant to be used while the ring is held and overrides
// station writes to the same slot. Reset empties every slot.
module madar_shift_ring
  import madar_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned NPORT = 1,
  parameter pos_t POS = '{default: 0},
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          adv,
  output logic [PW-1:0] phase,
  output win_t          win [NPORT],
  input  stn_wr_t       wr  [NPORT],
  input  logic          seed_we,
  input  logic [PW-1:0] seed_idx,
  input  pkt_t          seed_pkt
);

  if (NPORT > MAXPORT) begin : g_bad_nport
    $error("too many stations on one ring");
  end

  pkt_t slot [P];
  pkt_t nxt  [P];

  always_comb begin
    for (int unsigned i = 0; i < P; i++) begin
      nxt[i] = adv ? slot[(i + P - 1) % P] : slot[i];
    end
    for (int unsigned p = 0; p < NPORT; p++) begin
      for (int unsigned k = 0; k < REACH; k++) begin
        // Pre-shift naming: offset k lands one register on when advancing.
        if (adv) begin
          if (wr[p].kill[k]) nxt[(POS[p] + k + 1) % P] = BUBBLE;
          if (wr[p].we && wr[p].off == 4'(k)) nxt[(POS[p] + k + 1) % P] = wr[p].pkt;
        end else begin
          if (wr[p].kill[k]) nxt[(POS[p] + k) % P] = BUBBLE;
          if (wr[p].we && wr[p].off == 4'(k)) nxt[(POS[p] + k) % P] = wr[p].pkt;
        end
      end
    end
    if (seed_we) nxt[seed_idx] = seed_pkt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < P; i++) slot[i] <= BUBBLE;
      phase <= '0;
    end else begin
      for (int unsigned i = 0; i < P; i++) slot[i] <= nxt[i];
      if (adv) phase <= (phase == PW'(P - 1)) ? '0 : phase + 1'b1;
    end
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_win
    for (genvar k = 0; k < REACH; k++) begin : g_k
      assign win[p][k] = slot[(POS[p] + k) % P];
    end
  end

  // Seeding is meant for a held ring.
  a_seed_held: assert property (@(posedge clk) disable iff (!rst_n) seed_we |-> !adv);

endmodule
