// madar_sram_ring: a long ring stored in a swept SRAM bank.
//
// Logically identical to madar_shift_ring: P slots, one slot per advance,
// stations at fixed positions, writes in pre-shift coordinates, a
// free-running phase counter. Physically only slots 0..L-1 are registers:
// that short register window is where the stations sit and read their
// operands. Slots L..P-2 are the words of a madar_sweep_sram bank of depth
// P-L-1, and slot P-1 is the bank's output register, which feeds slot 0.
// Every advance moves slot L-1 into the bank and the oldest word out, so the
// only memory traffic is one read and one write under a rotating pointer.
//
// The architecture specifies large rings as single-port SRAM swept by a
// rotating pointer and the operand window as a small shift register; the
// window length L and the split of slots are this design's own.
//
// Every station position must satisfy POS + REACH <= L - 1 so that all its
// reads and writes fall in the register window. `seed_*` may load only the
// register window (seed_idx < L); the rest of the ring is reached through a
// rendezvous station. After reset `ready` stays low for P-L-1 clocks while
// the bank is cleared; `adv` must be low until then.
module madar_sram_ring
  import madar_pkg::*;
#(
  parameter int unsigned P = 4096,
  parameter int unsigned L = 64,
  parameter int unsigned NPORT = 1,
  parameter pos_t POS = '{default: 0},
  localparam int unsigned PW = $clog2(P),
  localparam int unsigned M = P - L - 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          adv,
  output logic [PW-1:0] phase,
  output logic          ready,
  output win_t          win [NPORT],
  input  stn_wr_t       wr  [NPORT],
  input  logic          seed_we,
  input  logic [PW-1:0] seed_idx,
  input  pkt_t          seed_pkt
);

  if (NPORT > MAXPORT) begin : g_bad_nport
    $error("too many stations on one ring");
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_chk
    if (POS[p] + REACH > L - 1) begin : g_bad
      $error("madar_sram_ring: station position outside the register window");
    end
  end
  if (M < 2) begin : g_bad_p
    $error("madar_sram_ring: P must exceed L + 2");
  end

  pkt_t  r   [L];
  pkt_t  nxt [L];
  logic [$bits(pkt_t)-1:0] sram_q;
  logic [$clog2(M)-1:0]    sram_ptr;

  madar_sweep_sram #(.DEPTH(M), .WIDTH($bits(pkt_t))) u_bank (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (adv),
    .din   (r[L-1]),
    .dout  (sram_q),
    .ptr   (sram_ptr),
    .ready (ready)
  );

  always_comb begin
    nxt[0] = adv ? pkt_t'(sram_q) : r[0];
    for (int unsigned i = 1; i < L; i++) nxt[i] = adv ? r[i-1] : r[i];
    for (int unsigned p = 0; p < NPORT; p++) begin
      for (int unsigned k = 0; k < REACH; k++) begin
        // Pre-shift naming: offset k lands one register on when advancing.
        if (adv) begin
          if (wr[p].kill[k]) nxt[POS[p] + k + 1] = BUBBLE;
          if (wr[p].we && wr[p].off == 4'(k)) nxt[POS[p] + k + 1] = wr[p].pkt;
        end else begin
          if (wr[p].kill[k]) nxt[POS[p] + k] = BUBBLE;
          if (wr[p].we && wr[p].off == 4'(k)) nxt[POS[p] + k] = wr[p].pkt;
        end
      end
    end
    if (seed_we && seed_idx < PW'(L)) nxt[seed_idx[$clog2(L)-1:0]] = seed_pkt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < L; i++) r[i] <= BUBBLE;
      phase <= '0;
    end else begin
      for (int unsigned i = 0; i < L; i++) r[i] <= nxt[i];
      if (adv) phase <= (phase == PW'(P - 1)) ? '0 : phase + 1'b1;
    end
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_win
    for (genvar k = 0; k < REACH; k++) begin : g_k
      assign win[p][k] = r[POS[p] + k];
    end
  end

  a_seed_window: assert property (@(posedge clk) disable iff (!rst_n)
                                  seed_we |-> (!adv && seed_idx < PW'(L)));
  a_adv_ready:   assert property (@(posedge clk) disable iff (!rst_n) adv |-> ready);

endmodule
