// madar_xfer_station: a transfer station where two rings meet.
//
// The station is mounted at one position on ring A, the shorter ring, and
// one on ring B, the longer one, and sees both windows. An XFER instruction passing it on either ring, on a
// clock where that ring advances, copies the packet at its window offset
// src_a (1..W, any non-bubble packet: data or code) to offset dst ahead of
// the station on
//   - the other ring, when the instruction on A has src_b = XFER_OUT
//     (demotion, the scheduled eviction) or the one on B has src_b = XFER_IN
//     (promotion, the scheduled cache fill). A middle ring has a station on
//     each side; the direction keeps a cross copy from firing at both;
//   - its own ring, when src_b = XFER_SAME: the copy relay that carries a
//     value forward past the operand window. On a middle ring both stations
//     execute it; the second copy rewrites the same value.
// The write is in pre-shift coordinates of the destination ring: it lands
// one slot on if that ring advances on the same edge, in place if the ring
// is held. A cross-ring copy meant to happen once is fired in a single
// shared advance of both rings while the run plan holds them otherwise.
//
// If both rings' instructions want to write the same ring on one edge, the
// instruction on that ring wins (a correct schedule never does this). The
// selector encoding in src_b is this design's choice; the architecture only
// names same-ring and inter-ring XFER. Combinational.
module madar_xfer_station
  import madar_pkg::*;
(
  input  logic    en_a,
  input  win_t    win_a,
  output stn_wr_t wr_a,
  output logic    fired_a,    // an instruction on ring A executed
  input  logic    en_b,
  input  win_t    win_b,
  output stn_wr_t wr_b,
  output logic    fired_b,    // an instruction on ring B executed
  output logic    clash       // both wanted the same ring this edge
);

  pkt_t ia, ib, sa, sb;
  logic fa, fb, a_cross, b_cross;

  always_comb begin
    ia = win_a[0];
    ib = win_b[0];
    sa = win_a[ia.src_a];
    sb = win_b[ib.src_a];
    fa = en_a && ia.kind == K_INSTR && ia.op == OP_XFER && in_window(ia.src_a) &&
         sa.kind != K_BUBBLE && (ia.src_b == XFER_SAME || ia.src_b == XFER_OUT);
    fb = en_b && ib.kind == K_INSTR && ib.op == OP_XFER && in_window(ib.src_a) &&
         sb.kind != K_BUBBLE && (ib.src_b == XFER_SAME || ib.src_b == XFER_IN);
    a_cross = ia.src_b == XFER_OUT;
    b_cross = ib.src_b == XFER_IN;

    wr_a = NO_WR;
    wr_b = NO_WR;
    // Lower priority first: the other ring's cross copy.
    if (fb && b_cross) begin
      wr_a.we = 1'b1; wr_a.off = ib.dst; wr_a.pkt = sb;
    end
    if (fa && a_cross) begin
      wr_b.we = 1'b1; wr_b.off = ia.dst; wr_b.pkt = sa;
    end
    if (fa && !a_cross) begin
      wr_a.we = 1'b1; wr_a.off = ia.dst; wr_a.pkt = sa;
    end
    if (fb && !b_cross) begin
      wr_b.we = 1'b1; wr_b.off = ib.dst; wr_b.pkt = sb;
    end
    fired_a = fa;
    fired_b = fb;
    clash   = (fa && !a_cross && fb && b_cross) || (fb && !b_cross && fa && a_cross);
  end

endmodule
