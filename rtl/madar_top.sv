// madar_top: the address-free processor, four rings of increasing period.
//
// All state lives in four rings: R0 (P0 = 16 slots) and R1 (P1 = 256) are
// register chains, R2 (P2 = 4K) and R3 (P3 = 64K) are swept SRAM banks with a
// short register window. Code and data packets circulate together; fixed
// stations execute the instructions that pass them:
//   R0: ALU at slot 0, XFER(R0<->R1) at P0/4, STEER at P0/2, MUL at 3*P0/4
//   R1: ALU at slot 0, STEER at P1/8, XFER(R0<->R1) at P1/2,
//       XFER(R1<->R2) at 3*P1/4
//   R2: XFER(R1<->R2) at slot 8, XFER(R2<->R3) at slot 32
//   R3: XFER(R2<->R3) at slot 8, I/O rendezvous station at slot 32
// The transfer stations make the period hierarchy the memory hierarchy; the
// I/O station is the only path between the rings and the host.
//
// Interface:
//   adv[r]        advance ring r this clock (the run plan: normally all ones;
//                 a ring is held to let a transfer fire exactly once).
//                 Gated internally with `ready`.
//   ready         high once both SRAM banks have been cleared after reset
//                 (P3-L-1 clocks).
//   seed_*        initial seating of one slot per clock into a held ring
//                 (R2/R3: register window only).
//   host_*        the I/O station: read or overwrite the R3 packet with a
//                 given seat; the response comes when it passes, within one
//                 revolution of R3.
//   phase[r]      ring r's phase counter.
//   fired         one bit per station, high on a clock it executes:
//                 0 R0 ALU, 1 R0 MUL, 2 R0 STEER, 3 R1 ALU, 4 R1 STEER,
//                 5/6 XFER01 on R0/R1, 7/8 XFER12 on R1/R2, 9/10 XFER23 on R2/R3.
//   xfer_clash    two transfers aimed at one ring on the same edge.
// Every station result is written on the same edge that advances its ring.
//
// Following the architecture: ring periods, ALU/MUL on the shortest ring,
// STEER/ALU on the next, transfer stations between neighbours, the I/O
// station on the outermost ring. This design's own choices: the exact slot
// positions, the extra STEER on R0 (needed to end a loop parked there), which
// rings are registers and which SRAM, and the seeding port.
module madar_top
  import madar_pkg::*;
#(
  parameter int unsigned P0 = 16,
  parameter int unsigned P1 = 256,
  parameter int unsigned P2 = 4096,
  parameter int unsigned P3 = 65536,
  parameter int unsigned L  = 64,
  localparam int unsigned SW = $clog2(P3)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [3:0]    adv,
  output logic          ready,
  input  logic          seed_we,
  input  logic [1:0]    seed_ring,
  input  logic [SW-1:0] seed_idx,
  input  pkt_t          seed_pkt,
  input  logic          host_req_valid,
  output logic          host_req_ready,
  input  logic          host_req_write,
  input  logic [SW-1:0] host_req_seat,
  input  pkt_t          host_req_pkt,
  output logic          host_rsp_valid,
  output pkt_t          host_rsp_pkt,
  output logic [31:0]   phase [4],
  output logic [10:0]   fired,
  output logic          xfer_clash
);

  localparam int unsigned W0 = $clog2(P0);
  localparam int unsigned W1 = $clog2(P1);
  localparam int unsigned W2 = $clog2(P2);
  localparam int unsigned W3 = $clog2(P3);

  logic [3:0] go;
  logic       rdy2, rdy3;
  assign ready = rdy2 && rdy3;
  assign go    = adv & {4{ready}};

  logic [W0-1:0] ph0;
  logic [W1-1:0] ph1;
  logic [W2-1:0] ph2;
  logic [W3-1:0] ph3;
  assign phase[0] = 32'(ph0);
  assign phase[1] = 32'(ph1);
  assign phase[2] = 32'(ph2);
  assign phase[3] = 32'(ph3);

  win_t    w0 [4], w1 [4], w2 [2], w3 [2];
  stn_wr_t q0 [4], q1 [4], q2 [2], q3 [2];
  logic    c01, c12, c23;
  assign xfer_clash = c01 || c12 || c23;

  // ---------------- rings ----------------
  madar_shift_ring #(.P(P0), .NPORT(4), .POS('{0: 0, 1: P0/4, 2: P0/2, 3: 3*P0/4, default: 0})) u_r0 (
    .clk, .rst_n, .adv(go[0]), .phase(ph0), .win(w0), .wr(q0),
    .seed_we(seed_we && seed_ring == 2'd0), .seed_idx(W0'(seed_idx)), .seed_pkt);

  madar_shift_ring #(.P(P1), .NPORT(4), .POS('{0: 0, 1: P1/8, 2: P1/2, 3: 3*P1/4, default: 0})) u_r1 (
    .clk, .rst_n, .adv(go[1]), .phase(ph1), .win(w1), .wr(q1),
    .seed_we(seed_we && seed_ring == 2'd1), .seed_idx(W1'(seed_idx)), .seed_pkt);

  madar_sram_ring #(.P(P2), .L(L), .NPORT(2), .POS('{0: 8, 1: 32, default: 0})) u_r2 (
    .clk, .rst_n, .adv(go[2]), .phase(ph2), .ready(rdy2), .win(w2), .wr(q2),
    .seed_we(seed_we && seed_ring == 2'd2), .seed_idx(W2'(seed_idx)), .seed_pkt);

  madar_sram_ring #(.P(P3), .L(L), .NPORT(2), .POS('{0: 8, 1: 32, default: 0})) u_r3 (
    .clk, .rst_n, .adv(go[3]), .phase(ph3), .ready(rdy3), .win(w3), .wr(q3),
    .seed_we(seed_we && seed_ring == 2'd3), .seed_idx(W3'(seed_idx)), .seed_pkt);

  // ---------------- R0 stations ----------------
  madar_alu_station   u_r0_alu   (.en(go[0]), .win(w0[0]), .wr(q0[0]), .fired(fired[0]));
  madar_steer_station u_r0_steer (.en(go[0]), .win(w0[2]), .wr(q0[2]), .fired(fired[2]));
  madar_mul_station   u_r0_mul   (.en(go[0]), .win(w0[3]), .wr(q0[3]), .fired(fired[1]));

  // ---------------- R1 stations ----------------
  madar_alu_station   u_r1_alu   (.en(go[1]), .win(w1[0]), .wr(q1[0]), .fired(fired[3]));
  madar_steer_station u_r1_steer (.en(go[1]), .win(w1[1]), .wr(q1[1]), .fired(fired[4]));

  // ---------------- transfer stations ----------------
  madar_xfer_station u_x01 (
    .en_a(go[0]), .win_a(w0[1]), .wr_a(q0[1]), .fired_a(fired[5]),
    .en_b(go[1]), .win_b(w1[2]), .wr_b(q1[2]), .fired_b(fired[6]), .clash(c01));

  madar_xfer_station u_x12 (
    .en_a(go[1]), .win_a(w1[3]), .wr_a(q1[3]), .fired_a(fired[7]),
    .en_b(go[2]), .win_b(w2[0]), .wr_b(q2[0]), .fired_b(fired[8]), .clash(c12));

  madar_xfer_station u_x23 (
    .en_a(go[2]), .win_a(w2[1]), .wr_a(q2[1]), .fired_a(fired[9]),
    .en_b(go[3]), .win_b(w3[0]), .wr_b(q3[0]), .fired_b(fired[10]), .clash(c23));

  // ---------------- I/O station ----------------
  madar_rendezvous #(.P(P3), .POS(32)) u_io (
    .clk, .rst_n, .adv(go[3]), .phase(ph3), .win(w3[1]), .wr(q3[1]),
    .req_valid(host_req_valid), .req_ready(host_req_ready),
    .req_write(host_req_write), .req_seat(W3'(host_req_seat)), .req_pkt(host_req_pkt),
    .rsp_valid(host_rsp_valid), .rsp_pkt(host_rsp_pkt));

endmodule
