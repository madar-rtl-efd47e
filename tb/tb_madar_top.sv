// tb_madar_top: end-to-end test of the whole machine at its full size.
//
// The four rings (16, 256, 4K, 64K slots) are run through one complete
// program story, every expected value being worked out here by hand:
//  1. reset clears both SRAM banks (ready after P3-L-1 clocks);
//  2. the host writes a packet onto R3 through the I/O station and reads it
//     back one revolution later (rotation is storage, rendezvous latency at
//     most one period);
//  3. the counted-sum loop is seated on R0 and runs unchanged once per
//     revolution until a CMPLT-armed STEER removes it: 105 after 15 turns,
//     then 45 after 10 turns, one surviving packet, with the kill on the
//     exact cycle the schedule predicts;
//  4. a MUL turns 45 into 135; a "move" (transfer to R1 in one shared
//     advance, then a steer that clears the source) demotes it to R1,
//     where it keeps one (ring, phase) coordinate over a full orbit;
//  5. on R1 a same-ring copy relay duplicates it and a cross XFER demotes the
//     copy to R2, then to R3, where the host reads 135 through the I/O port;
//  6. the host writes 35 onto R3 and scheduled transfers promote it
//     R3 -> R2 -> R1 -> R0, where an ADD meets it and 7 to give 42, the
//     result replacing the named packet.
// Rings are held and advanced one at a time, as a run plan does. Each
// mechanism is counted; one that never happens is a failure. Slot contents
// are inspected through the hierarchy (R2/R3: register window only).
module tb_madar_top;
  import madar_pkg::*;

  localparam int unsigned P0 = 16, P1 = 256, P2 = 4096, P3 = 65536, L = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] adv = '0;
  logic ready;
  logic seed_we = 1'b0;
  logic [1:0] seed_ring = '0;
  logic [15:0] seed_idx = '0;
  pkt_t seed_pkt = BUBBLE;
  logic host_req_valid = 1'b0, host_req_ready, host_req_write = 1'b0;
  logic [15:0] host_req_seat = '0;
  pkt_t host_req_pkt = BUBBLE;
  logic host_rsp_valid;
  pkt_t host_rsp_pkt;
  logic [31:0] phase [4];
  logic [10:0] fired;
  logic xfer_clash;

  madar_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_alu = 0, n_mul = 0, n_kill = 0, n_relay = 0, n_demote = 0, n_promote = 0;
  int n_hold = 0, n_io_wr = 0, n_io_rd = 0, n_clear = 0, n_clash = 0, n_sum_loop = 0;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (fired[0] || fired[3]) n_alu++;
    if (fired[1]) n_mul++;
    if (fired[2] || fired[4]) n_kill++;
    if (xfer_clash) n_clash++;
    if (ready && adv != 4'b0000 && adv != 4'b1111) n_hold++;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic pkt_t peek(int r, int i);
    case (r)
      0: return dut.u_r0.slot[i];
      1: return dut.u_r1.slot[i];
      2: return dut.u_r2.r[i];
      default: return dut.u_r3.r[i];
    endcase
  endfunction

  function automatic int unsigned span(int r);
    return (r == 0) ? P0 : (r == 1) ? P1 : L;
  endfunction

  // Register index of the first DATA packet holding v, or -1.
  function automatic int find(int r, logic [63:0] v);
    for (int i = 0; i < int'(span(r)); i++)
      if (peek(r, i).kind == K_DATA && peek(r, i).payload == v) return i;
    return -1;
  endfunction

  function automatic int live(int r);
    int n = 0;
    for (int i = 0; i < int'(span(r)); i++) if (peek(r, i).kind != K_BUBBLE) n++;
    return n;
  endfunction

  // One clock with ring-advance mask a; returns the fired vector of that edge.
  task automatic tick(logic [3:0] a, output logic [10:0] f);
    adv = a;
    #1;
    f = fired;
    @(posedge clk);
    #1;
  endtask

  task automatic run(logic [3:0] a, int unsigned n);
    logic [10:0] f;
    for (int unsigned c = 0; c < n; c++) tick(a, f);
  endtask

  task automatic seed(int r, int unsigned idx, pkt_t p);
    adv       = '0;
    seed_we   = 1'b1;
    seed_ring = 2'(r);
    seed_idx  = 16'(idx);
    seed_pkt  = p;
    @(posedge clk);
    #1;
    seed_we   = 1'b0;
  endtask

  // Host access through the I/O station while R3 turns; returns the
  // response packet and the number of R3 advances waited.
  task automatic host(logic wrt, logic [15:0] seat, pkt_t p, output pkt_t rsp,
                      output int unsigned waited);
    logic [10:0] f;
    waited = 0;
    host_req_valid = 1'b1; host_req_write = wrt; host_req_seat = seat; host_req_pkt = p;
    tick(4'b1000, f);
    host_req_valid = 1'b0;
    waited = 1;
    while (!host_rsp_valid) begin
      tick(4'b1000, f);
      waited++;
    end
    rsp = host_rsp_pkt;
    if (wrt) n_io_wr++; else n_io_rd++;
  endtask

  // Counted-sum program of the architecture, seated at seats 0..8 of R0
  // (R0 at phase 0): loop ends when lim < i.
  task automatic seat_sum(logic [63:0] lim);
    seed(0, 5, mk_data(0));                                   // acc
    seed(0, 4, mk_data(0));                                   // i
    seed(0, 3, mk_data(1));                                   // one
    seed(0, 2, mk_instr(OP_ADD, 4'd3, 4'd2, 4'd3, '0));       // acc += i
    seed(0, 1, mk_instr(OP_ADD, 4'd3, 4'd2, 4'd3, '0));       // i += one
    seed(0, 0, mk_instr(OP_CMPLT, 4'd8, 4'd4, 4'd7, '0));     // flag = lim < i
    seed(0, 8, mk_data(lim));                                 // lim
    seed(0, 7, mk_data(0));                                   // flag
    seed(0, 6, mk_instr(OP_STEER, 4'd1, 4'd0, 4'd0, 64'd15)); // kill all but acc
  endtask

  task automatic sum_loop(int unsigned turns);
    logic [10:0] f;
    int unsigned kill_at = 0, alu = 0;
    logic [63:0] exp;
    exp = 0;
    for (int unsigned k = 0; k < turns; k++) exp += k;
    while (phase[0] != 0) tick(4'b0001, f);
    seat_sum(64'(turns - 1));
    for (int unsigned t = 0; t < P0 * (turns + 2); t++) begin
      tick(4'b0001, f);
      if (f[0]) alu++;
      if (f[2] && kill_at == 0) kill_at = t;
    end
    n_sum_loop++;
    // acc += i and i += 1 fire once per turn, the compare once per turn plus
    // the exit turn; the steer fires 2 cycles after the compare that sees
    // i = turns.
    chk(kill_at == P0 * turns + 2, $sformatf("steer fired at advance %0d, expected %0d",
                                             kill_at, P0 * turns + 2));
    chk(alu == 3 * turns + 1, $sformatf("ALU fired %0d times, expected %0d", alu, 3 * turns + 1));
    chk(live(0) == 1, $sformatf("%0d packets survive, expected 1", live(0)));
    chk(find(0, exp) >= 0, $sformatf("acc = %0d not found", exp));
    chk(dut.u_r0.slot[(5 + phase[0]) % P0] == mk_data(exp), "acc still at its seat");
  endtask

  initial begin
    logic [10:0] f;
    pkt_t rsp;
    int unsigned waited, clr;
    int j, v;

    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // 1. clearing sweep
    clr = 0;
    while (!ready) begin
      @(posedge clk); #1;
      clr++;
    end
    n_clear++;
    chk(clr == P3 - L - 1, $sformatf("ready after %0d clocks", clr));

    // 2. host write and read-back on R3
    host(1'b1, 16'd1000, mk_data(64'd7), rsp, waited);
    chk(waited <= P3, "write within one revolution");
    chk(peek(3, 33) == mk_data(64'd7) || peek(3, 34) == mk_data(64'd7), "written packet behind I/O");
    host(1'b0, 16'd1000, BUBBLE, rsp, waited);
    chk(rsp == mk_data(64'd7), "read back 7");
    chk(waited <= P3 && waited > P3 - 4, $sformatf("read-back waited %0d advances", waited));

    // 3. counted sum, 15 then 10 turns
    sum_loop(15);
    sum_loop(10);

    // 4. MUL, then move R0 -> R1 (transfer + steer clearing the source)
    while ((5 + phase[0]) % P0 != 9) tick(4'b0001, f);   // acc to register 9
    chk(peek(0, 9) == mk_data(64'd45), "acc parked at register 9");
    seed(0, 8, mk_data(64'd3));                                    // three
    seed(0, 7, mk_instr(OP_MUL, 4'd2, 4'd1, 4'd3, '0));            // res = acc*3
    seed(0, 5, mk_instr(OP_XFER, 4'd5, XFER_OUT, 4'd0, '0));     // res -> R1
    seed(0, 4, mk_instr(OP_STEER, 4'd6, 4'd0, 4'd0, 64'd7));       // clear source
    for (int t = 0; t < 15; t++) begin
      tick(4'b0001, f);
      chk(!(f[2] || f[5]), "no steer or transfer before schedule");
    end
    chk(find(0, 64'd135) >= 0, "45*3 = 135 on R0");
    tick(4'b0011, f);                         // the single shared advance
    chk(f[5], "R0 -> R1 transfer fires in the shared advance");
    n_demote++;
    chk(peek(1, 129) == mk_data(64'd135), "135 lands on R1 register 129");
    for (int t = 16; t < 22; t++) begin
      tick(4'b0001, f);
      chk(f[2] == (t == 20), "steer clears the source on schedule");
    end
    chk(live(0) == 0, "R0 empty after the move");
    // the migrated packet keeps one (ring, phase) coordinate over a full
    // orbit of R1 and is back in register 129 after it
    v = (129 - int'(phase[1]) + P1) % P1;
    for (int t = 0; t < int'(P1); t++) begin
      tick(4'b0010, f);
      if (find(1, 64'd135) != (v + int'(phase[1])) % P1) begin
        chk(1'b0, $sformatf("135 left its seat %0d at advance %0d", v, t));
        break;
      end
    end
    chk(peek(1, 129) == mk_data(64'd135) && live(1) == 1, "stable seat over one R1 orbit");

    // 5. relay on R1, demote R1 -> R2 -> R3, host read
    seed(1, 127, mk_instr(OP_XFER, 4'd2, XFER_SAME, 4'd5, '0));    // relay
    seed(1, 126, mk_instr(OP_XFER, 4'd6, XFER_OUT, 4'd0, '0));   // copy -> R2
    for (int t = 0; t < 66; t++) begin
      tick(4'b0010, f);
      if (t == 65) begin
        chk(f[7], "relay fires");
        n_relay++;
      end
    end
    chk(peek(1, 126 + 66 + 6) == mk_data(64'd135), "relay copy five ahead of the relay");
    tick(4'b0110, f);
    chk(f[7], "R1 -> R2 transfer fires");
    n_demote++;
    chk(peek(2, 9) == mk_data(64'd135), "135 lands on R2 register 9");
    run(4'b0100, 2);
    seed(2, 9, mk_instr(OP_XFER, 4'd2, XFER_OUT, 4'd0, '0));
    run(4'b0100, 23);
    tick(4'b1100, f);
    chk(f[9], "R2 -> R3 transfer fires");
    n_demote++;
    chk(peek(3, 9) == mk_data(64'd135), "135 lands on R3 register 9");
    host(1'b0, 16'((9 - phase[3]) % P3), BUBBLE, rsp, waited);
    chk(rsp == mk_data(64'd135), "host reads the result 135 from R3");

    // 6. host writes 35; promote R3 -> R2 -> R1 -> R0; 7 + 35 = 42 on R0
    host(1'b1, 16'd4242, mk_data(64'd35), rsp, waited);
    j = find(3, 64'd35);
    chk(j >= 33, "35 behind the I/O station");
    seed(3, j - 2, mk_instr(OP_XFER, 4'd2, XFER_IN, 4'd0, '0));
    run(4'b1000, (8 - (j - 2) + P3) % P3);
    tick(4'b1100, f);
    chk(f[10], "R3 -> R2 transfer fires");
    n_promote++;
    chk(peek(2, 33) == mk_data(64'd35), "35 lands on R2 register 33");
    run(4'b0100, 3);
    seed(2, 34, mk_instr(OP_XFER, 4'd2, XFER_IN, 4'd0, '0));
    run(4'b0100, (8 - 34 + P2) % P2);
    tick(4'b0110, f);
    chk(f[8], "R2 -> R1 transfer fires");
    n_promote++;
    chk(peek(1, 193) == mk_data(64'd35), "35 lands on R1 register 193");
    run(4'b0010, 3);
    seed(1, 194, mk_instr(OP_XFER, 4'd2, XFER_IN, 4'd0, '0));
    run(4'b0010, (128 - 194 + P1) % P1);
    tick(4'b0011, f);
    chk(f[6], "R1 -> R0 transfer fires");
    n_promote++;
    chk(peek(0, 5) == mk_data(64'd35), "35 lands on R0 register 5");
    seed(0, 4, mk_data(64'd7));
    seed(0, 3, mk_instr(OP_ADD, 4'd2, 4'd1, 4'd1, '0));   // 35 + 7 replaces the 7
    for (int t = 0; t < 14; t++) begin
      tick(4'b0001, f);
      chk(f[0] == (t == 13), "ADD fires when it reaches the ALU");
    end
    v = find(0, 64'd42);
    chk(v >= 0 && peek(0, (v + 1) % P0) == mk_data(64'd35), "7+35 = 42 replaced the named packet");
    chk(find(0, 64'd7) < 0, "the 7 is gone");

    // mechanism coverage
    chk(n_alu > 0, "collision execution (ALU)");
    chk(n_mul > 0, "multiplier");
    chk(n_kill > 0, "steer kill");
    chk(n_sum_loop > 0, "loop as revolution");
    chk(n_relay > 0, "same-ring relay");
    chk(n_demote > 0, "demotion");
    chk(n_promote > 0, "promotion");
    chk(n_hold > 0, "ring hold");
    chk(n_io_wr > 0 && n_io_rd > 0, "host I/O");
    chk(n_clear > 0, "SRAM clearing sweep");
    chk(n_clash == 0, "no transfer clash");
    $display("mechanisms: alu=%0d mul=%0d kill=%0d loops=%0d relay=%0d demote=%0d promote=%0d hold=%0d io_wr=%0d io_rd=%0d",
             n_alu, n_mul, n_kill, n_sum_loop, n_relay, n_demote, n_promote, n_hold, n_io_wr, n_io_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
