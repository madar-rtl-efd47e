// tb_madar_accum: a long add-only dependence chain with copy relays, on the
// 256-slot ring R1 of the full machine.
//
// The kernel is acc_g = acc_(g+1) + c for g = D-1 .. 0, starting from
// acc_D = v0: a chain of D dependent ADDs that all read one constant c. The
// constant is seated once, above the chain, and is out of the 8-slot operand
// window for all but the first step, so every step gets its own copy of it,
// made by a same-ring XFER (a copy relay) one group above.
//
// Seating, as register indices of R1 at the start (ring held):
//   4g+0: XFER a=+7 same-ring d=+3   copies c_(g+1) into c_g
//   4g+1: ADD  a=+5 b=+2 d=+1        acc_g = acc_(g+1) + c_g
//   4g+2: acc_g  (DATA 0)
//   4g+3: c_g    (bubble until its relay fills it)
//   4D+2: acc_D = v0,  4D+3: c_D = c
// The relays execute at the transfer stations (slots 128 and 192 of R1, each
// a harmless repeat of the other), so the whole copy chain has run before
// the first ADD reaches the ALU at slot 0. The ADD of group g must fire on
// advance 255-4g, and after one revolution acc_g = v0 + (D-g)*c. A second
// revolution recomputes the same values (the loop is at a fixed point).
// Two depths are run: D = 12 (the 12-step accumulation) and D = 24 (a
// chain too long for a 64-slot ring, which therefore lands on R1).
module tb_madar_accum;
  import madar_pkg::*;

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

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic seed(int unsigned idx, pkt_t p);
    adv = '0; seed_we = 1'b1; seed_ring = 2'd1; seed_idx = 16'(idx); seed_pkt = p;
    @(posedge clk); #1;
    seed_we = 1'b0;
  endtask

  // One revolution of R1 alone; checks the firing cycles of the chain.
  task automatic revolve(int unsigned d, output int unsigned adds, output int unsigned relays);
    adds = 0; relays = 0;
    for (int unsigned t = 0; t < 256; t++) begin
      adv = 4'b0010;
      #1;
      if (fired[3]) begin
        adds++;
        chk(t >= 255 - 4 * (d - 1) && (255 - t) % 4 == 0,
            $sformatf("ADD fired at advance %0d", t));
      end
      if (fired[6]) relays++;
      if (fired[7]) relays++;
      chk(!fired[0] && !fired[1] && !fired[4], "no other station fires");
      chk(!xfer_clash, "no transfer clash");
      @(posedge clk); #1;
    end
    adv = '0;
  endtask

  task automatic run_chain(int unsigned d);
    logic [63:0] v0, c;
    int unsigned adds, relays;
    v0 = 64'($urandom % 1000);
    c = 64'($urandom % 1000) + 64'd1;
    for (int unsigned k = 0; k < 256; k++) seed(k, BUBBLE);
    for (int unsigned g = 0; g < d; g++) begin
      seed(4 * g + 0, mk_instr(OP_XFER, 4'd7, XFER_SAME, 4'd3, '0));
      seed(4 * g + 1, mk_instr(OP_ADD, 4'd5, 4'd2, 4'd1, '0));
      seed(4 * g + 2, mk_data(64'd0));
    end
    seed(4 * d + 2, mk_data(v0));
    seed(4 * d + 3, mk_data(c));
    for (int rev = 0; rev < 2; rev++) begin
      revolve(d, adds, relays);
      chk(adds == d, $sformatf("D=%0d rev %0d: %0d ADDs", d, rev, adds));
      chk(relays == 2 * d, $sformatf("D=%0d rev %0d: %0d relay copies", d, rev, relays));
      for (int unsigned g = 0; g < d; g++) begin
        chk(dut.u_r1.slot[4 * g + 2] == mk_data(v0 + 64'(d - g) * c),
            $sformatf("D=%0d rev %0d: acc_%0d = %0d, expected %0d", d, rev, g,
                      dut.u_r1.slot[4 * g + 2].payload, v0 + 64'(d - g) * c));
        chk(dut.u_r1.slot[4 * g + 3] == mk_data(c),
            $sformatf("D=%0d rev %0d: relayed copy c_%0d", d, rev, g));
      end
    end
    $display("chain of %0d: acc_0 = %0d (v0=%0d, c=%0d)", d,
             dut.u_r1.slot[2].payload, v0, c);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    wait (ready);
    @(negedge clk);
    run_chain(12);
    run_chain(24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
