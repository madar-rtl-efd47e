// tb_madar_xfer_station: self-checking test of the transfer station.
//
// Drives both ring windows directly and checks: a cross copy from ring A
// lands on ring B at the instruction's dst and vice versa (promotion and
// demotion), a same-ring copy relay stays on its ring, code packets can be
// copied, nothing fires on a held ring, a bubble source, a bad selector or
// a cross copy pointing away from this station (XFER_IN on the shorter
// ring, XFER_OUT on the longer one),
// and when a same-ring relay and an incoming cross copy meet on one ring the
// ring's own instruction wins and `clash` is raised.
module tb_madar_xfer_station;
  import madar_pkg::*;

  logic    en_a, en_b, fired_a, fired_b, clash;
  win_t    win_a, win_b;
  stn_wr_t wr_a, wr_b;
  int checks = 0, failures = 0;

  madar_xfer_station dut (.*);

  initial begin
    #100000;
    failures++;
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

  initial begin
    pkt_t v, code;
    v    = mk_data(64'd1234);
    code = mk_instr(OP_ADD, 4'd3, 4'd2, 4'd3, '0);
    win_a = '{default: BUBBLE};
    win_b = '{default: BUBBLE};
    en_a = 1'b1; en_b = 1'b1;
    // Demotion: A -> B.
    win_a[0] = mk_instr(OP_XFER, 4'd2, XFER_OUT, 4'd5, '0);
    win_a[2] = v;
    #1;
    chk(fired_a && !fired_b, "A fires");
    chk(wr_b.we && wr_b.off == 4'd5 && wr_b.pkt == v && !wr_a.we, "A->B copy");
    chk(!clash, "no clash");
    // Held ring A: nothing.
    en_a = 1'b0; #1;
    chk(!fired_a && !wr_b.we, "held A");
    en_a = 1'b1;
    // Same-ring relay on A.
    win_a[0] = mk_instr(OP_XFER, 4'd2, XFER_SAME, 4'd9, '0);
    #1;
    chk(wr_a.we && wr_a.off == 4'd9 && wr_a.pkt == v && !wr_b.we, "A relay");
    // Bad selector, bubble source.
    win_a[0] = mk_instr(OP_XFER, 4'd2, 4'd7, 4'd9, '0);
    #1;
    chk(!fired_a && !wr_a.we && !wr_b.we, "bad selector");
    win_a[0] = mk_instr(OP_XFER, 4'd3, XFER_OUT, 4'd9, '0);
    #1;
    chk(!fired_a && !wr_b.we, "bubble source");
    // An inward copy on the shorter ring belongs to the station on its other
    // side, an outward one on the longer ring likewise.
    win_a[0] = mk_instr(OP_XFER, 4'd2, XFER_IN, 4'd9, '0);
    #1;
    chk(!fired_a && !wr_a.we && !wr_b.we, "A ignores XFER_IN");
    win_a[0] = BUBBLE;
    win_b[0] = mk_instr(OP_XFER, 4'd2, XFER_OUT, 4'd9, '0);
    win_b[2] = v;
    #1;
    chk(!fired_b && !wr_a.we && !wr_b.we, "B ignores XFER_OUT");
    win_b[2] = BUBBLE;
    // Promotion of code: B -> A.
    win_a[0] = BUBBLE;
    win_b[0] = mk_instr(OP_XFER, 4'd8, XFER_IN, 4'd1, '0);
    win_b[8] = code;
    #1;
    chk(fired_b && wr_a.we && wr_a.off == 4'd1 && wr_a.pkt == code && !wr_b.we, "B->A code copy");
    // Clash: A relays on A while B copies onto A.
    win_a[0] = mk_instr(OP_XFER, 4'd2, XFER_SAME, 4'd4, '0);
    #1;
    chk(clash && wr_a.we && wr_a.off == 4'd4 && wr_a.pkt == v, "own-ring relay wins");
    // Both cross at once: no clash, two copies.
    win_a[0] = mk_instr(OP_XFER, 4'd2, XFER_OUT, 4'd6, '0);
    #1;
    chk(!clash && wr_a.pkt == code && wr_a.off == 4'd1 && wr_b.pkt == v && wr_b.off == 4'd6,
        "swap");
    // Random cross copies both ways.
    for (int unsigned n = 0; n < 1000; n++) begin
      logic [3:0] sa, da;
      sa = 4'(1 + $urandom % W);
      da = 4'($urandom);
      for (int unsigned k = 1; k < REACH; k++) win_a[k] = mk_data({$urandom, $urandom});
      win_a[0] = mk_instr(OP_XFER, sa, XFER_OUT, da, '0);
      win_b[0] = BUBBLE;
      en_a = $urandom % 2;
      #1;
      chk(wr_b.we == en_a && (!en_a || (wr_b.off == da && wr_b.pkt == win_a[sa])), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
