// tb_madar_steer_station: self-checking test of the steer station.
//
// A true predicate must bubble exactly offsets dst..dst+count-1 (clipped to
// the station reach); a false predicate, a non-data predicate, a predicate
// outside the window, a held ring or a non-STEER instruction must leave
// everything alone. Expected masks are built here bit by bit.
module tb_madar_steer_station;
  import madar_pkg::*;

  logic    en;
  win_t    win;
  stn_wr_t wr;
  logic    fired;
  int checks = 0, failures = 0;

  madar_steer_station dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_kill(logic [REACH-1:0] m, string what, logic f = (m != '0));
    #1;
    checks++;
    if (wr.kill !== m || wr.we !== 1'b0 || fired !== f) begin
      failures++;
      $display("%s: kill=%b expected %b fired=%b", what, wr.kill, m, fired);
    end
  endtask

  initial begin
    win    = '{default: BUBBLE};
    en     = 1'b1;
    // Loop exit from the counted-sum example: kill offsets 0..14.
    win[0] = mk_instr(OP_STEER, 4'd1, 4'd0, 4'd0, 64'd15);
    win[1] = mk_data(64'd1);
    expect_kill(16'h7fff, "kill 0..14");
    win[1] = mk_data(64'd0);
    expect_kill('0, "false predicate");
    win[1] = mk_instr(OP_ADD, 4'd1, 4'd1, 4'd1, 64'd1);
    expect_kill('0, "predicate is code");
    win[1] = mk_data(64'd1);
    en = 1'b0;
    expect_kill('0, "held ring");
    en = 1'b1;
    win[0] = mk_instr(OP_XFER, 4'd1, 4'd0, 4'd0, 64'd15);
    expect_kill('0, "not a steer");
    win[0] = mk_instr(OP_STEER, 4'd9, 4'd0, 4'd0, 64'd15);
    expect_kill('0, "predicate outside window");
    win[0] = mk_instr(OP_STEER, 4'd1, 4'd0, 4'd12, 64'd1000);
    expect_kill(16'hf000, "clipped run");
    for (int unsigned n = 0; n < 2000; n++) begin
      logic [3:0] s, d;
      logic [63:0] cnt;
      logic [REACH-1:0] m;
      logic pt;
      s   = 4'(1 + $urandom % W);
      d   = 4'($urandom);
      cnt = ($urandom % 8 == 0) ? {$urandom, $urandom} : 64'($urandom % 20);
      for (int unsigned k = 1; k < REACH; k++) win[k] = mk_data(64'($urandom % 2));
      win[0] = mk_instr(OP_STEER, s, 4'($urandom), d, cnt);
      m = '0;
      pt = win[s].payload != 0;
      if (pt)
        for (int unsigned k = 0; k < REACH; k++)
          if (k >= d && 64'(k - d) < cnt) m[k] = 1'b1;
      expect_kill(m, "random", pt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
