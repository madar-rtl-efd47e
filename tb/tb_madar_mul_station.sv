// tb_madar_mul_station: self-checking test of the multiplier station.
//
// Checks MUL (dst := A*B) and MAC (dst := dst + A*B) on random operands
// against products computed here, and that nothing fires for an ALU opcode,
// a held ring, an operand outside the window, or a MAC whose accumulator
// slot holds no data.
module tb_madar_mul_station;
  import madar_pkg::*;

  logic    en;
  win_t    win;
  stn_wr_t wr;
  logic    fired;
  int checks = 0, failures = 0;

  madar_mul_station dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_fire(logic f, logic [3:0] off, logic [63:0] v, string what);
    #1;
    checks++;
    if (fired !== f || wr.we !== f) begin
      failures++;
      $display("%s: fired=%b expected %b", what, fired, f);
    end
    if (f) begin
      checks++;
      if (wr.off !== off || wr.pkt !== mk_data(v)) begin
        failures++;
        $display("%s: off=%0d value=%0d expected off=%0d value %0d", what, wr.off,
                 wr.pkt.payload, off, v);
      end
    end
  endtask

  initial begin
    win    = '{default: BUBBLE};
    en     = 1'b1;
    win[0] = mk_instr(OP_MUL, 4'd1, 4'd2, 4'd3, '0);
    win[1] = mk_data(64'd6);
    win[2] = mk_data(64'd7);
    expect_fire(1'b1, 4'd3, 64'd42, "6*7");
    win[0] = mk_instr(OP_MAC, 4'd1, 4'd2, 4'd3, '0);
    expect_fire(1'b0, 0, 0, "MAC onto a bubble");
    win[3] = mk_data(64'd100);
    expect_fire(1'b1, 4'd3, 64'd142, "100+6*7");
    en = 1'b0;
    expect_fire(1'b0, 0, 0, "held ring");
    en = 1'b1;
    win[0] = mk_instr(OP_ADD, 4'd1, 4'd2, 4'd3, '0);
    expect_fire(1'b0, 0, 0, "ADD is not a multiplier op");
    win[0] = mk_instr(OP_MUL, 4'd1, 4'd12, 4'd3, '0);
    expect_fire(1'b0, 0, 0, "src_b outside window");
    for (int unsigned n = 0; n < 3000; n++) begin
      logic [3:0] a, b, d;
      logic [63:0] exp;
      a = 4'(1 + $urandom % W);
      b = 4'(1 + $urandom % W);
      d = 4'($urandom);
      for (int unsigned k = 1; k < REACH; k++) win[k] = mk_data({$urandom, $urandom});
      if ($urandom % 2) begin
        win[0] = mk_instr(OP_MUL, a, b, d, '0);
        exp = win[a].payload * win[b].payload;
      end else begin
        win[0] = mk_instr(OP_MAC, a, b, d, '0);
        exp = (d == 0) ? '0 : win[d].payload + win[a].payload * win[b].payload;
      end
      // A MAC whose accumulator is the instruction itself (dst = 0) is not data.
      expect_fire(!(win[0].op == OP_MAC && d == 0), d, exp, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
