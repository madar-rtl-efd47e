// tb_madar_alu_station: self-checking test of the ALU station.
//
// Builds operand windows directly: the 7+35 = 42 collision of the
// architecture's directed test, random ADD/SUB/CMPLT instructions checked
// against arithmetic done here, and the cases that must not fire (station
// not advancing, operand outside the window 1..W, operand not DATA, an
// instruction of another class, a data packet passing).
module tb_madar_alu_station;
  import madar_pkg::*;

  logic    en;
  win_t    win;
  stn_wr_t wr;
  logic    fired;
  int checks = 0, failures = 0;

  madar_alu_station dut (.*);

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
      $display("%s: fired=%b we=%b expected %b", what, fired, wr.we, f);
    end
    if (f) begin
      checks++;
      if (wr.off !== off || wr.pkt !== mk_data(v) || wr.kill !== '0) begin
        failures++;
        $display("%s: off=%0d pkt=%h expected off=%0d value %0d", what, wr.off, wr.pkt, off, v);
      end
    end
  endtask

  initial begin
    // 7 + 35 = 42, result replaces the packet at offset 3.
    win    = '{default: BUBBLE};
    en     = 1'b1;
    win[0] = mk_instr(OP_ADD, 4'd1, 4'd2, 4'd3, '0);
    win[1] = mk_data(64'd7);
    win[2] = mk_data(64'd35);
    win[3] = mk_data(64'd0);
    expect_fire(1'b1, 4'd3, 64'd42, "7+35");
    en = 1'b0;
    expect_fire(1'b0, 4'd3, 64'd42, "held ring");
    en = 1'b1;
    win[0] = mk_instr(OP_ADD, 4'd9, 4'd2, 4'd3, '0);
    expect_fire(1'b0, 0, 0, "src_a outside window");
    win[0] = mk_instr(OP_ADD, 4'd0, 4'd2, 4'd3, '0);
    expect_fire(1'b0, 0, 0, "src_a offset 0");
    win[0] = mk_instr(OP_ADD, 4'd1, 4'd4, 4'd3, '0);
    expect_fire(1'b0, 0, 0, "operand is a bubble");
    win[0] = mk_instr(OP_MUL, 4'd1, 4'd2, 4'd3, '0);
    expect_fire(1'b0, 0, 0, "MUL is not an ALU op");
    win[0] = mk_data(64'd5);
    expect_fire(1'b0, 0, 0, "data passing");
    // Random instructions.
    for (int unsigned n = 0; n < 3000; n++) begin
      logic [3:0] a, b, d;
      logic [63:0] va, vb, exp;
      op_e op;
      a  = 4'(1 + $urandom % W);
      b  = 4'(1 + $urandom % W);
      d  = 4'($urandom);
      for (int unsigned k = 1; k < REACH; k++) win[k] = mk_data({$urandom, $urandom});
      if ($urandom % 4 == 0) win[b] = win[a];
      va = win[a].payload;
      vb = win[b].payload;
      case ($urandom % 3)
        0: begin op = OP_ADD;   exp = va + vb; end
        1: begin op = OP_SUB;   exp = va - vb; end
        default: begin op = OP_CMPLT; exp = ($signed(va) < $signed(vb)) ? 64'd1 : 64'd0; end
      endcase
      win[0] = mk_instr(op, a, b, d, {$urandom, $urandom});
      expect_fire(1'b1, d, exp, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
