// madar_alu_station: the integer ALU station (ADD, SUB, CMPLT).
//
// A station has no queue and no scheduler. On a clock where its ring
// advances (`en`), it looks at the packet passing it (window offset 0). If
// that is an ADD, SUB or CMPLT instruction, it takes operand A from offset
// src_a and operand B from offset src_b, both of which must lie in the
// operand window 1..W and hold DATA packets, and asks the ring to replace the
// packet at offset dst with a DATA packet holding the result. The ring clocks
// that write in on the same edge as the shift (pre-shift naming), so the
// result is visible on the next cycle. Purely combinational; latency is the
// one edge of the ring.
//
// Operands named outside the window, or naming a bubble or an instruction,
// make the instruction a no-op (the architecture does not say; this is this
// design's choice). CMPLT compares as signed 64-bit numbers and yields 1 or 0
// (the signedness is also this design's choice). `fired` pulses when the
// instruction executes.
module madar_alu_station
  import madar_pkg::*;
(
  input  logic    en,
  input  win_t    win,
  output stn_wr_t wr,
  output logic    fired
);

  pkt_t ins, a, b;
  logic is_alu;
  logic [DATA_W-1:0] res;

  always_comb begin
    ins    = win[0];
    a      = win[ins.src_a];
    b      = win[ins.src_b];
    is_alu = ins.kind == K_INSTR &&
             (ins.op == OP_ADD || ins.op == OP_SUB || ins.op == OP_CMPLT);
    fired  = en && is_alu && in_window(ins.src_a) && in_window(ins.src_b) &&
             a.kind == K_DATA && b.kind == K_DATA;
    unique case (ins.op)
      OP_SUB:   res = a.payload - b.payload;
      OP_CMPLT: res = DATA_W'($signed(a.payload) < $signed(b.payload));
      default:  res = a.payload + b.payload;
    endcase
    wr     = NO_WR;
    wr.we  = fired;
    wr.off = ins.dst;
    wr.pkt = mk_data(res);
  end

endmodule
