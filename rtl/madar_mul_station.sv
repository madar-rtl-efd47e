// madar_mul_station: the multiplier station (MUL and MAC).
//
// Works like the ALU station: on an advancing clock it executes the
// instruction passing it (offset 0) if that is a MUL or a MAC, reading
// operands A and B from the window offsets src_a and src_b (1..W, DATA
// packets). MUL replaces the packet at offset dst with the low 64 bits of
// A*B. MAC also reads the packet at offset dst, which must be DATA, and
// replaces it with dst + A*B, so an accumulator can stay resident in its slot
// while one multiply-accumulate fires per revolution.
//
// The architecture names a multiplier station and a multiply-accumulate
// station but gives them no opcode or operand rule; the two opcodes and the
// rule that MAC's accumulator is the dst packet are this design's choice.
// Combinational; the result is clocked into the ring on the firing edge.
module madar_mul_station
  import madar_pkg::*;
(
  input  logic    en,
  input  win_t    win,
  output stn_wr_t wr,
  output logic    fired
);

  pkt_t ins, a, b, d;
  logic is_mul, ok;
  logic [DATA_W-1:0] prod;

  always_comb begin
    ins    = win[0];
    a      = win[ins.src_a];
    b      = win[ins.src_b];
    d      = win[ins.dst];
    is_mul = ins.kind == K_INSTR && (ins.op == OP_MUL || ins.op == OP_MAC);
    ok     = in_window(ins.src_a) && in_window(ins.src_b) &&
             a.kind == K_DATA && b.kind == K_DATA &&
             (ins.op != OP_MAC || d.kind == K_DATA);
    fired  = en && is_mul && ok;
    prod   = a.payload * b.payload;
    wr     = NO_WR;
    wr.we  = fired;
    wr.off = ins.dst;
    wr.pkt = mk_data(ins.op == OP_MAC ? d.payload + prod : prod);
  end

endmodule
