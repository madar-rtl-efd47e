// madar_sweep_sram: one single-port SRAM bank swept by a rotating pointer.
//
// This is the storage of a long ring. Nothing outside presents an address:
// an internal pointer walks the words in order, and on every enabled clock
// the bank reads the word under the pointer into the output register `dout`
// and writes `din` into the same word (read before write), then moves the
// pointer on. A word written now therefore comes back out DEPTH enables
// later, so the bank plus its output register is a delay of DEPTH+1
// advances. One read and one write of the same word per advance is the
// access pattern the architecture assumes for its SRAM rings; modelling it
// as a single read-modify-write port is this design's choice.
//
// After reset the bank runs one clearing sweep of DEPTH clocks, writing
// zeros (a bubble packet is all zeros) regardless of `en`; `ready` is low
// until it ends and `en` must stay low meanwhile. `ptr` is brought out so
// the enclosing ring can map its slot numbers onto words.
module madar_sweep_sram #(
  parameter int unsigned DEPTH = 4030,
  parameter int unsigned WIDTH = 81,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout,
  output logic [AW-1:0]    ptr,
  output logic             ready
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic             clearing;

  assign ready = !clearing;

  always_ff @(posedge clk) begin
    if (clearing) mem[ptr] <= '0;
    else if (en)  mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr      <= '0;
      dout     <= '0;
      clearing <= 1'b1;
    end else begin
      if (clearing || en) ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
      if (clearing && ptr == AW'(DEPTH - 1)) clearing <= 1'b0;
      if (en && !clearing) dout <= mem[ptr];
    end
  end

  a_no_en_while_clearing: assert property (@(posedge clk) disable iff (!rst_n) clearing |-> !en);

endmodule
