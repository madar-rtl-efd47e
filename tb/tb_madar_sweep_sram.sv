// tb_madar_sweep_sram: self-checking test of the swept SRAM bank.
//
// Checks the clearing sweep after reset (ready low for DEPTH clocks, then
// every word reads back as zero) and that, under random enables, the word
// clocked out on an enabled edge is the one written DEPTH enabled edges
// earlier. The reference is a list of everything written.
module tb_madar_sweep_sram;
  localparam int unsigned DEPTH = 37;
  localparam int unsigned WIDTH = 81;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [WIDTH-1:0] din = '0, dout;
  logic [5:0] ptr;
  logic ready;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] hist [$];
  int unsigned clr_cycles = 0;

  madar_sweep_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    while (!ready) begin
      @(posedge clk); #1;
      clr_cycles++;
    end
    checks++;
    if (clr_cycles != DEPTH) begin
      failures++;
      $display("clear took %0d clocks, expected %0d", clr_cycles, DEPTH);
    end
    for (int unsigned i = 0; i < DEPTH; i++) hist.push_back('0);
    for (int unsigned c = 0; c < 5000; c++) begin
      @(negedge clk);
      en  = ($urandom % 3) != 0;
      din = {17'($urandom), $urandom, $urandom};
      @(posedge clk); #1;
      if (en) begin
        logic [WIDTH-1:0] exp;
        hist.push_back(din);
        exp = hist.pop_front();
        checks++;
        if (dout !== exp) begin
          failures++;
          if (failures < 10) $display("cycle %0d: dout %h exp %h", c, dout, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
