// tb_madar_stream: the streaming inner product on the full machine.
//
// Weights w_i and activations x_i are parked on R1 (256 slots), one pair
// every 16 slots, each value with its own XFER instruction. R0 (16 slots)
// holds only a MAC instruction and the accumulator. Both rings advance every
// clock, so one pair passes the R0/R1 transfer station per R0 revolution;
// the two XFERs drop w_i and x_i onto R0 right in front of the MAC, which
// fires once per revolution at the multiplier station and adds w_i*x_i into
// the resident accumulator. The compute ring does not grow with N.
//
// Seating (ring coordinates at phase 0):
//   R1: XFER(w) at 126-16i (src +2), XFER(x) at 125-16i (src +4),
//       w_i at 128-16i, x_i at 129-16i
//   R0: MAC at 0 (a=+2 -> w, b=+1 -> x, dst=+3 -> acc), acc at 3
// Pair i lands on R0 at advances 2+16i and 3+16i, and the MAC using it fires
// at advance 12+16i. The test checks the accumulator against the dot product
// computed here after each MAC, that exactly one MAC fires per revolution,
// and that the inward XFERs leave the next longer ring R2 untouched.
module tb_madar_stream;
  import madar_pkg::*;

  localparam int unsigned N = 16;    // pairs that fit R1 at this spacing

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
    repeat (200000) @(posedge clk);
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

  task automatic seed(int r, int unsigned idx, pkt_t p);
    adv = '0; seed_we = 1'b1; seed_ring = 2'(r); seed_idx = 16'(idx); seed_pkt = p;
    @(posedge clk); #1;
    seed_we = 1'b0;
  endtask

  initial begin
    logic [63:0] w [N], x [N];
    logic [63:0] dot;
    int unsigned macs, xfers, pi;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    wait (ready);
    @(negedge clk);
    for (int unsigned i = 0; i < N; i++) begin
      w[i] = 64'($urandom % 256) - 64'd100;   // signed small weights
      x[i] = 64'($urandom % 256);
      seed(1, 126 - 16 * i, mk_instr(OP_XFER, 4'd2, XFER_IN, 4'd0, '0));
      seed(1, 125 - 16 * i, mk_instr(OP_XFER, 4'd4, XFER_IN, 4'd0, '0));
      seed(1, 128 - 16 * i, mk_data(w[i]));
      seed(1, 129 - 16 * i, mk_data(x[i]));
    end
    seed(0, 0, mk_instr(OP_MAC, 4'd2, 4'd1, 4'd3, '0));
    seed(0, 3, mk_data(64'd0));
    dot = 0; macs = 0; xfers = 0;
    for (int unsigned t = 0; t < 16 * N; t++) begin
      adv = 4'b0011;
      #1;
      if (fired[6]) xfers++;
      if (fired[1]) begin
        macs++;
        chk(t % 16 == 12, $sformatf("MAC at advance %0d, expected 12 mod 16", t));
      end
      @(posedge clk); #1;
      if (t % 16 == 12) begin
        pi = t / 16;
        dot += w[pi] * x[pi];
        chk(dut.u_r0.slot[(3 + t + 1) % 16] == mk_data(dot),
            $sformatf("acc after pair %0d = %0d, expected %0d", pi,
                      dut.u_r0.slot[(3 + t + 1) % 16].payload, dot));
      end
    end
    chk(macs == N, $sformatf("%0d MACs in %0d revolutions", macs, N));
    chk(xfers == 2 * N, $sformatf("%0d transfers, expected %0d", xfers, 2 * N));
    chk(!xfer_clash, "no clash");
    // inward copies execute only at the R0/R1 station: nothing reaches R2
    for (int unsigned k = 0; k < 64; k++)
      chk(dut.u_r2.r[k] == BUBBLE, $sformatf("R2 register %0d untouched", k));
    $display("inner product of %0d pairs = %0d", N, $signed(dot));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
