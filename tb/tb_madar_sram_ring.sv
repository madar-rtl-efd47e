// tb_madar_sram_ring: self-checking test of the register ring.
//
// Seeds a 16-slot ring window slots with distinct packets, then checks that after exactly
// P advances every packet is back at its seat with nothing lost or
// duplicated, that a held ring keeps its contents, and that random station
// writes and kills (two stations) land where the pre-shift rule says: an
// offset-k request on an advancing edge replaces the packet that was at
// offset k, which is now at offset k+1. The reference is a plain array
// rotated by the testbench.
module tb_madar_sram_ring;
  import madar_pkg::*;

  localparam int unsigned P = 128;
  localparam int unsigned L = 32;
  localparam int unsigned NP = 2;
  localparam pos_t POSL = '{0: 4, 1: 12, default: 0};

  logic clk = 1'b0, rst_n = 1'b0, adv = 1'b0;
  logic [6:0] phase;
  logic ready;
  win_t    win [NP];
  stn_wr_t wr  [NP];
  logic seed_we = 1'b0;
  logic [6:0] seed_idx = '0;
  pkt_t seed_pkt = BUBBLE;

  int checks = 0, failures = 0;
  pkt_t model [P];
  int unsigned mphase = 0;

  madar_sram_ring #(.P(P), .L(L), .NPORT(NP), .POS(POSL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int unsigned p = 0; p < NP; p++)
      for (int unsigned k = 0; k < REACH; k++) begin
        checks++;
        if (win[p][k] !== model[(POSL[p] + k) % P]) begin
          failures++;
          if (failures < 10) $display("%s: port %0d offset %0d got %h exp %h", what, p, k,
                                      win[p][k], model[(POSL[p] + k) % P]);
        end
      end
    checks++;
    if (phase != 7'(mphase)) begin failures++; $display("%s: phase %0d exp %0d", what, phase, mphase); end
  endtask

  // Apply one clock (called between edges) with the given requests and mirror it in the model.
  task automatic step(logic a);
    pkt_t nm [P];
    adv = a;
    #1;
    for (int unsigned i = 0; i < P; i++) nm[i] = a ? model[(i + P - 1) % P] : model[i];
    for (int unsigned p = 0; p < NP; p++)
      for (int unsigned k = 0; k < REACH; k++) begin
        int unsigned t = (POSL[p] + k + (a ? 1 : 0)) % P;
        if (wr[p].kill[k]) nm[t] = BUBBLE;
        if (wr[p].we && wr[p].off == 4'(k)) nm[t] = wr[p].pkt;
      end
    @(posedge clk);
    #1;
    model = nm;
    if (a) mphase = (mphase + 1) % P;
  endtask

  initial begin
    wr = '{default: NO_WR};
    for (int unsigned i = 0; i < P; i++) model[i] = BUBBLE;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    checks++;
    if (ready) failures++;          // bank must be clearing
    wait (ready);
    @(negedge clk);
    // Seed slots 1..11 with distinct data and code packets.
    for (int unsigned i = 1; i < 12; i++) begin
      @(negedge clk);
      seed_we  = 1'b1;
      seed_idx = 7'(i);
      seed_pkt = (i % 2) ? mk_data(64'(100 + i)) : mk_instr(OP_ADD, 4'(i % 8 + 1), 4'd1, 4'(i), 64'(i));
      model[i] = seed_pkt;
    end
    @(negedge clk);
    seed_we = 1'b0;
    @(posedge clk); #1;
    compare("seeded");
    // One full revolution, every slot passing the stations: identity.
    begin
      pkt_t seeded [P];
      seeded = model;
      for (int unsigned c = 0; c < P; c++) begin
        step(1'b1);
        compare("revolution");
      end
      for (int unsigned i = 0; i < P; i++) begin
        checks++;
        if (model[i] !== seeded[i]) failures++;
      end
    end
    // Held ring keeps its contents.
    for (int unsigned c = 0; c < 7; c++) step(1'b0);
    compare("held");
    // Directed pre-shift write: offset 3 on port 0, advancing edge.
    begin
      pkt_t named, newp;
      named = model[4 + 15];
      newp  = mk_data(64'h42);
      wr[0] = '{we: 1'b1, off: 4'd15, pkt: newp, kill: '0};
      step(1'b1);
      wr[0] = NO_WR;
      checks++;
      if (win[1][8] !== newp) begin failures++; $display("pre-shift write misplaced"); end
      checks++;
      if (named == newp) failures++;
    end
    // Random traffic on both stations.
    for (int unsigned c = 0; c < 6000; c++) begin
      for (int unsigned p = 0; p < NP; p++) begin
        wr[p].we   = ($urandom % 3) == 0;
        wr[p].off  = 4'($urandom);
        wr[p].pkt  = mk_data({$urandom, $urandom});
        wr[p].kill = ($urandom % 5 == 0) ? 16'($urandom) : '0;
      end
      step(($urandom % 4) != 0);
      compare("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
