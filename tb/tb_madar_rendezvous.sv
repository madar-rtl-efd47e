// tb_madar_rendezvous: self-checking test of the rendezvous / I/O station.
//
// The station sits at slot 20 of a 64-slot register ring that advances
// every clock except for random holds. The host writes packets to random
// seats and reads them back, and reads seats seeded before the run. Each
// response must carry the packet whose seat was asked for, the written
// packet must sit at slot (seat + phase) mod P afterwards, and the wait must
// be at most one revolution (P advances). The expected contents are tracked
// here as an array indexed by seat.
module tb_madar_rendezvous;
  import madar_pkg::*;

  localparam int unsigned P = 64;
  localparam int unsigned POS = 20;
  localparam pos_t POSL = '{0: POS, default: 0};

  logic clk = 1'b0, rst_n = 1'b0, adv = 1'b0;
  logic [5:0] phase;
  win_t    win [1];
  stn_wr_t wr  [1];
  logic seed_we = 1'b0;
  logic [5:0] seed_idx = '0;
  pkt_t seed_pkt = BUBBLE;

  logic req_valid = 1'b0, req_ready, req_write = 1'b0, rsp_valid;
  logic [5:0] req_seat = '0;
  pkt_t req_pkt = BUBBLE, rsp_pkt;

  int checks = 0, failures = 0;
  pkt_t by_seat [P];

  madar_shift_ring #(.P(P), .NPORT(1), .POS(POSL)) u_ring (
    .clk, .rst_n, .adv, .phase, .win, .wr, .seed_we, .seed_idx, .seed_pkt);
  madar_rendezvous #(.P(P), .POS(POS)) dut (
    .clk, .rst_n, .adv, .phase, .win(win[0]), .wr(wr[0]), .req_valid, .req_ready,
    .req_write, .req_seat, .req_pkt, .rsp_valid, .rsp_pkt);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random holds while the station waits.
  always @(negedge clk) if (rst_n && !seed_we) adv <= ($urandom % 5) != 0;

  task automatic access(logic wrt, logic [5:0] seat, pkt_t p);
    int unsigned advs = 0;
    @(negedge clk);
    req_valid = 1'b1; req_write = wrt; req_seat = seat; req_pkt = p;
    @(posedge clk); #1;
    checks++;
    if (!req_ready) ; // accepted on that edge
    req_valid = 1'b0;
    while (!rsp_valid) begin
      @(posedge clk);
      if (adv) advs++;
      #1;
    end
    checks++;
    if (advs > P) begin failures++; $display("waited %0d advances", advs); end
    if (wrt) begin
      by_seat[seat] = p;
      checks++;
      if (u_ring.slot[(seat + phase) % P] !== p) begin
        failures++; $display("write to seat %0d not found", seat);
      end
    end else begin
      checks++;
      if (rsp_pkt !== by_seat[seat]) begin
        failures++; $display("read seat %0d got %h exp %h", seat, rsp_pkt, by_seat[seat]);
      end
    end
  endtask

  initial begin
    for (int unsigned i = 0; i < P; i++) by_seat[i] = BUBBLE;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    seed_we = 1'b1;
    for (int unsigned i = 0; i < P; i += 3) begin
      @(negedge clk);
      seed_idx = 6'(i);
      seed_pkt = mk_data(64'(1000 + i));
      by_seat[i] = seed_pkt;   // phase is 0 while seeding
    end
    @(negedge clk);
    seed_we = 1'b0;
    for (int unsigned i = 0; i < P; i += 3) access(1'b0, 6'(i), BUBBLE);
    for (int unsigned n = 0; n < 300; n++) begin
      if ($urandom % 2) access(1'b1, 6'($urandom), mk_data({$urandom, $urandom}));
      else              access(1'b0, 6'($urandom), BUBBLE);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
