// madar_rendezvous: reach a packet whose place is known only at run time.
//
// The station holds one requested ring coordinate (the packet's seat: the
// slot it occupies when the ring's phase counter reads 0) and compares it,
// through one subtraction done at request time and one comparator, with the
// ring's free-running phase counter. A packet with seat q passes the station
// at position POS when phase == (POS - q) mod P. On that advancing clock the
// station either captures the passing packet (read) or overwrites it (write,
// in pre-shift coordinates, so the new packet keeps seat q). The wait is
// at most one revolution, half of one on average. There is no associative
// search and no address decoder.
//
// Instantiated on the outermost ring it is the machine's I/O station, the
// only path to the host. The host side is a valid/ready request channel
// (one request in flight) and a one-cycle response strobe `rsp_valid`,
// raised for both reads and writes, with the captured packet on `rsp_pkt`.
// The request/response handshake is this design's choice; the matching
// rule follows the architecture.
module madar_rendezvous
  import madar_pkg::*;
#(
  parameter int unsigned P   = 65536,
  parameter int unsigned POS = 32,
  localparam int unsigned PW = $clog2(P)
) (
  input  logic          clk,
  input  logic          rst_n,
  // ring side
  input  logic          adv,
  input  logic [PW-1:0] phase,
  input  win_t          win,
  output stn_wr_t       wr,
  // host side
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_write,
  input  logic [PW-1:0] req_seat,
  input  pkt_t          req_pkt,
  output logic          rsp_valid,
  output pkt_t          rsp_pkt
);

  logic          busy, write_q, hit;
  logic [PW-1:0] target;
  pkt_t          wpkt_q;

  assign req_ready = !busy;
  assign hit       = busy && adv && (phase == target);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      write_q   <= 1'b0;
      target    <= '0;
      wpkt_q    <= BUBBLE;
      rsp_valid <= 1'b0;
      rsp_pkt   <= BUBBLE;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        busy    <= 1'b1;
        write_q <= req_write;
        target  <= PW'(POS) - req_seat;   // mod P: P is a power of two
        wpkt_q  <= req_pkt;
      end else if (hit) begin
        busy      <= 1'b0;
        rsp_valid <= 1'b1;
        rsp_pkt   <= write_q ? wpkt_q : win[0];
      end
    end
  end

  always_comb begin
    wr     = NO_WR;
    wr.we  = hit && write_q;
    wr.off = '0;
    wr.pkt = wpkt_q;
  end

  if ((1 << PW) != P) begin : g_bad_p
    $error("madar_rendezvous: P must be a power of two");
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid);

endmodule
