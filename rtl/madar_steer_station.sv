// madar_steer_station: control flow by removing packets, not by branching.
//
// On an advancing clock, if the packet passing the station (offset 0) is a
// STEER instruction, the station reads its predicate from window offset src_a
// (1..W). When the predicate is a DATA packet with a non-zero payload, the
// station turns the run of slots at offsets dst, dst+1, ..., dst+count-1 into
// bubbles, count being the instruction's payload, so the instructions there
// never execute again. A false predicate leaves everything in place. The
// run may include the steer instruction itself (dst = 0).
//
// The field meanings (dst is the kill-run start, payload the kill count)
// follow the slot format of the architecture. Limiting the run to the
// station's reach, offsets 0..REACH-1, is this design's choice: it is the
// range a 4-bit dst can name, and a longer run is clipped. Combinational;
// the bubbles are clocked in on the firing edge.
module madar_steer_station
  import madar_pkg::*;
(
  input  logic    en,
  input  win_t    win,
  output stn_wr_t wr,
  output logic    fired
);

  pkt_t ins, pred;

  always_comb begin
    ins   = win[0];
    pred  = win[ins.src_a];
    fired = en && ins.kind == K_INSTR && ins.op == OP_STEER &&
            in_window(ins.src_a) && pred.kind == K_DATA && pred.payload != '0;
    wr    = NO_WR;
    for (int unsigned k = 0; k < REACH; k++) begin
      wr.kill[k] = fired && (k >= 32'(ins.dst)) &&
                   (DATA_W'(k - 32'(ins.dst)) < ins.payload);
    end
  end

endmodule
