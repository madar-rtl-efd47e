// madar_pkg: shared types and constants of the address-free ring processor.
//
// Every storage location of the machine is a slot on a ring, and every slot
// holds one packet of the fixed shape below (2+3+4+4+4+64 = 81 bits). Data and
// instructions use the same packet; only `kind` tells them apart.
//
// Field widths, the kind values and the first five opcodes follow the slot
// format of the architecture. The numeric encodings, and the two multiplier
// opcodes MUL and MAC (the architecture has a multiplier station and a
// multiply-accumulate station but lists no opcode for them), are this
// design's own choice.
package madar_pkg;

  // Operand window: a source offset names a packet 1..W slots ahead.
  localparam int unsigned W     = 8;
  // Station reach: offsets 0..REACH-1 ahead, the range of the 4-bit dst field.
  localparam int unsigned REACH = 16;
  localparam int unsigned DATA_W = 64;
  // Most stations one ring can carry, and the type of a station-position list.
  localparam int unsigned MAXPORT = 8;
  typedef int unsigned pos_t [MAXPORT];

  typedef enum logic [1:0] {
    K_BUBBLE = 2'd0,
    K_DATA   = 2'd1,
    K_INSTR  = 2'd2
  } kind_e;

  typedef enum logic [2:0] {
    OP_ADD   = 3'd0,
    OP_SUB   = 3'd1,
    OP_CMPLT = 3'd2,
    OP_STEER = 3'd3,
    OP_XFER  = 3'd4,
    OP_MUL   = 3'd5,
    OP_MAC   = 3'd6
  } op_e;

  // XFER uses its src_b field as the destination selector.
  // A ring between two neighbours has two transfer stations, so a cross
  // copy names its direction and only the station on that side executes it.
  localparam logic [3:0] XFER_SAME = 4'd0;  // copy within the instruction's ring
  localparam logic [3:0] XFER_IN   = 4'd1;  // copy onto the next shorter ring
  localparam logic [3:0] XFER_OUT  = 4'd2;  // copy onto the next longer ring

  typedef struct packed {
    kind_e             kind;
    op_e               op;
    logic [3:0]        src_a;
    logic [3:0]        src_b;
    logic [3:0]        dst;
    logic [DATA_W-1:0] payload;
  } pkt_t;

  localparam pkt_t BUBBLE = '{kind: K_BUBBLE, op: OP_ADD, src_a: '0, src_b: '0,
                              dst: '0, payload: '0};

  // What a station sees: the packets at offsets 0..REACH-1 ahead of it
  // (offset 0 is the packet at the station itself).
  typedef pkt_t [REACH-1:0] win_t;

  // What a station asks of its ring on an advancing edge, in pre-shift
  // offsets: write one packet at offset `off`, and turn every offset whose
  // `kill` bit is set into a bubble.
  typedef struct packed {
    logic             we;
    logic [3:0]       off;
    pkt_t             pkt;
    logic [REACH-1:0] kill;
  } stn_wr_t;

  localparam stn_wr_t NO_WR = '{we: 1'b0, off: '0, pkt: BUBBLE, kill: '0};

  function automatic pkt_t mk_data(logic [DATA_W-1:0] v);
    pkt_t p;
    p         = BUBBLE;
    p.kind    = K_DATA;
    p.payload = v;
    return p;
  endfunction

  function automatic pkt_t mk_instr(op_e op, logic [3:0] a, logic [3:0] b,
                                    logic [3:0] d, logic [DATA_W-1:0] v);
    pkt_t p;
    p.kind    = K_INSTR;
    p.op      = op;
    p.src_a   = a;
    p.src_b   = b;
    p.dst     = d;
    p.payload = v;
    return p;
  endfunction

  // A source offset is usable when it lies inside the operand window.
  function automatic logic in_window(logic [3:0] off);
    return (off >= 4'd1) && (off <= 4'(W));
  endfunction

endpackage
