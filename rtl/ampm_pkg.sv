// ampm_pkg: types and constants shared by the AM-PM measurement-point RTL.
//
// A packet's reception timestamp has two fields, Seconds and Second Fraction,
// as in the paper's time-bit-as-a-match examples. Their widths (48-bit
// seconds, 32-bit nanoseconds) are this design's choice, taken from the
// IEEE 1588 timestamp format. The marking table is keyed on the whole
// timestamp plus one state bit, so any time bit can be unmasked. Its action
// word (mark_act_t) carries the actions printed in the paper's match-action
// tables: MarkBit, Reg, counter0/counter1 and timestamp. The encoding of the
// action word, and the enable bits in it, are this design's own.
package ampm_pkg;

  localparam int unsigned SEC_W  = 48;
  localparam int unsigned FRAC_W = 32;
  localparam int unsigned TS_W   = SEC_W + FRAC_W;
  localparam int unsigned NS_PER_SEC = 1_000_000_000;

  // Bit offset of Seconds[0] inside a packed timestamp.
  localparam int unsigned SEC_LSB = FRAC_W;

  typedef struct packed {
    logic [SEC_W-1:0]  sec;
    logic [FRAC_W-1:0] frac;   // nanoseconds, 0 .. 999_999_999
  } tstamp_t;

  // Marking table key: {timestamp, state}. state is Reg at the initiating
  // MP and the received MarkBit at the terminating MP.
  localparam int unsigned MKEY_W = TS_W + 1;

  typedef struct packed {
    logic set_mark;   // write MarkBit into the packet
    logic mark;       // value of MarkBit
    logic reg_we;     // update Reg
    logic reg_next;   // new value of Reg
    logic cnt_en;     // count the packet
    logic color;      // 0: counter0, 1: counter1
    logic ts_en;      // record the timestamp for export
  } mark_act_t;

  localparam int unsigned MACT_W = $bits(mark_act_t);

  typedef enum logic {
    ROLE_INIT = 1'b0,   // initiating MP (MP1): assigns the marking bit
    ROLE_TERM = 1'b1    // terminating MP (MP2): acts upon the marking bit
  } role_e;

  // Flow key: fields of the IPv4 header that identify a flow.
  typedef struct packed {
    logic [31:0] src;
    logic [31:0] dst;
    logic [7:0]  proto;
  } flow_key_t;

  localparam int unsigned FKEY_W = $bits(flow_key_t) + 1;  // + colour

  // One record handed to the collector for a timestamped packet.
  typedef struct packed {
    logic [15:0] cnt_idx;   // counter index of the flow (from the flow table)
    logic        color;
    logic        mark;      // marking bit as seen on the wire
    tstamp_t     ts;
  } ts_rec_t;

  // Action constructor.
  function automatic mark_act_t mk_act(logic set_mark, logic mark, logic reg_we,
                                       logic reg_next, logic cnt_en, logic color,
                                       logic ts_en);
    mark_act_t a;
    a.set_mark = set_mark; a.mark   = mark;   a.reg_we = reg_we;
    a.reg_next = reg_next; a.cnt_en = cnt_en; a.color  = color;
    a.ts_en    = ts_en;
    return a;
  endfunction

endpackage
