// mark_unit: the time-multiplexed marking lookup (first lookup) and its state.
//
// Each packet's reception timestamp and one state bit form the key of a small
// ternary match-action table. Unmasking bits of the timestamp turns the table
// into a function of time (time bit as a match): with Seconds[4:2] unmasked,
// Seconds[4] gives the colour of a 16-second interval, Seconds[3:2] splits
// the interval into four 4-second slots, and the same
// marking bit means a step (colour) in some slots and a pulse (timestamped
// packet) in others. At the initiating MP the state bit is Reg, a register
// updated by the rule's action so that the first packet of a slot can be told
// from the rest; at the terminating MP the state bit is the received MarkBit.
//
// After reset a sequencer writes the muxed-marking rules of the paper's
// Table 6 (role_i = ROLE_INIT) or Table 7 (role_i = ROLE_TERM) into entries
// 0..5, one per cycle, then raises init_done_o. From then on software may
// rewrite any entry through the sw_* port (for example with the step-only or
// pulse-only rules of Tables 1-4, or with another time bit to change the
// interval); writes before init_done_o are ignored.
//
// Timing: the lookup is combinational (hit_o/act_o follow ts_i, mark_i in the
// same cycle). When commit_i is high in a cycle whose lookup hit with
// act_o.reg_we set, Reg takes act_o.reg_next at the clock edge, so a packet in
// every cycle sees the Reg written by the packet before it.
//
// Follows the paper: rule contents, the Reg state, the slot bits Seconds[4:2].
// Own choices: the action encoding, first-match priority, Reg reset to 0,
// one Reg per unit (the rule tables show a single Reg, and the paper keeps
// the first lookup to a few global rules), and the loading sequencer.
module mark_unit
  import ampm_pkg::*;
#(
  parameter int unsigned ENTRIES      = 8,
  // Position, in the packed timestamp, of TimeBits[0]: Seconds[2].
  parameter int unsigned TIMEBITS_LSB = SEC_LSB + 2,
  localparam int unsigned IDX_W = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  role_e             role_i,
  output logic              init_done_o,
  // software rule write port
  input  logic              sw_wr_i,
  input  logic [IDX_W-1:0]  sw_idx_i,
  input  logic              sw_valid_i,
  input  logic [MKEY_W-1:0] sw_value_i,
  input  logic [MKEY_W-1:0] sw_mask_i,
  input  mark_act_t         sw_act_i,
  // lookup
  input  tstamp_t           ts_i,
  input  logic              mark_i,     // marking bit of the received packet
  output logic              hit_o,
  output logic [IDX_W-1:0]  rule_o,     // index of the matching rule
  output mark_act_t         act_o,
  output logic              reg_o,      // current Reg
  input  logic              commit_i    // apply the action's Reg update
);

  localparam int unsigned NRULES = 6;

  // Rule i of the paper's table for the given role: 3-bit TimeBits value and
  // care mask, state value and care bit, and the action.
  function automatic void default_rule(input role_e role, input int unsigned i,
                                       output logic [MKEY_W-1:0] value,
                                       output logic [MKEY_W-1:0] mask,
                                       output mark_act_t act);
    logic [2:0] tv, tm;
    logic       sv, sm;
    if (role == ROLE_INIT) begin
      // Table 6: key {TimeBits, Reg}
      case (i)
        0: begin tv = 3'b010; tm = 3'b111; sv = 0; sm = 1; act = mk_act(1, 1, 1, 1, 1, 0, 1); end
        1: begin tv = 3'b010; tm = 3'b111; sv = 1; sm = 1; act = mk_act(1, 0, 1, 1, 1, 0, 0); end
        2: begin tv = 3'b000; tm = 3'b100; sv = 0; sm = 0; act = mk_act(1, 0, 1, 0, 1, 0, 0); end
        3: begin tv = 3'b110; tm = 3'b111; sv = 1; sm = 1; act = mk_act(1, 0, 1, 0, 1, 1, 1); end
        4: begin tv = 3'b110; tm = 3'b111; sv = 0; sm = 1; act = mk_act(1, 1, 1, 0, 1, 1, 0); end
        default: begin tv = 3'b100; tm = 3'b100; sv = 0; sm = 0; act = mk_act(1, 1, 1, 1, 1, 1, 0); end
      endcase
    end else begin
      // Table 7: key {TimeBits, MarkBit}
      case (i)
        0: begin tv = 3'b001; tm = 3'b111; sv = 1; sm = 1; act = mk_act(0, 0, 0, 0, 1, 0, 1); end
        1: begin tv = 3'b010; tm = 3'b111; sv = 1; sm = 1; act = mk_act(0, 0, 0, 0, 1, 0, 1); end
        2: begin tv = 3'b101; tm = 3'b111; sv = 0; sm = 1; act = mk_act(0, 0, 0, 0, 1, 1, 1); end
        3: begin tv = 3'b110; tm = 3'b111; sv = 0; sm = 1; act = mk_act(0, 0, 0, 0, 1, 1, 1); end
        4: begin tv = 3'b000; tm = 3'b000; sv = 0; sm = 1; act = mk_act(0, 0, 0, 0, 1, 0, 0); end
        default: begin tv = 3'b000; tm = 3'b000; sv = 1; sm = 1; act = mk_act(0, 0, 0, 0, 1, 1, 0); end
      endcase
    end
    value = (MKEY_W'(tv) << (TIMEBITS_LSB + 1)) | MKEY_W'(sv);
    mask  = (MKEY_W'(tm) << (TIMEBITS_LSB + 1)) | MKEY_W'(sm);
  endfunction

  // ---- loading sequencer ---------------------------------------------------
  logic [2:0] init_cnt_q;
  logic       init_done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_cnt_q  <= '0;
      init_done_q <= 1'b0;
    end else if (!init_done_q) begin
      init_cnt_q <= init_cnt_q + 1'b1;
      if (init_cnt_q == 3'(NRULES - 1)) init_done_q <= 1'b1;
    end
  end

  assign init_done_o = init_done_q;

  logic              t_wr, t_valid;
  logic [IDX_W-1:0]  t_idx;
  logic [MKEY_W-1:0] t_value, t_mask;
  mark_act_t         t_act;
  logic [MKEY_W-1:0] d_value, d_mask;
  mark_act_t         d_act;

  always_comb begin
    default_rule(role_i, 32'(init_cnt_q), d_value, d_mask, d_act);
    if (!init_done_q) begin
      t_wr = 1'b1;  t_idx = IDX_W'(init_cnt_q); t_valid = 1'b1;
      t_value = d_value; t_mask = d_mask; t_act = d_act;
    end else begin
      t_wr = sw_wr_i; t_idx = sw_idx_i; t_valid = sw_valid_i;
      t_value = sw_value_i; t_mask = sw_mask_i; t_act = sw_act_i;
    end
  end

  // ---- lookup ----------------------------------------------------------------
  logic              reg_q;
  logic [MKEY_W-1:0] key;
  logic [MACT_W-1:0] act_bits;

  assign key = {ts_i, (role_i == ROLE_INIT) ? reg_q : mark_i};

  tcam #(.KEY_W(MKEY_W), .ACT_W(MACT_W), .ENTRIES(ENTRIES)) u_tcam (
    .clk, .rst_n,
    .wr_en_i(t_wr), .wr_idx_i(t_idx), .wr_valid_i(t_valid),
    .wr_value_i(t_value), .wr_mask_i(t_mask), .wr_act_i(t_act),
    .key_i(key), .hit_o, .idx_o(rule_o), .act_o(act_bits)
  );

  assign act_o = mark_act_t'(act_bits);
  assign reg_o = reg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              reg_q <= 1'b0;
    else if (commit_i && hit_o && act_o.reg_we) reg_q <= act_o.reg_next;
  end

  // Software may only write rules once the defaults are in.
  a_no_early_write: assert property (@(posedge clk) disable iff (!rst_n)
                                     sw_wr_i |-> init_done_q)
    else $error("mark_unit: rule write before init_done");

  initial begin
    assert (ENTRIES >= NRULES) else $fatal(1, "mark_unit: ENTRIES < 6");
  end

endmodule
