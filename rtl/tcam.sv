// tcam: priority ternary match-action table.
//
// Each entry holds a valid bit, a value, a care mask and an action word. A key
// matches an entry when every bit whose mask bit is 1 equals the entry's
// value; masked bits (the paper's '*') are ignored. Of the matching entries
// the one with the lowest index wins, so rules are written in the order a
// rule table lists them. The lookup is combinational: hit_o, idx_o and act_o
// follow key_i in the same cycle. Entries are written one per cycle through
// the wr_* port and take effect in the next cycle; reset clears all valid
// bits.
//
// The paper asks for a ternary lookup that can include the packet timestamp
// (such as a TCAM); the flop-based storage, first-match priority and write
// port are this design's choices.
module tcam #(
  parameter int unsigned KEY_W   = 16,
  parameter int unsigned ACT_W   = 8,
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // rule write port
  input  logic             wr_en_i,
  input  logic [IDX_W-1:0] wr_idx_i,
  input  logic             wr_valid_i,
  input  logic [KEY_W-1:0] wr_value_i,
  input  logic [KEY_W-1:0] wr_mask_i,   // 1 = bit is compared
  input  logic [ACT_W-1:0] wr_act_i,
  // lookup
  input  logic [KEY_W-1:0] key_i,
  output logic             hit_o,
  output logic [IDX_W-1:0] idx_o,
  output logic [ACT_W-1:0] act_o
);

  logic             valid_q [ENTRIES];
  logic [KEY_W-1:0] value_q [ENTRIES];
  logic [KEY_W-1:0] mask_q  [ENTRIES];
  logic [ACT_W-1:0] act_q   [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) valid_q[i] <= 1'b0;
    end else if (wr_en_i && (32'(wr_idx_i) < ENTRIES)) begin
      valid_q[wr_idx_i] <= wr_valid_i;
    end
  end

  // Rule contents need no reset: an entry is only read once it is valid.
  always_ff @(posedge clk) begin
    if (wr_en_i && (32'(wr_idx_i) < ENTRIES)) begin
      value_q[wr_idx_i] <= wr_value_i;
      mask_q[wr_idx_i]  <= wr_mask_i;
      act_q[wr_idx_i]   <= wr_act_i;
    end
  end

  logic [ENTRIES-1:0] match;

  always_comb begin
    for (int i = 0; i < ENTRIES; i++)
      match[i] = valid_q[i] && (((key_i ^ value_q[i]) & mask_q[i]) == '0);
  end

  always_comb begin
    hit_o = 1'b0;
    idx_o = '0;
    act_o = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (match[i]) begin
        hit_o = 1'b1;
        idx_o = IDX_W'(i);
        act_o = act_q[i];
      end
    end
  end

endmodule
