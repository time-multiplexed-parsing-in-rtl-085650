// flow_table: the flow classification lookup (second lookup).
//
// After the marking lookup has decided the packet's colour, this ternary table
// maps {flow fields, colour} to the index of the packet counter to use. With
// two counters per flow (counter0 and counter1) a flow takes two rules, one
// per colour, so the global marking rules stay few and the per-flow cost is
// two entries. A flow is identified here by the IPv4 source and destination
// addresses and the protocol; any of these can be masked. A miss means the
// packet is not monitored. The lookup is combinational; rules are written
// through wr_* one per cycle and take effect in the next cycle.
//
// Follows the paper: two lookups, two rules per flow, colour-selected
// counters. Own choices: the flow fields, 128 rules (64 flows), the width of
// the counter index.
module flow_table
  import ampm_pkg::*;
#(
  parameter int unsigned RULES     = 128,
  parameter int unsigned CNT_IDX_W = 7,
  localparam int unsigned IDX_W    = $clog2(RULES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // rule write port
  input  logic                 wr_i,
  input  logic [IDX_W-1:0]     wr_idx_i,
  input  logic                 wr_valid_i,
  input  logic [FKEY_W-1:0]    wr_value_i,   // {flow_key_t, colour}
  input  logic [FKEY_W-1:0]    wr_mask_i,
  input  logic [CNT_IDX_W-1:0] wr_cnt_idx_i,
  // lookup
  input  flow_key_t            flow_i,
  input  logic                 color_i,
  output logic                 hit_o,
  output logic [CNT_IDX_W-1:0] cnt_idx_o
);

  logic [IDX_W-1:0] rule_idx;

  tcam #(.KEY_W(FKEY_W), .ACT_W(CNT_IDX_W), .ENTRIES(RULES)) u_tcam (
    .clk, .rst_n,
    .wr_en_i(wr_i), .wr_idx_i, .wr_valid_i, .wr_value_i, .wr_mask_i,
    .wr_act_i(wr_cnt_idx_i),
    .key_i({flow_i, color_i}), .hit_o, .idx_o(rule_idx), .act_o(cnt_idx_o)
  );

  // The matching rule's position is not needed: its action names the counter.
  logic unused_rule_idx;
  assign unused_rule_idx = ^rule_idx;

endmodule
