// ampm_mp: an AM-PM measurement point using time-multiplexed parsing.
//
// One module serves as either end of a measurement. As the initiating MP
// (role_i = ROLE_INIT) it writes a single marking bit into each monitored
// IPv4 packet. The bit is a step (the colour, which flips every interval) with
// a pulse (one inverted packet) at the start of the third quarter of each
// interval. It counts the packet in the colour's counter, and records the time
// of the pulse packet. As the terminating MP (ROLE_TERM) it reads that bit.
// In the second and third quarter of an interval a bit that differs from the
// interval's colour is a pulse, which is timestamped; elsewhere the bit gives
// the colour to count in. Optionally it clears the bit before the packet
// leaves (term_clear_i, for an MP that is not the final destination).
//
// Pipeline, one packet header per cycle, no back-pressure:
//   stage 0  in_*  registered together with the time of day at reception
//   stage 1  marking lookup (mark_unit) on {timestamp, Reg or MarkBit},
//            flow lookup (flow_table) on {flow fields, colour}; a packet is
//            monitored when it is IPv4 and both lookups hit. For a monitored
//            packet, Reg, the counter and the timestamp queue are updated at
//            the end of the cycle, and the marking bit is rewritten.
//   stage 2  out_* registered: the header leaves two cycles after it entered.
// Counters are read by the collector through cnt_rd_*; timestamp records
// leave through ts_* with a valid/ready handshake.
//
// Follows the paper: the marking rules (Tables 6 and 7), time bits
// Seconds[4:2] of a two-field timestamp, Reg, two lookups with two flow rules
// per flow, the DSCP LSB as marking bit, clearing at the terminating MP.
// Own choices: the pipeline, the interfaces, that only monitored flows are
// marked, one Reg per MP, and all sizes not given in the paper.
module ampm_mp
  import ampm_pkg::*;
#(
  parameter int unsigned MARK_RULES   = 8,
  parameter int unsigned FLOW_RULES   = 128,
  parameter int unsigned COUNTERS     = 128,
  parameter int unsigned CNT_W        = 64,
  parameter int unsigned TS_FIFO      = 16,
  parameter int unsigned NS_PER_CYCLE = 4,
  localparam int unsigned MR_W  = $clog2(MARK_RULES),
  localparam int unsigned FR_W  = $clog2(FLOW_RULES),
  localparam int unsigned CI_W  = $clog2(COUNTERS),
  localparam int unsigned TF_W  = $clog2(TS_FIFO)
) (
  input  logic              clk,
  input  logic              rst_n,
  // static configuration
  input  role_e             role_i,
  input  logic              term_clear_i,
  output logic              init_done_o,
  // time of day (set by the time-synchronisation software)
  input  logic              tod_set_i,
  input  tstamp_t           tod_set_val_i,
  output tstamp_t           tod_o,
  // packet headers in
  input  logic              in_valid_i,
  input  logic [159:0]      in_hdr_i,
  // packet headers out
  output logic              out_valid_o,
  output logic [159:0]      out_hdr_o,
  output tstamp_t           out_ts_o,         // reception time
  output logic              out_monitored_o,
  output logic              out_color_o,
  output logic              out_ts_taken_o,
  // marking rule write port
  input  logic              mt_wr_i,
  input  logic [MR_W-1:0]   mt_idx_i,
  input  logic              mt_valid_i,
  input  logic [MKEY_W-1:0] mt_value_i,
  input  logic [MKEY_W-1:0] mt_mask_i,
  input  mark_act_t         mt_act_i,
  // flow rule write port
  input  logic              ft_wr_i,
  input  logic [FR_W-1:0]   ft_idx_i,
  input  logic              ft_valid_i,
  input  logic [FKEY_W-1:0] ft_value_i,
  input  logic [FKEY_W-1:0] ft_mask_i,
  input  logic [CI_W-1:0]   ft_cnt_idx_i,
  // counter access (collector)
  input  logic              cnt_rd_i,
  input  logic [CI_W-1:0]   cnt_rd_idx_i,
  output logic              cnt_rd_valid_o,
  output logic [CNT_W-1:0]  cnt_rd_data_o,
  input  logic              cnt_wr_i,
  input  logic [CI_W-1:0]   cnt_wr_idx_i,
  input  logic [CNT_W-1:0]  cnt_wr_data_i,
  // timestamp export (collector)
  output logic              ts_valid_o,
  input  logic              ts_ready_i,
  output ts_rec_t           ts_rec_o,
  output logic [31:0]       ts_drops_o,
  output logic [TF_W:0]     ts_level_o
);

  // ---- time of day -----------------------------------------------------------
  tstamp_t now;

  tod_clock #(.NS_PER_CYCLE(NS_PER_CYCLE)) u_tod (
    .clk, .rst_n, .set_i(tod_set_i), .set_val_i(tod_set_val_i), .now_o(now)
  );
  assign tod_o = now;

  // ---- stage 0: header and reception time ---------------------------------
  logic         s1_valid_q;
  logic [159:0] s1_hdr_q;
  tstamp_t      s1_ts_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid_q <= 1'b0;
      s1_hdr_q   <= '0;
      s1_ts_q    <= '0;
    end else begin
      s1_valid_q <= in_valid_i;
      if (in_valid_i) begin
        s1_hdr_q <= in_hdr_i;
        s1_ts_q  <= now;
      end
    end
  end

  // ---- stage 1: lookups and actions ---------------------------------------
  logic         is_ipv4, rx_mark;
  flow_key_t    flow;
  logic         mk_hit;
  logic [MR_W-1:0] mk_rule;
  mark_act_t    act;
  logic         cur_reg;
  logic         fl_hit;
  logic [CI_W-1:0] cnt_idx;
  logic         monitored, wr_mark, new_mark, wire_mark;
  logic [159:0] hdr_new;
  logic         commit;

  ipv4_mark_field u_field (
    .hdr_i(s1_hdr_q), .wr_i(wr_mark), .new_mark_i(new_mark),
    .is_ipv4_o(is_ipv4), .mark_o(rx_mark), .flow_o(flow), .hdr_o(hdr_new)
  );

  mark_unit #(.ENTRIES(MARK_RULES)) u_mark (
    .clk, .rst_n, .role_i, .init_done_o,
    .sw_wr_i(mt_wr_i), .sw_idx_i(mt_idx_i), .sw_valid_i(mt_valid_i),
    .sw_value_i(mt_value_i), .sw_mask_i(mt_mask_i), .sw_act_i(mt_act_i),
    .ts_i(s1_ts_q), .mark_i(rx_mark), .hit_o(mk_hit), .rule_o(mk_rule),
    .act_o(act), .reg_o(cur_reg), .commit_i(commit)
  );

  flow_table #(.RULES(FLOW_RULES), .CNT_IDX_W(CI_W)) u_flow (
    .clk, .rst_n,
    .wr_i(ft_wr_i), .wr_idx_i(ft_idx_i), .wr_valid_i(ft_valid_i),
    .wr_value_i(ft_value_i), .wr_mask_i(ft_mask_i), .wr_cnt_idx_i(ft_cnt_idx_i),
    .flow_i(flow), .color_i(act.color), .hit_o(fl_hit), .cnt_idx_o(cnt_idx)
  );

  assign monitored = s1_valid_q && is_ipv4 && init_done_o && mk_hit && fl_hit;
  assign commit    = monitored;

  always_comb begin
    wr_mark  = 1'b0;
    new_mark = rx_mark;
    if (monitored && act.set_mark) begin
      wr_mark  = 1'b1;
      new_mark = act.mark;
    end else if (monitored && role_i == ROLE_TERM && term_clear_i) begin
      wr_mark  = 1'b1;
      new_mark = 1'b0;
    end
  end

  // The marking bit as it travels between the two MPs.
  assign wire_mark = (role_i == ROLE_INIT) ? new_mark : rx_mark;

  counter_bank #(.COUNTERS(COUNTERS), .CNT_W(CNT_W)) u_cnt (
    .clk, .rst_n,
    .inc_i(monitored && act.cnt_en), .inc_idx_i(cnt_idx),
    .rd_i(cnt_rd_i), .rd_idx_i(cnt_rd_idx_i),
    .rd_valid_o(cnt_rd_valid_o), .rd_data_o(cnt_rd_data_o),
    .wr_i(cnt_wr_i), .wr_idx_i(cnt_wr_idx_i), .wr_data_i(cnt_wr_data_i)
  );

  ts_rec_t rec;
  always_comb begin
    rec         = '0;
    rec.cnt_idx = 16'(cnt_idx);
    rec.color   = act.color;
    rec.mark    = wire_mark;
    rec.ts      = s1_ts_q;
  end

  ts_export_fifo #(.DEPTH(TS_FIFO)) u_tsq (
    .clk, .rst_n,
    .push_i(monitored && act.ts_en), .push_rec_i(rec),
    .pop_valid_o(ts_valid_o), .pop_ready_i(ts_ready_i), .pop_rec_o(ts_rec_o),
    .drops_o(ts_drops_o), .level_o(ts_level_o)
  );

  // ---- stage 2: output registers -------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_o     <= 1'b0;
      out_hdr_o       <= '0;
      out_ts_o        <= '0;
      out_monitored_o <= 1'b0;
      out_color_o     <= 1'b0;
      out_ts_taken_o  <= 1'b0;
    end else begin
      out_valid_o     <= s1_valid_q;
      out_monitored_o <= monitored;
      out_color_o     <= monitored && act.color;
      out_ts_taken_o  <= monitored && act.ts_en;
      if (s1_valid_q) begin
        out_hdr_o <= hdr_new;
        out_ts_o  <= s1_ts_q;
      end
    end
  end

  // The matching rule's index and Reg are visible for debug only.
  logic unused_dbg;
  assign unused_dbg = ^{mk_rule, cur_reg};

endmodule
