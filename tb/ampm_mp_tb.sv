// ampm_mp_tb: end-to-end test of two measurement points at full size.
//
// MP1 (initiator) and MP2 (terminator, clearing the marking bit) are two
// ampm_mp instances with all parameters at their defaults. MP1's headers
// go to MP2 over a link model that delays every packet by a fixed number of
// cycles and drops some at random. The traffic is random: four monitored
// flows, one flow installed in neither MP, and some non-IPv4 headers, each
// header numbered in its identification field. A collector model reads the
// counters of the colour not in use, and pops the timestamp records of both
// MPs.
//
// The testbench has its own model of both MPs: the Table 6 and Table 7 rules
// written as if/else code, its own time of day, and its own copy of the
// export queue. Checked per packet at both outputs: the two-cycle latency
// (at up to one header per cycle), the marking bit, the
// colour, whether the packet was monitored, whether it was timestamped, the
// reception time, and the header checksum. Checked per collection: MP1's
// cumulative counters equal the packets sent in each colour, and MP2's
// equal those less the packets the link dropped, which is the loss
// measurement. Checked per record: the record itself, and the delay MP2
// minus MP1 against the link's delay.
//
// Phases:
//   A  the default rules (time bits Seconds[4:2], 16 s intervals): both
//      clocks are stepped to the start of each 4 s slot, as a time-sync
//      step would, so that both colours' intervals and part of the next
//      are covered (44 s of time).
//   A2 the 1 s interval of the paper's hardware experiment: rules rewritten
//      to match Seconds[0] (colour) and fraction bits [29:28] (quarters),
//      clocks stepped to each quarter.
//   B  both marking tables rewritten with the time bits at fraction bits
//      [11:9] (512 ns slots), running continuously over many intervals.
//   B2 MP2's clock set 200 ns behind MP1's: pulses now arrive in the guard
//      slots 001 and 101.
//   C  the collector stops popping timestamp records, so both export
//      queues overflow and drop, then drains them.
// Every mechanism is counted, and one that never happens is a failure.
module ampm_mp_tb;
  import ampm_pkg::*;

  localparam int unsigned NSPC   = 4;      // tod_clock default
  localparam int          LINK_D = 5;      // link delay, cycles
  localparam int          NF     = 4;      // monitored flows
  localparam int unsigned FAST_LSB = 9;    // phase B: TimeBits = frac[11:9]
  localparam int unsigned SLOW_LSB = SEC_LSB + 2;
  localparam longint      LAG_NS = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 30) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- DUTs --
  typedef struct {
    logic tod_set; tstamp_t tod_val;
    logic in_valid; logic [159:0] in_hdr;
    logic mt_wr; logic [2:0] mt_idx; logic mt_valid;
    logic [MKEY_W-1:0] mt_value, mt_mask; mark_act_t mt_act;
    logic ft_wr; logic [6:0] ft_idx; logic ft_valid;
    logic [FKEY_W-1:0] ft_value, ft_mask; logic [6:0] ft_cnt;
    logic cnt_rd; logic [6:0] cnt_rd_idx;
    logic ts_ready;
  } drive_t;

  drive_t d1, d2;
  logic        init1, init2;
  tstamp_t     tod1, tod2, ots1, ots2;
  logic        ov1, ov2, om1, om2, oc1, oc2, ot1, ot2;
  logic [159:0] oh1, oh2;
  logic        crv1, crv2, tv1, tv2;
  logic [63:0] crd1, crd2;
  ts_rec_t     tr1, tr2;
  logic [31:0] tdrop1, tdrop2;
  logic [4:0]  tlev1, tlev2;

  ampm_mp mp1 (.clk, .rst_n, .role_i(ROLE_INIT), .term_clear_i(1'b0), .init_done_o(init1),
    .tod_set_i(d1.tod_set), .tod_set_val_i(d1.tod_val), .tod_o(tod1),
    .in_valid_i(d1.in_valid), .in_hdr_i(d1.in_hdr),
    .out_valid_o(ov1), .out_hdr_o(oh1), .out_ts_o(ots1), .out_monitored_o(om1),
    .out_color_o(oc1), .out_ts_taken_o(ot1),
    .mt_wr_i(d1.mt_wr), .mt_idx_i(d1.mt_idx), .mt_valid_i(d1.mt_valid), .mt_value_i(d1.mt_value),
    .mt_mask_i(d1.mt_mask), .mt_act_i(d1.mt_act),
    .ft_wr_i(d1.ft_wr), .ft_idx_i(d1.ft_idx), .ft_valid_i(d1.ft_valid), .ft_value_i(d1.ft_value),
    .ft_mask_i(d1.ft_mask), .ft_cnt_idx_i(d1.ft_cnt),
    .cnt_rd_i(d1.cnt_rd), .cnt_rd_idx_i(d1.cnt_rd_idx), .cnt_rd_valid_o(crv1), .cnt_rd_data_o(crd1),
    .cnt_wr_i(1'b0), .cnt_wr_idx_i('0), .cnt_wr_data_i('0),
    .ts_valid_o(tv1), .ts_ready_i(d1.ts_ready), .ts_rec_o(tr1), .ts_drops_o(tdrop1), .ts_level_o(tlev1));

  ampm_mp mp2 (.clk, .rst_n, .role_i(ROLE_TERM), .term_clear_i(1'b1), .init_done_o(init2),
    .tod_set_i(d2.tod_set), .tod_set_val_i(d2.tod_val), .tod_o(tod2),
    .in_valid_i(d2.in_valid), .in_hdr_i(d2.in_hdr),
    .out_valid_o(ov2), .out_hdr_o(oh2), .out_ts_o(ots2), .out_monitored_o(om2),
    .out_color_o(oc2), .out_ts_taken_o(ot2),
    .mt_wr_i(d2.mt_wr), .mt_idx_i(d2.mt_idx), .mt_valid_i(d2.mt_valid), .mt_value_i(d2.mt_value),
    .mt_mask_i(d2.mt_mask), .mt_act_i(d2.mt_act),
    .ft_wr_i(d2.ft_wr), .ft_idx_i(d2.ft_idx), .ft_valid_i(d2.ft_valid), .ft_value_i(d2.ft_value),
    .ft_mask_i(d2.ft_mask), .ft_cnt_idx_i(d2.ft_cnt),
    .cnt_rd_i(d2.cnt_rd), .cnt_rd_idx_i(d2.cnt_rd_idx), .cnt_rd_valid_o(crv2), .cnt_rd_data_o(crd2),
    .cnt_wr_i(1'b0), .cnt_wr_idx_i('0), .cnt_wr_data_i('0),
    .ts_valid_o(tv2), .ts_ready_i(d2.ts_ready), .ts_rec_o(tr2), .ts_drops_o(tdrop2), .ts_level_o(tlev2));

  // ------------------------------------------------------------- helpers --
  function automatic tstamp_t to_ts(longint ns);
    tstamp_t t;
    t.sec  = SEC_W'(ns / NS_PER_SEC);
    t.frac = FRAC_W'(ns % NS_PER_SEC);
    return t;
  endfunction

  function automatic logic [2:0] slot_of(longint ns);
    tstamp_t t; t = to_ts(ns);
    return {t[tpos[2]], t[tpos[1]], t[tpos[0]]};
  endfunction

  function automatic logic [15:0] csum(logic [159:0] h);
    int unsigned s = 0;
    h[79:64] = '0;
    for (int i = 0; i < 10; i++) s += h[159 - 16 * i -: 16];
    while (s >> 16) s = (s & 32'hffff) + (s >> 16);
    return ~16'(s);
  endfunction

  function automatic logic csum_ok(logic [159:0] h);
    logic [15:0] c; c = csum(h);
    return (h[79:64] == c) || ((c == 16'h0000 || c == 16'hffff) && (h[79:64] == ~c));
  endfunction

  // ------------------------------------------------- reference models --
  typedef struct { logic mon; logic mark; logic color; logic ts; } exp_t;
  typedef struct { int seq; ts_rec_t rec; } xrec_t;

  longint t1, t2;                // model time of day, ns
  // positions, in the packed timestamp, of TimeBits[0], [1], [2]
  int unsigned tpos [3] = '{SLOW_LSB, SLOW_LSB + 1, SLOW_LSB + 2};
  logic m_reg = 0;

  // Table 6
  function automatic exp_t init_model(logic [2:0] tb, ref logic r);
    exp_t e; e.mon = 1; e.ts = 0;
    if (tb == 3'b010)      begin e.color = 0; e.mark = !r; e.ts = !r; r = 1; end
    else if (!tb[2])       begin e.color = 0; e.mark = 0; r = 0; end
    else if (tb == 3'b110) begin e.color = 1; e.mark = !r; e.ts = r; r = 0; end
    else                   begin e.color = 1; e.mark = 1; r = 1; end
    return e;
  endfunction

  // Table 7
  function automatic exp_t term_model(logic [2:0] tb, logic m);
    exp_t e; e.mon = 1; e.mark = 0; e.color = m; e.ts = 0;
    if ((tb == 3'b001 || tb == 3'b010) && m)  begin e.color = 0; e.ts = 1; end
    if ((tb == 3'b101 || tb == 3'b110) && !m) begin e.color = 1; e.ts = 1; end
    return e;
  endfunction

  // pending outputs, in order
  typedef struct { logic [159:0] hdr; longint ts; exp_t e; int seq; longint cyc; } pend_t;
  longint cyc = 0;   // cycle number of the current step
  pend_t pend1[$], pend2[$];
  // link delay line
  typedef struct { logic v; logic [159:0] hdr; int seq; } lk_t;
  lk_t link [LINK_D];
  // export queue models
  xrec_t q1[$], q2[$];
  // MP1 pulse record per sequence number, for the delay check
  ts_rec_t pulse1 [int];
  longint  lag_of  [int];

  // counts
  longint sent [NF][2];
  longint lost [NF][2];
  int n_step = 0, n_pulse1 = 0, n_loss = 0, n_nomatch_flow = 0, n_nonip = 0, n_clear = 0;
  int n_guard[4] = '{0, 0, 0, 0};   // MP2 pulses in slots 001, 010, 101, 110
  int n_delay = 0, n_collect = 0, n_reprog = 0, n_lost_pulse = 0, n_loss_intervals = 0;
  logic last_color = 0;
  int seq = 0;

  // traffic control
  longint tod_ns1, tod_ns2, cur_lag = 0;
  logic pend_color [65536];
  logic pend_pulse [65536];
  logic pop1_q = 0, pop2_q = 0;   // a record left the queue at the last edge
  ts_rec_t tr1_q, tr2_q;
  logic traffic_on = 0;
  longint last_drive = -10;
  int n_b2b = 0;      // headers accepted in consecutive cycles
  logic sending = 0, popping = 1;
  int rate_pct = 60;
  logic [2:0] last_slot1 = 3'b111;
  longint prev_diff [NF][2];

  // collector counter-read sequencing
  int coll_step = -1; logic coll_color;
  int rd_pend_f = -1;

  function automatic logic [159:0] make_hdr(int s);
    logic [159:0] h;
    int f; f = $urandom % (NF + 1);
    for (int w = 0; w < 5; w++) h[32 * w +: 32] = $urandom;
    h[159:152] = (($urandom % 20) == 0) ? 8'h65 : 8'h45;
    h[143:128] = 16'd20;
    h[127:112] = 16'(s);               // identification = sequence number
    h[87:80]   = 8'd17;
    h[63:32]   = 32'h0a000000 + 32'(f);
    h[31:0]    = 32'h0b000000 + 32'(f);
    h[79:64]   = csum(h);
    return h;
  endfunction

  function automatic int flow_of(logic [159:0] h);
    if (h[159:156] != 4'd4 || h[155:152] < 4'd5) return -2;
    if (h[63:32] - 32'h0a000000 < NF && h[31:0] == h[63:32] + 32'h01000000 && h[87:80] == 8'd17)
      return int'(h[63:32] - 32'h0a000000);
    return -1;
  endfunction

  // ---------------------------------------------------------- one cycle --
  task automatic clear_drives();
    d1.tod_set = 0; d2.tod_set = 0; d1.in_valid = 0; d2.in_valid = 0;
    d1.mt_wr = 0; d2.mt_wr = 0; d1.ft_wr = 0; d2.ft_wr = 0;
    d1.cnt_rd = 0; d2.cnt_rd = 0;
  endtask

  task automatic step();
    lk_t out_lk;
    // -- outputs of MP1 into the link
    if (ov1) begin
      pend_t p; int f;
      p = pend1.pop_front();
      check(oh1[127:112] == 16'(p.seq), "MP1 order");
      check(cyc - p.cyc == 2, "MP1 latency two cycles");
      check(ots1 == to_ts(p.ts), "MP1 reception time");
      check(om1 == p.e.mon, "MP1 monitored");
      f = flow_of(p.hdr);
      if (p.e.mon) begin
        check(oh1[146] == p.e.mark, "MP1 marking bit");
        check(oc1 == p.e.color && ot1 == p.e.ts, "MP1 colour/timestamp");
      end else begin
        check(oh1 == p.hdr, "MP1 unmonitored header unchanged");
      end
      check(f == -2 || csum_ok(oh1), "MP1 checksum");
    end
    out_lk = link[LINK_D - 1];
    for (int i = LINK_D - 1; i > 0; i--) link[i] = link[i - 1];
    link[0].v = ov1; link[0].hdr = oh1; link[0].seq = int'(oh1[127:112]);
    // -- MP2 outputs
    if (ov2) begin
      pend_t p;
      p = pend2.pop_front();
      check(oh2[127:112] == p.hdr[127:112], "MP2 order");
      check(cyc - p.cyc == 2, "MP2 latency two cycles");
      check(ots2 == to_ts(p.ts), "MP2 reception time");
      check(om2 == p.e.mon, "MP2 monitored");
      if (p.e.mon) begin
        check(oh2[146] == 1'b0, "MP2 clears the marking bit");
        if (p.hdr[146]) n_clear++;
        check(oc2 == p.e.color && ot2 == p.e.ts, "MP2 colour/timestamp");
        check(csum_ok(oh2), "MP2 checksum");
      end else begin
        check(oh2 == p.hdr, "MP2 unmonitored header unchanged");
      end
    end
    // -- counter read data from the previous cycle
    if (rd_pend_f >= 0) begin
      longint c1, c2, diff;
      check(crv1 && crv2, "counter read valid");
      c1 = longint'(crd1); c2 = longint'(crd2);
      check(c1 == sent[rd_pend_f][coll_color], "MP1 counter = packets sent in colour");
      check(c1 - c2 == lost[rd_pend_f][coll_color], "MP1 - MP2 counter = packets lost");
      diff = c1 - c2;
      if (diff != prev_diff[rd_pend_f][coll_color]) n_loss_intervals++;
      prev_diff[rd_pend_f][coll_color] = diff;
      rd_pend_f = -1;
    end
    // -- timestamp records popped in this cycle
    if (pop1_q) begin
      xrec_t x;
      check(q1.size() > 0, "MP1 record expected");
      if (q1.size() > 0) begin
        x = q1.pop_front();
        check(tr1_q == x.rec, "MP1 record contents");
        pulse1[x.seq] = tr1_q;
      end
    end
    if (pop2_q) begin
      xrec_t x;
      check(q2.size() > 0, "MP2 record expected");
      if (q2.size() > 0) begin
        x = q2.pop_front();
        check(tr2_q == x.rec, "MP2 record contents");
        if (pulse1.exists(x.seq)) begin
          longint dl;
          dl = (longint'(tr2_q.ts.sec) * NS_PER_SEC + longint'(tr2_q.ts.frac)) -
               (longint'(pulse1[x.seq].ts.sec) * NS_PER_SEC + longint'(pulse1[x.seq].ts.frac));
          check(dl == longint'((2 + LINK_D) * NSPC) - lag_of[x.seq], "measured delay");
          check(tr2_q.color == pulse1[x.seq].color && tr2_q.cnt_idx == pulse1[x.seq].cnt_idx,
                "delay pair colour/flow");
          n_delay++;
        end
      end
    end
    clear_drives();
    // -- drive MP2 from the link, with random loss
    if (out_lk.v) begin
      int f; logic drop;
      f = flow_of(out_lk.hdr);
      drop = ($urandom % 100) < 3;
      if (drop) begin
        if (f >= 0) begin
          lost[f][pend_color[out_lk.seq]]++;
          n_loss++;
          if (pend_pulse[out_lk.seq]) n_lost_pulse++;
        end
      end else begin
        pend_t p;
        d2.in_valid = 1; d2.in_hdr = out_lk.hdr;
        p.hdr = out_lk.hdr; p.ts = t2; p.seq = out_lk.seq; p.cyc = cyc;
        if (f >= 0) begin
          logic [2:0] sl;
          sl = slot_of(t2);
          p.e = term_model(sl, out_lk.hdr[146]);
          check(p.e.color == pend_color[out_lk.seq], "MP2 colour equals MP1 colour");
          if (p.e.ts) begin
            xrec_t x;
            case (sl) 3'b001: n_guard[0]++; 3'b010: n_guard[1]++; 3'b101: n_guard[2]++; default: n_guard[3]++; endcase
            check(pend_pulse[out_lk.seq], "MP2 pulse is MP1's pulse");
            x.seq = out_lk.seq; x.rec.cnt_idx = 16'(2 * f + p.e.color); x.rec.color = p.e.color;
            x.rec.mark = out_lk.hdr[146]; x.rec.ts = to_ts(t2);
            if (q2.size() < 16) q2.push_back(x);
          end
        end else begin
          p.e = '{0, 0, 0, 0};
        end
        pend2.push_back(p);
      end
    end
    // -- drive MP1 with new traffic
    if (sending && ($urandom % 100) < rate_pct) begin
      pend_t p; int f;
      p.hdr = make_hdr(seq); p.seq = seq; p.ts = t1; p.cyc = cyc;
      if (last_drive == cyc - 1) n_b2b++;
      last_drive = cyc;
      f = flow_of(p.hdr);
      d1.in_valid = 1; d1.in_hdr = p.hdr;
      pend_color[seq % 65536] = 0; pend_pulse[seq % 65536] = 0;
      if (f >= 0) begin
        p.e = init_model(slot_of(t1), m_reg);
        sent[f][p.e.color]++;
        if (p.e.color != last_color) n_step++;
        last_color = p.e.color;
        pend_color[seq % 65536] = p.e.color;
        pend_pulse[seq % 65536] = p.e.ts;
        if (p.e.ts) begin
          xrec_t x;
          n_pulse1++;
          x.seq = seq % 65536; x.rec.cnt_idx = 16'(2 * f + p.e.color); x.rec.color = p.e.color;
          x.rec.mark = p.e.mark; x.rec.ts = to_ts(t1);
          lag_of[seq % 65536] = cur_lag;
          if (q1.size() < 16) q1.push_back(x);
        end
      end else begin
        p.e = '{0, 0, 0, 0};
        if (f == -1) n_nomatch_flow++; else n_nonip++;
      end
      pend1.push_back(p);
      seq = (seq + 1) % 65536;
    end
    // -- collector: read the idle colour's counters in the middle of the
    //    other colour's interval (slots 010 and 110 of MP1's clock)
    begin
      logic [2:0] sl; sl = slot_of(t1);
      if (sl != last_slot1 && (sl == 3'b010 || sl == 3'b110) && coll_step < 0) begin
        coll_step = 0; coll_color = !sl[2];
      end
      last_slot1 = sl;
    end
    if (coll_step >= 0 && pend1.size() == 0 && pend2.size() == 0 && !link_busy()) begin
      d1.cnt_rd = 1; d2.cnt_rd = 1;
      d1.cnt_rd_idx = 7'(2 * coll_step + coll_color); d2.cnt_rd_idx = d1.cnt_rd_idx;
      rd_pend_f = coll_step;
      coll_step++;
      if (coll_step == NF) begin coll_step = -1; n_collect++; end
    end
    // -- collector: export queues
    d1.ts_ready = popping && ($urandom % 2);
    d2.ts_ready = popping && ($urandom % 2);
    // -- advance the clock; note which records leave at this edge
    #1;
    pop1_q = tv1 && d1.ts_ready; tr1_q = tr1;
    pop2_q = tv2 && d2.ts_ready; tr2_q = tr2;
    @(posedge clk);
    t1 += NSPC;
    t2 += NSPC;
    cyc++;
    #1;
  endtask


  function automatic logic link_busy();
    for (int i = 0; i < LINK_D; i++) if (link[i].v) return 1;
    return 0;
  endfunction

  // Counter reads wait for an idle pipeline so that both MPs have seen every
  // packet of the colour being read; the traffic pauses briefly for that.
  // (Reads are issued only when pend/link are empty; see step().)

  task automatic run(int cycles);
    for (int i = 0; i < cycles; i++) begin
      // pause traffic while a counter collection is pending
      sending = (coll_step < 0) && traffic_on;
      step();
    end
  endtask

  task automatic quiesce();
    traffic_on = 0;
    run(LINK_D + 8);
  endtask

  task automatic set_clocks(longint ns1, longint ns2);
    clear_drives();
    tod_ns1 = ns1; tod_ns2 = ns2;
    d1.tod_set = 1; d1.tod_val = to_ts(ns1);
    d2.tod_set = 1; d2.tod_val = to_ts(ns2);
    // step() clears the drives first, so apply the set in a bare cycle
    @(posedge clk); t1 = ns1; t2 = ns2; #1;
    clear_drives();
    cur_lag = ns1 - ns2;
  endtask

  function automatic logic [MKEY_W-1:0] place(logic [2:0] v, logic st);
    logic [MKEY_W-1:0] k; k = MKEY_W'(st);
    for (int b = 0; b < 3; b++) k[tpos[b] + 1] = v[b];
    return k;
  endfunction

  task automatic program_mark_rules(int unsigned p0, int unsigned p1, int unsigned p2);
    tpos[0] = p0; tpos[1] = p1; tpos[2] = p2;
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < 6; i++) begin
        logic [2:0] tv, tm; logic sv, sm; mark_act_t a;
        if (r == 0) begin
          case (i)
            0: begin tv = 3'b010; tm = 3'b111; sv = 0; sm = 1; a = mk_act(1,1,1,1,1,0,1); end
            1: begin tv = 3'b010; tm = 3'b111; sv = 1; sm = 1; a = mk_act(1,0,1,1,1,0,0); end
            2: begin tv = 3'b000; tm = 3'b100; sv = 0; sm = 0; a = mk_act(1,0,1,0,1,0,0); end
            3: begin tv = 3'b110; tm = 3'b111; sv = 1; sm = 1; a = mk_act(1,0,1,0,1,1,1); end
            4: begin tv = 3'b110; tm = 3'b111; sv = 0; sm = 1; a = mk_act(1,1,1,0,1,1,0); end
            default: begin tv = 3'b100; tm = 3'b100; sv = 0; sm = 0; a = mk_act(1,1,1,1,1,1,0); end
          endcase
        end else begin
          case (i)
            0: begin tv = 3'b001; tm = 3'b111; sv = 1; sm = 1; a = mk_act(0,0,0,0,1,0,1); end
            1: begin tv = 3'b010; tm = 3'b111; sv = 1; sm = 1; a = mk_act(0,0,0,0,1,0,1); end
            2: begin tv = 3'b101; tm = 3'b111; sv = 0; sm = 1; a = mk_act(0,0,0,0,1,1,1); end
            3: begin tv = 3'b110; tm = 3'b111; sv = 0; sm = 1; a = mk_act(0,0,0,0,1,1,1); end
            4: begin tv = 3'b000; tm = 3'b000; sv = 0; sm = 1; a = mk_act(0,0,0,0,1,0,0); end
            default: begin tv = 3'b000; tm = 3'b000; sv = 1; sm = 1; a = mk_act(0,0,0,0,1,1,0); end
          endcase
        end
        clear_drives();
        if (r == 0) begin
          d1.mt_wr = 1; d1.mt_idx = 3'(i); d1.mt_valid = 1;
          d1.mt_value = place(tv, sv);
          d1.mt_mask  = place(tm, sm);
          d1.mt_act = a;
        end else begin
          d2.mt_wr = 1; d2.mt_idx = 3'(i); d2.mt_valid = 1;
          d2.mt_value = place(tv, sv);
          d2.mt_mask  = place(tm, sm);
          d2.mt_act = a;
        end
        @(posedge clk); t1 += NSPC; t2 += NSPC; #1;
      end
    clear_drives();
    n_reprog++;
  endtask

  task automatic install_flows();
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < 2; c++) begin
        flow_key_t k;
        k.src = 32'h0a000000 + 32'(f); k.dst = 32'h0b000000 + 32'(f); k.proto = 8'd17;
        clear_drives();
        d1.ft_wr = 1; d1.ft_idx = 7'(2 * f + c); d1.ft_valid = 1;
        d1.ft_value = {k, 1'(c)}; d1.ft_mask = '1; d1.ft_cnt = 7'(2 * f + c);
        d2.ft_wr = 1; d2.ft_idx = d1.ft_idx; d2.ft_valid = 1;
        d2.ft_value = d1.ft_value; d2.ft_mask = '1; d2.ft_cnt = d1.ft_cnt;
        @(posedge clk); t1 += NSPC; t2 += NSPC; #1;
      end
    clear_drives();
  endtask

  // ------------------------------------------------------------- stimulus --
  initial begin
    clear_drives();
    d1.ts_ready = 0; d2.ts_ready = 0;
    for (int i = 0; i < LINK_D; i++) link[i].v = 0;
    for (int f = 0; f < NF; f++) for (int c = 0; c < 2; c++) begin
      sent[f][c] = 0; lost[f][c] = 0; prev_diff[f][c] = 0;
    end
    t1 = 0; t2 = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    t1 = 0; t2 = 0;
    // reset releases between edges: the clocks start counting at the next one
    while (!(init1 && init2)) begin @(posedge clk); t1 += NSPC; t2 += NSPC; #1; end
    install_flows();

    // ---- phase A: default rules, clocks stepped through 16 s intervals
    for (int s = 0; s < 11; s++) begin
      quiesce();
      set_clocks((longint'(32) + 4 * s) * NS_PER_SEC, (longint'(32) + 4 * s) * NS_PER_SEC);
      last_slot1 = 3'b111;
      traffic_on = 1;
      run(300);
    end
    quiesce();
    $display("phase A done: pulses=%0d steps=%0d collections=%0d", n_pulse1, n_step, n_collect);
    check(n_pulse1 == 3 && n_step == 2, "phase A: three pulses and two steps in 44 s");

    // ---- phase A2: the 1 s interval of the hardware experiment. The colour
    //      is Seconds[0]; the quarters are fraction bits [29:28] (2^28 ns
    //      slots, the last one shortened by the wrap at 10^9 ns).
    program_mark_rules(28, 29, SEC_LSB);
    for (int s = 0; s < 9; s++) begin
      longint base;
      base = longint'(200 + s / 4) * NS_PER_SEC + longint'(s % 4) * (longint'(1) << 28);
      quiesce();
      set_clocks(base, base);
      last_slot1 = 3'b111;
      traffic_on = 1;
      run(300);
    end
    quiesce();
    $display("phase A2 done: pulses=%0d steps=%0d", n_pulse1, n_step);
    check(n_pulse1 == 5 && n_step == 4, "phase A2: two more pulses and two more steps");

    // ---- phase B: fast time bits, continuous time
    program_mark_rules(FAST_LSB, FAST_LSB + 1, FAST_LSB + 2);
    set_clocks(longint'(96) * NS_PER_SEC, longint'(96) * NS_PER_SEC);
    traffic_on = 1;
    run(8 * 1024);
    quiesce();

    // ---- phase B2: MP2's clock lags MP1's
    set_clocks(longint'(97) * NS_PER_SEC, longint'(97) * NS_PER_SEC - LAG_NS);
    traffic_on = 1;
    run(6 * 1024);
    quiesce();

    // ---- phase C: export queues overflow
    set_clocks(longint'(98) * NS_PER_SEC, longint'(98) * NS_PER_SEC);
    popping = 0;
    rate_pct = 100;     // a header every cycle
    traffic_on = 1;
    run(12 * 1024);
    quiesce();
    popping = 1;
    run(200);

    check(q1.size() == 0 && q2.size() == 0 && !tv1 && !tv2, "export queues drained");
    check(tdrop1 > 0 && tdrop2 > 0, "export overflow drops counted");
    $display("mechanisms: steps=%0d pulses=%0d guard001=%0d pulse010=%0d guard101=%0d pulse110=%0d",
             n_step, n_pulse1, n_guard[0], n_guard[1], n_guard[2], n_guard[3]);
    $display("  losses=%0d lost_pulses=%0d loss_readings=%0d collections=%0d delays=%0d",
             n_loss, n_lost_pulse, n_loss_intervals, n_collect, n_delay);
    $display("  back_to_back=%0d", n_b2b);
    $display("  unmonitored=%0d non_ipv4=%0d cleared=%0d reprogram=%0d ts_drops=%0d/%0d",
             n_nomatch_flow, n_nonip, n_clear, n_reprog, tdrop1, tdrop2);
    check(n_step > 0, "step happened");
    check(n_pulse1 > 0, "pulse happened");
    for (int i = 0; i < 4; i++) check(n_guard[i] > 0, "MP2 pulse in each detection slot");
    check(n_loss > 0 && n_loss_intervals > 0, "loss happened and was measured");
    check(n_delay > 10, "delay measured");
    check(n_collect > 10, "counters collected");
    check(n_nomatch_flow > 0 && n_nonip > 0, "bypass happened");
    check(n_clear > 0, "marking bit cleared");
    check(n_reprog > 0, "rules rewritten");
    check(n_b2b > 1000, "back-to-back headers at one per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
