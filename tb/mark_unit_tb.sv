// mark_unit_tb: checks the marking lookup against the paper's rule tables,
// written here as plain if/else models independent of the table contents.
// Both roles are run: the initiator (Table 6, with the Reg state carried
// from packet to packet) and the terminator (Table 7). Packets get random
// timestamps spread over the eight time slots Seconds[4:2] and random commit
// strobes. The defaults must be loaded six cycles after reset. Finally the
// step-marking rules of Table 1 are written over the initiator's table with
// the time bit moved to Seconds[0] (an interval of one second), and checked;
// then the pulse-marking rules of Table 3, with Reg, and the terminator's
// step and pulse rules of Tables 2 and 4.
module mark_unit_tb;
  import ampm_pkg::*;

  logic clk = 0, rst_n = 0;
  role_e role = ROLE_INIT;
  logic init_done;
  logic sw_wr = 0, sw_valid = 0;
  logic [2:0] sw_idx = '0;
  logic [MKEY_W-1:0] sw_value = '0, sw_mask = '0;
  mark_act_t sw_act = '0;
  tstamp_t ts = '0;
  logic mark_in = 0, commit = 0;
  logic hit; logic [2:0] rule; mark_act_t act; logic reg_o;
  int checks = 0, failures = 0;
  int pulses = 0;

  mark_unit dut (.clk, .rst_n, .role_i(role), .init_done_o(init_done),
    .sw_wr_i(sw_wr), .sw_idx_i(sw_idx), .sw_valid_i(sw_valid), .sw_value_i(sw_value),
    .sw_mask_i(sw_mask), .sw_act_i(sw_act), .ts_i(ts), .mark_i(mark_in),
    .hit_o(hit), .rule_o(rule), .act_o(act), .reg_o(reg_o), .commit_i(commit));

  always #5 clk = ~clk;

  logic m_reg;

  task automatic expect_act(mark_act_t e, string what);
    checks++;
    if (!hit || act !== e) begin
      failures++;
      $display("FAIL %s: slot=%b state=%b hit=%b act=%b exp=%b", what, ts.sec[4:2],
               (role == ROLE_INIT) ? m_reg : mark_in, hit, act, e);
    end
  endtask

  // Table 6, muxed marking at the initiating MP.
  function automatic mark_act_t init_model(logic [2:0] tb, logic r);
    if (tb == 3'b010) return r ? mk_act(1,0,1,1,1,0,0) : mk_act(1,1,1,1,1,0,1);
    if (!tb[2])       return mk_act(1,0,1,0,1,0,0);
    if (tb == 3'b110) return r ? mk_act(1,0,1,0,1,1,1) : mk_act(1,1,1,0,1,1,0);
    return mk_act(1,1,1,1,1,1,0);
  endfunction

  // Table 7, muxed marking at the terminating MP.
  function automatic mark_act_t term_model(logic [2:0] tb, logic m);
    if ((tb == 3'b001 || tb == 3'b010) && m)  return mk_act(0,0,0,0,1,0,1);
    if ((tb == 3'b101 || tb == 3'b110) && !m) return mk_act(0,0,0,0,1,1,1);
    return mk_act(0,0,0,0,1,m,0);
  endfunction

  task automatic do_reset(role_e r);
    role = r; rst_n = 0; m_reg = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int c = 0; c < 6; c++) begin
      checks++; if (init_done) begin failures++; $display("FAIL init_done early at %0d", c); end
      @(posedge clk); #1;
    end
    checks++; if (!init_done) begin failures++; $display("FAIL init_done late"); end
  endtask

  task automatic run_packets(int n);
    logic [47:0] sec = 48'd100;
    for (int i = 0; i < n; i++) begin
      // walk forward in time, 0, 2 or 4 seconds at a time (slots are 4 s)
      if ($urandom % 4 == 0) sec = sec + 48'(($urandom % 3) * 2);
      ts.sec = sec; ts.frac = FRAC_W'($urandom % NS_PER_SEC);
      mark_in = $urandom % 2;
      commit  = ($urandom % 8) != 0;
      #1;
      if (role == ROLE_INIT) begin
        mark_act_t e; e = init_model(sec[4:2], m_reg);
        expect_act(e, "table 6");
        checks++; if (reg_o !== m_reg) begin failures++; $display("FAIL Reg=%b exp %b", reg_o, m_reg); end
        if (commit) m_reg = e.reg_next;
        if (e.ts_en && commit) pulses++;
      end else begin
        expect_act(term_model(sec[4:2], mark_in), "table 7");
      end
      @(posedge clk); #1;
    end
    commit = 0;
  endtask

  initial begin
    do_reset(ROLE_INIT);
    run_packets(600);
    checks++; if (pulses == 0) begin failures++; $display("FAIL no pulse seen"); end
    do_reset(ROLE_TERM);
    run_packets(600);
    // Table 1 (step marking) with the time bit at Seconds[0], initiator role
    do_reset(ROLE_INIT);
    for (int i = 0; i < 8; i++) begin
      sw_wr = 1; sw_idx = 3'(i); sw_valid = (i < 2);
      sw_value = (MKEY_W'(i & 1) << (SEC_LSB + 1));
      sw_mask  = (MKEY_W'(1) << (SEC_LSB + 1));
      sw_act   = (i == 0) ? mk_act(1,0,0,0,1,0,0) : mk_act(1,1,0,0,1,1,0);
      @(posedge clk); #1;
    end
    sw_wr = 0;
    for (int i = 0; i < 200; i++) begin
      ts.sec = 48'($urandom); ts.frac = FRAC_W'($urandom % NS_PER_SEC); #1;
      expect_act(ts.sec[0] ? mk_act(1,1,0,0,1,1,0) : mk_act(1,0,0,0,1,0,0), "table 1");
      checks++; if (rule !== 3'(ts.sec[0])) begin failures++; $display("FAIL rule index"); end
      @(posedge clk); #1;
    end
    // Table 3 (pulse marking, initiator), time bit Seconds[0]:
    // key {TimeBit, Reg}; a pulse where TimeBit differs from Reg.
    do_reset(ROLE_INIT);
    for (int i = 0; i < 8; i++) begin
      sw_wr = 1; sw_idx = 3'(i); sw_valid = (i < 4);
      sw_value = (MKEY_W'(!(i == 2 || i == 3)) << (SEC_LSB + 1)) | MKEY_W'(i == 1 || i == 2);
      sw_mask  = (MKEY_W'(1) << (SEC_LSB + 1)) | MKEY_W'(1);
      case (i)
        0: sw_act = mk_act(1, 1, 1, 1, 0, 0, 1);
        1: sw_act = mk_act(1, 0, 1, 1, 0, 0, 0);
        2: sw_act = mk_act(1, 1, 1, 0, 0, 0, 1);
        default: sw_act = mk_act(1, 0, 1, 0, 0, 0, 0);
      endcase
      @(posedge clk); #1;
    end
    sw_wr = 0;
    m_reg = 0;
    begin
      logic [47:0] sec = 48'd7; int np = 0;
      for (int i = 0; i < 300; i++) begin
        logic tbit;
        if ($urandom % 5 == 0) sec++;
        ts.sec = sec; ts.frac = FRAC_W'($urandom % NS_PER_SEC); commit = 1; #1;
        tbit = sec[0];
        expect_act(mk_act(1, tbit ^ m_reg, 1, tbit, 0, 0, tbit ^ m_reg), "table 3");
        if (tbit ^ m_reg) np++;
        m_reg = tbit;
        @(posedge clk); #1;
      end
      commit = 0;
      checks++; if (np < 10) begin failures++; $display("FAIL too few table 3 pulses"); end
    end
    // Tables 2 and 4 (step and pulse marking, terminator): MarkBit=0 ->
    // counter0, MarkBit=1 -> counter1 and timestamp (one table, two rules).
    do_reset(ROLE_TERM);
    for (int i = 0; i < 8; i++) begin
      sw_wr = 1; sw_idx = 3'(i); sw_valid = (i < 2);
      sw_value = MKEY_W'(i & 1); sw_mask = MKEY_W'(1);
      sw_act = (i == 0) ? mk_act(0, 0, 0, 0, 1, 0, 0) : mk_act(0, 0, 0, 0, 1, 1, 1);
      @(posedge clk); #1;
    end
    sw_wr = 0;
    for (int i = 0; i < 200; i++) begin
      ts = {$urandom, $urandom, $urandom}; mark_in = $urandom % 2; #1;
      expect_act(mark_in ? mk_act(0, 0, 0, 0, 1, 1, 1) : mk_act(0, 0, 0, 0, 1, 0, 0), "tables 2/4");
      @(posedge clk); #1;
    end
    // Table 4 alone: a single rule, MarkBit=0 misses
    sw_wr = 1; sw_idx = 3'd0; sw_valid = 0; @(posedge clk); #1; sw_wr = 0;
    for (int i = 0; i < 100; i++) begin
      mark_in = $urandom % 2; #1;
      checks++;
      if (hit !== mark_in || (hit && act !== mk_act(0, 0, 0, 0, 1, 1, 1))) begin
        failures++; $display("FAIL table 4: mark=%b hit=%b", mark_in, hit);
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
