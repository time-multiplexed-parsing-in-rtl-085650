// tcam_tb: checks the ternary table against a reference model.
// Random rules (random values, masks, some invalid) are written, then random
// keys, and keys built from rule values, are looked up; hit, winning index
// (lowest matching entry) and action must agree with the model. Rules are
// overwritten during the run to check that a write takes effect in the
// next cycle.
module tcam_tb;
  localparam int KW = 12, AW = 6, N = 8, IW = 3;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_valid = 0;
  logic [IW-1:0] wr_idx = '0;
  logic [KW-1:0] wr_value = '0, wr_mask = '0, key = '0;
  logic [AW-1:0] wr_act = '0;
  logic hit; logic [IW-1:0] idx; logic [AW-1:0] act;
  int checks = 0, failures = 0;

  logic          m_valid [N];
  logic [KW-1:0] m_value [N], m_mask [N];
  logic [AW-1:0] m_act [N];

  tcam #(.KEY_W(KW), .ACT_W(AW), .ENTRIES(N)) dut (
    .clk, .rst_n, .wr_en_i(wr_en), .wr_idx_i(wr_idx), .wr_valid_i(wr_valid),
    .wr_value_i(wr_value), .wr_mask_i(wr_mask), .wr_act_i(wr_act),
    .key_i(key), .hit_o(hit), .idx_o(idx), .act_o(act));

  always #5 clk = ~clk;

  task automatic write_rule(int i, logic v, logic [KW-1:0] val, logic [KW-1:0] msk, logic [AW-1:0] a);
    wr_en = 1; wr_idx = IW'(i); wr_valid = v; wr_value = val; wr_mask = msk; wr_act = a;
    @(posedge clk); #1 wr_en = 0;
    m_valid[i] = v; m_value[i] = val; m_mask[i] = msk; m_act[i] = a;
  endtask

  task automatic lookup(logic [KW-1:0] k);
    logic e_hit; int e_idx;
    key = k; #1;
    e_hit = 0; e_idx = 0;
    for (int i = N - 1; i >= 0; i--)
      if (m_valid[i] && (((k ^ m_value[i]) & m_mask[i]) == 0)) begin e_hit = 1; e_idx = i; end
    checks++;
    if (hit !== e_hit || (e_hit && (idx !== IW'(e_idx) || act !== m_act[e_idx]))) begin
      failures++;
      $display("FAIL key=%h hit=%b idx=%0d act=%h exp hit=%b idx=%0d", k, hit, idx, act, e_hit, e_idx);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) m_valid[i] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    lookup('0);                    // empty table: miss
    for (int round = 0; round < 30; round++) begin
      for (int i = 0; i < N; i++) begin
        logic [KW-1:0] msk;
        msk = KW'($urandom) & KW'($urandom);   // sparse masks: overlapping rules
        write_rule(i, ($urandom % 5) != 0, KW'($urandom), msk, AW'($urandom));
      end
      for (int j = 0; j < 40; j++) begin
        int r; r = $urandom % N;
        if (j % 2 == 0) lookup(KW'($urandom));
        else lookup((m_value[r] & m_mask[r]) | (KW'($urandom) & ~m_mask[r]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
