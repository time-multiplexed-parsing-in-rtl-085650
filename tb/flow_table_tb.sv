// flow_table_tb: checks the flow classification lookup.
// Twenty flows are installed with two rules each, one per colour, each rule
// naming its own counter; one flow matches any source address (masked). Then
// packets of installed and unknown flows, with random colours, are looked up
// and the counter index is compared with a list model. One flow's rules are
// removed mid-run and must then miss.
module flow_table_tb;
  import ampm_pkg::*;

  localparam int NF = 20;
  logic clk = 0, rst_n = 0;
  logic wr = 0, wr_valid = 0;
  logic [6:0] wr_idx = '0, wr_cnt = '0, cnt_idx;
  logic [FKEY_W-1:0] wr_value = '0, wr_mask = '0;
  flow_key_t flow = '0; logic color = 0, hit;
  int checks = 0, failures = 0;
  flow_key_t fk [NF];
  logic installed [NF];

  flow_table dut (.clk, .rst_n, .wr_i(wr), .wr_idx_i(wr_idx), .wr_valid_i(wr_valid),
    .wr_value_i(wr_value), .wr_mask_i(wr_mask), .wr_cnt_idx_i(wr_cnt),
    .flow_i(flow), .color_i(color), .hit_o(hit), .cnt_idx_o(cnt_idx));

  always #5 clk = ~clk;

  task automatic put(int r, logic v, flow_key_t k, logic c, logic wild_src, int cnt);
    flow_key_t m; m = '1; if (wild_src) m.src = '0;
    wr = 1; wr_idx = 7'(r); wr_valid = v; wr_value = {k, c}; wr_mask = {m, 1'b1}; wr_cnt = 7'(cnt);
    @(posedge clk); #1 wr = 0;
  endtask

  task automatic probe(int f, logic known);
    int e_cnt; logic e_hit;
    color = $urandom % 2;
    if (known) flow = fk[f];
    else begin flow.src = $urandom; flow.dst = $urandom; flow.proto = 8'd99; end
    if (known && f == 3) flow.src = $urandom;     // flow 3 has a wildcard source
    #1;
    e_hit = known && installed[f];
    e_cnt = 2 * f + color;
    checks++;
    if (hit !== e_hit || (e_hit && cnt_idx !== 7'(e_cnt))) begin
      failures++;
      $display("FAIL flow %0d known=%b color=%b hit=%b cnt=%0d", f, known, color, hit, cnt_idx);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      fk[f].src = 32'h0a000000 + 32'(f); fk[f].dst = 32'h0b000000 + 32'(f * 3);
      fk[f].proto = (f % 2) ? 8'd17 : 8'd6;
      installed[f] = 1;
      put(2 * f,     1, fk[f], 0, f == 3, 2 * f);
      put(2 * f + 1, 1, fk[f], 1, f == 3, 2 * f + 1);
    end
    for (int i = 0; i < 400; i++) probe($urandom % NF, ($urandom % 4) != 0);
    installed[7] = 0;
    put(14, 0, fk[7], 0, 0, 0);
    put(15, 0, fk[7], 1, 0, 0);
    for (int i = 0; i < 400; i++) probe($urandom % NF, ($urandom % 4) != 0);
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
