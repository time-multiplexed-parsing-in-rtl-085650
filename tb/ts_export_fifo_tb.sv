// ts_export_fifo_tb: checks the timestamp export queue against a queue model.
// Records are pushed and popped at random rates, first with the collector
// slower than the pushes so that the queue fills and drops, then faster. Every
// popped record must be the model's next one, the drop count must match, and
// the level must equal the model's size.
module ts_export_fifo_tb;
  import ampm_pkg::*;
  logic clk = 0, rst_n = 0, push = 0, ready = 0, valid;
  ts_rec_t rec_in = '0, rec_out;
  logic [31:0] drops; logic [4:0] level;
  int checks = 0, failures = 0, m_drops = 0;
  ts_rec_t q[$];

  ts_export_fifo dut (.clk, .rst_n, .push_i(push), .push_rec_i(rec_in), .pop_valid_o(valid),
    .pop_ready_i(ready), .pop_rec_o(rec_out), .drops_o(drops), .level_o(level));

  always #5 clk = ~clk;

  task automatic run(int n, int push_pct, int pop_pct);
    for (int i = 0; i < n; i++) begin
      push = ($urandom % 100) < push_pct;
      rec_in = {$urandom, $urandom, $urandom};
      ready = ($urandom % 100) < pop_pct;
      #1;
      checks++;
      if (valid !== (q.size() != 0) || (valid && rec_out !== q[0]) || level !== 5'(q.size())) begin
        failures++; $display("FAIL valid=%b level=%0d model=%0d", valid, level, q.size());
      end
      @(posedge clk);
      if (valid && ready) void'(q.pop_front());
      if (push) begin
        if (q.size() < 16) q.push_back(rec_in); else m_drops++;
      end
      #1;
    end
    push = 0; ready = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    run(2000, 60, 20);
    run(2000, 30, 80);
    checks++;
    if (drops !== 32'(m_drops) || m_drops == 0) begin failures++; $display("FAIL drops %0d exp %0d", drops, m_drops); end
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
