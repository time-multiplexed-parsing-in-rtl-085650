// counter_bank_tb: checks the colour counters against an array model.
// Random increments (one per cycle at most), presets and reads are issued
// together; every read must return, one cycle later, the model's value from
// before that cycle's update. Reads return data right after the clock edge
// that samples rd_i. A burst of back-to-back increments of one
// counter checks counting at one packet per cycle.
module counter_bank_tb;
  localparam int N = 128, W = 64;
  logic clk = 0, rst_n = 0;
  logic inc = 0, rd = 0, wr = 0;
  logic [6:0] inc_idx = '0, rd_idx = '0, wr_idx = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic rd_valid;
  int checks = 0, failures = 0;
  longint unsigned model [N];

  counter_bank dut (.clk, .rst_n, .inc_i(inc), .inc_idx_i(inc_idx), .rd_i(rd), .rd_idx_i(rd_idx),
    .rd_valid_o(rd_valid), .rd_data_o(rd_data), .wr_i(wr), .wr_idx_i(wr_idx), .wr_data_i(wr_data));

  always #5 clk = ~clk;

  task automatic cycle();
    longint unsigned e;
    e = model[rd_idx];
    @(posedge clk);
    if (inc) model[inc_idx] = model[inc_idx] + 1;
    if (wr)  model[wr_idx]  = wr_data;
    #1;
    if (rd) begin
      checks++;
      if (!rd_valid || rd_data !== e) begin
        failures++; $display("FAIL read %h exp %h", rd_data, e);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) model[i] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < N; i++) begin rd = 1; rd_idx = 7'(i); cycle(); end
    for (int i = 0; i < 4000; i++) begin
      inc = ($urandom % 4) != 0; inc_idx = 7'($urandom % 8);
      wr = ($urandom % 50) == 0; wr_idx = 7'($urandom % 8); wr_data = {$urandom, $urandom};
      rd = ($urandom % 2); rd_idx = 7'($urandom % 8);
      cycle();
    end
    wr = 0; rd = 0;
    inc = 1; inc_idx = 7'd100;
    repeat (500) cycle();
    inc = 0; rd = 1; rd_idx = 7'd100; cycle(); rd = 0; cycle();
    checks++; if (model[100] != 500) begin failures++; $display("FAIL burst model"); end
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
