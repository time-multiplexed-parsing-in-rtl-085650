// tod_clock_tb: checks the time-of-day clock against a software model.
// After reset the time must advance by NS_PER_CYCLE nanoseconds per cycle;
// a set must appear on now_o one cycle later; the fraction must wrap at one
// second and carry into Seconds (checked across several set points close to
// the wrap and over a long run).
module tod_clock_tb;
  import ampm_pkg::*;

  localparam int unsigned NSPC = 4;
  logic clk = 0, rst_n = 0, set = 0;
  tstamp_t set_val, now;
  int checks = 0, failures = 0;
  longint unsigned model_ns;   // model time in nanoseconds

  tod_clock #(.NS_PER_CYCLE(NSPC)) dut (.clk, .rst_n, .set_i(set), .set_val_i(set_val), .now_o(now));

  always #5 clk = ~clk;

  function automatic tstamp_t to_ts(longint unsigned ns);
    tstamp_t t;
    t.sec  = SEC_W'(ns / NS_PER_SEC);
    t.frac = FRAC_W'(ns % NS_PER_SEC);
    return t;
  endfunction

  task automatic check_now(string what);
    checks++;
    if (now !== to_ts(model_ns)) begin
      failures++;
      $display("FAIL %s: now=%0d.%09d expected %0d.%09d", what, now.sec, now.frac,
               model_ns / NS_PER_SEC, model_ns % NS_PER_SEC);
    end
  endtask

  initial begin
    set_val = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    model_ns = 0;
    #1 check_now("after reset");
    repeat (20) begin @(posedge clk); #1 model_ns += NSPC; check_now("count"); end
    // set close to the second boundary, several times
    for (int k = 0; k < 4; k++) begin
      longint unsigned base;
      base = longint'(k * 7 + 3) * NS_PER_SEC + NS_PER_SEC - 10 - k * 4;
      set_val = to_ts(base);
      set = 1; @(posedge clk); #1 set = 0; model_ns = base; check_now("set");
      repeat (8) begin @(posedge clk); #1 model_ns += NSPC; check_now("wrap"); end
    end
    // a long run across a boundary from just below it
    set_val = to_ts(longint'(NS_PER_SEC) - 4000);
    set = 1; @(posedge clk); #1 set = 0; model_ns = longint'(NS_PER_SEC) - 4000;
    repeat (2000) begin @(posedge clk); #1 model_ns += NSPC; check_now("long"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
