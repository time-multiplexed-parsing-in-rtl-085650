// tod_clock: time-of-day clock that stamps packets as they are received.
//
// The AM-PM design matches on the timestamp of every received packet, so each
// measurement point needs a running clock with a Seconds field and a Second
// Fraction field. This counter keeps nanoseconds in the fraction: every clock
// cycle it adds NS_PER_CYCLE, and when the fraction reaches one second it
// wraps and Seconds advances. Software that runs a time-synchronisation
// protocol (PTP in the paper's hardware experiment) sets the time with set_i:
// the value on set_val_i appears on now_o in the next cycle. Reset clears the
// time to zero, as a clock counting time since power-up does.
//
// Follows the paper: two-field timestamp, synchronised to a common time.
// Own choices: nanosecond fraction, 48/32-bit widths, 4 ns per cycle
// (a 250 MHz core clock), step-style setting without frequency trimming.
module tod_clock
  import ampm_pkg::*;
#(
  parameter int unsigned NS_PER_CYCLE = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    set_i,       // load set_val_i as the current time
  input  tstamp_t set_val_i,
  output tstamp_t now_o
);

  tstamp_t now_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now_q <= '0;
    end else if (set_i) begin
      now_q <= set_val_i;
    end else if (now_q.frac >= FRAC_W'(NS_PER_SEC - NS_PER_CYCLE)) begin
      now_q.frac <= now_q.frac + FRAC_W'(NS_PER_CYCLE) - FRAC_W'(NS_PER_SEC);
      now_q.sec  <= now_q.sec + 1'b1;
    end else begin
      now_q.frac <= now_q.frac + FRAC_W'(NS_PER_CYCLE);
    end
  end

  assign now_o = now_q;

endmodule
