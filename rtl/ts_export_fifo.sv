// ts_export_fifo: queue of timestamp records waiting for the collector.
//
// When a rule's action says 'timestamp', the measurement point records the
// packet's reception time, its counter index, colour and marking bit, and the
// collector later compares the records of the two MPs to get the delay. At
// most one record is pushed per cycle; the collector pops with a valid/ready
// handshake (a record leaves when pop_valid_o and pop_ready_i are both high).
// If the queue is full a pushed record is dropped and drops_o counts it, so
// the packet path never stalls. A push and a pop may happen in one cycle, also
// when the queue is full. Records appear on the pop side the cycle after they
// are pushed.
//
// Follows the paper: timestamps are recorded and exported to a collector.
// Own choices: depth 16, drop-on-full with a drop counter, the handshake.
module ts_export_fifo
  import ampm_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PTR_W = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push_i,
  input  ts_rec_t     push_rec_i,
  output logic        pop_valid_o,
  input  logic        pop_ready_i,
  output ts_rec_t     pop_rec_o,
  output logic [31:0] drops_o,
  output logic [PTR_W:0] level_o
);

  ts_rec_t          mem_q [DEPTH];
  logic [PTR_W-1:0] rd_ptr_q, wr_ptr_q;
  logic [PTR_W:0]   count_q;
  logic [31:0]      drops_q;

  logic do_pop, do_push;
  assign do_pop  = pop_valid_o && pop_ready_i;
  assign do_push = push_i && ((count_q != (PTR_W+1)'(DEPTH)) || do_pop);

  always_ff @(posedge clk) begin
    if (do_push) mem_q[wr_ptr_q] <= push_rec_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      count_q  <= '0;
      drops_q  <= '0;
    end else begin
      if (do_push) wr_ptr_q <= (32'(wr_ptr_q) == DEPTH - 1) ? '0 : wr_ptr_q + 1'b1;
      if (do_pop)  rd_ptr_q <= (32'(rd_ptr_q) == DEPTH - 1) ? '0 : rd_ptr_q + 1'b1;
      count_q <= count_q + (PTR_W+1)'(do_push) - (PTR_W+1)'(do_pop);
      if (push_i && !do_push) drops_q <= drops_q + 1'b1;
    end
  end

  assign pop_valid_o = (count_q != '0);
  assign pop_rec_o   = mem_q[rd_ptr_q];
  assign drops_o     = drops_q;
  assign level_o     = count_q;

  a_pop_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 pop_valid_o && !pop_ready_i |=> pop_valid_o && $stable(pop_rec_o))
    else $error("ts_export_fifo: record changed while waiting");

endmodule
