// counter_bank: the per-flow colour packet counters.
//
// Every monitored flow has counter0 and counter1; the colour of a packet
// (the step marking) chooses between them, so while one colour is in use the
// other counter is stable and can be collected. The bank holds COUNTERS
// packet counters of CNT_W bits. inc_i adds one to counter inc_idx_i at the
// clock edge, once per cycle at most, so counting keeps up with one packet per
// cycle. The collector reads counter rd_idx_i with rd_i and gets the value on
// rd_data_o with rd_valid_o after the next clock edge; a read in the same cycle as an
// increment of that counter returns the value before the increment. wr_i
// presets a counter (for example to clear it); an increment in the same cycle
// to the same counter is lost to the write. Reset clears all counters.
//
// Follows the paper: two counters per flow, counted per colour, read by a
// collector. Own choices: packet (not byte) counts, 64-bit width, 128
// counters, the read and preset ports, counters that are never cleared by a
// read (the collector takes differences of successive readings).
module counter_bank #(
  parameter int unsigned COUNTERS = 128,
  parameter int unsigned CNT_W    = 64,
  localparam int unsigned IDX_W   = $clog2(COUNTERS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inc_i,
  input  logic [IDX_W-1:0] inc_idx_i,
  input  logic             rd_i,
  input  logic [IDX_W-1:0] rd_idx_i,
  output logic             rd_valid_o,
  output logic [CNT_W-1:0] rd_data_o,
  input  logic             wr_i,
  input  logic [IDX_W-1:0] wr_idx_i,
  input  logic [CNT_W-1:0] wr_data_i
);

  logic [CNT_W-1:0] cnt_q [COUNTERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < COUNTERS; i++) cnt_q[i] <= '0;
    end else begin
      if (inc_i) cnt_q[inc_idx_i] <= cnt_q[inc_idx_i] + 1'b1;
      if (wr_i)  cnt_q[wr_idx_i]  <= wr_data_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid_o <= 1'b0;
      rd_data_o  <= '0;
    end else begin
      rd_valid_o <= rd_i;
      if (rd_i) rd_data_o <= cnt_q[rd_idx_i];
    end
  end

endmodule
