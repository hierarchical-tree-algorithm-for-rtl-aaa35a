// cell_counter: steps through the cell-index memory for one interaction list.
//
// The host starts a force calculation by giving the first entry of a group's
// interaction list (start_cell) and the number of entries in it (num_cells); this
// follows the source, where the host sends "the start address and count number of the
// cell counter". The counter then reads entry start_cell, and each time the particle
// index counter reports with `increment` that it has finished the current entry, the
// counter adds one and reads the next, until num_cells entries have been used.
//
// Timing: rd_en is a one-cycle pulse, registered: one cycle after start (when
// num_cells is non-zero) and one cycle after each increment except the last. busy is
// high from the cycle after start until the cycle after the last increment. A start
// while busy restarts the counter.
module cell_counter
  import grape9_pkg::*;
#(
  parameter int unsigned DEPTH = NUM_CELLS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] start_cell,
  input  logic [AW:0]   num_cells,
  input  logic          increment,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  output logic          busy
);

  logic [AW-1:0] cnt;
  logic [AW:0]   left;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt   <= '0;
      left  <= '0;
      rd_en <= 1'b0;
    end else if (start) begin
      cnt   <= start_cell;
      left  <= num_cells;
      rd_en <= (num_cells != '0);
    end else if (increment && left != '0) begin
      cnt   <= cnt + 1'b1;
      left  <= left - 1'b1;
      rd_en <= (left > 1);
    end else begin
      rd_en <= 1'b0;
    end
  end

  assign rd_addr = cnt;
  assign busy    = (left != '0);

  assert property (@(posedge clk) disable iff (!rst_n) increment |-> busy);

endmodule
