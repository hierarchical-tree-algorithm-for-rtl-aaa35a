// cell_index_memory: the on-chip table of interaction lists.
//
// Each of the NUM_CELLS entries holds one "cell": a start address in the memory unit
// and a count n, naming the n consecutive j-particles (particles or tree nodes) at
// start .. start+n-1. An interaction list is a run of consecutive entries. Following
// the source, the table has 98304 entries and lives in FPGA block RAM; it is written by
// the host (port A) and read by the cell counter (port B).
//
// Timing: a write takes effect at the clock edge where wr_en is high. A read is
// synchronous like block RAM: rd_data and rd_valid appear one cycle after rd_en.
// The memory itself is not reset (block RAM contents are undefined until written);
// rd_valid is.
module cell_index_memory
  import grape9_pkg::*;
#(
  parameter int unsigned DEPTH = NUM_CELLS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host write port
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  cell_entry_t       wr_data,
  // read port (cell counter)
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output cell_entry_t       rd_data,
  output logic              rd_valid
);

  cell_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

  // an address past the last entry is a host programming error
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> wr_addr < AW'(DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> rd_addr < AW'(DEPTH));

endmodule
