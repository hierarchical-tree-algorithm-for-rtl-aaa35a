// indirect_memory_addressing_unit: turns an interaction-list command into the stream of
// memory-unit addresses of the j-particles that list names.
//
// It is the chain drawn in the source's block diagram: the cell counter addresses the
// cell-index memory, whose (start, n) output drives the particle index counter, which
// emits the memory addresses and feeds "increment" back to the cell counter. Storing
// runs (start, n) instead of every index keeps the lists small enough for on-chip
// memory; the host arranges particles in Peano-Hilbert order and stores each group's
// tree nodes consecutively so that runs are long.
//
// Interface: the host writes entries through the cim_wr_* port and starts a list with
// a one-cycle `start`, giving the first entry and the number of entries. Addresses leave
// on a valid/ready port. busy stays high until the last address of the list has been
// accepted. Per entry there is a gap of two cycles (entry read) before its first address.
module indirect_memory_addressing_unit
  import grape9_pkg::*;
#(
  parameter int unsigned DEPTH = NUM_CELLS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host writes to the cell-index memory
  input  logic             cim_wr_en,
  input  logic [AW-1:0]    cim_wr_addr,
  input  cell_entry_t      cim_wr_data,
  // command
  input  logic             start,
  input  logic [AW-1:0]    start_cell,
  input  logic [AW:0]      num_cells,
  output logic             busy,
  // address stream to the memory unit
  output logic             addr_valid,
  input  logic             addr_ready,
  output logic [IDX_W-1:0] addr
);

  logic          rd_en, rd_valid, increment, cc_busy, pic_busy;
  logic [AW-1:0] rd_addr;
  cell_entry_t   rd_data;

  cell_counter #(.DEPTH(DEPTH)) u_cell_counter (
    .clk, .rst_n, .start, .start_cell, .num_cells, .increment,
    .rd_en, .rd_addr, .busy(cc_busy)
  );

  cell_index_memory #(.DEPTH(DEPTH)) u_cell_index_memory (
    .clk, .rst_n,
    .wr_en(cim_wr_en), .wr_addr(cim_wr_addr), .wr_data(cim_wr_data),
    .rd_en, .rd_addr, .rd_data, .rd_valid
  );

  particle_index_counter u_particle_index_counter (
    .clk, .rst_n,
    .entry_valid(rd_valid), .entry(rd_data),
    .addr_valid, .addr_ready, .addr, .increment, .busy(pic_busy)
  );

  assign busy = cc_busy || pic_busy;

endmodule
