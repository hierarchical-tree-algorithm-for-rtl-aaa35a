// particle_index_counter: expands one cell-index entry into memory-unit addresses.
//
// When an entry (start, n) arrives from the cell-index memory, the counter loads start
// and n and then offers the addresses start, start+1, ..., start+n-1 on a valid/ready
// port to the memory unit, one per accepted transfer. When the last address of the
// entry is accepted (or at once, for an entry with n = 0) it pulses `increment` so that
// the cell counter moves to the next entry. This is the particle index unit of GRAPE-5
// that the source reuses; the valid/ready handshake is this design's choice.
//
// Timing: addr_valid rises the cycle after entry_valid. increment is combinational,
// in the cycle of the last accepted address. An entry arriving while a run is in
// progress is a protocol error (the cell counter never issues one).
module particle_index_counter
  import grape9_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             entry_valid,
  input  cell_entry_t      entry,
  output logic             addr_valid,
  input  logic             addr_ready,
  output logic [IDX_W-1:0] addr,
  output logic             increment,
  output logic             busy
);

  logic [IDX_W-1:0] cur;
  logic [CNT_W-1:0] left;
  logic             active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur    <= '0;
      left   <= '0;
      active <= 1'b0;
    end else if (entry_valid) begin
      cur    <= entry.start;
      left   <= entry.n;
      active <= (entry.n != '0);
    end else if (active && addr_ready) begin
      cur    <= cur + 1'b1;
      left   <= left - 1'b1;
      active <= (left != CNT_W'(1));
    end
  end

  assign addr_valid = active;
  assign addr       = cur;
  assign increment  = (entry_valid && entry.n == '0) ||
                      (active && addr_ready && left == CNT_W'(1));
  assign busy       = active;

  assert property (@(posedge clk) disable iff (!rst_n) entry_valid |-> !active);
  assert property (@(posedge clk) disable iff (!rst_n)
                   addr_valid && !addr_ready |=> addr_valid && $stable(addr));

endmodule
