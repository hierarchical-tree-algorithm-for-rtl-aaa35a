// memory_unit_model: behavioural stand-in for the memory unit of a GRAPE-9 card (a DDR2
// SDRAM SO-DIMM behind its controller). It is not synthesizable and not part of the
// design; it gives the chip's memory ports something to talk to in simulation.
//
// Records (one j-particle each) are kept in a sparse associative array, so any 24-bit
// index can be used. Writes take effect at once. Reads are accepted when req_ready is
// high (high with probability ready_pct percent each cycle) and answered in order, each
// after lat_min .. lat_max cycles, as a DRAM controller with refresh and bank conflicts
// would. A read of a never-written index returns zero and counts in bad_reads. The
// testbench may change lat_min, lat_max and ready_pct between runs.
module memory_unit_model
  import grape9_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [IDX_W-1:0] req_addr,
  output logic             rsp_valid,
  output jparticle_t       rsp_data,
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_addr,
  input  jparticle_t       wr_data
);

  int lat_min = 4, lat_max = 4, ready_pct = 100;
  int reads = 0, not_ready_cycles = 0, bad_reads = 0;

  jparticle_t       mem [logic [IDX_W-1:0]];
  int               cycle = 0;
  int               due_q [$];
  logic [IDX_W-1:0] addr_q [$];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst_n) begin
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
    end else begin
      if (wr_en) mem[wr_addr] = wr_data;
      if (req_valid && req_ready) begin
        due_q.push_back(cycle + $urandom_range(lat_min, lat_max));
        addr_q.push_back(req_addr);
        reads++;
      end
      if (req_valid && !req_ready) not_ready_cycles++;
      req_ready <= ($urandom_range(99) < ready_pct);
      if (due_q.size() > 0 && due_q[0] <= cycle) begin
        logic [IDX_W-1:0] a;
        void'(due_q.pop_front());
        a = addr_q.pop_front();
        rsp_valid <= 1'b1;
        if (mem.exists(a)) rsp_data <= mem[a];
        else begin
          rsp_data <= '0;
          bad_reads++;
        end
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
