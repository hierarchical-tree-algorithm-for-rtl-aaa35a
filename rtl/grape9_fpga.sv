// grape9_fpga: the FPGA device of one GRAPE-9 card, wired as in the source's overall
// structure: interface unit, indirect memory addressing unit, predictor pipeline and
// force pipelines, with the DDR2 SDRAM memory unit outside the chip.
//
// One force calculation (step 5 of the host's loop) runs like this. The host has loaded
// all particles and tree nodes into the memory unit, the interaction lists into the
// cell-index memory and up to 56 predicted i-particles into the force pipelines. It
// writes the first cell-index entry and the entry count of the i-particles' group and
// starts. The indirect memory addressing unit walks those entries and issues the memory
// address of every j-particle in the list; the memory unit returns the records in
// order; the predictor brings each to the system time; the force pipelines accumulate
// acceleration, jerk and potential of all i-particles. When STATUS shows not busy the
// host reads the results.
//
// The memory unit is a DDR2 SO-DIMM with its controller, not part of this design, so its
// ports are ports of this module: a read request (mem_req_valid/ready, mem_req_addr),
// in-order read data (mem_rsp_valid, mem_rsp_data) that the memory side may deliver
// after any latency, and a write port used when the host loads records. Read requests
// are issued only while the force pipelines' j-particle buffer has room reserved for
// the answer, so the read data path never stalls.
module grape9_fpga
  import fp_pkg::*;
  import grape9_pkg::*;
#(
  parameter int unsigned DEPTH      = NUM_CELLS,
  parameter int unsigned NP         = NPIPE,
  parameter int unsigned NV         = NVIRT,
  parameter int unsigned JBUF_DEPTH = 16,
  localparam int unsigned CAW = $clog2(DEPTH),
  localparam int unsigned IW  = $clog2(NP * NV)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host word bus (application side of the PCIe endpoint)
  input  logic             host_wr,
  input  logic             host_rd,
  input  logic [31:0]      host_addr,
  input  logic [31:0]      host_wdata,
  output logic [31:0]      host_rdata,
  output logic             host_rvalid,
  // memory unit: reads
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic [IDX_W-1:0] mem_req_addr,
  input  logic             mem_rsp_valid,
  input  jparticle_t       mem_rsp_data,
  // memory unit: writes from the host
  output logic             mem_wr_en,
  output logic [IDX_W-1:0] mem_wr_addr,
  output jparticle_t       mem_wr_data
);

  logic           start, clear, busy, imau_busy, force_busy;
  logic [CAW-1:0] start_cell;
  logic [CAW:0]   num_cells;
  fp_t            eps2, tsys;
  logic           i_we;
  logic [IW-1:0]  i_idx, rd_idx;
  iparticle_t     i_data;
  force_t         rd_force;
  logic           cim_wr_en;
  logic [CAW-1:0] cim_wr_addr;
  cell_entry_t    cim_wr_data;
  logic           addr_valid, addr_ready, can_issue, issue;
  logic           pred_valid;
  jpred_t         pred;

  interface_unit #(.DEPTH(DEPTH), .NI_P(NP * NV)) u_interface_unit (
    .clk, .rst_n,
    .host_wr, .host_rd, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .start, .start_cell, .num_cells, .busy,
    .eps2, .tsys, .clear,
    .i_we, .i_idx, .i_data,
    .cim_wr_en, .cim_wr_addr, .cim_wr_data,
    .mem_wr_en, .mem_wr_addr, .mem_wr_data,
    .rd_idx, .rd_force
  );

  indirect_memory_addressing_unit #(.DEPTH(DEPTH)) u_imau (
    .clk, .rst_n,
    .cim_wr_en, .cim_wr_addr, .cim_wr_data,
    .start, .start_cell, .num_cells, .busy(imau_busy),
    .addr_valid, .addr_ready, .addr(mem_req_addr)
  );

  assign mem_req_valid = addr_valid && can_issue;
  assign addr_ready    = mem_req_ready && can_issue;
  assign issue         = addr_valid && addr_ready;

  predictor_pipeline u_predictor (
    .clk, .rst_n, .tsys,
    .in_valid(mem_rsp_valid), .in_p(mem_rsp_data),
    .out_valid(pred_valid), .out_p(pred)
  );

  force_pipeline_array #(.NP(NP), .NV(NV), .JBUF_DEPTH(JBUF_DEPTH)) u_force (
    .clk, .rst_n, .eps2, .clear,
    .i_we, .i_idx, .i_data,
    .can_issue, .issue,
    .jin_valid(pred_valid), .jin(pred),
    .rd_idx, .rd_force, .busy(force_busy)
  );

  assign busy = imau_busy || force_busy;

endmodule
