// interface_unit: the host side of the chip, between the PCI Express link and the
// blocks that the host loads, starts and reads.
//
// The host sees a flat space of 32-bit words (a word address and a word of data per
// access, as a PCIe endpoint's application side would deliver them; the endpoint is not
// part of this design). The address map is this design's choice:
//   region addr[31:28]  contents
//   0  control   word 0 CMD (write bit 0: start), 1 CELL_START, 2 NUM_CELLS, 3 EPS2,
//                4 TSYS, 5 STATUS (read, bit 0 busy)
//   1  i-particle   addr[9:4] index i, addr[3:0] word 0..5 (x0 x1 x2 v0 v1 v2);
//                   written to the pipelines when word 5 arrives
//   2  cell-index   addr[CAW:1] entry, addr[0] 0 start / 1 count; written when the count arrives
//   3  memory unit  addr[27:4] particle index, addr[3:0] word 0..13
//                   (x0 x1 x2 v0 v1 v2 a2_0 a2_1 a2_2 j6_0 j6_1 j6_2 m t); written at word 13
//   4  results   addr[8:3] index i, addr[2:0] 0..2 acc, 3..5 jerk, 6 pot (read)
// The host's steps follow the source: it loads particles and tree nodes into the
// memory unit and the interaction lists into the cell-index memory (step 1), writes
// the predicted i-particles (step 4), writes the list's first entry and length and
// starts (step 4a), polls STATUS and reads the results (step 5). A start also clears
// the accumulators; a start while busy is ignored.
//
// Timing: writes take effect in the cycle after host_wr; a read returns host_rdata with
// host_rvalid one cycle after host_rd. Every staged record is committed in one cycle.
module interface_unit
  import fp_pkg::*;
  import grape9_pkg::*;
#(
  parameter int unsigned DEPTH = NUM_CELLS,
  parameter int unsigned NI_P  = NI,
  localparam int unsigned CAW  = $clog2(DEPTH),
  localparam int unsigned IW   = $clog2(NI_P)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host word bus
  input  logic             host_wr,
  input  logic             host_rd,
  input  logic [31:0]      host_addr,
  input  logic [31:0]      host_wdata,
  output logic [31:0]      host_rdata,
  output logic             host_rvalid,
  // command to the addressing unit
  output logic             start,
  output logic [CAW-1:0]   start_cell,
  output logic [CAW:0]     num_cells,
  input  logic             busy,
  // constants
  output fp_t              eps2,
  output fp_t              tsys,
  output logic             clear,
  // i-particles
  output logic             i_we,
  output logic [IW-1:0]    i_idx,
  output iparticle_t       i_data,
  // cell-index memory
  output logic             cim_wr_en,
  output logic [CAW-1:0]   cim_wr_addr,
  output cell_entry_t      cim_wr_data,
  // memory unit
  output logic             mem_wr_en,
  output logic [IDX_W-1:0] mem_wr_addr,
  output jparticle_t       mem_wr_data,
  // results
  output logic [IW-1:0]    rd_idx,
  input  force_t           rd_force
);

  typedef enum logic [3:0] {
    R_CTRL = 4'd0, R_IPART = 4'd1, R_CELL = 4'd2, R_JMEM = 4'd3, R_RESULT = 4'd4
  } region_e;

  typedef enum logic [3:0] {
    C_CMD = 4'd0, C_CELL_START = 4'd1, C_NUM_CELLS = 4'd2, C_EPS2 = 4'd3,
    C_TSYS = 4'd4, C_STATUS = 4'd5
  } ctrl_e;

  region_e   region;
  fp_t       istage [6];
  fp_t       jstage [JWORDS];
  logic [IDX_W-1:0] cell_start_stage;
  logic      start_q;

  assign region = region_e'(host_addr[31:28]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start       <= 1'b0;
      start_q     <= 1'b0;
      clear       <= 1'b0;
      start_cell  <= '0;
      num_cells   <= '0;
      eps2        <= FP_ZERO;
      tsys        <= FP_ZERO;
      i_we        <= 1'b0;
      cim_wr_en   <= 1'b0;
      mem_wr_en   <= 1'b0;
      host_rvalid <= 1'b0;
    end else begin
      start       <= 1'b0;
      clear       <= 1'b0;
      i_we        <= 1'b0;
      cim_wr_en   <= 1'b0;
      mem_wr_en   <= 1'b0;
      start_q     <= start;
      host_rvalid <= host_rd;
      if (host_wr) begin
        unique case (region)
          R_CTRL: begin
            case (ctrl_e'(host_addr[3:0]))
              C_CMD:        if (host_wdata[0] && !busy && !start && !start_q) begin
                              start <= 1'b1;
                              clear <= 1'b1;
                            end
              C_CELL_START: start_cell <= host_wdata[CAW-1:0];
              C_NUM_CELLS:  num_cells  <= host_wdata[CAW:0];
              C_EPS2:       eps2       <= host_wdata;
              C_TSYS:       tsys       <= host_wdata;
              default: ;
            endcase
          end
          R_IPART: begin
            if (int'(host_addr[3:0]) < 6) istage[host_addr[2:0]] <= host_wdata;
            if (host_addr[3:0] == 4'd5) begin
              i_we   <= 1'b1;
              i_idx  <= host_addr[4 +: IW];
              i_data <= '{x: '{istage[2], istage[1], istage[0]},
                          v: '{host_wdata, istage[4], istage[3]}};
            end
          end
          R_CELL: begin
            if (!host_addr[0]) cell_start_stage <= host_wdata[IDX_W-1:0];
            else begin
              cim_wr_en   <= 1'b1;
              cim_wr_addr <= host_addr[1 +: CAW];
              cim_wr_data <= '{start: cell_start_stage, n: host_wdata[CNT_W-1:0]};
            end
          end
          R_JMEM: begin
            if (int'(host_addr[3:0]) < int'(JWORDS)) jstage[host_addr[3:0]] <= host_wdata;
            if (int'(host_addr[3:0]) == int'(JWORDS) - 1) begin
              mem_wr_en   <= 1'b1;
              mem_wr_addr <= host_addr[4 +: IDX_W];
              mem_wr_data <= '{x:  '{jstage[2], jstage[1], jstage[0]},
                               v:  '{jstage[5], jstage[4], jstage[3]},
                               a2: '{jstage[8], jstage[7], jstage[6]},
                               j6: '{jstage[11], jstage[10], jstage[9]},
                               m:  jstage[12],
                               t:  host_wdata};
            end
          end
          default: ;
        endcase
      end
    end
  end

  // reads: one cycle latency
  logic [2:0] rd_q;
  logic [31:0] ctrl_rdata;

  always_ff @(posedge clk) begin
    if (host_rd) begin
      rd_idx <= host_addr[3 +: IW];
      rd_q   <= host_addr[2:0];
    end
  end

  always_comb begin
    unique case (ctrl_e'(host_addr[3:0]))
      C_CELL_START: ctrl_rdata = 32'(start_cell);
      C_NUM_CELLS:  ctrl_rdata = 32'(num_cells);
      C_EPS2:       ctrl_rdata = eps2;
      C_TSYS:       ctrl_rdata = tsys;
      C_STATUS:     ctrl_rdata = {31'd0, busy || start || start_q};
      default:      ctrl_rdata = '0;
    endcase
  end

  // The result word is selected after the registered index reaches the pipelines.
  logic        rd_is_result;
  logic [31:0] ctrl_rdata_q;

  always_ff @(posedge clk) begin
    if (host_rd) begin
      rd_is_result <= (region == R_RESULT);
      ctrl_rdata_q <= (region == R_CTRL) ? ctrl_rdata : '0;
    end
  end

  always_comb begin
    if (rd_is_result) begin
      unique case (rd_q)
        3'd0, 3'd1, 3'd2: host_rdata = rd_force.acc[rd_q];
        3'd3, 3'd4, 3'd5: host_rdata = rd_force.jerk[rd_q - 3'd3];
        default:          host_rdata = rd_force.pot;
      endcase
    end else begin
      host_rdata = ctrl_rdata_q;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(host_wr && host_rd));

endmodule
