// force_pipeline_array: the NP real force pipelines of the chip and the j-particle
// buffer that feeds them.
//
// Following the source there are NP = 14 real pipelines, each serving NV = 4 virtual
// pipelines, so NP*NV = 56 i-particles (n_pipe) are computed at once. Every pipeline
// sees the same j-particle: a j-particle taken from the buffer is presented for NV
// cycles, slot 0 .. NV-1, to all NP pipelines together, so one j-particle is consumed
// every NV cycles whether or not all 56 i-slots hold a particle. This is why the source
// finds performance falling when fewer than n_pipe i-particles share an interaction
// list.
//
// The buffer (JBUF_DEPTH entries) sits after the memory unit and the predictor, whose
// latencies are not under this block's control, so it is guarded by credits: the
// address generator may issue a memory read only while can_issue is high, each issued
// read (issue) takes a credit, and each j-particle taken from the buffer returns one.
// The buffer can therefore never overflow and the memory unit never needs to stall.
// Buffer, credits and sequencing are this design's choice; the source does not describe
// how the j-particles reach the pipelines.
//
// i-particle index i maps to pipeline i / NV, slot i % NV. `clear` zeroes every
// accumulator. busy is high while a credit is out, a j-particle is being presented, or
// an interaction is in a pipeline; once it falls all results are final.
module force_pipeline_array
  import fp_pkg::*;
  import grape9_pkg::*;
#(
  parameter int unsigned NP         = NPIPE,
  parameter int unsigned NV         = NVIRT,
  parameter int unsigned JBUF_DEPTH = 16,
  localparam int unsigned IW = $clog2(NP * NV),
  localparam int unsigned SW = (NV > 1) ? $clog2(NV) : 1,
  localparam int unsigned BW = $clog2(JBUF_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fp_t           eps2,
  input  logic          clear,
  // i-particles from the host
  input  logic          i_we,
  input  logic [IW-1:0] i_idx,
  input  iparticle_t    i_data,
  // credits towards the address generator
  output logic          can_issue,
  input  logic          issue,
  // predicted j-particles
  input  logic          jin_valid,
  input  jpred_t        jin,
  // results
  input  logic [IW-1:0] rd_idx,
  output force_t        rd_force,
  output logic          busy
);

  // ---------------- j-particle buffer and credits ----------------
  jpred_t        buf_mem [JBUF_DEPTH];
  logic [BW-1:0] wr_ptr, rd_ptr;
  logic [BW:0]   count;
  logic [BW:0]   credits;
  logic          pop;

  always_ff @(posedge clk) begin
    if (jin_valid) buf_mem[wr_ptr] <= jin;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count   <= '0;
      credits <= (BW+1)'(JBUF_DEPTH);
    end else begin
      if (jin_valid) wr_ptr <= wr_ptr + 1'b1;
      if (pop)       rd_ptr <= rd_ptr + 1'b1;
      count   <= count + (BW+1)'(jin_valid) - (BW+1)'(pop);
      credits <= credits - (BW+1)'(issue) + (BW+1)'(pop);
    end
  end

  assign can_issue = (credits != '0);

  // ---------------- sequencer: each j-particle for NV cycles ----------------
  logic          feeding;
  logic [SW-1:0] slot;
  jpred_t        jcur;
  logic          last_slot;

  assign last_slot = (slot == SW'(NV - 1));
  assign pop       = (count != '0) && (!feeding || last_slot);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      feeding <= 1'b0;
      slot    <= '0;
    end else if (pop) begin
      feeding <= 1'b1;
      slot    <= '0;
    end else if (feeding) begin
      feeding <= !last_slot;
      slot    <= last_slot ? '0 : slot + 1'b1;
    end
    if (pop) jcur <= buf_mem[rd_ptr];
  end

  // ---------------- the pipelines ----------------
  force_t        pipe_force [NP];
  logic [NP-1:0] pipe_busy;

  for (genvar p = 0; p < int'(NP); p++) begin : g_pipe
    force_pipeline #(.NV(NV)) u_pipe (
      .clk, .rst_n, .eps2, .clear,
      .i_we    (i_we && (int'(i_idx) / int'(NV) == p)),
      .i_slot  (SW'(int'(i_idx) % int'(NV))),
      .i_data,
      .j_valid (feeding),
      .j_slot  (slot),
      .j       (jcur),
      .rd_slot (SW'(int'(rd_idx) % int'(NV))),
      .rd_force(pipe_force[p]),
      .busy    (pipe_busy[p])
    );
  end

  assign rd_force = pipe_force[int'(rd_idx) / int'(NV)];
  assign busy     = (credits != (BW+1)'(JBUF_DEPTH)) || feeding || (|pipe_busy);

  assert property (@(posedge clk) disable iff (!rst_n) jin_valid |-> count < (BW+1)'(JBUF_DEPTH) || pop);
  assert property (@(posedge clk) disable iff (!rst_n) issue |-> can_issue);
  assert property (@(posedge clk) disable iff (!rst_n) i_we |-> int'(i_idx) < int'(NP * NV));

endmodule
