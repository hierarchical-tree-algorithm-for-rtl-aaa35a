// force_pipeline: one real GRAPE force pipeline serving NV virtual pipelines.
//
// For i-particle i and j-particle j (position x, velocity v, mass m) it computes
//     dx = xj - xi,  dv = vj - vi,  r2 = |dx|^2 + eps2,  rv = dx . dv
//     acc  += m dx / r2^(3/2)
//     jerk += m (dv - 3 (rv / r2) dx) / r2^(3/2)
//     pot  -= m / r2^(1/2)
// the acceleration, its time derivative and the potential of the Hermite scheme. As in
// the source (and GRAPE-6), one real pipeline stands for NV = 4 virtual ones: it holds
// NV i-particles and receives each j-particle for NV consecutive cycles, one cycle per
// i-particle, so one real pipeline performs one interaction per clock. A j-particle at
// the same position as the i-particle with eps2 = 0 contributes nothing (1/sqrt(0) is
// taken as 0), so a group's particles may appear in its own list.
//
// Interface: i-particles are written through i_we/i_slot/i_data; `clear` zeroes all NV
// accumulators; j_valid/j_slot/j deliver the j stream (at most one per cycle, any slot
// order); rd_slot selects the accumulated result shown on rd_force. eps2 is the squared
// softening length, common to all i-particles (the source uses one softening eps = 1/N).
//
// Timing: fully pipelined, LAT = 6 cycles from j_valid to the updated accumulator; busy
// is high while an interaction is in flight. The stage split is this design's choice.
module force_pipeline
  import fp_pkg::*;
  import grape9_pkg::*;
#(
  parameter int unsigned NV = NVIRT,
  localparam int unsigned SW = (NV > 1) ? $clog2(NV) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fp_t           eps2,
  input  logic          clear,
  input  logic          i_we,
  input  logic [SW-1:0] i_slot,
  input  iparticle_t    i_data,
  input  logic          j_valid,
  input  logic [SW-1:0] j_slot,
  input  jpred_t        j,
  input  logic [SW-1:0] rd_slot,
  output force_t        rd_force,
  output logic          busy
);

  localparam int unsigned LAT = 6;

  iparticle_t ip [NV];
  force_t     acc [NV];

  // per-stage slot tags and valids
  logic [SW-1:0]  slot [LAT];
  logic [LAT-1:0] vld;

  // stage 1
  fp_t [2:0] dx1, dv1;
  fp_t       m1;
  // stage 2
  fp_t [2:0] dx2, dv2;
  fp_t       m2, r2_2, rv2;
  // stage 3
  fp_t [2:0] dx3, dv3;
  fp_t       m3, rv3, rinv3;
  // stage 4
  fp_t [2:0] dx4, dv4;
  fp_t       mr3_4, mr_4, alpha4;
  // stage 5: the terms
  force_t    term5;

  always_ff @(posedge clk) begin
    if (i_we) ip[i_slot] <= i_data;
  end

  always_ff @(posedge clk) begin
    // stage 1: differences
    m1 <= j.m;
    for (int k = 0; k < 3; k++) begin
      dx1[k] <= fp_sub(j.x[k], ip[j_slot].x[k]);
      dv1[k] <= fp_sub(j.v[k], ip[j_slot].v[k]);
    end
    // stage 2: squared distance and r.v
    dx2  <= dx1;
    dv2  <= dv1;
    m2   <= m1;
    r2_2 <= fp_add(fp_add(fp_mul(dx1[0], dx1[0]), fp_mul(dx1[1], dx1[1])),
                   fp_add(fp_mul(dx1[2], dx1[2]), eps2));
    rv2  <= fp_add(fp_add(fp_mul(dx1[0], dv1[0]), fp_mul(dx1[1], dv1[1])),
                   fp_mul(dx1[2], dv1[2]));
    // stage 3: inverse square root
    dx3   <= dx2;
    dv3   <= dv2;
    m3    <= m2;
    rv3   <= rv2;
    rinv3 <= fp_rsqrt(r2_2);
    // stage 4: scale factors
    dx4    <= dx3;
    dv4    <= dv3;
    mr_4   <= fp_mul(m3, rinv3);
    mr3_4  <= fp_mul(fp_mul(m3, rinv3), fp_mul(rinv3, rinv3));
    alpha4 <= fp_mul(FP_THREE, fp_mul(rv3, fp_mul(rinv3, rinv3)));
    // stage 5: per-interaction terms
    for (int k = 0; k < 3; k++) begin
      term5.acc[k]  <= fp_mul(mr3_4, dx4[k]);
      term5.jerk[k] <= fp_mul(mr3_4, fp_sub(dv4[k], fp_mul(alpha4, dx4[k])));
    end
    term5.pot <= fp_neg(mr_4);
  end

  // stage 6: accumulate into the slot's registers
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int s = 0; s < int'(NV); s++) acc[s] <= '0;
    end else if (vld[LAT-2]) begin
      for (int k = 0; k < 3; k++) begin
        acc[slot[LAT-2]].acc[k]  <= fp_add(acc[slot[LAT-2]].acc[k],  term5.acc[k]);
        acc[slot[LAT-2]].jerk[k] <= fp_add(acc[slot[LAT-2]].jerk[k], term5.jerk[k]);
      end
      acc[slot[LAT-2]].pot <= fp_add(acc[slot[LAT-2]].pot, term5.pot);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) vld <= '0;
    else                 vld <= {vld[LAT-2:0], j_valid};
    slot[0] <= j_slot;
    for (int s = 1; s < int'(LAT); s++) slot[s] <= slot[s-1];
  end

  assign rd_force = acc[rd_slot];
  assign busy     = |vld[LAT-2:0];

  assert property (@(posedge clk) disable iff (!rst_n) j_valid |-> int'(j_slot) < int'(NV));
  assert property (@(posedge clk) disable iff (!rst_n) clear |-> !j_valid);

endmodule
