// predictor_pipeline: brings each j-particle read from the memory unit to the present
// system time before it enters the force pipelines.
//
// The memory unit keeps, for each particle or tree node, its position x, velocity v,
// a2 = a/2, j6 = (da/dt)/6 and the time t at which those were valid. With dt = tsys - t
// the pipeline forms the Hermite-scheme Taylor predictions
//     xp = x + dt (v + dt (a2 + dt j6))
//     vp = v + dt (2 a2 + dt 3 j6)
// in Horner form, and passes the mass on. The source names a single predictor pipeline
// next to the force pipelines, as on the GRAPE-6 chip, but does not give its insides:
// the stored coefficients, the Horner form and the number format are this design's.
//
// Timing: fully pipelined, one particle per cycle, fixed latency of LAT = 4 cycles from
// in_valid to out_valid, no stall. tsys must be held steady while particles flow.
module predictor_pipeline
  import fp_pkg::*;
  import grape9_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  fp_t        tsys,
  input  logic       in_valid,
  input  jparticle_t in_p,
  output logic       out_valid,
  output jpred_t     out_p
);

  localparam int unsigned LAT = 4;

  // stage 1: dt
  fp_t [2:0]  x1, v1, a2_1, j6_1;
  fp_t        dt1, m1;
  // stage 2: inner Horner terms
  fp_t [2:0]  x2, v2;
  fp_t        dt2, m2;
  fp_t [2:0]  h2, g2;
  // stage 3: velocity and second position term
  fp_t [2:0]  x3, xh3, vp3;
  fp_t        dt3, m3;
  logic [LAT-1:0] vld;

  always_ff @(posedge clk) begin
    // stage 1
    x1   <= in_p.x;
    v1   <= in_p.v;
    a2_1 <= in_p.a2;
    j6_1 <= in_p.j6;
    m1   <= in_p.m;
    dt1 <= fp_sub(tsys, in_p.t);
    // stage 2
    x2  <= x1;
    v2  <= v1;
    m2  <= m1;
    dt2 <= dt1;
    for (int k = 0; k < 3; k++) begin
      h2[k] <= fp_add(a2_1[k], fp_mul(dt1, j6_1[k]));
      g2[k] <= fp_add(fp_mul(FP_TWO, a2_1[k]), fp_mul(dt1, fp_mul(FP_THREE, j6_1[k])));
    end
    // stage 3
    dt3 <= dt2;
    m3  <= m2;
    x3  <= x2;
    for (int k = 0; k < 3; k++) begin
      xh3[k] <= fp_add(v2[k], fp_mul(dt2, h2[k]));
      vp3[k] <= fp_add(v2[k], fp_mul(dt2, g2[k]));
    end
    // stage 4
    out_p.m <= m3;
    for (int k = 0; k < 3; k++) begin
      out_p.x[k] <= fp_add(x3[k], fp_mul(dt3, xh3[k]));
      out_p.v[k] <= vp3[k];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end

  assign out_valid = vld[LAT-1];

endmodule
