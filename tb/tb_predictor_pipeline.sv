// tb_predictor_pipeline: streams random particle records (positions around 1, velocities,
// accelerations and jerks of mixed sign, times a little before the system time) through
// the predictor, mostly back to back with random gaps, and compares position, velocity
// and mass with the Taylor predictions computed in double precision from the same
// quantised inputs. Tolerance is 2^-20 of the sum of the magnitudes of the terms. It
// also checks the fixed latency of 4 cycles and that every input produces one output.
module tb_predictor_pipeline;
  import fp_pkg::*;
  import grape9_pkg::*;
  import fp_ref_pkg::*;

  localparam int LAT = 4;
  localparam int NT  = 400;

  logic clk = 0, rst_n = 0;
  fp_t tsys;
  logic in_valid = 0, out_valid;
  jparticle_t in_p = '0;
  jpred_t out_p;
  int checks = 0, failures = 0;

  predictor_pipeline dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  jparticle_t sent [$];
  int         sent_cycle [$];
  int         cycle = 0;
  int         nout = 0;
  real        ts;

  always @(posedge clk) cycle <= cycle + 1;

  // the checker
  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      jparticle_t p;
      int c;
      real dt, sx, sv;
      p = sent.pop_front();
      c = sent_cycle.pop_front();
      nout++;
      check(cycle - c == LAT, $sformatf("latency %0d", cycle - c));
      dt = ts - from_fp(p.t);
      for (int k = 0; k < 3; k++) begin
        real x, v, a2, j6, wx, wv;
        x = from_fp(p.x[k]); v = from_fp(p.v[k]); a2 = from_fp(p.a2[k]); j6 = from_fp(p.j6[k]);
        wx = x + dt * (v + dt * (a2 + dt * j6));
        wv = v + dt * (2.0 * a2 + dt * 3.0 * j6);
        sx = fabs(x) + fabs(dt * v) + fabs(dt * dt * a2) + fabs(dt * dt * dt * j6) + fabs(ts);
        sv = fabs(v) + fabs(2.0 * dt * a2) + fabs(3.0 * dt * dt * j6) + fabs(ts);
        check(close(from_fp(out_p.x[k]), wx, sx, 1.0e-6),
              $sformatf("x[%0d] %g want %g", k, from_fp(out_p.x[k]), wx));
        check(close(from_fp(out_p.v[k]), wv, sv, 1.0e-6),
              $sformatf("v[%0d] %g want %g", k, from_fp(out_p.v[k]), wv));
      end
      check(out_p.m == p.m, "mass passed through");
    end
  end

  initial begin
    ts = 0.75;
    tsys = to_fp(ts);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NT; n++) begin
      jparticle_t p;
      for (int k = 0; k < 3; k++) begin
        p.x[k]  = to_fp(urand(-2.0, 2.0));
        p.v[k]  = to_fp(urand(-1.0, 1.0));
        p.a2[k] = to_fp(urand(-5.0, 5.0));
        p.j6[k] = to_fp(urand(-50.0, 50.0));
      end
      p.m = to_fp(urand(0.0, 1.0e-3));
      // times on the block-step grid, up to 1/64 before the system time; one at dt = 0
      p.t = (n == 0) ? tsys : to_fp(ts - real'($urandom_range(1, 64)) / 4096.0);
      in_valid <= 1; in_p <= p;
      sent.push_back(p);
      sent_cycle.push_back(cycle + 1);
      @(posedge clk);
      if ($urandom_range(3) == 0) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    check(nout == NT, $sformatf("%0d outputs for %0d inputs", nout, NT));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
