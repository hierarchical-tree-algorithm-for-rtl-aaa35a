// tb_force_pipeline_array: the full array (14 pipelines x 4 slots, 16-entry buffer).
// It loads 40 of the 56 i-slots, then plays the address generator, memory unit and
// predictor: it requests j-particles only while can_issue is high and returns each
// after a latency of its own, in order. Pass 1 has a fixed short latency and requests at
// every opportunity, so the buffer must fill, the credits must run out and the
// pipelines must take one j-particle every 4 cycles; the elapsed time is checked
// against that rate. Pass 2 uses long random latencies and random request gaps, so the
// pipelines starve. After each pass all 40 results are compared with double-precision
// sums, and the outstanding requests are checked never to exceed the buffer size.
module tb_force_pipeline_array;
  import fp_pkg::*;
  import grape9_pkg::*;
  import fp_ref_pkg::*;

  localparam int NP = NPIPE, NV = NVIRT, NIP = NP * NV, DEPTH_B = 16;
  localparam int NJ = 300, NLOAD = 40;

  logic clk = 0, rst_n = 0;
  fp_t eps2 = '0;
  logic clear = 0, i_we = 0, can_issue, issue, jin_valid = 0, busy;
  logic [5:0] i_idx = '0, rd_idx = '0;
  iparticle_t i_data = '0;
  jpred_t jin = '0;
  force_t rd_force;
  int checks = 0, failures = 0;

  force_pipeline_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  iparticle_t ip [NIP];
  int         slot_of [NLOAD];
  jpred_t     jl [NJ];

  // memory/predictor stand-in
  int  cycle = 0;
  int  due [$];
  int  next_req = 0, next_rsp = 0, outstanding = 0, max_out = 0, lat_min = 2, lat_max = 2;
  int  gap_pct = 0;
  bit  run = 0;
  int  credit_stalls = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    outstanding <= outstanding + int'(issue) - int'(jin_valid);
    if (outstanding > max_out) max_out <= outstanding;
  end

  logic want = 0;
  assign issue = want && can_issue && next_req < NJ;

  always @(posedge clk) begin
    want <= run && ($urandom_range(99) >= gap_pct);
    if (want && next_req < NJ && !can_issue) credit_stalls++;
    if (issue) begin
      due.push_back(cycle + $urandom_range(lat_min, lat_max));
      next_req++;
    end
    if (due.size() > 0 && due[0] <= cycle) begin
      void'(due.pop_front());
      jin_valid <= 1;
      jin <= jl[next_rsp];
      next_rsp++;
    end else begin
      jin_valid <= 0;
    end
  end

  task automatic compare(real e2, string tag);
    for (int q = 0; q < NLOAD; q++) begin
      int s;
      real acc[3], jerk[3], pot, sa, sj, sp;
      s = slot_of[q];
      acc = '{0.0, 0.0, 0.0}; jerk = '{0.0, 0.0, 0.0}; pot = 0.0; sa = 0.0; sj = 0.0; sp = 0.0;
      for (int n = 0; n < NJ; n++) begin
        real dx[3], dv[3], r2, rv, rinv, m, mr3;
        m = from_fp(jl[n].m); r2 = e2; rv = 0.0;
        for (int k = 0; k < 3; k++) begin
          dx[k] = from_fp(jl[n].x[k]) - from_fp(ip[s].x[k]);
          dv[k] = from_fp(jl[n].v[k]) - from_fp(ip[s].v[k]);
          r2 += dx[k] * dx[k]; rv += dx[k] * dv[k];
        end
        rinv = 1.0 / $sqrt(r2);
        mr3 = m * rinv * rinv * rinv;
        pot -= m * rinv; sp += m * rinv; sa += m * rinv * rinv;
        sj += mr3 * ($sqrt(dv[0]*dv[0] + dv[1]*dv[1] + dv[2]*dv[2]) + 3.0 * fabs(rv) * rinv);
        for (int k = 0; k < 3; k++) begin
          acc[k]  += mr3 * dx[k];
          jerk[k] += mr3 * (dv[k] - 3.0 * rv * rinv * rinv * dx[k]);
        end
      end
      rd_idx <= 6'(s);
      @(posedge clk); #1;
      for (int k = 0; k < 3; k++) begin
        check(close(from_fp(rd_force.acc[k]), acc[k], sa, 1.0e-4),
              $sformatf("%s i=%0d acc[%0d] %g want %g", tag, s, k, from_fp(rd_force.acc[k]), acc[k]));
        check(close(from_fp(rd_force.jerk[k]), jerk[k], sj, 1.0e-4),
              $sformatf("%s i=%0d jerk[%0d] %g want %g", tag, s, k, from_fp(rd_force.jerk[k]), jerk[k]));
      end
      check(close(from_fp(rd_force.pot), pot, sp, 1.0e-4),
            $sformatf("%s i=%0d pot %g want %g", tag, s, from_fp(rd_force.pot), pot));
    end
  endtask

  task automatic pass(string tag, int lmin, int lmax, int gap, output int elapsed);
    int t0;
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    lat_min = lmin; lat_max = lmax; gap_pct = gap;
    next_req = 0; next_rsp = 0;
    @(posedge clk);
    t0 = cycle;
    run = 1;
    @(posedge clk);
    while (next_rsp < NJ || busy) @(posedge clk);
    run = 0;
    elapsed = cycle - t0;
  endtask

  initial begin
    int el;
    real e2;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    e2 = from_fp(to_fp(1.0e-3));
    eps2 <= to_fp(e2);
    // 40 i-particles at scattered slots
    begin
      int perm [NIP];
      for (int s = 0; s < NIP; s++) perm[s] = s;
      perm.shuffle();
      for (int q = 0; q < NLOAD; q++) begin
        automatic int s = perm[q];
        slot_of[q] = s;
        for (int k = 0; k < 3; k++) begin
          ip[s].x[k] = to_fp(urand(-1.0, 1.0));
          ip[s].v[k] = to_fp(urand(-0.5, 0.5));
        end
        i_we <= 1; i_idx <= 6'(s); i_data <= ip[s];
        @(posedge clk);
      end
      i_we <= 0;
    end
    for (int n = 0; n < NJ; n++) begin
      for (int k = 0; k < 3; k++) begin
        jl[n].x[k] = to_fp(urand(-1.5, 1.5));
        jl[n].v[k] = to_fp(urand(-0.5, 0.5));
      end
      jl[n].m = to_fp(urand(1.0e-4, 1.0e-2));
    end
    pass("fast", 2, 2, 0, el);
    $display("fast pass: %0d j-particles in %0d cycles, %0d credit stalls, max %0d outstanding",
             NJ, el, credit_stalls, max_out);
    check(el >= NJ * NV && el <= NJ * NV + 20, $sformatf("rate: %0d cycles for %0d j-particles", el, NJ));
    check(credit_stalls > 0, "credits ran out at least once");
    compare(e2, "fast");
    pass("slow", 3, 40, 85, el);
    $display("slow pass: %0d cycles", el);
    check(el > NJ * NV, "starved pass is slower");
    compare(e2, "slow");
    check(max_out <= DEPTH_B, $sformatf("at most %0d outstanding, saw %0d", DEPTH_B, max_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
