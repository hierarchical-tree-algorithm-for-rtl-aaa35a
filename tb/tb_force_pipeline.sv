// tb_force_pipeline: loads 4 random i-particles into one real pipeline and sends a
// stream of random j-particles (one of them placed exactly on an i-particle), each to
// all 4 virtual slots in turn, mostly back to back and sometimes with gaps or in a
// shuffled slot order. The accumulated acceleration, jerk and potential of every slot
// are compared with double-precision sums computed here, to 1e-4 of the sum of the
// magnitudes of the terms. A second pass with eps2 = 0 checks that a j-particle
// coinciding with the i-particle adds nothing. A last test checks the 6-cycle latency
// from j_valid to the accumulator and that clear zeroes all slots.
module tb_force_pipeline;
  import fp_pkg::*;
  import grape9_pkg::*;
  import fp_ref_pkg::*;

  localparam int NV = NVIRT;
  localparam int NJ = 200;

  logic clk = 0, rst_n = 0;
  fp_t eps2 = '0;
  logic clear = 0, i_we = 0, j_valid = 0, busy;
  logic [1:0] i_slot = '0, j_slot = '0, rd_slot = '0;
  iparticle_t i_data = '0;
  jpred_t j = '0;
  force_t rd_force;
  int checks = 0, failures = 0;

  force_pipeline dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  iparticle_t ip [NV];
  jpred_t     jl [NJ];
  real ref_acc [NV][3], ref_jerk [NV][3], ref_pot [NV];
  real sc_acc [NV], sc_jerk [NV], sc_pot [NV];

  task automatic reference(real e2);
    for (int s = 0; s < NV; s++) begin
      ref_pot[s] = 0.0; sc_acc[s] = 0.0; sc_jerk[s] = 0.0; sc_pot[s] = 0.0;
      for (int k = 0; k < 3; k++) begin ref_acc[s][k] = 0.0; ref_jerk[s][k] = 0.0; end
      for (int n = 0; n < NJ; n++) begin
        real dx[3], dv[3], r2, rv, rinv, m, mr3;
        m = from_fp(jl[n].m);
        r2 = e2; rv = 0.0;
        for (int k = 0; k < 3; k++) begin
          dx[k] = from_fp(jl[n].x[k]) - from_fp(ip[s].x[k]);
          dv[k] = from_fp(jl[n].v[k]) - from_fp(ip[s].v[k]);
          r2 += dx[k] * dx[k];
          rv += dx[k] * dv[k];
        end
        if (r2 == 0.0) continue;
        rinv = 1.0 / $sqrt(r2);
        mr3 = m * rinv * rinv * rinv;
        ref_pot[s] -= m * rinv;
        sc_pot[s]  += m * rinv;
        sc_acc[s]  += mr3 * $sqrt(r2);
        for (int k = 0; k < 3; k++) begin
          ref_acc[s][k]  += mr3 * dx[k];
          ref_jerk[s][k] += mr3 * (dv[k] - 3.0 * rv * rinv * rinv * dx[k]);
        end
        sc_jerk[s] += mr3 * ($sqrt(dv[0]*dv[0] + dv[1]*dv[1] + dv[2]*dv[2]) + 3.0 * fabs(rv) * rinv);
      end
    end
  endtask

  task automatic compare(string tag);
    for (int s = 0; s < NV; s++) begin
      rd_slot <= 2'(s);
      @(posedge clk); #1;
      for (int k = 0; k < 3; k++) begin
        check(close(from_fp(rd_force.acc[k]), ref_acc[s][k], sc_acc[s], 1.0e-4),
              $sformatf("%s slot %0d acc[%0d] %g want %g", tag, s, k, from_fp(rd_force.acc[k]), ref_acc[s][k]));
        check(close(from_fp(rd_force.jerk[k]), ref_jerk[s][k], sc_jerk[s], 1.0e-4),
              $sformatf("%s slot %0d jerk[%0d] %g want %g", tag, s, k, from_fp(rd_force.jerk[k]), ref_jerk[s][k]));
      end
      check(close(from_fp(rd_force.pot), ref_pot[s], sc_pot[s], 1.0e-4),
            $sformatf("%s slot %0d pot %g want %g", tag, s, from_fp(rd_force.pot), ref_pot[s]));
    end
  endtask

  task automatic stream();
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    for (int n = 0; n < NJ; n++) begin
      int order [NV];
      for (int s = 0; s < NV; s++) order[s] = s;
      if (n % 7 == 3) order.shuffle();
      for (int s = 0; s < NV; s++) begin
        j_valid <= 1; j_slot <= 2'(order[s]); j <= jl[n];
        @(posedge clk);
      end
      if (n % 11 == 5) begin
        j_valid <= 0;
        repeat ($urandom_range(1, 4)) @(posedge clk);
      end
    end
    j_valid <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  initial begin
    real e2;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < NV; s++) begin
      for (int k = 0; k < 3; k++) begin
        ip[s].x[k] = to_fp(urand(-1.0, 1.0));
        ip[s].v[k] = to_fp(urand(-0.5, 0.5));
      end
      i_we <= 1; i_slot <= 2'(s); i_data <= ip[s];
      @(posedge clk);
    end
    i_we <= 0;
    for (int n = 0; n < NJ; n++) begin
      for (int k = 0; k < 3; k++) begin
        jl[n].x[k] = to_fp(urand(-1.5, 1.5));
        jl[n].v[k] = to_fp(urand(-0.5, 0.5));
      end
      jl[n].m = to_fp(urand(1.0e-4, 1.0e-2));
    end
    jl[17].x = ip[1].x;            // a j-particle on top of slot 1
    // pass 1: softened
    e2 = 1.0e-4;
    eps2 <= to_fp(e2);
    @(posedge clk);
    reference(from_fp(to_fp(e2)));
    stream();
    compare("eps2=1e-4");
    // pass 2: no softening, coincident particle skipped
    eps2 <= '0;
    @(posedge clk);
    reference(0.0);
    stream();
    compare("eps2=0");
    // latency and clear
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    #1;
    for (int s = 0; s < NV; s++) begin
      rd_slot <= 2'(s);
      #1;
      check(rd_force == '0, "clear zeroes all slots");
      @(posedge clk);
    end
    rd_slot <= 2'd2;
    eps2 <= to_fp(1.0e-4);
    j_valid <= 1; j_slot <= 2'd2; j <= jl[0];
    @(posedge clk);
    j_valid <= 0;
    for (int c = 1; c <= 6; c++) begin
      #1;
      check(busy == (c < 6), $sformatf("busy in cycle %0d", c));
      check((rd_force.pot != '0) == (c == 6), $sformatf("result arrives after 6 cycles, cycle %0d", c));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
