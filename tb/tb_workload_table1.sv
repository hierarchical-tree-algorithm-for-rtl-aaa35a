// tb_workload_table1: runs, at full size, one force calculation for each of the six
// configurations of the source's timing breakdown (N = 65536 and 262144 particles,
// opening angles 0.75, 0.5 and 0.3). Each uses an interaction list of the reported
// average length N_int (5740 .. 28168 j-particles) and the reported average number of
// i-particles per calculation (n_i = 28.6 .. 29.8, rounded). The particle data are
// random rather than a Plummer model: only the list length and the number of
// i-particles matter for the hardware. The lists are cut into runs of 1 to 40
// consecutive records, as the host's Peano-Hilbert ordering would produce.
//
// Every result is compared with a double-precision sum. The cycle count of each
// calculation is converted into the source's time per particle step on one card,
// T_grape = cycles / 98 MHz / n_i, and checked to lie within 10 % below the value the
// source measured (the source's own model, N_int t_pipe (n_pipe / n_i), with
// t_pipe = 7.6e-10 s, allows a little overhead that a cycle-exact count does not have).
module tb_workload_table1;
  import fp_pkg::*;
  import grape9_pkg::*;
  import fp_ref_pkg::*;

  localparam int NROW = 6;
  localparam int NREC = 28168;
  localparam int    ROW_N    [NROW] = '{65536, 65536, 65536, 262144, 262144, 262144};
  localparam real   ROW_TH   [NROW] = '{0.75, 0.5, 0.3, 0.75, 0.5, 0.3};
  localparam int    ROW_NINT [NROW] = '{5740, 11081, 22351, 6433, 12644, 28168};
  localparam real   ROW_NI   [NROW] = '{29.3, 28.8, 28.6, 29.8, 29.5, 29.4};
  localparam real   ROW_TG   [NROW] = '{8.5e-6, 1.6e-5, 3.3e-5, 9.2e-6, 1.8e-5, 4.0e-5};

  logic clk = 0, rst_n = 0;
  logic host_wr = 0, host_rd = 0, host_rvalid;
  logic [31:0] host_addr = '0, host_wdata = '0, host_rdata;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_wr_en;
  logic [IDX_W-1:0] mem_req_addr, mem_wr_addr;
  jparticle_t mem_rsp_data, mem_wr_data;
  int checks = 0, failures = 0;

  grape9_fpga dut (.*);

  memory_unit_model mem (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
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

  task automatic wr(logic [31:0] a, logic [31:0] d);
    host_wr = 1; host_addr = a; host_wdata = d;
    @(posedge clk);
    #1;
    host_wr = 0;
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    host_rd = 1; host_addr = a;
    @(posedge clk);
    #1;
    host_rd = 0;
    d = host_rdata;
  endtask

  real ts = 0.5, e2;
  real px [NREC][3], pv [NREC][3], pm [NREC];   // predicted, double precision

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    mem.lat_min = 20; mem.lat_max = 40; mem.ready_pct = 95;
    wr(32'h0000_0004, to_fp(ts));
    // records: a ball of radius ~1, masses 1/N, times up to 1/64 in the past
    for (int i = 0; i < NREC; i++) begin
      logic [31:0] w [14];
      real dt;
      for (int k = 0; k < 3; k++) begin
        w[k] = to_fp(urand(-1.0, 1.0)); w[3+k] = to_fp(urand(-0.7, 0.7));
        w[6+k] = to_fp(urand(-0.5, 0.5)); w[9+k] = to_fp(urand(-1.0, 1.0));
      end
      w[12] = to_fp(1.0 / 65536.0);
      w[13] = to_fp(ts - real'($urandom_range(0, 64)) / 4096.0);
      for (int q = 0; q < 14; q++) wr(32'h3000_0000 | (i << 4) | q, w[q]);
      dt = ts - from_fp(w[13]);
      for (int k = 0; k < 3; k++) begin
        real x0, v0, a2, j6;
        x0 = from_fp(w[k]); v0 = from_fp(w[3+k]); a2 = from_fp(w[6+k]); j6 = from_fp(w[9+k]);
        px[i][k] = x0 + dt * (v0 + dt * (a2 + dt * j6));
        pv[i][k] = v0 + dt * (2.0 * a2 + dt * 3.0 * j6);
      end
      pm[i] = from_fp(w[12]);
    end
    for (int r = 0; r < NROW; r++) begin
      automatic int ncell = 0, left = ROW_NINT[r], pos = 0;
      int ni, cyc, t0;
      int runs_s [$], runs_n [$];
      iparticle_t ip [NI];
      logic [31:0] d;
      real tg;
      runs_s.delete();
      runs_n.delete();
      e2 = from_fp(to_fp(1.0 / (real'(ROW_N[r]) * real'(ROW_N[r]))));
      wr(32'h0000_0003, to_fp(1.0 / (real'(ROW_N[r]) * real'(ROW_N[r]))));
      // the list: runs of 1..40 records at increasing, gapped positions
      while (left > 0) begin
        automatic int n = $urandom_range(1, 40);
        if (n > left) n = left;
        if (pos + n > NREC) pos = 0;
        runs_s.push_back(pos); runs_n.push_back(n);
        wr(32'h2000_0000 | (ncell << 1), pos);
        wr(32'h2000_0001 | (ncell << 1), n);
        ncell++;
        left -= n;
        pos += n + ((NREC - ROW_NINT[r] > 0) ? $urandom_range(0, (NREC - ROW_NINT[r]) / 700) : 0);
      end
      ni = int'(ROW_NI[r]);             // SystemVerilog rounds to nearest
      for (int s = 0; s < ni; s++) begin
        for (int k = 0; k < 3; k++) begin
          ip[s].x[k] = to_fp(urand(-1.0, 1.0));
          ip[s].v[k] = to_fp(urand(-0.7, 0.7));
        end
        for (int k = 0; k < 3; k++) wr(32'h1000_0000 | (s << 4) | k, ip[s].x[k]);
        for (int k = 0; k < 3; k++) wr(32'h1000_0000 | (s << 4) | (3 + k), ip[s].v[k]);
      end
      wr(32'h0000_0001, 0);
      wr(32'h0000_0002, ncell);
      t0 = $time;
      wr(32'h0000_0000, 1);
      do rd(32'h0000_0005, d); while (d[0]);
      cyc = ($time - t0) / 10;
      for (int s = 0; s < ni; s++) begin
        real acc[3], jerk[3], pot, sa, sj, sp;
        logic [31:0] got [7];
        acc = '{0.0, 0.0, 0.0}; jerk = '{0.0, 0.0, 0.0}; pot = 0.0; sa = 0.0; sj = 0.0; sp = 0.0;
        foreach (runs_s[c]) begin
          for (int n = runs_s[c]; n < runs_s[c] + runs_n[c]; n++) begin
            real dx[3], dv[3], r2, rv, rinv, mr3;
            r2 = e2; rv = 0.0;
            for (int k = 0; k < 3; k++) begin
              dx[k] = px[n][k] - from_fp(ip[s].x[k]);
              dv[k] = pv[n][k] - from_fp(ip[s].v[k]);
              r2 += dx[k] * dx[k]; rv += dx[k] * dv[k];
            end
            rinv = 1.0 / $sqrt(r2);
            mr3 = pm[n] * rinv * rinv * rinv;
            pot -= pm[n] * rinv; sp += pm[n] * rinv; sa += pm[n] * rinv * rinv;
            sj += mr3 * ($sqrt(dv[0]*dv[0] + dv[1]*dv[1] + dv[2]*dv[2]) + 3.0 * fabs(rv) * rinv);
            for (int k = 0; k < 3; k++) begin
              acc[k]  += mr3 * dx[k];
              jerk[k] += mr3 * (dv[k] - 3.0 * rv * rinv * rinv * dx[k]);
            end
          end
        end
        for (int q = 0; q < 7; q++) rd(32'h4000_0000 | (s << 3) | q, got[q]);
        for (int k = 0; k < 3; k++) begin
          check(close(from_fp(got[k]), acc[k], sa, 1.0e-3),
                $sformatf("row %0d i=%0d acc[%0d] %g want %g", r, s, k, from_fp(got[k]), acc[k]));
          check(close(from_fp(got[3+k]), jerk[k], sj, 1.0e-3),
                $sformatf("row %0d i=%0d jerk[%0d] %g want %g", r, s, k, from_fp(got[3+k]), jerk[k]));
        end
        check(close(from_fp(got[6]), pot, sp, 1.0e-3),
              $sformatf("row %0d i=%0d pot %g want %g", r, s, from_fp(got[6]), pot));
      end
      tg = real'(cyc) / 98.0e6 / ROW_NI[r];
      $display("N=%0d theta=%.2f: N_int=%0d in %0d entries, n_i=%0d, %0d cycles, T_grape %.3g s (source %.3g s)",
               ROW_N[r], ROW_TH[r], ROW_NINT[r], ncell, ni, cyc, tg, ROW_TG[r]);
      check(cyc >= 4 * ROW_NINT[r], "no faster than one j-particle per 4 cycles");
      check(tg <= ROW_TG[r] * 1.0 && tg >= ROW_TG[r] * 0.9,
            $sformatf("T_grape %.3g within 10%% below the source's %.3g", tg, ROW_TG[r]));
    end
    check(mem.bad_reads == 0, "only loaded records were read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
