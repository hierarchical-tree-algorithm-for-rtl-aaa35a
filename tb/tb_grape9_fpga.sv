// tb_grape9_fpga: end-to-end test of one GRAPE-9 FPGA at its full size (98304-entry
// cell-index memory, 14 x 4 force pipelines), with a behavioural memory unit.
//
// The testbench plays the host. It loads 2000 particles and 300 tree nodes (stored as
// pseudo-particles, at indices above 1,000,000) into the memory unit, each with its own
// time on a 1/4096 grid so that the predictor has work to do, and writes interaction
// lists as runs in the cell-index memory: runs of particles, runs of tree nodes and
// empty entries, at the bottom and the top of the table. It then performs the host's
// steps 4, 4a and 5 for four groups: it writes the group's predicted i-particles, the
// list's first entry and length, starts, polls STATUS and reads every result, which it
// compares with double-precision sums over the same list of predicted j-particles.
// The groups hold 56 (all slots), 29 (the average the source reports), 1 and 40
// i-particles, and run under different memory behaviour, so that each mechanism of the
// design happens: multi-entry lists, empty entries, tree-node reads, memory back-
// pressure, credit stalls of the address generator, starvation of the pipelines, a
// start ignored while busy, and idle virtual slots. Each is counted and must occur.
// With the memory answering at full rate a list of L j-particles must take about 4 L
// cycles (one j-particle per 4 cycles); that is checked for the first group.
module tb_grape9_fpga;
  import fp_pkg::*;
  import grape9_pkg::*;
  import fp_ref_pkg::*;

  localparam int NPART = 2000, NNODE = 300, NODE_BASE = 1000000;
  localparam int TOP_CELL = NUM_CELLS - 64;

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
    repeat (2000000) @(posedge clk);
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

  // ---------------- mechanism counters ----------------
  int n_credit_stall = 0, n_starve = 0, n_mem_backpressure = 0, n_node_reads = 0;
  int n_empty_entry = 0, n_multi_entry = 0, n_start_ignored = 0, n_idle_slots = 0;
  int n_increments = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_imau.addr_valid && !dut.u_force.can_issue) n_credit_stall++;
    if (dut.u_imau.addr_valid && dut.u_force.can_issue && !mem_req_ready) n_mem_backpressure++;
    // j-particles are on their way but the buffer is empty and the pipelines idle
    if (dut.u_force.credits != 16 && dut.u_force.count == 0 && !dut.u_force.feeding)
      n_starve++;
    if (mem_req_valid && mem_req_ready && int'(mem_req_addr) >= NODE_BASE) n_node_reads++;
    if (dut.u_imau.u_particle_index_counter.entry_valid &&
        dut.u_imau.u_particle_index_counter.entry.n == 0) n_empty_entry++;
    if (dut.u_imau.u_particle_index_counter.increment) n_increments++;
  end

  // ---------------- host bus ----------------
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

  // ---------------- the particle system ----------------
  real ts, e2g;
  jparticle_t recs [int];      // by memory index

  function automatic jparticle_t make_rec(real mass, real spread);
    jparticle_t p;
    for (int k = 0; k < 3; k++) begin
      p.x[k]  = to_fp(urand(-spread, spread));
      p.v[k]  = to_fp(urand(-0.5, 0.5));
      p.a2[k] = to_fp(urand(-0.5, 0.5));
      p.j6[k] = to_fp(urand(-2.0, 2.0));
    end
    p.m = to_fp(mass);
    p.t = to_fp(ts - real'($urandom_range(0, 64)) / 4096.0);
    return p;
  endfunction

  task automatic load_rec(int idx, jparticle_t p);
    logic [31:0] w [14];
    for (int k = 0; k < 3; k++) begin
      w[k] = p.x[k]; w[3+k] = p.v[k]; w[6+k] = p.a2[k]; w[9+k] = p.j6[k];
    end
    w[12] = p.m; w[13] = p.t;
    for (int q = 0; q < 14; q++) wr(32'h3000_0000 | (idx << 4) | q, w[q]);
    recs[idx] = p;
  endtask

  // predicted j-particle, in double precision, from the stored record
  task automatic predict(jparticle_t p, output real x[3], output real v[3], output real m);
    real dt;
    dt = ts - from_fp(p.t);
    for (int k = 0; k < 3; k++) begin
      real x0, v0, a2, j6;
      x0 = from_fp(p.x[k]); v0 = from_fp(p.v[k]); a2 = from_fp(p.a2[k]); j6 = from_fp(p.j6[k]);
      x[k] = x0 + dt * (v0 + dt * (a2 + dt * j6));
      v[k] = v0 + dt * (2.0 * a2 + dt * 3.0 * j6);
    end
    m = from_fp(p.m);
  endtask

  // ---------------- interaction lists ----------------
  typedef struct { int start; int n; } run_t;
  run_t cells [int];           // by cell-index entry

  task automatic load_cell(int c, int s, int n);
    wr(32'h2000_0000 | (c << 1), s);
    wr(32'h2000_0001 | (c << 1), n);
    cells[c] = '{s, n};
  endtask

  // ---------------- one force calculation ----------------
  task automatic run_group(string tag, int first_cell, int ncell, int ni, int lmin, int lmax,
                           int rpct, bit try_restart, output int elapsed, output int listlen);
    iparticle_t ip [NI];
    int slots [$];
    logic [31:0] d;
    real e2;
    int t0;
    mem.lat_min = lmin; mem.lat_max = lmax; mem.ready_pct = rpct;
    // i-particles at random slots
    for (int s = 0; s < int'(NI); s++) slots.push_back(s);
    slots.shuffle();
    while (slots.size() > ni) void'(slots.pop_back());
    foreach (slots[q]) begin
      int s = slots[q];
      for (int k = 0; k < 3; k++) begin
        ip[s].x[k] = to_fp(urand(-1.0, 1.0));
        ip[s].v[k] = to_fp(urand(-0.5, 0.5));
      end
      for (int k = 0; k < 3; k++) wr(32'h1000_0000 | (s << 4) | k, ip[s].x[k]);
      for (int k = 0; k < 3; k++) wr(32'h1000_0000 | (s << 4) | (3 + k), ip[s].v[k]);
    end
    n_idle_slots += int'(NI) - ni;
    wr(32'h0000_0001, first_cell);
    wr(32'h0000_0002, ncell);
    t0 = $time;
    wr(32'h0000_0000, 1);
    if (try_restart) begin
      int left_before;
      repeat (3) @(posedge clk);
      left_before = dut.u_imau.u_cell_counter.left;
      wr(32'h0000_0000, 1);                  // must be ignored
      @(posedge clk); #1;
      if (dut.u_imau.u_cell_counter.left <= left_before) n_start_ignored++;
    end
    do rd(32'h0000_0005, d); while (d[0]);
    elapsed = ($time - t0) / 10;
    if (ncell > 1) n_multi_entry++;
    // reference
    e2 = e2g;
    listlen = 0;
    for (int c = first_cell; c < first_cell + ncell; c++) listlen += cells[c].n;
    foreach (slots[q]) begin
      int s = slots[q];
      real acc[3], jerk[3], pot, sa, sj, sp;
      logic [31:0] got [7];
      acc = '{0.0, 0.0, 0.0}; jerk = '{0.0, 0.0, 0.0}; pot = 0.0; sa = 0.0; sj = 0.0; sp = 0.0;
      for (int c = first_cell; c < first_cell + ncell; c++) begin
        for (int n = 0; n < cells[c].n; n++) begin
          real xj[3], vj[3], m, dx[3], dv[3], r2, rv, rinv, mr3;
          predict(recs[cells[c].start + n], xj, vj, m);
          r2 = e2; rv = 0.0;
          for (int k = 0; k < 3; k++) begin
            dx[k] = xj[k] - from_fp(ip[s].x[k]);
            dv[k] = vj[k] - from_fp(ip[s].v[k]);
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
      end
      for (int q2 = 0; q2 < 7; q2++) rd(32'h4000_0000 | (s << 3) | q2, got[q2]);
      for (int k = 0; k < 3; k++) begin
        check(close(from_fp(got[k]), acc[k], sa, 2.0e-4),
              $sformatf("%s i=%0d acc[%0d] %g want %g", tag, s, k, from_fp(got[k]), acc[k]));
        check(close(from_fp(got[3+k]), jerk[k], sj, 2.0e-4),
              $sformatf("%s i=%0d jerk[%0d] %g want %g", tag, s, k, from_fp(got[3+k]), jerk[k]));
      end
      check(close(from_fp(got[6]), pot, sp, 2.0e-4),
            $sformatf("%s i=%0d pot %g want %g", tag, s, from_fp(got[6]), pot));
    end
    $display("%s: %0d i-particles, list of %0d j-particles in %0d entries, %0d cycles",
             tag, ni, listlen, ncell, elapsed);
  endtask

  initial begin
    int el, len;
    real eps;
    ts = 0.25;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    // step 1: system time, softening eps = 1/N, particles, tree nodes, lists
    eps = 1.0 / real'(NPART);
    wr(32'h0000_0004, to_fp(ts));
    e2g = from_fp(to_fp(eps * eps));
    wr(32'h0000_0003, to_fp(eps * eps));
    for (int i = 0; i < NPART; i++) load_rec(i, make_rec(1.0 / real'(NPART), 1.0));
    for (int i = 0; i < NNODE; i++) load_rec(NODE_BASE + i, make_rec(0.02, 3.0));
    // list A (cells 0..9): particle runs and node runs, one empty entry
    load_cell(0, 0, 60);     load_cell(1, NODE_BASE, 25);  load_cell(2, 100, 40);
    load_cell(3, 500, 0);    load_cell(4, 700, 55);        load_cell(5, NODE_BASE + 40, 30);
    load_cell(6, 1200, 1);   load_cell(7, 1500, 70);       load_cell(8, NODE_BASE + 100, 12);
    load_cell(9, 1900, 100);
    // list B (top of the table)
    for (int c = 0; c < 20; c++)
      load_cell(TOP_CELL + c, (c % 4 == 3) ? NODE_BASE + 150 + 7 * c : 90 * c,
                (c % 5 == 4) ? 0 : 3 + (c * 7) % 23);
    // list C: a single entry
    load_cell(50, 1234, 17);

    // group 1: all 56 slots, memory at full rate: credit stalls, rate check
    run_group("group1", 0, 10, NI, 6, 6, 100, 0, el, len);
    check(el >= 4 * len && el <= 4 * len + 120,
          $sformatf("one j-particle per 4 cycles: %0d cycles for %0d", el, len));
    // group 2: 29 i-particles, slow irregular memory: starvation and back-pressure
    run_group("group2", TOP_CELL, 20, 29, 10, 90, 40, 1, el, len);
    // group 3: a single i-particle, single entry
    run_group("group3", 50, 1, 1, 3, 12, 80, 0, el, len);
    // group 4: 40 i-particles, the whole of list A and B again at another system time
    ts = 0.25 + 1.0 / 64.0;
    wr(32'h0000_0004, to_fp(ts));
    run_group("group4", TOP_CELL, 20, 40, 2, 30, 70, 0, el, len);

    check(mem.bad_reads == 0, "only loaded records were read");
    $display("mechanisms: credit stalls %0d, pipeline starvation %0d, memory back-pressure %0d,",
             n_credit_stall, n_starve, n_mem_backpressure);
    $display("  tree-node reads %0d, empty entries %0d, multi-entry lists %0d, entries done %0d,",
             n_node_reads, n_empty_entry, n_multi_entry, n_increments);
    $display("  starts ignored while busy %0d, idle virtual slots %0d",
             n_start_ignored, n_idle_slots);
    check(n_credit_stall > 0, "credit stall happened");
    check(n_starve > 0, "pipeline starvation happened");
    check(n_mem_backpressure > 0, "memory back-pressure happened");
    check(n_node_reads > 0, "tree nodes were read");
    check(n_empty_entry > 0, "empty entries were met");
    check(n_multi_entry > 0, "multi-entry lists ran");
    check(n_start_ignored > 0, "start while busy was ignored");
    check(n_idle_slots > 0, "a partly filled set of i-particles ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
