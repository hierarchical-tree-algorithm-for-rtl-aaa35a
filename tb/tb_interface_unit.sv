// tb_interface_unit: drives the host word bus and checks every path through the
// address map: control registers written and read back, the start command (one-cycle
// start and clear, ignored while busy), STATUS, i-particle and memory-unit records
// assembled from their words and committed on the last word with the right index,
// cell-index entries committed on the count word, and result words read through the
// result port (the testbench answers rd_idx with a pattern it can predict).
module tb_interface_unit;
  import fp_pkg::*;
  import grape9_pkg::*;

  localparam int unsigned CAW = $clog2(NUM_CELLS);

  logic clk = 0, rst_n = 0;
  logic host_wr = 0, host_rd = 0, host_rvalid;
  logic [31:0] host_addr = '0, host_wdata = '0, host_rdata;
  logic start, clear, busy = 0, i_we, cim_wr_en, mem_wr_en;
  logic [CAW-1:0] start_cell, cim_wr_addr;
  logic [CAW:0] num_cells;
  fp_t eps2, tsys;
  logic [5:0] i_idx, rd_idx;
  iparticle_t i_data;
  cell_entry_t cim_wr_data;
  logic [IDX_W-1:0] mem_wr_addr;
  jparticle_t mem_wr_data;
  force_t rd_force;
  int checks = 0, failures = 0;

  interface_unit dut (.*);

  always #5 clk = ~clk;

  // result pattern: word q of particle i is {8'hA5, i, q}
  always_comb begin
    for (int k = 0; k < 3; k++) begin
      rd_force.acc[k]  = {8'hA5, 8'(rd_idx), 16'(k)};
      rd_force.jerk[k] = {8'hA5, 8'(rd_idx), 16'(k + 3)};
    end
    rd_force.pot = {8'hA5, 8'(rd_idx), 16'd6};
  end

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

  // count the one-cycle strobes
  int n_start = 0, n_clear = 0, n_iwe = 0, n_cim = 0, n_mem = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) n_start++;
    if (clear) n_clear++;
    if (i_we) n_iwe++;
    if (cim_wr_en) n_cim++;
    if (mem_wr_en) n_mem++;
  end

  // The bus is driven with blocking assignments 1 time unit after the clock edge.
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
    check(host_rvalid, "rvalid one cycle after rd");
    d = host_rdata;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    // control registers
    wr(32'h0000_0001, 32'd1234);
    wr(32'h0000_0002, 32'd77);
    wr(32'h0000_0003, 32'h3a83_126f);
    wr(32'h0000_0004, 32'h3f40_0000);
    check(start_cell == CAW'(1234) && num_cells == (CAW+1)'(77), "cell start and count");
    check(eps2 == 32'h3a83_126f && tsys == 32'h3f40_0000, "eps2 and tsys");
    rd(32'h0000_0001, d); check(d == 32'd1234, "read back CELL_START");
    rd(32'h0000_0004, d); check(d == 32'h3f40_0000, "read back TSYS");
    rd(32'h0000_0005, d); check(d == 32'd0, "STATUS idle");
    // start
    wr(32'h0000_0000, 32'd1);
    check(start && clear, "start and clear strobe");
    check(n_start == 0, "no start before the command");
    @(posedge clk); #1;
    check(!start && !clear, "strobes last one cycle");
    check(n_start == 1 && n_clear == 1, "one start, one clear");
    busy = 1;
    rd(32'h0000_0005, d); check(d == 32'd1, "STATUS busy");
    wr(32'h0000_0000, 32'd1);
    @(posedge clk); #1;
    check(n_start == 1, "start ignored while busy");
    busy = 0;
    // i-particle 37
    for (int w = 0; w < 6; w++) wr(32'h1000_0000 | (37 << 4) | w, 32'h4000_0000 + w);
    check(i_we && i_idx == 6'd37, "i-particle commit on word 5");
    for (int k = 0; k < 3; k++) begin
      check(i_data.x[k] == 32'h4000_0000 + k, $sformatf("i x[%0d]", k));
      check(i_data.v[k] == 32'h4000_0003 + k, $sformatf("i v[%0d]", k));
    end
    @(posedge clk); #1;
    check(n_iwe == 1, $sformatf("one i-particle write, saw %0d", n_iwe));
    // cell-index entry 98303
    wr(32'h2000_0000 | (98303 << 1), 32'h00ab_cdef);
    check(!cim_wr_en, "no entry write on the start word");
    wr(32'h2000_0001 | (98303 << 1), 32'd321);
    check(cim_wr_en && cim_wr_addr == CAW'(98303), "entry commit on count word");
    check(cim_wr_data.start == 24'habcdef && cim_wr_data.n == 24'd321, "entry data");
    // memory-unit record at index 0x123456
    for (int w = 0; w < 14; w++) wr(32'h3000_0000 | (32'h123456 << 4) | w, 32'h5000_0000 + w);
    check(mem_wr_en && mem_wr_addr == 24'h123456, "record commit on word 13");
    for (int k = 0; k < 3; k++) begin
      check(mem_wr_data.x[k]  == 32'h5000_0000 + k, "record x");
      check(mem_wr_data.v[k]  == 32'h5000_0003 + k, "record v");
      check(mem_wr_data.a2[k] == 32'h5000_0006 + k, "record a2");
      check(mem_wr_data.j6[k] == 32'h5000_0009 + k, "record j6");
    end
    check(mem_wr_data.m == 32'h5000_000c && mem_wr_data.t == 32'h5000_000d, "record m, t");
    @(posedge clk); #1;
    check(n_mem == 1 && n_cim == 1, $sformatf("one commit each, saw %0d %0d", n_mem, n_cim));
    // results
    for (int t = 0; t < 30; t++) begin
      automatic int i = $urandom_range(55);
      automatic int q = $urandom_range(6);
      rd(32'h4000_0000 | (i << 3) | q, d);
      check(d == {8'hA5, 8'(i), 16'(q)}, $sformatf("result i=%0d q=%0d got %h", i, q, d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
