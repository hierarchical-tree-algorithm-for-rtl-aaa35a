// tb_indirect_memory_addressing_unit: loads a table of random runs into the cell-index
// memory (full 98304 entries, of which a few hundred are used, some with n = 0), then
// starts interaction lists of random length and compares every accepted address with
// the concatenation of the runs worked out from the table. With addr_ready held high
// it also checks the timing: each entry costs its n addresses plus two cycles for
// reading the entry, so busy must stay high for exactly sum(n + 2) cycles.
module tb_indirect_memory_addressing_unit;
  import grape9_pkg::*;

  localparam int unsigned DEPTH = NUM_CELLS;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned BASE  = DEPTH - 400;   // table region used by the test

  logic clk = 0, rst_n = 0;
  logic cim_wr_en = 0, start = 0, busy, addr_valid, addr_ready = 0;
  logic [AW-1:0] cim_wr_addr = '0, start_cell = '0;
  cell_entry_t cim_wr_data = '0;
  logic [AW:0] num_cells = '0;
  logic [IDX_W-1:0] addr;
  int checks = 0, failures = 0;

  indirect_memory_addressing_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  cell_entry_t table_c [400];

  task automatic run_list(int first, int count, bit always_ready);
    int unsigned expect_q [$];
    int          busy_cycles = 0, want_cycles = 0;
    for (int c = first; c < first + count; c++) begin
      for (int k = 0; k < int'(table_c[c].n); k++) expect_q.push_back(table_c[c].start + k);
      want_cycles += int'(table_c[c].n) + 2;
    end
    start <= 1; start_cell <= AW'(BASE + first); num_cells <= (AW+1)'(count);
    @(posedge clk);
    start <= 0;
    forever begin
      logic r;
      r = always_ready ? 1'b1 : 1'($urandom_range(3) != 0);
      addr_ready <= r;
      #1;
      if (!busy) break;
      busy_cycles++;
      if (addr_valid && r) begin
        check(expect_q.size() > 0, "no address beyond the list");
        if (expect_q.size() > 0) begin
          int unsigned w = expect_q.pop_front();
          check(addr == IDX_W'(w), $sformatf("address %0h want %0h", addr, w));
        end
      end
      @(posedge clk);
    end
    addr_ready <= 0;
    check(expect_q.size() == 0, $sformatf("%0d addresses missing", expect_q.size()));
    if (always_ready)
      check(busy_cycles == want_cycles,
            $sformatf("busy %0d cycles, want %0d", busy_cycles, want_cycles));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int c = 0; c < 400; c++) begin
      int n;
      n = ($urandom_range(9) == 0) ? 0 : $urandom_range(1, 12);
      table_c[c] = '{start: IDX_W'($urandom_range(2000000)), n: CNT_W'(n)};
      cim_wr_en <= 1; cim_wr_addr <= AW'(BASE + c); cim_wr_data <= table_c[c];
      @(posedge clk);
    end
    cim_wr_en <= 0;
    @(posedge clk);
    run_list(0, 1, 1);
    run_list(390, 10, 1);       // ends at the last entry of the table
    run_list(5, 0, 1);
    for (int t = 0; t < 30; t++) begin
      automatic int f = $urandom_range(350);
      run_list(f, $urandom_range(1, 40), t % 2);
      repeat ($urandom_range(3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
