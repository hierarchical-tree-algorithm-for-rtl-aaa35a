// tb_cell_counter: starts lists of random length at random entries (including an
// empty list, a list ending at the last entry and a restart), answers each read with an
// increment after a random delay, as the particle index counter would, and checks that
// the reads address start_cell, start_cell+1, ... exactly num_cells times, that each
// read comes one cycle after start or after the previous increment, and that busy
// falls in the cycle after the last increment.
module tb_cell_counter;
  import grape9_pkg::*;

  localparam int unsigned DEPTH = NUM_CELLS;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic start = 0, increment = 0, rd_en, busy;
  logic [AW-1:0] start_cell = '0, rd_addr;
  logic [AW:0]   num_cells = '0;
  int checks = 0, failures = 0;

  cell_counter dut (.*);

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

  task automatic run_list(int s, int n);
    start <= 1; start_cell <= AW'(s); num_cells <= (AW+1)'(n);
    @(posedge clk);
    start <= 0;
    #1;
    if (n == 0) begin
      check(!rd_en && !busy, "empty list stays idle");
      return;
    end
    for (int k = 0; k < n; k++) begin
      check(rd_en, "read one cycle after start/increment");
      check(rd_addr == AW'(s + k), $sformatf("read address %0d want %0d", rd_addr, s + k));
      check(busy, "busy during list");
      // the entry's particles take a random time
      repeat ($urandom_range(3)) begin
        @(posedge clk); #1;
        check(!rd_en, "single read per entry");
      end
      increment <= 1;
      @(posedge clk);
      increment <= 0;
      #1;
    end
    check(!busy && !rd_en, "idle after last increment");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_list(0, 1);
    run_list(100, 0);
    run_list(DEPTH - 5, 5);
    for (int t = 0; t < 40; t++) begin
      automatic int n = $urandom_range(30);
      run_list($urandom_range(DEPTH - 31), n);
      repeat ($urandom_range(2)) @(posedge clk);
    end
    // restart in the middle of a list
    start <= 1; start_cell <= AW'(7); num_cells <= (AW+1)'(10);
    @(posedge clk);
    start <= 0;
    repeat (2) @(posedge clk);
    run_list(50, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
