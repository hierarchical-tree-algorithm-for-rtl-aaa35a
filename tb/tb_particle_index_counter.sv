// tb_particle_index_counter: feeds random (start, n) entries, including n = 0, n = 1
// and runs that cross a power-of-two boundary, holds addr_ready low at random and checks
// the accepted addresses against start .. start+n-1, that an address is held while not
// accepted, that increment comes exactly with the last accepted address (or with the
// entry itself when n = 0), and that with ready always high one address leaves per cycle.
module tb_particle_index_counter;
  import grape9_pkg::*;

  logic clk = 0, rst_n = 0;
  logic entry_valid = 0, addr_valid, addr_ready = 0, increment, busy;
  cell_entry_t entry = '0;
  logic [IDX_W-1:0] addr;
  int checks = 0, failures = 0;

  particle_index_counter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // returns the number of cycles from the first address to the increment
  task automatic run_entry(int unsigned s, int unsigned n, bit always_ready, output int cycles);
    int got = 0;
    int inc_seen = 0;
    cycles = 0;
    entry_valid <= 1; entry <= '{start: IDX_W'(s), n: CNT_W'(n)};
    #1;
    if (n == 0) begin
      check(increment, "increment with empty entry");
      @(posedge clk);
      entry_valid <= 0;
      #1;
      check(!addr_valid && !busy, "empty entry issues nothing");
      return;
    end
    check(!increment, "no increment with a non-empty entry");
    @(posedge clk);
    entry_valid <= 0;
    while (got < int'(n)) begin
      logic r;
      r = always_ready ? 1'b1 : 1'($urandom_range(1));
      addr_ready <= r;
      #1;
      cycles++;
      check(addr_valid, "address offered");
      if (r) begin
        check(addr == IDX_W'(s + got), $sformatf("address %0h want %0h", addr, s + got));
        check(increment == (got == int'(n) - 1), "increment only with last address");
        got++;
      end else begin
        check(!increment, "no increment while stalled");
      end
      @(posedge clk);
    end
    addr_ready <= 0;
    #1;
    check(!addr_valid && !busy, "idle after run");
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_entry(5, 1, 1, cyc);
    check(cyc == 1, "one-address entry takes one cycle");
    run_entry(9, 0, 1, cyc);
    run_entry(32'h00fffe, 5, 1, cyc);
    check(cyc == 5, "five addresses in five cycles");
    run_entry(32'hfffffe, 4, 0, cyc);  // wraps the 24-bit index space
    for (int t = 0; t < 60; t++) begin
      automatic int n = $urandom_range(40);
      run_entry($urandom, n, t % 2, cyc);
      if (t % 2 == 1 && n > 0) check(cyc == n, "one address per cycle");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
