// tb_cell_index_memory: writes random (start, n) entries at random addresses across the
// full 98304-entry table, reads them back in random order and checks the data and the
// one-cycle read latency against a shadow copy kept by the testbench.
module tb_cell_index_memory;
  import grape9_pkg::*;

  localparam int unsigned DEPTH = NUM_CELLS;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NW    = 500;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  cell_entry_t wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  cell_index_memory dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [AW-1:0] addrs [NW];
  cell_entry_t   shadow [logic [AW-1:0]];

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // the two ends of the table, then random addresses
    for (int i = 0; i < int'(NW); i++) begin
      logic [AW-1:0] a;
      cell_entry_t   d;
      a = (i == 0) ? '0 : (i == 1) ? AW'(DEPTH - 1) : AW'($urandom_range(DEPTH - 1));
      d = '{start: IDX_W'($urandom), n: CNT_W'($urandom)};
      addrs[i] = a;
      shadow[a] = d;
      wr_en <= 1; wr_addr <= a; wr_data <= d;
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
    for (int i = 0; i < int'(NW); i++) begin
      logic [AW-1:0] a;
      a = addrs[$urandom_range(NW - 1)];
      rd_en <= 1; rd_addr <= a;
      @(posedge clk);
      rd_en <= 0;
      #1;
      checks++;
      if (!rd_valid || rd_data !== shadow[a]) begin
        failures++;
        $display("read %0d: valid %0b data %h want %h", a, rd_valid, rd_data, shadow[a]);
      end
      @(posedge clk);
      #1;
      checks++;
      if (rd_valid) begin
        failures++;
        $display("rd_valid held longer than one cycle");
      end
    end
    // a write and a read of the same entry in one cycle return the old data
    begin
      cell_entry_t old;
      old = shadow[addrs[3]];
      wr_en <= 1; wr_addr <= addrs[3]; wr_data <= ~old;
      rd_en <= 1; rd_addr <= addrs[3];
      @(posedge clk);
      wr_en <= 0; rd_en <= 0;
      #1;
      checks++;
      if (rd_data !== old) begin failures++; $display("read-during-write returned new data"); end
      rd_en <= 1;
      @(posedge clk);
      rd_en <= 0;
      #1;
      checks++;
      if (rd_data !== ~old) begin failures++; $display("write lost"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
