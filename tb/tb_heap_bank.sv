// tb_heap_bank - self-checking test of one heap memory bank.
//
// Random reads and writes on a 64-row bank are compared with an array held by
// the testbench: read data must appear exactly one cycle after the address,
// a read and a write of the same row in one cycle must return the old word,
// and the written word must be read the cycle after.
module tb_heap_bank;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned WIDTH = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [$clog2(DEPTH)-1:0] rd_addr = '0, wr_addr = '0;
  logic [WIDTH-1:0]         rd_data, wr_data = '0;
  logic                     wr_en = 1'b0;

  heap_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0;
  int failures = 0;
  int n_same_row = 0;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  initial begin
    // Fill every row first so every later read has a known value.
    for (int r = 0; r < DEPTH; r++) begin
      wr_en <= 1'b1; wr_addr <= r[$clog2(DEPTH)-1:0]; wr_data <= WIDTH'($urandom);
      @(posedge clk);
      ref_mem[r] = wr_data;
    end
    wr_en <= 1'b0;
    for (int t = 0; t < 2000; t++) begin
      logic [WIDTH-1:0] expect_rd;
      logic [$clog2(DEPTH)-1:0] ra, wa;
      logic we;
      logic [WIDTH-1:0] wd;
      ra = $clog2(DEPTH)'($urandom);
      we = $urandom_range(0, 1) == 1;
      wa = (t % 5 == 0) ? ra : $clog2(DEPTH)'($urandom);
      wd = WIDTH'($urandom);
      if (we && wa == ra) n_same_row++;
      expect_rd = ref_mem[ra];          // old contents
      rd_addr <= ra; wr_en <= we; wr_addr <= wa; wr_data <= wd;
      @(posedge clk);
      if (we) ref_mem[wa] = wd;
      #1;
      checks++;
      if (rd_data !== expect_rd) begin
        failures++;
        if (failures < 10) $display("FAIL: row %0d read %0h, expected %0h", ra, rd_data, expect_rd);
      end
    end
    checks++;
    if (n_same_row == 0) begin
      failures++;
      $display("FAIL: no read and write of the same row");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
