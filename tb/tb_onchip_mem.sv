// tb_onchip_mem - self-checking test of the dual-port on-chip memory.
//
// Both ports issue random reads and writes (never writing the same word in
// the same cycle) on a 128-word memory; each read must return, one cycle
// later, the word an array in the testbench holds, and a port's read data
// must stay unchanged while that port does not read.
module tb_onchip_mem;

  localparam int unsigned DEPTH = 128;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a_en = 1'b0, a_we = 1'b0, b_en = 1'b0, b_we = 1'b0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [WIDTH-1:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;

  onchip_mem #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0;
  int failures = 0;
  int n_hold = 0;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  task automatic compare(input logic [WIDTH-1:0] got, input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL: %s read %0h, expected %0h", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      a_en <= 1'b1; a_we <= 1'b1; a_addr <= AW'(i); a_wdata <= WIDTH'($urandom);
      @(posedge clk);
      ref_mem[i] = a_wdata;
    end
    a_en <= 1'b0;
    a_we <= 1'b0;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      logic ae, aw_, be, bw;
      logic [AW-1:0] aa, ba;
      logic [WIDTH-1:0] ad, bd, a_exp, b_exp, a_old, b_old;
      ae = $urandom_range(0, 3) != 0; aw_ = $urandom_range(0, 1) == 1; aa = AW'($urandom);
      be = $urandom_range(0, 3) != 0; bw = $urandom_range(0, 1) == 1;
      ba = (t % 4 == 0) ? aa : AW'($urandom);
      if (ae && aw_ && be && bw && aa == ba) bw = 1'b0;
      ad = WIDTH'($urandom); bd = WIDTH'($urandom);
      a_exp = ref_mem[aa]; b_exp = ref_mem[ba];
      a_old = a_rdata; b_old = b_rdata;
      a_en <= ae; a_we <= aw_; a_addr <= aa; a_wdata <= ad;
      b_en <= be; b_we <= bw; b_addr <= ba; b_wdata <= bd;
      @(posedge clk);
      if (ae && aw_) ref_mem[aa] = ad;
      if (be && bw)  ref_mem[ba] = bd;
      #1;
      if (ae && !aw_) compare(a_rdata, a_exp, "port A");
      else begin compare(a_rdata, a_old, "port A hold"); n_hold++; end
      if (be && !bw) compare(b_rdata, b_exp, "port B");
      else begin compare(b_rdata, b_old, "port B hold"); n_hold++; end
    end
    checks++;
    if (n_hold == 0) failures++;
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
