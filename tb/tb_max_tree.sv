// tb_max_tree - self-checking test of the tournament maximum finder.
//
// Trees of 2, 8 and 128 candidates get a new random set of candidates with a
// random mask every cycle (back to back), plus sets with ties and with every
// candidate masked. Each result must come out exactly log2(K) cycles after
// its input and match the largest unmasked candidate found by a linear scan
// (lowest index on a tie).
module tb_max_tree;

  localparam int unsigned WIDTH = 12;
  localparam int          NK    = 3;
  localparam int unsigned KS [NK] = '{2, 8, 128};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int finished = 0;
  int n_ties = 0, n_none = 0;

  for (genvar g = 0; g < NK; g++) begin : g_dut
    localparam int unsigned K = KS[g];
    localparam int unsigned L = $clog2(K);

    logic                    in_valid = 1'b0;
    logic [K-1:0][WIDTH-1:0] in_data = '0;
    logic [K-1:0]            in_mask = '0;
    logic                    out_valid;
    logic [WIDTH-1:0]        out_data;
    logic [L-1:0]            out_idx;
    logic                    out_any;

    max_tree #(.K(K), .WIDTH(WIDTH)) dut (.*);

    typedef struct { int idx; logic [WIDTH-1:0] data; bit any; int issued; } exp_t;
    exp_t expq[$];
    int cyc = 0;

    always @(posedge clk) cyc <= cyc + 1;

    // Reference: linear scan.
    function automatic exp_t scan(input logic [K-1:0][WIDTH-1:0] d, input logic [K-1:0] m);
      exp_t e;
      e.any = 1'b0; e.idx = 0; e.data = '0;
      for (int j = 0; j < K; j++)
        if (m[j] && (!e.any || d[j] > e.data)) begin
          e.any = 1'b1; e.idx = j; e.data = d[j];
        end
      return e;
    endfunction

    // Checker: results in order, at the right cycle.
    always @(posedge clk) if (rst_n && out_valid) begin
      exp_t e;
      if (expq.size() == 0) begin
        checks++; failures++;
        $display("FAIL: K=%0d result without input", K);
      end else begin
        e = expq.pop_front();
        checks++;
        if (cyc - e.issued != L) begin
          failures++;
          $display("FAIL: K=%0d latency %0d, expected %0d", K, cyc - e.issued, L);
        end
        checks++;
        if (out_any != e.any || (e.any && (out_data != e.data || int'(out_idx) != e.idx))) begin
          failures++;
          $display("FAIL: K=%0d got any=%0b idx=%0d data=%0h, expected any=%0b idx=%0d data=%0h",
                   K, out_any, out_idx, out_data, e.any, e.idx, e.data);
        end
      end
    end

    initial begin
      wait (rst_n);
      @(posedge clk);
      for (int t = 0; t < 400; t++) begin
        logic [K-1:0][WIDTH-1:0] d;
        logic [K-1:0] m;
        exp_t e;
        for (int j = 0; j < K; j++) begin
          d[j] = WIDTH'($urandom);
          m[j] = ($urandom_range(0, 3) != 0);
        end
        if (t % 10 == 3) for (int j = 0; j < K; j++) d[j] = WIDTH'($urandom_range(0, 2)); // ties
        if (t % 10 == 7) begin                                                       // top tie
          for (int j = 0; j < K; j++) begin d[j] = WIDTH'(5); m[j] = 1'b1; end
          n_ties++;
        end
        if (t % 50 == 9) begin m = '0; n_none++; end
        in_valid <= 1'b1;
        in_data  <= d;
        in_mask  <= m;
        e = scan(d, m);
        e.issued = cyc + 1;   // sampled at the coming edge
        expq.push_back(e);
        @(posedge clk);
        if (t % 7 == 0) begin   // an idle cycle now and then
          in_valid <= 1'b0;
          @(posedge clk);
        end
      end
      in_valid <= 1'b0;
      repeat (L + 2) @(posedge clk);
      checks++;
      if (expq.size() != 0) begin
        failures++;
        $display("FAIL: K=%0d %0d results missing", K, expq.size());
      end
      finished++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (finished == NK);
    $display("tb_max_tree: sets with a tie at the top %0d, with no candidate %0d", n_ties, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
