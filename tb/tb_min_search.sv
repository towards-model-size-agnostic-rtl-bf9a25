// tb_min_search -- scans of random distances (with deliberate ties), checks
// Min-Val and Min-Index after every compare against a running reference that
// keeps the first row of the smallest distance.
module tb_min_search;
  import mbi_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n, clear, in_valid, found;
  logic [DIST_W-1:0] dist_in, min_val;
  logic [ROW_W-1:0] idx, min_idx;

  min_search dut (.clk, .rst_n, .clear, .in_valid, .dist_in, .idx, .min_val, .min_idx, .found);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; in_valid = 0; dist_in = 0; idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      int best, besti, n;
      n = $urandom_range(1, ROWS);
      clear = 1;
      @(negedge clk) clear = 0;
      best = -1; besti = 0;
      for (int r = 0; r < n; r++) begin
        int d;
        d = (s % 3 == 0) ? $urandom_range(0, 7) : $urandom_range(0, 2000);
        dist_in = DIST_W'(d); idx = ROW_W'(r); in_valid = 1;
        if (best < 0 || d < best) begin best = d; besti = r; end
        @(negedge clk) in_valid = 0;
        checks++;
        if (!found || int'(min_val) != best || int'(min_idx) != besti) begin
          failures++;
          $display("FAIL scan %0d row %0d: min %0d@%0d expected %0d@%0d", s, r, min_val, min_idx, best, besti);
        end
        if ($urandom_range(0, 3) == 0) @(negedge clk); // idle gap
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
