// tb_partition_sum -- random weighted partition distances, checks the sum
// (including the largest possible one) and its one-cycle latency.
module tb_partition_sum;
  import mbi_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n, in_valid, out_valid;
  logic [WDIST_W-1:0] part [NPART];
  logic [DIST_W-1:0] sum;

  partition_sum dut (.clk, .rst_n, .in_valid, .part, .out_valid, .sum);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0;
    for (int i = 0; i < NPART; i++) part[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int e;
      e = 0;
      for (int i = 0; i < NPART; i++) begin
        int v;
        v = (t == 0) ? 31 * 255 : $urandom_range(0, 31 * 255);
        part[i] = WDIST_W'(v);
        e += v;
      end
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks++;
      if (!out_valid || int'(sum) != e) begin
        failures++;
        $display("FAIL sum %0d expected %0d (valid %0b)", sum, e, out_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
