// tb_bo_weight_mult -- random ADC codes and weights, checks the product and
// its one-cycle latency, including the all-ones corner.
module tb_bo_weight_mult;
  import mbi_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n, in_valid, out_valid;
  logic [ADC_BITS-1:0] code;
  logic [W_BITS-1:0] weight;
  logic [WDIST_W-1:0] product;

  bo_weight_mult dut (.clk, .rst_n, .in_valid, .code, .weight, .out_valid, .product);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; code = 0; weight = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int c, w;
      c = (t == 0) ? 31 : $urandom_range(0, 31);
      w = (t == 0) ? 255 : $urandom_range(0, 255);
      code = ADC_BITS'(c); weight = W_BITS'(w); in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks++;
      if (!out_valid || int'(product) != c * w) begin
        failures++;
        $display("FAIL %0d x %0d = %0d (valid %0b)", c, w, product, out_valid);
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
