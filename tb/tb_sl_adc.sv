// tb_sl_adc -- drives sum-line and reference levels and checks the 5-bit code
// against 32 * (2*v_ref - v_slp - v_sln) / v_ref (the discharged fraction of
// the precharged charge), saturated to 31, and the one-cycle conversion
// latency.
module tb_sl_adc;
  import mbi_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n, conv, valid;
  uv_t v_slp, v_sln, v_ref;
  logic [ADC_BITS-1:0] code;

  sl_adc dut (.clk, .rst_n, .conv, .v_slp, .v_sln, .v_ref, .valid, .code);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; conv = 0; v_slp = 0; v_sln = 0; v_ref = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      real frac;
      int  expc;
      v_ref = $urandom_range(100000, VMAX_UV);
      case (t % 4)
        0: begin v_slp = v_ref; v_sln = v_ref; end            // exact match
        1: begin v_slp = v_ref / 2; v_sln = v_ref / 2; end    // everything discharged
        default: begin
          v_slp = $urandom_range(v_ref / 2, v_ref);
          v_sln = $urandom_range(v_ref / 2, v_ref);
        end
      endcase
      frac = (2.0 * real'(v_ref) - real'(v_slp) - real'(v_sln)) / real'(v_ref);
      expc = int'($floor(32.0 * frac + 1e-9));
      if (expc > 31) expc = 31;
      @(negedge clk) conv = 1;
      @(negedge clk) conv = 0;
      checks++;
      if (!valid || int'(code) != expc) begin
        failures++;
        $display("FAIL slp %0d sln %0d ref %0d: valid %0b code %0d expected %0d",
                 v_slp, v_sln, v_ref, valid, code, expc);
      end
      @(negedge clk);
      checks++;
      if (valid) begin
        failures++;
        $display("FAIL valid stays high");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
