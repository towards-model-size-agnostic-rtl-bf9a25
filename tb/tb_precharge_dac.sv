// tb_precharge_dac -- checks the column precharge levels against
// V_P,max / 2^code for every code, and 0 V for unused columns.
module tb_precharge_dac;
  import mbi_pkg::*;

  int checks = 0, failures = 0;
  cs_t cs [COLS];
  uv_t vp [COLS];

  precharge_dac dut (.cs, .vp);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int c = 0; c < COLS; c++) begin
        int k;
        k = $urandom_range(0, 5);
        cs[c] = (k == 5) ? CS_OFF : cs_t'(k);
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        longint exp_uv;
        exp_uv = (cs[c] == CS_OFF) ? 0 : longint'(VMAX_UV) / (longint'(1) << cs[c]);
        checks++;
        if (longint'(vp[c]) != exp_uv) begin
          failures++;
          $display("FAIL col %0d cs %0d: %0d expected %0d", c, cs[c], vp[c], exp_uv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
