// tb_glimpse_extractor -- random images and glimpse locations (including
// borders, where part of the glimpse falls outside the image); checks every
// 2-bit element of both patches against block averages worked out in the
// testbench, and the extraction time of 80 cycles.
module tb_glimpse_extractor;
  import mbi_pkg::*;
  import tb_mbi_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n, img_we, start, busy, done;
  logic [9:0] img_addr;
  logic [PIX_BITS-1:0] img_data;
  loc_t loc;
  logic [PATCH_W-1:0] patch;
  byte unsigned img [IMG*IMG];

  glimpse_extractor dut (.clk, .rst_n, .img_we, .img_addr, .img_data, .start, .loc, .busy, .done, .patch);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; img_we = 0; start = 0; img_addr = 0; img_data = 0; loc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int im = 0; im < 4; im++) begin
      for (int a = 0; a < IMG * IMG; a++) begin
        img[a] = (im == 0) ? 8'(a) : 8'($urandom);
        @(negedge clk);
        img_we = 1; img_addr = 10'(a); img_data = img[a];
      end
      @(negedge clk) img_we = 0;
      for (int t = 0; t < 12; t++) begin
        int x, y, cyc;
        logic [PATCH_W-1:0] e;
        x = (t == 0) ? 0 : (t == 1) ? 27 : (t == 2) ? 31 : $urandom_range(0, 27);
        y = (t == 0) ? 0 : (t == 1) ? 27 : (t == 2) ? 3  : $urandom_range(0, 27);
        loc.x = 5'(x); loc.y = 5'(y); start = 1;
        @(negedge clk) start = 0;
        cyc = 1;
        while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != 81) begin failures++; $display("FAIL extraction took %0d cycles", cyc); end
        e = ref_glimpse(img, x, y);
        for (int k = 0; k < PATCH_ELEMS; k++) begin
          checks++;
          if (patch[2*k +: 2] != e[2*k +: 2]) begin
            failures++;
            $display("FAIL image %0d loc (%0d,%0d) element %0d: %0d expected %0d", im, x, y, k,
                     patch[2*k +: 2], e[2*k +: 2]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
