// tb_query_register -- loads random {patch, hidden, location} queries and
// checks every column of CL and CLB of every partition against the key layout.
module tb_query_register;
  import mbi_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n, load;
  logic [PATCH_W-1:0] patch;
  logic [HIDDEN-1:0] hidden;
  loc_t loc;
  logic [COLS-1:0] cl [NPART], clb [NPART];

  query_register dut (.clk, .rst_n, .load, .patch, .hidden, .loc, .cl, .clb);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; load = 0; patch = '0; hidden = '0; loc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      logic [PATCH_W-1:0] pq;
      logic [HIDDEN-1:0]  hq;
      loc_t               lq;
      pq = {$urandom, $urandom}; hq = {$urandom, $urandom};
      lq.x = 5'($urandom_range(0, 27)); lq.y = 5'($urandom_range(0, 27));
      patch = pq; hidden = hq; loc = lq; load = 1;
      @(negedge clk) load = 0;
      patch = '1; hidden = '1; loc = '1;   // must not leak through without load
      @(negedge clk);
      for (int p = 0; p < NPART; p++)
        for (int c = 0; c < COLS; c++) begin
          logic e;
          if (p < 2)      e = pq[(p * 16 + c / 2) * 2 + (c % 2)];  // element c/2, bit c%2
          else if (p < 4) e = hq[(p - 2) * 32 + c];
          else if (c < 5) e = lq.x[c];
          else if (c < 10) e = lq.y[c - 5];
          else            e = 1'b0;
          checks++;
          if (cl[p][c] !== e || clb[p][c] !== ~e) begin
            failures++;
            $display("FAIL part %0d col %0d: cl %0b clb %0b expected %0b", p, c, cl[p][c], clb[p][c], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
