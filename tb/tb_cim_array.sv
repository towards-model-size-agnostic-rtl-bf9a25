// tb_cim_array -- loads random keys into a small array (4 nodes), applies
// random queries and column significances, runs precharge / evaluate /
// charge-sum on random rows and compares SLP, SLN and the reference level with
// sums worked out per column from the discharge rule
// (BL low iff k=1,q=0; BLB low iff k=0,q=1).
module tb_cim_array;
  import mbi_pkg::*;

  localparam int unsigned NN = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic              we;
  logic [NODE_W-1:0] w_node;
  logic [ROW_W-1:0]  w_row;
  logic [COLS-1:0]   w_data;
  logic [COLS-1:0]   cl, clb;
  cs_t               cs [COLS];
  cim_ctrl_t         ctrl;
  uv_t               v_slp, v_sln, v_ref;
  logic [COLS-1:0]   shadow [NN][ROWS];

  cim_array #(.N_NODES(NN)) dut (.clk, .we, .w_node, .w_row, .w_data, .cl, .clb, .cs, .ctrl,
                                 .v_slp, .v_sln, .v_ref);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    we = 0; ctrl = '0; cl = '0; clb = '1; w_node = '0; w_row = '0; w_data = '0;
    for (int c = 0; c < COLS; c++) cs[c] = default_cs(0, c);
    // load all keys
    for (int n = 0; n < NN; n++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        we = 1; w_node = NODE_W'(n); w_row = ROW_W'(r); w_data = $urandom;
        shadow[n][r] = w_data;
      end
    @(negedge clk) we = 0;

    for (int t = 0; t < 200; t++) begin
      int n, r;
      longint sp, sn, sr, vpc;
      logic [COLS-1:0] q, k;
      n = $urandom_range(0, NN - 1);
      r = $urandom_range(0, ROWS - 1);
      q = $urandom;
      if (t % 4 == 3) q = shadow[n][r];   // exact match now and then
      for (int c = 0; c < COLS; c++) begin
        int s;
        s = $urandom_range(0, 5);
        cs[c] = (t < 20) ? default_cs(t % NPART, c) : ((s == 5) ? CS_OFF : cs_t'(s));
      end
      cl = q; clb = ~q;
      ctrl.node = NODE_W'(n); ctrl.row = ROW_W'(r);
      @(negedge clk) ctrl.pch = 1;
      @(negedge clk) begin ctrl.pch = 0; ctrl.eval = 1; end
      @(negedge clk) begin ctrl.eval = 0; ctrl.csum = 1; end
      @(negedge clk) ctrl.csum = 0;
      k = shadow[n][r];
      sp = 0; sn = 0; sr = 0;
      for (int c = 0; c < COLS; c++) begin
        vpc = (cs[c] == CS_OFF) ? 0 : (longint'(VMAX_UV) >> cs[c]);
        sr += vpc;
        if (!(k[c] == 1'b1 && q[c] == 1'b0)) sp += vpc;
        if (!(k[c] == 1'b0 && q[c] == 1'b1)) sn += vpc;
      end
      check("v_slp", longint'(v_slp), sp / COLS);
      check("v_sln", longint'(v_sln), sn / COLS);
      check("v_ref", longint'(v_ref), sr / COLS);
      if (q == k) check("match leaves both sum lines at v_ref", longint'(v_slp) + longint'(v_sln), 2 * (sr / COLS));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
