// tb_lut_search_ctrl -- runs LUT searches of random sizes. The testbench
// stands in for the arrays, ADCs, weight multipliers and partition adder: for
// every CONV strobe it returns the distance of the strobed row three cycles
// later. It checks the step order PCH, EVAL, CSUM, CONV per row and the row
// and node addresses, the minimum found (first row of the smallest distance)
// and the latency of 4*nrows + 4 cycles from start to done.
module tb_lut_search_ctrl;
  import mbi_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n, start, busy, done, sum_valid;
  logic [NODE_W-1:0] node;
  logic [NROWS_W-1:0] nrows;
  cim_ctrl_t ctrl;
  logic [DIST_W-1:0] sum_dist, min_val;
  logic [ROW_W-1:0] min_idx;
  int dtab [ROWS];
  logic [2:0] pv;
  logic [DIST_W-1:0] pd [3];
  int exp_phase, exp_row, cur_node, seq_err;

  lut_search_ctrl dut (.clk, .rst_n, .start, .node, .nrows, .ctrl, .sum_valid, .sum_dist,
                       .busy, .done, .min_val, .min_idx);

  // stand-in for ADC -> weight -> partition sum (3 register stages)
  always @(posedge clk) begin
    pv    <= {pv[1:0], ctrl.conv};
    pd[0] <= DIST_W'(dtab[ctrl.row]);
    pd[1] <= pd[0];
    pd[2] <= pd[1];
  end
  assign sum_valid = pv[2];
  assign sum_dist  = pd[2];

  // step-order checker
  always @(posedge clk) begin
    if (rst_n && (ctrl.pch || ctrl.eval || ctrl.csum || ctrl.conv)) begin
      logic [3:0] s;
      s = {ctrl.conv, ctrl.csum, ctrl.eval, ctrl.pch};
      if (s != (4'b1 << exp_phase) || int'(ctrl.row) != exp_row || int'(ctrl.node) != cur_node) seq_err++;
      if (exp_phase == 3) begin exp_phase = 0; exp_row++; end
      else exp_phase++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; node = 0; nrows = 0; pv = 0; seq_err = 0;
    for (int i = 0; i < ROWS; i++) dtab[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      int n, best, besti, cyc;
      n = (s == 0) ? ROWS : (s == 1) ? 1 : $urandom_range(1, ROWS);
      best = -1; besti = 0;
      for (int r = 0; r < ROWS; r++) begin
        dtab[r] = (s % 2 == 0) ? $urandom_range(0, 9) : $urandom_range(0, 4000);
        if (r < n && (best < 0 || dtab[r] < best)) begin best = dtab[r]; besti = r; end
      end
      exp_phase = 0; exp_row = 0; cur_node = $urandom_range(0, 8191);
      node = NODE_W'(cur_node); nrows = NROWS_W'(n); start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 4 * n + 4) begin failures++; $display("FAIL latency %0d expected %0d", cyc, 4 * n + 4); end
      checks++;
      if (int'(min_val) != best || int'(min_idx) != besti) begin
        failures++;
        $display("FAIL search %0d: min %0d@%0d expected %0d@%0d", s, min_val, min_idx, best, besti);
      end
      checks++;
      if (exp_row != n || exp_phase != 0 || seq_err != 0) begin
        failures++;
        $display("FAIL step sequence: rows %0d phase %0d errors %0d", exp_row, exp_phase, seq_err);
        seq_err = 0;
      end
      @(negedge clk);
      checks++;
      if (busy || done) begin failures++; $display("FAIL not idle after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
