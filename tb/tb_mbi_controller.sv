// tb_mbi_controller -- the controller against behavioural stand-ins: a glimpse
// extractor that answers after a few cycles, a node memory with a three-level
// tree, and a LUT search that returns a scripted winning row and distance.
// Checks: the tree walk (node sequence and search count), the hand-over of
// location and hidden state from each leaf value to the next glimpse, the
// final class, the mixed-MBI fallback at the first glimpse whose distance is
// above the threshold, and the depth guard on a tree with a cycle.
module tb_mbi_controller;
  import mbi_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, fallback, error;
  loc_t start_loc, g_loc, q_loc;
  logic [DIST_W-1:0] threshold, s_min_val;
  logic [ACT_BITS-1:0] class_out;
  logic [7:0] n_searches;
  logic [3:0] n_glimpses;
  logic g_start, g_done, q_load, s_start, s_done;
  logic [HIDDEN-1:0] q_hidden;
  logic [NODE_W-1:0] rd_node, s_node;
  logic [ROW_W-1:0] rd_row, s_min_idx;
  node_desc_t desc_rdata;
  payload_t pay_rdata;
  logic [NROWS_W-1:0] s_nrows;

  mbi_controller dut (.*);

  localparam int NN = 21;
  node_desc_t desc [NN];
  payload_t   pay  [NN][ROWS];
  int glimpse_no, gcount, scount, last_node, qerr;
  value_t exp_prev;

  // node memory stand-in (registered read)
  always @(posedge clk) begin
    desc_rdata <= desc[int'(rd_node) % NN];
    pay_rdata  <= pay[int'(rd_node) % NN][rd_row];
  end

  // glimpse extractor stand-in
  initial begin
    g_done = 0;
    forever begin
      @(posedge clk);
      if (g_start) begin
        repeat (4) @(posedge clk);
        #1 g_done = 1;
        @(posedge clk) #1 g_done = 0;
      end
    end
  end

  // LUT search stand-in: row = (node + glimpse) % nrows, distance = 3 * glimpse
  initial begin
    s_done = 0; s_min_idx = 0; s_min_val = 0;
    forever begin
      @(posedge clk);
      if (s_start) begin
        int n;
        n = int'(s_node);
        scount++;
        last_node = n;
        repeat (6) @(posedge clk);
        #1;
        s_min_idx = ROW_W'((n + glimpse_no) % int'(s_nrows));
        s_min_val = DIST_W'(3 * glimpse_no);
        s_done = 1;
        @(posedge clk) #1 s_done = 0;
      end
    end
  end

  // query check: hidden/location are the previous leaf value (zeros/start first)
  always @(posedge clk) begin
    if (q_load) begin
      if (gcount == 0) begin
        if (q_hidden != '0 || q_loc != start_loc) qerr++;
      end else if (q_hidden != exp_prev.hidden || q_loc != exp_prev.loc) qerr++;
      if (g_loc != q_loc) qerr++;
      gcount++;
      glimpse_no = gcount - 1;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // expected walk for one glimpse: returns the leaf value
  function automatic value_t walk(int g, output int searches);
    int n, r;
    n = 0; searches = 0;
    forever begin
      searches++;
      r = (n + g) % int'(desc[n].nrows);
      if (desc[n].is_leaf) return value_t'(pay[n][r]);
      n = int'(pay[n][r][NODE_W-1:0]);
    end
  endfunction

  task automatic run(int thr, int exp_glimpses, bit exp_fb, bit exp_err);
    int exp_searches, s;
    value_t v;
    exp_searches = 0;
    v = '0;
    if (!exp_err)
      for (int g = 0; g < NGLIMPSES; g++) begin
        if (g > exp_glimpses) break;
        v = walk(g, s);
        exp_searches += s;
        if (g < exp_glimpses) exp_prev = v; // not used directly
      end
    gcount = 0; glimpse_no = 0; scount = 0; qerr = 0;
    threshold = DIST_W'(thr);
    start_loc.x = 5'($urandom_range(0, 27)); start_loc.y = 5'($urandom_range(0, 27));
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    check("fallback", int'(fallback), int'(exp_fb));
    check("error", int'(error), int'(exp_err));
    if (!exp_err) begin
      check("glimpses", int'(n_glimpses), exp_glimpses);
      check("searches", int'(n_searches), exp_searches);
      check("query hand-over errors", qerr, 0);
      if (!exp_fb) begin
        v = walk(NGLIMPSES - 1, s);
        check("class", int'(class_out), int'(v.action));
      end
    end else begin
      check("searches before depth guard", int'(n_searches), MAX_DEPTH);
    end
  endtask

  // track the expected previous value as leaves are reached
  always @(posedge clk) begin
    if (s_done && desc[last_node].is_leaf)
      exp_prev <= value_t'(pay[last_node][(last_node + glimpse_no) % int'(desc[last_node].nrows)]);
  end

  initial begin
    rst_n = 0; start = 0; threshold = 0; start_loc = '0;
    // tree: node 0 -> nodes 1..4 -> nodes 5..20 (leaves)
    for (int n = 0; n < NN; n++) begin
      desc[n].is_leaf = (n >= 5);
      desc[n].nrows   = NROWS_W'((n >= 5) ? $urandom_range(1, ROWS) : 4);
      for (int r = 0; r < ROWS; r++) begin
        value_t v;
        v.loc.x = 5'($urandom_range(0, 27)); v.loc.y = 5'($urandom_range(0, 27));
        v.hidden = {$urandom, $urandom}; v.action = ACT_BITS'($urandom_range(0, 9));
        if (n == 0)      pay[n][r] = payload_t'(1 + r % 4);
        else if (n < 5)  pay[n][r] = payload_t'(5 + (n - 1) * 4 + r % 4);
        else             pay[n][r] = payload_t'(v);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1000, NGLIMPSES, 0, 0);   // every glimpse by lookup
    run(5, 2, 1, 0);              // distances 0,3 pass, 6 > 5 -> fallback
    run(0, 1, 1, 0);              // second glimpse already too far
    // cycle in the tree: node 0 points to itself
    for (int r = 0; r < 4; r++) pay[0][r] = '0;
    run(1000, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
