// tb_mbi_top -- end-to-end test of the MBI engine at its default sizes.
//
// The testbench loads a three-level lookup tree (a root of 8 centroids, 8
// centroid nodes of 4 rows, 32 leaf LUTs of 8..32 keys) with random keys and
// values, random partition weights and random 28x28 images. A reference model
// in the testbench recomputes every inference from the algorithm's
// definition: glimpse block averages, bit-mismatch distances per partition
// (32 * mismatched / precharged significance, saturated at 31), weighted sum,
// first-minimum search, tree walk, threshold test. It checks class, fallback,
// the number of LUT searches and glimpses, and the cycle count
//   1 + sum over glimpses (82 + sum over searches (4*rows + 8)) + 1.
// Mechanisms that must each occur at least once: descent from a centroid
// node, a leaf lookup within the threshold, a mixed-MBI fallback, a complete
// 5-glimpse inference, a leaf key that matches the query exactly.
module tb_mbi_top;
  import mbi_pkg::*;
  import tb_mbi_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                rst_n;
  logic                key_we;
  logic [NODE_W-1:0]   key_node;
  logic [ROW_W-1:0]    key_row;
  logic [2:0]          key_part;
  logic [COLS-1:0]     key_data;
  logic                desc_we;
  logic [NODE_W-1:0]   desc_node;
  node_desc_t          desc_wdata;
  logic                pay_we;
  logic [NODE_W-1:0]   pay_node;
  logic [ROW_W-1:0]    pay_row;
  payload_t            pay_wdata;
  logic                img_we;
  logic [9:0]          img_addr;
  logic [PIX_BITS-1:0] img_data;
  logic                weight_we;
  logic [2:0]          weight_part;
  logic [W_BITS-1:0]   weight_data;
  logic                cs_we;
  logic [2:0]          cs_part;
  logic [ROW_W-1:0]    cs_col;
  cs_t                 cs_data;
  logic [DIST_W-1:0]   threshold;
  logic                start;
  loc_t                start_loc;
  logic                busy, done, fallback, error;
  logic [ACT_BITS-1:0] class_out;
  logic [7:0]          n_searches;
  logic [3:0]          n_glimpses;

  mbi_top dut (.*);

  localparam int NN = 41;
  logic [KEY_W-1:0] keys [NN][ROWS];
  node_desc_t       desc [NN];
  payload_t         pay  [NN][ROWS];
  int unsigned      wt   [NPART];
  byte unsigned     img  [IMG*IMG];
  cs_t              cs_def [NPART][COLS];

  int n_descents, n_accepts, n_fallbacks, n_full, n_exact;

  initial begin
    repeat (2000000) @(posedge clk);
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

  // ---------------- reference model ----------------
  function automatic int ref_dist(logic [KEY_W-1:0] k, logic [KEY_W-1:0] q);
    int d;
    d = 0;
    for (int p = 0; p < NPART; p++)
      d += int'(wt[p]) * int'(ref_code(k[p*COLS +: COLS], q[p*COLS +: COLS], cs_def[p]));
    return d;
  endfunction

  // Runs one inference; returns class, fallback, searches, glimpses, cycles.
  task automatic ref_infer(input loc_t l0, input int thr, output int cls, output bit fb,
                           output int searches, output int glimpses, output int cycles,
                           output int leaf_d0, input bit count);
    logic [HIDDEN-1:0] h;
    loc_t l;
    h = '0; l = l0; cls = 0; fb = 0; searches = 0; glimpses = 0; cycles = 2; leaf_d0 = -1;
    for (int g = 0; g < NGLIMPSES; g++) begin
      logic [KEY_W-1:0] q;
      int n, best, besti;
      q = {{(COLS - 2 * LOC_BITS){1'b0}}, l.y, l.x, h, ref_glimpse(img, int'(l.x), int'(l.y))};
      cycles += 82;
      n = 0;
      forever begin
        best = -1; besti = 0;
        for (int r = 0; r < int'(desc[n].nrows); r++) begin
          int d;
          d = ref_dist(keys[n][r], q);
          if (best < 0 || d < best) begin best = d; besti = r; end
        end
        searches++;
        cycles += 4 * int'(desc[n].nrows) + 8;
        if (desc[n].is_leaf) break;
        if (count) n_descents++;
        n = int'(pay[n][besti][NODE_W-1:0]);
      end
      if (g == 0) leaf_d0 = best;
      if (best > thr) begin
        fb = 1;
        if (count) n_fallbacks++;
        break;
      end
      if (count) n_accepts++;
      if (count && best == 0) n_exact++;
      begin
        value_t v;
        v = value_t'(pay[n][besti]);
        h = v.hidden; l = v.loc; cls = int'(v.action);
      end
      glimpses++;
    end
    if (count && !fb) n_full++;
  endtask

  // ---------------- host operations ----------------
  task automatic write_key(int n, int r, logic [KEY_W-1:0] k);
    keys[n][r] = k;
    for (int p = 0; p < NPART; p++) begin
      @(negedge clk);
      key_we = 1; key_node = NODE_W'(n); key_row = ROW_W'(r); key_part = 3'(p);
      key_data = k[p*COLS +: COLS];
    end
    @(negedge clk) key_we = 0;
  endtask

  task automatic write_node(int n, bit leaf, int nrows);
    desc[n].is_leaf = leaf; desc[n].nrows = NROWS_W'(nrows);
    @(negedge clk);
    desc_we = 1; desc_node = NODE_W'(n); desc_wdata = desc[n];
    @(negedge clk) desc_we = 0;
  endtask

  task automatic write_pay(int n, int r, payload_t v);
    pay[n][r] = v;
    @(negedge clk);
    pay_we = 1; pay_node = NODE_W'(n); pay_row = ROW_W'(r); pay_wdata = v;
    @(negedge clk) pay_we = 0;
  endtask

  task automatic load_image(int seed);
    for (int a = 0; a < IMG * IMG; a++) begin
      int y, x;
      y = a / IMG; x = a % IMG;
      // a bright stroke on a dark background, varied per image
      img[a] = ((x + seed) % 9 < 3 || (y * seed) % 11 < 2) ? 8'($urandom_range(160, 255)) : 8'($urandom_range(0, 60));
      @(negedge clk);
      img_we = 1; img_addr = 10'(a); img_data = img[a];
    end
    @(negedge clk) img_we = 0;
  endtask

  task automatic set_weights();
    for (int p = 0; p < NPART; p++) begin
      wt[p] = $urandom_range(1, 4);
      @(negedge clk);
      weight_we = 1; weight_part = 3'(p); weight_data = W_BITS'(wt[p]);
    end
    @(negedge clk) weight_we = 0;
  endtask

  function automatic logic [KEY_W-1:0] rand_key();
    logic [KEY_W-1:0] k;
    k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    k[KEY_W-1 -: COLS - 2 * LOC_BITS] = '0;
    k[KEY_W - COLS +: 2 * LOC_BITS] = {5'($urandom_range(0, 27)), 5'($urandom_range(0, 27))};
    return k;
  endfunction

  task automatic run(loc_t l0, int thr);
    int cls, searches, glimpses, cycles, d0, cyc;
    bit fb;
    ref_infer(l0, thr, cls, fb, searches, glimpses, cycles, d0, 1);
    threshold = DIST_W'(thr);
    start_loc = l0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    check("fallback", int'(fallback), int'(fb));
    check("error", int'(error), 0);
    check("searches", int'(n_searches), searches);
    check("glimpses", int'(n_glimpses), glimpses);
    if (!fb) check("class", int'(class_out), cls);
    check("cycles", cyc, cycles);
  endtask

  initial begin
    rst_n = 0; key_we = 0; desc_we = 0; pay_we = 0; img_we = 0; weight_we = 0; cs_we = 0; start = 0;
    key_node = 0; key_row = 0; key_part = 0; key_data = 0; desc_node = 0; desc_wdata = '0;
    pay_node = 0; pay_row = 0; pay_wdata = '0; img_addr = 0; img_data = 0; weight_part = 0;
    weight_data = 0; cs_part = 0; cs_col = 0; cs_data = 0; threshold = 0; start_loc = '0;
    n_descents = 0; n_accepts = 0; n_fallbacks = 0; n_full = 0; n_exact = 0;
    for (int p = 0; p < NPART; p++) begin
      wt[p] = 1;
      for (int c = 0; c < COLS; c++) cs_def[p][c] = default_cs(p, c);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // tree: node 0 (8 centroids) -> nodes 1..8 (4 centroids) -> leaves 9..40
    write_node(0, 0, 8);
    for (int r = 0; r < 8; r++) begin
      write_key(0, r, rand_key());
      write_pay(0, r, payload_t'(1 + r));
    end
    for (int n = 1; n <= 8; n++) begin
      write_node(n, 0, 4);
      for (int r = 0; r < 4; r++) begin
        write_key(n, r, rand_key());
        write_pay(n, r, payload_t'(9 + (n - 1) * 4 + r));
      end
    end
    for (int n = 9; n < NN; n++) begin
      int nr;
      nr = (n == 9) ? ROWS : $urandom_range(8, ROWS);
      write_node(n, 1, nr);
      for (int r = 0; r < nr; r++) begin
        value_t v;
        v.loc.x = 5'($urandom_range(2, 25)); v.loc.y = 5'($urandom_range(2, 25));
        v.hidden = {$urandom, $urandom}; v.action = ACT_BITS'($urandom_range(0, 9));
        write_key(n, r, rand_key());
        write_pay(n, r, payload_t'(v));
      end
    end

    for (int im = 0; im < 6; im++) begin
      int cls, searches, glimpses, cycles, d0;
      bit fb;
      loc_t l0;
      load_image(im + 1);
      if (im >= 2) set_weights();
      l0.x = 5'($urandom_range(0, 27)); l0.y = 5'($urandom_range(0, 27));
      if (im == 1) begin
        // plant the first glimpse's query as an exact key in the leaf it reaches
        logic [KEY_W-1:0] q;
        int n, best, besti;
        q = {{(COLS - 2 * LOC_BITS){1'b0}}, l0.y, l0.x, {HIDDEN{1'b0}}, ref_glimpse(img, int'(l0.x), int'(l0.y))};
        n = 0;
        while (!desc[n].is_leaf) begin
          best = -1; besti = 0;
          for (int r = 0; r < int'(desc[n].nrows); r++) begin
            int d;
            d = ref_dist(keys[n][r], q);
            if (best < 0 || d < best) begin best = d; besti = r; end
          end
          n = int'(pay[n][besti][NODE_W-1:0]);
        end
        write_key(n, int'(desc[n].nrows) - 1, q);
      end
      // all glimpses by lookup
      run(l0, (1 << DIST_W) - 1);
      // threshold just below the first glimpse's distance: immediate fallback
      ref_infer(l0, (1 << DIST_W) - 1, cls, fb, searches, glimpses, cycles, d0, 0);
      if (d0 > 0) run(l0, d0 - 1);
      // a threshold between: the reference decides where it falls back
      run(l0, d0 + int'($urandom_range(0, 20)));
    end

    check("descents from centroid nodes", int'(n_descents > 0), 1);
    check("leaf lookups within threshold", int'(n_accepts > 0), 1);
    check("mixed-MBI fallbacks", int'(n_fallbacks > 0), 1);
    check("complete 5-glimpse inferences", int'(n_full > 0), 1);
    check("exact key matches", int'(n_exact > 0), 1);
    $display("mechanisms: descents=%0d accepts=%0d fallbacks=%0d full=%0d exact=%0d",
             n_descents, n_accepts, n_fallbacks, n_full, n_exact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
