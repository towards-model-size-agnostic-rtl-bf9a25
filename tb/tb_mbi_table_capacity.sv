// tb_mbi_table_capacity -- the table-size workload: a lookup table of
// 6.21 MB of keys and values, the largest point of the published table-size
// sweep that the default node memory holds, loaded and searched at the
// default sizes.
//
// The table is 6523 leaves of 32 keys (208,736 rows x (160 key + 78 value)
// bits = 6.21 MB) under a four-level tree: a root of 32 centroids, 32 nodes of
// 32 centroids, and 1024 nodes of 6 or 7 centroids each pointing at leaves.
// With the centroid nodes that is 7580 of the 8192 nodes. The last leaf is
// placed at the highest node address (8191) and the root, level-1 and level-2
// keys on its path are set to one image's first glimpse query, so that at
// least one walk ends there. Keys are random, a near copy of each image's
// glimpse queries is planted in the leaf its walk reaches, and every
// inference is compared with the reference model: class, fallback, LUT
// searches, glimpses and cycle count (4n+8 cycles per tree level). The
// testbench also checks that the walks visit all four levels and the highest
// node address. Every image runs twice: lookups only (no threshold), then
// with threshold 0, so that only exact matches are accepted. The loading
// takes about 1.3 million cycles.
module tb_mbi_table_capacity;
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

  localparam int NN = NODES;
  logic [KEY_W-1:0] keys [NN][ROWS];
  node_desc_t       desc [NN];
  payload_t         pay  [NN][ROWS];
  int unsigned      wt   [NPART];
  byte unsigned     img  [IMG*IMG];
  cs_t              cs_def [NPART][COLS];

  int n_descents, n_accepts, n_fallbacks, n_full, n_exact;

  initial begin
    repeat (30000000) @(posedge clk);
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

  task automatic run(loc_t l0, int thr, output bit fb_out);
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
    fb_out = fallback;
  endtask

  task automatic write_cs(int p, int c, cs_t v);
    cs_def[p][c] = v;
    @(negedge clk);
    cs_we = 1; cs_part = 3'(p); cs_col = ROW_W'(c); cs_data = v;
    @(negedge clk) cs_we = 0;
  endtask

  // query of glimpse g of an image under the current table; returns the leaf reached
  task automatic query_of(loc_t l0, int g, output logic [KEY_W-1:0] q_out, output int leaf);
    logic [HIDDEN-1:0] h;
    loc_t l;
    h = '0; l = l0;
    for (int i = 0; i <= g; i++) begin
      logic [KEY_W-1:0] q;
      int n, best, besti;
      q = {{(COLS - 2 * LOC_BITS){1'b0}}, l.y, l.x, h, ref_glimpse(img, int'(l.x), int'(l.y))};
      n = 0;
      forever begin
        best = -1; besti = 0;
        for (int r = 0; r < int'(desc[n].nrows); r++) begin
          int d;
          d = ref_dist(keys[n][r], q);
          if (best < 0 || d < best) begin best = d; besti = r; end
        end
        if (desc[n].is_leaf) break;
        n = int'(pay[n][besti][NODE_W-1:0]);
      end
      q_out = q; leaf = n;
      begin
        value_t v;
        v = value_t'(pay[n][besti]);
        h = v.hidden; l = v.loc;
      end
    end
  endtask

  localparam int NIMG    = 6;
  localparam int L1      = 1;          // first level-1 node
  localparam int L2      = 33;         // first level-2 node
  localparam int LEAF0   = 1057;       // first leaf
  localparam int NLEAVES = 6523;
  byte unsigned imgs [NIMG][IMG*IMG];
  loc_t         locs [NIMG];
  int           leaf_node [NLEAVES];
  int           max_node_seen, deepest;

  // node number of leaf i: leaves are numbered from LEAF0, the last one sits at the top address
  function automatic int leaf_at(int i);
    return (i == NLEAVES - 1) ? NODES - 1 : LEAF0 + i;
  endfunction

  // streams all keys and payloads of one node with the write enables held high
  task automatic load_node(int n, bit leaf, int nrows);
    write_node(n, leaf, nrows);
    for (int r = 0; r < nrows; r++) begin
      keys[n][r] = rand_key();
      for (int p = 0; p < NPART; p++) begin
        @(negedge clk);
        key_we = 1; key_node = NODE_W'(n); key_row = ROW_W'(r); key_part = 3'(p);
        key_data = keys[n][r][p*COLS +: COLS];
      end
    end
    @(negedge clk) key_we = 0;
  endtask

  task automatic load_pays(int n, int nrows);
    for (int r = 0; r < nrows; r++) begin
      @(negedge clk);
      pay_we = 1; pay_node = NODE_W'(n); pay_row = ROW_W'(r); pay_wdata = pay[n][r];
    end
    @(negedge clk) pay_we = 0;
  endtask

  task automatic walk_stats(loc_t l0);
    logic [HIDDEN-1:0] h;
    loc_t l;
    h = '0; l = l0;
    for (int g = 0; g < NGLIMPSES; g++) begin
      logic [KEY_W-1:0] q;
      int n, best, besti, depth;
      q = {{(COLS - 2 * LOC_BITS){1'b0}}, l.y, l.x, h, ref_glimpse(img, int'(l.x), int'(l.y))};
      n = 0; depth = 0;
      forever begin
        best = -1; besti = 0; depth++;
        if (n > max_node_seen) max_node_seen = n;
        for (int r = 0; r < int'(desc[n].nrows); r++) begin
          int d;
          d = ref_dist(keys[n][r], q);
          if (best < 0 || d < best) begin best = d; besti = r; end
        end
        if (desc[n].is_leaf) break;
        n = int'(pay[n][besti][NODE_W-1:0]);
      end
      if (depth > deepest) deepest = depth;
      begin
        value_t v;
        v = value_t'(pay[n][besti]);
        h = v.hidden; l = v.loc;
      end
    end
  endtask

  initial begin
    int leaf_i, rows_used;
    longint table_bytes;
    rst_n = 0; key_we = 0; desc_we = 0; pay_we = 0; img_we = 0; weight_we = 0; cs_we = 0; start = 0;
    key_node = 0; key_row = 0; key_part = 0; key_data = 0; desc_node = 0; desc_wdata = '0;
    pay_node = 0; pay_row = 0; pay_wdata = '0; img_addr = 0; img_data = 0; weight_part = 0;
    weight_data = 0; cs_part = 0; cs_col = 0; cs_data = 0; threshold = 0; start_loc = '0;
    n_descents = 0; n_accepts = 0; n_fallbacks = 0; n_full = 0; n_exact = 0;
    max_node_seen = 0; deepest = 0;
    for (int p = 0; p < NPART; p++) begin
      wt[p] = 1;
      for (int c = 0; c < COLS; c++) cs_def[p][c] = default_cs(p, c);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    set_weights();

    // child pointers: root -> level 1 -> level 2 -> leaves
    for (int r = 0; r < ROWS; r++) pay[0][r] = payload_t'(L1 + r);
    for (int i = 0; i < 32; i++)
      for (int r = 0; r < ROWS; r++) pay[L1 + i][r] = payload_t'(L2 + i * 32 + r);
    leaf_i = 0;
    for (int i = 0; i < 1024; i++) begin
      int nc;
      nc = (i < NLEAVES - 1024 * 6) ? 7 : 6;
      desc[L2 + i].nrows = NROWS_W'(nc);
      for (int r = 0; r < nc; r++) begin
        pay[L2 + i][r] = payload_t'(leaf_at(leaf_i));
        leaf_node[leaf_i] = leaf_at(leaf_i);
        leaf_i++;
      end
    end
    check("leaves placed", leaf_i, NLEAVES);

    // load everything through the host ports
    rows_used = 0;
    load_node(0, 0, ROWS);           load_pays(0, ROWS);           rows_used += ROWS;
    for (int i = 0; i < 32; i++) begin
      load_node(L1 + i, 0, ROWS);    load_pays(L1 + i, ROWS);      rows_used += ROWS;
    end
    for (int i = 0; i < 1024; i++) begin
      int nc;
      nc = int'(desc[L2 + i].nrows);
      load_node(L2 + i, 0, nc);      load_pays(L2 + i, nc);        rows_used += nc;
    end
    for (int i = 0; i < NLEAVES; i++) begin
      int n;
      n = leaf_node[i];
      for (int r = 0; r < ROWS; r++) begin
        value_t v;
        v.loc.x = 5'($urandom_range(2, 25)); v.loc.y = 5'($urandom_range(2, 25));
        v.hidden = {$urandom, $urandom}; v.action = ACT_BITS'($urandom_range(0, 9));
        pay[n][r] = payload_t'(v);
      end
      load_node(n, 1, ROWS);         load_pays(n, ROWS);           rows_used += ROWS;
    end
    table_bytes = longint'(NLEAVES) * ROWS * (KEY_W + PAYLOAD_W) / 8;
    $display("leaf table: %0d rows, %0d bytes; rows in use with centroids: %0d of %0d",
             NLEAVES * ROWS, table_bytes, rows_used, NODES * ROWS);
    check("leaf table of 6.21 MB", int'((table_bytes + 5000) / 10000), 621);
    check("table within node memory", int'(rows_used <= NODES * ROWS), 1);

    // images; image 0's first glimpse is steered to the leaf at the top node address
    for (int im = 0; im < NIMG; im++) begin
      load_image(im + 1);
      imgs[im] = img;
      locs[im].x = 5'($urandom_range(3, 24)); locs[im].y = 5'($urandom_range(3, 24));
      if (im == 0) begin
        logic [KEY_W-1:0] q;
        int l2;
        q = {{(COLS - 2 * LOC_BITS){1'b0}}, locs[0].y, locs[0].x, HIDDEN'(0),
             ref_glimpse(img, int'(locs[0].x), int'(locs[0].y))};
        l2 = L2 + 1023;
        write_key(0, 31, q);                                // root row 31 -> node 32
        write_key(L1 + 31, 31, q);                          // node 32 row 31 -> node 1056
        write_key(l2, int'(desc[l2].nrows) - 1, q);         // last child -> node 8191
      end
      for (int g = 0; g < NGLIMPSES; g++) begin
        logic [KEY_W-1:0] q;
        int leaf, nflip;
        query_of(locs[im], g, q, leaf);
        nflip = (im == 1 && g == 0) ? 2 : $urandom_range(0, 3); // image 1 never matches exactly
        for (int f = 0; f < nflip; f++) q[$urandom_range(0, 2 * COLS + HIDDEN - 1)] ^= 1'b1;
        write_key(leaf, $urandom_range(0, ROWS - 1), q);
      end
    end

    // inferences: lookup only, then mixed with threshold 0 (exact matches only)
    for (int t = 0; t < 2; t++) begin
      for (int im = 0; im < NIMG; im++) begin
        bit fb;
        img = imgs[im];
        for (int a = 0; a < IMG * IMG; a++) begin
          @(negedge clk);
          img_we = 1; img_addr = 10'(a); img_data = img[a];
        end
        @(negedge clk) img_we = 0;
        if (t == 0) walk_stats(locs[im]);
        run(locs[im], (t == 0) ? 131071 : 0, fb);
      end
    end

    $display("deepest walk: %0d levels, highest node visited: %0d", deepest, max_node_seen);
    check("walks reach the leaves under four levels", deepest, 4);
    check("walk reaches the highest node address", max_node_seen, NODES - 1);
    check("descents from centroid nodes", int'(n_descents > 0), 1);
    check("leaf lookups within threshold", int'(n_accepts > 0), 1);
    check("mixed-MBI fallbacks", int'(n_fallbacks > 0), 1);
    check("complete 5-glimpse inferences", int'(n_full > 0), 1);
    $display("mechanisms: descents=%0d accepts=%0d fallbacks=%0d full=%0d exact=%0d",
             n_descents, n_accepts, n_fallbacks, n_full, n_exact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
