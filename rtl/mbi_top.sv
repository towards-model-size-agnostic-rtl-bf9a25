// mbi_top -- memorization-based inference (MBI) engine.
//
// Classifies an image without evaluating a neural network: a recurrent
// attention model has been distilled offline into lookup tables whose keys are
// {glimpse location, hidden state, patch vector} and whose values are {next
// location, next hidden state, class}. The tables are organised as a tree by
// hierarchical clustering; every tree node is a LUT of up to 32 keys searched
// inside compute-in-memory arrays.
//
// Datapath per key row: 5 partition arrays (cim_array, 32 columns each) ->
// sum-line averaging and 5-bit ADC (sl_adc) -> weight multiply (bo_weight_mult)
// -> partition sum -> min search (inside lut_search_ctrl). Around it:
// glimpse_extractor (image buffer and glimpse sensor), query_register,
// node_memory (node descriptors, child pointers and values) and
// mbi_controller (glimpse loop, tree walk, mixed-MBI threshold).
//
// Host interface (all synchronous to clk, one write per cycle each):
//   key_*    : write 32 key bits of (node, row, partition) into the arrays
//   desc_*   : write a node descriptor {is_leaf, nrows}
//   pay_*    : write a row payload (child node or value_t)
//   img_*    : write one image pixel
//   weight_* : write the weight of a partition (reset value 1 = unweighted)
//   cs_*     : write the precharge significance code of one column (reset to
//              the default key layout of mbi_pkg)
//   threshold: mixed-MBI distance limit, in weighted ADC code units
//   start/start_loc -> busy, done pulse, class_out, fallback (the input must be
//   classified by the conventional network instead), error, n_searches,
//   n_glimpses.
// Timing: a tree level whose node has n rows takes 4n+8 cycles (4n+4 for the
// row scan, 4 for descriptor/payload reads and hand-over); a glimpse takes
// 82 + sum over its levels of (4n+8) cycles (80 of them glimpse extraction);
// start to done of an inference is 2 + the sum over its glimpses.
// The top follows the published block diagram of the array periphery and the
// key/value loop; the host ports, register formats and reset values are
// choices of this design.
module mbi_top
  import mbi_pkg::*;
#(
  parameter int unsigned N_NODES = NODES
) (
  input  logic                clk,
  input  logic                rst_n,
  // table loading
  input  logic                key_we,
  input  logic [NODE_W-1:0]   key_node,
  input  logic [ROW_W-1:0]    key_row,
  input  logic [2:0]          key_part,
  input  logic [COLS-1:0]     key_data,
  input  logic                desc_we,
  input  logic [NODE_W-1:0]   desc_node,
  input  node_desc_t          desc_wdata,
  input  logic                pay_we,
  input  logic [NODE_W-1:0]   pay_node,
  input  logic [ROW_W-1:0]    pay_row,
  input  payload_t            pay_wdata,
  // image
  input  logic                img_we,
  input  logic [9:0]          img_addr,
  input  logic [PIX_BITS-1:0] img_data,
  // configuration
  input  logic                weight_we,
  input  logic [2:0]          weight_part,
  input  logic [W_BITS-1:0]   weight_data,
  input  logic                cs_we,
  input  logic [2:0]          cs_part,
  input  logic [ROW_W-1:0]    cs_col,
  input  cs_t                 cs_data,
  input  logic [DIST_W-1:0]   threshold,
  // inference
  input  logic                start,
  input  loc_t                start_loc,
  output logic                busy,
  output logic                done,
  output logic [ACT_BITS-1:0] class_out,
  output logic                fallback,
  output logic                error,
  output logic [7:0]          n_searches,
  output logic [3:0]          n_glimpses
);

  // ---------------- configuration registers ----------------
  logic [W_BITS-1:0] weight [NPART];
  cs_t               cs     [NPART][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPART; p++) begin
        weight[p] <= W_BITS'(1);
        for (int c = 0; c < COLS; c++) cs[p][c] <= default_cs(p, c);
      end
    end else begin
      if (weight_we && int'(weight_part) < NPART) weight[weight_part] <= weight_data;
      if (cs_we && int'(cs_part) < NPART)         cs[cs_part][cs_col] <= cs_data;
    end
  end

  // ---------------- control ----------------
  cim_ctrl_t          ctrl;
  logic               g_start, g_done, g_busy;
  loc_t               g_loc, q_loc;
  logic [PATCH_W-1:0] patch;
  logic               q_load;
  logic [HIDDEN-1:0]  q_hidden;
  logic [NODE_W-1:0]  rd_node, s_node;
  logic [ROW_W-1:0]   rd_row, s_min_idx;
  node_desc_t         desc_rdata;
  payload_t           pay_rdata;
  logic               s_start, s_done, s_busy;
  logic [NROWS_W-1:0] s_nrows;
  logic [DIST_W-1:0]  s_min_val;

  glimpse_extractor u_glimpse (
    .clk, .rst_n,
    .img_we, .img_addr, .img_data,
    .start(g_start), .loc(g_loc), .busy(g_busy), .done(g_done), .patch
  );

  logic [COLS-1:0] cl [NPART], clb [NPART];

  query_register u_query (
    .clk, .rst_n, .load(q_load), .patch, .hidden(q_hidden), .loc(q_loc), .cl, .clb
  );

  node_memory #(.N_NODES(N_NODES)) u_nodes (
    .clk,
    .desc_we, .desc_waddr(desc_node), .desc_wdata,
    .pay_we, .pay_wnode(pay_node), .pay_wrow(pay_row), .pay_wdata,
    .rd_node, .rd_row, .desc_rdata, .pay_rdata
  );

  // ---------------- key partitions: array, ADC, weight ----------------
  logic [ADC_BITS-1:0] code      [NPART];
  logic                code_vld  [NPART];
  logic [WDIST_W-1:0]  wdist     [NPART];
  logic                wdist_vld [NPART];
  logic                sum_valid;
  logic [DIST_W-1:0]   sum_dist;

  for (genvar p = 0; p < NPART; p++) begin : g_part
    uv_t v_slp, v_sln, v_ref;

    cim_array #(.N_NODES(N_NODES)) u_array (
      .clk,
      .we(key_we && int'(key_part) == p), .w_node(key_node), .w_row(key_row), .w_data(key_data),
      .cl(cl[p]), .clb(clb[p]), .cs(cs[p]), .ctrl,
      .v_slp, .v_sln, .v_ref
    );

    sl_adc u_adc (
      .clk, .rst_n, .conv(ctrl.conv), .v_slp, .v_sln, .v_ref,
      .valid(code_vld[p]), .code(code[p])
    );

    bo_weight_mult u_wmul (
      .clk, .rst_n, .in_valid(code_vld[p]), .code(code[p]), .weight(weight[p]),
      .out_valid(wdist_vld[p]), .product(wdist[p])
    );
  end

  partition_sum u_psum (
    .clk, .rst_n, .in_valid(wdist_vld[0]), .part(wdist),
    .out_valid(sum_valid), .sum(sum_dist)
  );

  lut_search_ctrl u_search (
    .clk, .rst_n,
    .start(s_start), .node(s_node), .nrows(s_nrows), .ctrl,
    .sum_valid, .sum_dist,
    .busy(s_busy), .done(s_done), .min_val(s_min_val), .min_idx(s_min_idx)
  );

  mbi_controller u_ctrl (
    .clk, .rst_n,
    .start, .start_loc, .threshold,
    .busy, .done, .class_out, .fallback, .error, .n_searches, .n_glimpses,
    .g_start, .g_loc, .g_done,
    .q_load, .q_hidden, .q_loc,
    .rd_node, .rd_row, .desc_rdata, .pay_rdata,
    .s_start, .s_node, .s_nrows, .s_done, .s_min_val, .s_min_idx
  );

endmodule
