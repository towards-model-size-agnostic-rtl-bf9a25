// mbi_controller -- glimpse loop and lookup-tree walk of memorization-based
// inference.
//
// For each of the NGLIMPSES glimpses it
//   1. asks the glimpse extractor for the patch vector at the current location,
//   2. loads the query register with {location, hidden state, patch},
//   3. walks the lookup tree from the root (node 0): the LUT of the current
//      node is searched for the closest row; at a centroid node the row's
//      payload names the child node to search next, at a leaf node the row's
//      payload is the memorised value,
//   4. at the leaf checks the mixed-MBI rule: if the distance of the best key
//      is above 'threshold', the input is handed to the conventional network
//      ('fallback' set, inference stops); otherwise the value's location and
//      hidden state become those of the next glimpse and its action is the
//      current class prediction.
// After the last glimpse the action of that glimpse is the class. The initial
// hidden state is all zeros and the first location is given by the host;
// 'error' is set (and inference stops) if a walk exceeds MAX_DEPTH nodes.
// Walking the tree by repeated LUT searches, stopping at the first glimpse
// that misses the threshold and the zero initial hidden state are choices of
// this design. Handshakes: 'start' is taken when idle; 'done' pulses once with
// class_out/fallback/error valid until the next start.
module mbi_controller
  import mbi_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // host
  input  logic                start,
  input  loc_t                start_loc,
  input  logic [DIST_W-1:0]   threshold,
  output logic                busy,
  output logic                done,
  output logic [ACT_BITS-1:0] class_out,
  output logic                fallback,
  output logic                error,
  output logic [7:0]          n_searches,   // LUT searches in this inference
  output logic [3:0]          n_glimpses,   // glimpses completed by lookup
  // glimpse extractor
  output logic                g_start,
  output loc_t                g_loc,
  input  logic                g_done,
  // query register
  output logic                q_load,
  output logic [HIDDEN-1:0]   q_hidden,
  output loc_t                q_loc,
  // node memory
  output logic [NODE_W-1:0]   rd_node,
  output logic [ROW_W-1:0]    rd_row,
  input  node_desc_t          desc_rdata,
  input  payload_t            pay_rdata,
  // LUT search
  output logic                s_start,
  output logic [NODE_W-1:0]   s_node,
  output logic [NROWS_W-1:0]  s_nrows,
  input  logic                s_done,
  input  logic [DIST_W-1:0]   s_min_val,
  input  logic [ROW_W-1:0]    s_min_idx
);

  typedef enum logic [3:0] {
    C_IDLE, C_GLIMPSE, C_WAIT_G, C_DESC, C_DESC_W, C_SEARCH, C_PAY, C_PAY_W, C_FINISH
  } cstate_t;

  cstate_t           st;
  logic [HIDDEN-1:0] hidden;
  loc_t              loc;
  logic [NODE_W-1:0] node;
  logic              leaf;
  logic [3:0]        depth;
  value_t            val;

  assign val      = value_t'(pay_rdata);
  assign g_loc    = loc;
  assign q_hidden = hidden;
  assign q_loc    = loc;
  assign rd_node  = node;
  assign rd_row   = s_min_idx;
  assign s_node   = node;
  assign s_nrows  = desc_rdata.nrows;
  assign g_start  = (st == C_GLIMPSE);
  assign q_load   = (st == C_WAIT_G) && g_done;
  assign s_start  = (st == C_DESC_W);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      hidden     <= '0;
      loc        <= '0;
      node       <= '0;
      leaf       <= 1'b0;
      depth      <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
      class_out  <= '0;
      fallback   <= 1'b0;
      error      <= 1'b0;
      n_searches <= '0;
      n_glimpses <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          hidden     <= '0;
          loc        <= start_loc;
          busy       <= 1'b1;
          fallback   <= 1'b0;
          error      <= 1'b0;
          n_searches <= '0;
          n_glimpses <= '0;
          st         <= C_GLIMPSE;
        end
        C_GLIMPSE: st <= C_WAIT_G;
        C_WAIT_G: if (g_done) begin
          node  <= '0;              // root of the lookup tree
          depth <= '0;
          st    <= C_DESC;
        end
        C_DESC:   st <= C_DESC_W;   // descriptor read
        C_DESC_W: begin
          leaf       <= desc_rdata.is_leaf;
          n_searches <= n_searches + 1'b1;
          st         <= C_SEARCH;
        end
        C_SEARCH: if (s_done) st <= C_PAY;
        C_PAY:    st <= C_PAY_W;    // payload read of the winning row
        C_PAY_W: begin
          if (!leaf) begin
            if (int'(depth) + 1 >= MAX_DEPTH) begin
              error <= 1'b1;
              st    <= C_FINISH;
            end else begin
              node  <= pay_rdata[NODE_W-1:0];
              depth <= depth + 1'b1;
              st    <= C_DESC;
            end
          end else if (s_min_val > threshold) begin
            fallback <= 1'b1;       // mixed-MBI: hand over to the DNN
            st       <= C_FINISH;
          end else begin
            hidden     <= val.hidden;
            loc        <= val.loc;
            class_out  <= val.action;
            n_glimpses <= n_glimpses + 1'b1;
            st         <= (int'(n_glimpses) + 1 == NGLIMPSES) ? C_FINISH : C_GLIMPSE;
          end
        end
        C_FINISH: begin
          busy <= 1'b0;
          done <= 1'b1;
          st   <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  a_one_outcome: assert property (@(posedge clk) disable iff (!rst_n) done |-> !(fallback && error));

endmodule
