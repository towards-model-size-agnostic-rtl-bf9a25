// lut_search_ctrl -- row sequencer of one LUT search: finds the stored key
// closest to the query among the rows of one tree node.
//
// For every row 0..nrows-1 it runs the four published steps, one clock cycle
// each: PCH (precharge bit lines), EVAL (raise the row line, cells discharge
// BL/BLB on mismatch), CSUM (charge-share onto SLP/SLN) and CONV (ADC samples).
// The 'ctrl' bundle goes to all partition arrays and ADCs at once. Behind the
// ADC the weight multiply and the partition sum take one cycle each, so the
// total distance of a row arrives on sum_valid/sum_dist three cycles after its
// CONV cycle; rows arrive in order and are numbered by arrival. The built-in
// min_search keeps the smallest distance and its row.
// Timing: 'start' (accepted when not busy) to the 'done' pulse is
// 4*nrows + 4 cycles; min_val/min_idx are valid from 'done' until the next
// start. One cycle per step is a choice of this design; the publication gives
// the order of the steps but no timing.
module lut_search_ctrl
  import mbi_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [NODE_W-1:0]  node,
  input  logic [NROWS_W-1:0] nrows,   // 1..ROWS
  output cim_ctrl_t          ctrl,
  input  logic               sum_valid,
  input  logic [DIST_W-1:0]  sum_dist,
  output logic               busy,
  output logic               done,
  output logic [DIST_W-1:0]  min_val,
  output logic [ROW_W-1:0]   min_idx
);

  typedef enum logic [2:0] {S_IDLE, S_PCH, S_EVAL, S_CSUM, S_CONV, S_DRAIN} state_t;

  state_t             state;
  logic [NODE_W-1:0]  cur_node;
  logic [NROWS_W-1:0] cur_nrows;
  logic [ROW_W-1:0]   row;     // row being evaluated
  logic [NROWS_W-1:0] rcount;  // rows whose distance has arrived
  logic               cmp_en;
  logic               found;

  assign cmp_en = busy && sum_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_node  <= '0;
      cur_nrows <= '0;
      row       <= '0;
      rcount    <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cur_node  <= node;
          cur_nrows <= (nrows == '0) ? NROWS_W'(1) : nrows;
          row       <= '0;
          rcount    <= '0;
          busy      <= 1'b1;
          state     <= S_PCH;
        end
        S_PCH:  state <= S_EVAL;
        S_EVAL: state <= S_CSUM;
        S_CSUM: state <= S_CONV;
        S_CONV: begin
          if (NROWS_W'(row) == cur_nrows - 1'b1) state <= S_DRAIN;
          else begin
            row   <= row + 1'b1;
            state <= S_PCH;
          end
        end
        S_DRAIN: ;
        default: state <= S_IDLE;
      endcase
      if (cmp_en) begin
        rcount <= rcount + 1'b1;
        if (rcount == cur_nrows - 1'b1) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
      end
    end
  end

  always_comb begin
    ctrl      = '0;
    ctrl.node = cur_node;
    ctrl.row  = row;
    ctrl.pch  = (state == S_PCH);
    ctrl.eval = (state == S_EVAL);
    ctrl.csum = (state == S_CSUM);
    ctrl.conv = (state == S_CONV);
  end

  min_search #(.D_W(DIST_W), .I_W(ROW_W)) u_min (
    .clk, .rst_n,
    .clear   (start && state == S_IDLE),
    .in_valid(cmp_en),
    .dist_in    (sum_dist),
    .idx     (rcount[ROW_W-1:0]),
    .min_val,
    .min_idx,
    .found
  );

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_done_has_result:     assert property (@(posedge clk) disable iff (!rst_n) done |-> found);

endmodule
