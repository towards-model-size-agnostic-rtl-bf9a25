// min_search -- comparator with the Min-Val and Min-Index registers that find
// the closest key while the rows of a LUT are scanned one after another.
//
// 'clear' starts a new scan (Min-Val set to all ones, Min-Index to 0, found
// cleared). Each cycle with in_valid compares 'dist_in' with Min-Val; if it is
// strictly smaller (or it is the first row of the scan) Min-Val and Min-Index
// take the new distance and 'idx'. Ties keep the earlier row, a choice of this
// design. The registers update at the clock edge of the compare, so the result
// of the last row is visible the cycle after it.
module min_search
  import mbi_pkg::*;
#(
  parameter int unsigned D_W = DIST_W,
  parameter int unsigned I_W = ROW_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  input  logic [D_W-1:0] dist_in,
  input  logic [I_W-1:0] idx,
  output logic [D_W-1:0] min_val,
  output logic [I_W-1:0] min_idx,
  output logic           found
);

  logic less;

  assign less = !found || (dist_in < min_val);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min_val <= '1;
      min_idx <= '0;
      found   <= 1'b0;
    end else if (clear) begin
      min_val <= '1;
      min_idx <= '0;
      found   <= 1'b0;
    end else if (in_valid && less) begin
      min_val <= dist_in;
      min_idx <= idx;
      found   <= 1'b1;
    end
  end

  // a scan is never cleared and compared in the same cycle
  a_no_clear_and_compare: assert property (@(posedge clk) disable iff (!rst_n) !(clear && in_valid));

endmodule
