// query_register -- builds and holds the query vector of one glimpse step and
// drives it onto the query lines of all key partitions.
//
// On 'load' it captures {patch vector, hidden state, location} into the
// 160-bit key layout (see mbi_pkg): patches 0 and 1 in partitions 0 and 1
// (2 bits per element, LSB in the even column), the 64 hidden-state bits in
// partitions 2 and 3, and the x/y glimpse coordinates in the first ten columns
// of partition 4 (remaining columns 0). The register output drives CL (q)
// directly and CLB (~q) through an inverter per column, as in the published
// array drawing. The concrete layout is a choice of this design.
// Timing: the new query is on CL/CLB in the cycle after 'load'. Reset clears it.
module query_register
  import mbi_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [PATCH_W-1:0]  patch,   // element e in bits [2e+1:2e]
  input  logic [HIDDEN-1:0]   hidden,
  input  loc_t                loc,
  output logic [COLS-1:0]     cl  [NPART],
  output logic [COLS-1:0]     clb [NPART]
);

  logic [KEY_W-1:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= {{(COLS - 2 * LOC_BITS){1'b0}}, loc.y, loc.x, hidden, patch};
  end

  always_comb begin
    for (int p = 0; p < NPART; p++) begin
      cl[p]  = q[p*COLS +: COLS];
      clb[p] = ~q[p*COLS +: COLS];
    end
  end

endmodule
