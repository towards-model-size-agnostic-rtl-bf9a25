// partition_sum -- adds the weighted distances of the key partitions.
//
// A key that is wider than one compute-in-memory array is split across several
// arrays that are evaluated in parallel on the same row (5 partitions of 32
// columns here). This stage adds their weighted distances into the total
// distance of the row. One pipeline stage: 'sum' is valid with out_valid one
// cycle after in_valid. The adder width is chosen so it cannot overflow.
module partition_sum
  import mbi_pkg::*;
#(
  parameter int unsigned N   = NPART,
  parameter int unsigned IN_W  = WDIST_W,
  parameter int unsigned OUT_W = IN_W + $clog2(N) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  part [N],
  output logic             out_valid,
  output logic [OUT_W-1:0] sum
);

  logic [OUT_W-1:0] s;

  always_comb begin
    s = '0;
    for (int i = 0; i < N; i++) s += OUT_W'(part[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum <= s;
    end
  end

endmodule
