// bo_weight_mult -- multiplies the digitised distance of one key partition by
// the weight learned by Bayesian optimisation for that partition.
//
// The published distance metric weights the Manhattan distances of the patch,
// hidden-state and location parts of the key by learned factors a, b, c; each
// partition's ADC code is multiplied by its factor before the partitions are
// added. The division by (a+b+c) in the published formula is a constant for
// all keys and is left out here: it does not change which key is closest, and
// the mixed-MBI threshold is programmed in the same unnormalised scale.
// One pipeline stage: the product appears with out_valid one cycle after
// in_valid. The 8-bit unsigned weight width is a choice of this design.
module bo_weight_mult
  import mbi_pkg::*;
#(
  parameter int unsigned CODE_W = ADC_BITS,
  parameter int unsigned WT_W   = W_BITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [CODE_W-1:0]      code,
  input  logic [WT_W-1:0]        weight,
  output logic                   out_valid,
  output logic [CODE_W+WT_W-1:0] product
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      product   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) product <= (CODE_W+WT_W)'(code) * (CODE_W+WT_W)'(weight);
    end
  end

endmodule
