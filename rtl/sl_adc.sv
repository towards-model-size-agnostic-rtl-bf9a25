// sl_adc -- behavioural model of the sum-line adder and the 5-bit ADC of one
// key partition.
//
// The '+' stage averages the two sum lines, V = (V_SLP + V_SLN)/2. Since every
// mismatching column discharges exactly one of its two bit lines, the drop of
// V below the no-discharge level v_ref is proportional to the
// bit-significance-weighted distance between key and query. The ADC samples on
// 'conv' and converts that drop ratiometrically:
//   code = min(2^B - 1, floor(2^B * 2*(v_ref - V) / v_ref))
// i.e. 2^B times the discharged fraction of the precharged charge, so code 0
// is an exact match. The 5-bit resolution follows the published design; the
// ratiometric conversion against v_ref and the saturation are choices of this
// model. The code is registered: it is valid (valid = 1) in the cycle after
// the conv strobe.
module sl_adc
  import mbi_pkg::*;
#(
  parameter int unsigned B = ADC_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         conv,
  input  uv_t          v_slp,
  input  uv_t          v_sln,
  input  uv_t          v_ref,
  output logic         valid,
  output logic [B-1:0] code
);

  logic [B-1:0] code_d;

  always_comb begin
    logic [47:0] vsum, vref2, drop2, q;

    vsum  = 48'(v_slp) + 48'(v_sln);   // 2 * average
    vref2 = 48'(v_ref) << 1;
    drop2 = (vref2 > vsum) ? vref2 - vsum : '0;  // 2 * drop
    if (v_ref == '0) q = '0;
    else             q = (drop2 << B) / 48'(v_ref); // 2^B * 2*drop / v_ref
    code_d = (q >= 48'((1 << B) - 1)) ? B'((1 << B) - 1) : B'(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      code  <= '0;
    end else begin
      valid <= conv;
      if (conv) code <= code_d;
    end
  end

endmodule
