// precharge_dac -- behavioural model of the column DAC array of a
// compute-in-memory (CIM) key array.
//
// Each column's bit lines are precharged to a level that encodes the bit
// significance of the key/query bit stored in that column: for p-bit elements
// the column of significance j gets V_P,max / 2^(p-j-1), so the MSB column sits
// at V_P,max and each lower bit halves it (as in the published design). The
// significance is given per column as a shift code (CS): V_P = V_P,max >> cs;
// code CS_OFF (7) leaves an unused column at 0 V. The code format and the
// 819.2 mV V_P,max are choices of this model.
//
// This is an analog block; the model represents voltages as unsigned integers
// in microvolts and is purely combinational (the DAC is settled before PCH).
module precharge_dac
  import mbi_pkg::*;
#(
  parameter int unsigned N_COLS  = COLS,
  parameter int unsigned VMAX    = VMAX_UV
) (
  input  cs_t cs [N_COLS],  // column significance codes
  output uv_t vp [N_COLS]   // precharge level of each column, microvolts
);

  always_comb begin
    for (int c = 0; c < N_COLS; c++) begin
      if (cs[c] == CS_OFF) vp[c] = '0;
      else                 vp[c] = uv_t'(VMAX) >> cs[c];
    end
  end

endmodule
