// tb_mbi_ref_pkg -- reference models used by the testbenches. They compute
// the expected results from the algorithm's definition (bit mismatches,
// pixel averages, tree walk), not from the RTL's microvolt arithmetic.
package tb_mbi_ref_pkg;
  import mbi_pkg::*;

  // Relative precharge weight of a column, in units of VMAX/16.
  function automatic int unsigned col_weight(cs_t cs);
    return (cs == CS_OFF) ? 0 : (16 >> cs);
  endfunction

  // Expected ADC code of one partition: 32 * (discharged charge / precharged
  // charge), saturated to 31. A column whose key bit differs from the query
  // bit discharges exactly one of BL/BLB.
  function automatic int unsigned ref_code(logic [COLS-1:0] key, logic [COLS-1:0] q,
                                           cs_t cs [COLS]);
    int unsigned all, mis, code;
    all = 0;
    mis = 0;
    for (int c = 0; c < COLS; c++) begin
      all += col_weight(cs[c]);
      if (key[c] != q[c]) mis += col_weight(cs[c]);
    end
    if (all == 0) return 0;
    code = (32 * mis) / all;
    return (code > 31) ? 31 : code;
  endfunction

  // Expected 2-bit patch vector of a glimpse centred on (x, y).
  function automatic logic [PATCH_W-1:0] ref_glimpse(byte unsigned img [IMG*IMG],
                                                    int x, int y);
    logic [PATCH_W-1:0] pv;
    pv = '0;
    for (int i = 0; i < NPATCHES; i++) begin
      int b, side, sum, px, py, avg;
      b    = SCALE ** i;
      side = PATCH * b;
      for (int r = 0; r < PATCH; r++)
        for (int c = 0; c < PATCH; c++) begin
          sum = 0;
          for (int dy = 0; dy < b; dy++)
            for (int dx = 0; dx < b; dx++) begin
              py = y - side / 2 + r * b + dy;
              px = x - side / 2 + c * b + dx;
              if (py >= 0 && py < IMG && px >= 0 && px < IMG) sum += img[py * IMG + px];
            end
          avg = sum / (b * b);
          pv[(i * PATCH * PATCH + r * PATCH + c) * 2 +: 2] = 2'(avg / 64);
        end
    end
    return pv;
  endfunction

endpackage
