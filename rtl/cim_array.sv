// cim_array -- behavioural model of one partition of the in-memory key search:
// an array of 10-T SRAM cells (a 6-T SRAM cell plus a 4-transistor distance
// port), the column precharge DAC, the row lines and the charge-sum (CSUM)
// transmission gates onto the sum lines SLP and SLN.
//
// Operation, one row at a time, following the published four-step sequence:
//   pch  (step 1): every BL and BLB is precharged to its column's DAC level.
//   eval (step 2): the row line of the addressed row is raised. A cell with key
//                  bit k discharges BL when k=1 and the query bit q=0 (the CLB
//                  line is high) and BLB when k=0 and q=1 (CL high).
//   csum (step 3): all BL are averaged onto SLP and all BLB onto SLN:
//                  V_SLP = (1/C) sum (1 - [k=1,q=0]) V_P,col
//                  V_SLN = (1/C) sum (1 - [k=0,q=1]) V_P,col
//   The ADC (sl_adc) then samples the sum lines (step 4).
// Each strobe takes effect at the rising clock edge on which it is high.
//
// The real design has one 32x32 array per LUT node and partition. To keep
// the model small enough to simulate, the NODES arrays of one partition are
// folded into one storage array addressed by {node,row}; they share the DAC and
// sum-line model, which is equivalent because only one node is searched at a
// time. The model also provides v_ref, the sum-line level with no discharge
// (a never-discharged dummy column pair), which the ADC uses as its reference.
// That reference, the microvolt integer representation and ideal (noise-free)
// charge sharing are choices of this model.
//
// Keys are written through an ordinary SRAM write port (we/w_node/w_row/w_data).
module cim_array
  import mbi_pkg::*;
#(
  parameter int unsigned N_ROWS  = ROWS,
  parameter int unsigned N_COLS  = COLS,
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned VMAX    = VMAX_UV
) (
  input  logic              clk,
  // SRAM write port
  input  logic              we,
  input  logic [NODE_W-1:0] w_node,
  input  logic [ROW_W-1:0]  w_row,
  input  logic [N_COLS-1:0] w_data,
  // query lines from the query register: CL carries q, CLB carries ~q
  input  logic [N_COLS-1:0] cl,
  input  logic [N_COLS-1:0] clb,
  // column significance codes for the DAC array
  input  cs_t               cs [N_COLS],
  // step strobes and row address
  input  cim_ctrl_t         ctrl,
  // sum lines and reference, microvolts
  output uv_t               v_slp,
  output uv_t               v_sln,
  output uv_t               v_ref
);

  localparam int unsigned DEPTH = N_NODES * N_ROWS;

  logic [N_COLS-1:0] keys [DEPTH];
  uv_t               vp   [N_COLS];
  uv_t               bl   [N_COLS];
  uv_t               blb  [N_COLS];
  logic [N_COLS-1:0] krow;
  logic [$clog2(DEPTH)-1:0] raddr, waddr;

  precharge_dac #(.N_COLS(N_COLS), .VMAX(VMAX)) u_dac (.cs(cs), .vp(vp));

  assign raddr = ($clog2(DEPTH))'(ctrl.node) * ($clog2(DEPTH))'(N_ROWS) + ($clog2(DEPTH))'(ctrl.row);
  assign waddr = ($clog2(DEPTH))'(w_node) * ($clog2(DEPTH))'(N_ROWS) + ($clog2(DEPTH))'(w_row);
  assign krow  = keys[raddr];

  always_ff @(posedge clk) begin
    if (we) keys[waddr] <= w_data;
  end

  // bit lines: precharge, then conditional discharge by the selected row
  always_ff @(posedge clk) begin
    for (int c = 0; c < N_COLS; c++) begin
      if (ctrl.pch) begin
        bl[c]  <= vp[c];
        blb[c] <= vp[c];
      end else if (ctrl.eval) begin
        if (krow[c] && clb[c])  bl[c]  <= '0;
        if (!krow[c] && cl[c])  blb[c] <= '0;
      end
    end
  end

  // charge sharing onto the sum lines
  always_ff @(posedge clk) begin
    if (ctrl.csum) begin
      logic [47:0] sp, sn;
      sp = '0;
      sn = '0;
      for (int c = 0; c < N_COLS; c++) begin
        sp += 48'(bl[c]);
        sn += 48'(blb[c]);
      end
      v_slp <= uv_t'(sp / 48'(N_COLS));
      v_sln <= uv_t'(sn / 48'(N_COLS));
    end
  end

  always_comb begin
    logic [47:0] sr;
    sr = '0;
    for (int c = 0; c < N_COLS; c++) sr += 48'(vp[c]);
    v_ref = uv_t'(sr / 48'(N_COLS));
  end

endmodule
