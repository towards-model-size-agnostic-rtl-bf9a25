// node_memory -- digital SRAM of the lookup tree built by hierarchical
// K-means clustering.
//
// Every tree node is one LUT of up to 32 rows whose keys sit in the
// compute-in-memory arrays. This memory holds what belongs to the node besides
// its keys:
//   desc[node]          : is_leaf flag and number of valid rows (1..32)
//   payload[node][row]  : for a centroid node, the child node of that centroid
//                         in bits [NODE_W-1:0]; for a leaf node, the value of
//                         that key {next location, next hidden state, action}.
// Both have a host write port and a synchronous read port (data valid the
// cycle after the address). The split of keys (in the arrays) from
// pointers/values (here) and the encoding are choices of this design.
module node_memory
  import mbi_pkg::*;
#(
  parameter int unsigned N_NODES = NODES,
  parameter int unsigned N_ROWS  = ROWS
) (
  input  logic              clk,
  // host writes
  input  logic              desc_we,
  input  logic [NODE_W-1:0] desc_waddr,
  input  node_desc_t        desc_wdata,
  input  logic              pay_we,
  input  logic [NODE_W-1:0] pay_wnode,
  input  logic [ROW_W-1:0]  pay_wrow,
  input  payload_t          pay_wdata,
  // reads
  input  logic [NODE_W-1:0] rd_node,
  input  logic [ROW_W-1:0]  rd_row,
  output node_desc_t        desc_rdata,
  output payload_t          pay_rdata
);

  localparam int unsigned DEPTH = N_NODES * N_ROWS;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NW    = (N_NODES > 1) ? $clog2(N_NODES) : 1;

  node_desc_t desc    [N_NODES];
  payload_t   payload [DEPTH];

  logic [AW-1:0] waddr, raddr;
  assign waddr = AW'(pay_wnode) * AW'(N_ROWS) + AW'(pay_wrow);
  assign raddr = AW'(rd_node)   * AW'(N_ROWS) + AW'(rd_row);

  always_ff @(posedge clk) begin
    if (desc_we) desc[NW'(desc_waddr)] <= desc_wdata;
    if (pay_we)  payload[waddr]        <= pay_wdata;
    desc_rdata <= desc[NW'(rd_node)];
    pay_rdata  <= payload[raddr];
  end

endmodule
