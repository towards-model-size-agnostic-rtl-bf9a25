// tb_node_memory -- writes random descriptors and payloads into a small
// memory and reads them back in random order, checking data and the one-cycle
// read latency.
module tb_node_memory;
  import mbi_pkg::*;

  localparam int unsigned NN = 8;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic desc_we, pay_we;
  logic [NODE_W-1:0] desc_waddr, pay_wnode, rd_node;
  logic [ROW_W-1:0] pay_wrow, rd_row;
  node_desc_t desc_wdata, desc_rdata, dsh [NN];
  payload_t pay_wdata, pay_rdata, psh [NN][ROWS];

  node_memory #(.N_NODES(NN)) dut (.clk, .desc_we, .desc_waddr, .desc_wdata, .pay_we, .pay_wnode,
                                   .pay_wrow, .pay_wdata, .rd_node, .rd_row, .desc_rdata, .pay_rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    desc_we = 0; pay_we = 0; desc_waddr = 0; pay_wnode = 0; pay_wrow = 0; rd_node = 0; rd_row = 0;
    desc_wdata = '0; pay_wdata = '0;
    for (int n = 0; n < NN; n++) begin
      @(negedge clk);
      desc_we = 1; desc_waddr = NODE_W'(n);
      desc_wdata.is_leaf = 1'($urandom); desc_wdata.nrows = NROWS_W'($urandom_range(1, ROWS));
      dsh[n] = desc_wdata;
      for (int r = 0; r < ROWS; r++) begin
        if (r > 0) @(negedge clk);
        if (r > 0) desc_we = 0;
        pay_we = 1; pay_wnode = NODE_W'(n); pay_wrow = ROW_W'(r);
        pay_wdata = payload_t'({$urandom, $urandom, $urandom});
        psh[n][r] = pay_wdata;
      end
    end
    @(negedge clk) begin desc_we = 0; pay_we = 0; end
    for (int t = 0; t < 300; t++) begin
      int n, r;
      n = $urandom_range(0, NN - 1); r = $urandom_range(0, ROWS - 1);
      rd_node = NODE_W'(n); rd_row = ROW_W'(r);
      @(negedge clk);
      checks++;
      if (desc_rdata != dsh[n] || pay_rdata != psh[n][r]) begin
        failures++;
        $display("FAIL read node %0d row %0d", n, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
