// Test of the decoder unit: the table is filled with the test tree's leaves,
// then random (node, index) pairs, one per cycle with random gaps, must come
// out as the leaf values exactly one cycle later and in order.
module tb_decoder_unit;
  import tb_du_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush = 1'b0, in_valid = 1'b0, tbl_we = 1'b0;
  logic [1:0] in_node = '0, tbl_wnode = '0;
  logic [7:0] in_addr = '0, tbl_waddr = '0;
  logic [8:0] tbl_wdata = '0;
  logic out_valid;
  logic [8:0] out_seq;
  int checks = 0, failures = 0;
  int exp_q[$];
  int sent = 0, got = 0;
  logic v_d = 1'b0;

  decoder_unit u_dut (.clk, .rst_n, .flush, .in_valid, .in_node, .in_addr,
                      .tbl_we, .tbl_wnode, .tbl_waddr, .tbl_wdata, .out_valid, .out_seq);

  always @(posedge clk) begin
    v_d <= in_valid;
    if (rst_n) begin
      checks++;
      if (out_valid != v_d) begin failures++; $display("FAIL latency is not one cycle"); end
      if (out_valid) begin
        int e;
        got++;
        e = exp_q.pop_front();
        checks++;
        if (out_seq != 9'(e)) begin failures++; $display("FAIL got %h exp %h", out_seq, e); end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int nd = 0; nd < 4; nd++)
      for (int ix = 0; ix < NODE_SIZE[nd]; ix++) begin
        @(posedge clk);
        tbl_we <= 1'b1; tbl_wnode <= 2'(nd); tbl_waddr <= 8'(ix); tbl_wdata <= 9'(leaf_value(nd, ix));
      end
    @(posedge clk);
    tbl_we <= 1'b0;
    for (int it = 0; it < 1000; it++) begin
      int nd, ix;
      @(posedge clk);
      if ($urandom_range(3) == 0) in_valid <= 1'b0;
      else begin
        nd = rand_node();
        ix = int'($urandom_range(NODE_SIZE[nd] - 1));
        in_valid <= 1'b1; in_node <= 2'(nd); in_addr <= 8'(ix);
        exp_q.push_back(leaf_value(nd, ix));
        sent++;
      end
    end
    @(posedge clk);
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
