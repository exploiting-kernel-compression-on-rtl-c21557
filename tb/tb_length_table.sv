// Test of the length table: random loads, every node read back, reset clear.
module tb_length_table;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic load = 1'b0;
  logic [3:0][3:0] load_len = '0;
  logic [1:0] rd_node = '0;
  logic [3:0] rd_len;
  int checks = 0, failures = 0;

  length_table u_dut (.clk, .rst_n, .load, .load_len, .rd_node, .rd_len);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [3:0][3:0] v;
    @(negedge clk);
    for (int n = 0; n < 4; n++) begin
      rd_node = 2'(n);
      #1 check(rd_len == 4'd0, "cleared by reset");
    end
    rst_n = 1'b1;
    for (int it = 0; it < 50; it++) begin
      @(negedge clk);
      v = {4'($urandom), 4'($urandom), 4'($urandom), 4'($urandom)};
      load_len = v;
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      load_len = ~v;
      for (int n = 0; n < 4; n++) begin
        rd_node = 2'(n);
        #1 check(rd_len == v[n], $sformatf("node %0d len %0d exp %0d", n, rd_len, v[n]));
      end
      @(negedge clk);
      rd_node = 2'($urandom);
      #1 check(rd_len == v[rd_node], "entry held without load");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
