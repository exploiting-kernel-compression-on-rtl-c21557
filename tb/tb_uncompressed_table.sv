// Test of the banked uncompressed table: every entry of every bank written
// with a distinct value, then read back in random order with the one-cycle
// latency; a read of one bank must leave the other banks' outputs alone.
module tb_uncompressed_table;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, re = 1'b0;
  logic [1:0] wbank = '0, rbank = '0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [8:0] wdata = '0;
  logic [3:0][8:0] rdata;
  int checks = 0, failures = 0;

  uncompressed_table u_dut (.clk, .we, .wbank, .waddr, .wdata, .re, .rbank, .raddr, .rdata);

  function automatic logic [8:0] val(int b, int a);
    return 9'((b * 256 + a) * 37 + 5);
  endfunction

  initial begin
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        we = 1'b1; wbank = 2'(b); waddr = 8'(a); wdata = val(b, a);
      end
    @(negedge clk);
    we = 1'b0;
    for (int it = 0; it < 2000; it++) begin
      int b, a;
      logic [3:0][8:0] prev_data;
      b = int'($urandom_range(3));
      a = int'($urandom_range(255));
      @(negedge clk);
      prev_data = rdata;
      re = 1'b1; rbank = 2'(b); raddr = 8'(a);
      @(negedge clk);
      re = 1'b0;
      checks++;
      if (rdata[b] != val(b, a)) begin
        failures++;
        $display("FAIL bank %0d addr %0d got %h", b, a, rdata[b]);
      end
      for (int o = 0; o < 4; o++)
        if (o != b) begin
          checks++;
          if (rdata[o] != prev_data[o]) begin failures++; $display("FAIL bank %0d changed", o); end
        end
    end
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
