// Test of the packing register file: sets of nine 128-bit registers are
// offered at random, a random ldps reader pops; wr_ready must be high
// exactly when nine entries are free, reads must return registers oldest
// first, and one read per cycle must be possible.
module tb_packed_regfile;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush = 1'b0, wr_valid = 1'b0, rd_ready = 1'b0;
  logic wr_ready, rd_valid;
  logic [8:0][127:0] wr_data = '0;
  logic [127:0] rd_data;
  logic [4:0] count;
  int checks = 0, failures = 0;
  logic [127:0] model[$];
  int n_block = 0, n_reads = 0;

  packed_regfile u_dut (.clk, .rst_n, .flush, .wr_valid, .wr_ready, .wr_data,
                        .rd_valid, .rd_ready, .rd_data, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      check(wr_ready == (16 - model.size() >= 9), "wr_ready");
      check(rd_valid == (model.size() != 0), "rd_valid");
      check(int'(count) == model.size(), "count");
      if (model.size() != 0) check(rd_data == model[0], "oldest register");
      wr_valid = ($urandom_range(99) < 40);
      for (int p = 0; p < 9; p++) wr_data[p] = {$urandom, $urandom, $urandom, $urandom};
      rd_ready = (it > 4000) ? 1'b1 : ($urandom_range(99) < 60);
      if (wr_valid && !wr_ready) n_block++;
      @(posedge clk);
      if (rd_ready && model.size() != 0) begin void'(model.pop_front()); n_reads++; end
      if (wr_valid && wr_ready) for (int p = 0; p < 9; p++) model.push_back(wr_data[p]);
    end
    check(n_block > 0, "a set waited for space");
    check(n_reads > 1000, "registers were read");
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
