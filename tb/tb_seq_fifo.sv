// Test of the decoded sequence buffer against a queue model: random pushes
// (never when full) and pops (never when empty), flags and free count checked
// every cycle, data in order, flush empties it.
module tb_seq_fifo;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush = 1'b0, push = 1'b0, pop = 1'b0;
  logic [8:0] push_data = '0, pop_data;
  logic empty, full;
  logic [3:0] free;
  int checks = 0, failures = 0;
  int model[$];
  int n_full = 0;

  seq_fifo #(.DW(9), .DEPTH(8)) u_dut (.clk, .rst_n, .flush, .push, .push_data, .pop, .pop_data,
                                        .empty, .full, .free);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == 8), "full flag");
      check(int'(free) == 8 - model.size(), "free count");
      if (model.size() != 0) check(pop_data == 9'(model[0]), "head data");
      if (full) n_full++;
      flush = (it == 3000);
      push = !full && ($urandom_range(99) < (it < 1500 ? 70 : 30));
      pop  = !empty && ($urandom_range(99) < (it < 1500 ? 30 : 70));
      push_data = 9'($urandom);
      @(posedge clk);
      if (flush) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push) model.push_back(int'(push_data));
      end
    end
    check(n_full > 0, "buffer filled at least once");
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
