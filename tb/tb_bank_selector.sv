// Test of the bank selector: random bank outputs, each select value checked.
module tb_bank_selector;
  logic [1:0] sel;
  logic [3:0][8:0] bank_data;
  logic [8:0] data;
  int checks = 0, failures = 0;

  bank_selector #(.BANKS(4), .DW(9)) u_dut (.sel, .bank_data, .data);

  initial begin
    for (int it = 0; it < 400; it++) begin
      for (int b = 0; b < 4; b++) bank_data[b] = 9'($urandom);
      sel = 2'(it % 4);
      #1;
      checks++;
      if (data != bank_data[it % 4]) begin
        failures++;
        $display("FAIL sel %0d got %h", sel, data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
