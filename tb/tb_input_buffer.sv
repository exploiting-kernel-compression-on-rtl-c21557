// Test of the input buffer against a bit-queue model: 16-byte blocks of
// random data are written whenever a slot is free, random code lengths of
// 1 to 12 bits are consumed whenever that many bits are present; the 12-bit
// window (first stream bit = MSB of byte 0, on win[11]), the fill level and
// free slots are checked every cycle, across many wrap-arounds of the
// 256-byte store. clear must empty it.
module tb_input_buffer;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, wr_valid = 1'b0, consume = 1'b0;
  logic [127:0] wr_data = '0;
  logic [4:0] free_slots;
  logic [11:0] win;
  logic [11:0] avail_bits;
  logic [3:0] consume_len = '0;
  int checks = 0, failures = 0;
  bit model[$];
  int n_full = 0, consumed = 0;

  input_buffer u_dut (.clk, .rst_n, .clear, .wr_valid, .wr_data, .free_slots, .win, .avail_bits,
                      .consume, .consume_len);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 6000; it++) begin
      int need;
      @(negedge clk);
      check(int'(avail_bits) == model.size(), "fill level");
      check(int'(free_slots) == (2048 - model.size()) / 128, "free slots");
      for (int i = 0; i < 12 && i < model.size(); i++)
        check(win[11 - i] == model[i], $sformatf("window bit %0d", i));
      if (free_slots == 0) n_full++;
      clear = (it == 5000);
      wr_valid = (free_slots != 0) && ($urandom_range(99) < (it < 2500 ? 30 : 5));
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      need = int'($urandom_range(11)) + 1;
      consume_len = 4'(need);
      consume = (model.size() >= need) && ($urandom_range(99) < (it < 2500 ? 50 : 90));
      @(posedge clk);
      if (clear) model.delete();
      else begin
        if (consume) begin
          for (int i = 0; i < need; i++) void'(model.pop_front());
          consumed += need;
        end
        if (wr_valid)
          for (int b = 0; b < 16; b++)
            for (int j = 7; j >= 0; j--) model.push_back(wr_data[b * 8 + j]);
      end
    end
    check(n_full > 0, "buffer became full");
    check(consumed > 4 * 2048, "buffer wrapped around several times");
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
