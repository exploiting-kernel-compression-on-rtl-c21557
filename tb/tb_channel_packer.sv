// Test of the channel packer: streams of random 9-bit sequences (lengths
// with and without a partial last set) are offered with random gaps; every
// set must hold, in register p bit c, bit 8-p of the c-th sequence of the
// set, unused channels zero. A slow set consumer makes the packer stall, and
// a full 128-sequence set must take 128 accepting cycles. The two-channel
// example kernel (369 and 511) is checked register by register.
module tb_channel_packer;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, in_valid = 1'b0, set_ready = 1'b0;
  logic [31:0] cfg_num_seq = '0;
  logic in_ready, set_valid;
  logic [8:0] in_seq = '0;
  logic [8:0][127:0] set_data;
  int checks = 0, failures = 0;
  logic [8:0][127:0] exp_sets[$];
  int n_stall = 0, n_sets = 0;

  channel_packer u_dut (.clk, .rst_n, .start, .cfg_num_seq, .in_valid, .in_ready, .in_seq,
                        .set_valid, .set_ready, .set_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && !start) begin
      if (set_valid && !set_ready) n_stall++;
      if (set_valid && set_ready) begin
        n_sets++;
        if (exp_sets.size() == 0) check(1'b0, "unexpected set");
        else check(set_data == exp_sets.pop_front(), $sformatf("set %0d contents", n_sets));
      end
    end
    set_ready <= ($urandom_range(99) < 30);
  end

  task automatic run(input int n);
    int seqs[$];
    int sent;
    for (int i = 0; i < n; i++) seqs.push_back(int'($urandom_range(511)));
    exp_sets.delete();
    for (int s = 0; s * 128 < n; s++) begin
      logic [8:0][127:0] e;
      e = '0;
      for (int c = 0; c < 128 && s * 128 + c < n; c++)
        for (int p = 0; p < 9; p++) e[p][c] = seqs[s * 128 + c][8 - p];
      exp_sets.push_back(e);
    end
    @(posedge clk);
    start <= 1'b1; cfg_num_seq <= 32'(n);
    @(posedge clk);
    start <= 1'b0;
    sent = 0;
    while (sent < n) begin
      in_valid <= ($urandom_range(99) < 80);
      in_seq <= 9'(seqs[sent]);
      @(posedge clk);
      if (in_valid && in_ready) sent++;
    end
    in_valid <= 1'b0;
    while (exp_sets.size() != 0) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // The two-channel example kernel: channel 1 = 369 (101 110 001),
    // channel 2 = 511; register p holds position p of both channels.
    begin
      logic [1:0] fig [9] = '{2'b11, 2'b10, 2'b11, 2'b11, 2'b11, 2'b10, 2'b10, 2'b10, 2'b11};
      @(posedge clk);
      start <= 1'b1; cfg_num_seq <= 32'd2;
      @(posedge clk);
      start <= 1'b0;
      in_valid <= 1'b1; in_seq <= 9'd369;
      @(posedge clk);
      in_seq <= 9'd511;
      @(posedge clk);
      in_valid <= 1'b0;
      #1;
      for (int p = 0; p < 9; p++)
        check(set_data[p][1:0] == fig[p] && set_data[p][127:2] == '0,
              $sformatf("example kernel register R%0d = %b", p, set_data[p][1:0]));
      exp_sets.push_back(set_data);
      while (exp_sets.size() != 0) @(posedge clk);
      n_sets = 0;
    end
    run(128);
    run(300);
    run(5);
    run(1024);
    check(n_sets == 1 + 3 + 1 + 8, $sformatf("set count %0d", n_sets));
    check(n_stall > 0, "packer stalled");
    // Rate: 128 sequences offered every cycle fill one set in 128 cycles.
    begin
      int t;
      @(posedge clk);
      start <= 1'b1; cfg_num_seq <= 32'd128;
      @(posedge clk);
      start <= 1'b0;
      in_valid <= 1'b1;
      t = 0;
      while (!set_valid) begin @(posedge clk); #1 t++; end
      in_valid <= 1'b0;
      check(t == 128, $sformatf("set filled in %0d cycles", t));
      exp_sets.push_back(set_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
