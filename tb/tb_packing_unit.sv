// Test of the packing unit. A model of the streaming unit's two-stage
// pipeline starts a sequence only when room is high and delivers it two
// cycles later; a random ldps reader pops registers, each compared with
// registers packed in software. The reader is slow at first so that the
// register file fills and the packer stalls, then fast so that ldps waits.
module tb_packing_unit;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, in_valid = 1'b0, rd_ready = 1'b0;
  logic [31:0] cfg_num_seq = '0;
  logic [8:0] in_seq = '0;
  logic room, rd_valid, stall_packer, empty;
  logic [127:0] rd_data;
  int checks = 0, failures = 0;
  logic [127:0] exp_q[$];
  int seqs[$];
  int sent = 0, rd_pct = 5, n_stall = 0, n_wait = 0;
  logic s1_v = 1'b0;
  logic [8:0] s1_d = '0;
  bit active = 1'b0;

  packing_unit u_dut (.clk, .rst_n, .start, .cfg_num_seq, .in_valid, .in_seq, .room,
                      .rd_valid, .rd_ready, .rd_data, .stall_packer, .empty);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) begin
    // Two-stage source: issue when room, deliver two cycles later.
    in_valid <= s1_v;
    in_seq <= s1_d;
    s1_v <= 1'b0;
    if (active && room && sent < seqs.size() && $urandom_range(99) < 85) begin
      s1_v <= 1'b1;
      s1_d <= 9'(seqs[sent]);
      sent++;
    end
    rd_ready <= ($urandom_range(99) < rd_pct);
    if (rst_n && !start) begin
      if (stall_packer) n_stall++;
      if (rd_ready && !rd_valid) n_wait++;
      if (rd_valid && rd_ready) begin
        if (exp_q.size() == 0) check(1'b0, "extra register");
        else check(rd_data == exp_q.pop_front(), "packed register");
      end
    end
  end

  task automatic run(input int n, input int pct);
    int q[$];
    logic [127:0] e[$];
    for (int i = 0; i < n; i++) q.push_back(int'($urandom_range(511)));
    for (int s = 0; s * 128 < n; s++)
      for (int p = 0; p < 9; p++) begin
        logic [127:0] r;
        r = '0;
        for (int c = 0; c < 128 && s * 128 + c < n; c++) r[c] = q[s * 128 + c][8 - p];
        e.push_back(r);
      end
    rd_pct = pct;
    @(posedge clk);
    start <= 1'b1; cfg_num_seq <= 32'(n);
    @(posedge clk);
    start <= 1'b0;
    seqs = q; exp_q = e; sent = 0; active = 1'b1;
    while (exp_q.size() != 0) @(posedge clk);
    active = 1'b0;
    repeat (5) @(posedge clk);
    #1 check(empty, "empty at the end");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(400, 4);
    run(1024, 100);
    run(77, 50);
    check(n_stall > 0, "packer stalled");
    check(n_wait > 0, "ldps waited");
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
