// Test of the stream parser with a software model of the input buffer.
// Code words for two different tree configurations are generated, their
// bits are trickled into the model buffer a few at a time, and out_room is
// random. Each consume must remove exactly the next code word, only when
// all of its bits are present and room is given; the decoded address
// register must then show that code word's node and index one cycle later.
// After the configured count nothing more may be consumed.
module tb_stream_parser;
  import tb_du_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, out_room = 1'b0;
  logic [31:0] cfg_num_seq = '0;
  logic [3:0][3:0] cfg_node_len = '0;
  logic [11:0] win;
  logic [11:0] avail_bits;
  logic consume, out_valid, done;
  logic [3:0] consume_len;
  logic [1:0] out_node;
  logic [7:0] out_addr;
  int checks = 0, failures = 0;
  bit buf_q[$];
  bit pend_q[$];
  int exp_node[$], exp_idx[$], exp_len[$];
  int ilen [4];
  logic        pv = 1'b0;
  int          pnode, pidx;
  int          n_wait_bits = 0, n_wait_room = 0, parsed = 0;

  stream_parser u_dut (.clk, .rst_n, .start, .cfg_num_seq, .cfg_node_len, .win, .avail_bits,
                       .out_room, .consume, .consume_len, .out_valid, .out_node, .out_addr, .done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  always_comb begin
    for (int i = 0; i < 12; i++) win[11 - i] = (i < buf_q.size()) ? buf_q[i] : 1'b0;
    avail_bits = 12'(buf_q.size());
  end

  always @(posedge clk) begin
    if (rst_n && !start) begin
      if (pv) begin
        check(out_valid, "out_valid one cycle after consume");
        check(int'(out_node) == pnode && int'(out_addr) == pidx,
              $sformatf("node/addr %0d/%0d exp %0d/%0d", out_node, out_addr, pnode, pidx));
      end else check(!out_valid, "no spurious out_valid");
      pv <= 1'b0;
      if (exp_len.size() != 0) begin
        bit can;
        can = out_room && buf_q.size() >= exp_len[0];
        if (!out_room) n_wait_room++;
        else if (buf_q.size() < exp_len[0]) n_wait_bits++;
        check(consume == can, "consume exactly when the code word is present and room given");
        if (consume) begin
          check(int'(consume_len) == exp_len[0], "consume length");
          for (int i = 0; i < exp_len[0]; i++) void'(buf_q.pop_front());
          pv <= 1'b1;
          pnode <= exp_node.pop_front();
          pidx <= exp_idx.pop_front();
          void'(exp_len.pop_front());
          parsed++;
        end
      end else if (rst_n && done) check(!consume, "nothing consumed after the last code word");
      // Trickle in 0 to 6 new bits.
      for (int k = int'($urandom_range(6)); k > 0 && pend_q.size() != 0; k--)
        buf_q.push_back(pend_q.pop_front());
    end
    out_room <= ($urandom_range(99) < 70);
  end

  task automatic run(input int n, input int l0, input int l1, input int l2, input int l3);
    bitq_t bits;
    int en[$], ei[$], el[$];
    ilen = '{l0, l1, l2, l3};
    pend_q.delete();
    buf_q.delete();
    for (int i = 0; i < n; i++) begin
      int nd, ix;
      nd = rand_node();
      ix = int'($urandom_range((1 << ilen[nd]) - 1));
      bits = append_code(bits, nd, ix, ilen[nd]);
      en.push_back(nd); ei.push_back(ix); el.push_back(nd + 1 + ilen[nd]);
    end
    // Trailing padding that must never be parsed.
    for (int i = 0; i < 20; i++) bits.push_back(1'b0);
    @(posedge clk);
    start <= 1'b1; cfg_num_seq <= 32'(n);
    cfg_node_len <= {4'(l3), 4'(l2), 4'(l1), 4'(l0)};
    @(posedge clk);
    start <= 1'b0;
    buf_q.delete();
    pend_q = bits;
    exp_node = en; exp_idx = ei; exp_len = el;
    while (exp_len.size() != 0) @(posedge clk);
    repeat (30) @(posedge clk);
    check(done, "done after the configured count");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    run(500, 5, 6, 6, 8);
    run(300, 2, 3, 4, 7);
    check(parsed == 800, "all code words parsed");
    check(n_wait_bits > 0 && n_wait_room > 0, "waited for bits and for room");
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
