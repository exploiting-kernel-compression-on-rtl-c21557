// Test of the streaming unit (fetch, input buffer, parser, decoder) with the
// behavioural LSU. Random streams are coded in software, written to memory
// and decoded; every output sequence is compared, in order, with the leaf
// value of the code word that produced it. Room is random for one stream and
// always given for another, which with a fast memory must drain one
// sequence per cycle; the number of outputs must match the configured count
// and done must rise at the end.
module tb_streaming_unit;
  import du_pkg::*;
  import tb_du_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, out_room = 1'b0, tbl_we = 1'b0;
  du_cfg_t cfg = '0;
  logic [1:0] tbl_wnode = '0;
  logic [7:0] tbl_waddr = '0;
  logic [8:0] tbl_wdata = '0;
  logic req_valid, req_ready, resp_valid, out_valid, dbg_parse, done;
  logic [63:0] req_addr;
  logic [127:0] resp_data;
  logic [8:0] out_seq;
  logic [1:0] dbg_node;
  int checks = 0, failures = 0;
  int exp_q[$];
  int room_pct = 100, got = 0;

  streaming_unit u_dut (.clk, .rst_n, .start, .cfg, .tbl_we, .tbl_wnode, .tbl_waddr, .tbl_wdata,
                        .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data,
                        .out_room, .out_valid, .out_seq, .dbg_node, .dbg_parse, .done);
  tb_lsu_model #(.T_BYTES(16), .MEM_BYTES(65536), .MAX_LAT(4), .READY_PCT(100)) u_mem (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) begin
    if (rst_n && !start && out_valid) begin
      got++;
      if (exp_q.size() == 0) check(1'b0, "extra output");
      else begin
        int e;
        e = exp_q.pop_front();
        check(out_seq == 9'(e), $sformatf("sequence %0d: %h exp %h", got, out_seq, e));
      end
    end
    out_room <= ($urandom_range(99) < room_pct);
  end

  task automatic run(input int n, input int ptr, input int pct, input bit check_rate);
    bitq_t bits;
    byteq_t bytes;
    int q[$];
    int t;
    for (int i = 0; i < n; i++) begin
      int nd, ix;
      nd = rand_node();
      ix = int'($urandom_range(NODE_SIZE[nd] - 1));
      bits = append_code(bits, nd, ix, IDX_LEN[nd]);
      q.push_back(leaf_value(nd, ix));
    end
    bytes = bits_to_bytes(bits);
    foreach (bytes[k]) u_mem.mem[ptr + k] = bytes[k];
    room_pct = pct;
    @(posedge clk);
    start <= 1'b1;
    cfg.num_seq <= 32'(n); cfg.stream_ptr <= 64'(ptr); cfg.stream_len <= 32'(bytes.size());
    cfg.node_len <= {4'(IDX_LEN[3]), 4'(IDX_LEN[2]), 4'(IDX_LEN[1]), 4'(IDX_LEN[0])};
    @(posedge clk);
    start <= 1'b0;
    exp_q = q;
    got = 0;
    t = 0;
    #1;
    while (!done) begin @(posedge clk); #1; t++; end
    check(exp_q.size() == 0 && got == n, $sformatf("%0d of %0d sequences", got, n));
    if (check_rate) check(t <= n + 40, $sformatf("%0d sequences in %0d cycles", n, t));
    $display("n=%0d room=%0d%% cycles=%0d", n, pct, t);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int nd = 0; nd < 4; nd++)
      for (int ix = 0; ix < NODE_SIZE[nd]; ix++) begin
        @(posedge clk);
        tbl_we <= 1'b1; tbl_wnode <= 2'(nd); tbl_waddr <= 8'(ix); tbl_wdata <= 9'(leaf_value(nd, ix));
      end
    @(posedge clk);
    tbl_we <= 1'b0;
    run(700, 'h1000, 40, 1'b0);
    run(1500, 'h3000, 100, 1'b1);
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
