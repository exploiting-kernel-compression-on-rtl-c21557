// End-to-end test of the decoding unit at its default sizes.
//
// For each stream the test writes into a behavioural memory a configuration
// structure (header and the 416 leaves of a 32/64/64/256-entry tree) and a
// Huffman-coded kernel stream, starts it with an lddu pointing at the
// structure, checks the table writes of the loader, and reads every packed
// register with ldps, comparing each with registers packed in software from
// the same random sequences. Streams exercise: all four tree nodes, a last
// partial set, a slow reader (register file full, packer stall, input buffer
// full), a fast reader (ldps waiting on an empty unit, decode overlapped
// with fetch, one sequence per cycle), and a restart by a second lddu while
// fetches are in flight (late responses dropped). Each of these events is
// counted and a failure is recorded for any that never happened.
module tb_decoding_unit;
  import du_pkg::*;
  import tb_du_pkg::*;

  localparam int T = 16;
  localparam int R = 128;
  localparam int K = 9;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              lddu_valid = 1'b0;
  logic [63:0]       lddu_ptr = '0;
  logic              req_valid, req_ready, resp_valid;
  logic [63:0]       req_addr;
  logic [T*8-1:0]    resp_data;
  logic              ldps_valid;
  logic              ldps_ready = 1'b0;
  logic [R-1:0]      ldps_data;
  logic              busy, ev_parse, ev_pack_stall;
  logic [1:0]        ev_node;

  decoding_unit u_dut (
    .clk, .rst_n, .lddu_valid, .lddu_ptr,
    .lsu_req_valid (req_valid), .lsu_req_ready (req_ready), .lsu_req_addr (req_addr),
    .lsu_resp_valid (resp_valid), .lsu_resp_data (resp_data),
    .ldps_valid, .ldps_ready, .ldps_data,
    .busy, .ev_parse, .ev_node, .ev_pack_stall
  );

  tb_lsu_model #(.T_BYTES(T), .MEM_BYTES(65536), .MAX_LAT(8), .READY_PCT(75)) u_mem (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data
  );

  int checks = 0, failures = 0;
  logic [R-1:0] exp_q[$];
  int rdy_pct = 100;
  int n_node [4] = '{0, 0, 0, 0};
  int n_pack_stall = 0, n_ldps_wait = 0, n_buf_full = 0, n_drop = 0, n_overlap = 0;
  int n_partial = 0, n_restart = 0, n_reads = 0, n_tbl = 0, n_tbl_bad = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ldps reader and event counters.
  always @(posedge clk) begin
    ldps_ready <= ($urandom_range(99) < rdy_pct);
    if (rst_n && !lddu_valid) begin
      if (ldps_valid && ldps_ready) begin
        n_reads++;
        if (exp_q.size() == 0) check(1'b0, "ldps returned more registers than expected");
        else begin
          logic [R-1:0] e;
          e = exp_q.pop_front();
          check(ldps_data == e, $sformatf("register %0d: got %h exp %h", n_reads, ldps_data, e));
        end
      end
      if (u_dut.tbl_we) begin
        n_tbl++;
        if (u_dut.tbl_wdata != 9'(leaf_value(int'(u_dut.tbl_wnode), int'(u_dut.tbl_waddr))) ||
            int'(u_dut.tbl_waddr) >= NODE_SIZE[u_dut.tbl_wnode])
          n_tbl_bad++;
      end
      if (ev_parse) n_node[ev_node]++;
      if (ev_pack_stall) n_pack_stall++;
      if (ldps_ready && !ldps_valid && busy) n_ldps_wait++;
      if (u_dut.u_streaming.u_input_buffer.free_slots == '0) n_buf_full++;
      if (u_dut.u_streaming.u_fetcher.resp_drop) n_drop++;
      if (req_valid && req_ready && ev_parse) n_overlap++;
    end
  end

  // Build a random stream of n code words at ptr and the registers it must
  // produce; returns the stream length in bytes.
  function automatic int build_stream(int n, int ptr, ref logic [R-1:0] regs[$]);
    bitq_t bits;
    byteq_t bytes;
    int seqs[$];
    for (int i = 0; i < n; i++) begin
      int nd, ix;
      nd = rand_node();
      ix = int'($urandom_range(NODE_SIZE[nd] - 1));
      bits = append_code(bits, nd, ix, IDX_LEN[nd]);
      seqs.push_back(leaf_value(nd, ix));
    end
    bytes = bits_to_bytes(bits);
    foreach (bytes[k]) u_mem.mem[ptr + k] = bytes[k];
    regs.delete();
    for (int s = 0; s * R < n; s++)
      for (int p = 0; p < K; p++) begin
        logic [R-1:0] r;
        r = '0;
        for (int c = 0; c < R && s * R + c < n; c++) r[c] = seqs[s * R + c][K - 1 - p];
        regs.push_back(r);
      end
    return bytes.size();
  endfunction

  // Configuration structure at cp: header block, tree block, then the
  // leaves as 16-bit little-endian words, node 0 first.
  task automatic lddu(input int n, input int ptr, input int len);
    int cp, a;
    cp = ptr - 'h800;
    for (int b = 0; b < 4; b++) begin
      u_mem.mem[cp + b]     = 8'(n >> (8 * b));
      u_mem.mem[cp + 4 + b] = 8'(len >> (8 * b));
    end
    for (int b = 0; b < 8; b++) u_mem.mem[cp + 8 + b] = 8'(longint'(ptr) >> (8 * b));
    u_mem.mem[cp + 16] = 8'({4'(IDX_LEN[1]), 4'(IDX_LEN[0])});
    u_mem.mem[cp + 17] = 8'({4'(IDX_LEN[3]), 4'(IDX_LEN[2])});
    u_mem.mem[cp + 18] = 8'h00;
    u_mem.mem[cp + 19] = 8'h00;
    for (int nd = 0; nd < 4; nd++) begin
      u_mem.mem[cp + 20 + 2 * nd] = 8'(NODE_SIZE[nd]);
      u_mem.mem[cp + 21 + 2 * nd] = 8'(NODE_SIZE[nd] >> 8);
    end
    a = cp + 32;
    for (int nd = 0; nd < 4; nd++)
      for (int ix = 0; ix < NODE_SIZE[nd]; ix++) begin
        u_mem.mem[a]     = 8'(leaf_value(nd, ix));
        u_mem.mem[a + 1] = 8'(leaf_value(nd, ix) >> 8);
        a += 2;
      end
    @(posedge clk);
    lddu_ptr   <= 64'(cp);
    lddu_valid <= 1'b1;
    @(posedge clk);
    lddu_valid <= 1'b0;
  endtask

  task automatic run_stream(input int n, input int ptr, input int pct, input bit check_rate);
    logic [R-1:0] regs[$];
    int len, t0, cycles, reqs0, exp_reqs;
    len = build_stream(n, ptr, regs);
    rdy_pct = pct;
    lddu(n, ptr, len);
    wait (u_dut.c_start);
    @(posedge clk);
    reqs0 = u_mem.reqs;
    t0 = 0;
    exp_q = regs;
    if (n % R != 0) n_partial++;
    while (busy || exp_q.size() != 0) begin
      @(posedge clk);
      t0++;
    end
    cycles = t0;
    check(exp_q.size() == 0, "all registers read");
    repeat (20) @(posedge clk);
    exp_reqs = (len + T - 1) / T;
    check(u_mem.reqs - reqs0 == exp_reqs,
          $sformatf("LSU requests %0d, expected %0d", u_mem.reqs - reqs0, exp_reqs));
    // One code word per cycle: a fast reader sees the stream drain in about
    // n cycles plus the start-up fetch latency.
    if (check_rate)
      check(cycles <= n + n / 8 + 64, $sformatf("%0d sequences took %0d cycles", n, cycles));
    $display("stream n=%0d bytes=%0d reader=%0d%% cycles=%0d", n, len, pct, cycles);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    run_stream(300, 'h1000, 3, 1'b0);      // slow reader, partial last set
    run_stream(2048, 'h4000, 100, 1'b1);   // 16 full sets, fast reader

    // Restart: start a long stream, then replace it while fetches fly.
    begin
      logic [R-1:0] regs[$];
      int len;
      rdy_pct = 0;
      len = build_stream(1500, 'h8000, regs);
      lddu(1500, 'h8000, len);
      exp_q.delete();
      wait (req_valid && req_ready && u_dut.u_streaming.u_fetcher.outstanding_q > 2);
      n_restart++;
    end
    run_stream(200, 'hC000, 60, 1'b0);

    check(n_restart > 0, "restart happened");
    check(n_drop > 0, "late responses of the old stream dropped");
    for (int nd = 0; nd < 4; nd++) check(n_node[nd] > 0, $sformatf("node %0d used", nd));
    check(n_pack_stall > 0, "packer stalled on a full register file");
    check(n_ldps_wait > 0, "ldps waited for data");
    check(n_buf_full > 0, "input buffer filled up");
    check(n_overlap > 0, "fetch overlapped with decoding");
    check(n_partial > 0, "partial last set");
    check(n_tbl == 4 * 416 && n_tbl_bad == 0,
          $sformatf("table writes %0d (%0d wrong), expected 4 x 416", n_tbl, n_tbl_bad));
    $display("events: nodes %0d/%0d/%0d/%0d packer_stall %0d ldps_wait %0d buf_full %0d drop %0d overlap %0d",
             n_node[0], n_node[1], n_node[2], n_node[3], n_pack_stall, n_ldps_wait, n_buf_full,
             n_drop, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
