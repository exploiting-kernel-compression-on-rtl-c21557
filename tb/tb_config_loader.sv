// Test of the configuration loader with the behavioural LSU. Configuration
// structures with different field values and trees (including an empty node
// and a table whose size is not a multiple of a block) are placed in
// memory. For each lddu the test checks: a cancel pulse comes first; no
// request is made while fetch_quiet is low; requests walk the structure in
// T-byte steps; every table write hits the right (node, index) with the
// right value, in order; exactly one start pulse carries the header fields.
module tb_config_loader;
  import du_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic lddu_valid = 1'b0, fetch_quiet = 1'b0;
  logic [63:0] lddu_ptr = '0;
  logic req_valid, req_ready, resp_valid, tbl_we, cancel, start, active;
  logic [63:0] req_addr;
  logic [127:0] resp_data;
  logic [1:0] tbl_wnode;
  logic [7:0] tbl_waddr;
  logic [8:0] tbl_wdata;
  du_cfg_t cfg;
  int checks = 0, failures = 0;
  int exp_node[$], exp_idx[$], exp_val[$];
  int n_cancel = 0, n_start = 0, n_early = 0;
  longint next_addr;
  du_cfg_t exp_cfg;

  config_loader u_dut (.clk, .rst_n, .lddu_valid, .lddu_ptr, .fetch_quiet, .req_valid, .req_ready,
                       .req_addr, .resp_valid, .resp_data, .tbl_we, .tbl_wnode, .tbl_waddr, .tbl_wdata,
                       .cancel, .start, .cfg, .active);
  tb_lsu_model #(.T_BYTES(16), .MEM_BYTES(65536), .MAX_LAT(5), .READY_PCT(60)) u_mem (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (cancel) n_cancel++;
      if (req_valid && !fetch_quiet) n_early++;
      if (req_valid && req_ready) begin
        check(req_addr == 64'(next_addr), "request address");
        next_addr <= next_addr + 16;
      end
      if (tbl_we) begin
        if (exp_node.size() == 0) check(1'b0, "extra table write");
        else begin
          int en, ei, ev;
          en = exp_node.pop_front(); ei = exp_idx.pop_front(); ev = exp_val.pop_front();
          check(int'(tbl_wnode) == en && int'(tbl_waddr) == ei && int'(tbl_wdata) == ev,
                $sformatf("table write %0d/%0d=%h exp %0d/%0d=%h", tbl_wnode, tbl_waddr, tbl_wdata, en, ei, ev));
        end
      end
      if (start) begin
        n_start++;
        check(n_cancel == n_start, "cancel before start");
        check(exp_node.size() == 0, "all table entries written before start");
        check(cfg == exp_cfg, "configuration fields");
      end
    end
    // The streaming unit's last responses take a while to drain.
    fetch_quiet <= (n_cancel == 0) || ($urandom_range(99) < 20) || fetch_quiet;
    if (cancel) fetch_quiet <= 1'b0;
  end

  task automatic run(input int cp, input int n, input int len, input longint sp,
                     input int l0, input int l1, input int l2, input int l3,
                     input int c0, input int c1, input int c2, input int c3);
    int cnt [4];
    int a;
    cnt = '{c0, c1, c2, c3};
    for (int b = 0; b < 4; b++) begin
      u_mem.mem[cp + b] = 8'(n >> (8 * b));
      u_mem.mem[cp + 4 + b] = 8'(len >> (8 * b));
    end
    for (int b = 0; b < 8; b++) u_mem.mem[cp + 8 + b] = 8'(sp >> (8 * b));
    u_mem.mem[cp + 16] = 8'({4'(l1), 4'(l0)});
    u_mem.mem[cp + 17] = 8'({4'(l3), 4'(l2)});
    for (int nd = 0; nd < 4; nd++) begin
      u_mem.mem[cp + 20 + 2 * nd] = 8'(cnt[nd]);
      u_mem.mem[cp + 21 + 2 * nd] = 8'(cnt[nd] >> 8);
    end
    a = cp + 32;
    for (int nd = 0; nd < 4; nd++)
      for (int ix = 0; ix < cnt[nd]; ix++) begin
        int v;
        v = int'($urandom_range(511));
        u_mem.mem[a] = 8'(v);
        u_mem.mem[a + 1] = 8'((v >> 8) | ($urandom_range(127) << 1));  // unused bits set
        exp_node.push_back(nd); exp_idx.push_back(ix); exp_val.push_back(v);
        a += 2;
      end
    exp_cfg.num_seq = 32'(n);
    exp_cfg.stream_len = 32'(len);
    exp_cfg.stream_ptr = 64'(sp);
    exp_cfg.node_len = {4'(l3), 4'(l2), 4'(l1), 4'(l0)};
    @(posedge clk);
    lddu_valid <= 1'b1; lddu_ptr <= 64'(cp);
    next_addr = cp;
    @(posedge clk);
    lddu_valid <= 1'b0;
    #1;
    while (active) begin @(posedge clk); #1; end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run('h0100, 1000, 900, 64'h1234_5678_9ABC_DEF0, 5, 6, 6, 8, 32, 64, 64, 256);
    run('h2000, 77, 70, 64'h4000, 2, 3, 4, 7, 4, 0, 16, 100);
    run('h3000, 5, 4, 64'h5000, 1, 1, 1, 1, 0, 0, 0, 3);
    check(n_start == 3, "one start per lddu");
    check(n_early == 0, "no request before the old stream drained");
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
