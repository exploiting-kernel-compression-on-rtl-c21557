// Test of the stream address register and request generator with the
// behavioural LSU. The input buffer is modelled by an occupancy counter
// drained at random. Checked: request addresses run from the base in T-byte
// steps, exactly ceil(length/T) requests are made, no block is written
// without a free slot, blocks arrive in address order with the memory's
// data, and after a restart with requests in flight the late blocks of the
// old stream are dropped.
module tb_stream_fetcher;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0;
  logic [63:0] cfg_ptr = '0;
  logic [31:0] cfg_len = '0;
  logic req_valid, req_ready, resp_valid, wr_valid, fetch_done;
  logic [63:0] req_addr;
  logic [127:0] resp_data, wr_data;
  logic [4:0] buf_free_slots;
  int occ = 0;
  int checks = 0, failures = 0;
  longint next_req, next_wr;
  int nreq = 0, nwr = 0, n_full = 0, drain_pct = 50;

  stream_fetcher u_dut (.clk, .rst_n, .start, .cfg_ptr, .cfg_len, .req_valid, .req_ready, .req_addr,
                        .resp_valid, .resp_data, .buf_free_slots, .wr_valid, .wr_data, .fetch_done);
  tb_lsu_model #(.T_BYTES(16), .MEM_BYTES(65536), .MAX_LAT(10), .READY_PCT(70)) u_mem (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data);

  assign buf_free_slots = 5'(16 - occ);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [127:0] block_at(longint a);
    logic [127:0] d;
    for (int b = 0; b < 16; b++) d[b*8 +: 8] = u_mem.mem[int'((a + b) % 65536)];
    return d;
  endfunction

  always @(posedge clk) begin
    if (rst_n && !start) begin
      if (req_valid && req_ready) begin
        check(req_addr == 64'(next_req), $sformatf("request address %h exp %h", req_addr, next_req));
        next_req <= next_req + 16;
        nreq++;
      end
      if (wr_valid) begin
        check(occ < 16, "write without a free slot");
        check(wr_data == block_at(next_wr), $sformatf("block data at %h", next_wr));
        next_wr <= next_wr + 16;
        nwr++;
      end
      if (occ == 16) n_full++;
      occ <= occ + int'(wr_valid) - int'(occ > 0 && $urandom_range(99) < drain_pct);
    end
  end

  task automatic run(input longint ptr, input int len, input bit cut);
    @(posedge clk);
    start <= 1'b1; cfg_ptr <= 64'(ptr); cfg_len <= 32'(len);
    @(posedge clk);
    start <= 1'b0;
    occ <= 0; nreq = 0; nwr = 0; next_req = ptr; next_wr = ptr;
    if (cut) begin
      wait (u_dut.outstanding_q >= 3);
      @(posedge clk);
      return;
    end
    #1;
    while (!fetch_done) begin @(posedge clk); #1; end
    repeat (3) @(posedge clk);
    check(nreq == (len + 15) / 16, $sformatf("%0d requests for %0d bytes", nreq, len));
    check(nwr == nreq, "one block per request");
  endtask

  initial begin
    foreach (u_mem.mem[i]) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    drain_pct = 5;
    run('h100, 1000, 1'b0);
    drain_pct = 60;
    run('h2000, 333, 1'b0);
    run('h4000, 4000, 1'b1);
    run('h8000, 500, 1'b0);
    run('hA000, 16, 1'b0);
    check(n_full > 0, "buffer model filled up");
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
