// Workload test: the 3x3 binary kernels of the thirteen ReActNet basic
// blocks streamed through the decoding unit at its default sizes.
//
// Layer sizes are C x C channels of 9 bits with C = 32, 64, 128, 128, 256,
// 256, 512 (six times) and 1024, the ReActNet-A layout; about 2.8 million
// sequences. Kernel contents are random, drawn per code word with the
// node frequencies reported for the compressed kernels: "encoding"
// (46/24/23/5 %, the unassigned 2 % added to the 12-bit node) for odd blocks
// and "clustering" (65/25/8/0.6 %, the unassigned 1.4 % added to the 6-bit
// node) for even ones. Each layer is configured with lddu, every ldps register is compared
// with software packing of the same sequences, and the decode rate is
// checked: with a reader that is always ready a layer must finish within
// N + N/64 + 200 cycles for N sequences. The compression ratio of each
// generated stream (9 N bits over stream bits) is printed.
module tb_reactnet_workload;
  import tb_du_pkg::*;

  localparam int R = 128;
  localparam int MEMB = 1 << 21;
  localparam int CFG = 'h1000;
  localparam int STR = 'h2000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lddu_valid = 1'b0;
  logic [63:0] lddu_ptr = '0;
  logic req_valid, req_ready, resp_valid, ldps_valid, busy, ev_parse, ev_pack_stall;
  logic ldps_ready = 1'b1;
  logic [63:0] req_addr;
  logic [127:0] resp_data, ldps_data;
  logic [1:0] ev_node;

  decoding_unit u_dut (
    .clk, .rst_n, .lddu_valid, .lddu_ptr,
    .lsu_req_valid (req_valid), .lsu_req_ready (req_ready), .lsu_req_addr (req_addr),
    .lsu_resp_valid (resp_valid), .lsu_resp_data (resp_data),
    .ldps_valid, .ldps_ready, .ldps_data, .busy, .ev_parse, .ev_node, .ev_pack_stall
  );
  tb_lsu_model #(.T_BYTES(16), .MEM_BYTES(MEMB), .MAX_LAT(20), .READY_PCT(100)) u_mem (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data);

  int checks = 0, failures = 0;
  int seqs[];
  int nseq = 0, nreg = 0, rd = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [R-1:0] exp_reg(int r);
    logic [R-1:0] v;
    int s, p;
    s = r / 9;
    p = r % 9;
    v = '0;
    for (int c = 0; c < R && s * R + c < nseq; c++) v[c] = seqs[s * R + c][8 - p];
    return v;
  endfunction

  int bad = 0;
  always @(posedge clk) begin
    if (rst_n && !lddu_valid && ldps_valid && ldps_ready) begin
      if (rd >= nreg || ldps_data != exp_reg(rd)) bad++;
      rd++;
    end
  end

  function automatic int pick_node(bit clustered);
    int r;
    r = int'($urandom_range(999));
    if (!clustered) return (r < 460) ? 0 : (r < 700) ? 1 : (r < 930) ? 2 : 3;
    return (r < 654) ? 0 : (r < 904) ? 1 : (r < 984) ? 2 : (r < 994) ? 3 : 0;
  endfunction

  task automatic put16(input int a, input int v);
    u_mem.mem[a] = 8'(v);
    u_mem.mem[a + 1] = 8'(v >> 8);
  endtask

  task automatic layer(input int blk, input int ch);
    longint bitpos;
    int len, t;
    bit clustered;
    clustered = (blk % 2 == 0);
    nseq = ch * ch;
    seqs = new[nseq];
    bitpos = 0;
    for (int i = 0; i < nseq; i++) begin
      int nd, ix, code, cl;
      nd = pick_node(clustered);
      ix = int'($urandom_range(NODE_SIZE[nd] - 1));
      seqs[i] = leaf_value(nd, ix);
      code = (((1 << nd) - 1) << (IDX_LEN[nd] + 1)) | ix;
      cl = nd + 1 + IDX_LEN[nd];
      for (int k = cl - 1; k >= 0; k--) begin
        int a;
        a = STR + int'(bitpos / 8);
        if (bitpos % 8 == 0) u_mem.mem[a] = 8'h00;
        if ((code >> k) & 1) u_mem.mem[a][7 - int'(bitpos % 8)] = 1'b1;
        bitpos++;
      end
    end
    len = int'((bitpos + 7) / 8);
    check(STR + len < MEMB, "stream fits the test memory");
    // Configuration structure.
    for (int b = 0; b < 4; b++) begin
      u_mem.mem[CFG + b] = 8'(nseq >> (8 * b));
      u_mem.mem[CFG + 4 + b] = 8'(len >> (8 * b));
    end
    for (int b = 0; b < 8; b++) u_mem.mem[CFG + 8 + b] = 8'(longint'(STR) >> (8 * b));
    put16(CFG + 16, IDX_LEN[0] | (IDX_LEN[1] << 4) | (IDX_LEN[2] << 8) | (IDX_LEN[3] << 12));
    for (int nd = 0; nd < 4; nd++) put16(CFG + 20 + 2 * nd, NODE_SIZE[nd]);
    begin
      int a;
      a = CFG + 32;
      for (int nd = 0; nd < 4; nd++)
        for (int ix = 0; ix < NODE_SIZE[nd]; ix++) begin put16(a, leaf_value(nd, ix)); a += 2; end
    end
    nreg = 9 * ((nseq + R - 1) / R);
    rd = 0;
    bad = 0;
    @(posedge clk);
    lddu_ptr <= 64'(CFG);
    lddu_valid <= 1'b1;
    @(posedge clk);
    lddu_valid <= 1'b0;
    wait (u_dut.c_start);
    @(posedge clk);
    t = 0;
    #1;
    while (busy) begin @(posedge clk); #1; t++; end
    check(bad == 0, $sformatf("block %0d: %0d wrong registers", blk, bad));
    check(rd == nreg, $sformatf("block %0d: %0d of %0d registers read", blk, rd, nreg));
    check(t <= nseq + nseq / 64 + 200, $sformatf("block %0d: %0d sequences in %0d cycles", blk, nseq, t));
    $display("block %0d (%s): %0d x %0d channels, %0d sequences, %0d cycles, compression %0.3f",
             blk, clustered ? "clustering" : "encoding", ch, ch, nseq, t,
             real'(9 * nseq) / real'(bitpos));
  endtask

  initial begin
    int chans [13] = '{32, 64, 128, 128, 256, 256, 512, 512, 512, 512, 512, 512, 1024};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int b = 0; b < 13; b++) layer(b + 1, chans[b]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
