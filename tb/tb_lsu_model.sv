// Behavioural model of the CPU load-store unit and memory as seen by the
// decoding unit (not synthesizable, testbench only).
//
// It accepts T-byte read requests with a random ready, and answers each after
// a random latency of 1 to MAX_LAT cycles, strictly in request order. The
// backing store is a byte array that the testbench fills directly; address
// bits above the array size are ignored. reqs counts accepted requests.
module tb_lsu_model #(
  parameter int T_BYTES   = 16,
  parameter int MEM_BYTES = 65536,
  parameter int MAX_LAT   = 6,
  parameter int READY_PCT = 80
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [63:0]          req_addr,
  output logic                 resp_valid,
  output logic [T_BYTES*8-1:0] resp_data
);

  byte unsigned mem [MEM_BYTES];
  longint unsigned pend_addr[$];
  int              pend_time[$];
  int              now = 0;
  int              reqs = 0;

  initial begin
    foreach (mem[i]) mem[i] = 8'h00;
  end

  always @(posedge clk) begin
    now <= now + 1;
    req_ready <= ($urandom_range(99) < READY_PCT);
    resp_valid <= 1'b0;
    if (!rst_n) begin
      pend_addr.delete();
      pend_time.delete();
      req_ready <= 1'b0;
    end else begin
      if (req_valid && req_ready) begin
        int t;
        t = now + int'($urandom_range(MAX_LAT - 1));
        if (pend_time.size() > 0 && t < pend_time[$]) t = pend_time[$];
        pend_addr.push_back(req_addr);
        pend_time.push_back(t);
        reqs <= reqs + 1;
      end
      if (pend_time.size() > 0 && pend_time[0] <= now) begin
        longint unsigned a;
        a = pend_addr.pop_front();
        void'(pend_time.pop_front());
        resp_valid <= 1'b1;
        for (int b = 0; b < T_BYTES; b++)
          resp_data[b*8 +: 8] <= mem[int'((a + longint'(b)) % longint'(MEM_BYTES))];
      end
    end
  end

endmodule
