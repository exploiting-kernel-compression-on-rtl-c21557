// Stream address register and fetch request generator of the streaming unit.
//
// On start (an lddu instruction) the register takes the base address of the
// compressed bit sequences and the stream length in bytes. It then asks the
// LSU decoder for T consecutive bytes at a time, advancing the address by T
// after every accepted request, until the whole stream has been requested.
// Requests keep being sent while earlier blocks are decoded, which is what
// overlaps memory latency with decoding. A request is only sent when the
// input buffer has a free T-byte slot for it that no outstanding request has
// already claimed, so responses never need back-pressure.
//
// Interface: req_valid/req_ready/req_addr towards the LSU decoder; the LSU
// answers, in request order, with resp_valid/resp_data (T bytes, byte 0 in
// bits [7:0]). Responses are forwarded to the input buffer as wr_valid/wr_data.
// A restart while requests are outstanding drops their late responses.
// quiet says no response of any stream is still expected.
// Timing: one request per cycle at most; responses pass through
// combinationally.
//
// From the paper: the stream address register, the T-byte requests to the LSU
// decoder and fetching ahead while decoding. Own choices: T = 16, the
// valid/ready request handshake, in-order responses, a T-aligned base address
// and the drop counter.
module stream_fetcher
  import du_pkg::*;
#(
  parameter int unsigned T_BYTES   = 16,
  parameter int unsigned BUF_SLOTS = 16,
  localparam int unsigned SLOT_CW  = $clog2(BUF_SLOTS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ADDR_W-1:0]    cfg_ptr,
  input  logic [CNT_W-1:0]     cfg_len,
  // To LSU decoder
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic [ADDR_W-1:0]    req_addr,
  // From LSU
  input  logic                 resp_valid,
  input  logic [T_BYTES*8-1:0] resp_data,
  // To input buffer
  input  logic [SLOT_CW-1:0]   buf_free_slots,
  output logic                 wr_valid,
  output logic [T_BYTES*8-1:0] wr_data,
  output logic                 fetch_done,
  output logic                 quiet
);

  logic [ADDR_W-1:0]  addr_q;
  logic [CNT_W-1:0]   remaining_q;
  logic [SLOT_CW-1:0] outstanding_q;
  logic [SLOT_CW:0]   drop_q;

  logic req_fire, resp_drop, resp_keep;

  assign req_valid  = (remaining_q != '0) && (buf_free_slots > outstanding_q) && !start;
  assign req_addr   = addr_q;
  assign req_fire   = req_valid && req_ready;
  assign resp_drop  = resp_valid && (drop_q != '0);
  assign resp_keep  = resp_valid && (drop_q == '0);
  assign wr_valid   = resp_keep;
  assign wr_data    = resp_data;
  assign fetch_done = (remaining_q == '0) && (outstanding_q == '0);
  assign quiet      = (outstanding_q == '0) && (drop_q == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      addr_q        <= '0;
      remaining_q   <= '0;
      outstanding_q <= '0;
      drop_q        <= '0;
    end else if (start) begin
      addr_q        <= cfg_ptr;
      remaining_q   <= cfg_len;
      outstanding_q <= '0;
      // Everything still in flight belongs to the previous stream.
      drop_q        <= drop_q + (SLOT_CW+1)'(outstanding_q)
                       - (SLOT_CW+1)'(resp_valid);
    end else begin
      if (req_fire) begin
        addr_q      <= addr_q + ADDR_W'(T_BYTES);
        remaining_q <= (remaining_q > CNT_W'(T_BYTES)) ? remaining_q - CNT_W'(T_BYTES) : '0;
      end
      outstanding_q <= outstanding_q + SLOT_CW'(req_fire) - SLOT_CW'(resp_keep);
      if (resp_drop) drop_q <= drop_q - 1'b1;
    end
  end

  // A kept response must answer an outstanding request.
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    (resp_keep && !start) |-> (outstanding_q != '0));

endmodule
