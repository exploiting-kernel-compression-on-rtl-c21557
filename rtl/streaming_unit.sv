// Streaming unit: fetches the compressed kernel stream and decodes it into
// uncompressed 9-bit bit sequences.
//
// Data path, as in the block diagram: stream address register -> LSU
// requests of T bytes -> input buffer -> stream parser (node address, length
// table, decoded address register) -> decoder unit (selector and banked
// uncompressed table) -> out. Fetching continues while decoding, so memory
// latency hides behind decoding as long as the input buffer is not drained.
// Throughput is one sequence per cycle; latency from a code word at the
// buffer head to out_valid is two cycles (decoded address register, table).
//
// Flow control: the parser starts a code word only when the consumer reports
// out_room, which must guarantee an entry for every code word still in the
// two pipeline stages plus the new one.
//
// Interface: start with cfg (lddu) resets and starts the unit; tbl_* fill the
// uncompressed table before start; req_*/resp_* talk to the LSU; out_valid/
// out_seq deliver sequences; done is high once every sequence has left the
// decoder; fetch_quiet once no memory response is still expected.
//
// From the paper: the sub-blocks, their order and their connections (Fig. 6)
// and decoding in the background while fetching. Own choices: see the
// sub-blocks.
module streaming_unit
  import du_pkg::*;
#(
  parameter int unsigned T_BYTES    = 16,
  parameter int unsigned BUF_BYTES  = 256,
  parameter int unsigned BANK_DEPTH = 256,
  localparam int unsigned SLOTS     = BUF_BYTES / T_BYTES,
  localparam int unsigned SLOT_CW   = $clog2(SLOTS + 1),
  localparam int unsigned FILL_W    = $clog2(BUF_BYTES * 8 + 1),
  localparam int unsigned TAW       = $clog2(BANK_DEPTH),
  localparam int unsigned CLEN_W    = $clog2(MAX_CODE_W + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  du_cfg_t              cfg,
  input  logic                 tbl_we,
  input  logic [NODE_W-1:0]    tbl_wnode,
  input  logic [TAW-1:0]       tbl_waddr,
  input  logic [SEQ_W-1:0]     tbl_wdata,
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic [ADDR_W-1:0]    req_addr,
  input  logic                 resp_valid,
  input  logic [T_BYTES*8-1:0] resp_data,
  input  logic                 out_room,
  output logic                 out_valid,
  output logic [SEQ_W-1:0]     out_seq,
  output logic [NODE_W-1:0]    dbg_node,
  output logic                 dbg_parse,
  output logic                 done,
  output logic                 fetch_quiet
);

  logic [SLOT_CW-1:0]   free_slots;
  logic                 wr_valid;
  logic [T_BYTES*8-1:0] wr_data;
  logic                 fetch_done;
  logic [MAX_CODE_W-1:0] win;
  logic [FILL_W-1:0]    avail_bits;
  logic                 consume;
  logic [CLEN_W-1:0]    consume_len;
  logic                 p_valid, parse_done;
  logic [NODE_W-1:0]    p_node;
  logic [MAX_IDX_W-1:0] p_addr;

  stream_fetcher #(.T_BYTES(T_BYTES), .BUF_SLOTS(SLOTS)) u_fetcher (
    .clk, .rst_n, .start,
    .cfg_ptr        (cfg.stream_ptr),
    .cfg_len        (cfg.stream_len),
    .req_valid, .req_ready, .req_addr,
    .resp_valid, .resp_data,
    .buf_free_slots (free_slots),
    .wr_valid, .wr_data,
    .fetch_done,
    .quiet          (fetch_quiet)
  );

  input_buffer #(.BUF_BYTES(BUF_BYTES), .T_BYTES(T_BYTES), .WIN_W(MAX_CODE_W)) u_input_buffer (
    .clk, .rst_n,
    .clear      (start),
    .wr_valid, .wr_data,
    .free_slots,
    .win, .avail_bits,
    .consume, .consume_len
  );

  stream_parser #(.WIN_W(MAX_CODE_W), .FILL_W(FILL_W)) u_parser (
    .clk, .rst_n, .start,
    .cfg_num_seq  (cfg.num_seq),
    .cfg_node_len (cfg.node_len),
    .win, .avail_bits,
    .out_room,
    .consume, .consume_len,
    .out_valid    (p_valid),
    .out_node     (p_node),
    .out_addr     (p_addr),
    .done         (parse_done)
  );

  decoder_unit #(.BANK_DEPTH(BANK_DEPTH)) u_decoder (
    .clk, .rst_n,
    .flush     (start),
    .in_valid  (p_valid),
    .in_node   (p_node),
    .in_addr   (TAW'(p_addr)),
    .tbl_we, .tbl_wnode, .tbl_waddr, .tbl_wdata,
    .out_valid, .out_seq
  );

  assign dbg_node  = p_node;
  assign dbg_parse = p_valid;
  // Requests past the last code word (padding of the last block) may still be
  // in flight; they are dropped by the next start.
  assign done      = parse_done && !p_valid && !out_valid;

  // The stream must not end with a code word the fetched data cannot hold.
  a_fetch_covers: assert property (@(posedge clk) disable iff (!rst_n || start)
    (fetch_done && !parse_done && !consume && avail_bits >= FILL_W'(MAX_CODE_W)) |-> !out_room);

endmodule
