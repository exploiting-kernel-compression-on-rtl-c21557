// Decoding unit: hardware that a CPU load-store unit gains to stream,
// decompress and channel-pack Huffman-coded 3x3 binary kernels.
//
// An lddu instruction passes a pointer to a configuration structure in
// memory (lddu_valid/lddu_ptr). The configuration loader cancels any stream
// in progress, reads the structure and the Huffman tree's tables through the
// LSU port, fills the uncompressed table and restarts the unit. Then, in the
// background, the streaming unit fetches the compressed stream T bytes at a
// time through the same port, decodes one code word per cycle, and the
// packing unit packs the sequences into 128-bit registers, nine per set of
// up to 128 channels. Each ldps instruction reads the oldest packed register.
//
// Interface: lddu_valid/lddu_ptr; lsu_req_valid/lsu_req_ready/lsu_req_addr
// and lsu_resp_valid/lsu_resp_data (answers in request order, byte 0 in bits
// [7:0]); ldps_valid (data available), ldps_ready (an ldps takes it),
// ldps_data. busy is high from lddu until every sequence of the stream has
// been packed and read. ev_* expose events for observation: a code word
// parsed and its node, a packer stall.
//
// From the paper: the structure (streaming unit and packing unit), the lddu
// and ldps instructions, the configuration structure's fields and the sizes
// of the unit's configuration table. Own choices: the signal-level
// interfaces, the structure's memory layout (see config_loader) and sharing
// one LSU port between configuration and stream fetches.
module decoding_unit
  import du_pkg::*;
#(
  parameter int unsigned T_BYTES    = 16,
  parameter int unsigned BUF_BYTES  = 256,
  parameter int unsigned BANK_DEPTH = 256,
  parameter int unsigned R          = 128,
  parameter int unsigned RF_DEPTH   = 16,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lddu_valid,
  input  logic [ADDR_W-1:0]    lddu_ptr,
  output logic                 lsu_req_valid,
  input  logic                 lsu_req_ready,
  output logic [ADDR_W-1:0]    lsu_req_addr,
  input  logic                 lsu_resp_valid,
  input  logic [T_BYTES*8-1:0] lsu_resp_data,
  output logic                 ldps_valid,
  input  logic                 ldps_ready,
  output logic [R-1:0]         ldps_data,
  output logic                 busy,
  output logic                 ev_parse,
  output logic [NODE_W-1:0]    ev_node,
  output logic                 ev_pack_stall
);

  localparam int unsigned TAW = $clog2(BANK_DEPTH);

  logic             s_valid, s_done, room, p_empty, quiet;
  logic [SEQ_W-1:0] s_seq;
  logic             c_req_valid, c_active, c_cancel, c_start, restart;
  logic [ADDR_W-1:0] c_req_addr;
  logic             s_req_valid;
  logic [ADDR_W-1:0] s_req_addr;
  du_cfg_t          c_cfg;
  logic             tbl_we;
  logic [NODE_W-1:0] tbl_wnode;
  logic [TAW-1:0]   tbl_waddr;
  logic [SEQ_W-1:0] tbl_wdata;

  config_loader #(.T_BYTES(T_BYTES), .BANK_DEPTH(BANK_DEPTH)) u_config (
    .clk, .rst_n,
    .lddu_valid, .lddu_ptr,
    .fetch_quiet (quiet),
    .req_valid   (c_req_valid),
    .req_ready   (lsu_req_ready),
    .req_addr    (c_req_addr),
    .resp_valid  (lsu_resp_valid && c_active),
    .resp_data   (lsu_resp_data),
    .tbl_we, .tbl_wnode, .tbl_waddr, .tbl_wdata,
    .cancel      (c_cancel),
    .start       (c_start),
    .cfg         (c_cfg),
    .active      (c_active)
  );

  // The loader owns the LSU port from lddu until its start pulse; the
  // streaming unit has nothing in flight then (it waits for fetch_quiet).
  assign restart       = c_cancel || c_start;
  assign lsu_req_valid = c_active ? c_req_valid : s_req_valid;
  assign lsu_req_addr  = c_active ? c_req_addr  : s_req_addr;

  streaming_unit #(.T_BYTES(T_BYTES), .BUF_BYTES(BUF_BYTES), .BANK_DEPTH(BANK_DEPTH)) u_streaming (
    .clk, .rst_n,
    .start       (restart),
    .cfg         (c_cfg),
    .tbl_we, .tbl_wnode, .tbl_waddr, .tbl_wdata,
    .req_valid   (s_req_valid),
    .req_ready   (lsu_req_ready && !c_active),
    .req_addr    (s_req_addr),
    .resp_valid  (lsu_resp_valid && !(c_active && quiet)),
    .resp_data   (lsu_resp_data),
    .out_room    (room),
    .out_valid   (s_valid),
    .out_seq     (s_seq),
    .dbg_node    (ev_node),
    .dbg_parse   (ev_parse),
    .done        (s_done),
    .fetch_quiet (quiet)
  );

  packing_unit #(.R(R), .RF_DEPTH(RF_DEPTH), .FIFO_DEPTH(FIFO_DEPTH), .PIPE_STAGES(2)) u_packing (
    .clk, .rst_n,
    .start        (restart),
    .cfg_num_seq  (c_cfg.num_seq),
    .in_valid     (s_valid),
    .in_seq       (s_seq),
    .room,
    .rd_valid     (ldps_valid),
    .rd_ready     (ldps_ready),
    .rd_data      (ldps_data),
    .stall_packer (ev_pack_stall),
    .empty        (p_empty)
  );

  assign busy = c_active || !(s_done && p_empty);

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
    (c_active && c_req_valid) |-> quiet);

endmodule
