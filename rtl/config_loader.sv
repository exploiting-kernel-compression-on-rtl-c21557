// Configuration loader: executes the lddu instruction by reading the
// configuration structure from memory through the LSU.
//
// lddu supplies a pointer. The loader first cancels whatever stream the unit
// is working on (a start with an empty configuration), waits until no fetch
// of that stream is still in flight, and then takes over the LSU port. It
// reads the structure one T-byte block at a time, one request outstanding:
//
//   block 0   bytes 0-3  number of bit sequences
//             bytes 4-7  compressed stream length in bytes
//             bytes 8-15 compressed stream pointer
//   block 1   bytes 0-1  index length of node n in bits [4n+3:4n]
//             bytes 4-11 number of sequences of node n, 16 bits each
//   block 2.. the uncompressed sequences, 16 bits each (9 used), all of
//             node 0 in index order, then node 1, node 2, node 3
//
// Each table block is written into the uncompressed table one entry per
// cycle. When the last entry is written the loader pulses start with the
// loaded fields, and the streaming unit begins fetching the stream.
// All fields are little-endian; the pointer must be T-byte aligned.
//
// Interface: lddu_valid/lddu_ptr; fetch_quiet from the streaming unit;
// req_*/resp_* share the unit's LSU port while active; tbl_* write the
// table; cancel and start (with cfg) drive the rest of the unit.
// Timing: 3 cycles plus memory latency per header block, and per table
// block its latency plus T/2 write cycles.
//
// From the paper: lddu "uses a pointer to a configuration structure to load
// its values in the decoding unit", the four fields of the configuration
// structure and the reset of the unit after loading. Own choices: the memory
// layout above (the paper names the fields but not their encoding), the
// per-node sequence counts in the "Huffman tree nodes" field, and the cancel
// and drain before loading.
module config_loader
  import du_pkg::*;
#(
  parameter int unsigned T_BYTES    = 16,
  parameter int unsigned BANK_DEPTH = 256,
  localparam int unsigned TAW       = $clog2(BANK_DEPTH),
  localparam int unsigned EPB       = T_BYTES / 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lddu_valid,
  input  logic [ADDR_W-1:0]    lddu_ptr,
  input  logic                 fetch_quiet,
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic [ADDR_W-1:0]    req_addr,
  input  logic                 resp_valid,
  input  logic [T_BYTES*8-1:0] resp_data,
  output logic                 tbl_we,
  output logic [NODE_W-1:0]    tbl_wnode,
  output logic [TAW-1:0]       tbl_waddr,
  output logic [SEQ_W-1:0]     tbl_wdata,
  output logic                 cancel,
  output logic                 start,
  output du_cfg_t              cfg,
  output logic                 active
);

  typedef enum logic [2:0] {S_IDLE, S_ABORT, S_DRAIN, S_REQ, S_WAIT, S_WRITE, S_GO} state_t;

  state_t              state_q;
  logic [ADDR_W-1:0]   addr_q;
  logic [1:0]          hdr_q;            // header blocks still to read
  du_cfg_t             cfg_q;
  logic [NUM_NODES-1:0][15:0] count_q;   // sequences per node
  logic [T_BYTES*8-1:0] blk_q;
  logic [$clog2(EPB)-1:0] slot_q;
  logic [NODE_W-1:0]   node_q;
  logic [15:0]         idx_q;
  logic                tbl_done_q;

  // First node at or after n that still has entries, and whether one exists.
  function automatic logic [NODE_W:0] next_node(input logic [NUM_NODES-1:0][15:0] cnt,
                                                input int unsigned from);
    logic [NODE_W:0] r;
    r = '0;
    for (int n = NUM_NODES - 1; n >= 0; n--)
      if (n >= int'(from) && cnt[n] != 16'd0) r = {1'b1, NODE_W'(n)};
    return r;
  endfunction

  logic [NODE_W:0] nn_first, nn_after;
  logic            last_in_node;
  assign nn_first     = next_node(resp_data[32 +: 64], 0);
  assign last_in_node = (idx_q + 16'd1 == count_q[node_q]);
  assign nn_after     = next_node(count_q, int'(node_q) + 1);

  assign req_valid = (state_q == S_REQ);
  assign req_addr  = addr_q;
  assign active    = (state_q != S_IDLE);
  assign cancel     = (state_q == S_ABORT);
  assign start     = (state_q == S_GO);
  assign cfg       = (state_q == S_GO) ? cfg_q : '0;
  assign tbl_we    = (state_q == S_WRITE) && !tbl_done_q;
  assign tbl_wnode = node_q;
  assign tbl_waddr = TAW'(idx_q);
  assign tbl_wdata = blk_q[16 * slot_q +: SEQ_W];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      addr_q     <= '0;
      hdr_q      <= '0;
      cfg_q      <= '0;
      count_q    <= '0;
      blk_q      <= '0;
      slot_q     <= '0;
      node_q     <= '0;
      idx_q      <= '0;
      tbl_done_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (lddu_valid) begin
          addr_q  <= lddu_ptr;
          hdr_q   <= 2'd2;
          state_q <= S_ABORT;
        end
        S_ABORT: state_q <= S_DRAIN;
        S_DRAIN: if (fetch_quiet) state_q <= S_REQ;
        S_REQ: if (req_ready) begin
          addr_q  <= addr_q + ADDR_W'(T_BYTES);
          state_q <= S_WAIT;
        end
        S_WAIT: if (resp_valid) begin
          if (hdr_q == 2'd2) begin
            cfg_q.num_seq    <= resp_data[31:0];
            cfg_q.stream_len <= resp_data[63:32];
            cfg_q.stream_ptr <= resp_data[64 +: ADDR_W];
            hdr_q            <= 2'd1;
            state_q          <= S_REQ;
          end else if (hdr_q == 2'd1) begin
            cfg_q.node_len <= resp_data[15:0];
            count_q        <= resp_data[32 +: 64];
            hdr_q          <= 2'd0;
            node_q         <= nn_first[NODE_W-1:0];
            idx_q          <= '0;
            tbl_done_q     <= !nn_first[NODE_W];
            state_q        <= nn_first[NODE_W] ? S_REQ : S_GO;
          end else begin
            blk_q   <= resp_data;
            slot_q  <= '0;
            state_q <= S_WRITE;
          end
        end
        S_WRITE: begin
          if (last_in_node) begin
            node_q <= nn_after[NODE_W-1:0];
            idx_q  <= '0;
            if (!nn_after[NODE_W]) tbl_done_q <= 1'b1;
          end else begin
            idx_q <= idx_q + 16'd1;
          end
          slot_q <= slot_q + 1'b1;
          if (last_in_node && !nn_after[NODE_W]) state_q <= S_GO;
          else if (slot_q == ($clog2(EPB))'(EPB - 1)) state_q <= S_REQ;
        end
        S_GO: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_count_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_WRITE) |-> (count_q[node_q] <= 16'(BANK_DEPTH)));
  a_header_fits: assert property (@(posedge clk) T_BYTES >= 16);

endmodule
