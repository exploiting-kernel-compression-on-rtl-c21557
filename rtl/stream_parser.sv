// Stream parser: splits the compressed stream into code words.
//
// A code word is a node prefix followed by an index. The simplified Huffman
// tree is a chain of four nodes: node n is reached by n one-bits and its
// table by a further zero bit, so the prefixes are 0, 10, 110 and 1110. The
// parser takes the window at the head of the input buffer, finds the node
// address from the leading ones, reads that node's index length from the
// length table, and loads the index bits that follow the prefix, right
// aligned, into the decoded address register together with the node address.
// It then tells the input buffer to drop prefix plus index bits. One code
// word is parsed per cycle.
//
// A code word is parsed only when (1) the unit has been started and not all
// of the configured number of sequences have been parsed, (2) the buffer
// holds the whole code word and (3) the consumer has room (out_room).
// Checking only prefix+index <= avail_bits is safe: if the prefix itself were
// beyond the fetched bits, the computed length would exceed avail_bits too.
//
// Interface: start loads num_seq and the node lengths; win/avail_bits come
// from the input buffer, consume/consume_len go back to it; out_valid,
// out_node and out_addr are the registered node and decoded address, valid
// the cycle after the code word was parsed. done is high when every
// configured sequence has been parsed.
//
// From the paper: node address from the first bits, the length table
// addressed by it, the decoded address register and the four-node chain
// tree of Fig. 4. Own choices: a 1111 prefix (which the tree does not
// produce) is treated as node 3, and the counter of remaining sequences.
module stream_parser
  import du_pkg::*;
#(
  parameter int unsigned WIN_W  = MAX_CODE_W,
  parameter int unsigned FILL_W = 12,
  localparam int unsigned CLEN_W = $clog2(WIN_W + 1)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [CNT_W-1:0]                cfg_num_seq,
  input  logic [NUM_NODES-1:0][LEN_W-1:0] cfg_node_len,
  input  logic [WIN_W-1:0]                win,
  input  logic [FILL_W-1:0]               avail_bits,
  input  logic                            out_room,
  output logic                            consume,
  output logic [CLEN_W-1:0]               consume_len,
  output logic                            out_valid,
  output logic [NODE_W-1:0]               out_node,
  output logic [MAX_IDX_W-1:0]            out_addr,
  output logic                            done
);

  logic [NODE_W-1:0]    node;
  logic [LEN_W-1:0]     idx_len;
  logic [CLEN_W-1:0]    plen, total;
  logic [MAX_IDX_W-1:0] idx_left, idx;
  logic [CNT_W-1:0]     remaining_q;

  // Node address: number of leading ones, at most NUM_NODES-1.
  always_comb begin
    node = NODE_W'(NUM_NODES - 1);
    for (int n = NUM_NODES - 2; n >= 0; n--)
      if (win[WIN_W-1-n] == 1'b0) node = NODE_W'(n);
  end

  length_table u_length_table (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (start),
    .load_len (cfg_node_len),
    .rd_node  (node),
    .rd_len   (idx_len)
  );

  assign plen         = CLEN_W'(node) + 1'b1;
  assign total        = plen + CLEN_W'(idx_len);
  // Index bits start right after the prefix.
  assign idx_left     = MAX_IDX_W'(win >> (WIN_W - MAX_IDX_W - int'(plen)));
  assign idx          = idx_left >> (MAX_IDX_W - int'(idx_len));

  assign done        = (remaining_q == '0);
  assign consume     = !done && out_room && (FILL_W'(total) <= avail_bits) && !start;
  assign consume_len = total;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remaining_q <= '0;
      out_valid   <= 1'b0;
      out_node    <= '0;
      out_addr    <= '0;
    end else if (start) begin
      remaining_q <= cfg_num_seq;
      out_valid   <= 1'b0;
    end else begin
      out_valid <= consume;
      if (consume) begin
        out_node    <= node;
        out_addr    <= idx;
        remaining_q <= remaining_q - 1'b1;
      end
    end
  end

  a_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
    consume |-> (idx_len <= LEN_W'(MAX_IDX_W)));

endmodule
