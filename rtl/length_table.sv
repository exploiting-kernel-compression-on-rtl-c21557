// Length table of the stream parser.
//
// One entry per Huffman tree node giving the number of index bits that
// follow the node's prefix in a code word (5, 6, 6 and 8 for the tree with
// 32, 64, 64 and 256 sequences per node). The entries are written all at
// once when the unit is configured and read combinationally by node address.
//
// Interface: load/load_len write every entry at the next edge; rd_node selects
// the entry shown on rd_len. Reset clears the table.
//
// From the paper: a length table addressed by the node address. Own choice:
// it stores the index length only; the prefix length follows from the node
// address itself.
module length_table
  import du_pkg::*;
#(
  parameter int unsigned NODES = NUM_NODES,
  parameter int unsigned LW    = LEN_W,
  localparam int unsigned NW   = $clog2(NODES)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,
  input  logic [NODES-1:0][LW-1:0]  load_len,
  input  logic [NW-1:0]             rd_node,
  output logic [LW-1:0]             rd_len
);

  logic [NODES-1:0][LW-1:0] len_q;

  always_ff @(posedge clk) begin
    if (!rst_n)    len_q <= '0;
    else if (load) len_q <= load_len;
  end

  assign rd_len = len_q[rd_node];

endmodule
