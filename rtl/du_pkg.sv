// Shared constants and types of the kernel-decoding unit.
//
// The decoding unit streams Huffman-compressed 3x3 binary kernel channels
// ("bit sequences", 9 bits each) from memory, decodes them through a
// four-node simplified Huffman tree and channel-packs them into 128-bit
// registers for the CPU. This package holds the sizes every block shares and
// the configuration structure that the lddu instruction loads.
//
// Taken from the paper: 9-bit sequences, a four-node tree whose prefixes are
// 0, 10, 110 and 1110, 9 packing registers of 128 bits, a 1 KB uncompressed
// table, a 256-byte input buffer and a 256-byte register file, and the four
// fields of the configuration structure. Own choices: the field widths, the
// fetch size T = 16 bytes and 64-bit addresses.
package du_pkg;

  // Bits in one uncompressed bit sequence (one 3x3 channel).
  localparam int unsigned SEQ_W      = 9;
  // Nodes of the simplified Huffman tree.
  localparam int unsigned NUM_NODES  = 4;
  localparam int unsigned NODE_W     = $clog2(NUM_NODES);
  // Widest index field (node 3 holds 256 sequences) and its width field.
  localparam int unsigned MAX_IDX_W  = 8;
  localparam int unsigned LEN_W      = 4;
  // Longest code: four prefix bits and eight index bits.
  localparam int unsigned MAX_CODE_W = NUM_NODES + MAX_IDX_W;
  localparam int unsigned ADDR_W     = 64;
  localparam int unsigned CNT_W      = 32;

  // Configuration structure loaded by lddu (one field per row of the
  // paper's configuration table).
  typedef struct packed {
    logic [CNT_W-1:0]                        num_seq;    // number of bit sequences
    logic [ADDR_W-1:0]                       stream_ptr; // compressed sequences pointer
    logic [CNT_W-1:0]                        stream_len; // compressed sequences length, bytes
    logic [NUM_NODES-1:0][LEN_W-1:0]         node_len;   // Huffman tree nodes: index bits per node
  } du_cfg_t;

  // Prefix of node n is n ones followed by a zero, so its length is n+1.
  function automatic int unsigned prefix_len(input logic [NODE_W-1:0] node);
    return int'(node) + 1;
  endfunction

endpackage
