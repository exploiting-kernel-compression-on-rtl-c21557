// Testbench helpers for the kernel-decoding unit: an independent software
// model of the compressed format.
//
// A code word for node n with index i is n one-bits, a zero bit, then the
// index in idx_len[n] bits, most significant first; the stream is the
// concatenation of code words, packed most significant bit first into bytes.
// The leaf contents used by the tests are a fixed bijection from
// (node, index) to 9-bit sequences: flat = offset[n] + i over the 416 leaves
// of the 32/64/64/256 tree, value = (173 * flat + 41) mod 512.
package tb_du_pkg;

  typedef bit bitq_t[$];
  typedef byte unsigned byteq_t[$];

  localparam int IDX_LEN [4] = '{5, 6, 6, 8};
  localparam int NODE_SIZE [4] = '{32, 64, 64, 256};
  localparam int NODE_OFS [4] = '{0, 32, 96, 160};

  function automatic bitq_t append_code(bitq_t bits, int node, int idx, int ilen);
    bitq_t b;
    b = bits;
    for (int i = 0; i < node; i++) b.push_back(1'b1);
    b.push_back(1'b0);
    for (int i = ilen - 1; i >= 0; i--) b.push_back(bit'((idx >> i) & 1));
    return b;
  endfunction

  function automatic byteq_t bits_to_bytes(bitq_t bits);
    byteq_t q;
    int nbytes;
    nbytes = (bits.size() + 7) / 8;
    for (int k = 0; k < nbytes; k++) begin
      byte unsigned v;
      v = 0;
      for (int j = 0; j < 8; j++)
        if (k * 8 + j < bits.size() && bits[k * 8 + j]) v[7 - j] = 1'b1;
      q.push_back(v);
    end
    return q;
  endfunction

  function automatic int leaf_value(int node, int idx);
    return (173 * (NODE_OFS[node] + idx) + 41) % 512;
  endfunction

  // Node drawn with roughly the frequencies reported for the tree
  // (46 %, 24 %, 23 %, 7 %).
  function automatic int rand_node();
    int r;
    r = int'($urandom_range(99));
    if (r < 46) return 0;
    if (r < 70) return 1;
    if (r < 93) return 2;
    return 3;
  endfunction

endpackage
