// Uncompressed table: banked scratchpad holding the original 9-bit bit
// sequences, one bank per Huffman tree node.
//
// Bank n holds the sequences of node n in the order of their index; a code
// word of node n with index i decodes to bank n, entry i. Each bank has
// BANK_DEPTH entries; with four banks of 256 entries the table holds 1024
// sequences, addressed by {node, index}. The table is filled through the
// write port while the unit is being configured. A read enables only the
// addressed bank, and every bank presents its registered read data; the
// selector picks the right one.
//
// Interface: we/wbank/waddr/wdata write one entry; re/rbank/raddr read one
// entry; rdata[n] is bank n's output one cycle after a read of bank n.
//
// From the paper: a scratchpad partitioned into banks, 1 KB, addressed by
// node address and decoded address. Own choice: 4 banks x 256 entries x 9
// bits (1024 entries, 9216 bits; the paper's "1 KB" is read as 1K entries),
// a single read and a single write port, one-cycle read latency.
module uncompressed_table
  import du_pkg::*;
#(
  parameter int unsigned BANKS      = NUM_NODES,
  parameter int unsigned BANK_DEPTH = 256,
  parameter int unsigned DW         = SEQ_W,
  localparam int unsigned BW        = $clog2(BANKS),
  localparam int unsigned AW        = $clog2(BANK_DEPTH)
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [BW-1:0]             wbank,
  input  logic [AW-1:0]             waddr,
  input  logic [DW-1:0]             wdata,
  input  logic                      re,
  input  logic [BW-1:0]             rbank,
  input  logic [AW-1:0]             raddr,
  output logic [BANKS-1:0][DW-1:0]  rdata
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [DW-1:0] mem [BANK_DEPTH];
    always_ff @(posedge clk) begin
      if (we && wbank == BW'(b)) mem[waddr] <= wdata;
      if (re && rbank == BW'(b)) rdata[b]   <= mem[raddr];
    end
  end

endmodule
