// Decoder unit: turns a (node address, decoded address) pair into the
// uncompressed 9-bit bit sequence.
//
// The pair from the stream parser's decoded address register addresses the
// banked uncompressed table; the node address is kept for one cycle and
// drives the selector that picks the addressed bank's read data. The result
// leaves one cycle after the pair arrives, one sequence per cycle.
//
// Interface: in_valid/in_node/in_addr from the stream parser; tbl_we and its
// address and data fill the table during configuration; out_valid/out_seq go
// to the packing unit. There is no back-pressure: the stream parser only
// issues a code word when the consumer has room for it.
//
// From the paper: the decoder unit made of a Selector and a banked
// Uncompressed table addressed by node address and decoded address. Own
// choice: the one-cycle table latency.
module decoder_unit
  import du_pkg::*;
#(
  parameter int unsigned BANK_DEPTH = 256,
  localparam int unsigned AW        = $clog2(BANK_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  input  logic                 in_valid,
  input  logic [NODE_W-1:0]    in_node,
  input  logic [AW-1:0]        in_addr,
  input  logic                 tbl_we,
  input  logic [NODE_W-1:0]    tbl_wnode,
  input  logic [AW-1:0]        tbl_waddr,
  input  logic [SEQ_W-1:0]     tbl_wdata,
  output logic                 out_valid,
  output logic [SEQ_W-1:0]     out_seq
);

  logic [NUM_NODES-1:0][SEQ_W-1:0] bank_data;
  logic [NODE_W-1:0]               node_q;

  uncompressed_table #(.BANKS(NUM_NODES), .BANK_DEPTH(BANK_DEPTH), .DW(SEQ_W)) u_table (
    .clk   (clk),
    .we    (tbl_we),
    .wbank (tbl_wnode),
    .waddr (tbl_waddr),
    .wdata (tbl_wdata),
    .re    (in_valid),
    .rbank (in_node),
    .raddr (in_addr),
    .rdata (bank_data)
  );

  bank_selector #(.BANKS(NUM_NODES), .DW(SEQ_W)) u_selector (
    .sel       (node_q),
    .bank_data (bank_data),
    .data      (out_seq)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      out_valid <= 1'b0;
      node_q    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) node_q <= in_node;
    end
  end

endmodule
