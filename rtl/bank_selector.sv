// Selector of the decoder unit: chooses the output of the uncompressed-table
// bank that belongs to the node address of the code word being decoded.
//
// The node address is registered alongside the table read, so sel must be
// the node of the read issued in the previous cycle. Purely combinational.
//
// From the paper: a block named Selector inside the decoder unit. Own choice:
// that it is the bank output multiplexer.
module bank_selector #(
  parameter int unsigned BANKS = 4,
  parameter int unsigned DW    = 9,
  localparam int unsigned BW   = $clog2(BANKS)
) (
  input  logic [BW-1:0]            sel,
  input  logic [BANKS-1:0][DW-1:0] bank_data,
  output logic [DW-1:0]            data
);

  assign data = bank_data[sel];

endmodule
