// Decoded sequence buffer: a small FIFO of uncompressed bit sequences
// between the decoder unit and the channel packer.
//
// It absorbs the decoder's output while the channel packer waits for space
// in the register file. free counts empty entries; the stream parser uses it
// to start a code word only when the entry it will need is guaranteed.
//
// Interface: push/push_data (must not push when full), pop/pop_data with
// pop allowed while !empty (first-word fall-through), flush empties it.
// Timing: a pushed entry can be popped from the next cycle.
//
// From the paper: a block named Decoded Sequence Buffer in the packing
// unit. Own choices: a FIFO organisation and DEPTH = 8.
module seq_fifo #(
  parameter int unsigned DW    = 9,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic          push,
  input  logic [DW-1:0] push_data,
  input  logic          pop,
  output logic [DW-1:0] pop_data,
  output logic          empty,
  output logic          full,
  output logic [CW-1:0] free
);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [CW-1:0] cnt_q;

  assign empty    = (cnt_q == '0);
  assign full     = (cnt_q == CW'(DEPTH));
  assign free     = CW'(DEPTH) - cnt_q;
  assign pop_data = mem[rp_q];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp_q] <= push_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push && !full) wp_q <= inc(wp_q);
      if (pop && !empty) rp_q <= inc(rp_q);
      cnt_q <= cnt_q + CW'(push && !full) - CW'(pop && !empty);
    end
  end

  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n || flush) push |-> !full);
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n || flush) pop |-> !empty);

endmodule
