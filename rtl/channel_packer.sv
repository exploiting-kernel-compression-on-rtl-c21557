// Channel packer: channel-packs uncompressed 3x3 bit sequences into K
// registers of R bits.
//
// Sequence c of a set (c = 0..R-1, in stream order) is one channel of the
// kernel. Its bit for kernel position p (p = 0 for position (0,0) ... 8 for
// (2,2)) goes to bit c of register p. In the natural mapping position (0,0)
// is the most significant bit of the sequence, so register p receives
// sequence bit K-1-p. After R sequences the K registers form a complete set
// and are handed to the register file in one transfer; the last sequence of
// the stream closes a set early, its unused channel bits left at zero.
// While a completed set waits for room in the register file the packer
// accepts nothing (a stall).
//
// Interface: start clears the packer and loads the number of sequences of
// the stream; in_valid/in_ready/in_seq take one sequence per cycle; set_valid
// /set_ready/set_data (register p in set_data[p]) hand over a set.
//
// From the paper: K = 9 registers of R = 128 bits, R sequences packed
// sequentially before a new set of K registers is used, the packing of
// Fig. 5. Own choices: channel c in bit c, zero fill of a last partial set
// and the single-cycle set transfer.
module channel_packer
  import du_pkg::*;
#(
  parameter int unsigned K = SEQ_W,
  parameter int unsigned R = 128,
  localparam int unsigned CW = $clog2(R)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [CNT_W-1:0]      cfg_num_seq,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [K-1:0]          in_seq,
  output logic                  set_valid,
  input  logic                  set_ready,
  output logic [K-1:0][R-1:0]   set_data
);

  logic [K-1:0][R-1:0] regs_q;
  logic [CW-1:0]       col_q;
  logic                full_q;
  logic [CNT_W-1:0]    remaining_q;

  logic in_fire, set_fire, closes;

  assign in_ready  = !full_q;
  assign in_fire   = in_valid && in_ready;
  assign set_valid = full_q;
  assign set_fire  = set_valid && set_ready;
  assign set_data  = regs_q;
  assign closes    = (col_q == CW'(R - 1)) || (remaining_q == CNT_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      regs_q      <= '0;
      col_q       <= '0;
      full_q      <= 1'b0;
      remaining_q <= start ? cfg_num_seq : '0;
    end else if (set_fire) begin
      regs_q <= '0;
      col_q  <= '0;
      full_q <= 1'b0;
    end else if (in_fire) begin
      for (int p = 0; p < K; p++) regs_q[p][col_q] <= in_seq[K-1-p];
      col_q       <= col_q + 1'b1;
      remaining_q <= remaining_q - 1'b1;
      if (closes) full_q <= 1'b1;
    end
  end

  a_no_excess: assert property (@(posedge clk) disable iff (!rst_n || start)
    in_fire |-> (remaining_q != '0));

endmodule
