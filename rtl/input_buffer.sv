// Input buffer of the streaming unit: a circular byte store for the fetched
// compressed stream with a bit-granular read pointer.
//
// T-byte blocks from the LSU are written into consecutive T-byte slots. The
// stream parser sees a WIN_W-bit window starting at the read pointer and,
// after decoding one code word, consumes its length in bits; codes may
// straddle byte and slot boundaries and the wrap-around of the buffer.
// The compressed stream is read most significant bit first within each byte:
// stream bit i is bit 7-(i mod 8) of byte i/8, and win[WIN_W-1] is the next
// bit to decode. avail_bits says how many window bits hold fetched data;
// free_slots how many T-byte slots can be written.
//
// Interface: clear empties the buffer (restart); wr_valid/wr_data write one
// block (the writer must respect free_slots); consume/consume_len advance the
// read pointer. Timing: window and counts are registered state read
// combinationally; writes and consumption take effect at the next edge.
//
// From the paper: a 256-byte input buffer fed by T-byte fetches that sends m
// bits at a time to the stream parser. Own choices: the bit order, the slot
// organisation and m = WIN_W = 12, the longest code word.
module input_buffer
  import du_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 256,
  parameter int unsigned T_BYTES   = 16,
  parameter int unsigned WIN_W     = MAX_CODE_W,
  localparam int unsigned BUF_BITS = BUF_BYTES * 8,
  localparam int unsigned SLOTS    = BUF_BYTES / T_BYTES,
  localparam int unsigned SLOT_CW  = $clog2(SLOTS + 1),
  localparam int unsigned PTR_W    = $clog2(BUF_BITS),
  localparam int unsigned FILL_W   = $clog2(BUF_BITS + 1),
  localparam int unsigned CLEN_W   = $clog2(WIN_W + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 wr_valid,
  input  logic [T_BYTES*8-1:0] wr_data,
  output logic [SLOT_CW-1:0]   free_slots,
  output logic [WIN_W-1:0]     win,
  output logic [FILL_W-1:0]    avail_bits,
  input  logic                 consume,
  input  logic [CLEN_W-1:0]    consume_len
);

  // Bytes that a window can touch at any bit offset within the first byte.
  localparam int unsigned NB = (WIN_W + 7 + 7) / 8;
  localparam int unsigned BYTE_AW = $clog2(BUF_BYTES);

  logic [7:0]        mem [BUF_BYTES];
  logic [PTR_W-1:0]  rd_ptr_q;
  logic [FILL_W-1:0] fill_q;
  logic [$clog2(SLOTS)-1:0] wr_slot_q;

  logic [NB*8-1:0]   bytes;
  logic [BYTE_AW-1:0] rd_byte;
  logic [2:0]        rd_off;

  assign rd_byte = rd_ptr_q[PTR_W-1:3];
  assign rd_off  = rd_ptr_q[2:0];

  always_comb begin
    for (int i = 0; i < NB; i++)
      bytes[(NB-1-i)*8 +: 8] = mem[BYTE_AW'(rd_byte + BYTE_AW'(i))];
  end

  assign win        = WIN_W'(bytes >> (NB * 8 - WIN_W - int'(rd_off)));
  assign avail_bits = fill_q;
  assign free_slots = SLOT_CW'((FILL_W'(BUF_BITS) - fill_q) / FILL_W'(T_BYTES * 8));

  always_ff @(posedge clk) begin
    if (wr_valid && !clear)
      for (int b = 0; b < T_BYTES; b++)
        mem[BYTE_AW'(wr_slot_q) * BYTE_AW'(T_BYTES) + BYTE_AW'(b)] <= wr_data[b*8 +: 8];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr_q  <= '0;
      fill_q    <= '0;
      wr_slot_q <= '0;
    end else if (clear) begin
      rd_ptr_q  <= '0;
      fill_q    <= '0;
      wr_slot_q <= '0;
    end else begin
      if (wr_valid) wr_slot_q <= wr_slot_q + 1'b1;
      if (consume)  rd_ptr_q  <= rd_ptr_q + PTR_W'(consume_len);
      fill_q <= fill_q + (wr_valid ? FILL_W'(T_BYTES * 8) : '0)
                       - (consume  ? FILL_W'(consume_len) : '0);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_valid && !clear) |-> (free_slots != '0));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    (consume && !clear) |-> (FILL_W'(consume_len) <= fill_q));

endmodule
