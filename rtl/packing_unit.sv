// Packing unit: collects decoded bit sequences, channel-packs them into sets
// of K registers of R bits and hands the registers to the CPU through ldps.
//
// Decoded sequence buffer (FIFO) -> channel packer -> register file, as in
// the block diagram. room tells the streaming unit it may start another code
// word: the FIFO must have an entry for it and for the up to two sequences
// already in the streaming unit's pipeline. ldps reads the oldest packed
// register; rd_valid low means the ldps has to wait (the CPU stalls).
//
// Interface: start (lddu) clears the unit and loads the sequence count;
// in_valid/in_seq from the streaming unit; rd_valid/rd_ready/rd_data is the
// ldps port; stall_packer is high in cycles where a complete set waits for
// register-file space.
//
// From the paper: the three sub-blocks and the packing scheme. Own choices:
// the room rule and the FIFO depth.
module packing_unit
  import du_pkg::*;
#(
  parameter int unsigned R          = 128,
  parameter int unsigned RF_DEPTH   = 16,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned PIPE_STAGES = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [CNT_W-1:0]   cfg_num_seq,
  input  logic               in_valid,
  input  logic [SEQ_W-1:0]   in_seq,
  output logic               room,
  output logic               rd_valid,
  input  logic               rd_ready,
  output logic [R-1:0]       rd_data,
  output logic               stall_packer,
  output logic               empty
);

  localparam int unsigned FCW = $clog2(FIFO_DEPTH + 1);

  logic [SEQ_W-1:0]        f_data;
  logic                    f_empty, f_full;
  logic [FCW-1:0]          f_free;
  logic                    p_ready, set_valid, set_ready;
  logic [SEQ_W-1:0][R-1:0] set_data;
  logic [$clog2(RF_DEPTH+1)-1:0] rf_count;

  seq_fifo #(.DW(SEQ_W), .DEPTH(FIFO_DEPTH)) u_seq_buffer (
    .clk, .rst_n,
    .flush     (start),
    .push      (in_valid),
    .push_data (in_seq),
    .pop       (!f_empty && p_ready),
    .pop_data  (f_data),
    .empty     (f_empty),
    .full      (f_full),
    .free      (f_free)
  );

  channel_packer #(.K(SEQ_W), .R(R)) u_packer (
    .clk, .rst_n, .start, .cfg_num_seq,
    .in_valid  (!f_empty),
    .in_ready  (p_ready),
    .in_seq    (f_data),
    .set_valid, .set_ready, .set_data
  );

  packed_regfile #(.R(R), .K(SEQ_W), .DEPTH(RF_DEPTH)) u_regfile (
    .clk, .rst_n,
    .flush    (start),
    .wr_valid (set_valid),
    .wr_ready (set_ready),
    .wr_data  (set_data),
    .rd_valid, .rd_ready, .rd_data,
    .count    (rf_count)
  );

  assign room         = f_free > FCW'(PIPE_STAGES);
  assign stall_packer = set_valid && !set_ready;
  assign empty        = f_empty && !set_valid && (rf_count == '0);

  a_fifo_never_overflows: assert property (@(posedge clk) disable iff (!rst_n || start)
    in_valid |-> !f_full);

endmodule
