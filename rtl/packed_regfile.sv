// Register file of the packing unit: a queue of channel-packed R-bit
// registers read by the ldps instruction.
//
// A complete set of K registers from the channel packer is written in one
// cycle into K consecutive entries of a circular store of DEPTH entries;
// the write waits until K entries are free. ldps reads the oldest register,
// so the CPU receives register 0 to K-1 of the first set, then of the next.
//
// Interface: wr_valid/wr_ready/wr_data (wr_data[p] is register p of the set);
// rd_valid says a register is available, rd_ready (an ldps) pops it, and
// rd_data shows the oldest register. flush empties the store.
// Timing: a written set can be read from the next cycle; one read per cycle.
//
// From the paper: a 256-byte register file from which ldps reads the oldest
// decoded sequence data. Own choices: 16 entries of 128 bits (256 bytes),
// the queue organisation and the whole-set write.
module packed_regfile #(
  parameter int unsigned R     = 128,
  parameter int unsigned K     = 9,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,
  input  logic                wr_valid,
  output logic                wr_ready,
  input  logic [K-1:0][R-1:0] wr_data,
  output logic                rd_valid,
  input  logic                rd_ready,
  output logic [R-1:0]        rd_data,
  output logic [CW-1:0]       count
);

  logic [R-1:0]  mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [CW-1:0] cnt_q;

  logic wr_fire, rd_fire;

  function automatic logic [AW-1:0] add(input logic [AW-1:0] p, input int unsigned n);
    int unsigned s;
    s = int'(p) + n;
    return AW'(s % DEPTH);
  endfunction

  assign wr_ready = (CW'(DEPTH) - cnt_q) >= CW'(K);
  assign wr_fire  = wr_valid && wr_ready;
  assign rd_valid = (cnt_q != '0);
  assign rd_fire  = rd_valid && rd_ready;
  assign rd_data  = mem[rp_q];
  assign count    = cnt_q;

  always_ff @(posedge clk) begin
    if (wr_fire)
      for (int i = 0; i < K; i++) mem[add(wp_q, i)] <= wr_data[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (wr_fire) wp_q <= add(wp_q, K);
      if (rd_fire) rp_q <= add(rp_q, 1);
      cnt_q <= cnt_q + (wr_fire ? CW'(K) : '0) - CW'(rd_fire);
    end
  end

  a_depth_holds_set: assert property (@(posedge clk) K <= DEPTH);

endmodule
