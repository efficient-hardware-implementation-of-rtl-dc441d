// prng_squeeze -- SHAKE squeeze stage that turns Keccak output blocks into a
// stream of 32-bit random words for the sampler.
//
// The Keccak state permutation is an external core. When its buffered block
// is used up (and en is set) this unit raises perm_req and holds it until
// perm_ack, which comes with the RATE_LANES*64-bit rate part of the permuted
// state on perm_rate. The block is held in a register and squeezed out one
// 64-bit lane at a time (lane 0 first); each lane is split into two 32-bit
// words, low half first, and pushed into a FIFO of FIFO_DEPTH words that
// feeds the sampler through a valid/ready handshake. Squeezing on 64-bit lane
// boundaries and the FIFO follow the published design; the request/ack
// protocol, the single block buffer, the FIFO depth and the lane/half order
// are this design's choices (the order matches little-endian reading of the
// SHAKE byte stream).
//
// clear empties the block buffer and the FIFO (used between the secret and
// the public seed expansions); it must only be applied while busy (a request
// outstanding) is low. Throughput: up to one word per cycle while a block is
// buffered; between blocks the sampler sees the permutation latency.
// FIFO_DEPTH must be a power of two, at least 2.
module prng_squeeze #(
  parameter int unsigned RATE_LANES = hqc_pkg::RATE_LANES,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clear,
  output logic                     busy,
  // permutation core
  output logic                     perm_req,
  input  logic                     perm_ack,
  input  logic [RATE_LANES*64-1:0] perm_rate,
  // random words
  output logic                     word_valid,
  output logic [31:0]              word,
  input  logic                     word_ready
);
  localparam int unsigned LCW = $clog2(RATE_LANES + 1);
  localparam int unsigned FAW = $clog2(FIFO_DEPTH);

  logic [RATE_LANES*64-1:0] blk;
  logic [LCW-1:0]           lanes_left;
  logic                     pending;

  logic [31:0]   fifo [FIFO_DEPTH];
  logic [FAW-1:0] rp, wp;
  logic [FAW:0]   cnt;
  logic           push, pop;

  assign busy       = pending;
  assign perm_req   = pending;
  assign word_valid = (cnt != '0);
  assign word       = fifo[rp];
  assign pop        = word_valid && word_ready;
  assign push       = (lanes_left != '0) && (int'(cnt) <= int'(FIFO_DEPTH) - 2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blk        <= '0;
      lanes_left <= '0;
      pending    <= 1'b0;
      rp         <= '0;
      wp         <= '0;
      cnt        <= '0;
      for (int k = 0; k < int'(FIFO_DEPTH); k++) fifo[k] <= '0;
    end else if (clear) begin
      lanes_left <= '0;
      rp         <= '0;
      wp         <= '0;
      cnt        <= '0;
    end else begin
      if (perm_ack) begin
        pending    <= 1'b0;
        blk        <= perm_rate;
        lanes_left <= LCW'(RATE_LANES);
      end else if (en && !pending && lanes_left == '0) begin
        pending <= 1'b1;
      end
      if (push) begin
        fifo[wp]           <= blk[31:0];
        fifo[FAW'(wp + 1)] <= blk[63:32];
        wp                 <= FAW'(wp + 2);
        blk                <= blk >> 64;
        lanes_left         <= lanes_left - 1'b1;
      end
      if (pop) rp <= FAW'(rp + 1);
      cnt <= cnt + (push ? (FAW+1)'(2) : '0) - (pop ? (FAW+1)'(1) : '0);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) perm_ack |-> pending);
  assert property (@(posedge clk) disable iff (!rst_n) clear |-> !pending);
endmodule
