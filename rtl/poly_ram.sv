// poly_ram -- memory for one polynomial in explicit representation.
//
// NWORDS words of MW bits (bit b of word k is coefficient k*MW + b). One
// synchronous read port (data one cycle after rd_en, read-before-write when
// the same word is written in that cycle) and one write port. The write port
// has a "modify" access: with wr_xor set the incoming word is XORed into the
// stored word instead of replacing it, so the ring multiplier can accumulate
// partial products (addition in F2) without reading them back itself. The
// modify access is the published idea; its form (an XOR flag on the write
// port) is this design's choice. The array has no reset.
module poly_ram #(
  parameter int unsigned NWORDS = hqc_pkg::NWORDS,
  parameter int unsigned MW     = hqc_pkg::MW,
  parameter int unsigned AW     = hqc_pkg::AW
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [MW-1:0] rd_data,
  input  logic          wr_en,
  input  logic          wr_xor,
  input  logic [AW-1:0] wr_addr,
  input  logic [MW-1:0] wr_data
);
  logic [MW-1:0] mem [NWORDS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_xor ? (mem[wr_addr] ^ wr_data) : wr_data;
  end

  assert property (@(posedge clk) rd_en |-> int'(rd_addr) < int'(NWORDS));
  assert property (@(posedge clk) wr_en |-> int'(wr_addr) < int'(NWORDS));
endmodule
