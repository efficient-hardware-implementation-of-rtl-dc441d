// support_ram -- memory for a sparse polynomial in support representation.
//
// DEPTH entries of CW bits, one coordinate per entry; the sampler writes
// entry i with the final coordinate of loop iteration i and the ring
// multiplier reads the entries back one by one. One write port, one
// synchronous read port (data one cycle after rd_en). The array has no reset.
module support_ram #(
  parameter int unsigned DEPTH = hqc_pkg::OMEGA,
  parameter int unsigned CW    = hqc_pkg::CW,
  parameter int unsigned IW    = hqc_pkg::IW
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_addr,
  input  logic [CW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [IW-1:0] rd_addr,
  output logic [CW-1:0] rd_data
);
  logic [CW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  assert property (@(posedge clk) wr_en |-> int'(wr_addr) < int'(DEPTH));
  assert property (@(posedge clk) rd_en |-> int'(rd_addr) < int'(DEPTH));
endmodule
