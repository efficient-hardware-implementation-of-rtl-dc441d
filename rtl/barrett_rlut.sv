// barrett_rlut -- Barrett factor generator for the moduli n - i of the
// fixed-weight sampler.
//
// The sampler reduces each random word modulo n - i, with i running from
// omega-1 down to 0, so it needs R_i = floor(2^32 / (n - i)) for every i.
// Instead of storing omega 18-bit factors, one register holds the current R
// and each step applies R_{i-1} = R_i - 14 + LUT[i], with LUT a one-bit table
// of omega entries. The start value is R_{omega-1} = floor(2^32/(n-omega+1)).
// The recurrence, the constant 14, the one-bit table and the start value are
// the published scheme; the table is computed at elaboration from n and omega
// (hqc_pkg::make_rlut), and the loop index register kept here alongside R is
// this design's choice.
//
// Interface: init loads i = omega-1 and R_{omega-1}; step moves to i-1 and
// R_{i-1} on the next clock. r and i are register outputs, valid one cycle
// after init or step. Stepping below i = 0 is not meaningful.
module barrett_rlut #(
  parameter int unsigned N     = hqc_pkg::N,
  parameter int unsigned OMEGA = hqc_pkg::OMEGA,
  parameter int unsigned RW    = hqc_pkg::RW,
  parameter int unsigned IW    = hqc_pkg::IW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          step,
  output logic [RW-1:0] r,
  output logic [IW-1:0] i
);
  import hqc_pkg::*;

  localparam logic [LUT_MAX-1:0] LUT    = make_rlut(64'(N), 64'(OMEGA));
  localparam logic [RW-1:0]      R_INIT = RW'(barrett_r(64'(N) - 64'(OMEGA) + 64'd1));

  initial assert (rlut_ok(64'(N), 64'(OMEGA)))
    else $error("barrett_rlut: R steps are not all 13 or 14 for this n and omega");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0;
      i <= '0;
    end else if (init) begin
      r <= R_INIT;
      i <= IW'(OMEGA - 1);
    end else if (step) begin
      r <= r - RW'(14) + RW'(LUT[i]);
      i <= i - 1'b1;
    end
  end
endmodule
