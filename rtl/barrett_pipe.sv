// barrett_pipe -- three-stage Barrett reduction of the sampler pipeline
// (stages "Barret 1", "Barret 2" and "Barret 3").
//
// For a 32-bit random word W, loop index i and factor R = floor(2^32/(n-i))
// it computes X = (W + i) - (n - i) * q with q = (W * R) >> 32. Because q is
// at most one below floor(W / (n - i)), X lies in [i, i + 2(n - i)); the final
// conditional subtraction is done by the next stage (unique_check).
//   Stage 1: W[17:0]*R and W[31:18]*R into registers P1 and P2.
//   Stage 2: q = (P1 + (P2 << 18)) >> 32.
//   Stage 3: X = (W + i) - q * (n - i).
// The split of W into bits 17:0 and 31:18, the three stages and the W+i and
// n-i operands follow the published pipeline sketch; the register widths are
// this design's.
//
// Interface: in_valid/w/i/r enter every cycle (no back-pressure; an invalid
// input travels as a bubble). x_valid/x/x_i are register outputs exactly three
// cycles after the matching input.
module barrett_pipe #(
  parameter int unsigned N  = hqc_pkg::N,
  parameter int unsigned RW = hqc_pkg::RW,
  parameter int unsigned IW = hqc_pkg::IW,
  parameter int unsigned XW = hqc_pkg::CW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [31:0]   w,
  input  logic [IW-1:0] i,
  input  logic [RW-1:0] r,
  output logic          x_valid,
  output logic [XW-1:0] x,
  output logic [IW-1:0] x_i
);
  typedef struct packed {
    logic           v;
    logic [31:0]    w;
    logic [IW-1:0]  i;
  } tag_t;

  tag_t                s1, s2;
  logic [RW+17:0]      p1;     // W[17:0]  * R
  logic [RW+13:0]      p2;     // W[31:18] * R
  logic [RW-1:0]       q;
  logic [RW+31:0]      wr_full;  // W * R
  logic [RW+XW-1:0]    qm;
  logic [XW-1:0]       x_next;

  // Stage 1
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      p1 <= '0;
      p2 <= '0;
    end else begin
      s1 <= '{v: in_valid, w: w, i: i};
      p1 <= w[17:0]  * r;
      p2 <= w[31:18] * r;
    end
  end

  // Stage 2: W*R = P1 + P2 * 2^18, of which bits 49:32 are q.
  assign wr_full = {p2, 18'b0} + (RW+32)'(p1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2 <= '0;
      q  <= '0;
    end else begin
      s2 <= s1;
      q  <= wr_full[RW+31:32];
    end
  end

  // Stage 3: only the low XW bits are needed, since the exact result is
  // below 2n.
  assign qm     = q * XW'(N - s2.i);
  assign x_next = XW'(s2.w) + XW'(s2.i) - qm[XW-1:0];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      x       <= '0;
      x_i     <= '0;
    end else begin
      x_valid <= s2.v;
      x       <= x_next;
      x_i     <= s2.i;
    end
  end
endmodule
