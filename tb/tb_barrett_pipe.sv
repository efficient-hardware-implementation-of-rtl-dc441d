// tb_barrett_pipe -- drives random 32-bit words (plus the extreme values 0
// and 2^32-1) with random loop indices and bubbles through the three Barrett
// stages and checks, three cycles later, that X - i is congruent to W modulo
// n - i and lies in [0, 2(n - i)).
module tb_barrett_pipe;
  localparam int unsigned N = 17669;
  localparam int unsigned OMEGA = 75;
  localparam int LAT = 3;

  logic clk = 1'b0, rst_n = 1'b1;
  logic in_valid;
  logic [31:0] w;
  logic [6:0] i;
  logic [17:0] r;
  logic x_valid;
  logic [15:0] x;
  logic [6:0] x_i;
  int checks = 0, failures = 0, corr = 0;

  typedef struct { bit v; longint unsigned w; int i; } item_t;
  item_t hist[$];

  always #5 clk = ~clk;

  barrett_pipe #(.N(N)) dut (.clk, .rst_n, .in_valid, .w, .i, .r, .x_valid, .x, .x_i);

  initial begin
    in_valid = 0; w = 0; i = 0; r = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      w = (t == 5) ? 32'hffff_ffff : (t == 6) ? 32'h0 : $urandom;
      i = 7'($urandom_range(0, OMEGA - 1));
      r = 18'((64'd1 << 32) / (64'(N) - 64'(i)));
      hist.push_back('{v: in_valid, w: 64'(w), i: int'(i)});
      @(posedge clk); #1;
      if (hist.size() >= LAT) begin
        item_t e;
        longint unsigned m, d;
        e = hist.pop_front();
        checks++;
        if (x_valid != e.v) begin
          failures++; $display("FAIL valid at t=%0d", t);
        end else if (e.v) begin
          m = 64'(N) - 64'(e.i);
          d = 64'(x) - 64'(e.i);
          if (int'(x_i) != e.i || 64'(x) < 64'(e.i) || d >= 2 * m || d % m != e.w % m) begin
            failures++;
            $display("FAIL w=%0d i=%0d x=%0d", e.w, e.i, x);
          end
          if (d >= m) corr++;
        end
      end
    end
    // the final correction (done downstream) must be needed sometimes
    checks++;
    if (corr == 0) begin failures++; $display("FAIL: X never needed the final subtraction"); end
    $display("results needing the final subtraction: %0d", corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
