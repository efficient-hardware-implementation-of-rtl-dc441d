// tb_ring_mult -- multiplies random dense h by sparse y (given by its
// coordinates) modulo X^n - 1 and accumulates onto random x, using memory
// models for RAM0 (modify access), RAM1 and RAM2, and compares every
// coefficient of z, word by word, with x + h*y computed here bit by bit:
//   z[(p + c) mod n] ^= h[p] for every coordinate c and every bit p.
// The coordinates include the corner cases of the word-wise rotation: 0,
// 1..5 (start inside the short top word), 63, 64, 65, n-64, n-5 and n-1.
// Also checks the run time of omega * (NWORDS + 6) + 1 cycles.
module tb_ring_mult;
  localparam int unsigned N = 17669;
  localparam int unsigned OMEGA = 66;
  localparam int unsigned MW = 64;
  localparam int unsigned NWORDS = (N + MW - 1) / MW;
  localparam int RUNS = 2;

  logic clk = 1'b0, rst_n = 1'b1;
  logic start, busy, done;
  logic sup_rd_en, h_rd_en, z_wr_en, z_wr_xor;
  logic [6:0] sup_rd_addr;
  logic [14:0] sup_rd_data;
  logic [8:0] h_rd_addr, z_wr_addr;
  logic [63:0] h_rd_data, z_wr_data;

  logic [63:0] hmem [NWORDS];
  logic [63:0] zmem [NWORDS];
  logic [14:0] smem [OMEGA];
  int checks = 0, failures = 0, n_mod = 0;

  always #5 clk = ~clk;

  ring_mult #(.N(N), .OMEGA(OMEGA)) dut (
    .clk, .rst_n, .start, .busy, .done,
    .sup_rd_en, .sup_rd_addr, .sup_rd_data,
    .h_rd_en, .h_rd_addr, .h_rd_data,
    .z_wr_en, .z_wr_xor, .z_wr_addr, .z_wr_data);

  always @(posedge clk) begin
    if (sup_rd_en) sup_rd_data <= smem[sup_rd_addr];
    if (h_rd_en) h_rd_data <= hmem[h_rd_addr];
    if (z_wr_en) begin
      zmem[z_wr_addr] <= z_wr_xor ? (zmem[z_wr_addr] ^ z_wr_data) : z_wr_data;
      if (z_wr_xor) n_mod++;
    end
  end

  bit hb [N];
  bit zb [N];

  initial begin
    int corner [12] = '{0, 1, 2, 3, 5, 63, 64, 65, N - 64, N - 5, N - 1, 4};
    start = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < RUNS; run++) begin
      int cyc;
      // h, x
      for (int k = 0; k < int'(NWORDS); k++) begin
        hmem[k] = {$urandom, $urandom};
        zmem[k] = {$urandom, $urandom};
      end
      hmem[NWORDS - 1] &= (64'd1 << (N - (NWORDS - 1) * MW)) - 1;
      zmem[NWORDS - 1] &= (64'd1 << (N - (NWORDS - 1) * MW)) - 1;
      for (int c = 0; c < int'(N); c++) begin
        hb[c] = hmem[c / MW][c % MW];
        zb[c] = zmem[c / MW][c % MW];
      end
      // y: distinct coordinates, corner cases first in run 0
      for (int i = 0; i < int'(OMEGA); i++) begin
        bit ok;
        int c;
        do begin
          c = (run == 0 && i < 12) ? corner[i] : $urandom_range(0, N - 1);
          ok = 1;
          for (int j = 0; j < i; j++) if (int'(smem[j]) == c) ok = 0;
        end while (!ok);
        smem[i] = 15'(c);
        for (int p = 0; p < int'(N); p++) zb[(p + c) % int'(N)] ^= hb[p];
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      @(negedge clk);
      begin
        int bad;
        bad = 0;
        // one check per memory word of z
        for (int k = 0; k < int'(NWORDS); k++) begin
          int wbad;
          wbad = 0;
          for (int b = 0; b < int'(MW) && k * int'(MW) + b < int'(N); b++)
            if (zmem[k][b] != zb[k * int'(MW) + b]) wbad++;
          checks++;
          if (wbad != 0) begin failures++; bad += wbad; end
        end
        if (bad != 0) $display("FAIL run %0d: %0d wrong coefficients", run, bad);
        checks++;
        if (zmem[NWORDS - 1] >> (N - (NWORDS - 1) * MW) != 0) begin
          failures++; $display("FAIL run %0d: bits above n set", run);
        end
        checks++;
        if (cyc != int'(OMEGA) * (int'(NWORDS) + 6) + 1) begin
          failures++; $display("FAIL run %0d: %0d cycles", run, cyc);
        end
        $display("run %0d: %0d cycles", run, cyc);
      end
    end
    $display("modify writes=%0d", n_mod);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
