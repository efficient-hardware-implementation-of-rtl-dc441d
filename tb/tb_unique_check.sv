// tb_unique_check -- feeds omega Barrett results per run straight into the
// last two sampler stages, with random bubbles, and compares the memory
// contents after the write-back, and the coordinate reported for every i,
// with the reordered sampling loop worked out here:
//   if v[s_i] = 1 then v[i] = 1 else v[s_i] = 1.
// Coordinates are drawn so that repeated coordinates, back-to-back hits on
// the same memory word (read-after-write), coordinates inside the locally
// kept words and inputs that still need the final subtraction all occur; each
// is counted and must have happened. The memory is a read-before-write model.
module tb_unique_check;
  localparam int unsigned N = 17669;
  localparam int unsigned OMEGA = 66;
  localparam int unsigned MW = 64;
  localparam int unsigned NWORDS = (N + MW - 1) / MW;
  localparam int RUNS = 40;

  logic clk = 1'b0, rst_n = 1'b1;
  logic start, flush, flush_done;
  logic x_valid;
  logic [15:0] x;
  logic [6:0] x_i;
  logic rd_en, wr_en;
  logic [8:0] rd_addr, wr_addr;
  logic [63:0] rd_data, wr_data;
  logic sup_valid;
  logic [6:0] sup_idx;
  logic [14:0] sup_coord;

  logic [63:0] mem [NWORDS];
  int checks = 0, failures = 0;
  int n_dup = 0, n_raw = 0, n_local = 0, n_corr = 0;

  always #5 clk = ~clk;

  unique_check #(.N(N), .OMEGA(OMEGA)) dut (
    .clk, .rst_n, .start, .flush, .flush_done, .x_valid, .x, .x_i,
    .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data,
    .sup_valid, .sup_idx, .sup_coord);

  // read-before-write memory
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  bit exp_v [N];
  int exp_sup [OMEGA];
  int s [OMEGA];


  // support output check
  always @(posedge clk) if (rst_n && sup_valid) begin
    checks++;
    if (int'(sup_coord) != exp_sup[sup_idx]) begin
      failures++;
      $display("FAIL support[%0d] = %0d, expected %0d", sup_idx, sup_coord, exp_sup[sup_idx]);
    end
  end

  initial begin
    start = 0; flush = 0; x_valid = 0; x = 0; x_i = 0;
    for (int k = 0; k < int'(NWORDS); k++) mem[k] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < RUNS; run++) begin
      // draw the coordinates and the reference result
      foreach (exp_v[c]) exp_v[c] = 0;
      for (int i = int'(OMEGA) - 1; i >= 0; i--) begin
        int kind;
        kind = $urandom_range(0, 9);
        if (kind == 0 && i < int'(OMEGA) - 1)            // repeat a coordinate
          s[i] = s[$urandom_range(i + 1, OMEGA - 1)];
        else if (kind == 1 && i < int'(OMEGA) - 1)       // same word as the last one
          s[i] = ((s[i + 1] / MW) * MW) + $urandom_range(0, MW - 1);
        else if (kind == 2)                              // local words
          s[i] = $urandom_range(i, 2 * MW - 1);
        else
          s[i] = $urandom_range(i, N - 1);
        if (s[i] < i || s[i] >= int'(N)) s[i] = $urandom_range(i, N - 1);
        if (s[i] < 2 * int'(MW)) n_local++;
        if (exp_v[s[i]]) begin exp_v[i] = 1; exp_sup[i] = i; n_dup++; end
        else begin exp_v[s[i]] = 1; exp_sup[i] = s[i]; end
      end
      for (int k = 0; k < int'(NWORDS); k++) mem[k] = '0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int i = int'(OMEGA) - 1; i >= 0; i--) begin
        bit back2back;
        back2back = (i < int'(OMEGA) - 1);
        while ($urandom_range(0, 3) == 0) begin
          x_valid = 0; back2back = 0; @(negedge clk);
        end
        // the word written by iteration i+1 is read in the same cycle
        if (back2back && s[i] / int'(MW) == exp_sup[i + 1] / int'(MW) && s[i] >= 2 * int'(MW)) n_raw++;
        x_valid = 1;
        x_i = 7'(i);
        if ($urandom_range(0, 1) == 1) begin
          x = 16'(s[i] + int'(N) - i);   // X >= n, needs the final subtraction
          n_corr++;
        end else x = 16'(s[i]);
        @(negedge clk);
      end
      x_valid = 0;
      repeat (2) @(negedge clk);
      flush = 1; @(negedge clk); flush = 0;
      repeat (4) @(negedge clk);
      // compare the whole polynomial
      begin
        int bad, wt;
        bad = 0; wt = 0;
        for (int c = 0; c < int'(N); c++) begin
          if (mem[c / MW][c % MW] != exp_v[c]) bad++;
          wt += int'(mem[c / MW][c % MW]);
        end
        checks += 2;
        if (bad != 0) begin failures++; $display("FAIL run %0d: %0d wrong coefficients", run, bad); end
        if (wt != int'(OMEGA)) begin failures++; $display("FAIL run %0d: weight %0d", run, wt); end
      end
    end
    $display("repeated=%0d read-after-write=%0d local-word=%0d corrected=%0d", n_dup, n_raw, n_local, n_corr);
    checks += 4;
    if (n_dup == 0)   begin failures++; $display("FAIL: no repeated coordinate"); end
    if (n_raw == 0)   begin failures++; $display("FAIL: no read-after-write hazard"); end
    if (n_local == 0) begin failures++; $display("FAIL: no local-word access"); end
    if (n_corr == 0)  begin failures++; $display("FAIL: no final subtraction"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
