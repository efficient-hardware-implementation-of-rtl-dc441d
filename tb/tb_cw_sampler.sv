// tb_cw_sampler -- runs the sampler in both modes against a read-before-write
// memory model and a word source, and checks the results against the sampling
// loop computed here with the % operator:
//   for i = omega-1 downto 0: s = i + (W mod (n-i));
//     if v[s] then v[i] = 1 else v[s] = 1
// Fixed-weight runs use random words, some of them chosen to repeat an earlier
// coordinate, some runs with gaps in the word stream. Checks: every
// coefficient, weight omega, the support written for each i, and, for runs
// with a word every cycle, the constant run time omega + 7 cycles whatever the
// data. Dense runs check every word of h, the masking of the top word, and the
// 2*NWORDS + 1 cycle run time.
module tb_cw_sampler;
  localparam int unsigned N = 17669;
  localparam int unsigned OMEGA = 66;
  localparam int unsigned MW = 64;
  localparam int unsigned NWORDS = (N + MW - 1) / MW;
  localparam int RUNS = 30;

  logic clk = 1'b0, rst_n = 1'b1;
  logic start, dense, busy, done;
  logic rnd_valid, rnd_ready;
  logic [31:0] rnd_word;
  logic rd_en, wr_en;
  logic [8:0] rd_addr, wr_addr;
  logic [63:0] rd_data, wr_data;
  logic sup_we;
  logic [6:0] sup_addr;
  logic [14:0] sup_data;

  logic [63:0] mem [NWORDS];
  int sup_mem [OMEGA];
  int checks = 0, failures = 0, n_dup = 0, n_gap = 0;

  always #5 clk = ~clk;

  cw_sampler #(.N(N), .OMEGA(OMEGA)) dut (
    .clk, .rst_n, .start, .dense, .busy, .done,
    .rnd_valid, .rnd_word, .rnd_ready,
    .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data,
    .sup_we, .sup_addr, .sup_data);

  always @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
    if (sup_we) sup_mem[sup_addr] <= int'(sup_data);
  end

  // word source
  logic [31:0] words [$];
  bit gaps;
  int wp;
  always @(negedge clk) begin
    rnd_valid <= (wp < words.size()) && !(gaps && $urandom_range(0, 2) == 0);
    rnd_word  <= (wp < words.size()) ? words[wp] : 32'h0;
  end
  always @(posedge clk) if (rnd_valid && rnd_ready) wp <= wp + 1;

  bit exp_v [N];
  int exp_sup [OMEGA];

  task automatic do_run(input bit dmode, input bit with_gaps, output int cycles);
    int cyc;
    gaps = with_gaps;
    wp = 0;
    @(negedge clk); start = 1; dense = dmode;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; if (cyc > 5000) break; end
    cycles = cyc;
    @(negedge clk);
  endtask

  initial begin
    int cyc, ref_cyc;
    start = 0; dense = 0; wp = 0; gaps = 0;
    for (int k = 0; k < int'(NWORDS); k++) mem[k] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    ref_cyc = -1;
    for (int run = 0; run < RUNS; run++) begin
      int s [OMEGA];
      bit g;
      words.delete();
      foreach (exp_v[c]) exp_v[c] = 0;
      for (int i = int'(OMEGA) - 1; i >= 0; i--) begin
        logic [31:0] w;
        int m;
        m = int'(N) - i;
        if ($urandom_range(0, 7) == 0 && i < int'(OMEGA) - 1) begin
          int t;
          t = s[$urandom_range(i + 1, OMEGA - 1)];       // repeat an earlier coordinate
          w = 32'(t - i) + 32'(m) * 32'($urandom_range(0, 200000));
        end else w = $urandom;
        words.push_back(w);
        s[i] = i + int'(64'(w) % 64'(m));
        if (exp_v[s[i]]) begin exp_v[i] = 1; exp_sup[i] = i; n_dup++; end
        else begin exp_v[s[i]] = 1; exp_sup[i] = s[i]; end
      end
      for (int k = 0; k < int'(NWORDS); k++) mem[k] = '0;
      g = (run % 2 == 1);
      do_run(0, g, cyc);
      if (g) n_gap++;
      begin
        int bad, wt, sbad;
        bad = 0; wt = 0; sbad = 0;
        for (int c = 0; c < int'(N); c++) begin
          if (mem[c / MW][c % MW] != exp_v[c]) bad++;
          wt += int'(mem[c / MW][c % MW]);
        end
        for (int i = 0; i < int'(OMEGA); i++) if (sup_mem[i] != exp_sup[i]) sbad++;
        checks += 3;
        if (bad != 0)  begin failures++; $display("FAIL run %0d: %0d wrong coefficients", run, bad); end
        if (wt != int'(OMEGA)) begin failures++; $display("FAIL run %0d: weight %0d", run, wt); end
        if (sbad != 0) begin failures++; $display("FAIL run %0d: %0d wrong support entries", run, sbad); end
      end
      if (!g) begin
        checks++;
        if (cyc != int'(OMEGA) + 7) begin
          failures++; $display("FAIL run %0d: %0d cycles, expected %0d", run, cyc, OMEGA + 7);
        end
      end
    end
    // dense mode
    for (int run = 0; run < 3; run++) begin
      words.delete();
      for (int k = 0; k < 2 * int'(NWORDS); k++) words.push_back($urandom);
      for (int k = 0; k < int'(NWORDS); k++) mem[k] = 64'hdead_beef_dead_beef;
      do_run(1, run == 2, cyc);
      begin
        int bad;
        logic [63:0] e;
        bad = 0;
        for (int k = 0; k < int'(NWORDS); k++) begin
          e = {words[2 * k + 1], words[2 * k]};
          if (k == int'(NWORDS) - 1) e &= (64'd1 << (N - (NWORDS - 1) * MW)) - 1;
          if (mem[k] != e) bad++;
        end
        checks++;
        if (bad != 0) begin failures++; $display("FAIL dense run %0d: %0d wrong words", run, bad); end
        if (run != 2) begin
          checks++;
          if (cyc != 2 * int'(NWORDS) + 1) begin
            failures++; $display("FAIL dense run %0d: %0d cycles", run, cyc);
          end
        end
      end
    end
    $display("repeated coordinates=%0d runs with gaps=%0d", n_dup, n_gap);
    checks++;
    if (n_dup == 0) begin failures++; $display("FAIL: no repeated coordinate"); end
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
