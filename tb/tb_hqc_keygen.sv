// tb_hqc_keygen -- end-to-end test of the key-generation polynomial core at
// its default HQC-128 size (n = 17669, omega = 66).
//
// A stand-in for the Keccak permutation core answers every request after a
// fixed 24 cycles with a 17-lane block from one of two xorshift64 generators,
// chosen by perm_stream (0: secret-seed stream, 1: public-seed stream). It is
// not Keccak; it only supplies reproducible random blocks. The testbench logs
// every block per stream and computes independently:
//   x, y  from the first 66 and the next 66 words of the secret stream with
//         the reordered sampling loop (s = i + W mod (n-i); a repeated s sets
//         bit i instead),
//   h     from the first 554 words of the public stream, two words per 64-bit
//         word, low word first, top word cut to n mod 64 bits,
//   z     = x + h*y mod X^n - 1, bit by bit.
// After each run it reads z (RAM0), h (RAM1) and the support of y (RAM2)
// through the readout ports and compares them. It also checks that every run
// takes the same number of cycles (the timing does not depend on the secret
// data) and counts the mechanisms of the design, each of which must occur:
// word-stream stalls at block boundaries during sampling, repeated
// coordinates, back-to-back writes to the same word (read-after-write
// forwarding), coordinates in the locally kept words, Barrett results that
// need the final subtraction, dense expansion, modify (XOR) accumulation and
// the switch between the two seed streams.
module tb_hqc_keygen;
  localparam int unsigned N = 17669;
  localparam int unsigned OMEGA = 66;
  localparam int unsigned MW = 64;
  localparam int unsigned NWORDS = (N + MW - 1) / MW;
  localparam int unsigned RATE_LANES = 17;
  localparam int PERM_LAT = 24;
  localparam int RUNS = 10;

  logic clk = 1'b0, rst_n = 1'b1;
  logic start, busy, done;
  logic perm_req, perm_stream, perm_ack;
  logic [RATE_LANES*64-1:0] perm_rate;
  logic ext_rd_en, ext_rd_sel, ext_sup_rd_en;
  logic [8:0] ext_rd_addr;
  logic [63:0] ext_rd_data;
  logic [6:0] ext_sup_rd_addr;
  logic [14:0] ext_sup_rd_data;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hqc_keygen dut (
    .clk, .rst_n, .start, .busy, .done,
    .perm_req, .perm_stream, .perm_ack, .perm_rate,
    .ext_rd_en, .ext_rd_sel, .ext_rd_addr, .ext_rd_data,
    .ext_sup_rd_en, .ext_sup_rd_addr, .ext_sup_rd_data);

  // ---------------- stand-in permutation core ----------------
  longint unsigned gen_state [2] = '{64'h0123_4567_89ab_cdef, 64'hfedc_ba98_7654_3210};
  logic [31:0] log_sk [4096];   // secret-seed stream words of the current run
  logic [31:0] log_pk [4096];   // public-seed stream words of the current run
  int n_sk = 0, n_pk = 0;
  int n_blocks [2] = '{0, 0};

  function automatic longint unsigned xs64(input longint unsigned s);
    longint unsigned t;
    t = s;
    t ^= t << 13;
    t ^= t >> 7;
    t ^= t << 17;
    return t;
  endfunction

  initial begin
    perm_ack = 0; perm_rate = '0;
    forever begin
      @(negedge clk);
      if (perm_req) begin
        int st;
        st = int'(perm_stream);
        repeat (PERM_LAT - 1) @(negedge clk);
        for (int l = 0; l < int'(RATE_LANES); l++) begin
          longint unsigned lane;
          lane = xs64(gen_state[st]);
          gen_state[st] = lane;
          perm_rate[l*64 +: 64] = lane;
          if (st == 0) begin log_sk[n_sk] = lane[31:0]; log_sk[n_sk + 1] = lane[63:32]; n_sk += 2; end
          else begin log_pk[n_pk] = lane[31:0]; log_pk[n_pk + 1] = lane[63:32]; n_pk += 2; end
        end
        n_blocks[st]++;
        perm_ack = 1;
        @(negedge clk);
        perm_ack = 0;
      end
    end
  end

  // ---------------- reference ----------------
  bit xb [N];
  bit yb [N];
  bit hb [N];
  bit zb [N];
  int ysup [OMEGA];
  int n_dup = 0, n_raw = 0, n_local = 0, n_corr = 0, n_stall = 0, n_switch = 0;

  // Result in v and sup (module scratch arrays).
  bit v [N];
  int sup [OMEGA];
  task automatic sample_ref(input int base);
    int prev_word;
    prev_word = -1;
    foreach (v[c]) v[c] = 0;
    for (int i = int'(OMEGA) - 1; i >= 0; i--) begin
      longint unsigned w, m, r, q, s;
      logic [31:0] wv;
      wv = log_sk[base + (int'(OMEGA) - 1 - i)];
      w = 64'(wv);
      m = 64'(N) - 64'(i);
      r = (64'd1 << 32) / m;
      q = (w * r) >> 32;
      if (w - q * m >= m) n_corr++;
      s = 64'(i) + w % m;
      if (int'(s) < 2 * int'(MW)) n_local++;
      if (int'(s) / int'(MW) == prev_word && int'(s) >= 2 * int'(MW)) n_raw++;
      if (v[s]) begin v[i] = 1; sup[i] = i; n_dup++; prev_word = i / int'(MW); end
      else begin v[s] = 1; sup[i] = int'(s); prev_word = int'(s) / int'(MW); end
    end
  endtask

  task automatic read_word(input bit sel, input int a, output logic [63:0] d);
    @(negedge clk);
    ext_rd_en = 1; ext_rd_sel = sel; ext_rd_addr = 9'(a);
    @(negedge clk);
    ext_rd_en = 0;
    d = ext_rd_data;
  endtask

  initial begin
    int ref_cycles;
    start = 0; ext_rd_en = 0; ext_rd_sel = 0; ext_rd_addr = 0; ext_sup_rd_en = 0; ext_sup_rd_addr = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    ref_cycles = -1;
    for (int run = 0; run < RUNS; run++) begin
      int cyc, b0, b1;
      n_sk = 0;
      n_pk = 0;
      b0 = n_blocks[0]; b1 = n_blocks[1];
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
      repeat (2) @(negedge clk);
      $display("run %0d: %0d cycles, %0d secret-stream and %0d public-stream blocks",
               run, cyc, n_blocks[0] - b0, n_blocks[1] - b1);
      checks++;
      if (ref_cycles < 0) ref_cycles = cyc;
      else if (cyc != ref_cycles) begin
        failures++; $display("FAIL run %0d: %0d cycles, first run took %0d", run, cyc, ref_cycles);
      end
      // a 17-lane block holds 34 words, so every sampling of 66 words crosses
      // block boundaries and waits for the permutation
      n_stall += (n_blocks[0] - b0) - 1;
      if (n_blocks[1] - b1 > 0 && n_blocks[0] - b0 > 0) n_switch++;
      // reference
      sample_ref(0);
      xb = v;
      sample_ref(int'(OMEGA));
      yb = v;
      ysup = sup;
      for (int k = 0; k < int'(NWORDS); k++)
        for (int b = 0; b < int'(MW); b++)
          if (k * int'(MW) + b < int'(N))
            begin
              logic [31:0] lo, hi;
              lo = log_pk[2 * k];
              hi = log_pk[2 * k + 1];
              hb[k * int'(MW) + b] = (b < 32) ? lo[b] : hi[b - 32];
            end
      foreach (zb[c]) zb[c] = xb[c];
      for (int c = 0; c < int'(N); c++)
        if (yb[c]) for (int p = 0; p < int'(N); p++) zb[(p + c) % int'(N)] ^= hb[p];
      // compare RAM0 (z) and RAM1 (h)
      begin
        int bad_z, bad_h;
        logic [63:0] d;
        bad_z = 0; bad_h = 0;
        for (int k = 0; k < int'(NWORDS); k++) begin
          read_word(0, k, d);
          for (int b = 0; b < int'(MW); b++) begin
            int c;
            c = k * int'(MW) + b;
            if (c < int'(N)) begin if (d[b] != zb[c]) bad_z++; end
            else if (d[b]) bad_z++;
          end
          read_word(1, k, d);
          for (int b = 0; b < int'(MW); b++) begin
            int c;
            c = k * int'(MW) + b;
            if (c < int'(N)) begin if (d[b] != hb[c]) bad_h++; end
            else if (d[b]) bad_h++;
          end
        end
        checks += 2;
        if (bad_z != 0) begin failures++; $display("FAIL run %0d: %0d wrong bits in z", run, bad_z); end
        if (bad_h != 0) begin failures++; $display("FAIL run %0d: %0d wrong bits in h", run, bad_h); end
      end
      // compare RAM2 (support of y)
      begin
        int bad_s;
        bad_s = 0;
        for (int i = 0; i < int'(OMEGA); i++) begin
          @(negedge clk);
          ext_sup_rd_en = 1; ext_sup_rd_addr = 7'(i);
          @(negedge clk);
          ext_sup_rd_en = 0;
          if (int'(ext_sup_rd_data) != ysup[i]) bad_s++;
        end
        checks++;
        if (bad_s != 0) begin failures++; $display("FAIL run %0d: %0d wrong support entries", run, bad_s); end
      end
    end
    $display("stalls=%0d repeated=%0d read-after-write=%0d local=%0d final-subtraction=%0d stream-switches=%0d",
             n_stall, n_dup, n_raw, n_local, n_corr, n_switch);
    checks += 6;
    if (n_stall == 0)  begin failures++; $display("FAIL: no word-stream stall"); end
    if (n_dup == 0)    begin failures++; $display("FAIL: no repeated coordinate"); end
    if (n_raw == 0)    begin failures++; $display("FAIL: no read-after-write case"); end
    if (n_local == 0)  begin failures++; $display("FAIL: no local-word coordinate"); end
    if (n_corr == 0)   begin failures++; $display("FAIL: no final subtraction"); end
    if (n_switch == 0) begin failures++; $display("FAIL: no stream switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
