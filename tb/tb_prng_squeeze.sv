// tb_prng_squeeze -- a stand-in permutation core answers each request after a
// random delay with a random 17-lane block; the consumer takes words with
// random gaps. Checks that the words come out in block order, lane order and
// low-half-first order, that a new block is requested only when the last one
// is used up, that clear empties the buffer and the FIFO, and that en = 0
// stops new requests.
module tb_prng_squeeze;
  localparam int unsigned RATE_LANES = 17;

  logic clk = 1'b0, rst_n = 1'b1;
  logic en, clear, busy;
  logic perm_req, perm_ack;
  logic [RATE_LANES*64-1:0] perm_rate;
  logic word_valid, word_ready;
  logic [31:0] word;
  int checks = 0, failures = 0, n_req = 0, n_stall = 0;

  always #5 clk = ~clk;

  prng_squeeze #(.RATE_LANES(RATE_LANES)) dut (
    .clk, .rst_n, .en, .clear, .busy, .perm_req, .perm_ack, .perm_rate,
    .word_valid, .word, .word_ready);

  logic [31:0] expect_q [$];

  // stand-in permutation core
  initial begin
    perm_ack = 0; perm_rate = '0;
    forever begin
      @(negedge clk);
      if (perm_req) begin
        repeat ($urandom_range(1, 30)) @(negedge clk);
        for (int l = 0; l < int'(RATE_LANES); l++) begin
          logic [63:0] lane;
          lane = {$urandom, $urandom};
          perm_rate[l*64 +: 64] = lane;
          expect_q.push_back(lane[31:0]);
          expect_q.push_back(lane[63:32]);
        end
        perm_ack = 1; n_req++;
        @(negedge clk);
        perm_ack = 0;
      end
    end
  end

  initial begin
    en = 0; clear = 0; word_ready = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); en = 1;
    for (int t = 0; t < 3000; t++) begin
      word_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (word_ready && !word_valid) n_stall++;
      if (word_valid && word_ready) begin
        checks++;
        if (expect_q.size() == 0 || word != expect_q[0]) begin
          failures++; $display("FAIL word %h at t=%0d", word, t);
        end
        if (expect_q.size() != 0) void'(expect_q.pop_front());
      end
      @(negedge clk);
    end
    // stop, wait for the outstanding request, clear
    word_ready = 0; en = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    begin
      int req_before;
      req_before = n_req;
      clear = 1; @(negedge clk); clear = 0;
      expect_q.delete();
      checks++;
      if (word_valid) begin failures++; $display("FAIL: words left after clear"); end
      repeat (50) @(negedge clk);
      checks++;
      if (n_req != req_before || perm_req) begin failures++; $display("FAIL: request while disabled"); end
    end
    // restart: the first word must come from a fresh block
    en = 1;
    word_ready = 1;
    for (int t = 0; t < 200; t++) begin
      #1;
      if (word_valid) begin
        checks++;
        if (expect_q.size() == 0 || word != expect_q[0]) begin failures++; $display("FAIL after clear"); end
        if (expect_q.size() != 0) void'(expect_q.pop_front());
      end
      @(negedge clk);
    end
    $display("blocks=%0d cycles without a word=%0d", n_req, n_stall);
    checks++;
    if (n_req < 10) begin failures++; $display("FAIL: only %0d blocks", n_req); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
