// tb_poly_ram -- random plain writes, XOR (modify) writes and reads on the
// polynomial memory, compared with a reference array: read data one cycle
// after the request, the old word when the same address is written in that
// cycle, and modify writes adding the incoming word in F2.
module tb_poly_ram;
  localparam int unsigned NWORDS = 277;

  logic clk = 1'b0;
  logic rd_en, wr_en, wr_xor;
  logic [8:0] rd_addr, wr_addr;
  logic [63:0] rd_data, wr_data;
  logic [63:0] ref_mem [NWORDS];
  int checks = 0, failures = 0, n_xor = 0;

  always #5 clk = ~clk;

  poly_ram #(.NWORDS(NWORDS)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_xor, .wr_addr, .wr_data);

  initial begin
    logic [63:0] expect_q;
    bit pend;
    rd_en = 0; wr_en = 0; wr_xor = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    // initialise
    for (int k = 0; k < int'(NWORDS); k++) begin
      @(negedge clk);
      wr_en = 1; wr_xor = 0; wr_addr = 9'(k); wr_data = {$urandom, $urandom};
      ref_mem[k] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    pend = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rd_data !== expect_q) begin failures++; $display("FAIL read t=%0d", t); end
      end
      rd_en   = ($urandom_range(0, 1) == 1);
      rd_addr = 9'($urandom_range(0, NWORDS - 1));
      wr_en   = ($urandom_range(0, 1) == 1);
      wr_xor  = ($urandom_range(0, 1) == 1);
      wr_addr = ($urandom_range(0, 3) == 0) ? rd_addr : 9'($urandom_range(0, NWORDS - 1));
      wr_data = {$urandom, $urandom};
      pend = rd_en;
      expect_q = ref_mem[rd_addr];
      if (wr_en) begin
        if (wr_xor) begin ref_mem[wr_addr] ^= wr_data; n_xor++; end
        else ref_mem[wr_addr] = wr_data;
      end
    end
    $display("modify writes=%0d", n_xor);
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
