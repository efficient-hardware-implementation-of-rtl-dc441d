// tb_support_ram -- writes random coordinates into all entries, rewrites some,
// and reads them back in random order with one cycle read latency.
module tb_support_ram;
  localparam int unsigned DEPTH = 66;

  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [6:0] wr_addr, rd_addr;
  logic [14:0] wr_data, rd_data;
  logic [14:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  support_ram #(.DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int k = 0; k < int'(DEPTH); k++) begin
        @(negedge clk);
        wr_en = (pass == 0) || ($urandom_range(0, 1) == 1);
        wr_addr = 7'(k); wr_data = 15'($urandom_range(0, 17668));
        if (wr_en) ref_mem[k] = wr_data;
      end
      @(negedge clk); wr_en = 0;
      for (int t = 0; t < 200; t++) begin
        int a;
        a = $urandom_range(0, DEPTH - 1);
        rd_en = 1; rd_addr = 7'(a);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (rd_data != ref_mem[a]) begin failures++; $display("FAIL entry %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
