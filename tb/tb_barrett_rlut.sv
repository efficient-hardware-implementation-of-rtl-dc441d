// tb_barrett_rlut -- checks that the one-bit-table recurrence reproduces
// floor(2^32 / (n - i)) for every loop index i = omega-1 .. 0, for HQC-128
// key generation (omega = 66) and for the largest HQC-128 weight (75).
module tb_barrett_rlut;
  localparam int unsigned N = 17669;

  logic clk = 1'b0, rst_n = 1'b1;
  logic init66, step66, init75, step75;
  logic [17:0] r66, r75;
  logic [6:0]  i66, i75;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  barrett_rlut #(.N(N), .OMEGA(66)) dut66 (.clk, .rst_n, .init(init66), .step(step66), .r(r66), .i(i66));
  barrett_rlut #(.N(N), .OMEGA(75)) dut75 (.clk, .rst_n, .init(init75), .step(step75), .r(r75), .i(i75));

  function automatic longint unsigned ref_r(input int unsigned i);
    return (64'd1 << 32) / (64'(N) - 64'(i));
  endfunction

  task automatic run(input int unsigned omega);
    if (omega == 66) init66 = 1'b1; else init75 = 1'b1;
    @(posedge clk); #1;
    init66 = 1'b0; init75 = 1'b0;
    for (int i = int'(omega) - 1; i >= 0; i--) begin
      logic [17:0] r; logic [6:0] ii;
      r  = (omega == 66) ? r66 : r75;
      ii = (omega == 66) ? i66 : i75;
      checks++;
      if (64'(r) != ref_r(i) || int'(ii) != i) begin
        failures++;
        $display("FAIL omega=%0d i=%0d: got i=%0d R=%0d, expected R=%0d", omega, i, ii, r, ref_r(i));
      end
      if (omega == 66) step66 = 1'b1; else step75 = 1'b1;
      @(posedge clk); #1;
      step66 = 1'b0; step75 = 1'b0;
    end
  endtask

  initial begin
    init66 = 0; step66 = 0; init75 = 0; step75 = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    run(66);
    run(75);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
