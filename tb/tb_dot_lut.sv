// tb_dot_lut: checks the binary-weight add/subtract lane (TNQ = 32 8-bit
// activations) against an integer reference: weight bit 1 adds, 0 subtracts.
module tb_dot_lut;
  localparam int TNQ = 32, BQ = 8, ACC_W = 32;
  logic [TNQ*BQ-1:0] act;
  logic [TNQ-1:0]    wbit;
  logic [ACC_W-1:0]  sum;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  dot_lut dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 600; t++) begin
      int ref_sum;
      ref_sum = 0;
      for (int k = 0; k < TNQ; k++) begin
        int a;
        a = (t % 3 == 2) ? -128 : int'($urandom % 256) - 128;
        act[k*BQ +: BQ] = BQ'(a);
        wbit[k] = (t % 3 == 1) ? 1'b1 : 1'($urandom);
        ref_sum += wbit[k] ? a : -a;
      end
      @(negedge clk);
      checks++;
      if ($signed(sum) !== ref_sum) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d got %0d exp %0d", t, $signed(sum), ref_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
