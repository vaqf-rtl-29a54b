// tb_dot_dsp: checks the 16-bit multiply-accumulate lane against an
// integer reference on random and extreme operands (default TN = 16).
module tb_dot_dsp;
  localparam int TN = 16, ACC_W = 32;
  logic [TN*16-1:0] act, wgt;
  logic [ACC_W-1:0] sum;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  dot_dsp dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 600; t++) begin
      longint ref_sum;
      ref_sum = 0;
      for (int k = 0; k < TN; k++) begin
        int a, w;
        case (t % 4)
          0: begin a = int'($urandom % 65536) - 32768; w = int'($urandom % 65536) - 32768; end
          1: begin a = int'($urandom % 200) - 100;     w = int'($urandom % 200) - 100; end
          2: begin a = -32768; w = (k % 2) ? 32767 : -32768; end
          default: begin a = (k == t % TN) ? 12345 : 0; w = -7; end
        endcase
        act[k*16 +: 16] = 16'(a);
        wgt[k*16 +: 16] = 16'(w);
        ref_sum += longint'(a) * longint'(w);
      end
      @(negedge clk);
      checks++;
      if (sum !== ACC_W'(ref_sum)) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d got %0d exp %0d", t, $signed(sum), ref_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
