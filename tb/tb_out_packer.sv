// tb_out_packer: checks requantization and packing of output words: shift,
// skip addition, saturation to 16 or 8 bits, lane placement and zeroing of
// lanes past the valid count, against a reference written from the format
// definition (default BQ = 8: 4 x 16-bit or 8 x 8-bit lanes per word).
module tb_out_packer;
  localparam int BQ = 8, ACC_W = 32, G = 4, GQ = 8;
  logic [GQ-1:0][ACC_W-1:0] acc;
  logic [3:0]  nvalid;
  logic        quant_out, residual;
  logic [5:0]  shift;
  logic [63:0] skip, word;
  logic clk = 1'b0;
  int checks = 0, failures = 0, n_sat = 0;
  out_packer dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [63:0] exp_w;
      int lanes, bits;
      quant_out = 1'($urandom);
      residual  = quant_out ? 1'b0 : 1'($urandom);
      shift     = 6'($urandom % 20);
      nvalid    = 4'($urandom % 9);
      skip      = {$urandom, $urandom};
      for (int l = 0; l < GQ; l++)
        acc[l] = (t % 2) ? ACC_W'(int'($urandom % 2000000) - 1000000) : ACC_W'($urandom);
      lanes = quant_out ? GQ : G;
      bits  = quant_out ? BQ : 16;
      exp_w = '0;
      for (int l = 0; l < lanes; l++) begin
        longint v, mx, mn;
        if (l >= int'(nvalid)) continue;
        mx = (64'sd1 <<< (bits - 1)) - 1; mn = -(64'sd1 <<< (bits - 1));
        v = longint'($signed(acc[l])) >>> shift;
        if (residual) v += longint'($signed(skip[l*16 +: 16]));
        if (v > mx || v < mn) n_sat++;
        if (v > mx) v = mx;
        if (v < mn) v = mn;
        exp_w = exp_w | ((64'(v) & ((64'd1 << bits) - 1)) << (l * bits));
      end
      @(negedge clk);
      checks++;
      if (word !== exp_w) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d q=%0d r=%0d sh=%0d nv=%0d got %h exp %h",
                                   t, quant_out, residual, shift, nvalid, word, exp_w);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
