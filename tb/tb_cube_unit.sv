// tb_cube_unit: self-checking test of the Cube GEMM unit. Issues random int8
// operands every cycle, half of them accumulating onto a random int32 c_in,
// and checks each [16x16] result one cycle later against a reference product.
module tb_cube_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, acc_en, out_valid;
  logic signed [7:0]  a [16][32];
  logic signed [7:0]  b [32][16];
  logic signed [31:0] c_in [16][16];
  logic signed [31:0] c_out [16][16];

  cube_unit dut (.*);

  int exp_q [$][16][16];
  int issued, got;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) begin
        checks++;
        if (c_out[m][n] != exp_q[0][m][n]) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) got %0d exp %0d", m, n, c_out[m][n], exp_q[0][m][n]);
        end
      end
      void'(exp_q.pop_front());
      got++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [16][16];
    issued = 0; got = 0; in_valid = 0; acc_en = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      in_valid = 1;
      acc_en = t[0];
      for (int m = 0; m < 16; m++) for (int k = 0; k < 32; k++) a[m][k] = 8'($urandom);
      for (int k = 0; k < 32; k++) for (int n = 0; n < 16; n++) b[k][n] = 8'($urandom);
      for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) c_in[m][n] = 32'($urandom_range(0, 1 << 24)) - (1 << 23);
      for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) begin
        int s; s = acc_en ? int'(c_in[m][n]) : 0;
        for (int k = 0; k < 32; k++) s += int'(a[m][k]) * int'(b[k][n]);
        e[m][n] = s;
      end
      exp_q.push_back(e);
      issued++;
      // one-cycle latency: the result of this issue appears after the next edge
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (got != 40) begin failures++; $display("FAIL count %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
