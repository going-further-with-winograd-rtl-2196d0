// tb_out_xform: self-checking test of the 16-PE output transformation engine.
// Streams 20 gathered 6x6 tap tiles of 16 output channels back to back and
// compares each channel's 4x4 result with sat32(A^T round(Y/2^sh) A).
// Checks the rate of one tile per 6 cycles.
module tb_out_xform;
  import wino_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [31:0] in_row [6][16];
  logic signed [4:0]  sh [6][6];
  logic signed [31:0] out_tile [16][4][4];

  out_xform dut (.*);

  localparam int NTL = 20;
  longint y [NTL][16][6][6];
  longint e [NTL][16][4][4];
  int nout, cyc;
  int out_cyc [$];

  function automatic longint rq(longint v, int s);
    longint r = (s > 0) ? ((v + (longint'(1) << (s-1))) >>> s) : (v <<< (-s));
    if (r > 64'sd2147483647) r = 64'sd2147483647;
    if (r < -64'sd2147483648) r = -64'sd2147483648;
    return r;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      out_cyc.push_back(cyc);
      for (int p = 0; p < 16; p++) for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        checks++;
        if (longint'(out_tile[p][i][j]) != e[nout][p][i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d ch %0d (%0d,%0d)", nout, p, i, j);
        end
      end
      nout <= nout + 1;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; nout = 0; in_valid = 0;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) sh[i][j] = 5'($urandom_range(0, 6) - 1);
    for (int t = 0; t < NTL; t++) for (int p = 0; p < 16; p++) begin
      longint ys [6][6], tmp [6][4];
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        y[t][p][i][j] = longint'($urandom_range(0, 1 << 22)) - (1 << 21);
        ys[i][j] = rq(y[t][p][i][j], int'(sh[i][j]));
      end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 4; j++) begin
        tmp[i][j] = 0;
        for (int k = 0; k < 6; k++) tmp[i][j] += ys[i][k] * AT[j][k];
      end
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        longint a;
        a = 0;
        for (int k = 0; k < 6; k++) a += longint'(AT[i][k]) * tmp[k][j];
        e[t][p][i][j] = a;
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < NTL; t++)
      for (int r = 0; r < 6; r++) begin
        @(negedge clk);
        in_valid = 1;
        for (int k = 0; k < 6; k++) for (int p = 0; p < 16; p++) in_row[k][p] = 32'(y[t][p][r][k]);
      end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NTL) begin failures++; $display("FAIL %0d tiles", nout); end
    checks++;
    if (out_cyc[NTL - 1] - out_cyc[0] != 6 * (NTL - 1)) begin failures++; $display("FAIL rate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
