// tb_in_xform: self-checking test of the 64-PE input transformation engine.
// Streams 8 batches of 64 random int8 tiles (rows back to back) and compares
// every column of every tile with clamp(round(B^T x B / 2^sh)). Checks the
// rate of 64 transforms per 12 cycles.
module tb_in_xform;
  import wino_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid;
  logic signed [7:0] in_row [2][32][6];
  logic signed [4:0] sh [6][6];
  logic [2:0] out_col;
  logic signed [7:0] out_taps [2][32][6];

  in_xform dut (.*);

  localparam int NB = 8;
  int x [NB][2][32][6][6];
  int expq [NB][2][32][6][6];
  int ncol, cyc;
  int out_cyc [$];
  int acc_cyc [$];

  function automatic int rq(longint v, int s);
    longint r = (s > 0) ? ((v + (longint'(1) << (s-1))) >>> s) : v;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && in_ready) acc_cyc.push_back(cyc);
    if (rst_n && out_valid) begin
      int b;
      b = ncol / 6;
      out_cyc.push_back(cyc);
      checks++;
      if (out_col != 3'(ncol % 6)) begin failures++; $display("FAIL column order"); end
      for (int s = 0; s < 2; s++) for (int c = 0; c < 32; c++) for (int i = 0; i < 6; i++) begin
        checks++;
        if (int'(out_taps[s][c][i]) != expq[b][s][c][i][out_col]) begin
          failures++;
          if (failures < 10) $display("FAIL batch %0d tile %0d/%0d tap (%0d,%0d)", b, s, c, i, out_col);
        end
      end
      ncol <= ncol + 1;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; ncol = 0; in_valid = 0;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) sh[i][j] = 5'($urandom_range(0, 6));
    for (int b = 0; b < NB; b++) for (int s = 0; s < 2; s++) for (int c = 0; c < 32; c++) begin
      longint t [6][6];
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) x[b][s][c][i][j] = $urandom_range(0, 255) - 128;
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        t[i][j] = 0;
        for (int k = 0; k < 6; k++) t[i][j] += longint'(x[b][s][c][i][k]) * BT[j][k];
      end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        longint a;
        a = 0;
        for (int k = 0; k < 6; k++) a += longint'(BT[i][k]) * t[k][j];
        expq[b][s][c][i][j] = rq(a, int'(sh[i][j]));
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int y = 0; y < 6; y++) begin
        @(negedge clk);
        in_valid = 1;
        for (int s = 0; s < 2; s++) for (int c = 0; c < 32; c++) for (int k = 0; k < 6; k++)
          in_row[s][c][k] = 8'(x[b][s][c][y][k]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
    @(negedge clk) in_valid = 0;
    wait (ncol == NB * 6);
    @(posedge clk);
    checks++;
    if (out_cyc[NB * 6 - 1] - acc_cyc[0] != 12 * NB) begin
      failures++; $display("FAIL rate: %0d cycles for %0d batches", out_cyc[NB * 6 - 1] - acc_cyc[0], NB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
