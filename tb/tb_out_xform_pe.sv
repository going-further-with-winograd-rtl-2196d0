// tb_out_xform_pe: self-checking test of the fast row-by-row output-transform PE.
// Streams random int32 6x6 tap tiles back to back with random tap-wise
// exponents and compares each 4x4 result with sat32(A^T * round(Y / 2^sh) * A)
// computed here. Checks the paper's rate of one transform per 6 cycles.
module tb_out_xform_pe;
  import wino_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [31:0] in_row [6];
  logic signed [4:0]  sh [6][6];
  logic signed [31:0] out_tile [4][4];

  out_xform_pe dut (.*);

  localparam int NTILE = 60;
  longint exp_t [NTILE][4][4];
  int nout, cyc;
  int out_cyc [$];
  int sat_seen;

  function automatic longint sat(longint v, int w);
    longint mx = (longint'(1) << (w - 1)) - 1;
    if (v > mx) return mx;
    if (v < -mx - 1) return -mx - 1;
    return v;
  endfunction
  function automatic longint rq(longint v, int s);
    longint r = (s > 0) ? ((v + (longint'(1) << (s-1))) >>> s) : (v <<< (-s));
    return sat(r, 32);
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      out_cyc.push_back(cyc);
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        checks++;
        if (longint'(out_tile[i][j]) != exp_t[nout][i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d (%0d,%0d) got %0d exp %0d", nout, i, j, out_tile[i][j], exp_t[nout][i][j]);
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
    longint y [6][6];
    int first_acc;
    cyc = 0; nout = 0; in_valid = 0; sat_seen = 0;
    for (int k = 0; k < 6; k++) in_row[k] = '0;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) sh[i][j] = 5'($urandom_range(0, 8) - 2);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < NTILE; t++) begin
      longint ys [6][6], tmp [6][4];
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        y[i][j] = longint'($urandom_range(0, 1 << 22)) - (1 << 21);
        if (t >= NTILE - 5) y[i][j] = longint'(signed'($urandom)); // saturating tiles
        ys[i][j] = rq(y[i][j], int'(sh[i][j]));
      end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 4; j++) begin
        longint a; a = 0;
        for (int k = 0; k < 6; k++) a += ys[i][k] * AT[j][k];
        tmp[i][j] = a;
      end
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        longint a; a = 0;
        for (int k = 0; k < 6; k++) a += longint'(AT[i][k]) * tmp[k][j];
        exp_t[t][i][j] = sat(a, 32);
        if (sat(a, 32) != a) sat_seen++;
      end
      for (int r = 0; r < 6; r++) begin
        @(negedge clk);
        in_valid = 1;
        for (int k = 0; k < 6; k++) in_row[k] = 32'(y[r][k]);
        if (t == 0 && r == 0) first_acc = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NTILE) begin failures++; $display("FAIL got %0d tiles", nout); end
    checks++;
    if (out_cyc[NTILE-1] - out_cyc[0] != 6 * (NTILE - 1)) begin failures++; $display("FAIL rate"); end
    checks++;
    if (out_cyc[0] - first_acc != 6) begin failures++; $display("FAIL latency %0d", out_cyc[0] - first_acc); end
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
