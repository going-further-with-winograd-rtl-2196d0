// tb_in_xform_pe: self-checking test of the row-by-row input-transform PE.
// Feeds random 6x6 int8 tiles (with and without gaps between rows) and random
// tap-wise shift exponents, and compares every output column with
// clamp(round(B^T x B / 2^sh)) computed here by plain matrix products.
// Also checks the paper's rate: 12 cycles per transform with rows streaming.
module tb_in_xform_pe;
  import wino_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid;
  logic signed [7:0] in_row [6];
  logic signed [4:0] sh [6][6];
  logic [2:0] out_col;
  logic signed [7:0] out_taps [6];

  in_xform_pe dut (.*);

  int x [6][6];
  int expq [6][6];
  int ncols, cyc, first_in, last_out, last_acc;
  int acc_log [$];

  function automatic int rq(longint v, int s);
    longint r = (s > 0) ? ((v + (longint'(1) << (s-1))) >>> s) : v;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  task automatic make_tile();
    longint t [6][6];
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) x[i][j] = $urandom_range(0, 255) - 128;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      longint a = 0;
      for (int k = 0; k < 6; k++) a += longint'(x[i][k]) * BT[j][k];
      t[i][j] = a;
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      longint a = 0;
      for (int k = 0; k < 6; k++) a += longint'(BT[i][k]) * t[k][j];
      expq[i][j] = rq(a, int'(sh[i][j]));
    end
  endtask

  // Drive a row at a falling edge and hold it until a rising edge accepts it.
  task automatic send_row(int y);
    @(negedge clk);
    in_valid = 1;
    for (int k = 0; k < 6; k++) in_row[k] = 8'(x[y][k]);
    while (!in_ready) @(negedge clk);
    @(posedge clk);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && in_ready) acc_log.push_back(cyc);
    if (rst_n && out_valid) begin
      for (int i = 0; i < 6; i++) begin
        checks++;
        if (int'(out_taps[i]) != expq[i][out_col]) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d tap %0d got %0d exp %0d", out_col, i, out_taps[i], expq[i][out_col]);
        end
      end
      checks++;
      if (out_col != 3'(ncols % 6)) begin failures++; $display("FAIL column order"); end
      ncols <= ncols + 1;
      last_out <= cyc;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; ncols = 0; in_valid = 0;
    for (int k = 0; k < 6; k++) in_row[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++)
        sh[i][j] = 5'($urandom_range(0, (t < 5) ? 0 : 7));
      make_tile();
      for (int y = 0; y < 6; y++) begin
        if (t >= 20) while ($urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; end
        send_row(y);
        
      end
      // wait for this tile's six columns before changing sh and expectations
      @(negedge clk) in_valid = 0;
      wait (ncols == (t + 1) * 6);
      @(posedge clk);
      if (t == 0) begin
        checks++;
        // first row accepted at first_in; last column registered 12 cycles later
        first_in = acc_log[0];
        if (last_out - first_in != 12) begin failures++; $display("FAIL latency %0d", last_out - first_in); end
      end
    end
    // throughput: 10 tiles back to back must take 12 cycles each
    begin
      int c0;
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) sh[i][j] = 5'd2;
      make_tile();
      acc_log.delete();
      for (int t = 0; t < 10; t++) begin
        for (int y = 0; y < 6; y++) begin
          send_row(y);
        end
      end
      @(negedge clk) in_valid = 0;
      wait (ncols == 50 * 6);
      @(posedge clk);
      checks++;
      c0 = acc_log[0];
      if (last_out - c0 != 10 * 12) begin failures++; $display("FAIL rate: %0d cycles for 10 tiles", last_out - c0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
