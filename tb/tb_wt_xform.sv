// tb_wt_xform: self-checking test of the 32-PE weight transformation engine.
// A one-cycle-latency model of an L0B slice serves the shared element reads
// of 32 random 3x3 filters; all 36 taps of all filters are compared with
// clamp(round((G24 f G24^T) / 2^sh)), and each transform must take 74 cycles.
module tb_wt_xform;
  import wino_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, rd_en, out_valid;
  logic [3:0] rd_elem;
  logic [31:0][7:0] rd_data;
  logic signed [4:0] sh [36];
  logic [5:0] out_group;
  logic signed [7:0] out_taps [32][6];

  wt_xform dut (.*);

  int f [32][9];
  int expq [32][36];
  int ng, cyc, start_cyc, last_cyc;

  always_ff @(posedge clk)
    for (int c = 0; c < 32; c++) rd_data[c] <= 8'(f[c][rd_elem]);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      for (int c = 0; c < 32; c++) for (int l = 0; l < 6; l++) begin
        checks++;
        if (int'(out_taps[c][l]) != expq[c][out_group * 6 + l]) begin
          failures++;
          if (failures < 10) $display("FAIL filter %0d tap %0d", c, out_group * 6 + l);
        end
      end
      ng <= ng + 1;
      last_cyc <= cyc;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; ng = 0; start = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 5; n++) begin
      for (int t = 0; t < 36; t++) sh[t] = 5'($urandom_range(5, 12));
      for (int c = 0; c < 32; c++) begin
        longint tm [6][3];
        for (int e = 0; e < 9; e++) f[c][e] = $urandom_range(0, 255) - 128;
        for (int i = 0; i < 6; i++) for (int l = 0; l < 3; l++) begin
          tm[i][l] = 0;
          for (int k = 0; k < 3; k++) tm[i][l] += longint'(G24[i][k]) * f[c][k * 3 + l];
        end
        for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
          longint a, r;
          int s;
          a = 0;
          s = int'(sh[i * 6 + j]);
          for (int l = 0; l < 3; l++) a += tm[i][l] * G24[j][l];
          r = (a + (longint'(1) << (s - 1))) >>> s;
          if (r > 127) r = 127;
          if (r < -128) r = -128;
          expq[c][i * 6 + j] = int'(r);
        end
      end
      @(negedge clk); start = 1; start_cyc = cyc;
      @(negedge clk); start = 0;
      wait (ng == (n + 1) * 6);
      @(posedge clk);
      checks++;
      if (last_cyc - start_cyc != 74) begin failures++; $display("FAIL cycles %0d", last_cyc - start_cyc); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
