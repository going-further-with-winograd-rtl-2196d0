// tb_wt_xform_pe: self-checking test of the tap-by-tap weight-transform PE.
// A one-cycle-latency model of the weight buffer answers the PE's reads of a
// random 3x3 int8 filter. Each group of taps is compared with
// clamp(round((G24 f G24^T) / 2^sh)) computed here by matrix products, and the
// whole transform must take the 72-step schedule plus 2 pipeline cycles.
module tb_wt_xform_pe;
  import wino_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, rd_en, out_valid;
  logic [3:0] rd_elem;
  logic signed [7:0] rd_data;
  logic signed [4:0] sh [36];
  logic [5:0] out_group;
  logic signed [7:0] out_taps [6];

  wt_xform_pe #(.PT(6)) dut (.*);

  int f [9];
  int expq [36];
  int ngroups, cyc, start_cyc, last_cyc;

  always_ff @(posedge clk) rd_data <= 8'(f[rd_elem]);

  task automatic make_filter(bit extreme);
    longint t [6][3];
    for (int e = 0; e < 9; e++) f[e] = extreme ? (($urandom_range(0,1) == 1) ? 127 : -128) : $urandom_range(0, 255) - 128;
    for (int i = 0; i < 6; i++) for (int l = 0; l < 3; l++) begin
      longint a = 0;
      for (int k = 0; k < 3; k++) a += longint'(G24[i][k]) * f[k * 3 + l];
      t[i][l] = a;
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      longint a = 0, r;
      int s = int'(sh[i * 6 + j]);
      for (int l = 0; l < 3; l++) a += t[i][l] * G24[j][l];
      r = (s > 0) ? ((a + (longint'(1) << (s - 1))) >>> s) : a;
      if (r > 127) r = 127;
      if (r < -128) r = -128;
      expq[i * 6 + j] = int'(r);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (out_group != 6'(ngroups % 6)) begin failures++; $display("FAIL group order"); end
      for (int l = 0; l < 6; l++) begin
        checks++;
        if (int'(out_taps[l]) != expq[out_group * 6 + l]) begin
          failures++;
          if (failures < 10) $display("FAIL tap %0d got %0d exp %0d", out_group * 6 + l, out_taps[l], expq[out_group * 6 + l]);
        end
      end
      ngroups <= ngroups + 1;
      last_cyc <= cyc;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; ngroups = 0; start = 0;
    for (int e = 0; e < 9; e++) f[e] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      for (int t = 0; t < 36; t++) sh[t] = 5'($urandom_range(4, 14));
      make_filter(n % 10 == 9);
      @(negedge clk);
      start = 1;
      start_cyc = cyc;
      @(negedge clk);
      start = 0;
      wait (ngroups == (n + 1) * 6);
      @(posedge clk);
      checks++;
      if (last_cyc - start_cyc != 74) begin failures++; $display("FAIL cycles %0d", last_cyc - start_cyc); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after transform"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
