// tb_ai_core: end-to-end test of one AI core running a Winograd F4 layer.
//
// Layer: 16x16 outputs (4x4 tiles of 4x4), 64 input channels, 16 output
// channels, random int8 data and random tap-wise exponents. The testbench
// plays the parts that sit outside the core: it fills L0B with the spatial
// weights (two 32-channel blocks), stores what the weight transform emits in
// a model of L1 and serves it back on the Cube's weight-read port, streams the
// input tiles row by row from the same L1 model, and collects the output
// tiles. Sequence: 32 weight transforms, 16 input transforms (two L0A blocks),
// two 36-tap Cube passes (the second accumulating), 16 output transforms.
// Every output is compared with tb_wino_ref. Also checked: the package's
// matrices reproduce 3x3 convolution, the Cube's one-mmad-per-cycle rate,
// the output transform's 6 cycles per tile, and one baseline-mode mmad
// (plain L0A and L0B rows) against a direct product.
module tb_ai_core;
  import wino_pkg::*;
  import tb_wino_ref::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int TY = 4, W = 4 * TY + 2, CI = 64, CO = 16;

  logic signed [4:0] sh_in [6][6], sh_out [6][6], sh_wt [36];
  logic l0b_wr_en; logic [6:0] l0b_wr_addr; logic [511:0][7:0] l0b_wr_data;
  logic wt_start, wt_busy, wt_out_valid; logic [6:0] wt_l0b_base; logic [3:0] wt_slice;
  logic [5:0] wt_out_group; logic signed [7:0] wt_out_taps [32][6];
  logic ix_start, ix_busy, ifm_valid, ifm_ready; logic [6:0] ix_l0a_base; logic [7:0] ix_count;
  logic signed [7:0] ifm_row [2][32][6];
  logic cube_start, cube_wino, cube_acc, cube_busy, l1_wt_req; logic [7:0] cube_rep;
  logic [6:0] cube_a_base, cube_b_base; logic [8:0] cube_c_base; logic [5:0] l1_wt_tap;
  logic signed [7:0] l1_wt_data [32][16];
  logic ox_start, ox_busy, ub_valid; logic [8:0] ox_c_base; logic [4:0] ox_ntiles;
  logic signed [31:0] ub_data [16][4][4];

  ai_core dut (.*);

  int ifm [], wt [];
  int shi [36], shw [36], sho [36];
  int l1w [2][36][32][16];     // L1 model: [cin block][tap][cin][cout]
  int cur_blk, cur_o, n_ub, cyc;
  int n_diag, n_acc, n_mmad;
  longint yexp [16][16][16];   // [tile][cout][pos]
  int ub_cyc [$];
  int cube_first, cube_last;

  // L1 model: weight reads answer one cycle later
  always_ff @(posedge clk)
    if (l1_wt_req)
      for (int c = 0; c < 32; c++) for (int o = 0; o < 16; o++)
        l1_wt_data[c][o] <= 8'(l1w[cur_blk][l1_wt_tap][c][o]);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (wt_out_valid)
        for (int c = 0; c < 32; c++) for (int l = 0; l < 6; l++)
          l1w[cur_blk][wt_out_group * 6 + l][c][cur_o] = int'(wt_out_taps[c][l]);
      if (dut.a_wr_en && dut.a_wr_diag) n_diag++;
      if (dut.u_cube.in_valid) begin
        n_mmad++;
        if (dut.u_cube.acc_en) n_acc++;
        if (cube_first < 0) cube_first = cyc;
        cube_last = cyc;
      end
      if (ub_valid) begin
        ub_cyc.push_back(cyc);
        for (int o = 0; o < 16; o++) for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
          checks++;
          if (longint'(ub_data[o][i][j]) != yexp[n_ub][o][i*4 + j]) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d cout %0d (%0d,%0d) got %0d exp %0d", n_ub, o, i, j, ub_data[o][i][j], yexp[n_ub][o][i*4+j]);
          end
        end
        n_ub++;
      end
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compute_ref();
    int v [36], u [36];
    int vv [16][64][36];
    int uu [16][64][36];
    for (int m = 0; m < 16; m++) for (int c = 0; c < CI; c++) begin
      in_tile(ifm, W, CI, m / 4, m % 4, c, shi, v);
      vv[m][c] = v;
    end
    for (int o = 0; o < CO; o++) for (int c = 0; c < CI; c++) begin
      wt_tile(wt, CI, o, c, shw, u);
      uu[o][c] = u;
    end
    for (int m = 0; m < 16; m++) for (int o = 0; o < CO; o++) begin
      longint macc [36], y [16];
      for (int t = 0; t < 36; t++) begin
        macc[t] = 0;
        for (int c = 0; c < CI; c++) macc[t] += longint'(uu[o][c][t]) * vv[m][c][t];
      end
      out_tile(macc, sho, y);
      yexp[m][o] = y;
    end
  endtask

  initial begin
    cyc = 0; n_ub = 0; n_diag = 0; n_acc = 0; n_mmad = 0; cube_first = -1; cube_last = 0;
    l0b_wr_en = 0; l0b_wr_addr = 0; l0b_wr_data = '0;
    wt_start = 0; wt_l0b_base = 0; wt_slice = 0;
    ix_start = 0; ix_l0a_base = 0; ix_count = 0; ifm_valid = 0;
    cube_start = 0; cube_wino = 0; cube_acc = 0; cube_rep = 0; cube_a_base = 0; cube_b_base = 0; cube_c_base = 0;
    ox_start = 0; ox_c_base = 0; ox_ntiles = 0;
    for (int s = 0; s < 2; s++) for (int c = 0; c < 32; c++) for (int k = 0; k < 6; k++) ifm_row[s][c][k] = 0;
    ifm = new[W * W * CI];
    wt  = new[CO * CI * 9];
    foreach (ifm[i]) ifm[i] = $urandom_range(0, 255) - 128;
    foreach (wt[i])  wt[i]  = $urandom_range(0, 255) - 128;
    for (int t = 0; t < 36; t++) begin
      shi[t] = $urandom_range(1, 4);
      shw[t] = $urandom_range(6, 10);
      sho[t] = $urandom_range(0, 4) - 1;
      sh_in[t / 6][t % 6] = 5'(shi[t]); sh_wt[t] = 5'(shw[t]); sh_out[t / 6][t % 6] = 5'(sho[t]);
    end
    // the matrices themselves: unquantised Winograd equals 576 x convolution
    for (int n = 0; n < 20; n++) begin
      checks++;
      if (identity_errors() != 0) begin failures++; $display("FAIL Winograd identity"); end
    end
    compute_ref();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // L0B: row b*9+e, byte o*32+c = element e of filter (o, b*32+c)
    for (int b = 0; b < 2; b++) for (int e = 0; e < 9; e++) begin
      @(negedge clk);
      l0b_wr_en = 1; l0b_wr_addr = 7'(b * 9 + e);
      for (int o = 0; o < 16; o++) for (int c = 0; c < 32; c++)
        l0b_wr_data[o * 32 + c] = 8'(wt[((o * CI + b * 32 + c) * 3 + e / 3) * 3 + e % 3]);
    end
    @(negedge clk) l0b_wr_en = 0;

    // weight transforms: one per (block, output channel)
    for (int b = 0; b < 2; b++) for (int o = 0; o < 16; o++) begin
      cur_blk = b; cur_o = o;
      @(negedge clk); wt_start = 1; wt_l0b_base = 7'(b * 9); wt_slice = 4'(o);
      @(negedge clk); wt_start = 0;
      while (wt_busy) @(negedge clk);
    end

    // input transforms: 16 transforms of tile pairs, two L0A blocks
    @(negedge clk); ix_start = 1; ix_l0a_base = 7'd0; ix_count = 8'd16;
    @(negedge clk); ix_start = 0;
    for (int n = 0; n < 16; n++) begin
      int b, p;
      b = n / 8; p = n % 8;
      for (int y = 0; y < 6; y++) begin
        ifm_valid = 1;
        for (int s = 0; s < 2; s++) begin
          int m;
          m = 2 * p + s;
          for (int c = 0; c < 32; c++) for (int k = 0; k < 6; k++)
            ifm_row[s][c][k] = 8'(ifm[((4 * (m / 4) + y) * W + 4 * (m % 4) + k) * CI + b * 32 + c]);
        end
        while (!ifm_ready) @(negedge clk);
        @(negedge clk);
      end
    end
    ifm_valid = 0;
    while (ix_busy) @(negedge clk);
    checks++;
    if (n_diag != 96) begin failures++; $display("FAIL %0d diagonal writes", n_diag); end

    // Cube: block 0 overwrites, block 1 accumulates
    for (int b = 0; b < 2; b++) begin
      cur_blk = b;
      cube_first = -1;
      @(negedge clk);
      cube_start = 1; cube_wino = 1; cube_acc = (b == 1); cube_rep = 8'd36;
      cube_a_base = 7'(36 * b); cube_c_base = 9'd0;
      @(negedge clk) cube_start = 0;
      while (cube_busy) @(negedge clk);
      checks++;
      if (cube_last - cube_first != 35) begin failures++; $display("FAIL cube rate %0d", cube_last - cube_first); end
    end
    checks++;
    if (n_acc != 36) begin failures++; $display("FAIL %0d accumulating mmads", n_acc); end

    // output transforms of the 16 tiles
    @(negedge clk); ox_start = 1; ox_c_base = 9'd0; ox_ntiles = 5'd16;
    @(negedge clk) ox_start = 0;
    while (ox_busy || n_ub < 16) @(negedge clk);
    checks++;
    if (n_ub != 16) begin failures++; $display("FAIL %0d output tiles", n_ub); end
    checks++;
    if (ub_cyc[15] - ub_cyc[0] != 15 * 6) begin failures++; $display("FAIL out_xform rate"); end

    // baseline mode: one mmad from L0A row 0 (tap 0 of block 0) and L0B row 0
    begin
      int v [36];
      int a [16][32];
      int good;
      for (int m = 0; m < 16; m++) for (int c = 0; c < 32; c++) begin
        in_tile(ifm, W, CI, m / 4, m % 4, c, shi, v);
        a[m][c] = v[0];
      end
      @(negedge clk);
      cube_start = 1; cube_wino = 0; cube_acc = 0; cube_rep = 8'd1;
      cube_a_base = 7'd0; cube_b_base = 7'd0; cube_c_base = 9'd200;
      @(negedge clk) cube_start = 0;
      @(posedge clk); @(posedge clk); #1;
      good = 1;
      for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) begin
        int s;
        s = 0;
        for (int k = 0; k < 32; k++)
          s += a[m][k] * wt[((((k * 16 + n) / 32) * CI + (k * 16 + n) % 32) * 3 + 0) * 3 + 0];
        if (dut.u_cube.c_out[m][n] != s) good = 0;
      end
      checks++;
      if (!good || !dut.u_cube.out_valid) begin failures++; $display("FAIL baseline mmad"); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
