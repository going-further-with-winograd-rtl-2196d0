// tb_wino_soc: full-system test of wino_soc at its default parameters.
//
// Both AI cores compute the same Winograd F4 layer (16x16 outputs, 32 input
// channels) with their own 16 filters, as two cores splitting the output
// channels of one layer would. Global memory is a testbench model behind the
// Broadcast Unit with random request backpressure and random in-order read
// latency. Core 0 first asks for the input feature map with a broadcast read
// and then for its weights; core 1 does it the other way round, so core 0's
// broadcast waits in its queue while core 1's independent weight read passes
// (the deadlock case the separate queues exist for). The feature-map beats
// land in a per-core L1 model; the core's input rows are then taken from that
// L1 copy, so data that went wrong in the broadcast shows up in the results.
// The weights go from memory into L0B through MTE2, then through the weight
// transform into the L1 model and from there to the Cube.
// Every output of both cores is compared with tb_wino_ref. Each mechanism is
// counted and a count of zero is a failure: broadcast beats, independent
// beats, a broadcast waiting for its partner, L0B row writes from MTE2,
// weight-transform outputs, diagonal L0A writes, Winograd mmads, L0C port B
// gather reads, saturating quantisation, left shifts (negative exponents) in
// the output stage, and output tiles.
module tb_wino_soc;
  import wino_pkg::*;
  import tb_wino_ref::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int TY = 4, W = 4 * TY + 2, CI = 32, CO = 16;
  localparam int IFM_BEATS = W * W * CI / 64;         // 162
  localparam int WT_BASE = 32'h1_0000, WT_STRIDE = 32'h2000;

  logic signed [4:0] sh_in [2][6][6], sh_wt [2][36], sh_out [2][6][6];
  logic [1:0] mte_cmd_valid, mte_cmd_ready, mte_cmd_bcast, mte_cmd_to_l0b, mte_busy, l1_wr_valid;
  logic [31:0] mte_cmd_gm_addr [2]; logic [7:0] mte_cmd_len [2]; logic [6:0] mte_cmd_l0b_addr [2];
  logic [511:0] l1_wr_data [2];
  logic [1:0] wt_start, wt_busy, wt_out_valid; logic [6:0] wt_l0b_base [2]; logic [3:0] wt_slice [2];
  logic [5:0] wt_out_group [2]; logic signed [7:0] wt_out_taps [2][32][6];
  logic [1:0] ix_start, ix_busy, ifm_valid, ifm_ready; logic [6:0] ix_l0a_base [2]; logic [7:0] ix_count [2];
  logic signed [7:0] ifm_row [2][2][32][6];
  logic [1:0] cube_start, cube_wino, cube_acc, cube_busy, l1_wt_req; logic [7:0] cube_rep [2];
  logic [6:0] cube_a_base [2], cube_b_base [2]; logic [8:0] cube_c_base [2]; logic [5:0] l1_wt_tap [2];
  logic signed [7:0] l1_wt_data [2][32][16];
  logic [1:0] ox_start, ox_busy, ub_valid; logic [8:0] ox_c_base [2]; logic [4:0] ox_ntiles [2];
  logic signed [31:0] ub_data [2][16][4][4];
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, bcast_active;
  logic [31:0] mem_req_addr; logic [511:0] mem_req_wdata, mem_rsp_data;

  wino_soc dut (.*);

  // ---------------- global memory model ----------------
  logic [511:0] gm [int];
  typedef struct { logic [511:0] d; int due; } rsp_t;
  rsp_t rq [$];
  int cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mem_req_valid && mem_req_ready && rst_n) begin
      if (mem_req_we) gm[int'(mem_req_addr >> 6)] = mem_req_wdata;
      else begin
        rsp_t r;
        r.d = gm.exists(int'(mem_req_addr >> 6)) ? gm[int'(mem_req_addr >> 6)] : '0;
        r.due = cyc + $urandom_range(2, 6);
        if (rq.size() > 0 && rq[$].due > r.due) r.due = rq[$].due;
        rq.push_back(r);
      end
    end
  end
  always @(negedge clk) begin
    mem_req_ready = ($urandom_range(0, 3) != 0);
    mem_rsp_valid = 0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      mem_rsp_valid = 1; mem_rsp_data = rq[0].d;
      void'(rq.pop_front());
    end
  end

  // ---------------- L1 models and observers ----------------
  logic [7:0] l1_ifm [2][W * W * CI];
  int l1_beats [2];
  int l1w [2][36][32][16];
  int cur_o [2];
  int n_ub [2];
  int ifm [], wt [2][];
  int shi [2][36], shw [2][36], sho [2][36];
  longint yexp [2][16][16][16];
  // mechanism counters
  int n_bc_beat, n_nb_beat, n_bc_wait, n_l0b_wr, n_wt_out, n_diag, n_wmmad, n_gather, n_sat, n_lshift;

  for (genvar c = 0; c < 2; c++) begin : g_obs
    always_ff @(posedge clk)
      if (l1_wt_req[c])
        for (int k = 0; k < 32; k++) for (int o = 0; o < 16; o++)
          l1_wt_data[c][k][o] <= 8'(l1w[c][l1_wt_tap[c]][k][o]);
    always @(posedge clk) if (rst_n) begin
      if (l1_wr_valid[c]) begin
        for (int i = 0; i < 64; i++) l1_ifm[c][l1_beats[c] * 64 + i] = l1_wr_data[c][i*8 +: 8];
        l1_beats[c]++;
      end
      if (wt_out_valid[c]) begin
        n_wt_out++;
        for (int k = 0; k < 32; k++) for (int l = 0; l < 6; l++)
          l1w[c][wt_out_group[c] * 6 + l][k][cur_o[c]] = int'(wt_out_taps[c][k][l]);
      end
      if (ub_valid[c]) begin
        for (int o = 0; o < 16; o++) for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
          checks++;
          if (longint'(ub_data[c][o][i][j]) != yexp[c][n_ub[c]][o][i*4 + j]) begin
            failures++;
            if (failures < 10) $display("FAIL core %0d tile %0d cout %0d (%0d,%0d) got %0d exp %0d", c, n_ub[c], o, i, j,
                                        ub_data[c][o][i][j], yexp[c][n_ub[c]][o][i*4+j]);
          end
        end
        n_ub[c]++;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (|dut.bu_rsp_valid) begin
      if (dut.bu_rsp_valid == 2'b11) n_bc_beat++; else n_nb_beat++;
    end
    if (dut.u_bu.bc_empty[0] != dut.u_bu.bc_empty[1]) n_bc_wait++;
    if (dut.g_core[0].l0b_wr_en) n_l0b_wr++;
    if (dut.g_core[1].l0b_wr_en) n_l0b_wr++;
    if (dut.g_core[0].u_core.a_wr_en && dut.g_core[0].u_core.a_wr_diag) n_diag++;
    if (dut.g_core[1].u_core.a_wr_en && dut.g_core[1].u_core.a_wr_diag) n_diag++;
    if (dut.g_core[0].u_core.u_cube.in_valid && cube_wino[0]) n_wmmad++;
    if (dut.g_core[1].u_core.u_cube.in_valid && cube_wino[1]) n_wmmad++;
    if (dut.g_core[0].u_core.ox_rd_en) n_gather++;
    if (dut.g_core[1].u_core.ox_rd_en) n_gather++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compute_ref(int c);
    int v [36], u [36];
    int vv [16][32][36];
    int uu [16][32][36];
    for (int m = 0; m < 16; m++) for (int k = 0; k < CI; k++) begin
      in_tile(ifm, W, CI, m / 4, m % 4, k, shi[c], v);
      vv[m][k] = v;
    end
    for (int o = 0; o < CO; o++) for (int k = 0; k < CI; k++) begin
      wt_tile(wt[c], CI, o, k, shw[c], u);
      uu[o][k] = u;
    end
    for (int m = 0; m < 16; m++) for (int o = 0; o < CO; o++) begin
      longint macc [36], y [16];
      for (int t = 0; t < 36; t++) begin
        macc[t] = 0;
        for (int k = 0; k < CI; k++) macc[t] += longint'(uu[o][k][t]) * vv[m][k][t];
      end
      out_tile(macc, sho[c], y);
      yexp[c][m][o] = y;
      for (int i = 0; i < 16; i++)
        if (y[i] == 32'sh7fffffff || y[i] == -32'sh80000000) n_sat++;
    end
  endtask

  task automatic mte(int c, bit bc, bit to_l0b, int addr, int len);
    @(negedge clk);
    mte_cmd_valid[c] = 1; mte_cmd_bcast[c] = bc; mte_cmd_to_l0b[c] = to_l0b;
    mte_cmd_gm_addr[c] = 32'(addr); mte_cmd_len[c] = 8'(len); mte_cmd_l0b_addr[c] = 7'd0;
    while (!mte_cmd_ready[c]) @(negedge clk);
    @(negedge clk) mte_cmd_valid[c] = 0;
    while (mte_busy[c]) @(negedge clk);
  endtask

  task automatic core_flow(int c);
    if (c == 0) begin
      mte(c, 1, 0, 0, IFM_BEATS);
      mte(c, 0, 1, WT_BASE + c * WT_STRIDE, 72);
    end else begin
      repeat (20) @(negedge clk);
      mte(c, 0, 1, WT_BASE + c * WT_STRIDE, 72);
      mte(c, 1, 0, 0, IFM_BEATS);
    end
    if (l1_beats[c] != IFM_BEATS) begin failures++; $display("FAIL core %0d got %0d beats", c, l1_beats[c]); end
    checks++;
    for (int o = 0; o < 16; o++) begin
      cur_o[c] = o;
      @(negedge clk); wt_start[c] = 1; wt_l0b_base[c] = 7'd0; wt_slice[c] = 4'(o);
      @(negedge clk); wt_start[c] = 0;
      while (wt_busy[c]) @(negedge clk);
    end
    @(negedge clk); ix_start[c] = 1; ix_l0a_base[c] = 7'd0; ix_count[c] = 8'd8;
    @(negedge clk); ix_start[c] = 0;
    for (int p = 0; p < 8; p++)
      for (int y = 0; y < 6; y++) begin
        ifm_valid[c] = 1;
        for (int s = 0; s < 2; s++) begin
          int m;
          m = 2 * p + s;
          for (int k = 0; k < 32; k++) for (int x = 0; x < 6; x++)
            ifm_row[c][s][k][x] = l1_ifm[c][((4 * (m / 4) + y) * W + 4 * (m % 4) + x) * CI + k];
        end
        while (!ifm_ready[c]) @(negedge clk);
        @(negedge clk);
      end
    ifm_valid[c] = 0;
    while (ix_busy[c]) @(negedge clk);
    @(negedge clk);
    cube_start[c] = 1; cube_wino[c] = 1; cube_acc[c] = 0; cube_rep[c] = 8'd36;
    cube_a_base[c] = 7'd0; cube_b_base[c] = 7'd0; cube_c_base[c] = 9'd0;
    @(negedge clk) cube_start[c] = 0;
    while (cube_busy[c]) @(negedge clk);
    @(negedge clk); ox_start[c] = 1; ox_c_base[c] = 9'd0; ox_ntiles[c] = 5'd16;
    @(negedge clk) ox_start[c] = 0;
    while (ox_busy[c] || n_ub[c] < 16) @(negedge clk);
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    cyc = 0; mem_req_ready = 0; mem_rsp_valid = 0; mem_rsp_data = '0;
    mte_cmd_valid = 0; mte_cmd_bcast = 0; mte_cmd_to_l0b = 0;
    wt_start = 0; ix_start = 0; ifm_valid = 0; cube_start = 0; cube_wino = 0; cube_acc = 0; ox_start = 0;
    n_bc_beat = 0; n_nb_beat = 0; n_bc_wait = 0; n_l0b_wr = 0; n_wt_out = 0; n_diag = 0;
    n_wmmad = 0; n_gather = 0; n_sat = 0; n_lshift = 0;
    for (int c = 0; c < 2; c++) begin
      mte_cmd_gm_addr[c] = 0; mte_cmd_len[c] = 0; mte_cmd_l0b_addr[c] = 0;
      wt_l0b_base[c] = 0; wt_slice[c] = 0; ix_l0a_base[c] = 0; ix_count[c] = 0;
      cube_rep[c] = 0; cube_a_base[c] = 0; cube_b_base[c] = 0; cube_c_base[c] = 0;
      ox_c_base[c] = 0; ox_ntiles[c] = 0; l1_beats[c] = 0; n_ub[c] = 0; cur_o[c] = 0;
      for (int s = 0; s < 2; s++) for (int k = 0; k < 32; k++) for (int x = 0; x < 6; x++) ifm_row[c][s][k][x] = 0;
    end
    ifm = new[W * W * CI];
    foreach (ifm[i]) ifm[i] = $urandom_range(0, 255) - 128;
    for (int c = 0; c < 2; c++) begin
      wt[c] = new[CO * CI * 9];
      foreach (wt[c][i]) wt[c][i] = $urandom_range(0, 255) - 128;
      for (int t = 0; t < 36; t++) begin
        shi[c][t] = $urandom_range(1, 4);
        shw[c][t] = $urandom_range(6, 10);
        // core 1 uses small output exponents so that some outputs saturate
        sho[c][t] = (c == 0) ? $urandom_range(0, 4) - 1 : $urandom_range(0, 3) - 14;
        if (sho[c][t] < 0) n_lshift++;
        sh_in[c][t / 6][t % 6] = 5'(shi[c][t]); sh_wt[c][t] = 5'(shw[c][t]); sh_out[c][t / 6][t % 6] = 5'(sho[c][t]);
      end
    end
    // global memory contents: the iFM (HWC bytes) and each core's L0B image
    for (int b = 0; b < IFM_BEATS; b++) begin
      logic [511:0] d;
      for (int i = 0; i < 64; i++) d[i*8 +: 8] = 8'(ifm[b * 64 + i]);
      gm[b] = d;
    end
    for (int c = 0; c < 2; c++) for (int e = 0; e < 9; e++) for (int q = 0; q < 8; q++) begin
      logic [511:0] d;
      for (int i = 0; i < 64; i++) begin
        int byte_i, o, k;
        byte_i = q * 64 + i; o = byte_i / 32; k = byte_i % 32;
        d[i*8 +: 8] = 8'(wt[c][((o * CI + k) * 3 + e / 3) * 3 + e % 3]);
      end
      gm[(WT_BASE + c * WT_STRIDE) / 64 + e * 8 + q] = d;
    end
    compute_ref(0);
    compute_ref(1);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      core_flow(0);
      core_flow(1);
    join
    repeat (5) @(negedge clk);
    need("broadcast beats", n_bc_beat);
    need("independent beats", n_nb_beat);
    need("broadcast waiting for partner", n_bc_wait);
    need("L0B rows written by MTE2", n_l0b_wr);
    need("weight transform outputs", n_wt_out);
    need("diagonal L0A writes", n_diag);
    need("Winograd mmads", n_wmmad);
    need("L0C port B gathers", n_gather);
    need("saturated outputs", n_sat);
    need("negative (left) out shifts", n_lshift);
    need("output tiles core 0", n_ub[0]);
    need("output tiles core 1", n_ub[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
