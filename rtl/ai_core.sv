// ai_core: Winograd F4 datapath of one AI core.
//
// Holds the Cube Unit, its buffers L0A, L0B and L0C, and the three Winograd
// transformation engines with a small micro-sequencer each, connected as in
// the paper's system overview (its Fig. 2):
//  - WT_XFORM (in MTE1) reads spatial 3x3 weights staged in L0B and sends the
//    tap-wise quantised Winograd-domain weights out towards L1 (wt_out_*).
//  - IN_XFORM (in MTE1) takes rows of 64 input tiles from L1 (ifm_*) and
//    writes the quantised taps into L0A with the diagonal write mode. It fills
//    16-tile blocks of 36 L0A rows: transform n of a command goes to tile pair
//    n % 8 of block n / 8.
//  - The Cube micro-sequencer repeats an mmad over cube_rep taps (or rows):
//    in Winograd mode tap t reads the 16 tiles of tap t from L0A (rotation
//    2*(t/6)) and the weights of tap t from L1 (l1_wt_*), and accumulates into
//    L0C row cube_c_base + t when cube_acc is set. In baseline mode
//    (cube_wino = 0) it reads plain rows of L0A and L0B, as the im2col
//    operator does.
//  - OUT_XFORM (in the FixPipe) gathers, for each of ox_ntiles tiles, the six
//    rows of the 6x6 tap matrix from L0C Port B and emits 16 channels of 4x4
//    int32 outputs towards the unified buffer (ub_*).
// The engines run concurrently, as the operator's double buffering requires;
// keeping them on separate buffer halves is the programmer's job, as in the
// paper (explicit token synchronisation by the front end, not modelled here).
// Timing: start pulses are accepted while the unit is idle. Memory reads take
// one cycle, so the Cube issues one mmad per cycle with a two-cycle latency to
// the L0C write; L1 weight reads must answer one cycle after l1_wt_req.
// Command ports, shift-table ports and the L1/UB-side streams are this
// design's interface: the paper does not describe the instruction formats.
module ai_core
  import wino_pkg::*;
#(
  parameter int PC   = 32,     // IN_XFORM channels (C0) and WT_XFORM PEs
  parameter int PS   = 2,      // IN_XFORM tiles per row beat
  parameter int PT   = 6,      // WT_XFORM parallel taps
  parameter int SW   = 5,
  parameter int L0A_DEPTH = 128,
  parameter int L0B_DEPTH = 128,
  parameter int L0C_ROWS  = 288,
  localparam int CM  = 16,     // Cube rows (tiles)
  localparam int CK  = 32,     // Cube inner dimension
  localparam int CN  = 16,     // Cube columns (output channels)
  localparam int AAB = $clog2(L0A_DEPTH),
  localparam int BAB = $clog2(L0B_DEPTH),
  localparam int CAB = $clog2(L0C_ROWS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // tap-wise shift tables (S_B, S_G, S_BG exponents)
  input  logic signed [SW-1:0]  sh_in  [N][N],
  input  logic signed [SW-1:0]  sh_wt  [NT],
  input  logic signed [SW-1:0]  sh_out [N][N],
  // L0B write port (from MTE2)
  input  logic                  l0b_wr_en,
  input  logic [BAB-1:0]        l0b_wr_addr,
  input  logic [CK*CN-1:0][7:0] l0b_wr_data,
  // weight transform
  input  logic                  wt_start,
  input  logic [BAB-1:0]        wt_l0b_base,
  input  logic [$clog2(CK*CN/PC)-1:0] wt_slice,
  output logic                  wt_busy,
  output logic                  wt_out_valid,
  output logic [5:0]            wt_out_group,
  output logic signed [7:0]     wt_out_taps [PC][PT],
  // input transform
  input  logic                  ix_start,
  input  logic [AAB-1:0]        ix_l0a_base,
  input  logic [7:0]            ix_count,
  output logic                  ix_busy,
  input  logic                  ifm_valid,
  output logic                  ifm_ready,
  input  logic signed [7:0]     ifm_row [PS][PC][N],
  // cube
  input  logic                  cube_start,
  input  logic                  cube_wino,
  input  logic                  cube_acc,
  input  logic [7:0]            cube_rep,
  input  logic [AAB-1:0]        cube_a_base,
  input  logic [BAB-1:0]        cube_b_base,
  input  logic [CAB-1:0]        cube_c_base,
  output logic                  cube_busy,
  output logic                  l1_wt_req,
  output logic [5:0]            l1_wt_tap,
  input  logic signed [7:0]     l1_wt_data [CK][CN],
  // output transform
  input  logic                  ox_start,
  input  logic [CAB-1:0]        ox_c_base,
  input  logic [4:0]            ox_ntiles,
  output logic                  ox_busy,
  output logic                  ub_valid,
  output logic signed [31:0]    ub_data [CN][M][M]
);
  // ---------------------------------------------------------------- L0B
  logic                  b_rd_en;
  logic [BAB-1:0]        b_rd_addr;
  logic [CK*CN-1:0][7:0] b_rd_data;
  logic [PC-1:0][7:0]    b_slice_data;
  logic                  wt_rd_en, cube_b_rd;
  logic [3:0]            wt_rd_elem;
  logic [BAB-1:0]        cube_b_addr;
  logic [BAB-1:0]        wt_l0b_base_q;
  logic [$clog2(CK*CN/PC)-1:0] wt_slice_q;

  assign b_rd_en   = wt_rd_en | cube_b_rd;
  assign b_rd_addr = wt_rd_en ? wt_l0b_base_q + BAB'(wt_rd_elem) : cube_b_addr;

  l0b #(.DEPTH(L0B_DEPTH), .RB(CK*CN), .SLB(PC)) u_l0b (
    .clk, .wr_en(l0b_wr_en), .wr_addr(l0b_wr_addr), .wr_data(l0b_wr_data),
    .rd_en(b_rd_en), .rd_addr(b_rd_addr), .rd_slice(wt_slice_q),
    .rd_data(b_rd_data), .rd_slice_data(b_slice_data));

  // ---------------------------------------------------------------- WT_XFORM
  always_ff @(posedge clk)
    if (wt_start && !wt_busy) begin
      wt_l0b_base_q <= wt_l0b_base;
      wt_slice_q    <= wt_slice;
    end

  wt_xform #(.PC(PC), .PT(PT), .SW(SW)) u_wt (
    .clk, .rst_n, .start(wt_start), .busy(wt_busy),
    .rd_en(wt_rd_en), .rd_elem(wt_rd_elem), .rd_data(b_slice_data),
    .sh(sh_wt), .out_valid(wt_out_valid), .out_group(wt_out_group),
    .out_taps(wt_out_taps));

  // ---------------------------------------------------------------- IN_XFORM + L0A
  logic                 ix_out_valid;
  logic [2:0]           ix_out_col;
  logic signed [7:0]    ix_out_taps [PS][PC][N];
  logic                 ix_act;
  logic [7:0]           ix_left;     // transforms still to write
  logic [7:0]           ix_in_left;  // transforms still to accept
  logic [2:0]           ix_pair;     // tile pair within the 16-tile block
  logic [AAB-1:0]       ix_blk;      // L0A row of the current block
  logic                 ix_in_valid, ix_in_ready;
  logic [3:0]           ix_rows;     // rows accepted of the current transform

  assign ix_busy     = ix_act;
  assign ix_in_valid = ifm_valid && ix_act && (ix_in_left != 8'd0);
  assign ifm_ready   = ix_in_ready && ix_act && (ix_in_left != 8'd0);

  in_xform #(.PC(PC), .PS(PS), .SW(SW)) u_ix (
    .clk, .rst_n, .in_valid(ix_in_valid), .in_ready(ix_in_ready),
    .in_row(ifm_row), .sh(sh_in), .out_valid(ix_out_valid),
    .out_col(ix_out_col), .out_taps(ix_out_taps));

  localparam int NBA = CM;
  logic                   a_wr_en, a_wr_diag;
  logic [AAB-1:0]         a_wr_addr;
  logic [3:0]             a_wr_rot;
  logic [NBA-1:0][CK*8-1:0] a_wr_data;
  logic                   a_rd_en;
  logic [AAB-1:0]         a_rd_addr;
  logic [3:0]             a_rd_rot;
  logic [NBA-1:0][CK*8-1:0] a_rd_data;

  // Lane l = i*PS + s of a diagonal write carries tap (i, col) of tile s.
  always_comb begin
    a_wr_en   = ix_out_valid;
    a_wr_diag = 1'b1;
    a_wr_addr = ix_blk + AAB'(ix_out_col);
    a_wr_rot  = 4'(int'(ix_pair) * PS);
    a_wr_data = '0;
    for (int i = 0; i < N; i++)
      for (int s = 0; s < PS; s++)
        for (int c = 0; c < PC; c++)
          a_wr_data[i * PS + s][c*8 +: 8] = ix_out_taps[s][c][i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ix_act <= 1'b0; ix_left <= '0; ix_in_left <= '0;
      ix_pair <= '0; ix_blk <= '0; ix_rows <= '0;
    end else begin
      if (ix_start && !ix_act) begin
        ix_act     <= (ix_count != 8'd0);
        ix_left    <= ix_count;
        ix_in_left <= ix_count;
        ix_pair    <= '0;
        ix_blk     <= ix_l0a_base;
        ix_rows    <= '0;
      end else begin
        if (ix_in_valid && ix_in_ready) begin
          ix_rows <= (ix_rows == 4'd5) ? 4'd0 : ix_rows + 4'd1;
          if (ix_rows == 4'd5) ix_in_left <= ix_in_left - 8'd1;
        end
        if (ix_out_valid && ix_out_col == 3'd5) begin
          ix_left <= ix_left - 8'd1;
          if (ix_left == 8'd1) ix_act <= 1'b0;
          if (int'(ix_pair) == CM / PS - 1) begin
            ix_pair <= '0;
            ix_blk  <= ix_blk + AAB'(NT);
          end else ix_pair <= ix_pair + 3'd1;
        end
      end
    end
  end

  l0a #(.NB(NBA), .DEPTH(L0A_DEPTH), .BW(CK), .DG(PS), .DL(N), .DSTRIDE(N)) u_l0a (
    .clk, .wr_en(a_wr_en), .wr_diag(a_wr_diag), .wr_addr(a_wr_addr),
    .wr_rot(a_wr_rot), .wr_data(a_wr_data), .rd_en(a_rd_en),
    .rd_addr(a_rd_addr), .rd_rot(a_rd_rot), .rd_data(a_rd_data));

  // ---------------------------------------------------------------- Cube sequencer
  logic        cq_act, cq_wino, cq_acc;
  logic [7:0]  cq_rep, cq_r;
  logic [AAB-1:0] cq_a;
  logic [BAB-1:0] cq_b;
  logic [CAB-1:0] cq_c;
  // pipeline: stage 1 (operands arrive), stage 2 (result)
  logic           s1_vld, s1_wino, s1_acc;
  logic [CAB-1:0] s1_c, s2_c;
  logic           c_rd_en;
  logic signed [31:0] c_rd_data [CM][CN];
  logic signed [7:0]  cube_a [CM][CK];
  logic signed [7:0]  cube_b [CK][CN];
  logic               cube_ov;
  logic signed [31:0] cube_c [CM][CN];
  logic [5:0]         tap;

  assign cube_busy = cq_act | s1_vld | cube_ov;
  assign tap       = 6'(cq_r);
  assign a_rd_en   = cq_act;
  assign a_rd_addr = cq_a + AAB'(cq_r);
  assign a_rd_rot  = cq_wino ? 4'((int'(tap) / N) * PS) : 4'd0;
  assign cube_b_rd = cq_act && !cq_wino;
  assign cube_b_addr = cq_b + BAB'(cq_r);
  assign l1_wt_req = cq_act && cq_wino;
  assign l1_wt_tap = tap;
  assign c_rd_en   = cq_act && cq_acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cq_act <= 1'b0; cq_r <= '0; cq_rep <= '0; cq_wino <= 1'b0; cq_acc <= 1'b0;
      cq_a <= '0; cq_b <= '0; cq_c <= '0;
      s1_vld <= 1'b0; s1_wino <= 1'b0; s1_acc <= 1'b0; s1_c <= '0; s2_c <= '0;
    end else begin
      if (cube_start && !cq_act) begin
        cq_act  <= (cube_rep != 8'd0);
        cq_rep  <= cube_rep;
        cq_r    <= '0;
        cq_wino <= cube_wino;
        cq_acc  <= cube_acc;
        cq_a    <= cube_a_base;
        cq_b    <= cube_b_base;
        cq_c    <= cube_c_base;
      end else if (cq_act) begin
        cq_r <= cq_r + 8'd1;
        if (cq_r == cq_rep - 8'd1) cq_act <= 1'b0;
      end
      s1_vld  <= cq_act;
      s1_wino <= cq_wino;
      s1_acc  <= cq_acc;
      s1_c    <= cq_c + CAB'(cq_r);
      s2_c    <= s1_c;
    end
  end

  always_comb
    for (int m = 0; m < CM; m++)
      for (int k = 0; k < CK; k++)
        cube_a[m][k] = a_rd_data[m][k*8 +: 8];

  always_comb
    for (int k = 0; k < CK; k++)
      for (int n = 0; n < CN; n++)
        cube_b[k][n] = s1_wino ? l1_wt_data[k][n] : b_rd_data[k * CN + n];

  cube_unit #(.MR(CM), .KD(CK), .NC(CN)) u_cube (
    .clk, .rst_n, .in_valid(s1_vld), .acc_en(s1_acc), .a(cube_a), .b(cube_b),
    .c_in(c_rd_data), .out_valid(cube_ov), .c_out(cube_c));

  // no accumulation may read a row whose update is still in the pipeline
  always_ff @(posedge clk)
    if (rst_n && c_rd_en)
      assert (!(s1_vld && s1_c == cq_c + CAB'(cq_r)) && !(cube_ov && s2_c == cq_c + CAB'(cq_r)))
        else $error("ai_core: L0C read-after-write hazard");

  // ---------------------------------------------------------------- OUT_XFORM + L0C
  logic           ox_act;
  logic [4:0]     ox_m, ox_n;
  logic [2:0]     ox_y;
  logic [CAB-1:0] ox_base;
  logic           ox_rd_en, ox_in_valid;
  logic [CAB-1:0] ox_addr [N];
  logic signed [31:0] ox_rows [N][CN];
  logic           ox_ov;

  assign ox_busy  = ox_act | ox_in_valid | (ox_y != 3'd0);
  assign ox_rd_en = ox_act;
  always_comb
    for (int k = 0; k < N; k++) ox_addr[k] = ox_base + CAB'(int'(ox_y) * N + k);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ox_act <= 1'b0; ox_m <= '0; ox_n <= '0; ox_y <= '0; ox_base <= '0;
      ox_in_valid <= 1'b0;
    end else begin
      ox_in_valid <= ox_rd_en;
      if (ox_start && !ox_act) begin
        ox_act  <= (ox_ntiles != 5'd0);
        ox_n    <= ox_ntiles;
        ox_m    <= '0;
        ox_y    <= '0;
        ox_base <= ox_c_base;
      end else if (ox_act) begin
        ox_y <= (ox_y == 3'd5) ? 3'd0 : ox_y + 3'd1;
        if (ox_y == 3'd5) begin
          ox_m <= ox_m + 5'd1;
          if (ox_m == ox_n - 5'd1) ox_act <= 1'b0;
        end
      end
    end
  end

  l0c #(.NB(CM), .NC(CN), .ROWS(L0C_ROWS), .NG(N)) u_l0c (
    .clk,
    .a_rd_en(c_rd_en), .a_rd_addr(cq_c + CAB'(cq_r)), .a_rd_data(c_rd_data),
    .a_wr_en(cube_ov), .a_wr_addr(s2_c), .a_wr_data(cube_c),
    .b_rd_en(ox_rd_en), .b_addr(ox_addr), .b_tile(4'(ox_m)), .b_rd_data(ox_rows));

  out_xform #(.NP(CN), .SW(SW)) u_ox (
    .clk, .rst_n, .in_valid(ox_in_valid), .in_row(ox_rows), .sh(sh_out),
    .out_valid(ox_ov), .out_tile(ub_data));

  assign ub_valid = ox_ov;
endmodule
