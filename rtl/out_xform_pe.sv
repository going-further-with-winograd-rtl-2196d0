// out_xform_pe: row-by-row processing element for the output transform
// A^T Y A ("fast" solution), with the tap-wise rescale at its input.
//
// Each cycle the PE takes one row Y[y,:] of a 6x6 int32 tap tile. Six input
// quantisation stages first apply the per-tap power-of-two factor S_BG
// (2^-sh, rounded, saturated to int32). A hard-wired shift-and-add unit then
// forms the row r = Y'[y,:] * A (4 values), and 4x4 output-stationary lanes
// accumulate acc[i][j] += A^T[i][y] * r[j]. After the sixth row the 4x4
// spatial output tile is saturated to int32 and registered on out_tile with a
// one-cycle out_valid pulse. The PE accepts a row every cycle, so a transform
// takes h_T = 6 cycles, back to back (paper Table II, fast row-by-row engine).
// Following the paper, S_BG is applied once before the back-transformation;
// saturating the result to int32 is this design's choice (the paper keeps the
// output "in int32" in the unified buffer without saying how it bounds it).
//
// Interface: in_valid (no backpressure), in_row[k] = tap (y, k) where y counts
// accepted rows modulo 6; sh[y][k] right-shift exponent of tap (y, k) (signed,
// negative = left shift). Synchronous active-low reset.
module out_xform_pe
  import wino_pkg::*;
#(
  parameter int DW = 32,   // tap and output width
  parameter int SW = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_row [N],
  input  logic signed [SW-1:0] sh [N][N],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_tile [M][M]
);
  localparam int RW = DW + 5;    // row of Y*A: column sums of |A| reach 19
  localparam int AW = DW + 10;   // A^T (Y A): again up to 19x
  localparam logic signed [AW-1:0] SMAX = (AW'(1) <<< (DW - 1)) - 1;
  localparam logic signed [AW-1:0] SMIN = -(AW'(1) <<< (DW - 1));

  logic [2:0]           y;
  logic signed [DW-1:0] xs  [N];
  logic signed [RW-1:0] r   [M];
  logic signed [AW-1:0] acc [M][M];
  logic signed [AW-1:0] nxt [M][M];

  // input stage: tap-wise rescale of the six taps of row y
  for (genvar k = 0; k < N; k++) begin : g_quant
    tapwise_quant #(.IW(DW), .OW(DW), .SW(SW)) u_q (
      .x(in_row[k]), .sh(sh[y][k]), .y(xs[k]));
  end

  always_comb begin
    // r = xs * A, r[j] = sum_k xs[k] * AT[j][k]
    for (int j = 0; j < M; j++) begin
      longint a;
      a = 0;
      for (int k = 0; k < N; k++) a += shadd(longint'(xs[k]), AT[j][k]);
      r[j] = RW'(a);
    end
    // output-stationary lanes: acc[i][j] += AT[i][y] * r[j]
    for (int i = 0; i < M; i++)
      for (int j = 0; j < M; j++) begin
        longint t;
        t = 0;
        for (int yy = 0; yy < N; yy++)
          if (y == 3'(yy)) t = shadd(longint'(r[j]), AT[i][yy]);
        nxt[i][j] = ((y == 3'd0) ? AW'(0) : acc[i][j]) + AW'(t);
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y         <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++) begin
          acc[i][j]      <= '0;
          out_tile[i][j] <= '0;
        end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        acc <= nxt;
        y   <= (y == 3'd5) ? 3'd0 : y + 3'd1;
        if (y == 3'd5) begin
          out_valid <= 1'b1;
          for (int i = 0; i < M; i++)
            for (int j = 0; j < M; j++)
              out_tile[i][j] <= (nxt[i][j] > SMAX) ? SMAX[DW-1:0] :
                                (nxt[i][j] < SMIN) ? SMIN[DW-1:0] : nxt[i][j][DW-1:0];
        end
      end
    end
  end
endmodule
