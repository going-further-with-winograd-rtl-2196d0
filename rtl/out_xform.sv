// out_xform: output transformation engine (OUT_XFORM inside the FixPipe).
//
// NP = 16 fast row-by-row PEs (out_xform_pe), one per output channel, the
// parallelism the L0C read bandwidth allows according to the paper. Each beat
// carries one gathered row of the 6x6 tap matrix (6 taps) for the 16 output
// channels of one tile, read from L0C Port B; after 6 beats the engine emits
// the 16 spatial 4x4 output tiles (int32, before requantisation). Rate: one
// tile of 16 channels per 6 cycles. All PEs share the S_BG shift table.
module out_xform
  import wino_pkg::*;
#(
  parameter int NP = 16,
  parameter int SW = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [31:0]   in_row [N][NP],   // [tap column k][channel]
  input  logic signed [SW-1:0] sh [N][N],
  output logic                 out_valid,
  output logic signed [31:0]   out_tile [NP][M][M]
);
  logic ov [NP];

  for (genvar p = 0; p < NP; p++) begin : g_pe
    logic signed [31:0] row [N];
    for (genvar k = 0; k < N; k++) begin : g_k
      assign row[k] = in_row[k][p];
    end
    out_xform_pe #(.DW(32), .SW(SW)) u_pe (
      .clk, .rst_n,
      .in_valid,
      .in_row   (row),
      .sh,
      .out_valid(ov[p]),
      .out_tile (out_tile[p]));
  end

  assign out_valid = ov[0];
endmodule
