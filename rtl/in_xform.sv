// in_xform: input transformation engine (IN_XFORM inside MTE1).
//
// PC x PS row-by-row PEs (in_xform_pe, slow solution) run in lockstep: PC = 32
// input channels (the fractal C0 block, contiguous in L1) times PS = 2 tiles
// along W/4, i.e. 64 transforms in parallel, as chosen in the paper. Each
// accepted beat carries one row of each of the 64 6x6 input tiles
// (64 x 6 bytes); after 6 beats the engine emits 6 columns, one per cycle,
// each holding 6 taps of all 64 tiles (384 bytes). Rate: 64 transforms per
// 12 cycles, i.e. 64*36/12 B/cycle, the paper's figure.
// All PEs share the tap-wise shift table sh (the iFM scale S_B).
// Interface and timing as in in_xform_pe: in_valid/in_ready per row beat,
// out_valid one pulse per column, out_col = column index j.
module in_xform
  import wino_pkg::*;
#(
  parameter int PC = 32,
  parameter int PS = 2,
  parameter int SW = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [7:0]     in_row [PS][PC][N],
  input  logic signed [SW-1:0]  sh [N][N],
  output logic                  out_valid,
  output logic [2:0]            out_col,
  output logic signed [7:0]     out_taps [PS][PC][N]
);
  logic rdy  [PS][PC];
  logic ov   [PS][PC];
  logic [2:0] oc [PS][PC];

  for (genvar s = 0; s < PS; s++) begin : g_s
    for (genvar c = 0; c < PC; c++) begin : g_c
      in_xform_pe #(.SW(SW)) u_pe (
        .clk, .rst_n,
        .in_valid (in_valid),
        .in_ready (rdy[s][c]),
        .in_row   (in_row[s][c]),
        .sh,
        .out_valid(ov[s][c]),
        .out_col  (oc[s][c]),
        .out_taps (out_taps[s][c]));
    end
  end

  // The PEs run in lockstep; PE (0,0) speaks for all of them.
  assign in_ready  = rdy[0][0];
  assign out_valid = ov[0][0];
  assign out_col   = oc[0][0];

  always_ff @(posedge clk)
    if (rst_n)
      for (int s = 0; s < PS; s++)
        for (int c = 0; c < PC; c++)
          assert (rdy[s][c] == rdy[0][0] && ov[s][c] == ov[0][0])
            else $error("in_xform: PEs out of lockstep");
endmodule
