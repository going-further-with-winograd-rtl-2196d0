// wt_xform: weight transformation engine (WT_XFORM inside MTE1).
//
// PC tap-by-tap PEs (wt_xform_pe) transform PC 3x3 filters at once. They run
// the same schedule in lockstep, so one read address serves all of them: each
// step reads one weight element of all PC filters (PC bytes, one L0B slice)
// and every PE uses its own byte. Results leave one group of PT taps for all
// PC filters per out_valid (towards L1). The tap-wise shifts sh (S_G) are
// shared. Rate: 72 cycles (+2 pipeline) per PC filters with PT = 6.
// The paper gives the engine style and its placement; PC and PT are not
// given (they are sized to external bandwidth) and are this design's choice.
module wt_xform
  import wino_pkg::*;
#(
  parameter int PC = 32,
  parameter int PT = 6,
  parameter int SW = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 rd_en,
  output logic [3:0]           rd_elem,
  input  logic [PC-1:0][7:0]   rd_data,
  input  logic signed [SW-1:0] sh [NT],
  output logic                 out_valid,
  output logic [5:0]           out_group,
  output logic signed [7:0]    out_taps [PC][PT]
);
  logic       b   [PC];
  logic       re  [PC];
  logic [3:0] el  [PC];
  logic       ov  [PC];
  logic [5:0] og  [PC];

  for (genvar c = 0; c < PC; c++) begin : g_pe
    wt_xform_pe #(.PT(PT), .SW(SW)) u_pe (
      .clk, .rst_n,
      .start,
      .busy     (b[c]),
      .rd_en    (re[c]),
      .rd_elem  (el[c]),
      .rd_data  (signed'(rd_data[c])),
      .sh,
      .out_valid(ov[c]),
      .out_group(og[c]),
      .out_taps (out_taps[c]));
  end

  assign busy      = b[0];
  assign rd_en     = re[0];
  assign rd_elem   = el[0];
  assign out_valid = ov[0];
  assign out_group = og[0];
endmodule
