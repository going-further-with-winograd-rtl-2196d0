// l0a: input buffer A of the Cube Unit, with a diagonal write mode.
//
// NB banks of DEPTH words, each word BW bytes (one Cube row: 32 input channels
// of one tile). The read port returns one word from every bank at the same
// row, rotated so that rd_data[m] = bank[(m + rd_rot) % NB]: one access feeds a
// whole [16 x 32] Cube operand. In normal mode a write stores wr_data[b] into
// bank b at wr_addr. In diagonal mode (wr_diag) each bank b takes lane
// l = (b - wr_rot) % NB of wr_data, when l < DG*DL, and writes it at row
// wr_addr + (l / DG) * DSTRIDE: different rows of different banks in one
// access. The input transform produces DL taps (a column of B^T x B) for DG
// tiles per cycle; with the tile pair index as wr_rot and lane l = i*DG + s
// (tap row i, tile s), tap t = 6i + j of tile m lands in bank (m + DG*i) % NB
// at row base + t. A Cube read of tap t then uses rd_rot = DG*i and sees the 16
// tiles in order, without bank conflicts on either side.
// The paper names the diagonal write mode and its purpose; this bank mapping
// and the one-cycle read latency are this design's choices.
// Size: 16 banks x 128 rows x 32 B = 64 kB (paper Table III).
module l0a #(
  parameter int NB      = 16,
  parameter int DEPTH   = 128,
  parameter int BW      = 32,
  parameter int DG      = 2,    // tiles written per diagonal access (P_s)
  parameter int DL      = 6,    // taps per tile per diagonal access
  parameter int DSTRIDE = 6,    // row distance between tap rows i
  localparam int ABITS  = $clog2(DEPTH),
  localparam int RBITS  = $clog2(NB)
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic                   wr_diag,
  input  logic [ABITS-1:0]       wr_addr,
  input  logic [RBITS-1:0]       wr_rot,
  input  logic [NB-1:0][BW*8-1:0] wr_data,
  input  logic                   rd_en,
  input  logic [ABITS-1:0]       rd_addr,
  input  logic [RBITS-1:0]       rd_rot,
  output logic [NB-1:0][BW*8-1:0] rd_data
);
  logic [BW*8-1:0] mem [NB][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < NB; b++) begin
        logic [RBITS-1:0] l;
        l = RBITS'(b) - wr_rot;
        if (!wr_diag)
          mem[b][wr_addr] <= wr_data[b];
        else if (int'(l) < DG * DL)
          mem[b][wr_addr + ABITS'((int'(l) / DG) * DSTRIDE)] <= wr_data[l];
      end
    end
    if (rd_en)
      for (int m = 0; m < NB; m++)
        rd_data[m] <= mem[RBITS'(m) + rd_rot][rd_addr];
  end
endmodule
