// l0c: output buffer of the Cube Unit (288 kB of int32).
//
// NB = 16 banks of ROWS rows; a bank word is NC int32 values (16 output
// channels of one tile). Logical row r, tile m lives in bank (m + r) % NB, so
// that both access patterns are free of bank conflicts:
//  - Port A (Cube side) reads and writes a whole [16 tiles x 16 channels]
//    tile of one tap (one row); the skew is undone by a rotation by r % NB.
//    Reads have one cycle of latency.
//  - Port B (output transform side) gathers NG = 6 taps of one tile m from six
//    rows b_addr[g] in one access (one row of the 6x6 tap matrix of 16
//    output channels). The six rows are distinct consecutive taps, so the six
//    banks differ; an assertion checks it. Latency one cycle.
// The paper gives the size (64x16x36 int32, double-buffered: 288 kB), Port A
// and Port B, the gather and a rotation on Port B; the bank mapping is this
// design's choice. Only Port A writes; Port B is read-only.
module l0c #(
  parameter int NB    = 16,
  parameter int NC    = 16,
  parameter int ROWS  = 288,
  parameter int NG    = 6,
  localparam int ABITS = $clog2(ROWS),
  localparam int RBITS = $clog2(NB)
) (
  input  logic                      clk,
  // Port A
  input  logic                      a_rd_en,
  input  logic [ABITS-1:0]          a_rd_addr,
  output logic signed [31:0]        a_rd_data [NB][NC],
  input  logic                      a_wr_en,
  input  logic [ABITS-1:0]          a_wr_addr,
  input  logic signed [31:0]        a_wr_data [NB][NC],
  // Port B (gather)
  input  logic                      b_rd_en,
  input  logic [ABITS-1:0]          b_addr [NG],
  input  logic [RBITS-1:0]          b_tile,
  output logic signed [31:0]        b_rd_data [NG][NC]
);
  logic [NC*32-1:0] mem [NB][ROWS];

  function automatic logic [RBITS-1:0] bank_of(logic [ABITS-1:0] r, logic [RBITS-1:0] m);
    return RBITS'(r) + m;
  endfunction

  always_ff @(posedge clk) begin
    if (a_wr_en)
      for (int m = 0; m < NB; m++) begin
        logic [NC*32-1:0] w;
        for (int n = 0; n < NC; n++) w[n*32 +: 32] = a_wr_data[m][n];
        mem[bank_of(a_wr_addr, RBITS'(m))][a_wr_addr] <= w;
      end
    if (a_rd_en)
      for (int m = 0; m < NB; m++) begin
        logic [NC*32-1:0] w;
        w = mem[bank_of(a_rd_addr, RBITS'(m))][a_rd_addr];
        for (int n = 0; n < NC; n++) a_rd_data[m][n] <= w[n*32 +: 32];
      end
    if (b_rd_en)
      for (int g = 0; g < NG; g++) begin
        logic [NC*32-1:0] w;
        w = mem[bank_of(b_addr[g], b_tile)][b_addr[g]];
        for (int n = 0; n < NC; n++) b_rd_data[g][n] <= w[n*32 +: 32];
      end
  end

  // Port B lanes must hit distinct banks (one access per bank per cycle).
  always_comb
    if (b_rd_en)
      for (int g = 0; g < NG; g++)
        for (int h = g + 1; h < NG; h++)
          assert (bank_of(b_addr[g], b_tile) != bank_of(b_addr[h], b_tile))
            else $error("l0c: port B bank conflict between lanes %0d and %0d", g, h);
endmodule
