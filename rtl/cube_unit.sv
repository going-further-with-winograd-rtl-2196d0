// cube_unit: the GEMM engine of the AI core.
//
// Each accepted operation multiplies an int8 [16x32] matrix a by an int8
// [32x16] matrix b into an int32 [16x16] product and optionally adds a third
// operand c_in (accumulate). Sizes follow the paper; the paper gives the
// function only, so the array is written as a plain product with one register
// stage: an operation issued with in_valid is on c_out with out_valid in the
// next cycle, and one operation can be issued every cycle.
// In the Winograd operator the rows of a are 16 tiles of one tap, the inner
// dimension is 32 input channels, and b holds the same tap for 16 output
// channels, so one operation is one slice of the tap-wise batched GEMM.
module cube_unit #(
  parameter int MR = 16,   // rows of a / c
  parameter int KD = 32,   // inner dimension
  parameter int NC = 16    // columns of b / c
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                acc_en,
  input  logic signed [7:0]   a    [MR][KD],
  input  logic signed [7:0]   b    [KD][NC],
  input  logic signed [31:0]  c_in [MR][NC],
  output logic                out_valid,
  output logic signed [31:0]  c_out [MR][NC]
);
  logic signed [31:0] p [MR][NC];

  always_comb begin
    for (int m = 0; m < MR; m++)
      for (int n = 0; n < NC; n++) begin
        logic signed [31:0] s;
        s = acc_en ? c_in[m][n] : 32'sd0;
        for (int k = 0; k < KD; k++) s += 32'(a[m][k]) * 32'(b[k][n]);
        p[m][n] = s;
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) c_out <= p;
  end
endmodule
