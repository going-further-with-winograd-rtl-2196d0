// l0b: input buffer B of the Cube Unit.
//
// A simple dual-port memory of DEPTH rows of RB bytes (128 x 512 B = 64 kB,
// paper Table III), one full Cube B operand per row. Writes come from the
// memory transfer engine (full rows); reads have one cycle of latency. In the
// baseline (im2col) operator the Cube reads whole rows. In the Winograd
// operator L0B only stages spatial weights: the weight transform reads
// element rows and picks a slice of SLB bytes (one byte per filter) with
// rd_slice, returned on rd_slice_data.
// The paper gives the size and role; the port arrangement is this design's.
module l0b #(
  parameter int DEPTH = 128,
  parameter int RB    = 512,
  parameter int SLB   = 32,
  localparam int ABITS = $clog2(DEPTH),
  localparam int NSL   = RB / SLB,
  localparam int SBITS = (NSL > 1) ? $clog2(NSL) : 1
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [ABITS-1:0]        wr_addr,
  input  logic [RB-1:0][7:0]      wr_data,
  input  logic                    rd_en,
  input  logic [ABITS-1:0]        rd_addr,
  input  logic [SBITS-1:0]        rd_slice,
  output logic [RB-1:0][7:0]      rd_data,
  output logic [SLB-1:0][7:0]     rd_slice_data
);
  logic [RB*8-1:0]  mem [DEPTH];
  logic [SBITS-1:0] slice_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) begin
      rd_data <= mem[rd_addr];
      slice_q <= rd_slice;
    end
  end

  always_comb
    for (int i = 0; i < SLB; i++)
      rd_slice_data[i] = rd_data[int'(slice_q) * SLB + i];
endmodule
