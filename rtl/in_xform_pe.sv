// in_xform_pe: row-by-row processing element for the input transform B^T x B
// ("slow" solution), with tap-wise quantisation at its output.
//
// One hard-wired vector-matrix unit computes v * B with shifts and adds only.
// Phase 1 (6 cycles): the PE takes one int8 row x[y,:] of the 6x6 input tile
// per accepted handshake and stores the row of x*B in a 6x6 intermediate
// register file (h_T*w_T registers). Phase 2 (6 cycles): the same unit is fed
// with column j of that intermediate, which yields column j of B^T x B; the
// six taps are scaled by their power-of-two tap-wise factors (tapwise_quant),
// rounded, clamped to int8 and presented on out_taps one cycle later.
// A transform takes h_T + w_T = 12 cycles, as in the paper's Table II for the
// slow row-by-row engine; the structure follows the paper's Fig. 3a.
// 16-bit internal words: B^T x B of int8 data needs 8 extra bits (paper, Sec. 2).
//
// Interface: in_valid/in_ready row handshake (ready during phase 1 only);
// out_valid pulses once per column, out_col = j, out_taps[i] = tap (i, j).
// sh[i][j] is the right-shift exponent of tap (i, j); it must be stable while
// a transform is in flight. Reset is active-low and synchronous to clk.
module in_xform_pe
  import wino_pkg::*;
#(
  parameter int DW = 8,    // input and output data width
  parameter int IW = 16,   // internal width
  parameter int SW = 5     // shift exponent width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [DW-1:0]  in_row [N],
  input  logic signed [SW-1:0]  sh [N][N],
  output logic                  out_valid,
  output logic [2:0]            out_col,
  output logic signed [DW-1:0]  out_taps [N]
);
  logic [3:0]           cnt;        // 0..5 load rows, 6..11 emit columns
  logic signed [IW-1:0] st [N][N];  // intermediate x*B, st[y][j]
  logic signed [IW-1:0] v  [N];     // vector-matrix unit input
  logic signed [IW-1:0] u  [N];     // vector-matrix unit output
  logic signed [DW-1:0] q  [N];
  logic [2:0]           col;

  assign in_ready = (cnt < 4'd6);
  assign col      = 3'(cnt - 4'd6);

  // Shared hard-wired vector-matrix unit: u = v * B, u[j] = sum_k v[k]*BT[j][k].
  always_comb begin
    for (int k = 0; k < N; k++)
      v[k] = in_ready ? IW'(in_row[k]) : st[k][col];
    for (int j = 0; j < N; j++) begin
      longint acc;
      acc = 0;
      for (int k = 0; k < N; k++) acc += shadd(longint'(v[k]), BT[j][k]);
      u[j] = IW'(acc);
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_quant
    tapwise_quant #(.IW(IW), .OW(DW), .SW(SW)) u_q (
      .x(u[i]), .sh(sh[i][col]), .y(q[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      out_col   <= '0;
      for (int i = 0; i < N; i++) out_taps[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_ready) begin
        if (in_valid) begin
          for (int j = 0; j < N; j++) st[cnt[2:0]][j] <= u[j];
          cnt <= cnt + 4'd1;
        end
      end else begin
        out_valid <= 1'b1;
        out_col   <= col;
        for (int i = 0; i < N; i++) out_taps[i] <= q[i];
        cnt <= (cnt == 4'd11) ? 4'd0 : cnt + 4'd1;
      end
    end
  end
endmodule
