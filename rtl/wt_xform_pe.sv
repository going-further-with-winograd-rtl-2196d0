// wt_xform_pe: tap-by-tap processing element for the weight transform
// G f G^T, with tap-wise quantisation at its output.
//
// The transform is unrolled in time. For each group of PT taps the PE walks a
// schedule that is fixed at elaboration from the constant matrix G24 = 24*G
// (see wino_pkg): one step per (weight element, power-of-two term) pair, where
// an element is skipped when none of the group's taps uses it (sparsity) and
// costs a second step only when some tap's coefficient has two set bits. Each
// step reads one int8 weight, shared by all PT lanes; every lane has a
// configurable shifter, an adder/subtractor and an accumulator register (the
// paper's tap-by-tap PE, Fig. 3b). All coefficients G24[i][k]*G24[j][l] have at
// most two set bits, so two steps per element are always enough. With PT = 6
// a 3x3 filter takes 72 steps instead of the 324 of a dense 36x9 walk.
// When a group ends, its PT accumulators (576 * G f G^T) are shifted by their
// tap-wise exponents sh[t] (which also absorb the factor 64 of G24), rounded,
// clamped to int8 and registered on out_taps.
//
// Timing: start (one cycle, while idle) launches a transform. rd_en/rd_elem
// ask for weight element rd_elem (row-major k*3+l); rd_data must return it on
// the next cycle (synchronous SRAM). out_valid pulses once per group with
// out_group; busy is high from start to the last group's output.
// The schedule, PT and the widths are this design's choices; the paper gives
// the PE structure and the principle but not the schedule.
module wt_xform_pe
  import wino_pkg::*;
#(
  parameter int PT = 6,    // parallel taps per PE (divides 36)
  parameter int SW = 5,
  parameter int AW = 20    // accumulator width (bit-true needs 18)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 rd_en,
  output logic [3:0]           rd_elem,
  input  logic signed [7:0]    rd_data,
  input  logic signed [SW-1:0] sh [NT],
  output logic                 out_valid,
  output logic [5:0]           out_group,
  output logic signed [7:0]    out_taps [PT]
);
  localparam int NG   = NT / PT;   // groups per transform
  localparam int MAXS = 2 * R * R; // steps per group, upper bound

  typedef struct packed {
    logic            last;  // last step of its group
    logic [3:0]      elem;  // weight element read in this step
    logic [PT-1:0]   en;    // lane adds in this step
    logic [PT-1:0]   neg;   // lane subtracts
    logic [PT-1:0][3:0] sft; // lane shift amount
  } step_t;

  typedef step_t [NG-1:0][MAXS-1:0] sched_t;

  function automatic int coef(int t, int e);
    return G24[t / N][e / R] * G24[t % N][e % R];
  endfunction

  // bit position of the b-th highest set bit of |c| (b = 0 or 1), -1 if none
  function automatic int term_bit(int c, int b);
    int a, seen;
    a = (c < 0) ? -c : c;
    seen = 0;
    for (int p = 15; p >= 0; p--)
      if (a[p]) begin
        if (seen == b) return p;
        seen++;
      end
    return -1;
  endfunction

  function automatic sched_t build_sched();
    sched_t s;
    s = '0;
    for (int g = 0; g < NG; g++) begin
      int n;
      n = 0;
      for (int e = 0; e < R * R; e++)
        for (int b = 0; b < 2; b++) begin
          logic any;
          any = 1'b0;
          for (int l = 0; l < PT; l++)
            if (term_bit(coef(g * PT + l, e), b) >= 0) any = 1'b1;
          if (any) begin
            s[g][n].elem = 4'(e);
            for (int l = 0; l < PT; l++) begin
              int c, p;
              c = coef(g * PT + l, e);
              p = term_bit(c, b);
              s[g][n].en[l]  = (p >= 0);
              s[g][n].neg[l] = (c < 0);
              s[g][n].sft[l] = (p >= 0) ? 4'(p) : 4'd0;
            end
            n++;
          end
        end
      s[g][n-1].last = 1'b1;
    end
    return s;
  endfunction

  localparam sched_t SCHED = build_sched();

  // issue stage
  logic [5:0] g_q;
  logic [4:0] s_q;
  step_t      cur;
  // data stage (one cycle later)
  logic       d_vld, d_first;
  step_t      d_step;
  logic [5:0] d_g;
  logic       first_q;
  logic signed [AW-1:0] acc [PT];
  logic signed [AW-1:0] nxt [PT];
  logic signed [7:0]    q   [PT];

  assign cur     = SCHED[g_q][s_q];
  assign rd_elem = cur.elem;

  always_comb begin
    for (int l = 0; l < PT; l++) begin
      logic signed [AW-1:0] term;
      term   = AW'(rd_data) <<< d_step.sft[l];
      nxt[l] = d_first ? AW'(0) : acc[l];
      if (d_step.en[l]) nxt[l] = d_step.neg[l] ? nxt[l] - term : nxt[l] + term;
    end
  end

  for (genvar l = 0; l < PT; l++) begin : g_quant
    tapwise_quant #(.IW(AW), .OW(8), .SW(SW)) u_q (
      .x(nxt[l]), .sh(sh[d_g * PT + l]), .y(q[l]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_en     <= 1'b0;
      g_q       <= '0;
      s_q       <= '0;
      first_q   <= 1'b1;
      d_vld     <= 1'b0;
      d_first   <= 1'b0;
      d_step    <= '0;
      d_g       <= '0;
      out_valid <= 1'b0;
      out_group <= '0;
      for (int l = 0; l < PT; l++) begin
        acc[l]      <= '0;
        out_taps[l] <= '0;
      end
    end else begin
      // issue
      if (start && !busy) begin
        rd_en   <= 1'b1;
        g_q     <= '0;
        s_q     <= '0;
        first_q <= 1'b1;
      end else if (rd_en) begin
        first_q <= cur.last;
        if (cur.last) begin
          s_q <= '0;
          if (g_q == 6'(NG - 1)) rd_en <= 1'b0;
          else                   g_q   <= g_q + 6'd1;
        end else s_q <= s_q + 5'd1;
      end
      d_vld   <= rd_en;
      d_first <= first_q;
      d_step  <= cur;
      d_g     <= g_q;
      // accumulate
      out_valid <= 1'b0;
      if (d_vld) begin
        acc <= nxt;
        if (d_step.last) begin
          out_valid <= 1'b1;
          out_group <= d_g;
          out_taps  <= q;
        end
      end
    end
  end

  assign busy = rd_en | d_vld | out_valid;
endmodule
