// tapwise_quant: the tap-wise quantisation stage of a Winograd PE.
//
// Applies a power-of-two scale 2^-sh to one tap value, rounds to the nearest
// integer and clamps to the signed OW-bit range, i.e. clamp(round(x / 2^sh)).
// The paper gives the stage as "a configurable shifter and a rounding module"
// and the quantiser as round-then-clamp (its Eq. 2). Choices of this design:
// rounding is half-up (add 2^(sh-1) before the arithmetic shift), and a
// negative sh shifts left, so the same stage also serves an up-scaling
// S_BG factor at the input of the output transform.
//
// Purely combinational. Interface: x (IW-bit signed), sh (SW-bit signed,
// positive = right shift), y (OW-bit signed, saturated).
module tapwise_quant #(
  parameter int IW = 16,
  parameter int OW = 8,
  parameter int SW = 5
) (
  input  logic signed [IW-1:0] x,
  input  logic signed [SW-1:0] sh,
  output logic signed [OW-1:0] y
);
  localparam int MAXL = 1 << (SW - 1);       // largest left shift
  localparam int EW   = IW + MAXL + 2;       // wide enough for any shift
  localparam logic signed [EW-1:0] OMAX = (EW'(1) <<< (OW - 1)) - 1;
  localparam logic signed [EW-1:0] OMIN = -(EW'(1) <<< (OW - 1));

  logic signed [EW-1:0] xe, rnd, sc;
  logic        [SW-1:0] amt;

  always_comb begin
    xe  = EW'(x);
    rnd = '0;
    amt = '0;
    if (sh > 0) begin
      amt = SW'(sh);
      rnd = EW'(1) <<< (amt - 1);
      sc  = (xe + rnd) >>> amt;
    end else begin
      amt = SW'(-sh);
      sc  = xe <<< amt;
    end
    if (sc > OMAX)      y = OMAX[OW-1:0];
    else if (sc < OMIN) y = OMIN[OW-1:0];
    else                y = sc[OW-1:0];
  end
endmodule
