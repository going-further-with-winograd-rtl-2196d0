// sync_fifo: small synchronous first-in first-out queue (helper).
// D entries of W bits; dout shows the oldest entry while !empty; push when
// full and pop when empty are ignored (and flagged by assertions).
module sync_fifo #(
  parameter int W = 8,
  parameter int D = 4,
  localparam int PB = (D > 1) ? $clog2(D) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty
);
  logic [W-1:0] mem [D];
  logic [PB-1:0] wp, rp;
  logic [PB:0]   cnt;

  assign full  = (cnt == (PB+1)'(D));
  assign empty = (cnt == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= din;
        wp <= (wp == PB'(D - 1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) rp <= (rp == PB'(D - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PB+1)'(push && !full) - (PB+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk)
    if (rst_n) begin
      assert (!(push && full))  else $error("sync_fifo: push while full");
      assert (!(pop && empty))  else $error("sync_fifo: pop while empty");
    end
endmodule
