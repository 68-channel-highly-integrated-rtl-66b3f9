// dpcm2: second-order time-domain decorrelator of the ICE.
// e(n) = x(n) - 2*x(n-1) + x(n-2), as drawn in the ICE block diagram (two
// delay registers, a <<1 tap subtracted, the undelayed and twice-delayed
// samples added). This design computes it modulo 2^W, so a W-bit residual
// still allows exact reconstruction (x = e + 2x1 - x2 mod 2^W); the paper
// does not give the residual width. 'clr' empties the history (used at the
// start of each near-lossless spike window). 'en' advances the history; e is
// combinational from x and the history.
module dpcm2 #(parameter int unsigned W = 9) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic [W-1:0] x,
  output logic [W-1:0] e
);
  logic [W-1:0] x1, x2;
  assign e = x - (x1 << 1) + x2;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin x1 <= '0; x2 <= '0; end
    else if (clr) begin x1 <= '0; x2 <= '0; end
    else if (en)  begin x1 <= x; x2 <= x1; end
endmodule
