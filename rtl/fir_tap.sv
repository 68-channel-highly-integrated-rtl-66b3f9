// fir_tap: one FIR filter channel ("FIR tap" in the paper), order 15.
// y[n] = sum_{i=0..15} c_i * x[n-i]  (paper Eq. 4). A 16-entry delay line
// of 9-bit signed samples advances on every x_valid; the 16 products of
// 9 x 16 bit are summed by an adder chain and the sum is limited to the
// 26-bit accumulator width the paper gives (saturating, this design's
// choice). y is registered: y_valid follows x_valid by one cycle.
// 'clr' empties the delay line.
module fir_tap #(
  parameter int unsigned NT = 16,
  parameter int unsigned XW = 9,
  parameter int unsigned CWD = 16,
  parameter int unsigned AW = 26
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic signed [CWD-1:0] coef [NT],
  input  logic                  x_valid,
  input  logic signed [XW-1:0]  x,
  output logic                  y_valid,
  output logic signed [AW-1:0]  y
);
  localparam int unsigned SW = XW + CWD + $clog2(NT);
  logic signed [XW-1:0] dl [NT];   // dl[i] = x[n-1-i]
  logic signed [SW-1:0] sum;
  localparam logic signed [SW-1:0] MAXV = SW'((64'sd1 <<< (AW-1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'((64'sd1 <<< (AW-1)));
  always_comb begin
    sum = SW'(coef[0]) * SW'(x);
    for (int i = 1; i < NT; i++) sum = sum + SW'(coef[i]) * SW'(dl[i-1]);
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < NT; i++) dl[i] <= '0;
      y <= '0; y_valid <= 1'b0;
    end else begin
      y_valid <= x_valid && !clr;
      if (clr) for (int i = 0; i < NT; i++) dl[i] <= '0;
      else if (x_valid) begin
        dl[0] <= x;
        for (int i = 1; i < NT; i++) dl[i] <= dl[i-1];
        y <= (sum > MAXV) ? AW'(MAXV) : (sum < MINV) ? AW'(MINV) : AW'(sum);
      end
    end
endmodule
