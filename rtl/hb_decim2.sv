// hb_decim2: half-band FIR [-1 0 9 16 9 0 -1]/32 with decimation by 2.
// Every input enters a 7-sample delay line; only every second input
// produces an output (the polyphase arrangement: the discarded outputs are
// never computed). y_valid one cycle after the producing input. Helper of
// decim_filter; the coefficients are this design's choice.
module hb_decim2 #(parameter int unsigned W = 22) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                x_valid,
  input  logic signed [W-1:0] x,
  output logic                y_valid,
  output logic signed [W-1:0] y
);
  logic signed [W-1:0] d [6];
  logic ph;
  logic signed [W+5:0] acc;
  always_comb
    acc = -(W+6)'(x) + 9*(W+6)'(d[1]) + 16*(W+6)'(d[2]) + 9*(W+6)'(d[3]) - (W+6)'(d[5]);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < 6; i++) d[i] <= '0;
      ph <= 1'b0; y <= '0; y_valid <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      if (x_valid) begin
        d[0] <= x;
        for (int i = 1; i < 6; i++) d[i] <= d[i-1];
        ph <= ~ph;
        if (ph) begin y <= W'(acc >>> 5); y_valid <= 1'b1; end
      end
    end
endmodule
