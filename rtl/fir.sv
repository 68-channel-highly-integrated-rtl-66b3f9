// fir: 16-channel FIR filter of the DSPW with its FIR data wrap.
// The data wrap maps a tagged input sample {channel, data} to the FIR tap
// that the register file assigned to that channel (tap_ch/tap_en), and maps
// the tap's output back to the channel index. All taps share the 16
// coefficients c0..c15 (16-bit) of the register file. Output {o_ch, o_y}
// with o_valid one cycle after the input sample. Paper: 16 channels in
// parallel, 16 taps each, 16-bit coefficients, 26-bit accumulators, data
// wrap mapping. The channel-to-tap table format is this design's choice.
module fir #(
  parameter int unsigned NCH = 16,
  parameter int unsigned NT  = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic signed [15:0] coef   [NT],
  input  logic [NCH-1:0]     tap_en,
  input  logic [6:0]         tap_ch [NCH],
  input  logic               s_valid,
  input  logic [6:0]         s_ch,
  input  logic signed [8:0]  s_data,
  output logic               o_valid,
  output logic [6:0]         o_ch,
  output logic signed [25:0] o_y
);
  logic [NCH-1:0] yv;
  logic signed [25:0] yy [NCH];
  for (genvar t = 0; t < NCH; t++) begin : g_tap
    fir_tap #(.NT(NT)) u_tap (
      .clk, .rst_n, .clr, .coef,
      .x_valid(s_valid && tap_en[t] && s_ch == tap_ch[t]), .x(s_data),
      .y_valid(yv[t]), .y(yy[t])
    );
  end
  always_comb begin
    o_valid = 1'b0; o_ch = '0; o_y = '0;
    for (int t = 0; t < NCH; t++)
      if (yv[t] && !o_valid) begin o_valid = 1'b1; o_ch = tap_ch[t]; o_y = yy[t]; end
  end
endmodule
