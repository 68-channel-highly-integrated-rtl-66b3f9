// spike_detector: two-stage spike detector of one ADC channel.
// Stage 1 (adaptive threshold): |x(n-1)| > amp_thr.
// Stage 2 (NEO check against false positives):
//   psi(n-1) = x(n-1)^2 - x(n)*x(n-2) > neo_thr.
// A sample is flagged when both hold. The sample leaves one sample period
// late, together with its flag, so sample and flag stay aligned. A flag
// also requests the high-bandwidth mode of the front end for hold_len
// further samples (hb_req). Thresholds are written by the register file
// (command C9 updates them from the threshold estimator). Paper: two
// stages, adaptive thresholding then NEO, switch to high-bandwidth mode
// while spikes are detected. Combination rule and hold time are this
// design's choices.
module spike_detector (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [8:0]        amp_thr,
  input  logic [19:0]       neo_thr,
  input  logic [7:0]        hold_len,
  input  logic              x_valid,
  input  logic signed [8:0] x,
  output logic              y_valid,
  output logic signed [8:0] y,
  output logic              det,
  output logic              hb_req
);
  logic signed [8:0] x1, x2;
  logic signed [19:0] psi;
  logic [8:0] ax1;
  logic [7:0] hold;
  assign psi = 20'(x1) * 20'(x1) - 20'(x) * 20'(x2);
  assign ax1 = x1[8] ? 9'(-x1) : 9'(x1);
  assign hb_req = (hold != 0);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; y <= '0; y_valid <= 1'b0; det <= 1'b0; hold <= '0;
    end else begin
      y_valid <= x_valid;
      if (x_valid) begin
        logic d;
        d = (ax1 > amp_thr) && (psi > signed'(neo_thr));
        x1 <= x; x2 <= x1;
        y <= x1; det <= d;
        if (d) hold <= hold_len;
        else if (hold != 0) hold <= hold - 1'b1;
      end
    end
endmodule
