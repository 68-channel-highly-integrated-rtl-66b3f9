// adw_channel: ADC digital wrapper of one recording channel.
// Holds the channel's decimation filter, two-stage spike detector, the
// clock gate/divider of the modulator and a small FIFO towards the CBPU.
// Clock gate/div: from the 5 MHz wrapper clock it enables the modulator
// (mod_en) every cycle in high-bandwidth mode and every 4th cycle in
// low-bandwidth mode (1.25 MHz); the modulator bit (dsm_bit) is taken on
// mod_en. Low bandwidth is the default; a detected spike switches to high
// bandwidth for the detector's hold time. Each filtered sample and its
// detection flag enter a FIFO of FDEPTH entries, read by the CBPU
// (rd_en). 'ovf' is sticky when a sample found the FIFO full.
// Paper: DF, SD, clk gate/div and FIFO per channel, 1.25 / 5 MHz, mode
// switching on spikes. FIFO depth and the divider form are this design's.
module adw_channel
  import psoc_pkg::*;
#(
  parameter int unsigned FDEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  hpf_sel_e    hpf_sel,
  input  logic        force_hb,
  input  logic [8:0]  amp_thr,
  input  logic [19:0] neo_thr,
  input  logic [7:0]  hold_len,
  output logic        mod_en,     // modulator clock enable
  output logic        hb_mode,    // modulator bandwidth mode
  input  logic        dsm_bit,
  output logic        f_valid,    // FIFO not empty
  input  logic        rd_en,
  output logic [8:0]  f_data,
  output logic        f_det,
  output logic        ovf
);
  logic [1:0] div;
  logic hb_req, df_v, sd_v, det;
  logic signed [8:0] df_y, sd_y;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) div <= '0;
    else div <= div + 1'b1;
  assign mod_en = hb_mode ? 1'b1 : (div == 2'd0);

  decim_filter u_df (
    .clk, .rst_n, .hb(hb_req || force_hb), .hpf_sel, .bit_valid(mod_en), .bit_in(dsm_bit),
    .hb_active(hb_mode), .y_valid(df_v), .y(df_y)
  );
  spike_detector u_sd (
    .clk, .rst_n, .amp_thr, .neo_thr, .hold_len, .x_valid(df_v), .x(df_y),
    .y_valid(sd_v), .y(sd_y), .det, .hb_req
  );
  // FIFO
  localparam int unsigned PW = $clog2(FDEPTH);
  logic [9:0] mem [FDEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0] cnt;
  logic wr, rd;
  assign wr = sd_v && (cnt != (PW+1)'(FDEPTH) || rd_en);
  assign rd = rd_en && cnt != 0;
  assign f_valid = (cnt != 0);
  assign {f_data, f_det} = mem[rp];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin wp <= '0; rp <= '0; cnt <= '0; ovf <= 1'b0;
      for (int i = 0; i < FDEPTH; i++) mem[i] <= '0; end
    else begin
      if (wr) begin mem[wp] <= {sd_y, det}; wp <= wp + 1'b1; end
      if (rd) rp <= rp + 1'b1;
      cnt <= cnt + (wr ? 1'b1 : 1'b0) - (rd ? 1'b1 : 1'b0);
      if (sd_v && !wr) ovf <= 1'b1;
    end
endmodule
