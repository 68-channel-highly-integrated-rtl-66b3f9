// psoc_pkg: types and constants shared by the neural-signal PSoC RTL.
// The channel count (68), the 9-bit sample width, the nine CBPU commands
// (C1..C9) and the word widths of the functional units follow the paper.
// The numeric command encoding, the 16-bit word format on the off-chip
// stream and the helper functions are this design's own choices.
package psoc_pkg;
  localparam int unsigned N_CH     = 68;  // recording channels
  localparam int unsigned SAMPLE_W = 9;   // ADC sample width
  localparam int unsigned CH_W     = 7;   // channel index width
  localparam int unsigned WORD_W   = 16;  // stream word width

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic [CH_W-1:0]            chan_t;

  // CBPU commands C1..C9 (encoding: command number)
  typedef enum logic [3:0] {
    CMD_NONE     = 4'd0,
    CMD_C1_REC   = 4'd1,  // record to PE SRAM
    CMD_C2_RAW   = 4'd2,  // raw samples off-chip
    CMD_C3_ICE   = 4'd3,  // AP compression (ICE)
    CMD_C4_CCE   = 4'd4,  // LFP compression (CCE)
    CMD_C5_FIR   = 4'd5,  // FIR output off-chip
    CMD_C6_FIRS  = 4'd6,  // FIR output to PE SRAM
    CMD_C7_SR    = 4'd7,  // spike raster
    CMD_C8_ATE   = 4'd8,  // ATE thresholds off-chip
    CMD_C9_ATESD = 4'd9   // ATE thresholds to spike detectors
  } cmd_e;

  // High-pass selection of the ADC digital filter
  typedef enum logic [1:0] {HPF_OFF = 2'd0, HPF_1HZ = 2'd1, HPF_300HZ = 2'd2} hpf_sel_e;

  // one sample delivered by an ADC wrapper channel
  typedef struct packed {
    chan_t   ch;
    sample_t data;
    logic    det;   // spike-detector flag
  } samp_pkt_t;

  // headers of words on the off-chip stream: [15:12]
  localparam logic [3:0] HDR_SR_EMPTY = 4'hE;
  localparam logic [3:0] HDR_SR_SPIKE = 4'hA;

  // CBPU configuration (register file fields)
  typedef struct packed {
    cmd_e             cmd;
    logic             debug;       // take samples from PE SRAM instead of the AFEs
    logic             batch;       // batch instead of stream transmission
    logic [5:0]       batch_len;   // words per batch
    logic [11:0]      pkt_period;  // C2: frames between frame headers (0: none)
    logic [N_CH-1:0]  ch_en;       // channel selection
    logic [14:0]      mem_base;    // C1/C6: first PE SRAM word
    logic [14:0]      mem_len;     // C1/C6: words to write
    logic [14:0]      dbg_base;    // debug: first PE SRAM word of stored samples
    logic [15:0]      dbg_period;  // debug: cycles per frame
    logic [15:0]      n_frames;    // frames to run (0: until stop)
    logic [6:0]       ate_ch;      // C8/C9: channel of the threshold estimator
    logic             ate_to_amp;  // C9: write amplitude (1) or NEO (0) threshold
  } cbpu_cfg_t;

  // word of the off-chip (SPI) stream
  typedef struct packed {
    logic [3:0]  tag;
    logic [6:0]  idx;      // channel or ICE slot
    logic [25:0] payload;
  } tx_word_t;
  localparam logic [3:0] TAG_RAW = 4'd0, TAG_FRAME = 4'd1, TAG_ICE = 4'd2, TAG_CCE = 4'd3,
                         TAG_FIR = 4'd4, TAG_SR = 4'd5, TAG_ATE = 4'd6;

  // signed -> non-negative mapping used in front of Golomb coders
  function automatic logic [SAMPLE_W-1:0] zigzag9(input logic [SAMPLE_W-1:0] e);
    return e[SAMPLE_W-1] ? ~(e << 1) : (e << 1);
  endfunction
endpackage
