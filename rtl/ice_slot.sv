// ice_slot: one compression module of the ICE (one channel at a time).
// Incoming 9-bit samples of the assigned channel enter a 32-entry buffer.
// Lossless mode: every sample is committed for coding. Near-lossless mode:
// samples wait in the buffer as history; when the buffer is full the
// oldest uncommitted sample is discarded and counted by the run-length
// (RLE) counter. A sample flagged by the spike detector opens a 64-sample
// window: the history still in the buffer (at most 31 samples, plus the
// flagged sample: the "up to 32 preceding samples" of the paper) and the
// samples that follow until 64 are committed. The RLE count is queued and
// coded first, as 2 or 3 bitwise parts of 9 bits (most significant first),
// followed by the 64 window samples. Committed samples pass through DPCM2
// (history cleared at each window start) and then either the arithmetic
// coder (IS_AC=1, symbol = 9-bit residual, RLE parts coded as symbols) or
// zig-zag mapping and the Golomb-Rice coder with adapted k (IS_AC=0; RLE
// parts use k=9, i.e. '0' plus 9 raw bits). Codewords are packed into
// 16-bit words. 'flush' (end of stream) drains the committed samples, cuts
// an open near-lossless window short, terminates the arithmetic code
// and pads the last word; 'flush_done' pulses when nothing is left.
// Structure (buffer 32, DPCM2, data map, adaptation, RLE, AC/GC) follows the
// paper; the buffer policy details, the RLE field layout, DPCM2 reset and
// the escape codes are this design's choices. The buffer is a shift
// register so that the oldest uncommitted entry can be removed.
module ice_slot #(
  parameter bit          IS_AC = 1'b0,
  parameter int unsigned BUF   = 32,
  parameter int unsigned WIN   = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        nll,         // near-lossless mode
  input  logic        rle3,        // RLE in 3 parts (27 bit) instead of 2 (18 bit)
  input  logic        tbl,         // AC table select
  input  logic        s_valid,
  input  logic [8:0]  s_data,
  input  logic        s_det,
  input  logic        flush,
  output logic        flush_done,
  output logic        overflow,    // sticky: a sample could not be stored
  // distribution SRAM port (AC only)
  output logic        mem_req,
  output logic [9:0]  mem_addr,
  input  logic        mem_gnt,
  input  logic [15:0] mem_rdata,
  // packed output
  output logic        w_valid,
  input  logic        w_ready,
  output logic [15:0] w_data
);
  localparam int unsigned CW = $clog2(BUF+1);
  logic [8:0]    buf_q [BUF];
  logic [CW-1:0] size, committed;
  logic [6:0]    win_left;
  logic [26:0]   run;
  // RLE queue (2 entries)
  logic [26:0]   rq [2];
  logic [1:0]    rq_cnt;
  // coder state
  typedef enum logic [2:0] {C_IDLE, C_RLE, C_SAMP, C_FLUSH, C_PAD, C_DONE} cst_e;
  cst_e cst;
  logic [1:0]  part;
  logic [6:0]  wcnt;
  logic        pop, push, drop, do_commit_all;
  logic [8:0]  sym;
  logic        sym_is_rle, sym_valid, sym_ready;
  logic [8:0]  resid;
  logic        dpcm_clr;

  // ---------------- buffer management ----------------
  logic [CW-1:0] rm_idx;
  logic          rm;
  logic          in_window;
  assign in_window = (win_left != 0);

  always_comb begin
    push = 1'b0; drop = 1'b0; do_commit_all = 1'b0;
    if (s_valid) begin
      if (!nll || in_window || s_det) begin
        push = 1'b1;
        if (nll && !in_window && s_det) do_commit_all = 1'b1;
      end else begin
        push = 1'b1;
      end
      // buffer full: discard the oldest history sample, if there is one
      if (size == CW'(BUF) && !(pop)) begin
        if (nll && !in_window && committed != size) drop = 1'b1;
        else push = 1'b0;
      end
    end
  end
  assign rm     = pop || drop;
  assign rm_idx = pop ? '0 : committed;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < BUF; i++) buf_q[i] <= '0;
      size <= '0; committed <= '0; win_left <= '0; run <= '0; overflow <= 1'b0;
      rq[0] <= '0; rq[1] <= '0;
    end else begin : bufupd
      logic [8:0] nb [BUF];
      logic [CW-1:0] ns, nc, nnew;
      for (int i = 0; i < BUF; i++) nb[i] = buf_q[i];
      ns = size; nc = committed;
      if (rm) begin
        for (int i = 0; i < BUF-1; i++) if (CW'(i) >= rm_idx) nb[i] = buf_q[i+1];
        ns = ns - 1'b1;
        if (pop) nc = nc - 1'b1;
      end
      if (push) begin
        nb[ns[$clog2(BUF)-1:0]] = s_data;
        ns = ns + 1'b1;
        if (!nll || in_window) nc = nc + 1'b1;
      end
      nnew = ns - nc;  // samples newly committed by a window start
      if (do_commit_all) nc = ns;
      for (int i = 0; i < BUF; i++) buf_q[i] <= nb[i];
      size <= ns; committed <= nc;
      if (s_valid && !push) overflow <= 1'b1;
      // window / run-length bookkeeping
      if (s_valid && nll) begin
        if (in_window) win_left <= win_left - 1'b1;
        else if (s_det) begin
          win_left <= 7'(WIN) - 7'(nnew);
          if (rq_cnt == 2'd2) overflow <= 1'b1;
          run <= '0;
        end
      end
      if (drop && !do_commit_all && run != '1 && !(rle3 == 1'b0 && run == 27'h3FFFF))
        run <= run + 1'b1;
      if (!nll) begin win_left <= '0; run <= '0; end
      if (flush) win_left <= '0;   // end of stream: an open window is cut short
    end

  // RLE queue
  logic rq_push, rq_pop;
  assign rq_push = s_valid && nll && !in_window && s_det && rq_cnt != 2'd2;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rq_cnt <= '0;
    else begin
      if (rq_pop) begin rq[0] <= rq[1]; end
      if (rq_push) rq[(rq_cnt - (rq_pop ? 2'd1 : 2'd0)) & 2'd1] <= run + (drop ? 27'd1 : 27'd0);
      rq_cnt <= rq_cnt + (rq_push ? 2'd1 : 2'd0) - (rq_pop ? 2'd1 : 2'd0);
    end

  // ---------------- coder sequencing ----------------
  logic [26:0] rv;
  assign rv = rq[0];
  always_comb begin
    sym_valid = 1'b0; sym = '0; sym_is_rle = 1'b0; pop = 1'b0; rq_pop = 1'b0;
    dpcm_clr = 1'b0;
    unique case (cst)
      C_IDLE: ;
      C_RLE: begin
        sym_valid = 1'b1; sym_is_rle = 1'b1;
        sym = (part == 2'd2) ? rv[26:18] : (part == 2'd1) ? rv[17:9] : rv[8:0];
        if (sym_ready && part == 2'd0) begin rq_pop = 1'b1; dpcm_clr = 1'b1; end
      end
      C_SAMP: begin
        sym_valid = (committed != 0);
        sym = resid;
        pop = sym_valid && sym_ready;
      end
      default: ;
    endcase
  end

  logic pk_empty, ac_fdone, fl_req;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin cst <= C_IDLE; part <= '0; wcnt <= '0; end
    else unique case (cst)
      C_IDLE:
        if (nll && rq_cnt != 0) begin
          cst <= C_RLE; part <= rle3 ? 2'd2 : 2'd1; wcnt <= 7'(WIN);
        end else if (!nll && committed != 0) cst <= C_SAMP;
        else if (flush && committed == 0 && rq_cnt == 0) cst <= C_FLUSH;
      C_RLE:
        if (sym_ready) begin
          if (part == 2'd0) cst <= C_SAMP; else part <= part - 1'b1;
        end
      C_SAMP:
        if (pop) begin
          wcnt <= wcnt - 1'b1;
          if (nll && wcnt == 7'd1) cst <= C_IDLE;
          else if (!nll && committed == 1) cst <= C_IDLE;
        end else if (committed == 0 && (!nll || flush)) cst <= C_IDLE;
      C_FLUSH: if (IS_AC ? ac_fdone : 1'b1) cst <= C_PAD;
      C_PAD:   if (pk_empty) cst <= C_DONE;
      C_DONE:  cst <= C_IDLE;
      default: cst <= C_IDLE;
    endcase
  assign flush_done = (cst == C_DONE);
  assign fl_req = (cst == C_FLUSH);

  dpcm2 #(.W(9)) u_dpcm (
    .clk, .rst_n, .clr(dpcm_clr), .en(pop), .x(buf_q[0]), .e(resid)
  );

  // ---------------- entropy coder ----------------
  logic        cw_valid, cw_ready;
  logic [31:0] cw_bits;
  logic [5:0]  cw_len;

  if (IS_AC) begin : g_ac
    logic bv, bo;
    ac_encoder #(.SW(9)) u_ac (
      .clk, .rst_n, .sym_valid, .sym_ready, .sym, .tbl, .flush(fl_req),
      .flush_done(ac_fdone), .mem_req, .mem_addr, .mem_gnt, .mem_rdata,
      .bit_valid(bv), .bit_ready(cw_ready), .bit_out(bo)
    );
    assign cw_valid = bv;
    assign cw_bits  = {31'd0, bo};
    assign cw_len   = 6'd1;
  end else begin : g_gc
    logic [8:0]  u;
    logic [3:0]  k, kk;
    assign u  = sym_is_rle ? sym : psoc_pkg::zigzag9(sym);
    assign kk = sym_is_rle ? 4'd9 : k;
    gc_adapt #(.UW(9)) u_adapt (
      .clk, .rst_n, .clr(1'b0), .upd(sym_valid && sym_ready && !sym_is_rle), .u, .k
    );
    golomb_enc #(.UW(9), .QMAX(16)) u_gc (.u, .k(kk), .code(cw_bits), .len(cw_len));
    assign cw_valid  = sym_valid;
    assign sym_ready = cw_ready;
    assign mem_req   = 1'b0;
    assign mem_addr  = '0;
    assign ac_fdone  = 1'b0;
  end

  bit_packer u_pack (
    .clk, .rst_n, .cw_valid, .cw_ready, .cw_bits, .cw_len,
    .flush(cst == C_PAD), .w_valid, .w_ready, .w_data, .empty(pk_empty)
  );
endmodule
