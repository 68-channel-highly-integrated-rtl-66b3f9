// ac_encoder: static (semi-adaptive) binary arithmetic encoder of one AC engine.
// Symbols (SW bits) are coded against a cumulative frequency table held in
// the shared distribution SRAM: entry cum[s] at address {tbl, s}; the total
// is 2^FB and cum[2^SW] = 2^FB is implied. For each symbol the engine reads
// cum[s] and cum[s+1] over a request/grant port (read data one cycle after
// the grant), narrows the interval [low, high] of CV-bit code registers
// and renormalises one step per cycle, emitting one bit per cycle
// including the pending (underflow) bits. 'flush' terminates the code word
// with two disambiguating bits and re-initialises the coder. With the
// output always ready a symbol takes at most about 4 + 2*CV + pending
// cycles, inside the 120 cycles per symbol the paper quotes.
// The paper states table-based arithmetic coding with a trained
// distribution in a shared 2 KiB SRAM; the integer coder (Witten-Neal-
// Cleary renormalisation), FB=14, CV=16 and the port protocol are this
// design's choices.
module ac_encoder #(
  parameter int unsigned SW = 9,
  parameter int unsigned FB = 14,
  parameter int unsigned CV = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // symbol in
  input  logic          sym_valid,
  output logic          sym_ready,
  input  logic [SW-1:0] sym,
  input  logic          tbl,
  input  logic          flush,
  output logic          flush_done,
  // distribution SRAM port
  output logic          mem_req,
  output logic [SW:0]   mem_addr,
  input  logic          mem_gnt,
  input  logic [15:0]   mem_rdata,
  // bit out
  output logic          bit_valid,
  input  logic          bit_ready,
  output logic          bit_out
);
  localparam logic [CV-1:0] HALF = CV'(1) << (CV-1);
  localparam logic [CV-1:0] Q1   = CV'(1) << (CV-2);
  localparam logic [CV-1:0] Q3   = HALF | Q1;
  typedef enum logic [3:0] {S_IDLE, S_RLO, S_WLO, S_RHI, S_WHI, S_CALC, S_NORM,
                            S_EMIT, S_PEND, S_FDONE} st_e;
  st_e st;
  logic [CV-1:0] low, high;
  logic [SW-1:0] s_q;
  logic          tbl_q;
  logic [FB:0]   c_lo, c_hi;
  logic [15:0]   pend;
  logic          obit, flushing;
  logic [CV:0]   range;
  logic [CV+FB:0] p_lo, p_hi;

  assign range = {1'b0, high} - {1'b0, low} + 1'b1;
  assign p_lo  = (CV+FB+1)'(range) * (CV+FB+1)'(c_lo);
  assign p_hi  = (CV+FB+1)'(range) * (CV+FB+1)'(c_hi);

  assign sym_ready  = (st == S_IDLE) && !flush;
  assign mem_req    = (st == S_RLO) || (st == S_RHI);
  assign mem_addr   = (st == S_RHI) ? {tbl_q, s_q + 1'b1} : {tbl_q, s_q};
  assign bit_valid  = (st == S_EMIT) || (st == S_PEND);
  assign bit_out    = obit;
  assign flush_done = (st == S_FDONE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; low <= '0; high <= '1; pend <= '0; obit <= 1'b0;
      s_q <= '0; tbl_q <= 1'b0; c_lo <= '0; c_hi <= '0; flushing <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE:
          if (flush) begin
            flushing <= 1'b1;
            pend <= pend + 1'b1;
            obit <= (low < Q1) ? 1'b0 : 1'b1;
            st   <= S_EMIT;
          end else if (sym_valid) begin
            s_q <= sym; tbl_q <= tbl; st <= S_RLO;
          end
        S_RLO: if (mem_gnt) st <= S_WLO;
        S_WLO: begin
          c_lo <= (FB+1)'(mem_rdata);
          if (s_q == '1) begin c_hi <= (FB+1)'(1) << FB; st <= S_CALC; end
          else st <= S_RHI;
        end
        S_RHI: if (mem_gnt) st <= S_WHI;
        S_WHI: begin c_hi <= (FB+1)'(mem_rdata); st <= S_CALC; end
        S_CALC: begin
          high <= low + CV'(p_hi >> FB) - 1'b1;
          low  <= low + CV'(p_lo >> FB);
          st   <= S_NORM;
        end
        S_NORM:
          if (high < HALF) begin
            obit <= 1'b0; low <= low << 1; high <= (high << 1) | 1'b1; st <= S_EMIT;
          end else if (low >= HALF) begin
            obit <= 1'b1; low <= (low - HALF) << 1; high <= ((high - HALF) << 1) | 1'b1;
            st <= S_EMIT;
          end else if (low >= Q1 && high < Q3) begin
            pend <= pend + 1'b1; low <= (low - Q1) << 1; high <= ((high - Q1) << 1) | 1'b1;
          end else st <= S_IDLE;
        S_EMIT:
          if (bit_ready) begin
            if (pend != 0) begin obit <= ~obit; st <= S_PEND; end
            else st <= flushing ? S_FDONE : S_NORM;
          end
        S_PEND:
          if (bit_ready) begin
            pend <= pend - 1'b1;
            if (pend == 16'd1) st <= flushing ? S_FDONE : S_NORM;
          end
        S_FDONE: begin
          low <= '0; high <= '1; pend <= '0; flushing <= 1'b0; st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
endmodule
