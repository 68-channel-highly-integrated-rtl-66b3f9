// mac_unit: multiply-accumulate accelerator of the processing element.
// Computes C = A * B^T for feature extraction (e.g. projecting spikes on
// principal components or adaptive-filter features):
//   C[s][f] = sum_{l < L} A[f][l] * B[s][l],  f < F <= NCELL, s < S
// A (the FE matrix, 16-bit signed) is cached in an internal register file
// (NCELL x LMAX entries) and only re-read from SRAM when CTRL.reload is
// set, so inference reads only the samples B (9-bit signed, one per 32-bit
// word). NCELL cells multiply the current sample by their row of A in
// parallel (9 x 16 bit signed) into 32-bit accumulators; the F results of
// each vector are written back to SRAM as 32-bit words. Reads are issued
// back to back over a request/grant port with read data one cycle after
// the grant. Registers (word offsets): 0 CTRL (w: bit0 start, bit1
// reload), 1 STATUS (bit0 busy, bit1 done, write 1 to bit1 clears), 2 F,
// 3 L, 4 S, 5 A base, 6 B base, 7 C base (word addresses). 'irq' is raised
// at completion until STATUS.done is cleared; it wakes the processor.
// Paper: FE-matrix caching in internal register files, parallel 9x16-bit
// signed cells, 32-bit accumulators, SRAM in and out, register control,
// interrupt. Cell count (8), LMAX (64), register map and SRAM word
// formats are this design's choices.
module mac_unit #(
  parameter int unsigned NCELL = 8,
  parameter int unsigned LMAX  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // register port
  input  logic        reg_we,
  input  logic [2:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq,
  // SRAM master port
  output logic        m_req,
  output logic        m_we,
  output logic [14:0] m_addr,
  output logic [31:0] m_wdata,
  input  logic        m_gnt,
  input  logic        m_rvalid,
  input  logic [31:0] m_rdata
);
  localparam int unsigned LW = $clog2(LMAX + 1);
  typedef enum logic [2:0] {M_IDLE, M_LOADA, M_RUNB, M_WRC, M_DONE} st_e;
  st_e st;
  logic [3:0]  r_f;
  logic [LW-1:0] r_l;
  logic [15:0] r_s;
  logic [14:0] a_base, b_base, c_base;
  logic        reload, done_f;
  logic signed [15:0] acache [NCELL][LMAX];
  logic signed [31:0] acc [NCELL];
  // issue / receive counters
  logic [15:0] i_cnt, r_cnt, total;
  logic [15:0] vec;
  logic [3:0]  wf;
  logic [14:0] c_ptr;
  logic [LW-1:0] rl;       // receive position within a row / vector
  logic [3:0]  rf;         // receive row while loading A

  always_comb begin
    unique case (reg_addr)
      3'd1: reg_rdata = {30'd0, done_f, st != M_IDLE && st != M_DONE};
      3'd2: reg_rdata = 32'(r_f);
      3'd3: reg_rdata = 32'(r_l);
      3'd4: reg_rdata = 32'(r_s);
      3'd5: reg_rdata = 32'(a_base);
      3'd6: reg_rdata = 32'(b_base);
      3'd7: reg_rdata = 32'(c_base);
      default: reg_rdata = {31'd0, reload};
    endcase
  end
  assign irq = done_f;

  logic issuing;
  assign issuing = (st == M_LOADA || st == M_RUNB) && i_cnt != total;
  assign m_req   = issuing || (st == M_WRC);
  assign m_we    = (st == M_WRC);
  assign m_wdata = acc[wf];
  always_comb begin
    if (st == M_WRC) m_addr = c_ptr;
    else if (st == M_LOADA) m_addr = a_base + 15'(i_cnt);
    else m_addr = b_base + 15'(vec) * 15'(r_l) + 15'(i_cnt);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= M_IDLE; r_f <= '0; r_l <= '0; r_s <= '0; a_base <= '0; b_base <= '0; c_base <= '0;
      reload <= 1'b0; done_f <= 1'b0; i_cnt <= '0; r_cnt <= '0; total <= '0; vec <= '0;
      wf <= '0; c_ptr <= '0; rl <= '0; rf <= '0;
      for (int c = 0; c < NCELL; c++) acc[c] <= '0;
    end else begin
      if (reg_we) unique case (reg_addr)
        3'd0: reload <= reg_wdata[1];
        3'd1: if (reg_wdata[1]) done_f <= 1'b0;
        3'd2: r_f <= reg_wdata[3:0];
        3'd3: r_l <= LW'(reg_wdata);
        3'd4: r_s <= reg_wdata[15:0];
        3'd5: a_base <= reg_wdata[14:0];
        3'd6: b_base <= reg_wdata[14:0];
        3'd7: c_base <= reg_wdata[14:0];
        default: ;
      endcase
      if (issuing && m_gnt) i_cnt <= i_cnt + 1'b1;
      unique case (st)
        M_IDLE:
          if (reg_we && reg_addr == 3'd0 && reg_wdata[0]) begin
            done_f <= 1'b0; i_cnt <= '0; r_cnt <= '0; rl <= '0; rf <= '0; vec <= '0;
            c_ptr <= c_base;
            for (int c = 0; c < NCELL; c++) acc[c] <= '0;
            if (reg_wdata[1]) begin st <= M_LOADA; total <= 16'(r_f) * 16'(r_l); end
            else begin st <= M_RUNB; total <= 16'(r_l); end
          end
        M_LOADA:
          if (m_rvalid) begin
            acache[rf][rl] <= m_rdata[15:0];
            r_cnt <= r_cnt + 1'b1;
            if (rl == r_l - 1'b1) begin rl <= '0; rf <= rf + 1'b1; end
            else rl <= rl + 1'b1;
            if (r_cnt + 1'b1 == total) begin
              st <= M_RUNB; i_cnt <= '0; r_cnt <= '0; total <= 16'(r_l); rl <= '0;
            end
          end
        M_RUNB:
          if (m_rvalid) begin
            for (int c = 0; c < NCELL; c++)
              acc[c] <= acc[c] + 32'(acache[c][rl]) * 32'(signed'(m_rdata[8:0]));
            rl <= rl + 1'b1;
            r_cnt <= r_cnt + 1'b1;
            if (r_cnt + 1'b1 == total) begin st <= M_WRC; wf <= '0; end
          end
        M_WRC:
          if (m_gnt) begin
            c_ptr <= c_ptr + 1'b1;
            if (wf == r_f - 1'b1) begin
              if (vec + 1'b1 == r_s) st <= M_DONE;
              else begin
                vec <= vec + 1'b1; st <= M_RUNB; i_cnt <= '0; r_cnt <= '0; rl <= '0;
                for (int c = 0; c < NCELL; c++) acc[c] <= '0;
              end
            end else wf <= wf + 1'b1;
          end
        M_DONE: begin done_f <= 1'b1; st <= M_IDLE; end
        default: st <= M_IDLE;
      endcase
    end
endmodule
