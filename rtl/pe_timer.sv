// pe_timer: 32-bit timer of the processing element, an interrupt source
// that can wake the processor. The counter runs while CTRL.enable is set;
// when it equals COMPARE the match flag is set (interrupt 'irq') and, with
// CTRL.reload, the counter restarts from 0. Registers (word offsets):
// 0 CTRL (b0 enable, b1 reload), 1 COUNT (read/write), 2 COMPARE,
// 3 STATUS (b0 match, write 1 to clear). Writes take effect at the next
// clock edge. The paper names a timer as a wake-up source; its register
// set is this design's choice.
module pe_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [1:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq
);
  logic        en, reload, match;
  logic [31:0] cnt, cmp;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      en <= 1'b0; reload <= 1'b0; match <= 1'b0; cnt <= '0; cmp <= '1;
    end else begin
      if (en) begin
        if (cnt == cmp) begin
          match <= 1'b1;
          cnt <= reload ? '0 : cnt + 1'b1;
        end else cnt <= cnt + 1'b1;
      end
      if (reg_we) unique case (reg_addr)
        2'd0: begin en <= reg_wdata[0]; reload <= reg_wdata[1]; end
        2'd1: cnt <= reg_wdata;
        2'd2: cmp <= reg_wdata;
        2'd3: if (reg_wdata[0]) match <= 1'b0;
        default: ;
      endcase
    end
  always_comb
    unique case (reg_addr)
      2'd0: reg_rdata = {30'd0, reload, en};
      2'd1: reg_rdata = cnt;
      2'd2: reg_rdata = cmp;
      default: reg_rdata = {31'd0, match};
    endcase
  assign irq = match;
endmodule
