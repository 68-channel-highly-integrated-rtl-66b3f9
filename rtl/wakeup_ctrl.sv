// wakeup_ctrl: wake-up and interrupt controller of the processing element.
// NSRC interrupt sources (top level: 0 timer, 1 MAC, 2 CBPU done, 3 APB
// access, 4..7 external lines, 8 MBIST done) are captured on their rising edge into
// PENDING. A source enabled in ENABLE raises 'core_irq' while pending and
// ends a sleep. The core enters sleep by 'sleep_req' (e.g. its
// wait-for-interrupt) or by writing CTRL.sleep; while asleep, 'core_clk_en'
// is low so the core clock can be gated. Registers (word offsets):
// 0 ENABLE, 1 PENDING (write 1s to clear), 2 CTRL (b0 sleep; read b0
// asleep). Wake-up happens in the cycle after the enabled event is
// captured. Source list follows the paper (timer, MAC, APB access,
// external IRQ lines); the edge capture and register map are this
// design's choice.
module wakeup_ctrl #(
  parameter int unsigned NSRC = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NSRC-1:0] src,
  input  logic            sleep_req,
  input  logic            reg_we,
  input  logic [1:0]      reg_addr,
  input  logic [31:0]     reg_wdata,
  output logic [31:0]     reg_rdata,
  output logic            core_irq,
  output logic            core_clk_en
);
  logic [NSRC-1:0] en, pend, src_q;
  logic            asleep;
  logic            wake;
  assign wake = |(pend & en);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      en <= '0; pend <= '0; src_q <= '0; asleep <= 1'b0;
    end else begin
      logic [NSRC-1:0] p;
      src_q <= src;
      p = pend | (src & ~src_q);
      if (reg_we && reg_addr == 2'd1) p = p & ~reg_wdata[NSRC-1:0];
      pend <= p;
      if (reg_we && reg_addr == 2'd0) en <= reg_wdata[NSRC-1:0];
      if (wake) asleep <= 1'b0;
      else if (sleep_req || (reg_we && reg_addr == 2'd2 && reg_wdata[0])) asleep <= 1'b1;
    end
  always_comb
    unique case (reg_addr)
      2'd0: reg_rdata = 32'(en);
      2'd1: reg_rdata = 32'(pend);
      2'd2: reg_rdata = {31'd0, asleep};
      default: reg_rdata = '0;
    endcase
  assign core_irq    = wake;
  assign core_clk_en = !asleep;
endmodule
