// mbist: memory built-in self test for the PE SRAM.
// Runs the March C- algorithm over LEN words starting at BASE through a
// memory port of the crossbar (request/grant, read data one cycle after
// the grant):
//   up(w0); up(r0,w1); up(r1,w0); down(r0,w1); down(r1,w0); up(r0)
// with 0 = all-zero word and 1 = all-one word. The first mismatch sets
// STATUS.fail and records its address; the test runs to the end.
// Registers (word offsets): 0 CTRL (w: b0 start), 1 BASE, 2 LEN,
// 3 STATUS (b0 busy, b1 done, b2 fail, [30:16] first failing address).
// 'done' is also an output for the interrupt controller. Each element
// step costs one access; about 10*LEN accesses in total. The paper names
// an MBIST block for post-production test; the algorithm and interface
// are this design's choice. The test overwrites the tested range.
module mbist (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [1:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        done,
  output logic        m_req,
  output logic        m_we,
  output logic [14:0] m_addr,
  output logic [31:0] m_wdata,
  input  logic        m_gnt,
  input  logic        m_rvalid,
  input  logic [31:0] m_rdata
);
  typedef enum logic [1:0] {B_IDLE, B_ACC, B_WAIT} bst_e;
  bst_e        st;
  logic [14:0] base, len, idx, fail_addr;
  logic [2:0]  elem;     // march element 0..5
  logic        step;     // 0: first operation of the element, 1: second
  logic        fail, done_f;
  // per element: direction, read value, write value, number of operations
  logic        down, rd_op, exp_v, wr_v;
  always_comb begin
    down = (elem == 3'd3 || elem == 3'd4);
    unique case (elem)
      3'd0: begin rd_op = 1'b0;            exp_v = 1'b0; wr_v = 1'b0; end
      3'd1: begin rd_op = (step == 1'b0);  exp_v = 1'b0; wr_v = 1'b1; end
      3'd2: begin rd_op = (step == 1'b0);  exp_v = 1'b1; wr_v = 1'b0; end
      3'd3: begin rd_op = (step == 1'b0);  exp_v = 1'b0; wr_v = 1'b1; end
      3'd4: begin rd_op = (step == 1'b0);  exp_v = 1'b1; wr_v = 1'b0; end
      default: begin rd_op = 1'b1;         exp_v = 1'b0; wr_v = 1'b0; end
    endcase
  end
  logic [14:0] addr_off;
  assign addr_off = down ? (len - 1'b1 - idx) : idx;
  assign m_req   = (st == B_ACC);
  assign m_we    = !rd_op;
  assign m_addr  = base + addr_off;
  assign m_wdata = wr_v ? '1 : '0;
  assign done    = done_f;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= B_IDLE; base <= '0; len <= '0; idx <= '0; elem <= '0; step <= 1'b0;
      fail <= 1'b0; done_f <= 1'b0; fail_addr <= '0;
    end else begin
      logic adv;   // current operation completed: move to the next one
      adv = 1'b0;
      if (reg_we && reg_addr == 2'd1) base <= reg_wdata[14:0];
      if (reg_we && reg_addr == 2'd2) len <= reg_wdata[14:0];
      unique case (st)
        B_IDLE:
          if (reg_we && reg_addr == 2'd0 && reg_wdata[0] && len != 0) begin
            st <= B_ACC; idx <= '0; elem <= '0; step <= 1'b0; fail <= 1'b0; done_f <= 1'b0;
          end
        B_ACC:
          if (m_gnt) begin
            if (rd_op) st <= B_WAIT;
            else adv = 1'b1;
          end
        B_WAIT:
          if (m_rvalid) begin
            if (m_rdata != (exp_v ? '1 : '0) && !fail) begin fail <= 1'b1; fail_addr <= m_addr; end
            st <= B_ACC;
            adv = 1'b1;
          end
        default: st <= B_IDLE;
      endcase
      if (adv) begin
        if (elem != 3'd0 && elem != 3'd5 && step == 1'b0) step <= 1'b1;
        else begin
          step <= 1'b0;
          if (idx == len - 1'b1) begin
            idx <= '0;
            if (elem == 3'd5) begin st <= B_IDLE; done_f <= 1'b1; end
            else elem <= elem + 1'b1;
          end else idx <= idx + 1'b1;
        end
      end
    end
  always_comb
    unique case (reg_addr)
      2'd0: reg_rdata = '0;
      2'd1: reg_rdata = 32'(base);
      2'd2: reg_rdata = 32'(len);
      default: reg_rdata = {1'b0, fail_addr, 13'd0, fail, done_f, st != B_IDLE};
    endcase
endmodule
