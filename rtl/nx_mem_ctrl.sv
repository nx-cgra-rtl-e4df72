// nx_mem_ctrl: NX-Memory controller, distributes the context to the cores before start.
//
// On fetch_en_i it walks the context memory from word ctx_base_i over an OBI master port. The
// context is a list of records: a header {core[31:27], rf select[26], first index[25:20],
// count[19:14]} followed by count data words, which are written one by one, over a second
// OBI master port, to register file (micro-code or constants) of that core, starting at the
// given index. A header with count 0 ends the list. busy_o is high from fetch_en_i until the
// last word is written; done_o pulses then. cores_o marks every core that received at least
// one micro-code word, which the end-of-execution management waits for. One read and one
// write are in flight at most; a word takes five cycles with memories that grant at once.
// The published design only says that the controller distributes the context from the
// context memory to the cores over OBI; the record format and the sequencing are this
// design's own.
module nx_mem_ctrl
  import nx_pkg::*;
#(
  parameter int unsigned NC = N_CORES
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          fetch_en_i,
  input  logic [9:0]    ctx_base_i,
  output logic          busy_o,
  output logic          done_o,
  output logic [NC-1:0] cores_o,
  output obi_req_t      ctx_req_o,
  input  obi_rsp_t      ctx_rsp_i,
  output obi_req_t      cfg_req_o,
  input  obi_rsp_t      cfg_rsp_i
);
  typedef enum logic [2:0] {S_IDLE, S_HDR_RD, S_HDR_WAIT, S_DAT_RD, S_DAT_WAIT, S_WR, S_WR_WAIT}
    state_e;
  state_e      state;
  logic [9:0]  ptr;
  logic [4:0]  core;
  cfg_sel_e    sel;
  logic [5:0]  idx, left;
  logic [31:0] data;

  always_comb begin
    ctx_req_o      = '0;
    ctx_req_o.be   = 4'hF;
    ctx_req_o.addr = {20'd0, ptr, 2'b00};
    ctx_req_o.req  = state inside {S_HDR_RD, S_DAT_RD};
    cfg_req_o       = '0;
    cfg_req_o.req   = state == S_WR;
    cfg_req_o.we    = 1'b1;
    cfg_req_o.be    = 4'hF;
    cfg_req_o.addr  = {19'd0, core, sel, idx[4:0], 2'b00};
    cfg_req_o.wdata = data;
  end

  assign busy_o = state != S_IDLE;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state <= S_IDLE; ptr <= '0; core <= '0; sel <= CFG_IRF; idx <= '0; left <= '0;
      data <= '0; done_o <= 1'b0; cores_o <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (state)
        S_IDLE: if (fetch_en_i) begin
          ptr     <= ctx_base_i;
          cores_o <= '0;
          state   <= S_HDR_RD;
        end
        S_HDR_RD:   if (ctx_rsp_i.gnt) state <= S_HDR_WAIT;
        S_HDR_WAIT: if (ctx_rsp_i.rvalid) begin
          ptr  <= ptr + 1'b1;
          core <= ctx_rsp_i.rdata[31:27];
          sel  <= cfg_sel_e'(ctx_rsp_i.rdata[26]);
          idx  <= ctx_rsp_i.rdata[25:20];
          left <= ctx_rsp_i.rdata[19:14];
          if (ctx_rsp_i.rdata[19:14] == 6'd0) begin
            state  <= S_IDLE;
            done_o <= 1'b1;
          end else begin
            if (int'(ctx_rsp_i.rdata[31:27]) < NC && ctx_rsp_i.rdata[26] == CFG_IRF)
              cores_o[ctx_rsp_i.rdata[31:27]] <= 1'b1;
            state <= S_DAT_RD;
          end
        end
        S_DAT_RD:   if (ctx_rsp_i.gnt) state <= S_DAT_WAIT;
        S_DAT_WAIT: if (ctx_rsp_i.rvalid) begin
          data  <= ctx_rsp_i.rdata;
          ptr   <= ptr + 1'b1;
          state <= S_WR;
        end
        S_WR:       if (cfg_rsp_i.gnt) state <= S_WR_WAIT;
        S_WR_WAIT:  if (cfg_rsp_i.rvalid) begin
          idx   <= idx + 1'b1;
          left  <= left - 1'b1;
          state <= (left == 6'd1) ? S_HDR_RD : S_DAT_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
