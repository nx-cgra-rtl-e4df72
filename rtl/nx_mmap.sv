// nx_mmap: NX-Memory map, the host's control and status registers, on an APB slave port.
//
//   0x000 CTRL      write: bit 0 = execution trigger (pulse), bit 1 = clear the done flag
//   0x004 STATUS    read:  bit 0 = busy, bit 1 = done (end of execution), bit 2 = fetching
//   0x008 CTX_BASE  read/write: first context word the memory controller reads (10 bits)
//   0x00C CORES     read:  cores that received micro-code in the last fetch
//   0x010 DONE      read:  cores that executed EXIT
//   0x014 CYCLES    read:  execution cycles of the last run
// Accesses complete in the APB access phase without wait states; other addresses read 0 and
// report no error. irq_o is the done flag, the end-of-execution notice to the host.
// The published design names a memory map for external control, with the execution trigger
// out and end of execution in; the register set and offsets are this design's own.
module nx_mmap
  import nx_pkg::*;
#(
  parameter int unsigned NC = N_CORES
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  apb_req_t      apb_req_i,
  output apb_rsp_t      apb_rsp_o,
  output logic          trigger_o,
  output logic          clear_done_o,
  output logic [9:0]    ctx_base_o,
  input  logic          busy_i,
  input  logic          fetching_i,
  input  logic          done_flag_i,
  input  logic [NC-1:0] cores_i,
  input  logic [NC-1:0] core_done_i,
  input  logic [31:0]   cycles_i,
  output logic          irq_o
);
  logic wr, rd;
  assign wr = apb_req_i.psel && apb_req_i.penable && apb_req_i.pwrite;
  assign rd = apb_req_i.psel && !apb_req_i.pwrite;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctx_base_o   <= '0;
      trigger_o    <= 1'b0;
      clear_done_o <= 1'b0;
    end else begin
      trigger_o    <= wr && apb_req_i.paddr == MM_CTRL && apb_req_i.pwdata[0];
      clear_done_o <= wr && apb_req_i.paddr == MM_CTRL && apb_req_i.pwdata[1];
      if (wr && apb_req_i.paddr == MM_CTX_BASE) ctx_base_o <= apb_req_i.pwdata[9:0];
    end
  end

  always_comb begin
    apb_rsp_o = '{pready: 1'b1, pslverr: 1'b0, prdata: 32'd0};
    if (rd) begin
      unique case (apb_req_i.paddr)
        MM_STATUS:   apb_rsp_o.prdata = {29'd0, fetching_i, done_flag_i, busy_i};
        MM_CTX_BASE: apb_rsp_o.prdata = {22'd0, ctx_base_o};
        MM_CORES:    apb_rsp_o.prdata = 32'(cores_i);
        MM_DONE:     apb_rsp_o.prdata = 32'(core_done_i);
        MM_CYCLES:   apb_rsp_o.prdata = cycles_i;
        default:     apb_rsp_o.prdata = 32'd0;
      endcase
    end
  end

  assign irq_o = done_flag_i;
endmodule
