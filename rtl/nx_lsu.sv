// nx_lsu: load-store unit of a MOB, an OBI master towards the shared L1 memory.
//
// A memory micro-instruction raises issue_i and the request goes out in the same cycle; it is
// accepted when gnt is high. The response (rvalid, with data for a load) may come in any later
// cycle, and one access is in flight at most. Because every core runs one static schedule in
// lockstep, a load must deliver its data at a fixed point of that schedule whatever the memory
// does: in the first cycle in which the array advances after the load instruction retired, so
// that the data are visible to the neighbours two schedule steps after the load. Responses are
// therefore kept in a two-entry queue and committed (load_valid_o) only in that cycle. stall_o
// asks the array to hold every core while a request waits for its grant, or while a retired
// access is due for commit but its response has not yet arrived; with a memory that grants at
// once and answers in the next cycle no stall occurs. hold_i is the array-wide stall: while it
// is high the current instruction stays, a request already granted is not sent again and no
// data are committed. Stores go through the queue too, so accesses complete in order. The OBI
// signal set follows the published use of OBI master channels; the queue, the in-order commit
// and the array-wide stall are this design's own.
module nx_lsu
  import nx_pkg::*;
#(
  parameter int unsigned TAG_W = 5
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             issue_i,
  input  logic             we_i,
  input  logic [31:0]      addr_i,
  input  logic [31:0]      wdata_i,
  input  logic [TAG_W-1:0] tag_i,
  input  logic             hold_i,
  output logic             stall_o,
  output logic             load_valid_o,
  output logic [31:0]      load_data_o,
  output logic [TAG_W-1:0] load_tag_o,
  output obi_req_t         obi_req_o,
  input  obi_rsp_t         obi_rsp_i
);
  typedef struct packed {
    logic             load;
    logic             retired;
    logic             has_data;
    logic [TAG_W-1:0] tag;
    logic [31:0]      data;
  } entry_t;

  entry_t [1:0] q;
  logic   [1:0] cnt;
  logic         outstanding, issued, waiting, fire, retire, head_ready, commit;

  assign waiting = outstanding && !obi_rsp_i.rvalid;

  always_comb begin
    obi_req_o       = '0;
    obi_req_o.req   = issue_i && !issued && !waiting;
    obi_req_o.we    = we_i;
    obi_req_o.be    = 4'hF;
    obi_req_o.addr  = {addr_i[31:2], 2'b00};
    obi_req_o.wdata = wdata_i;
  end

  assign fire   = obi_req_o.req && obi_rsp_i.gnt;
  assign retire = issue_i && (fire || issued) && !hold_i;

  // The head entry can commit if its data are held or arrive now (it is then the one in flight).
  assign head_ready = q[0].has_data || (cnt == 2'd1 && outstanding && obi_rsp_i.rvalid);
  assign commit     = cnt != 2'd0 && q[0].retired && head_ready && !hold_i;
  assign stall_o    = (issue_i && !issued && !fire) ||
                      (cnt != 2'd0 && q[0].retired && !head_ready);

  assign load_valid_o = commit && q[0].load;
  assign load_data_o  = q[0].has_data ? q[0].data : obi_rsp_i.rdata;
  assign load_tag_o   = q[0].tag;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      q           <= '0;
      cnt         <= '0;
      outstanding <= 1'b0;
      issued      <= 1'b0;
    end else begin
      entry_t [1:0] nq;
      logic   [1:0] ncnt;
      nq   = q;
      ncnt = cnt;
      if (outstanding && obi_rsp_i.rvalid && ncnt != 2'd0) begin
        nq[ncnt-1].has_data = 1'b1;
        nq[ncnt-1].data     = obi_rsp_i.rdata;
      end
      if (fire) begin
        nq[ncnt[0]] = '{load: !we_i, retired: 1'b0, has_data: 1'b0, tag: tag_i, data: '0};
        ncnt        = ncnt + 1'b1;
      end
      if (retire) nq[ncnt-1].retired = 1'b1;
      if (commit) begin
        nq[0] = nq[1];
        nq[1] = '0;
        ncnt  = ncnt - 1'b1;
      end
      q   <= nq;
      cnt <= ncnt;
      if (fire)                   outstanding <= 1'b1;
      else if (obi_rsp_i.rvalid)  outstanding <= 1'b0;
      issued <= (issued || fire) && hold_i;
    end
  end

  // OBI: address-phase signals are stable while a request waits for its grant.
  a_obi_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    obi_req_o.req && !obi_rsp_i.gnt |=> obi_req_o.req && $stable(obi_req_o.addr)
                                        && $stable(obi_req_o.we) && $stable(obi_req_o.wdata));
  // No response without an outstanding request.
  a_no_spurious: assert property (@(posedge clk_i) disable iff (!rst_ni)
    obi_rsp_i.rvalid |-> outstanding);
  // The queue never overflows.
  a_queue: assert property (@(posedge clk_i) disable iff (!rst_ni)
    fire |-> cnt != 2'd2 || commit);
endmodule
