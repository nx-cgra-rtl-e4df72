// nx_gec: global execution controller.
//
// Sequences one execution of the array. An execution trigger (from the memory map) while idle
// raises context-fetch enable to the memory controller and waits until the controller is no
// longer busy; it then pulses start to the array and waits for end of execution from the
// end-of-execution management, after which it returns to idle. array_clk_en_o enables the
// subsystem clock gate of the array from the fetch until end of execution, so an idle array
// draws no clock. status_o = {running, fetching} and the cycle count of the last run go to the
// memory map. The published design gives the controller's connections (trigger, busy, context
// fetch enable, execution status); the state sequence is this design's own.
module nx_gec (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        trigger_i,
  output logic        fetch_en_o,
  input  logic        mc_busy_i,
  input  logic        mc_done_i,
  output logic        start_o,
  input  logic        eoe_i,
  output logic        array_clk_en_o,
  output logic        busy_o,
  output logic        fetching_o,
  output logic [31:0] cycles_o
);
  typedef enum logic [1:0] {G_IDLE, G_FETCH, G_START, G_RUN} gstate_e;
  gstate_e state;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state    <= G_IDLE;
      cycles_o <= '0;
    end else begin
      unique case (state)
        G_IDLE:  if (trigger_i) state <= G_FETCH;
        G_FETCH: if (mc_done_i || (!mc_busy_i && !fetch_en_o)) state <= G_START;
        G_START: begin
          state    <= G_RUN;
          cycles_o <= '0;
        end
        G_RUN: begin
          cycles_o <= cycles_o + 1'b1;
          if (eoe_i) state <= G_IDLE;
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  // Fetch enable is a one-cycle pulse on entering G_FETCH.
  logic fetch_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) fetch_q <= 1'b0;
    else         fetch_q <= state == G_IDLE && trigger_i;
  end

  assign fetch_en_o     = fetch_q;
  assign start_o        = state == G_START;
  assign busy_o         = state != G_IDLE;
  assign fetching_o     = state == G_FETCH;
  assign array_clk_en_o = state != G_IDLE;
endmodule
