// nx_eoe: end-of-execution management.
//
// Collects the execution status of every core (done_i: the core executed EXIT) and signals end
// of execution when every core that received micro-code (active_i, from the memory controller)
// is done. It is armed by the array start pulse; eoe_o pulses once, one cycle after the last
// active core finishes, and eoe_flag_o stays set until the host clears it through the memory
// map. An execution with no active core ends at once. The published design shows per-core
// execution status in and EoE out; waiting for the cores that received context only is this
// design's choice.
module nx_eoe #(
  parameter int unsigned N_CORES = 24
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               start_i,
  input  logic [N_CORES-1:0] active_i,
  input  logic [N_CORES-1:0] done_i,
  input  logic               clear_i,
  output logic               eoe_o,
  output logic               eoe_flag_o
);
  logic armed;

  assign eoe_o = armed && ((done_i & active_i) == active_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      armed      <= 1'b0;
      eoe_flag_o <= 1'b0;
    end else begin
      if (start_i)    armed <= 1'b1;
      else if (eoe_o) armed <= 1'b0;
      if (eoe_o)        eoe_flag_o <= 1'b1;
      else if (clear_i || start_i) eoe_flag_o <= 1'b0;
    end
  end
endmodule
