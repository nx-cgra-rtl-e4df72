// nx_sleep_unit: core sleep unit of a PE or MOB.
//
// A core sleeps from reset until the execution controller starts the array, and again from
// the cycle its micro-code executes EXIT until the next start. While asleep it drives the
// clock-gate enable low, except while the memory controller is writing the core's register
// files (cfg_active_i), which needs the clock. done_o is the core's execution status that the
// end-of-execution management collects. It runs on the ungated clock.
// The published design names the unit only; wake on start and sleep on exit are this design's
// choice.
module nx_sleep_unit (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic start_i,       // array start pulse (from the global execution controller)
  input  logic exit_i,        // core executed EXIT this cycle
  input  logic cfg_active_i,  // configuration write to this core in progress
  output logic awake_o,       // core executes micro-code
  output logic done_o,        // core executed EXIT since the last start
  output logic clk_en_o       // enable of the core's clock gate
);
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      awake_o <= 1'b0;
      done_o  <= 1'b0;
    end else if (start_i) begin
      awake_o <= 1'b1;
      done_o  <= 1'b0;
    end else if (exit_i && awake_o) begin
      awake_o <= 1'b0;
      done_o  <= 1'b1;
    end
  end

  // The start pulse must reach the core's registers in the same edge (pc reset).
  assign clk_en_o = awake_o | start_i | cfg_active_i;
endmodule
