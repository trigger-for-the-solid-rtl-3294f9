// positron_trigger -- amplitude threshold trigger of one channel.
//
// The positron of an inverse beta decay gives a short (~100 ns), intense
// light pulse in the plastic cube, far above the neutron signal, so a plain
// threshold on the sample value finds it. pos_trig is high for one clock for
// every accepted sample above theta_pos. That the trigger is a threshold on
// the signal follows the paper; the strict comparison and the one-clock
// pulse per sample are this design's choice.
//
// Interface: sample is taken when valid is high. pos_trig is registered, one
// clock after the sample, the same latency as the feature values.
module positron_trigger
  import solid_trig_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    valid,
  input  sample_t sample,
  input  sample_t theta_pos,
  output logic    pos_trig
);

  always_ff @(posedge clk) begin
    if (!rst_n) pos_trig <= 1'b0;
    else        pos_trig <= valid && (sample > theta_pos);
  end

endmodule
