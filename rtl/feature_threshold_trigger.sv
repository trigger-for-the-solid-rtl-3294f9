// feature_threshold_trigger -- neutron trigger decision of one channel.
//
// The trigger features are so strongly correlated that combining them brings
// no gain, so the decision is a single threshold on one feature value. Both
// features are computed; feat_sel chooses which one is compared with its
// own cut. The neutron trigger is raised while the chosen feature exceeds
// the cut. Selecting between the two features and keeping a separate cut for
// each is this design's own arrangement; the paper states only that both
// features are built and that a threshold on the feature value decides.
//
// Interface: np_value and tot_value are the registered feature outputs of the
// same channel; cut_np, cut_tot and feat_sel are calibration settings.
// n_trig and value (the chosen feature) are registered, one clock after the
// feature values. The decision is strict (feature > cut), matching the
// strict comparisons of the feature definitions.
module feature_threshold_trigger
  import solid_trig_pkg::*;
#(
  parameter int unsigned CNT_W = FEAT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] np_value,
  input  logic [CNT_W-1:0] tot_value,
  input  logic [CNT_W-1:0] cut_np,
  input  logic [CNT_W-1:0] cut_tot,
  input  feat_sel_e        feat_sel,
  output logic [CNT_W-1:0] value,
  output logic             n_trig
);

  logic [CNT_W-1:0] sel_value, sel_cut;

  always_comb begin
    unique case (feat_sel)
      FEAT_TOT: begin sel_value = tot_value; sel_cut = cut_tot; end
      default:  begin sel_value = np_value;  sel_cut = cut_np;  end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      value  <= '0;
      n_trig <= 1'b0;
    end else begin
      value  <= sel_value;
      n_trig <= (sel_value > sel_cut);
    end
  end

endmodule
