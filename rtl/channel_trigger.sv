// channel_trigger -- complete trigger of one SiPM channel.
//
// The sample stream of one channel feeds, in parallel, the Number-of-Peaks
// and the Time-over-Threshold feature extractors (each with its own sample
// threshold), the neutron decision (a threshold on the selected feature)
// and the positron amplitude trigger. These are the parts the paper built
// into the firmware, 64 times per plane; how they are grouped into one
// channel, and the per-channel calibration record cfg, are this design's
// own choice.
//
// Timing: a sample taken at clock edge k shows in np_value / tot_value and
// pos_trig after edge k, and in feat_value / n_trig after edge k+1.
module channel_trigger
  import solid_trig_pkg::*;
#(
  parameter int unsigned WINDOW = WINDOW_DEF,
  parameter int unsigned CNT_W  = $clog2(WINDOW + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  sample_t          sample,
  input  chan_cfg_t        cfg,
  output logic [CNT_W-1:0] np_value,
  output logic [CNT_W-1:0] tot_value,
  output logic [CNT_W-1:0] feat_value,
  output logic             n_trig,
  output logic             pos_trig
);

  npeaks_feature #(.WINDOW(WINDOW), .CNT_W(CNT_W)) u_np (
    .clk, .rst_n, .valid, .sample,
    .theta   (cfg.theta_np),
    .feature (np_value)
  );

  tot_feature #(.WINDOW(WINDOW), .CNT_W(CNT_W)) u_tot (
    .clk, .rst_n, .valid, .sample,
    .theta   (cfg.theta_tot),
    .feature (tot_value)
  );

  feature_threshold_trigger #(.CNT_W(CNT_W)) u_ntrig (
    .clk, .rst_n,
    .np_value,
    .tot_value,
    .cut_np    (CNT_W'(cfg.cut_np)),
    .cut_tot   (CNT_W'(cfg.cut_tot)),
    .feat_sel  (cfg.feat_sel),
    .value     (feat_value),
    .n_trig
  );

  positron_trigger u_pos (
    .clk, .rst_n, .valid, .sample,
    .theta_pos (cfg.theta_pos),
    .pos_trig
  );

endmodule
