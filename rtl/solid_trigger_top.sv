// solid_trigger_top -- trigger logic of one SoLid detector plane.
//
// A plane is read out by 64 SiPMs. Each channel has its own channel_trigger:
// Number-of-Peaks and Time-over-Threshold feature extraction over a sliding
// window of 256 samples, a threshold on the selected feature as neutron
// trigger, and an amplitude threshold as positron trigger. The outputs are
// one neutron and one positron trigger bit per channel, plus the feature
// values for the read-out.
//
// The channel count and window length follow the paper. The parts of the
// firmware around the trigger -- sample buffering, the links to other planes
// and to the data acquisition, the IPbus control bus and the SiPM slow
// control -- are not part of this design: the calibration records come in
// on the cfg port, where a control bus would drive them, and the trigger
// bits leave on ports, where the buffering and read-out logic would take
// them. All channels are sampled together, so one valid strobe serves them
// all (own choice).
//
// Timing: see channel_trigger; every channel has the same latency.
module solid_trigger_top
  import solid_trig_pkg::*;
#(
  parameter int unsigned N_CHAN = N_CHAN_DEF,
  parameter int unsigned WINDOW = WINDOW_DEF,
  parameter int unsigned CNT_W  = $clog2(WINDOW + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  sample_t          sample     [N_CHAN],
  input  chan_cfg_t        cfg        [N_CHAN],
  output logic [CNT_W-1:0] np_value   [N_CHAN],
  output logic [CNT_W-1:0] tot_value  [N_CHAN],
  output logic [CNT_W-1:0] feat_value [N_CHAN],
  output logic [N_CHAN-1:0] n_trig,
  output logic [N_CHAN-1:0] pos_trig
);

  for (genvar c = 0; c < N_CHAN; c++) begin : g_chan
    channel_trigger #(.WINDOW(WINDOW), .CNT_W(CNT_W)) u_chan (
      .clk, .rst_n, .valid,
      .sample     (sample[c]),
      .cfg        (cfg[c]),
      .np_value   (np_value[c]),
      .tot_value  (tot_value[c]),
      .feat_value (feat_value[c]),
      .n_trig     (n_trig[c]),
      .pos_trig   (pos_trig[c])
    );
  end

endmodule
