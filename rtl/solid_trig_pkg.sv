// solid_trig_pkg -- shared constants and types of the SoLid plane trigger.
//
// One detector plane is read out by 64 SiPM channels. Every channel delivers
// a stream of baseline-subtracted waveform samples (one sample about every
// 20 ns) and is watched by its own channel trigger. The trigger looks at a
// window of 256 samples, the window length the algorithm study used.
//
// From the paper: 64 channels per plane, 256-sample window, a threshold
// theta per feature and one threshold on the feature value.
// Own choices: 14-bit signed samples (the sample format is not given), one
// configuration record per channel so that each channel can be calibrated on
// its own, and the encoding of the feature selector.
package solid_trig_pkg;

  // Channels per plane (64 SiPMs are read out per plane).
  localparam int unsigned N_CHAN_DEF   = 64;
  // Window length in samples ("the usual window size of 256 samples").
  localparam int unsigned WINDOW_DEF   = 256;
  // Sample width: own choice, signed because samples are baseline subtracted.
  localparam int unsigned SAMPLE_W     = 14;
  // Width of a feature value: it must hold 0..WINDOW_DEF.
  localparam int unsigned FEAT_W       = $clog2(WINDOW_DEF + 1);

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic        [FEAT_W-1:0]   feat_t;

  // Which feature drives the neutron trigger. Only one feature is used at a
  // time: the features are strongly correlated, so a second one adds little.
  typedef enum logic {
    FEAT_NPEAKS = 1'b0,   // Number-of-Peaks
    FEAT_TOT    = 1'b1    // Time-over-Threshold
  } feat_sel_e;

  // Calibration record of one channel.
  typedef struct packed {
    sample_t   theta_np;   // sample threshold of Number-of-Peaks
    sample_t   theta_tot;  // sample threshold of Time-over-Threshold
    feat_t     cut_np;     // trigger when Number-of-Peaks exceeds this
    feat_t     cut_tot;    // trigger when Time-over-Threshold exceeds this
    sample_t   theta_pos;  // amplitude threshold of the positron trigger
    feat_sel_e feat_sel;   // feature that drives the neutron trigger
  } chan_cfg_t;

endpackage
