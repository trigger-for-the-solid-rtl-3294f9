// npeaks_feature -- Number-of-Peaks feature of one channel.
//
// Each photon emitted by the neutron-capture layer leaves a peak on the SiPM
// waveform, so a neutron gives many peaks within a few microseconds while a
// dark count gives one or two. The feature is the number of peaks above a
// threshold theta within the window. Following the paper's definition, a
// sample X[t] marks a peak when
//     X[t] > theta  and  X[t-1] >= X[t-2]  and  X[t] < X[t-1],
// i.e. the signal has stopped rising at t-1 and falls at t while still above
// theta. The comparisons need only the two previous samples, kept in two
// registers; the flags are summed by a sliding_window_counter.
//
// Own choices: the window slides by one sample (see sliding_window_counter);
// the two history registers start at zero after reset, so the first samples
// are compared with a flat baseline.
//
// Interface: one sample is taken on each clock edge with valid high; theta
// must be stable while the stream runs. feature is registered and valid one
// clock after the sample that completes the window.
module npeaks_feature
  import solid_trig_pkg::*;
#(
  parameter int unsigned WINDOW = WINDOW_DEF,
  parameter int unsigned CNT_W  = $clog2(WINDOW + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  sample_t          sample,
  input  sample_t          theta,
  output logic [CNT_W-1:0] feature
);

  sample_t x1, x2;     // X[t-1] and X[t-2]
  logic    peak;

  // Peak condition of the paper, evaluated for the incoming sample X[t].
  assign peak = (sample > theta) && (x1 >= x2) && (sample < x1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x1 <= '0;
      x2 <= '0;
    end else if (valid) begin
      x1 <= sample;
      x2 <= x1;
    end
  end

  sliding_window_counter #(.WINDOW(WINDOW), .CNT_W(CNT_W)) u_win (
    .clk     (clk),
    .rst_n   (rst_n),
    .valid   (valid),
    .flag_in (peak),
    .count   (feature)
  );

endmodule
