// tot_feature -- Time-over-Threshold feature of one channel.
//
// The neutron-capture light lasts about a microsecond while noise and dark
// counts are short, so the number of samples above a threshold theta within
// the window separates them. Following the paper's definition the feature is
// the sum over the window of delta[t], with delta[t] = 1 when X[t] > theta.
// A comparator makes delta and a sliding_window_counter sums it.
//
// Own choice: the window slides by one sample (see sliding_window_counter).
//
// Interface: one sample is taken on each clock edge with valid high; theta
// must be stable while the stream runs. feature is registered and valid one
// clock after the sample that completes the window.
module tot_feature
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

  logic over;

  assign over = (sample > theta);

  sliding_window_counter #(.WINDOW(WINDOW), .CNT_W(CNT_W)) u_win (
    .clk     (clk),
    .rst_n   (rst_n),
    .valid   (valid),
    .flag_in (over),
    .count   (feature)
  );

endmodule
