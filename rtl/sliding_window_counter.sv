// sliding_window_counter -- number of flagged samples among the last WINDOW.
//
// Both trigger features of the paper are counts over a window of samples:
// Number-of-Peaks counts the samples that close a peak, Time-over-Threshold
// counts the samples above a threshold. This block does the counting for
// either. It keeps the last WINDOW flags in a shift register and a running
// sum: each accepted sample adds its own flag and removes the flag of the
// sample that falls out of the window, so the count needs one adder-
// subtractor and no re-summing.
//
// The paper defines the features over "a time window" of 256 samples but not
// how windows follow each other. Here the window slides by one sample, so a
// fresh feature value exists after every sample; that choice is this
// design's own. Before WINDOW samples have been seen the missing ones count
// as unflagged.
//
// Interface: flag_in is taken when valid is high. count is registered: after
// the clock edge that takes sample t, count holds the number of flags among
// samples t-WINDOW+1 .. t. Reset is synchronous and active low (as in
// every block of this design) and clears the window.
module sliding_window_counter #(
  parameter int unsigned WINDOW = 256,
  parameter int unsigned CNT_W  = $clog2(WINDOW + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             flag_in,
  output logic [CNT_W-1:0] count
);

  logic [WINDOW-1:0] flags;    // flags[0] newest, flags[WINDOW-1] oldest
  logic              leaving;

  assign leaving = flags[WINDOW-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      flags <= '0;
      count <= '0;
    end else if (valid) begin
      flags <= {flags[WINDOW-2:0], flag_in};
      count <= count + CNT_W'(flag_in) - CNT_W'(leaving);
    end
  end

  // The running sum can never exceed the window length.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= CNT_W'(WINDOW));

endmodule
