// tb_sliding_window_counter -- self-checking test of the sliding window sum.
//
// A 16-sample window is fed random flags with random gaps in valid. After
// every edge the count is compared with the number of ones among the last 16
// accepted flags, summed afresh from a list of all flags. Directed phases fill
// the window completely (count must reach exactly 16), drain it (count must
// return to 0 exactly 16 accepted samples later) and hold it through a long
// valid gap (count must not move). A mid-run reset must clear the count.
module tb_sliding_window_counter;
  localparam int W  = 16;
  localparam int CW = $clog2(W + 1);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          valid = 1'b0;
  logic          flag_in = 1'b0;
  logic [CW-1:0] count;

  int checks = 0, failures = 0;
  bit hist[$];

  sliding_window_counter #(.WINDOW(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected();
    int s = 0;
    for (int i = 0; i < W && i < hist.size(); i++) s += hist[hist.size() - 1 - i];
    return s;
  endfunction

  task automatic cycle(bit v, bit f);
    // called at a falling edge
    valid = v; flag_in = f;
    @(posedge clk);
    if (v) hist.push_back(f);
    @(negedge clk);
    checks++;
    if (int'(count) != expected()) begin
      failures++;
      $display("mismatch: count=%0d expected=%0d", count, expected());
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // random traffic
    repeat (2000) cycle($urandom_range(0, 3) != 0, $urandom_range(0, 1) == 1);
    // fill completely
    repeat (W + 4) cycle(1'b1, 1'b1);
    checks++;
    if (int'(count) != W) begin failures++; $display("full window: %0d", count); end
    // valid gap: nothing may change
    repeat (50) cycle(1'b0, 1'b0);
    checks++;
    if (int'(count) != W) begin failures++; $display("gap moved count: %0d", count); end
    // drain: W-1 zeros leave one flag, the W-th empties the window
    repeat (W - 1) cycle(1'b1, 1'b0);
    checks++;
    if (int'(count) != 1) begin failures++; $display("drain W-1: %0d", count); end
    cycle(1'b1, 1'b0);
    checks++;
    if (int'(count) != 0) begin failures++; $display("drain W: %0d", count); end
    // reset in the middle of traffic
    repeat (30) cycle(1'b1, $urandom_range(0, 1) == 1);
    @(negedge clk) rst_n = 1'b0;
    @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    hist.delete();
    checks++;
    if (count != '0) begin failures++; $display("reset did not clear"); end
    repeat (500) cycle($urandom_range(0, 3) != 0, $urandom_range(0, 1) == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
