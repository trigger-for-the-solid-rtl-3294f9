// tb_tot_feature -- self-checking test of the Time-over-Threshold feature.
//
// Directed part, window of 32 samples, theta = 50 counts: ten samples of 51
// give 10, a sample equal to theta does not count, 32 low samples empty the
// window, and 40 samples above theta saturate the feature at 32. Random part:
// synthetic neutron bursts, dark counts and positrons with gaps in valid,
// each output checked against the reference model of trig_ref_pkg.
module tb_tot_feature;
  import solid_trig_pkg::*;
  import trig_ref_pkg::*;

  localparam int W  = 32;
  localparam int CW = $clog2(W + 1);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          valid = 1'b0;
  sample_t       sample = '0;
  sample_t       theta = sample_t'(50);
  logic [CW-1:0] feature;

  int checks = 0, failures = 0;

  tot_feature #(.WINDOW(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  chan_model m;
  chan_cfg_t cfg;

  task automatic push(bit v, int s);
    // called at a falling edge
    valid = v; sample = sample_t'(s);
    @(posedge clk);
    m.step(v, s, cfg);
    @(negedge clk);
    checks++;
    if (int'(feature) != m.tot) begin
      failures++;
      $display("mismatch: feature=%0d expected=%0d", feature, m.tot);
    end
  endtask

  task automatic expect_value(int e, string what);
    checks++;
    if (int'(feature) != e) begin
      failures++;
      $display("%s: feature=%0d expected=%0d", what, feature, e);
    end
  endtask

  initial begin
    wave_gen g;
    m   = new(W);
    g   = new();
    cfg = '0;
    cfg.theta_tot = sample_t'(50);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    repeat (10) push(1, 51);   expect_value(10, "ten over");
    push(1, 50);               expect_value(10, "equal to theta");
    push(0, 900);              expect_value(10, "invalid sample");
    repeat (W) push(1, -20);   expect_value(0, "window drained");
    repeat (40) push(1, 4000); expect_value(W, "saturated window");

    for (int i = 0; i < 6000; i++) begin
      bit v;
      v = ($urandom_range(0, 7) != 0);
      push(v, v ? g.next(20, 5, 20) : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
