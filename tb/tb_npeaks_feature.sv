// tb_npeaks_feature -- self-checking test of the Number-of-Peaks feature.
//
// Directed part, window of 32 samples, theta = 200 counts, results worked
// out by hand from the peak definition:
//   0, 500, 300            one peak (counted at the falling sample 300)
//   0, 500, 500, 300       one peak on a plateau (X[t-1] >= X[t-2] holds)
//   0, 500, 100            no peak: the falling sample is below theta
//   0, 150, 120            no peak: below theta altogether
// followed by 32 low samples, after which the window must be empty again.
// Random part: synthetic neutron bursts and dark counts with gaps in valid,
// each output checked against the reference model of trig_ref_pkg.
module tb_npeaks_feature;
  import solid_trig_pkg::*;
  import trig_ref_pkg::*;

  localparam int W  = 32;
  localparam int CW = $clog2(W + 1);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          valid = 1'b0;
  sample_t       sample = '0;
  sample_t       theta = sample_t'(200);
  logic [CW-1:0] feature;

  int checks = 0, failures = 0;
  int peaks_seen = 0;

  npeaks_feature #(.WINDOW(W)) dut (.*);

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
    if (int'(feature) != m.np) begin
      failures++;
      $display("mismatch: feature=%0d expected=%0d", feature, m.np);
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
    cfg.theta_np = sample_t'(200);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    push(1, 0); push(1, 500); push(1, 300);            expect_value(1, "simple peak");
    push(1, 0); push(1, 500); push(1, 500); push(1, 300); expect_value(2, "plateau peak");
    push(1, 0); push(1, 500); push(1, 100);            expect_value(2, "fall below theta");
    push(1, 0); push(1, 150); push(1, 120);            expect_value(2, "below theta");
    repeat (W) push(1, 0);                             expect_value(0, "window drained");

    for (int i = 0; i < 6000; i++) begin
      bit v;
      v = ($urandom_range(0, 7) != 0);
      push(v, v ? g.next(20, 0, 20) : 0);
      if (int'(feature) > peaks_seen) peaks_seen = int'(feature);
    end
    checks++;
    if (peaks_seen < 5) begin failures++; $display("no neutron-like peak trains seen"); end
    $display("largest peak count %0d, neutrons %0d", peaks_seen, g.n_neutron);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
