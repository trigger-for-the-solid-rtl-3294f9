// tb_channel_trigger -- self-checking test of one complete channel trigger.
//
// A 32-sample window channel is driven with a synthetic SiPM waveform
// (neutron bursts, dark counts, positrons, baseline noise) with random gaps
// in valid. All five outputs are compared after every clock with the
// reference model of trig_ref_pkg. Halfway through, the feature selector is
// switched from Number-of-Peaks to Time-over-Threshold while data flow. The
// test counts neutron triggers under each selector and positron triggers,
// and fails if any of them never happened.
module tb_channel_trigger;
  import solid_trig_pkg::*;
  import trig_ref_pkg::*;

  localparam int W  = 32;
  localparam int CW = $clog2(W + 1);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          valid = 1'b0;
  sample_t       sample = '0;
  chan_cfg_t     cfg;
  logic [CW-1:0] np_value, tot_value, feat_value;
  logic          n_trig, pos_trig;

  int checks = 0, failures = 0;
  int n_np = 0, n_tot = 0, n_pos = 0;

  channel_trigger #(.WINDOW(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  chan_model m;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic push(bit v, int s);
    // called at a falling edge
    valid = v; sample = sample_t'(s);
    @(posedge clk);
    m.step(v, s, cfg);
    @(negedge clk);
    check("np_value",   int'(np_value),   m.np);
    check("tot_value",  int'(tot_value),  m.tot);
    check("feat_value", int'(feat_value), m.feat_value);
    check("n_trig",     int'(n_trig),     int'(m.n_trig));
    check("pos_trig",   int'(pos_trig),   int'(m.pos_trig));
    if (n_trig && cfg.feat_sel == FEAT_NPEAKS) n_np++;
    if (n_trig && cfg.feat_sel == FEAT_TOT)    n_tot++;
    if (pos_trig) n_pos++;
  endtask

  initial begin
    wave_gen g;
    m = new(W);
    g = new();
    cfg = '0;
    cfg.theta_np  = sample_t'(35);
    cfg.theta_tot = sample_t'(50);
    cfg.cut_np    = FEAT_W'(6);
    cfg.cut_tot   = FEAT_W'(15);
    cfg.theta_pos = sample_t'(2500);
    cfg.feat_sel  = FEAT_NPEAKS;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 8000; i++) begin
      bit v;
      v = ($urandom_range(0, 9) != 0);
      if (i == 4000) cfg.feat_sel = FEAT_TOT;
      push(v, v ? g.next(8, 3, 10) : 0);
    end
    $display("neutron triggers: %0d (peaks) %0d (time over threshold), positron %0d",
             n_np, n_tot, n_pos);
    checks++;
    if (n_np == 0 || n_tot == 0 || n_pos == 0) begin
      failures++;
      $display("a trigger type never fired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
