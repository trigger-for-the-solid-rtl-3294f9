// tb_solid_trigger_top -- end-to-end test of the plane trigger at full size.
//
// The top runs with its default parameters: 64 channels and a 256-sample
// window. Every channel gets its own synthetic SiPM waveform (neutron
// bursts, dark counts, positrons, baseline noise); all channels share the
// valid strobe, which has random gaps. Channels start with alternating
// feature selectors and all selectors are flipped while data flow. Every
// output of every channel is compared after every clock with a reference
// model per channel. The run also counts the mechanisms of the design and
// fails if one never happened: a neutron trigger from Number-of-Peaks, one
// from Time-over-Threshold, a positron trigger, a selector switch that
// changed the reported feature, a stall (valid low) and a window that
// emptied after holding counted samples.
module tb_solid_trigger_top;
  import solid_trig_pkg::*;
  import trig_ref_pkg::*;

  localparam int NC = N_CHAN_DEF;
  localparam int W  = WINDOW_DEF;
  localparam int CW = $clog2(W + 1);
  localparam int CYCLES = 3000;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          valid = 1'b0;
  sample_t       sample [NC];
  chan_cfg_t     cfg [NC];
  logic [CW-1:0] np_value [NC];
  logic [CW-1:0] tot_value [NC];
  logic [CW-1:0] feat_value [NC];
  logic [NC-1:0] n_trig, pos_trig;

  int checks = 0, failures = 0;
  int n_np = 0, n_tot = 0, n_pos = 0, n_switch = 0, n_stall = 0, n_drain = 0;
  bit was_busy [NC];

  solid_trigger_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (CYCLES + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  chan_model m [NC];
  wave_gen   g [NC];
  int        s_now [NC];

  task automatic check(int c, string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("ch %0d %s: got %0d expected %0d", c, what, got, exp);
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      m[c] = new(W);
      g[c] = new();
      cfg[c] = '0;
      cfg[c].theta_np  = sample_t'(35);     // 0.35 PA
      cfg[c].theta_tot = sample_t'(50);     // 0.5 PA
      cfg[c].cut_np    = FEAT_W'(8);
      cfg[c].cut_tot   = FEAT_W'(30);
      cfg[c].theta_pos = sample_t'(2500);   // 25 PA
      cfg[c].feat_sel  = (c % 2 == 0) ? FEAT_NPEAKS : FEAT_TOT;
      sample[c] = '0;
      was_busy[c] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < CYCLES; i++) begin
      bit v;   // each iteration starts at a falling edge
      v = ($urandom_range(0, 9) != 0);
      if (!v) n_stall++;
      if (i == CYCLES / 2)
        for (int c = 0; c < NC; c++)
          cfg[c].feat_sel = (cfg[c].feat_sel == FEAT_TOT) ? FEAT_NPEAKS : FEAT_TOT;
      valid = v;
      for (int c = 0; c < NC; c++) begin
        s_now[c]  = v ? g[c].next(2, 1, 10) : 0;
        sample[c] = sample_t'(s_now[c]);
      end
      @(posedge clk);
      for (int c = 0; c < NC; c++) m[c].step(v, s_now[c], cfg[c]);
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        check(c, "np_value",   int'(np_value[c]),   m[c].np);
        check(c, "tot_value",  int'(tot_value[c]),  m[c].tot);
        check(c, "feat_value", int'(feat_value[c]), m[c].feat_value);
        check(c, "n_trig",     int'(n_trig[c]),     int'(m[c].n_trig));
        check(c, "pos_trig",   int'(pos_trig[c]),   int'(m[c].pos_trig));
        if (n_trig[c] && cfg[c].feat_sel == FEAT_NPEAKS) n_np++;
        if (n_trig[c] && cfg[c].feat_sel == FEAT_TOT)    n_tot++;
        if (pos_trig[c]) n_pos++;
        if (i == CYCLES / 2 + 1 && np_value[c] != tot_value[c]) n_switch++;
        if (tot_value[c] != '0) was_busy[c] = 1;
        else if (was_busy[c]) begin n_drain++; was_busy[c] = 0; end
      end
    end
    $display("neutron triggers (channel-clocks): %0d by peaks, %0d by time over threshold",
             n_np, n_tot);
    $display("positron triggers %0d, selector switches seen %0d, stalls %0d, windows drained %0d",
             n_pos, n_switch, n_stall, n_drain);
    checks += 6;
    if (n_np == 0)     begin failures++; $display("no Number-of-Peaks trigger"); end
    if (n_tot == 0)    begin failures++; $display("no Time-over-Threshold trigger"); end
    if (n_pos == 0)    begin failures++; $display("no positron trigger"); end
    if (n_switch == 0) begin failures++; $display("selector switch not seen"); end
    if (n_stall == 0)  begin failures++; $display("no stall"); end
    if (n_drain == 0)  begin failures++; $display("no window drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
