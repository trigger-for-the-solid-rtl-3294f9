// tb_feature_threshold_trigger -- self-checking test of the neutron decision.
//
// Random feature values, cuts and selector settings are applied; one clock
// later value must equal the selected feature and n_trig must be
// (selected feature > selected cut). Directed checks cover the boundary
// (feature equal to the cut gives no trigger, one above does) for both
// selector settings.
module tb_feature_threshold_trigger;
  import solid_trig_pkg::*;

  localparam int CW = FEAT_W;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic [CW-1:0] np_value = '0, tot_value = '0, cut_np = '0, cut_tot = '0;
  feat_sel_e     feat_sel = FEAT_NPEAKS;
  logic [CW-1:0] value;
  logic          n_trig;

  int checks = 0, failures = 0;
  int fired_np = 0, fired_tot = 0;

  feature_threshold_trigger dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int np, int tot, int cnp, int ctot, feat_sel_e sel);
    int ev, ec;
    @(negedge clk);
    np_value = CW'(np); tot_value = CW'(tot); cut_np = CW'(cnp); cut_tot = CW'(ctot);
    feat_sel = sel;
    ev = (sel == FEAT_TOT) ? tot : np;
    ec = (sel == FEAT_TOT) ? ctot : cnp;
    @(negedge clk);
    checks += 2;
    if (int'(value) != ev) begin failures++; $display("value %0d expected %0d", value, ev); end
    if (n_trig != (ev > ec)) begin
      failures++;
      $display("n_trig %0b for value %0d cut %0d sel %s", n_trig, ev, ec, sel.name());
    end
    if (n_trig && sel == FEAT_TOT) fired_tot++;
    if (n_trig && sel == FEAT_NPEAKS) fired_np++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    apply(10, 200, 10, 0, FEAT_NPEAKS);   // equal: no trigger
    apply(11, 0, 10, 255, FEAT_NPEAKS);   // one above
    apply(200, 40, 0, 40, FEAT_TOT);      // equal: no trigger
    apply(0, 41, 255, 40, FEAT_TOT);      // one above
    for (int i = 0; i < 3000; i++)
      apply($urandom_range(0, 256), $urandom_range(0, 256), $urandom_range(0, 256),
            $urandom_range(0, 256), $urandom_range(0, 1) ? FEAT_TOT : FEAT_NPEAKS);
    checks++;
    if (fired_np == 0 || fired_tot == 0) begin failures++; $display("a feature never fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
