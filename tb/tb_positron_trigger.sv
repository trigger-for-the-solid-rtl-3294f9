// tb_positron_trigger -- self-checking test of the amplitude trigger.
//
// Random samples, thresholds and valid; one clock later pos_trig must be
// (valid and sample > theta_pos). Directed checks: equal to the threshold
// does not fire, one count above does, and an invalid sample never fires.
module tb_positron_trigger;
  import solid_trig_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    valid = 1'b0;
  sample_t sample = '0;
  sample_t theta_pos = '0;
  logic    pos_trig;

  int checks = 0, failures = 0, fired = 0;

  positron_trigger dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(bit v, int s, int th);
    bit e;
    @(negedge clk);
    valid = v; sample = sample_t'(s); theta_pos = sample_t'(th);
    e = v && (s > th);
    @(negedge clk);
    checks++;
    if (pos_trig != e) begin
      failures++;
      $display("pos_trig %0b for valid %0b sample %0d theta %0d", pos_trig, v, s, th);
    end
    if (pos_trig) fired++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    apply(1, 3000, 3000);
    apply(1, 3001, 3000);
    apply(0, 8000, 3000);
    apply(1, -100, -200);
    for (int i = 0; i < 3000; i++)
      apply($urandom_range(0, 3) != 0, int'($urandom_range(0, 16383)) - 8192,
            int'($urandom_range(0, 16383)) - 8192);
    checks++;
    if (fired == 0) begin failures++; $display("never fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
