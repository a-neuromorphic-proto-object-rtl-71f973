// tb_stage_sequencer -- checks the stage order P2..P6, the wait for the host
// masks and P7, the one-cycle stage_start pulse on entry to each computing
// stage, that a stage only ends when all the units it needs have reported
// (done bits may arrive in different cycles), that start is ignored while
// running, and the bo_ready / grp_done outputs.
module tb_stage_sequencer;
  import podvs_pkg::*;
  logic clk = 0, rst_n = 1, start = 0, grp_start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic [2:0] unit_done = '0;
  stage_t stage;
  logic stage_start, bo_ready, grp_done;
  int checks = 0, failures = 0;
  int starts = 0;
  // grp_done pulses once, on the return to idle
  int gd = 0;
  always @(posedge clk) if (grp_done) gd++;

  stage_sequencer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (stage_start) starts++;

  task automatic expect_stage(stage_t s, string what);
    checks++;
    if (stage !== s) begin failures++; $display("%s: stage %s, expected %s", what, stage.name(), s.name()); end
  endtask

  task automatic pulse_done(logic [2:0] bits);
    unit_done = bits; @(negedge clk); unit_done = '0; @(negedge clk);
  endtask

  task automatic run_stage(stage_t s, stage_t nxt, logic [2:0] need);
    int s0 = starts;
    expect_stage(s, "enter");
    // report all but the highest needed unit, then that one
    for (int b = 0; b < 3; b++)
      if (need[b] && (need >> (b + 1)) != 0) pulse_done(3'(1 << b));
    expect_stage(s, "partial done holds");
    start = 1; @(negedge clk); start = 0;         // ignored while running
    expect_stage(s, "start ignored");
    for (int b = 2; b >= 0; b--)
      if (need[b]) begin pulse_done(3'(1 << b)); break; end
    expect_stage(nxt, "advance");
    @(negedge clk);
    checks++;
    if (nxt != ST_MASK && nxt != ST_IDLE && starts != s0 + 1) begin
      failures++; $display("no single stage_start for %s", nxt.name());
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    expect_stage(ST_IDLE, "reset");
    pulse_done(3'b111);                           // stray done in idle
    expect_stage(ST_IDLE, "idle ignores done");
    start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    checks++; if (starts != 1) begin failures++; $display("no start pulse for P2"); end
    run_stage(ST_DOWN,  ST_EDGE,  3'b110);
    run_stage(ST_EDGE,  ST_VMF,   3'b111);
    run_stage(ST_VMF,   ST_VMSUM, 3'b111);
    run_stage(ST_VMSUM, ST_BO,    3'b001);
    run_stage(ST_BO,    ST_MASK,  3'b111);
    checks++; if (!bo_ready) begin failures++; $display("bo_ready low in ST_MASK"); end
    repeat (5) @(negedge clk);
    expect_stage(ST_MASK, "waits for host");
    grp_start = 1; @(negedge clk); grp_start = 0;
    @(negedge clk);
    run_stage(ST_GROUP, ST_IDLE, 3'b111);
    checks++; if (gd != 1) begin failures++; $display("grp_done pulsed %0d times", gd); end
    checks++; if (starts != 6) begin failures++; $display("%0d stage starts, expected 6", starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
