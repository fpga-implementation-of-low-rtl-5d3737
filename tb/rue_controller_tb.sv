// rue_controller_tb -- self-checking test of the per-sample sequencer.
//
// Plays both stages and the output control with simple models: each stage
// answers its start with a done pulse after a random delay, and the output
// control stays busy for a random time after a load. Checks that in_ready is
// high only in IDLE, that push and ps_start come together with an accepted
// sample, that ml_start follows ps_done, that oc_load follows ml_done only
// when the output control is free, and that every sample produces exactly
// one load.
module rue_controller_tb;
  import rue_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, push, ps_start, ps_done, ml_start, ml_done, oc_load, oc_busy;
  ctrl_state_t state;

  rue_controller dut (.clk, .rst_n, .in_valid, .in_ready, .push, .ps_start, .ps_done,
                      .ml_start, .ml_done, .oc_load, .oc_busy, .state);

  int ps_cnt, ml_cnt, oc_cnt;
  int accepted = 0, loads = 0, ps_started = 0, ml_started = 0, stalls = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stage models
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ps_cnt <= 0; ml_cnt <= 0; oc_cnt <= 0;
      ps_done <= 0; ml_done <= 0; oc_busy <= 0;
    end else begin
      ps_done <= (ps_cnt == 1);
      ml_done <= (ml_cnt == 1);
      if (ps_start) ps_cnt <= $urandom_range(2, 6); else if (ps_cnt > 0) ps_cnt <= ps_cnt - 1;
      if (ml_start) ml_cnt <= $urandom_range(2, 6); else if (ml_cnt > 0) ml_cnt <= ml_cnt - 1;
      if (oc_load) begin oc_busy <= 1; oc_cnt <= $urandom_range(0, 12); end
      else if (oc_cnt > 0) oc_cnt <= oc_cnt - 1;
      else oc_busy <= 0;
    end
  end

  // protocol checks on every cycle
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (in_ready != (state == ST_IDLE)) begin failures++; $display("FAIL in_ready outside IDLE"); end
    checks++;
    if ((push != (in_valid && in_ready)) || (ps_start != push)) begin
      failures++; $display("FAIL push/ps_start mismatch");
    end
    checks++;
    if (ml_start != (state == ST_PRESUM && ps_done)) begin failures++; $display("FAIL ml_start"); end
    checks++;
    if (oc_load && oc_busy) begin failures++; $display("FAIL load while output busy"); end
    if (state == ST_OUTPUT && oc_busy) stalls++;
    if (push) accepted++;
    if (oc_load) loads++;
    if (ps_start) ps_started++;
    if (ml_start) ml_started++;
  end

  initial begin
    in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
    end
    in_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (accepted != loads || ps_started != accepted || ml_started != accepted) begin
      failures++;
      $display("FAIL accepted %0d, pre-sum %0d, Horner %0d, loads %0d", accepted, ps_started,
               ml_started, loads);
    end
    checks++;
    if (accepted < 50 || stalls == 0) begin
      failures++; $display("FAIL too little activity: %0d samples, %0d stall cycles", accepted, stalls);
    end
    $display("samples %0d, output stall cycles %0d", accepted, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
