// output_control_tb -- self-checking test of the output stage.
//
// Loads random results with random shifts, holds out_ready low for random
// stretches, and checks: out_valid one cycle after load; the value equals
// saturate16(y >>> shift) computed here; the value and out_valid hold while
// out_ready is low; busy equals out_valid; and a sample is taken exactly
// once. Large results with small shifts exercise the saturation.
module output_control_tb;
  localparam int AW = 26;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_sat = 0;

  logic load, busy, out_valid, out_ready;
  logic signed [AW-1:0] y_re, y_im;
  logic [4:0] shift;
  logic signed [15:0] out_re, out_im;

  output_control #(.ACC_W(AW), .OUT_W(16)) dut (
    .clk, .rst_n, .load, .y_re, .y_im, .shift, .busy, .out_valid, .out_ready, .out_re, .out_im);

  function automatic longint sat16(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint er, ei;
    int wait_cycles;
    load = 0; out_ready = 0; y_re = '0; y_im = '0; shift = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (out_valid || busy) begin failures++; $display("FAIL valid after reset"); end
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      y_re  = AW'(longint'($urandom_range(0, 1 << 25)) - (1 << 24));
      y_im  = AW'(longint'($urandom_range(0, 1 << 25)) - (1 << 24));
      shift = 5'($urandom_range(0, 12));
      er = sat16(longint'(y_re), int'(shift));
      ei = sat16(longint'(y_im), int'(shift));
      if (er == 32767 || er == -32768 || ei == 32767 || ei == -32768) n_sat++;
      load = 1;
      out_ready = 0;
      @(negedge clk);
      load = 0;
      y_re = '0;  // the stage must have registered the value
      checks++;
      if (!out_valid || !busy) begin failures++; $display("FAIL no out_valid after load"); end
      checks++;
      if (longint'(out_re) != er || longint'(out_im) != ei) begin
        failures++;
        $display("FAIL n=%0d got (%0d,%0d) expected (%0d,%0d)", n, out_re, out_im, er, ei);
      end
      wait_cycles = $urandom_range(0, 4);
      repeat (wait_cycles) begin
        @(negedge clk);
        checks++;
        if (!out_valid || longint'(out_re) != er || longint'(out_im) != ei) begin
          failures++;
          $display("FAIL sample not held while out_ready low");
        end
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid still high after transfer"); end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("saturated samples: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
