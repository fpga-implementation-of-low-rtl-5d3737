// multiplierless_stage_tb -- self-checking test of the Horner evaluation.
//
// Loads random pre-sum vectors (including single-root vectors, which must
// come out rotated by exactly j steps), starts the stage and compares the
// result with a bit-exact model that applies theta_1 with ordinary
// multiplication, and with the real-valued sum_j X_j exp(j*12deg*j) within
// the rounding bound. Checks done exactly NR + 1 cycles after start.
module multiplierless_stage_tb;
  import rue_pkg::*;
  localparam int NR = 30;
  localparam int AW = 26;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic signed [AW-1:0] vec_re [NR], vec_im [NR];
  logic signed [AW-1:0] y_re, y_im;

  multiplierless_stage #(.NR(NR), .ACC_W(AW)) dut (
    .clk, .rst_n, .start, .vec_re, .vec_im, .busy, .done, .y_re, .y_im);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ar, ai, tr, ti;
    real fr, fi, ang, tol, mag;
    int cyc;
    start = 0;
    for (int j = 0; j < NR; j++) begin vec_re[j] = '0; vec_im[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      mag = 0.0;
      for (int j = 0; j < NR; j++) begin
        if (t < NR) begin
          // single root j = t with a real value: result is rotated by 12*t deg
          vec_re[j] = (j == t) ? 26'sd1000000 : '0;
          vec_im[j] = '0;
        end else begin
          vec_re[j] = AW'(longint'($urandom_range(0, 1 << 21)) - (1 << 20));
          vec_im[j] = AW'(longint'($urandom_range(0, 1 << 21)) - (1 << 20));
        end
        mag += 2.0 * 1048576.0;
      end
      // bit-exact model
      ar = 0; ai = 0;
      for (int j = NR - 1; j >= 0; j--) begin
        tr = (ar * 32052 - ai * 6813 + 16384) >>> 15;
        ti = (ar * 6813 + ai * 32052 + 16384) >>> 15;
        ar = longint'(vec_re[j]) + tr;
        ai = longint'(vec_im[j]) + ti;
      end
      // ideal model
      fr = 0.0; fi = 0.0;
      for (int j = 0; j < NR; j++) begin
        ang = 2.0 * 3.14159265358979 * real'(j) / real'(NR);
        fr += real'(vec_re[j]) * $cos(ang) - real'(vec_im[j]) * $sin(ang);
        fi += real'(vec_re[j]) * $sin(ang) + real'(vec_im[j]) * $cos(ang);
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 1000) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != NR + 1) begin
        failures++;
        $display("FAIL pass took %0d cycles, expected %0d", cyc, NR + 1);
      end
      checks++;
      if (longint'(y_re) != ar || longint'(y_im) != ai) begin
        failures++;
        $display("FAIL t=%0d got (%0d,%0d) expected (%0d,%0d)", t, y_re, y_im, ar, ai);
      end
      tol = real'(NR) + 2e-4 * mag;
      checks++;
      if (real'(y_re) - fr > tol || fr - real'(y_re) > tol ||
          real'(y_im) - fi > tol || fi - real'(y_im) > tol) begin
        failures++;
        $display("FAIL t=%0d ideal (%f,%f) got (%0d,%0d)", t, fr, fi, y_re, y_im);
      end
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
