// theta_rotator_tb -- self-checking test of the shift-and-add rotation by
// theta_1 = exp(j*12 deg).
//
// Drives random and corner-case operands and compares each result with an
// integer model that uses ordinary multiplication:
//   y_re = (a_re*32052 - a_im*6813 + 2^14) >>> 15,
//   y_im = (a_re*6813 + a_im*32052 + 2^14) >>> 15.
// It also checks, with real arithmetic, that the result is within a few LSB
// of a * exp(j*12 deg), and that thirty successive rotations (360 degrees)
// return close to the starting point. Combinational: 1 time unit per vector.
module theta_rotator_tb;
  localparam int W = 26;

  logic signed [W-1:0] a_re, a_im, y_re, y_im;
  int checks = 0, failures = 0;

  theta_rotator #(.W(W)) dut (.a_re, .a_im, .y_re, .y_im);

  function automatic longint model(longint x, longint y, bit imag);
    longint s;
    if (!imag) s = x * 32052 - y * 6813;
    else       s = x * 6813 + y * 32052;
    return (s + 16384) >>> 15;
  endfunction

  task automatic check_one(longint xr, longint xi);
    real er, ei, c, s, tol;
    a_re = W'(xr);
    a_im = W'(xi);
    #1;
    checks++;
    if (longint'(y_re) != model(xr, xi, 0) || longint'(y_im) != model(xr, xi, 1)) begin
      failures++;
      $display("FAIL a=(%0d,%0d) y=(%0d,%0d) expected (%0d,%0d)", xr, xi, y_re, y_im,
               model(xr, xi, 0), model(xr, xi, 1));
    end
    c  = $cos(3.14159265358979 / 15.0);
    s  = $sin(3.14159265358979 / 15.0);
    er = real'(y_re) - (real'(xr) * c - real'(xi) * s);
    ei = real'(y_im) - (real'(xr) * s + real'(xi) * c);
    // Error bound: 1 LSB of rounding plus the Q1.15 error of the constants
    // (below 5e-6 of each operand).
    tol = 1.0 + 1e-5 * (((xr < 0) ? -real'(xr) : real'(xr)) + ((xi < 0) ? -real'(xi) : real'(xi)));
    checks++;
    if (er > tol || er < -tol || ei > tol || ei < -tol) begin
      failures++;
      $display("FAIL real-valued error for a=(%0d,%0d): %f %f (tol %f)", xr, xi, er, ei, tol);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint lim;
    longint r0, i0, r, i;
    lim = (64'sd1 <<< (W - 2)) - 1;
    check_one(0, 0);
    check_one(1, 0);
    check_one(0, 1);
    check_one(-1, 0);
    check_one(lim, 0);
    check_one(0, -lim);
    check_one(-lim, lim);
    check_one(32767, -32768);
    for (int n = 0; n < 2000; n++) begin
      r = longint'($urandom_range(0, 2 * 1048576)) - 1048576;
      i = longint'($urandom_range(0, 2 * 1048576)) - 1048576;
      check_one(r, i);
    end
    // Full turn: 30 rotations by 12 degrees.
    r0 = 1000000; i0 = -250000;
    r = r0; i = i0;
    for (int n = 0; n < 30; n++) begin
      check_one(r, i);
      r = longint'(y_re);
      i = longint'(y_im);
    end
    checks++;
    if (r - r0 > 200 || r0 - r > 200 || i - i0 > 200 || i0 - i > 200) begin
      failures++;
      $display("FAIL full turn ended at (%0d,%0d)", r, i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
