// presum_stage_tb -- self-checking test of the pre-sum stage.
//
// The testbench plays the sample window and the mapping memory: it answers
// tap_k combinationally from its own arrays. For each pass it draws random
// samples and a random mapping (about a quarter of the taps unused, some
// roots shared by many taps), starts the stage, and compares the pre-sum
// vector with sums computed here. It also checks the pass timing: done
// exactly MAX_TAPS + 1 cycles after start, and busy meanwhile.
module presum_stage_tb;
  import rue_pkg::*;
  localparam int MT = 40;
  localparam int NR = 30;
  localparam int AW = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [5:0] tap_k;
  sample_t x;
  map_entry_t map;
  logic signed [AW-1:0] vec_re [NR], vec_im [NR];

  sample_t    xs [MT];
  map_entry_t ms [MT];

  presum_stage #(.MAX_TAPS(MT), .NR(NR), .ACC_W(AW)) dut (
    .clk, .rst_n, .start, .busy, .done, .tap_k, .x, .map, .vec_re, .vec_im);

  always_comb begin
    x   = xs[tap_k];
    map = ms[tap_k];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint er [NR], ei [NR];
    int cyc;
    start = 0;
    for (int k = 0; k < MT; k++) begin xs[k] = '0; ms[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 60; pass++) begin
      @(negedge clk);
      for (int j = 0; j < NR; j++) begin er[j] = 0; ei[j] = 0; end
      for (int k = 0; k < MT; k++) begin
        // extremes on some passes to exercise the growth bits
        if (pass % 10 == 3) begin
          xs[k].re = -16'sd32768;
          xs[k].im = 16'sd32767;
        end else begin
          xs[k].re = 16'($urandom);
          xs[k].im = 16'($urandom);
        end
        ms[k].used = ($urandom_range(0, 3) != 0);
        ms[k].root = (pass % 10 == 3) ? 5'd7 : 5'($urandom_range(0, NR - 1));
        if (ms[k].used) begin
          er[ms[k].root] += longint'(xs[k].re);
          ei[ms[k].root] += longint'(xs[k].im);
        end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 1000) begin
        checks++;
        if (!busy) begin failures++; $display("FAIL busy low during pass"); end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != MT + 1) begin
        failures++;
        $display("FAIL pass took %0d cycles, expected %0d", cyc, MT + 1);
      end
      for (int j = 0; j < NR; j++) begin
        checks++;
        if (longint'(vec_re[j]) != er[j] || longint'(vec_im[j]) != ei[j]) begin
          failures++;
          $display("FAIL pass %0d root %0d got (%0d,%0d) expected (%0d,%0d)", pass, j,
                   vec_re[j], vec_im[j], er[j], ei[j]);
        end
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
