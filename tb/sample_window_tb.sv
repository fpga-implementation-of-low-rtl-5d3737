// sample_window_tb -- self-checking test of the sliding sample window.
//
// Two instances: one with a power-of-two depth (8) and one with a depth of 6
// to exercise the wrap-around arithmetic. Random samples are pushed, with
// random idle cycles; after each clock every age rd_k is read back and
// compared with a model history array (zeros after reset).
module sample_window_tb;
  import rue_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic    push;
  sample_t din;
  logic [2:0] rd_a, rd_b;
  sample_t dout_a, dout_b;

  sample_window #(.MAX_TAPS(8)) dut_a (.clk, .rst_n, .push, .din, .rd_k(rd_a), .dout(dout_a));
  sample_window #(.MAX_TAPS(6)) dut_b (.clk, .rst_n, .push, .din, .rd_k(rd_b), .dout(dout_b));

  sample_t hist [8];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; din = '0; rd_a = 0; rd_b = 0;
    for (int i = 0; i < 8; i++) hist[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      push = ($urandom_range(0, 3) != 0);
      din.re = 16'($urandom);
      din.im = 16'($urandom);
      @(posedge clk);
      if (push) begin
        for (int i = 7; i > 0; i--) hist[i] = hist[i - 1];
        hist[0] = din;
      end
      @(negedge clk);
      push = 0;
      for (int k = 0; k < 8; k++) begin
        rd_a = 3'(k);
        rd_b = 3'(k % 6);
        #1;
        checks++;
        if (dout_a !== hist[k]) begin
          failures++;
          $display("FAIL depth 8 k=%0d got %h expected %h", k, dout_a, hist[k]);
        end
        if (k < 6) begin
          checks++;
          if (dout_b !== hist[k]) begin
            failures++;
            $display("FAIL depth 6 k=%0d got %h expected %h", k, dout_b, hist[k]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
