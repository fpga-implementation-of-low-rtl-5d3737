// mapping_memory_tb -- self-checking test of the tap-to-root mapping table.
//
// Checks that every tap reads back unused after reset, that writes land at
// the addressed tap and are visible the next cycle, that root indices >= NR
// read back as unused, and that random rewrites during reads keep the table
// equal to a model array.
module mapping_memory_tb;
  import rue_pkg::*;
  localparam int MT = 64;
  localparam int NR = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       wr_en;
  logic [5:0] wr_k, rd_k;
  map_entry_t wr_entry, rd_entry;
  map_entry_t model [MT];

  mapping_memory #(.MAX_TAPS(MT), .NR(NR)) dut (.clk, .rst_n, .wr_en, .wr_k, .wr_entry,
                                               .rd_k, .rd_entry);

  function automatic map_entry_t expect_of(map_entry_t e);
    map_entry_t r;
    r.root = e.root;
    r.used = e.used && (int'(e.root) < NR);
    return r;
  endfunction

  task automatic check_all();
    for (int k = 0; k < MT; k++) begin
      rd_k = 6'(k);
      #1;
      checks++;
      if (rd_entry !== expect_of(model[k])) begin
        failures++;
        $display("FAIL k=%0d got %b expected %b", k, rd_entry, expect_of(model[k]));
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_k = 0; wr_entry = '0; rd_k = 0;
    for (int k = 0; k < MT; k++) model[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    // The example rows of the mapping table: tap 0 -> root 7, 1 -> 13, 2 -> 0.
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      wr_en         = 1;
      wr_k          = 6'(k);
      wr_entry.used = 1'b1;
      wr_entry.root = (k == 0) ? 5'd7 : (k == 1) ? 5'd13 : 5'd0;
      @(posedge clk);
      model[k] = wr_entry;
    end
    @(negedge clk);
    wr_en = 0;
    for (int k = 0; k < 3; k++) begin
      rd_k = 6'(k);
      #1;
      checks++;
      if (!rd_entry.used || rd_entry.root != ((k == 0) ? 5'd7 : (k == 1) ? 5'd13 : 5'd0)) begin
        failures++;
        $display("FAIL example row k=%0d got %b", k, rd_entry);
      end
    end
    // Fill the table, as a dispersion estimator would, then rewrite at random.
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      wr_en         = 1;
      wr_k          = (n < MT) ? 6'(n) : 6'($urandom_range(0, MT - 1));
      wr_entry.used = (n < MT) ? 1'b1 : 1'($urandom);
      wr_entry.root = 5'($urandom_range(0, 31));
      @(posedge clk);
      model[wr_k] = wr_entry;
      @(negedge clk);
      wr_en = 0;
      rd_k  = wr_k;
      #1;
      checks++;
      if (rd_entry !== expect_of(model[wr_k])) begin
        failures++;
        $display("FAIL after write k=%0d got %b expected %b", wr_k, rd_entry, expect_of(model[wr_k]));
      end
      if (n % 100 == 99) check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
