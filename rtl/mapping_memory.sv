// mapping_memory -- the tap-to-root mapping r[k].
//
// Entry k tells which root theta_j the ideal filter tap k is approximated
// by (j = r[k]), or that tap k is unused. The table is written one entry per
// clock by an external microcontroller that estimates the dispersion; the
// pre-sum stage reads it one entry per clock through an asynchronous port.
// A write is visible on the read port in the next cycle, so the mapping can
// be changed while the equalizer runs. Root indices >= NR are read back as
// unused. Reset marks every tap unused (a filter that outputs zero).
//
// Following the paper: a fixed maximum filter size with unused taps mapped to
// zero, and a mapping updated in real time by a microcontroller. The write
// port, the "used" flag and the register-array storage are this design's
// choices.
module mapping_memory
  import rue_pkg::*;
#(
  parameter int MAX_TAPS = MAX_TAPS_DEFAULT,
  parameter int NR       = NR_DEFAULT,
  localparam int KW = (MAX_TAPS > 1) ? $clog2(MAX_TAPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [KW-1:0] wr_k,
  input  map_entry_t    wr_entry,
  input  logic [KW-1:0] rd_k,
  output map_entry_t    rd_entry
);

  map_entry_t mem [MAX_TAPS];
  map_entry_t raw;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_TAPS; i++) mem[i] <= '0;
    end else if (wr_en && (32'(wr_k) < MAX_TAPS)) begin
      mem[wr_k] <= wr_entry;
    end
  end

  always_comb begin
    raw = (32'(rd_k) < MAX_TAPS) ? mem[rd_k] : '0;
    rd_entry.root = raw.root;
    rd_entry.used = raw.used && (32'(raw.root) < NR);
  end

endmodule
