// tppd_table: the per-set TPPD components.
//
// One entry per LLC set holds the tuple (attack_flag, pS, pT, CpS, CpT):
// whether the set has been reported as the target of a covert channel, the
// core ids of the suspected spy and trojan, and how many blocks each of them
// currently holds in the set.  With 4 cores and 8 ways an entry is
// 1 + 2*2 + 2*4 = 13 bits (the storage budget in the paper counts 3-bit
// counters, 11 bits; one more bit per counter lets a counter reach 8).
//
// One combinational read port (rd_set_i -> rd_o) and one synchronous write
// port.  The array is not reset: after reset the cache controller walks all
// sets and writes a cleared tuple into each.
module tppd_table #(
  parameter int unsigned SETS = tppd_pkg::LLC_SETS
) (
  input  logic                    clk,
  input  logic [$clog2(SETS)-1:0] rd_set_i,
  output tppd_pkg::tuple_t        rd_o,
  input  logic                    we_i,
  input  logic [$clog2(SETS)-1:0] wr_set_i,
  input  tppd_pkg::tuple_t        wr_i
);

  tppd_pkg::tuple_t mem [SETS];

  assign rd_o = mem[rd_set_i];

  always_ff @(posedge clk) begin
    if (we_i) mem[wr_set_i] <= wr_i;
  end

endmodule
