// llc_store: the arrays of the set-associative shared LLC.
//
// For each of SETS sets and WAYS ways it keeps the block metadata (tag,
// sharers bits, owner process id, valid, dirty), an LRU age, and the data
// block.  The owner id is what the TPPD policy reads to tell the spy's,
// the trojan's and innocent blocks apart.
//
// Reads are combinational and return a whole set: all metadata, all ages and
// all data blocks of set rd_set_i.  Writes are synchronous: meta_we_i is a
// per-way mask over meta_wdata_i, ages_we_i writes the ages of the whole set,
// data_we_i writes one block.  Nothing is reset here; the controller clears
// the valid bits and sets the ages after reset.
module llc_store #(
  parameter int unsigned SETS       = tppd_pkg::LLC_SETS,
  parameter int unsigned WAYS       = tppd_pkg::LLC_WAYS,
  parameter int unsigned BLOCK_BITS = tppd_pkg::BLOCK_BITS
) (
  input  logic                                   clk,
  input  logic [$clog2(SETS)-1:0]                rd_set_i,
  output tppd_pkg::meta_t [WAYS-1:0]             rd_meta_o,
  output logic [WAYS-1:0][$clog2(WAYS)-1:0]      rd_ages_o,
  output logic [WAYS-1:0][BLOCK_BITS-1:0]        rd_data_o,

  input  logic [$clog2(SETS)-1:0]                wr_set_i,
  input  logic [WAYS-1:0]                        meta_we_i,
  input  tppd_pkg::meta_t [WAYS-1:0]             meta_wdata_i,
  input  logic                                   ages_we_i,
  input  logic [WAYS-1:0][$clog2(WAYS)-1:0]      ages_wdata_i,
  input  logic                                   data_we_i,
  input  logic [$clog2(WAYS)-1:0]                data_way_i,
  input  logic [BLOCK_BITS-1:0]                  data_wdata_i
);

  tppd_pkg::meta_t [WAYS-1:0]              meta_mem [SETS];
  logic [WAYS-1:0][$clog2(WAYS)-1:0]       age_mem  [SETS];
  logic [WAYS-1:0][BLOCK_BITS-1:0]         data_mem [SETS];

  assign rd_meta_o = meta_mem[rd_set_i];
  assign rd_ages_o = age_mem[rd_set_i];
  assign rd_data_o = data_mem[rd_set_i];

  always_ff @(posedge clk) begin
    for (int w = 0; w < WAYS; w++)
      if (meta_we_i[w]) meta_mem[wr_set_i][w] <= meta_wdata_i[w];
    if (ages_we_i) age_mem[wr_set_i] <= ages_wdata_i;
    if (data_we_i) data_mem[wr_set_i][data_way_i] <= data_wdata_i;
  end

endmodule
