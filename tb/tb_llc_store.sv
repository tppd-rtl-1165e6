// tb_llc_store: exercises the LLC arrays.  Random metadata (per-way masked),
// ages and data blocks are written to a few sets and read back through the
// whole-set read port against a shadow model; writes to one set must not
// disturb another.
module tb_llc_store;
  import tppd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [SET_W-1:0]                        rd_set, wr_set;
  meta_t [LLC_WAYS-1:0]                    rd_meta, meta_wdata;
  logic  [LLC_WAYS-1:0][AGE_W-1:0]         rd_ages, ages_wdata;
  logic  [LLC_WAYS-1:0][BLOCK_BITS-1:0]    rd_data;
  logic  [LLC_WAYS-1:0]                    meta_we;
  logic                                    ages_we, data_we;
  logic  [WAY_W-1:0]                       data_way;
  logic  [BLOCK_BITS-1:0]                  data_wdata;

  localparam int NS = 16;
  meta_t [LLC_WAYS-1:0]                 sh_meta [NS];
  logic  [LLC_WAYS-1:0][AGE_W-1:0]      sh_ages [NS];
  logic  [LLC_WAYS-1:0][BLOCK_BITS-1:0] sh_data [NS];
  int checks = 0, failures = 0;

  llc_store dut (.clk, .rd_set_i(rd_set), .rd_meta_o(rd_meta), .rd_ages_o(rd_ages),
    .rd_data_o(rd_data), .wr_set_i(wr_set), .meta_we_i(meta_we), .meta_wdata_i(meta_wdata),
    .ages_we_i(ages_we), .ages_wdata_i(ages_wdata), .data_we_i(data_we),
    .data_way_i(data_way), .data_wdata_i(data_wdata));

  function automatic logic [SET_W-1:0] set_of(int i);
    return SET_W'(i * 257 + 3);
  endfunction

  function automatic logic [BLOCK_BITS-1:0] rand_block();
    logic [BLOCK_BITS-1:0] b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    meta_we = '0; ages_we = 0; data_we = 0; rd_set = '0; wr_set = '0;
    // initialise the sets used
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      wr_set = set_of(i);
      meta_we = '1; ages_we = 1; data_we = 0;
      for (int w = 0; w < LLC_WAYS; w++) begin
        meta_wdata[w] = meta_t'({$urandom, $urandom});
        ages_wdata[w] = AGE_W'(w);
      end
      sh_meta[i] = meta_wdata;
      sh_ages[i] = ages_wdata;
    end
    for (int i = 0; i < NS; i++)
      for (int w = 0; w < LLC_WAYS; w++) begin
        @(negedge clk);
        meta_we = '0; ages_we = 0;
        wr_set = set_of(i); data_we = 1; data_way = WAY_W'(w); data_wdata = rand_block();
        sh_data[i][w] = data_wdata;
      end
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      automatic int i = $urandom_range(NS - 1);
      automatic int r = $urandom_range(NS - 1);
      @(negedge clk);
      wr_set  = set_of(i);
      meta_we = LLC_WAYS'($urandom);
      for (int w = 0; w < LLC_WAYS; w++) begin
        meta_wdata[w] = meta_t'({$urandom, $urandom});
        if (meta_we[w]) sh_meta[i][w] = meta_wdata[w];
      end
      ages_we = $urandom_range(1);
      for (int w = 0; w < LLC_WAYS; w++) ages_wdata[w] = AGE_W'($urandom);
      if (ages_we) sh_ages[i] = ages_wdata;
      data_we = $urandom_range(1);
      data_way = WAY_W'($urandom);
      data_wdata = rand_block();
      if (data_we) sh_data[i][data_way] = data_wdata;
      @(posedge clk);
      #1;
      rd_set = set_of(r);
      #1;
      checks += 3;
      if (rd_meta != sh_meta[r]) begin failures++; $display("FAIL meta set %0d", r); end
      if (rd_ages != sh_ages[r]) begin failures++; $display("FAIL ages set %0d", r); end
      if (rd_data != sh_data[r]) begin failures++; $display("FAIL data set %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
