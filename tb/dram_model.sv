// dram_model: behavioural main memory for the LLC testbenches (not
// synthesizable).  It takes one block request at a time: a write is stored
// at once, a read answers with a one-cycle resp_valid pulse LAT cycles after
// it was accepted.  A block never written reads as a pattern derived from
// its address, init_block(addr).
module dram_model
  import tppd_pkg::*;
#(
  parameter int unsigned LAT = MEM_LAT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_write,
  input  logic [ADDR_W-1:0]     req_addr,
  input  logic [BLOCK_BITS-1:0] req_wdata,
  output logic                  resp_valid,
  output logic [BLOCK_BITS-1:0] resp_data
);
  logic [BLOCK_BITS-1:0] store [logic [ADDR_W-1:0]];
  logic                  busy;
  int unsigned           cnt;
  logic [ADDR_W-1:0]     rd_addr;
  int unsigned           n_reads = 0, n_writes = 0;

  function automatic logic [BLOCK_BITS-1:0] init_block(logic [ADDR_W-1:0] a);
    logic [BLOCK_BITS-1:0] b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = a[31:0] ^ (32'h9e37_79b9 * (i + 1));
    return b;
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cnt        <= 0;
      rd_addr    <= '0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req_write) begin
          store[req_addr] = req_wdata;
          n_writes++;
        end else begin
          busy    <= 1'b1;
          cnt     <= 1;
          rd_addr <= req_addr;
          n_reads++;
        end
      end
      if (busy) begin
        cnt <= cnt + 1;
        if (cnt == LAT - 1) begin
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp_data  <= store.exists(rd_addr) ? store[rd_addr] : init_block(rd_addr);
        end
      end
    end
  end
endmodule
