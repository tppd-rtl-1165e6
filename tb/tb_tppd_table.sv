// tb_tppd_table: writes random tuples to random sets of the TPPD table and
// reads them back against a shadow copy held in the testbench.
module tb_tppd_table;
  import tppd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [SET_W-1:0] rd_set, wr_set;
  tuple_t           rd, wr;
  logic             we;
  tuple_t           shadow [LLC_SETS];
  bit               written [LLC_SETS];
  int checks = 0, failures = 0;

  tppd_table dut (.clk, .rd_set_i(rd_set), .rd_o(rd), .we_i(we), .wr_set_i(wr_set), .wr_i(wr));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; rd_set = '0; wr_set = '0; wr = '0;
    foreach (written[s]) written[s] = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // write a random tuple into one of a few sets (so reads hit written sets)
      we     = 1;
      wr_set = SET_W'($urandom_range(63) * 61);
      wr     = tuple_t'($urandom);
      shadow[wr_set]  = wr;
      written[wr_set] = 1;
      // read a random written set in the same cycle (before the write lands)
      rd_set = SET_W'($urandom_range(63) * 61);
      #1;
      if (written[rd_set] && rd_set != wr_set) begin
        checks++;
        if (rd != shadow[rd_set]) begin
          failures++;
          $display("FAIL set %0d got %h want %h", rd_set, rd, shadow[rd_set]);
        end
      end
    end
    @(negedge clk);
    we = 0;
    for (int s = 0; s < 64; s++) begin
      rd_set = SET_W'(s * 61);
      #1;
      if (written[rd_set]) begin
        checks++;
        if (rd != shadow[rd_set]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
