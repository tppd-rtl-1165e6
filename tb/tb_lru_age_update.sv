// tb_lru_age_update: checks the LRU age update of one set against a
// reference built from an explicit recency list.  Starting from a random
// permutation, random ways are touched; after every touch the ages must equal
// each way's position in the recency list (0 = most recent) and stay a
// permutation.
module tb_lru_age_update;
  localparam int WAYS = 8;
  logic [WAYS-1:0][2:0] ages_i, ages_o;
  logic [2:0]           way_i;
  int checks = 0, failures = 0;
  int order[$];   // order[0] = most recently used way

  lru_age_update #(.WAYS(WAYS)) dut (.ages_i, .way_i, .ages_o);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random starting permutation
    order = {0, 1, 2, 3, 4, 5, 6, 7};
    order.shuffle();
    for (int i = 0; i < WAYS; i++) ages_i[order[i]] = 3'(i);
    for (int n = 0; n < 2000; n++) begin
      int idx;
      way_i = 3'($urandom_range(WAYS - 1));
      #1;
      foreach (order[i]) if (order[i] == int'(way_i)) idx = i;
      order.delete(idx);
      order.push_front(int'(way_i));
      for (int i = 0; i < WAYS; i++) begin
        checks++;
        if (ages_o[order[i]] != 3'(i)) begin
          failures++;
          if (failures < 10) $display("mismatch way %0d age %0d want %0d", order[i], ages_o[order[i]], i);
        end
      end
      ages_i = ages_o;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
