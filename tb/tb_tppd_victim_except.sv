// tb_tppd_victim_except: random sets (a random age permutation and random
// owners) are given to the alternative-victim search.  The reference picks,
// among the ways not owned by the excluded process, the one with the largest
// age; with the exclusion off it must be the way of age WAYS-1 (plain LRU).
module tb_tppd_victim_except;
  localparam int WAYS = 8;
  logic [WAYS-1:0][2:0] ages;
  logic [WAYS-1:0][1:0] owner;
  logic                 omit_en;
  logic [1:0]           omit_pid;
  logic [2:0]           way;
  logic                 found;
  int checks = 0, failures = 0;

  tppd_victim_except #(.WAYS(WAYS), .PID_W(2)) dut (
    .ages_i(ages), .owner_i(owner), .omit_en_i(omit_en), .omit_pid_i(omit_pid),
    .way_o(way), .found_o(found));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm[$];
    for (int n = 0; n < 3000; n++) begin
      int best, best_age;
      perm = {0, 1, 2, 3, 4, 5, 6, 7};
      perm.shuffle();
      for (int k = 0; k < WAYS; k++) begin
        ages[k]  = 3'(perm[k]);
        // bias owners so that whole sets of one owner occur
        owner[k] = (n % 4 == 0) ? 2'd1 : 2'($urandom_range(3));
      end
      omit_en  = (n % 5 != 0);
      omit_pid = 2'($urandom_range(3));
      if (n % 4 == 0) omit_pid = 2'd1;
      #1;
      best = -1; best_age = -1;
      for (int k = 0; k < WAYS; k++)
        if (!(omit_en && owner[k] == omit_pid) && int'(ages[k]) > best_age) begin
          best = k; best_age = int'(ages[k]);
        end
      check(found == (best >= 0), "found");
      if (best >= 0) check(way == 3'(best), $sformatf("way %0d want %0d", way, best));
      if (!omit_en) check(ages[way] == 3'(WAYS - 1), "plain LRU is the oldest way");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
