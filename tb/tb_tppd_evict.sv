// tb_tppd_evict: checks the TPPD victim choice.
//
// Part 1 replays the worked example of the defence on a 4-way set with
// TPPD-2: the set starts full of trojan blocks (CpS=0, CpT=4); the spy primes
// it with four new blocks and the counts must go (1,3), (2,2), (2,2), (2,2);
// the trojan then sends a "1" with four new blocks and the counts must stay
// (2,2), leaving two spy blocks whatever the trojan sent.
//
// Part 2 drives random sets at 8 ways (mostly TPPD-4, sometimes other and
// unequal thresholds) and compares way, counters and
// the alternative-victim flag with a reference written from the policy
// (plain LRU outside attacked sets; inside, the spy and trojan may not evict
// each other's block when the owner holds TH or fewer blocks).
module tb_tppd_evict;
  int checks = 0, failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ part 1: 4 ways, TPPD-2
  logic [3:0]       s_valid;
  logic [3:0][1:0]  s_ages, s_owner;
  logic [1:0]       s_pin;
  logic [2:0]       s_cps, s_cpt, s_cps_o, s_cpt_o;
  logic [1:0]       s_way;
  logic             s_evict, s_alt;

  tppd_evict #(.WAYS(4), .PID_W(2), .CNT_W(3)) dut4 (
    .valid_i(s_valid), .ages_i(s_ages), .owner_i(s_owner),
    .attack_i(1'b1), .ps_i(2'd0), .pt_i(2'd1), .cps_i(s_cps), .cpt_i(s_cpt),
    .pin_i(s_pin), .th_s_i(3'd2), .th_t_i(3'd2), .way_o(s_way), .evict_o(s_evict), .alt_o(s_alt),
    .cps_o(s_cps_o), .cpt_o(s_cpt_o));

  // fill way w of the small set: owner, LRU ages, counters
  task automatic fill4(logic [1:0] p);
    logic [1:0] a;
    s_pin = p;
    #1;
    a = s_ages[s_way];
    for (int k = 0; k < 4; k++) if (s_ages[k] < a) s_ages[k] = s_ages[k] + 1;
    s_ages[s_way]  = 0;
    s_owner[s_way] = p;
    s_cps = s_cps_o;
    s_cpt = s_cpt_o;
    #1;
  endtask

  // ------------------------------------------------ part 2: 8 ways, TPPD-4
  logic [7:0]       r_valid;
  logic [7:0][2:0]  r_ages;
  logic [7:0][1:0]  r_owner;
  logic             r_attack;
  logic [1:0]       r_ps, r_pt, r_pin;
  logic [3:0]       r_cps, r_cpt, r_cps_o, r_cpt_o;
  logic [2:0]       r_way;
  logic             r_evict, r_alt;

  logic [3:0]       r_ths, r_tht;
  tppd_evict #(.WAYS(8), .PID_W(2), .CNT_W(4)) dut8 (
    .valid_i(r_valid), .ages_i(r_ages), .owner_i(r_owner),
    .attack_i(r_attack), .ps_i(r_ps), .pt_i(r_pt), .cps_i(r_cps), .cpt_i(r_cpt),
    .pin_i(r_pin), .th_s_i(r_ths), .th_t_i(r_tht), .way_o(r_way), .evict_o(r_evict), .alt_o(r_alt),
    .cps_o(r_cps_o), .cpt_o(r_cpt_o));

  initial begin
    int n_alt = 0;
    // ---------------- part 1
    s_valid = '1;
    for (int k = 0; k < 4; k++) begin
      s_owner[k] = 2'd1;
      s_ages[k]  = 2'(3 - k);
    end
    s_cps = 0; s_cpt = 4;
    fill4(2'd0); check(s_cps == 1 && s_cpt == 3, $sformatf("prime 1: %0d %0d", s_cps, s_cpt));
    check(!s_alt, "prime 1 takes the LRU victim");
    fill4(2'd0); check(s_cps == 2 && s_cpt == 2, $sformatf("prime 2: %0d %0d", s_cps, s_cpt));
    fill4(2'd0); check(s_cps == 2 && s_cpt == 2, $sformatf("prime 3: %0d %0d", s_cps, s_cpt));
    fill4(2'd0); check(s_cps == 2 && s_cpt == 2, $sformatf("prime 4: %0d %0d", s_cps, s_cpt));
    for (int j = 0; j < 4; j++) begin
      fill4(2'd1);
      check(s_cps == 2 && s_cpt == 2, $sformatf("trojan %0d: %0d %0d", j, s_cps, s_cpt));
    end
    begin
      automatic int ns = 0;
      for (int k = 0; k < 4; k++) if (s_owner[k] == 2'd0) ns++;
      check(ns == 2, $sformatf("spy keeps two blocks, has %0d", ns));
    end
    // an innocent process may evict anything
    fill4(2'd2); check(!s_alt, "innocent process is not restricted");

    // ---------------- part 2
    for (int n = 0; n < 5000; n++) begin
      int perm[$];
      int lru, alt, exp_way, cs, ct, pw, exp_cps, exp_cpt, inv;
      bit exp_alt;
      perm = {0, 1, 2, 3, 4, 5, 6, 7};
      perm.shuffle();
      r_ps = 2'd0; r_pt = 2'd1;
      if (n % 2) begin r_ps = 2'd3; r_pt = 2'd2; end
      cs = 0; ct = 0;
      for (int k = 0; k < 8; k++) begin
        r_ages[k]  = 3'(perm[k]);
        r_owner[k] = 2'($urandom_range(3));
        r_valid[k] = ($urandom_range(15) != 0) || (n % 3 != 0);
        if (r_valid[k] && r_owner[k] == r_ps) cs++;
        if (r_valid[k] && r_owner[k] == r_pt) ct++;
      end
      r_cps = 4'(cs); r_cpt = 4'(ct);
      r_attack = (n % 7 != 0);
      r_pin = 2'($urandom_range(3));
      // TPPD-4 mostly, other thresholds (1..4, unequal too) now and then
      r_ths = (n % 4 == 0) ? 4'($urandom_range(1, 4)) : 4'd4;
      r_tht = (n % 4 == 0) ? 4'($urandom_range(1, 4)) : 4'd4;
      #1;
      // reference
      inv = -1;
      for (int k = 7; k >= 0; k--) if (!r_valid[k]) inv = k;
      for (int k = 0; k < 8; k++) if (r_ages[k] == 3'd7) lru = k;
      pw = int'(r_owner[lru]);
      exp_way = lru; exp_alt = 0; exp_cps = cs; exp_cpt = ct;
      if (inv >= 0) begin
        exp_way = inv;
        if (r_attack && r_pin == r_ps) exp_cps++;
        if (r_attack && r_pin == r_pt) exp_cpt++;
      end else if (r_attack) begin
        automatic bit attacker_in = (r_pin == r_ps) || (r_pin == r_pt);
        automatic bit restricted  = (pw == int'(r_ps) && cs <= int'(r_ths)) || (pw == int'(r_pt) && ct <= int'(r_tht));
        if (attacker_in && pw != int'(r_pin) && restricted) begin
          automatic int best_age = -1;
          for (int k = 0; k < 8; k++)
            if (int'(r_owner[k]) != pw && int'(r_ages[k]) > best_age) begin
              alt = k; best_age = int'(r_ages[k]);
            end
          exp_way = alt; exp_alt = 1;
          if (r_owner[alt] != r_pin) begin
            if (r_pin == r_ps) exp_cps++; else exp_cpt++;
          end
        end else if (pw != int'(r_pin)) begin
          if (pw == int'(r_ps)) exp_cps--;
          if (pw == int'(r_pt)) exp_cpt--;
          if (r_pin == r_ps) exp_cps++;
          if (r_pin == r_pt) exp_cpt++;
        end
      end
      n_alt += exp_alt;
      check(r_way == 3'(exp_way), $sformatf("n=%0d way %0d want %0d", n, r_way, exp_way));
      check(r_alt == exp_alt, $sformatf("n=%0d alt", n));
      check(r_evict == (inv < 0), "evict flag");
      check(r_cps_o == 4'(exp_cps) && r_cpt_o == 4'(exp_cpt),
            $sformatf("n=%0d counters %0d %0d want %0d %0d", n, r_cps_o, r_cpt_o, exp_cps, exp_cpt));
      // the counters follow the set contents after the fill
      if (r_attack) begin
        automatic int c2s = 0, c2t = 0;
        for (int k = 0; k < 8; k++) begin
          automatic logic [1:0] o = (k == int'(r_way)) ? r_pin : r_owner[k];
          automatic bit v = (k == int'(r_way)) ? 1'b1 : r_valid[k];
          if (v && o == r_ps) c2s++;
          if (v && o == r_pt) c2t++;
        end
        check(r_cps_o == 4'(c2s) && r_cpt_o == 4'(c2t), $sformatf("n=%0d counts follow contents", n));
      end
      #1;
    end
    check(n_alt > 100, "alternative victim exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
