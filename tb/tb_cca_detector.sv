// tb_cca_detector: random eviction traffic on a handful of sets, with a short
// window (WINDOW=64 cycles) and a low threshold (TH=6).  A cycle-level
// reference keeps its own per-set counts, epochs and reported flags and
// predicts every report (set, spy, trojan); the report handshake is driven
// with a random ready.  It also checks that misses between blocks of the same
// process never count, that a set is reported once only until it is
// re-armed, that a re-armed set is reported again (the reference clears its
// entry; a miss in the same cycle is ignored), and that nothing is reported
// during the clearing walk after reset.
module tb_cca_detector;
  import tppd_pkg::*;
  localparam int WIN = 64, TH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             init, mv, dv, dr, ra;
  logic [SET_W-1:0] mset, dset, rset;
  logic [PID_W-1:0] pin, pout, dps, dpt;
  int checks = 0, failures = 0, reports = 0, same_misses = 0, rearms = 0, rereports = 0;

  cca_detector #(.WINDOW(WIN), .TH(TH)) dut (
    .clk, .rst_n, .init_o(init), .miss_valid_i(mv), .miss_set_i(mset), .pin_i(pin),
    .pout_i(pout), .rearm_i(ra), .rearm_set_i(rset), .det_valid_o(dv), .det_ready_i(dr), .det_set_o(dset),
    .det_ps_o(dps), .det_pt_o(dpt));

  // reference state
  int  r_cnt [LLC_SETS];
  int  r_ep  [LLC_SETS];
  bit  r_rep [LLC_SETS];
  bit  r_armed [LLC_SETS];   // re-armed after a report
  bit  p_valid;
  int  p_set, p_ps, p_pt;
  int  edges;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s (edge %0d)", what, edges);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mv = 0; dr = 0; mset = '0; pin = '0; pout = '0; ra = 0; rset = '0;
    for (int s = 0; s < LLC_SETS; s++) begin
      r_cnt[s] = 0; r_ep[s] = 0; r_rep[s] = 0; r_armed[s] = 0;
    end
    p_valid = 0; edges = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // clearing walk: nothing counts, nothing is reported
    for (int n = 0; n < LLC_SETS + 2; n++) begin
      @(negedge clk);
      if (n < LLC_SETS) check(init, "init high during the walk");
      check(!dv, "no report during the walk");
      mv = 1; mset = SET_W'(7); pin = 2'd0; pout = 2'd1;   // must be ignored
      @(posedge clk); edges++;
    end
    // main phase
    for (int n = 0; n < 40000; n++) begin
      int ep, s;
      bit xm, fire;
      @(negedge clk);
      // compare report outputs with the reference
      check(dv == p_valid, "report valid");
      if (p_valid) check(int'(dset) == p_set && int'(dps) == p_ps && int'(dpt) == p_pt,
                         $sformatf("report contents set %0d/%0d", dset, p_set));
      mv   = ($urandom_range(3) != 0);
      s    = (n < 20000) ? 100 + $urandom_range(5) : 200 + $urandom_range(40);
      mset = SET_W'(s);
      pin  = 2'($urandom_range(3));
      pout = ($urandom_range(2) == 0) ? pin : 2'($urandom_range(3));
      dr   = $urandom_range(3) == 0;
      ra   = $urandom_range(99) < 2;
      rset = (n < 20000) ? SET_W'(100 + $urandom_range(5)) : SET_W'(200 + $urandom_range(40));
      // reference for this edge
      ep = edges / WIN;
      xm = mv && (pin != pout) && !ra;
      if (ra) begin
        if (r_rep[int'(rset)]) begin
          r_armed[int'(rset)] = 1;
          rearms++;
        end
        r_cnt[int'(rset)] = 0; r_ep[int'(rset)] = 0; r_rep[int'(rset)] = 0;
      end
      if (mv && pin == pout) same_misses++;
      fire = 0;
      if (xm) begin
        automatic int c = (r_ep[s] == ep) ? r_cnt[s] : 0;
        if (c < TH) c++;
        fire = !r_rep[s] && c >= TH && !(p_valid && !dr);
        r_cnt[s] = c; r_ep[s] = ep;
        if (fire) r_rep[s] = 1;
      end
      if (p_valid && dr) p_valid = 0;
      if (fire) begin
        p_valid = 1; p_set = s; p_ps = int'(pout); p_pt = int'(pin);
        reports++;
        if (r_armed[s]) rereports++;
      end
      @(posedge clk); edges++;
    end
    check(reports > 3, $sformatf("reports seen: %0d", reports));
    check(same_misses > 100, "same-process misses exercised");
    check(rearms > 3 && rereports > 3, $sformatf("re-armed sets reported again: %0d of %0d", rereports, rearms));
    $display("reports=%0d rearms=%0d rereports=%0d", reports, rearms, rereports);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
