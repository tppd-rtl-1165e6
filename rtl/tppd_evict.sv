// tppd_evict: victim choice of the TPPD-modified LRU policy for one miss.
//
// Given the state of the set that missed (valid bits, LRU ages, owner of every
// way), the set's TPPD tuple (attack flag, spy pS, trojan pT, spy count CpS,
// trojan count CpT) and the incoming process pin_i, it returns the way to
// replace and the new CpS/CpT.
//
//  * Set not under attack: the plain LRU victim V(s); counters untouched.
//  * Set under attack: let w be the LRU victim and p_w its owner.
//      - pin_i innocent, or pin_i == p_w: evict w, update counters.
//      - p_w is the spy and CpS <= th_s_i, or p_w is the trojan and
//        CpT <= th_t_i: evicting w would push the owner below its threshold,
//        so the alternative victim V_x(s, p_w) (oldest way not owned by p_w)
//        is evicted instead; it belongs to pin_i itself or to an innocent
//        process, and only in the latter case does pin_i's counter grow.
//      - otherwise: evict w, update counters.
//    The counter update decrements the victim owner's counter and increments
//    the incoming process's counter when the two differ (updateCounter).
//  * A set with an invalid way is filled there first; in a set under attack
//    the incoming process's counter then grows.  This is this design's
//    choice: the policy itself is only defined for conflict misses.
//
// Where the policy text and its worked example differ, the example is
// followed: the alternative victim is taken when the owner's count is at or
// below the threshold (the pseudo-code writes "less than"), which keeps at
// least TH blocks of each attacker in the set, as the example shows.  The
// second branch of the pseudo-code's counter update tests pS twice; it is
// read as pT.
//
// The thresholds are inputs so that the configuration TPPD-z can be changed
// while running, as the scheme allows; the cache keeps them in registers.
//
// Purely combinational; the caller writes the results in the cycle it fills.
module tppd_evict #(
  parameter int unsigned WAYS  = tppd_pkg::LLC_WAYS,
  parameter int unsigned PID_W = tppd_pkg::PID_W,
  parameter int unsigned CNT_W = $clog2(WAYS + 1),
  parameter int unsigned AGE_W = $clog2(WAYS)
) (
  input  logic [WAYS-1:0]            valid_i,
  input  logic [WAYS-1:0][AGE_W-1:0] ages_i,
  input  logic [WAYS-1:0][PID_W-1:0] owner_i,
  input  logic                       attack_i,
  input  logic [PID_W-1:0]           ps_i,
  input  logic [PID_W-1:0]           pt_i,
  input  logic [CNT_W-1:0]           cps_i,
  input  logic [CNT_W-1:0]           cpt_i,
  input  logic [PID_W-1:0]           pin_i,
  input  logic [CNT_W-1:0]           th_s_i,      // spy threshold th_s
  input  logic [CNT_W-1:0]           th_t_i,      // trojan threshold th_t
  output logic [$clog2(WAYS)-1:0]    way_o,       // way to fill
  output logic                       evict_o,     // way_o held a valid block
  output logic                       alt_o,       // alternative victim V_x used
  output logic [CNT_W-1:0]           cps_o,
  output logic [CNT_W-1:0]           cpt_o
);
  import tppd_pkg::*;

  localparam int unsigned WW = $clog2(WAYS);

  logic [WW-1:0]    lru_way, alt_way, inv_way;
  logic             lru_found, alt_found, has_inv;
  logic [PID_W-1:0] p_w;
  owner_class_e     cls_in, cls_w, cls_alt;

  // V(s): plain LRU victim
  tppd_victim_except #(.WAYS(WAYS), .PID_W(PID_W)) u_lru (
    .ages_i, .owner_i, .omit_en_i(1'b0), .omit_pid_i(p_w),
    .way_o(lru_way), .found_o(lru_found)
  );

  // V_x(s, p_w): oldest way not owned by the owner of V(s)
  tppd_victim_except #(.WAYS(WAYS), .PID_W(PID_W)) u_alt (
    .ages_i, .owner_i, .omit_en_i(1'b1), .omit_pid_i(p_w),
    .way_o(alt_way), .found_o(alt_found)
  );

  function automatic owner_class_e classify(logic [PID_W-1:0] p, logic [PID_W-1:0] ps,
                                            logic [PID_W-1:0] pt);
    if (p == ps)      return OWN_SPY;
    else if (p == pt) return OWN_TROJAN;
    else              return OWN_OTHER;
  endfunction

  assign p_w = owner_i[lru_way];

  always_comb begin
    has_inv = 1'b0;
    inv_way = '0;
    for (int k = WAYS - 1; k >= 0; k--) begin
      if (!valid_i[k]) begin
        has_inv = 1'b1;
        inv_way = k[WW-1:0];
      end
    end
  end

  always_comb begin
    cls_in  = classify(pin_i, ps_i, pt_i);
    cls_w   = classify(p_w, ps_i, pt_i);
    cls_alt = classify(owner_i[alt_way], ps_i, pt_i);

    way_o   = lru_way;
    evict_o = 1'b1;
    alt_o   = 1'b0;
    cps_o   = cps_i;
    cpt_o   = cpt_i;

    if (has_inv) begin
      // cold fill: nothing is evicted
      way_o   = inv_way;
      evict_o = 1'b0;
      if (attack_i) begin
        if (cls_in == OWN_SPY)    cps_o = cps_i + 1'b1;
        if (cls_in == OWN_TROJAN) cpt_o = cpt_i + 1'b1;
      end
    end else if (attack_i) begin
      if (cls_in != OWN_OTHER && pin_i != p_w && alt_found &&
          ((cls_w == OWN_SPY    && cps_i <= th_s_i) ||
           (cls_w == OWN_TROJAN && cpt_i <= th_t_i))) begin
        // restricted: take the alternative victim
        way_o = alt_way;
        alt_o = 1'b1;
        if (owner_i[alt_way] != pin_i && cls_alt == OWN_OTHER) begin
          if (cls_in == OWN_SPY)    cps_o = cps_i + 1'b1;
          if (cls_in == OWN_TROJAN) cpt_o = cpt_i + 1'b1;
        end
      end else if (pin_i != p_w) begin
        // evict the LRU victim, updateCounter(i, pin, p_w)
        if (cls_w == OWN_SPY)    cps_o = cps_i - 1'b1;
        if (cls_w == OWN_TROJAN) cpt_o = cpt_i - 1'b1;
        if (cls_in == OWN_SPY)    cps_o = cps_o + 1'b1;
        if (cls_in == OWN_TROJAN) cpt_o = cpt_o + 1'b1;
      end
    end
  end

  // The LRU search has no exclusion and always finds a way.
  always_comb assert (lru_found || WAYS == 0);

endmodule
