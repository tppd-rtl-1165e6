// cca_detector: cross-process conflict-miss counter that finds covert channels.
//
// A Prime+Probe covert channel makes the spy and the trojan evict each
// other's blocks in one LLC set over and over.  The detector therefore counts,
// for every set, the conflict misses in which the evicted block belonged to a
// different process than the incoming one ("cross-process" misses), over a
// fixed window of WINDOW cycles.  When a set's count in the current window
// reaches TH, the set is reported once, with the two processes of the miss
// that crossed the threshold: the incoming process as trojan, the owner of the
// evicted block as spy (TPPD treats the two symmetrically when th_s = th_t).
// A reported set stays reported until the controller disengages it and
// re-arms it through rearm_i (the entry is then cleared).
//
// The paper reuses an existing conflict-miss detector and states only that the
// number of cross-process conflict misses per unit of time separates the
// attack from benign mixes; the window (0.1 s = 200M cycles at 2 GHz) follows
// the unit of time quoted for that measurement, the threshold (2000) is this
// design's choice between the benign and the attack counts plotted there.
//
// Per-set state: an epoch stamp, the count and a reported bit.  A count whose
// stamp is not the current epoch counts as zero, so no sweep is needed at the
// end of a window (the 8-bit stamp repeats every 256 windows).  After reset
// the detector walks all sets once to clear them (SETS cycles, init_o high).
//
// Interface: miss_valid_i marks one eviction per cycle at most (set, incoming
// process, owner of the evicted block).  A report is held on det_valid_o
// until det_ready_i; while one is pending, a further set that crosses the
// threshold is reported on its next cross-process miss.  rearm_i clears the
// entry of rearm_set_i; it takes precedence over a miss in the same cycle.
module cca_detector #(
  parameter int unsigned SETS    = tppd_pkg::LLC_SETS,
  parameter int unsigned PID_W   = tppd_pkg::PID_W,
  parameter int unsigned WINDOW  = tppd_pkg::DET_WINDOW,
  parameter int unsigned TH      = tppd_pkg::DET_TH,
  parameter int unsigned EPOCH_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    init_o,
  input  logic                    miss_valid_i,
  input  logic [$clog2(SETS)-1:0] miss_set_i,
  input  logic [PID_W-1:0]        pin_i,
  input  logic [PID_W-1:0]        pout_i,
  input  logic                    rearm_i,
  input  logic [$clog2(SETS)-1:0] rearm_set_i,
  output logic                    det_valid_o,
  input  logic                    det_ready_i,
  output logic [$clog2(SETS)-1:0] det_set_o,
  output logic [PID_W-1:0]        det_ps_o,
  output logic [PID_W-1:0]        det_pt_o
);

  localparam int unsigned SW  = $clog2(SETS);
  localparam int unsigned CW  = $clog2(TH + 1);
  localparam int unsigned WCW = $clog2(WINDOW);

  typedef struct packed {
    logic [EPOCH_W-1:0] stamp;
    logic [CW-1:0]      cnt;
    logic               reported;
  } entry_t;

  entry_t             mem [SETS];
  entry_t             cur, nxt;
  logic [WCW-1:0]     win_cnt;
  logic [EPOCH_W-1:0] epoch;
  logic [SW-1:0]      init_idx;
  logic               xmiss, fire;

  assign xmiss = miss_valid_i && !init_o && !rearm_i && (pin_i != pout_i);
  assign cur   = mem[miss_set_i];

  always_comb begin
    nxt = cur;
    if (cur.stamp != epoch) begin
      nxt.stamp = epoch;
      nxt.cnt   = '0;
    end
    if (nxt.cnt != CW'(TH)) nxt.cnt = nxt.cnt + 1'b1;
    fire = xmiss && !cur.reported && (nxt.cnt >= CW'(TH)) &&
           !(det_valid_o && !det_ready_i);
    nxt.reported = cur.reported | fire;
  end

  // per-set state
  always_ff @(posedge clk) begin
    if (init_o)       mem[init_idx]    <= '0;
    else if (rearm_i) mem[rearm_set_i] <= '0;
    else if (xmiss)   mem[miss_set_i]  <= nxt;
  end

  // window, epoch, init walk and report register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_o      <= 1'b1;
      init_idx    <= '0;
      win_cnt     <= '0;
      epoch       <= '0;
      det_valid_o <= 1'b0;
      det_set_o   <= '0;
      det_ps_o    <= '0;
      det_pt_o    <= '0;
    end else begin
      if (init_o) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == SW'(SETS - 1)) init_o <= 1'b0;
      end
      if (win_cnt == WCW'(WINDOW - 1)) begin
        win_cnt <= '0;
        epoch   <= epoch + 1'b1;
      end else begin
        win_cnt <= win_cnt + 1'b1;
      end
      if (det_valid_o && det_ready_i) det_valid_o <= 1'b0;
      if (fire) begin
        det_valid_o <= 1'b1;
        det_set_o   <= miss_set_i;
        det_ps_o    <= pout_i;
        det_pt_o    <= pin_i;
      end
    end
  end

  // A report stays stable until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   det_valid_o && !det_ready_i |=> det_valid_o && $stable(det_set_o));

endmodule
