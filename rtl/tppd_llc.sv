// tppd_llc: shared last-level cache with Targeted Pseudo Partitioning (TPPD).
//
// A blocking, set-associative, write-back LLC shared by NCORES cores, with two
// additions that defend against cross-core Prime+Probe covert channels:
//
//  * cca_detector watches the evictions and reports a set in which
//    cross-process conflict misses pile up, with the two suspected processes
//    (spy and trojan).
//  * When a report arrives the controller engages TPPD on that set: it counts
//    the spy's and the trojan's valid blocks in the set and writes the tuple
//    (attack_flag=1, pS, pT, CpS, CpT) into tppd_table.  From then on every
//    miss in that set chooses its victim through tppd_evict, which stops the
//    spy and the trojan from pushing each other below TH_S/TH_T blocks.
//    Innocent processes, and every set not reported, see plain LRU.
//  * A set stays engaged until one of its two suspects ends.  A pulse on
//    term_valid_i names the process that ended; the controller then walks
//    all sets (SETS cycles, state CLEAR), clears the tuple of every engaged
//    set whose pS or pT is that process, and re-arms the detector for it.
//
// A request carries the core (for the sharers bits and the response) and the
// process id, which becomes the owner of a block it brings in.  With the
// default PID_W = 2 the process id is the core id, one process bound per
// core, as in the evaluated configuration; PID_W = 16 stores real process
// ids, the practical variant the storage budget also covers.  The sharers
// bits of a block record which cores' L1s may hold it; an eviction raises a
// back-invalidation to those cores to keep the hierarchy inclusive.  The
// coherence protocol itself lives outside this block.
//
// Operation, one request at a time:
//   INIT      after reset: SETS cycles clearing valid bits, ages and tuples.
//   IDLE      engage a pending detector report (one cycle), else take a
//             process-end notice (term_valid_i && term_ready_o), else accept
//             a request (req_valid_i && req_ready_o).
//   CLEAR     SETS cycles, one set per cycle: disengage the sets of the
//             ended process.
//   LOOKUP    tag compare; the outcome is acted on HIT_LAT-1 cycles after
//             acceptance, so a hit answers exactly HIT_LAT cycles after the
//             request was accepted (resp_valid_o is a one-cycle pulse).
//             On a miss the victim is chosen, its metadata, ages and TPPD
//             counters are written, and the detector is told of the eviction.
//   WB        a dirty victim is written to memory.
//   FILL_REQ/ a read miss fetches the block; the response carries the data
//   FILL_WAIT returned by memory.  A write miss writes the whole block, so it
//             fetches nothing and answers after the lookup (and write-back).
//
// Engaging until the suspects end is the scheme's own rule; the paper leaves
// open how the end of a process reaches the cache, so the notice port and the
// sweep are this design's.
//
// The thresholds th_s/th_t start at TH_S/TH_T (TPPD-4 by default) and can be
// rewritten at any time through cfg_valid_i; a new value applies from the
// next miss on.  The scheme allows z to change while running; the port and
// its timing are this design's.
//
// Requests and memory traffic move whole 64-byte blocks.  The blocking
// controller, the whole-block write and the back-invalidation port are this
// design's choices; the paper evaluates the policy in a cycle-level simulator
// and does not describe the cache controller.
module tppd_llc
  import tppd_pkg::*;
#(
  parameter int unsigned TH_S       = TH_DEFAULT,
  parameter int unsigned TH_T       = TH_DEFAULT,
  parameter int unsigned LAT        = HIT_LAT,
  parameter int unsigned DET_WIN    = DET_WINDOW,
  parameter int unsigned DET_THRESH = DET_TH
) (
  input  logic                   clk,
  input  logic                   rst_n,

  // requests from the cores' private caches
  input  logic                   req_valid_i,
  output logic                   req_ready_o,
  input  logic [CORE_W-1:0]      req_core_i,
  input  logic [PID_W-1:0]       req_pid_i,      // process making the request
  input  logic [ADDR_W-1:0]      req_addr_i,
  input  logic                   req_write_i,
  input  logic [BLOCK_BITS-1:0]  req_wdata_i,
  output logic                   resp_valid_o,
  output logic                   resp_hit_o,
  output logic [CORE_W-1:0]      resp_core_o,
  output logic [BLOCK_BITS-1:0]  resp_data_o,

  // main memory
  output logic                   mem_req_valid_o,
  input  logic                   mem_req_ready_i,
  output logic                   mem_req_write_o,
  output logic [ADDR_W-1:0]      mem_req_addr_o,
  output logic [BLOCK_BITS-1:0]  mem_req_wdata_o,
  input  logic                   mem_resp_valid_i,
  input  logic [BLOCK_BITS-1:0]  mem_resp_data_i,

  // back-invalidation of an evicted block in the private caches
  output logic                   binv_valid_o,
  output logic [ADDR_W-1:0]      binv_addr_o,
  output logic [NCORES-1:0]      binv_sharers_o,

  // run-time TPPD-z configuration: new thresholds, taken when cfg_valid_i
  input  logic                   cfg_valid_i,
  input  logic [CNT_W-1:0]       cfg_th_s_i,
  input  logic [CNT_W-1:0]       cfg_th_t_i,
  output logic [CNT_W-1:0]       th_s_o,         // thresholds in use
  output logic [CNT_W-1:0]       th_t_o,

  // end of a process: disengage the sets it was a suspect in
  input  logic                   term_valid_i,
  input  logic [PID_W-1:0]       term_pid_i,
  output logic                   term_ready_o,

  // observation of the defence (one-cycle pulses)
  output logic                   ev_engage_o,    // a set was engaged
  output logic [SET_W-1:0]       ev_engage_set_o,
  output logic                   ev_disengage_o, // a set was disengaged
  output logic                   ev_alt_o,       // alternative victim taken
  output logic                   ev_evict_o      // a valid block was evicted
);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOKUP, S_WB, S_FILL_REQ, S_FILL_WAIT, S_CLEAR}
    state_e;

  state_e                     state;
  logic [SET_W-1:0]           init_idx;      // walk index of INIT and CLEAR
  logic [PID_W-1:0]           t_pid;         // process that ended
  logic [$clog2(LAT+1)-1:0]   lat_cnt;

  // request being served
  logic [CORE_W-1:0]          r_core;
  logic [PID_W-1:0]           r_pid;
  logic [ADDR_W-1:0]          r_addr;
  logic                       r_write;
  logic [BLOCK_BITS-1:0]      r_wdata;
  logic [WAY_W-1:0]           r_way;
  logic [ADDR_W-1:0]          wb_addr;
  logic [BLOCK_BITS-1:0]      wb_data;

  logic [SET_W-1:0]           r_set;
  logic [TAG_W-1:0]           r_tag;
  assign r_set = r_addr[OFFS_W +: SET_W];
  assign r_tag = r_addr[ADDR_W-1 -: TAG_W];

  // ---------------------------------------------------------------- arrays
  logic [SET_W-1:0]                   rd_set, wr_set;
  meta_t [LLC_WAYS-1:0]               rd_meta, meta_wdata;
  logic  [LLC_WAYS-1:0][AGE_W-1:0]    rd_ages, ages_wdata, ages_touched;
  logic  [LLC_WAYS-1:0][BLOCK_BITS-1:0] rd_data;
  logic  [LLC_WAYS-1:0]               meta_we;
  logic                               ages_we, data_we;
  logic  [WAY_W-1:0]                  data_way, touch_way;
  logic  [BLOCK_BITS-1:0]             data_wdata;
  tuple_t                             tup, tup_wdata;
  logic                               tup_we;

  // detector
  logic             det_init, det_valid, det_ready;
  logic [SET_W-1:0] det_set;
  logic [PID_W-1:0] det_ps, det_pt;
  logic             miss_ev;
  logic [PID_W-1:0] miss_pout;
  logic             clr_hit;     // CLEAR walk: this set is released

  llc_store u_store (
    .clk,
    .rd_set_i(rd_set), .rd_meta_o(rd_meta), .rd_ages_o(rd_ages), .rd_data_o(rd_data),
    .wr_set_i(wr_set), .meta_we_i(meta_we), .meta_wdata_i(meta_wdata),
    .ages_we_i(ages_we), .ages_wdata_i(ages_wdata),
    .data_we_i(data_we), .data_way_i(data_way), .data_wdata_i(data_wdata)
  );

  tppd_table u_table (
    .clk, .rd_set_i(rd_set), .rd_o(tup),
    .we_i(tup_we), .wr_set_i(wr_set), .wr_i(tup_wdata)
  );

  cca_detector #(.WINDOW(DET_WIN), .TH(DET_THRESH)) u_det (
    .clk, .rst_n, .init_o(det_init),
    .miss_valid_i(miss_ev), .miss_set_i(r_set), .pin_i(r_pid), .pout_i(miss_pout),
    .rearm_i(clr_hit), .rearm_set_i(init_idx),
    .det_valid_o(det_valid), .det_ready_i(det_ready),
    .det_set_o(det_set), .det_ps_o(det_ps), .det_pt_o(det_pt)
  );

  // ---------------------------------------------------------------- lookup
  logic [LLC_WAYS-1:0]             hit_vec;
  logic                            hit;
  logic [WAY_W-1:0]                hit_way;
  logic [LLC_WAYS-1:0]             valid_vec;
  logic [LLC_WAYS-1:0][PID_W-1:0]  owner_vec;

  always_comb begin
    hit_vec = '0;
    hit_way = '0;
    for (int w = 0; w < LLC_WAYS; w++) begin
      valid_vec[w] = rd_meta[w].valid;
      owner_vec[w] = rd_meta[w].pid;
      hit_vec[w]   = rd_meta[w].valid && rd_meta[w].tag == r_tag;
      if (hit_vec[w]) hit_way = w[WAY_W-1:0];
    end
    hit = |hit_vec;
  end

  // victim choice (TPPD-modified LRU)
  logic [WAY_W-1:0] vic_way;
  logic             vic_evict, vic_alt;
  logic [CNT_W-1:0] new_cps, new_cpt;

  tppd_evict u_evict (
    .valid_i(valid_vec), .ages_i(rd_ages), .owner_i(owner_vec),
    .attack_i(tup.attack), .ps_i(tup.ps), .pt_i(tup.pt), .cps_i(tup.cps), .cpt_i(tup.cpt),
    .pin_i(r_pid), .th_s_i(th_s_o), .th_t_i(th_t_o),
    .way_o(vic_way), .evict_o(vic_evict), .alt_o(vic_alt), .cps_o(new_cps), .cpt_o(new_cpt)
  );

  lru_age_update u_lru (.ages_i(rd_ages), .way_i(touch_way), .ages_o(ages_touched));

  // engagement: count the suspects' blocks in the reported set
  logic [CNT_W-1:0] eng_cps, eng_cpt;
  always_comb begin
    eng_cps = '0;
    eng_cpt = '0;
    for (int w = 0; w < LLC_WAYS; w++) begin
      if (rd_meta[w].valid && rd_meta[w].pid == det_ps) eng_cps = eng_cps + 1'b1;
      if (rd_meta[w].valid && rd_meta[w].pid == det_pt) eng_cpt = eng_cpt + 1'b1;
    end
  end

  logic decide, engage, accept, term;
  assign decide      = (state == S_LOOKUP) && (lat_cnt == ($clog2(LAT+1))'(LAT - 1));
  assign engage       = (state == S_IDLE) && det_valid;
  assign term_ready_o = (state == S_IDLE) && !det_valid;
  assign term         = term_valid_i && term_ready_o;
  assign req_ready_o  = (state == S_IDLE) && !det_valid && !term_valid_i;
  assign clr_hit      = (state == S_CLEAR) && tup.attack && (tup.ps == t_pid || tup.pt == t_pid);
  assign accept       = req_valid_i && req_ready_o;
  assign det_ready    = engage;

  assign rd_set    = (state == S_IDLE) ? det_set : (state == S_CLEAR) ? init_idx : r_set;
  assign touch_way = hit ? hit_way : vic_way;
  assign miss_pout = rd_meta[vic_way].pid;
  assign miss_ev   = decide && !hit && vic_evict;

  // ---------------------------------------------------------------- writes
  always_comb begin
    wr_set     = r_set;
    meta_we    = '0;
    meta_wdata = rd_meta;
    ages_we    = 1'b0;
    ages_wdata = ages_touched;
    data_we    = 1'b0;
    data_way   = r_way;
    data_wdata = mem_resp_data_i;
    tup_we     = 1'b0;
    tup_wdata  = tup;

    unique case (state)
      S_INIT: begin
        wr_set     = init_idx;
        meta_we    = '1;
        meta_wdata = '0;
        ages_we    = 1'b1;
        for (int w = 0; w < LLC_WAYS; w++) ages_wdata[w] = w[AGE_W-1:0];
        tup_we     = 1'b1;
        tup_wdata  = '0;
      end
      S_IDLE: begin
        if (engage) begin
          wr_set    = det_set;
          tup_we    = 1'b1;
          tup_wdata = '{attack: 1'b1, ps: det_ps, pt: det_pt, cps: eng_cps, cpt: eng_cpt};
        end
      end
      S_LOOKUP: begin
        if (decide) begin
          ages_we = 1'b1;
          if (hit) begin
            meta_we[hit_way]            = 1'b1;
            meta_wdata[hit_way].sharers = rd_meta[hit_way].sharers | NCORES'(1 << r_core);
            meta_wdata[hit_way].dirty   = rd_meta[hit_way].dirty | r_write;
            data_we    = r_write;
            data_way   = hit_way;
            data_wdata = r_wdata;
          end else begin
            meta_we[vic_way]    = 1'b1;
            meta_wdata[vic_way] = '{tag: r_tag, sharers: NCORES'(1 << r_core), pid: r_pid,
                                    valid: 1'b1, dirty: r_write};
            data_we    = r_write;
            data_way   = vic_way;
            data_wdata = r_wdata;
            tup_we     = tup.attack;
            tup_wdata.cps = new_cps;
            tup_wdata.cpt = new_cpt;
          end
        end
      end
      S_FILL_WAIT: data_we = mem_resp_valid_i;
      S_CLEAR: begin
        wr_set    = init_idx;
        tup_we    = clr_hit;
        tup_wdata = '0;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_INIT;
      init_idx        <= '0;
      t_pid           <= '0;
      lat_cnt         <= '0;
      r_core          <= '0;
      r_pid           <= '0;
      r_addr          <= '0;
      r_write         <= 1'b0;
      r_wdata         <= '0;
      r_way           <= '0;
      wb_addr         <= '0;
      wb_data         <= '0;
      resp_valid_o    <= 1'b0;
      resp_hit_o      <= 1'b0;
      resp_core_o     <= '0;
      resp_data_o     <= '0;
      binv_valid_o    <= 1'b0;
      binv_addr_o     <= '0;
      binv_sharers_o  <= '0;
      ev_engage_o     <= 1'b0;
      ev_engage_set_o <= '0;
      ev_disengage_o  <= 1'b0;
      ev_alt_o        <= 1'b0;
      ev_evict_o      <= 1'b0;
    end else begin
      resp_valid_o <= 1'b0;
      binv_valid_o <= 1'b0;
      ev_engage_o  <= 1'b0;
      ev_disengage_o <= 1'b0;
      ev_alt_o     <= 1'b0;
      ev_evict_o   <= 1'b0;

      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == SET_W'(LLC_SETS - 1)) state <= S_IDLE;
        end

        S_IDLE: begin
          if (engage) begin
            ev_engage_o     <= 1'b1;
            ev_engage_set_o <= det_set;
          end else if (term) begin
            t_pid    <= term_pid_i;
            init_idx <= '0;
            state    <= S_CLEAR;
          end else if (accept) begin
            r_core  <= req_core_i;
            r_pid   <= req_pid_i;
            r_addr  <= req_addr_i;
            r_write <= req_write_i;
            r_wdata <= req_wdata_i;
            lat_cnt <= 1;
            state   <= S_LOOKUP;
          end
        end

        S_LOOKUP: begin
          lat_cnt <= lat_cnt + 1'b1;
          if (decide) begin
            if (hit) begin
              resp_valid_o <= 1'b1;
              resp_hit_o   <= 1'b1;
              resp_core_o  <= r_core;
              resp_data_o  <= r_write ? r_wdata : rd_data[hit_way];
              state        <= S_IDLE;
            end else begin
              r_way      <= vic_way;
              ev_alt_o   <= vic_alt;
              ev_evict_o <= vic_evict;
              wb_addr    <= {rd_meta[vic_way].tag, r_set, OFFS_W'(0)};
              wb_data    <= rd_data[vic_way];
              if (vic_evict && rd_meta[vic_way].sharers != '0) begin
                binv_valid_o   <= 1'b1;
                binv_addr_o    <= {rd_meta[vic_way].tag, r_set, OFFS_W'(0)};
                binv_sharers_o <= rd_meta[vic_way].sharers;
              end
              if (vic_evict && rd_meta[vic_way].dirty) begin
                state <= S_WB;
              end else if (r_write) begin
                resp_valid_o <= 1'b1;
                resp_hit_o   <= 1'b0;
                resp_core_o  <= r_core;
                resp_data_o  <= r_wdata;
                state        <= S_IDLE;
              end else begin
                state <= S_FILL_REQ;
              end
            end
          end
        end

        S_WB: begin
          if (mem_req_ready_i) begin
            if (r_write) begin
              resp_valid_o <= 1'b1;
              resp_hit_o   <= 1'b0;
              resp_core_o  <= r_core;
              resp_data_o  <= r_wdata;
              state        <= S_IDLE;
            end else begin
              state <= S_FILL_REQ;
            end
          end
        end

        S_FILL_REQ: if (mem_req_ready_i) state <= S_FILL_WAIT;

        S_FILL_WAIT: begin
          if (mem_resp_valid_i) begin
            resp_valid_o <= 1'b1;
            resp_hit_o   <= 1'b0;
            resp_core_o  <= r_core;
            resp_data_o  <= mem_resp_data_i;
            state        <= S_IDLE;
          end
        end

        S_CLEAR: begin
          ev_disengage_o <= clr_hit;
          init_idx       <= init_idx + 1'b1;
          if (init_idx == SET_W'(LLC_SETS - 1)) state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // thresholds: reset to TH_S/TH_T, rewritable at any time
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th_s_o <= CNT_W'(TH_S);
      th_t_o <= CNT_W'(TH_T);
    end else if (cfg_valid_i) begin
      th_s_o <= cfg_th_s_i;
      th_t_o <= cfg_th_t_i;
    end
  end

  // memory request
  always_comb begin
    mem_req_valid_o = (state == S_WB) || (state == S_FILL_REQ);
    mem_req_write_o = (state == S_WB);
    mem_req_addr_o  = (state == S_WB) ? wb_addr : {r_addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
    mem_req_wdata_o = wb_data;
  end

  // ---------------------------------------------------------------- checks
  // A tag is present at most once in a set.
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_LOOKUP |-> $onehot0(hit_vec));
  // A memory request is held until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid_o && !mem_req_ready_i |=> mem_req_valid_o && $stable(mem_req_addr_o));
  // The detector finishes its own clearing walk with the controller's.
  assert property (@(posedge clk) disable iff (!rst_n) state != S_INIT |-> !det_init);

endmodule
