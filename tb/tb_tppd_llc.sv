// tb_tppd_llc: end-to-end test of the TPPD last-level cache at its default
// parameters (4096 sets, 8 ways, 18-cycle access, TPPD-4, detector window
// 200M cycles and threshold 2000), with a 250-cycle behavioural DRAM.
//
// Phase A  random reads and writes from the four cores over a few sets.  A
//          reference (plain LRU per set, dirty bits, a shadow of every block)
//          predicts hit/miss, the exact latency (18 cycles for a hit,
//          +1 for a dirty write-back, +251 for a memory read) and the data.
// Phase B  a Prime+Probe covert channel: core 0 (spy) and core 1 (trojan)
//          each own an eviction set of 8 blocks in set 77.  Per bit: the spy
//          primes, the trojan touches its 8 blocks to send 1 or stays idle to
//          send 0, the spy probes and counts its misses.  Before detection
//          the spy sees 8 misses for a 1 and none for a 0.  The detector must
//          engage TPPD on set 77; afterwards the probe outcome must be the
//          same for both bit values, the spy and trojan must each keep at
//          least 4 blocks, and the TPPD counters must match the set contents.
// Phase C  an innocent core (2) sweeps set 77 with its own blocks: it is not
//          restricted (no alternative victims) and the counters drop to 0.
// Phase D  the thresholds are switched to TPPD-2 at run time; the spy primes
//          the set and the trojan sends a 1: the spy must keep exactly 2
//          blocks (it keeps 4 under TPPD-4).
// Phase E  process-end notices: first for core 3, which is no suspect
//          (nothing changes), then for the trojan.  Each sweep must take
//          one cycle per set after the cycle that takes the notice; the
//          second must disengage set 77 only.
//          Plain LRU must be back (the trojan's 8 blocks evict all of the
//          spy's), and a new channel on the same cores must be readable
//          again until the re-armed detector engages the set a second time.
//          Meanwhile a second pair (core 3 spy, core 2 trojan) runs its own
//          channel on set 300: both sets must be engaged, each with its own
//          pair, and both partitions must hold at once (TPPD-2 still).
//
// Every mechanism (hit, read miss, write miss, write-back, back-invalidation,
// engagement, alternative victim, innocent eviction in an engaged set,
// threshold switch, disengagement) is
// counted, and one that never happens is a failure.
module tb_tppd_llc;
  import tppd_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  req_valid, req_ready, req_write;
  logic [CORE_W-1:0]     req_core;
  logic [PID_W-1:0]      req_pid;    // each core runs one process, see pid_of
  logic [ADDR_W-1:0]     req_addr;
  logic [BLOCK_BITS-1:0] req_wdata;
  logic                  resp_valid, resp_hit;
  logic [CORE_W-1:0]     resp_core;
  logic [BLOCK_BITS-1:0] resp_data;
  logic                  m_valid, m_ready, m_write, m_rvalid;
  logic [ADDR_W-1:0]     m_addr;
  logic [BLOCK_BITS-1:0] m_wdata, m_rdata;
  logic                  binv_valid;
  logic [ADDR_W-1:0]     binv_addr;
  logic [NCORES-1:0]     binv_sharers;
  logic                  ev_engage, ev_alt, ev_evict;
  logic [SET_W-1:0]      ev_engage_set;
  logic                  cfg_valid;
  logic [CNT_W-1:0]      cfg_th_s, cfg_th_t, th_s, th_t;
  logic                  term_valid, term_ready, ev_disengage;
  logic [PID_W-1:0]      term_pid;

  tppd_llc dut (
    .clk, .rst_n,
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_core_i(req_core), .req_pid_i(req_pid),
    .req_addr_i(req_addr), .req_write_i(req_write), .req_wdata_i(req_wdata),
    .resp_valid_o(resp_valid), .resp_hit_o(resp_hit), .resp_core_o(resp_core),
    .resp_data_o(resp_data),
    .mem_req_valid_o(m_valid), .mem_req_ready_i(m_ready), .mem_req_write_o(m_write),
    .mem_req_addr_o(m_addr), .mem_req_wdata_o(m_wdata),
    .mem_resp_valid_i(m_rvalid), .mem_resp_data_i(m_rdata),
    .binv_valid_o(binv_valid), .binv_addr_o(binv_addr), .binv_sharers_o(binv_sharers),
    .cfg_valid_i(cfg_valid), .cfg_th_s_i(cfg_th_s), .cfg_th_t_i(cfg_th_t),
    .th_s_o(th_s), .th_t_o(th_t),
    .term_valid_i(term_valid), .term_pid_i(term_pid), .term_ready_o(term_ready),
    .ev_engage_o(ev_engage), .ev_engage_set_o(ev_engage_set), .ev_disengage_o(ev_disengage),
    .ev_alt_o(ev_alt),
    .ev_evict_o(ev_evict));

  dram_model mem (
    .clk, .rst_n, .req_valid(m_valid), .req_ready(m_ready), .req_write(m_write),
    .req_addr(m_addr), .req_wdata(m_wdata), .resp_valid(m_rvalid), .resp_data(m_rdata));

  int checks = 0, failures = 0;
  int n_hit = 0, n_rmiss = 0, n_wmiss = 0, n_wb = 0, n_binv = 0, n_engage = 0;
  int n_alt = 0, n_innocent_evict = 0, n_switch = 0, n_disengage = 0;
  int cur_set;     // set of the request being served
  bit engaged [LLC_SETS];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // ------------------------------------------------------------ reference
  typedef struct { logic [TAG_W-1:0] tag; bit dirty; } line_t;
  line_t                 ref_set [int][$];          // index 0 = most recent
  logic [BLOCK_BITS-1:0] ref_data [logic [ADDR_W-1:0]];

  function automatic logic [BLOCK_BITS-1:0] pattern(logic [ADDR_W-1:0] a);
    logic [BLOCK_BITS-1:0] b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = a[31:0] ^ (32'h9e37_79b9 * (i + 1));
    return b;
  endfunction

  function automatic logic [ADDR_W-1:0] mk_addr(int tag, int set);
    return {TAG_W'(tag), SET_W'(set), OFFS_W'(0)};
  endfunction

  function automatic logic [BLOCK_BITS-1:0] rand_block();
    logic [BLOCK_BITS-1:0] b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  // ------------------------------------------------------------ monitors
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) cur_set = int'(req_addr[OFFS_W +: SET_W]);
    if (ev_engage) begin
      n_engage++;
      engaged[ev_engage_set] = 1;
    end
    if (ev_alt) n_alt++;
    if (ev_disengage) n_disengage++;
    if (m_valid && m_ready && m_write) n_wb++;
    if (binv_valid) begin
      n_binv++;
      checks++;
      if (int'(binv_addr[OFFS_W +: SET_W]) != cur_set || binv_sharers == '0) begin
        failures++;
        $display("FAIL back-invalidation outside the accessed set");
      end
    end
  end

  // ------------------------------------------------------------ one access
  // Returns hit flag and latency; checks data, and (unless skip_model) the
  // hit/miss and latency predicted by the plain-LRU reference.
  task automatic access(input int core, input logic [ADDR_W-1:0] addr, input bit wr,
                        input bit use_model, output bit hit);
    logic [BLOCK_BITS-1:0] wdata = rand_block();
    logic [BLOCK_BITS-1:0] exp_data;
    int set = int'(addr[OFFS_W +: SET_W]);
    logic [TAG_W-1:0] tag = addr[ADDR_W-1 -: TAG_W];
    int lat = 0, idx = -1, exp_lat;
    bit exp_hit, wb = 0;

    exp_data = wr ? wdata : (ref_data.exists(addr) ? ref_data[addr] : pattern(addr));
    // reference (plain LRU)
    foreach (ref_set[set][i]) if (ref_set[set][i].tag == tag) idx = i;
    exp_hit = (idx >= 0);
    if (exp_hit) begin
      line_t l = ref_set[set][idx];
      l.dirty |= wr;
      ref_set[set].delete(idx);
      ref_set[set].push_front(l);
    end else begin
      line_t l;
      if (ref_set[set].size() == LLC_WAYS) begin
        l = ref_set[set].pop_back();
        wb = l.dirty;
      end
      l.tag = tag; l.dirty = wr;
      ref_set[set].push_front(l);
    end
    exp_lat = HIT_LAT + (exp_hit ? 0 : (int'(wb) + (wr ? 0 : MEM_LAT + 1)));

    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_core = CORE_W'(core); req_pid = PID_W'(pid_of(core)); req_addr = addr; req_write = wr; req_wdata = wdata;
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin
      @(negedge clk);
      lat++;
      if (lat > 2000) break;
    end
    hit = resp_hit;
    check(resp_valid, "response arrives");
    check(resp_core == CORE_W'(core), "response core");
    check(resp_data == exp_data, $sformatf("data of %h", addr));
    if (wr) ref_data[addr] = wdata;
    if (hit) n_hit++; else if (wr) n_wmiss++; else n_rmiss++;
    if (hit) check(lat == HIT_LAT, $sformatf("hit latency %0d", lat));
    if (use_model) begin
      check(hit == exp_hit, $sformatf("hit/miss of %h in set %0d: got %0d want %0d", addr, set, hit, exp_hit));
      check(lat == exp_lat, $sformatf("latency %0d want %0d", lat, exp_lat));
    end
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  localparam int ST = 77;          // targeted set
  localparam int SPY = 0, TRO = 1, INN = 2;
  localparam int ST2 = 300, SPY2 = 3, TRO2 = 2;   // second channel, phase E

  // Process id of the one process on each core: the core id when owner ids
  // are core ids (PID_W = 2), otherwise an unrelated number, so that the
  // process-id variant (PID_W = 16) is tested with ids that differ from cores.
  function automatic int pid_of(int core);
    return (PID_W > CORE_W) ? 'h3a0 + 7 * core : core;
  endfunction

  // process-end notice (argument: core whose process ended); returns the cycles until requests are taken again
  task automatic process_end(input int pid, output int cycles);
    @(negedge clk);
    term_valid = 1; term_pid = PID_W'(pid_of(pid));
    check(term_ready, "process-end notice taken in IDLE");
    @(negedge clk);
    term_valid = 0;
    cycles = 1;
    while (!req_ready && cycles < 10000) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  function automatic void count_owners(output int cs, output int ct, output int ci);
    count_pair(ST, SPY, TRO, cs, ct, ci);
  endfunction

  // the set's suspect pair is the processes of cores a and b, in either order
  function automatic bit holds_pair(int set, int a, int b);
    int ps = int'(dut.u_table.mem[set].ps), pt = int'(dut.u_table.mem[set].pt);
    return (ps == pid_of(a) && pt == pid_of(b)) || (ps == pid_of(b) && pt == pid_of(a));
  endfunction

  function automatic void count_pair(input int set, input int spy, input int tro,
                                     output int cs, output int ct, output int ci);
    cs = 0; ct = 0; ci = 0;
    for (int w = 0; w < LLC_WAYS; w++) begin
      meta_t m = dut.u_store.meta_mem[set][w];
      if (m.valid && int'(m.pid) == pid_of(spy)) cs++;
      else if (m.valid && int'(m.pid) == pid_of(tro)) ct++;
      else if (m.valid) ci++;
    end
  endfunction

  initial begin
    bit hit;
    int pre_rounds = 0, pre_ok = 0, post0 = -1, post1 = -1, post_rounds = 0;
    int alt_before;
    req_valid = 0; req_core = '0; req_pid = '0; req_addr = '0; req_write = 0; req_wdata = '0;
    cfg_valid = 0; cfg_th_s = '0; cfg_th_t = '0;
    term_valid = 0; term_pid = '0;
    foreach (engaged[s]) engaged[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // wait for the clearing walk
    while (!req_ready) @(negedge clk);
    check(dut.state != dut.S_INIT, "left INIT");

    // ---------------- phase A: functional
    for (int n = 0; n < 1500; n++) begin
      automatic int set = $urandom_range(3);
      access($urandom_range(3), mk_addr($urandom_range(12), set), $urandom_range(9) < 3, 1, hit);
    end
    $display("phase A done: hits=%0d read misses=%0d write misses=%0d wb=%0d binv=%0d",
             n_hit, n_rmiss, n_wmiss, n_wb, n_binv);

    // ---------------- phase B: covert channel
    // first prime
    for (int k = 0; k < 8; k++) access(SPY, mk_addr(100 + k, ST), 0, 1, hit);
    while (!engaged[ST] && pre_rounds < 400) begin
      automatic int bitv = pre_rounds % 3 != 0;
      automatic int misses = 0;
      if (bitv) for (int k = 0; k < 8; k++) access(TRO, mk_addr(200 + k, ST), 0, !engaged[ST], hit);
      for (int k = 0; k < 8; k++) begin
        access(SPY, mk_addr(100 + k, ST), 0, !engaged[ST], hit);
        misses += !hit;
      end
      if (!engaged[ST]) begin
        pre_ok += (misses == (bitv ? 8 : 0));
        check(misses == (bitv ? 8 : 0), $sformatf("undefended channel: bit %0d gave %0d misses", bitv, misses));
      end
      pre_rounds++;
    end
    $display("phase B: engaged after %0d rounds (%0d clean bits before)", pre_rounds, pre_ok);
    check(engaged[ST], "detector engaged TPPD on the targeted set");
    check(dut.u_table.mem[ST].attack, "attack flag set");
    // defended channel
    for (int r = 0; r < 24; r++) begin
      automatic int bitv = $urandom_range(1);
      automatic int misses = 0, cs, ct, ci;
      if (bitv) for (int k = 0; k < 8; k++) access(TRO, mk_addr(200 + k, ST), 0, 0, hit);
      count_owners(cs, ct, ci);
      check(cs >= 4 && ct >= 4, $sformatf("partition held after trojan: spy %0d trojan %0d", cs, ct));
      for (int k = 0; k < 8; k++) begin
        access(SPY, mk_addr(100 + k, ST), 0, 0, hit);
        misses += !hit;
      end
      count_owners(cs, ct, ci);
      check(cs >= 4 && ct >= 4, $sformatf("partition held after probe: spy %0d trojan %0d", cs, ct));
      check(int'(dut.u_table.mem[ST].cps) + int'(dut.u_table.mem[ST].cpt) == cs + ct,
            "TPPD counters match the set contents");
      if (r >= 2) begin
        if (bitv) begin if (post1 < 0) post1 = misses; check(misses == post1, "bit 1 probe stable"); end
        else      begin if (post0 < 0) post0 = misses; check(misses == post0, "bit 0 probe stable"); end
      end
      post_rounds++;
    end
    $display("phase B defended: probe misses bit0=%0d bit1=%0d, alternative victims=%0d", post0, post1, n_alt);
    check(post0 >= 0 && post1 >= 0 && post0 == post1, "spy cannot tell bit 0 from bit 1");

    // ---------------- phase C: innocent process in the targeted set
    alt_before = n_alt;
    for (int k = 0; k < 8; k++) begin
      automatic int ev0 = n_innocent_evict;
      access(INN, mk_addr(300 + k, ST), k % 2, 0, hit);
      if (!hit) n_innocent_evict++;
      check(ev0 != n_innocent_evict || hit, "innocent access");
    end
    check(n_alt == alt_before, "innocent process takes plain LRU victims");
    check(dut.u_table.mem[ST].cps == 0 && dut.u_table.mem[ST].cpt == 0,
          "counters follow the innocent sweep");
    // ---------------- phase D: switch to TPPD-2 while running
    check(th_s == 4 && th_t == 4, "reset thresholds are TPPD-4");
    @(negedge clk);
    cfg_valid = 1; cfg_th_s = 2; cfg_th_t = 2;
    @(negedge clk);
    cfg_valid = 0;
    check(th_s == 2 && th_t == 2, "thresholds switched to TPPD-2");
    n_switch++;
    for (int k = 0; k < 8; k++) access(SPY, mk_addr(100 + k, ST), 0, 0, hit);
    for (int k = 0; k < 8; k++) access(TRO, mk_addr(200 + k, ST), 0, 0, hit);
    begin
      int cs, ct, ci;
      count_owners(cs, ct, ci);
      check(cs == 2 && ct == 6, $sformatf("TPPD-2 leaves the spy 2 blocks: spy %0d trojan %0d", cs, ct));
    end

    // ---------------- phase E: end of a process, disengagement
    begin
      int cyc, cs, ct, ci, alt0, rounds = 0, rounds2 = 0;
      process_end(3, cyc);
      check(cyc == LLC_SETS + 1, $sformatf("notice cycle plus one sweep cycle per set: %0d", cyc));
      check(n_disengage == 0 && dut.u_table.mem[ST].attack, "unrelated process end keeps the set engaged");
      process_end(TRO, cyc);
      check(cyc == LLC_SETS + 1, $sformatf("notice cycle plus one sweep cycle per set: %0d", cyc));
      check(n_disengage == 1, $sformatf("disengagements %0d", n_disengage));
      check(!dut.u_table.mem[ST].attack, "set released when the trojan ends");
      // plain LRU again: a new process on the trojan's core evicts the spy
      alt0 = n_alt;
      for (int k = 0; k < 8; k++) access(SPY, mk_addr(100 + k, ST), 0, 0, hit);
      for (int k = 0; k < 8; k++) access(TRO, mk_addr(200 + k, ST), 0, 0, hit);
      count_owners(cs, ct, ci);
      check(cs == 0 && ct == 8 && n_alt == alt0, $sformatf("plain LRU after release: spy %0d trojan %0d", cs, ct));
      // a new channel is readable until the detector engages the set again;
      // a second pair (core 3 spy, core 2 trojan) runs its own channel on
      // set ST2 at the same time
      engaged[ST] = 0;
      for (int k = 0; k < 8; k++) access(SPY, mk_addr(100 + k, ST), 0, 0, hit);
      for (int k = 0; k < 8; k++) access(SPY2, mk_addr(400 + k, ST2), 0, 0, hit);
      for (int n = 0; n < 600 && !(engaged[ST] && engaged[ST2]); n++) begin
        automatic int bitv = n % 2, bit2 = (n / 2) % 2;
        automatic int misses = 0, misses2 = 0;
        automatic bit was1 = engaged[ST], was2 = engaged[ST2];
        if (bitv) for (int k = 0; k < 8; k++) access(TRO, mk_addr(200 + k, ST), 0, 0, hit);
        if (bit2) for (int k = 0; k < 8; k++) access(TRO2, mk_addr(500 + k, ST2), 0, 0, hit);
        for (int k = 0; k < 8; k++) begin
          access(SPY, mk_addr(100 + k, ST), 0, 0, hit);
          misses += !hit;
          access(SPY2, mk_addr(400 + k, ST2), 0, 0, hit);
          misses2 += !hit;
        end
        if (!engaged[ST]) check(misses == (bitv ? 8 : 0), $sformatf("released set: bit %0d gave %0d misses", bitv, misses));
        if (!engaged[ST2]) check(misses2 == (bit2 ? 8 : 0), $sformatf("second channel: bit %0d gave %0d misses", bit2, misses2));
        if (!was1) rounds++;
        if (!was2) rounds2++;
      end
      check(engaged[ST] && dut.u_table.mem[ST].attack, "re-armed detector engages the set again");
      check(engaged[ST2] && dut.u_table.mem[ST2].attack, "second targeted set engaged");
      check(holds_pair(ST, SPY, TRO), "first set holds its own pair");
      check(holds_pair(ST2, SPY2, TRO2), "second set holds its own pair");
      // both channels defended at once
      for (int r = 0; r < 8; r++) begin
        automatic int bitv = $urandom_range(1), bit2 = $urandom_range(1);
        automatic int cs2, ct2, ci2;
        if (bitv) for (int k = 0; k < 8; k++) access(TRO, mk_addr(200 + k, ST), 0, 0, hit);
        if (bit2) for (int k = 0; k < 8; k++) access(TRO2, mk_addr(500 + k, ST2), 0, 0, hit);
        count_pair(ST, SPY, TRO, cs, ct, ci);
        count_pair(ST2, SPY2, TRO2, cs2, ct2, ci2);
        // thresholds are still TPPD-2 from phase D
        check(cs >= int'(th_s) && ct >= int'(th_t) && cs2 >= int'(th_s) && ct2 >= int'(th_t),
              $sformatf("both partitions held: %0d/%0d and %0d/%0d", cs, ct, cs2, ct2));
        for (int k = 0; k < 8; k++) begin
          access(SPY, mk_addr(100 + k, ST), 0, 0, hit);
          access(SPY2, mk_addr(400 + k, ST2), 0, 0, hit);
        end
      end
      $display("phase E: released; set %0d re-engaged after %0d rounds, set %0d after %0d", ST, rounds, ST2, rounds2);
    end

    // no other set was ever engaged
    begin
      int others = 0;
      for (int i = 0; i < LLC_SETS; i++) if (engaged[i] && i != ST && i != ST2) others++;
      check(others == 0, $sformatf("only the targeted sets engaged (%0d others)", others));
    end

    // mechanisms seen
    check(n_hit > 0, "hits");
    check(n_rmiss > 0, "read misses");
    check(n_wmiss > 0, "write misses");
    check(n_wb > 0, "write-backs");
    check(n_binv > 0, "back-invalidations");
    check(n_engage == 3, $sformatf("engagements %0d", n_engage));
    check(n_disengage == 1, "disengagement");
    check(n_alt > 0, "alternative victims");
    check(n_innocent_evict > 0, "innocent evictions in an engaged set");
    check(n_switch > 0, "threshold switch");
    $display("mechanisms: hit=%0d rmiss=%0d wmiss=%0d wb=%0d binv=%0d engage=%0d alt=%0d innocent=%0d disengage=%0d",
             n_hit, n_rmiss, n_wmiss, n_wb, n_binv, n_engage, n_alt, n_innocent_evict, n_disengage);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
