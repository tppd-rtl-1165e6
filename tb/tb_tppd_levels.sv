// tb_tppd_levels: the covert-channel experiment for TPPD-1 to TPPD-4.
//
// The complete cache at its default parameters, with the 250-cycle DRAM
// model.  For each z = 1..4 the cache is reset and the thresholds are set to
// z through the run-time threshold port.  Core 0 (spy) and core 1 (trojan)
// then run a Prime+Probe channel on set 77, each with an eviction set of 8
// blocks, until the detector engages TPPD on that set.  After that 24 bits
// (0, 1, then random) are sent.  For each bit value the testbench records the
// spy's probe misses, its probe time (cycles for its 8 reads) and how many
// blocks it holds in the set just before probing, and prints the ranges.
//
// Checks, per level: before engagement a 1 costs 8 probe misses and a 0 none;
// after it the spy never holds fewer than z blocks; probe misses and probe
// time are the same for 0 and 1 (with 8-block eviction sets every probe read
// misses once the spy is held below 8 ways); the spy's share before the probe
// is exactly z after a 1 and A-z after a 0, so it hides the bit only at
// z = A/2.  It also counts all LLC misses per bit, for equal numbers of 0s
// and 1s, with and without the defence, and checks that TPPD raises them by
// the same amount at every z.  The probe workload and the measured quantities are this
// testbench's choice; the published evaluation measured probe time in a
// simulator with system noise.
module tb_tppd_levels;
  import tppd_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  req_valid, req_ready, req_write;
  logic [CORE_W-1:0]     req_core;
  logic [PID_W-1:0]      req_pid;    // each core runs one process, id = core id
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
    .term_valid_i(1'b0), .term_pid_i('0), .term_ready_o(),
    .ev_engage_o(ev_engage), .ev_engage_set_o(ev_engage_set), .ev_disengage_o(), .ev_alt_o(ev_alt),
    .ev_evict_o(ev_evict));

  dram_model mem (
    .clk, .rst_n, .req_valid(m_valid), .req_ready(m_ready), .req_write(m_write),
    .req_addr(m_addr), .req_wdata(m_wdata), .resp_valid(m_rvalid), .resp_data(m_rdata));

  int checks = 0, failures = 0;
  bit engaged = 0;
  localparam int ST = 77, SPY = 0, TRO = 1;

  always @(posedge clk) if (ev_engage && int'(ev_engage_set) == ST) engaged = 1;

  // all LLC misses, spy and trojan together
  int llc_misses = 0;
  always @(posedge clk) if (resp_valid && !resp_hit) llc_misses++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [ADDR_W-1:0] mk_addr(int tag, int set);
    return {TAG_W'(tag), SET_W'(set), OFFS_W'(0)};
  endfunction

  // one read; returns hit and latency in cycles
  task automatic access(input int core, input logic [ADDR_W-1:0] addr, output bit hit,
                        output int lat);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_core = CORE_W'(core); req_pid = PID_W'(core); req_addr = addr; req_write = 0;
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid && lat < 2000) begin
      @(negedge clk);
      lat++;
    end
    check(resp_valid, "response arrives");
    hit = resp_hit;
  endtask

  // one transmitted bit: trojan step, then spy probe; returns probe misses/time
  task automatic send_bit(input bit b, output int misses, output int cycles, output int held);
    bit hit;
    int lat;
    if (b) for (int k = 0; k < 8; k++) access(TRO, mk_addr(200 + k, ST), hit, lat);
    held = spy_blocks();
    misses = 0; cycles = 0;
    for (int k = 0; k < 8; k++) begin
      access(SPY, mk_addr(100 + k, ST), hit, lat);
      misses += !hit;
      cycles += lat;
    end
  endtask

  function automatic int spy_blocks();
    int n = 0;
    for (int w = 0; w < LLC_WAYS; w++)
      if (dut.u_store.meta_mem[ST][w].valid && int'(dut.u_store.meta_mem[ST][w].pid) == SPY) n++;
    return n;
  endfunction

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hit;
    int lat, m, c, h, rounds = 0;
    int und_miss, und_bits;
    real und_rate, tppd_rate [5];
    int gap [5];
    req_valid = 0; req_core = '0; req_pid = '0; req_addr = '0; req_write = 0; req_wdata = '0;
    cfg_valid = 0; cfg_th_s = '0; cfg_th_t = '0;
    gap[0] = -1;

    for (int z = 1; z <= 4; z++) begin
      automatic int min0 = 99, max0 = -1, min1 = 99, max1 = -1;
      automatic int tmin0 = 1 << 30, tmax0 = 0, tmin1 = 1 << 30, tmax1 = 0;
      automatic int hmin0 = 99, hmax0 = -1, hmin1 = 99, hmax1 = -1;
      automatic int lm0 = 0, lm1 = 0, n0 = 0, n1 = 0;
      // every level starts from a reset cache
      @(negedge clk);
      rst_n = 0; engaged = 0; rounds = 0; und_miss = 0; und_bits = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      cfg_valid = 1; cfg_th_s = CNT_W'(z); cfg_th_t = CNT_W'(z);
      @(negedge clk);
      cfg_valid = 0;
      check(th_s == CNT_W'(z) && th_t == CNT_W'(z), "threshold taken");
      while (!req_ready) @(negedge clk);

      // undefended channel until the detector engages
      for (int k = 0; k < 8; k++) access(SPY, mk_addr(100 + k, ST), hit, lat);
      while (!engaged && rounds < 400) begin
        automatic bit b = rounds % 2;
        automatic int m_start = llc_misses;
        send_bit(b, m, c, h);
        if (!engaged) begin
          und_miss += llc_misses - m_start;
          und_bits++;
        end
        if (!engaged) check(m == (b ? 8 : 0), $sformatf("undefended bit %0d: %0d misses", b, m));
        if (!engaged && b) gap[0] = m;
        rounds++;
      end
      check(engaged, "TPPD engaged on the targeted set");
      $display("TPPD-%0d run: undefended probe misses bit1=%0d bit0=0; engaged after %0d bits",
               z, gap[0], rounds);
      // settle into the new partition
      for (int r = 0; r < 4; r++) send_bit(r % 2, m, c, h);
      for (int r = 0; r < 24; r++) begin
        automatic bit b = (r < 2) ? r[0] : 1'($urandom_range(1));
        automatic int m_start = llc_misses;
        send_bit(b, m, c, h);
        if (b) begin lm1 += llc_misses - m_start; n1++; end
        else   begin lm0 += llc_misses - m_start; n0++; end
        check(spy_blocks() >= z, $sformatf("TPPD-%0d: spy keeps %0d blocks", z, spy_blocks()));
        if (b) begin
          min1 = (m < min1) ? m : min1; max1 = (m > max1) ? m : max1;
          tmin1 = (c < tmin1) ? c : tmin1; tmax1 = (c > tmax1) ? c : tmax1;
          hmin1 = (h < hmin1) ? h : hmin1; hmax1 = (h > hmax1) ? h : hmax1;
        end else begin
          min0 = (m < min0) ? m : min0; max0 = (m > max0) ? m : max0;
          tmin0 = (c < tmin0) ? c : tmin0; tmax0 = (c > tmax0) ? c : tmax0;
          hmin0 = (h < hmin0) ? h : hmin0; hmax0 = (h > hmax0) ? h : hmax0;
        end
      end
      gap[z] = max1 - min0;
      // LLC misses per transmitted bit, for a channel sending as many 0s as 1s
      und_rate = real'(und_miss) / real'(und_bits);
      tppd_rate[z] = (real'(lm0) / real'(n0) + real'(lm1) / real'(n1)) / 2.0;
      $display("TPPD-%0d: LLC misses per bit %0.2f without defence, %0.2f with TPPD-%0d (%0.0f%% more)",
               z, und_rate, tppd_rate[z], z, 100.0 * (tppd_rate[z] / und_rate - 1.0));
      check(tppd_rate[z] > und_rate, $sformatf("TPPD-%0d costs the attackers extra misses", z));
      if (z > 1) check(tppd_rate[z] == tppd_rate[z-1], $sformatf("TPPD-%0d and TPPD-%0d cost the same", z - 1, z));
      $display("TPPD-%0d: probe misses bit0 %0d..%0d, bit1 %0d..%0d; probe cycles bit0 %0d..%0d, bit1 %0d..%0d; spy blocks before probe bit0 %0d..%0d, bit1 %0d..%0d",
               z, min0, max0, min1, max1, tmin0, tmax0, tmin1, tmax1, hmin0, hmax0, hmin1, hmax1);
      check(gap[z] < gap[0], $sformatf("TPPD-%0d narrows the miss gap", z));
      if (z > 1) check(gap[z] <= gap[z-1], $sformatf("gap does not grow from TPPD-%0d to TPPD-%0d", z - 1, z));
      // an 8-address probe misses every time once the spy is held below 8 ways
      check(min0 == max0 && min1 == max1 && min0 == min1, $sformatf("TPPD-%0d: probe misses equal for 0 and 1", z));
      check(tmin0 == tmax1 && tmax0 == tmin1, $sformatf("TPPD-%0d: probe times equal for 0 and 1", z));
      // what is left: the spy's share of the set still depends on the bit
      // (8-z after a 0, z after a 1) except at z = A/2
      check(hmin1 == z && hmax1 == z, $sformatf("TPPD-%0d: spy held at z after a 1", z));
      check(hmin0 == LLC_WAYS - z && hmax0 == LLC_WAYS - z, $sformatf("TPPD-%0d: spy holds A-z after a 0", z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
