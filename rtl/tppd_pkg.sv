// tppd_pkg: constants shared by the TPPD last-level cache.
//
// The defaults describe the main configuration: a 2 MB, 8-way, 64-byte-block
// shared L2 (4096 sets) serving 4 cores, an 18-cycle LLC access latency and
// TPPD-4, i.e. both partition thresholds at half the associativity, which is
// the configuration recommended for blocking covert channels.  The owner of a
// block is identified by its core id (PID_W = 2), as in the core-id column of the
// storage budget; PID_W = 16 gives the process-id column.
//
// Own choices: the physical address width (40 bits), the width of the spy and
// trojan block counters (one bit wider than log2(ways), so that a count of 8
// fits) and the detector window and threshold.
package tppd_pkg;

  // Cache geometry
  parameter int unsigned NCORES     = 4;
  parameter int unsigned LLC_WAYS   = 8;
  parameter int unsigned LLC_SETS   = 4096;
  parameter int unsigned BLOCK_BITS = 512;   // 64-byte blocks
  parameter int unsigned ADDR_W     = 40;    // byte address (own choice)
  parameter int unsigned OFFS_W     = $clog2(BLOCK_BITS / 8);

  // Owner id stored with every block.  2 bits = core id, for one process
  // bound per core; 16 bits gives real process ids.
  parameter int unsigned PID_W      = 2;
  parameter int unsigned CORE_W     = $clog2(NCORES);

  // Timing
  parameter int unsigned HIT_LAT    = 18;    // LLC access latency in cycles
  parameter int unsigned MEM_LAT    = 250;   // DRAM latency in cycles (memory model)

  // TPPD-z: th_s = th_t = z, recommended z = A/2
  parameter int unsigned TH_DEFAULT = LLC_WAYS / 2;

  // Cross-process conflict-miss detector (own values, see cca_detector)
  parameter int unsigned DET_WINDOW = 200_000_000; // 0.1 s at 2 GHz
  parameter int unsigned DET_TH     = 2000;

  // Derived widths
  parameter int unsigned SET_W      = $clog2(LLC_SETS);
  parameter int unsigned WAY_W      = $clog2(LLC_WAYS);
  parameter int unsigned AGE_W      = $clog2(LLC_WAYS);
  parameter int unsigned TAG_W      = ADDR_W - OFFS_W - SET_W;
  parameter int unsigned CNT_W      = $clog2(LLC_WAYS + 1);

  // Metadata of one LLC block, in the field order of the block layout:
  // tag, sharers bits, process id, valid bit, dirty bit (data kept apart)
  typedef struct packed {
    logic [TAG_W-1:0]  tag;
    logic [NCORES-1:0] sharers;
    logic [PID_W-1:0]  pid;
    logic              valid;
    logic              dirty;
  } meta_t;

  // Per-set TPPD tuple (attack_flag, pS, pT, CpS, CpT)
  typedef struct packed {
    logic              attack;
    logic [PID_W-1:0]  ps;
    logic [PID_W-1:0]  pt;
    logic [CNT_W-1:0]  cps;
    logic [CNT_W-1:0]  cpt;
  } tuple_t;

  // Owner class of a block in a suspicious set
  typedef enum logic [1:0] {
    OWN_OTHER  = 2'd0,   // innocent process (or no block)
    OWN_SPY    = 2'd1,
    OWN_TROJAN = 2'd2
  } owner_class_e;

endpackage
