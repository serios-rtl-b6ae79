// serios_pkg -- sizes and shared types of the SerIOS security unit.
//
// SerIOS watches a silicon-photonic (SiPh) sub-system, a mesh of tunable MZI
// nodes with optical inputs and photodetector outputs. The default sizes
// describe the 12-node, 4-input, 4-output optical multiplier used as the main
// example: 12 nodes, 4 I/Os and 4 baseline communication patterns.
//
// Timing constants are in clock cycles of a 4 ns clock. The node stabilisation
// time (6 ns) rounds up to STAB_CYCLES = 2; the opto-electrical conversion is
// one cycle; a golden-value read from the Reference database takes two cycles.
// STEPS = 629 is the number of phase values from -pi to pi in 0.1 rad steps,
// the largest number of tuning steps tried per node. The tuning word width,
// reading width and key width are this design's own choices.
package serios_pkg;

  parameter int unsigned NODES       = 12;   // tunable SiPh nodes
  parameter int unsigned IOS         = 4;    // optical inputs / outputs
  parameter int unsigned PATTERNS    = 4;    // baseline communication patterns
  parameter int unsigned TUNE_W      = 10;   // tuning (phase DAC) code width
  parameter int unsigned STEPS       = 629;  // max tuning steps per node
  parameter int unsigned STAB_CYCLES = 2;    // node stabilisation, cycles
  parameter int unsigned CONV_CYCLES = 1;    // O-E conversion, cycles
  parameter int unsigned REF_LAT     = 2;    // golden-value read latency
  parameter int unsigned PWR_W       = 16;   // photodetector reading width
  parameter int unsigned KEY_W       = 128;  // key width

  // One entry of the SFOF tuning sequence: which node to tune, through which
  // optical input it is excited and at which output its effect is read.
  // When use_target is set the stop level is the stored target; otherwise
  // it is the reading taken before the first step (the BCM listing).
  // Entries with valid clear are skipped.
  typedef struct packed {
    logic             valid;      // entry in use (circuits with fewer nodes)
    logic [7:0]       node;
    logic [3:0]       in_port;
    logic [3:0]       out_port;
    logic             use_target;
    logic [PWR_W-1:0] target;
  } seq_entry_t;

  // Which optical input a baseline pattern drives and which output it reads.
  // The per-node configuration codes of a pattern are held beside it.
  typedef struct packed {
    logic [3:0] in_port;
    logic [3:0] out_port;
  } pattern_t;

  typedef logic [TUNE_W-1:0] code_t;
  typedef logic [PWR_W-1:0]  pwr_t;
  typedef logic [KEY_W-1:0]  key_t;

  // A measurement request from one client of the O-E probe. While req is
  // held the probe repeats the measurement; the client may change its node
  // codes only on the cycle the probe acknowledges.
  typedef struct packed {
    logic       req;
    logic [3:0] in_port;
    logic [3:0] out_port;
  } probe_req_t;

  // Host write into the Input Sequence memory.
  typedef enum logic [1:0] {
    WR_SEQ  = 2'd0,   // tuning sequence entry, data = seq_entry_t
    WR_PAT  = 2'd1,   // pattern ports, data = pattern_t
    WR_CFG  = 2'd2    // one node code of a pattern configuration
  } wr_kind_e;

endpackage
