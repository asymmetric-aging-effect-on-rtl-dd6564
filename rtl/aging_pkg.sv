// aging_pkg: constants shared by the asymmetric-aging mitigation blocks.
//
// The numbers describe the main configuration: a 2.66 GHz out-of-order core
// with one FP add/sub and one FP mul/div unit, 64-bit architectural
// registers handled in a bank of 32, and four caches with 64-byte lines
// (L1-D 32KB 8-way, L1-I 32KB 4-way, L2 256KB 8-way, L3 8MB 16-way). The
// register-rotation period (10 million cycles) and the cache shift period
// (10 million cache accesses) are the rates found to cost no performance.
// The slow-clock division (1 MHz from 2.66 GHz), the register width and the
// PRBS polynomial are choices of this design, not given numbers.
package aging_pkg;

  // Core clock 2.66 GHz; the PRBS injection clock is "in the order of MHz
  // or even lower": one tick every 2660 core cycles is 1 MHz.
  localparam int unsigned SLOW_PERIOD = 2660;

  // Register rotation trigger: every 10 million core cycles.
  localparam int unsigned RF_ROTATE_PERIOD = 10_000_000;
  // Bulk of registers handled by one rotating file, and their width.
  localparam int unsigned RF_REGS = 32;
  localparam int unsigned XLEN    = 64;

  // Guarded FP execution units: FP add/sub and FP mul/div, two operands each.
  localparam int unsigned NUM_FP_UNITS = 2;
  localparam int unsigned FP_OPS       = 2;

  // Cache shift trigger: every 10 million cache accesses.
  localparam int unsigned CACHE_SHIFT_PERIOD = 10_000_000;
  localparam int unsigned LINE_BITS  = 512;   // 64-byte block
  localparam int unsigned NUM_CACHES = 4;

  typedef enum logic [1:0] {
    CACHE_L1D = 2'd0,
    CACHE_L1I = 2'd1,
    CACHE_L2  = 2'd2,
    CACHE_L3  = 2'd3
  } cache_id_e;

  // sets = size / (64 B * ways), in cache_id_e order
  localparam int unsigned CACHE_SETS [NUM_CACHES] = '{64, 128, 512, 8192};
  localparam int unsigned CACHE_WAYS [NUM_CACHES] = '{8, 4, 8, 16};
  localparam int unsigned MAX_SET_W = 13;     // log2(8192)
  localparam int unsigned MAX_WAYS  = 16;
  localparam int unsigned MAX_WAY_W = 4;

  // PRBS-31, x^31 + x^28 + 1 (ITU-T O.150), one seed per instance.
  localparam int unsigned PRBS_DEGREE = 31;
  localparam int unsigned PRBS_TAP    = 28;

endpackage
