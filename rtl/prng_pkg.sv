// prng_pkg: types and constants shared by the PRNG platform.
//
// Holds the stream beat type used between the generator stream wrappers,
// the RNG interconnect and the DMA port, the source numbering of the
// platform, the CI combination codes, and the seeding constant of Knuth's
// recurrence used for the twisted GFSR generators. Widths of the stream
// (64 bits) are a choice of this design: the generators produce 32- or
// 64-bit words and the narrower ones are zero-extended.
package prng_pkg;

  // Stream data width: the widest generator output is 64 bits.
  localparam int unsigned DATA_W = 64;

  // Burst length register width (value written by the CPU through GPIO-1).
  localparam int unsigned BURST_W = 16;

  // One beat of an AXI4-Stream carrying random words.
  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic              tlast;
  } rng_beat_t;

  // Generator codes used by the CI-PRNG combination [i, j, k].
  // PRNG1/PRNG2: 0 = xorshift64, 1 = xorshift128+.
  // PRNG3: 1 = LFSR113, 2 = Taus88, 3 = TT800, 4 = WELL512, 5 = MT19937.
  typedef enum logic [2:0] {
    CI_XORSHIFT64  = 3'd0,
    CI_XORSHIFT128P = 3'd1
  } ci_xy_gen_e;

  typedef enum logic [2:0] {
    CI_LFSR113 = 3'd1,
    CI_TAUS88  = 3'd2,
    CI_TT800   = 3'd3,
    CI_WELL512 = 3'd4,
    CI_MT19937 = 3'd5
  } ci_z_gen_e;

  // Source numbering of the platform: the bit of GPIO-0 and the slave port
  // of the RNG interconnect used by each generator.
  typedef enum int unsigned {
    SRC_XORSHIFT64  = 0,
    SRC_XORSHIFT128P = 1,
    SRC_LFSR113     = 2,
    SRC_TAUS88      = 3,
    SRC_LFSR258     = 4,
    SRC_TT800       = 5,
    SRC_WELL512     = 6,
    SRC_MT19937     = 7,
    SRC_CI_011      = 8,
    SRC_CI_012      = 9,
    SRC_CI_013      = 10,
    SRC_CI_014      = 11,
    SRC_CI_015      = 12,
    SRC_CI_112      = 13,
    SRC_PCG32       = 14,
    SRC_MRG32K3A    = 15,
    SRC_MWC256      = 16,
    SRC_CMWC4096    = 17,
    SRC_XORSHIFT1024S = 18
  } src_e;

  localparam int unsigned NSRC   = 19;
  // Width of the top's seed value port (the largest full-state seed).
  localparam int unsigned SEED_W = 320;

  // Multiplier of Knuth's seeding recurrence (TAOCP vol. 2, p. 106):
  // x[i] = 1812433253 * (x[i-1] ^ (x[i-1] >> 30)) + i.
  localparam logic [31:0] KNUTH_MULT = 32'd1812433253;

  function automatic logic [31:0] knuth_next(input logic [31:0] prev, input logic [31:0] idx);
    return KNUTH_MULT * (prev ^ (prev >> 30)) + idx;
  endfunction

endpackage
