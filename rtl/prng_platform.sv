// prng_platform: programmable-logic part of the Zynq PRNG test platform.
//
// Nineteen generators, each behind an AXI4-Stream wrapper, feed one RNG
// interconnect whose output goes to the S2MM channel of an AXI DMA (outside
// this module), which writes the words to DDR for the processor to test.
// Sources, by GPIO-0 bit:
//   0 xorshift64, 1 xorshift128+, 2 LFSR113, 3 Taus88, 4 LFSR258,
//   5 TT800, 6 WELL512, 7 MT19937 (state loaded by software),
//   8..12 CI-PRNG [0,1,1] [0,1,2] [0,1,3] [0,1,4] [0,1,5], 13 CI-PRNG [1,1,2],
//   14 PCG32, 15 MRG32k3a, 16 MWC256, 17 CMWC4096, 18 xorshift1024*.
// Software controls it through two GPIO registers, whose outputs are this
// module's ports: `gpio0_en` enables one source (lowest set bit wins) and
// `gpio1_burst` sets the number of words per burst (TLAST every that many
// words). A generator is reseeded by a pulse on its `seed_we` bit with
// `seed_data`: the full state for 0..4 and 15, {initseq, initstate} for
// PCG32, a 32-bit Knuth seed in bits [31:0] for 5, 6, 16 and 17, and one
// state word (bits [63:0]) at word address bits [67:64] for 18. The
// MT19937 state is written word by word through `mt_mem_*`; the CI-PRNGs
// start from fixed seeds, so bits 7..13 of `seed_we` are unused.
// `src_ready` is constant 1 for the eleven sources that need no seeding
// time (all but 5, 6, 7, 10, 11, 12, 16, 17); it is kept per source so
// software sees one uniform status vector.
// Every source delivers one word per clock while the DMA is ready; the
// 32-bit generators are zero-extended to the 64-bit stream.
// The block structure follows the paper's platform figure; the source list
// is the generators of the paper that this RTL provides plus the CI
// combinations of its table; port encodings are this design's choices.
module prng_platform
  import prng_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // GPIO-0: source enable, GPIO-1: burst size
  input  logic [NSRC-1:0]        gpio0_en,
  input  logic [BURST_W-1:0]     gpio1_burst,
  // software seeding
  input  logic [NSRC-1:0]        seed_we,
  input  logic [SEED_W-1:0]      seed_data,
  input  logic                   mt_mem_we,
  input  logic [9:0]             mt_mem_addr,
  input  logic [31:0]            mt_mem_wdata,
  // AXI4-Stream master to the DMA (S2MM)
  output logic                   m_axis_tvalid,
  input  logic                   m_axis_tready,
  output logic [DATA_W-1:0]      m_axis_tdata,
  output logic                   m_axis_tlast,
  // status
  output logic [NSRC-1:0]        src_ready,
  output logic [$clog2(NSRC)-1:0] cur_sel,
  output logic                   active,
  output logic                   in_burst
);
  logic [63:0] g64 [NSRC];   // 64-bit generator words
  logic [31:0] g32 [NSRC];   // 32-bit generator words
  logic [NSRC-1:0] gen_en, s_tvalid, s_tready;
  rng_beat_t       s_beat [NSRC];
  rng_beat_t       m_beat;

  // ---- generators -------------------------------------------------------
  xorshift64 u_xs64 (
    .clk, .rst_n, .en(gen_en[SRC_XORSHIFT64]), .seed_we(seed_we[SRC_XORSHIFT64]),
    .seed(seed_data[63:0]), .out(g64[SRC_XORSHIFT64]));
  xorshift128plus u_xs128p (
    .clk, .rst_n, .en(gen_en[SRC_XORSHIFT128P]), .seed_we(seed_we[SRC_XORSHIFT128P]),
    .seed(seed_data[127:0]), .out(g64[SRC_XORSHIFT128P]));
  lfsr113 u_lfsr113 (
    .clk, .rst_n, .en(gen_en[SRC_LFSR113]), .seed_we(seed_we[SRC_LFSR113]),
    .seed(seed_data[127:0]), .out(g32[SRC_LFSR113]));
  taus88 u_taus88 (
    .clk, .rst_n, .en(gen_en[SRC_TAUS88]), .seed_we(seed_we[SRC_TAUS88]),
    .seed(seed_data[95:0]), .out(g32[SRC_TAUS88]));
  lfsr258 u_lfsr258 (
    .clk, .rst_n, .en(gen_en[SRC_LFSR258]), .seed_we(seed_we[SRC_LFSR258]),
    .seed(seed_data[319:0]), .out(g64[SRC_LFSR258]));
  tt800 u_tt800 (
    .clk, .rst_n, .en(gen_en[SRC_TT800]), .seed_we(seed_we[SRC_TT800]),
    .seed(seed_data[31:0]), .ready(src_ready[SRC_TT800]), .out(g32[SRC_TT800]));
  well512 u_well512 (
    .clk, .rst_n, .en(gen_en[SRC_WELL512]), .seed_we(seed_we[SRC_WELL512]),
    .seed(seed_data[31:0]), .ready(src_ready[SRC_WELL512]), .out(g32[SRC_WELL512]));
  mt19937 #(.INTERNAL_SEED(1'b0)) u_mt (
    .clk, .rst_n, .en(gen_en[SRC_MT19937]), .seed_we(1'b0), .seed(32'd0),
    .mem_we(mt_mem_we), .mem_addr(mt_mem_addr), .mem_wdata(mt_mem_wdata),
    .ready(src_ready[SRC_MT19937]), .out(g32[SRC_MT19937]));

  ci_prng #(.I(0), .J(1), .K(1)) u_ci011 (
    .clk, .rst_n, .en(gen_en[SRC_CI_011]), .ready(src_ready[SRC_CI_011]), .r(g32[SRC_CI_011]));
  ci_prng #(.I(0), .J(1), .K(2)) u_ci012 (
    .clk, .rst_n, .en(gen_en[SRC_CI_012]), .ready(src_ready[SRC_CI_012]), .r(g32[SRC_CI_012]));
  ci_prng #(.I(0), .J(1), .K(3)) u_ci013 (
    .clk, .rst_n, .en(gen_en[SRC_CI_013]), .ready(src_ready[SRC_CI_013]), .r(g32[SRC_CI_013]));
  ci_prng #(.I(0), .J(1), .K(4)) u_ci014 (
    .clk, .rst_n, .en(gen_en[SRC_CI_014]), .ready(src_ready[SRC_CI_014]), .r(g32[SRC_CI_014]));
  ci_prng #(.I(0), .J(1), .K(5)) u_ci015 (
    .clk, .rst_n, .en(gen_en[SRC_CI_015]), .ready(src_ready[SRC_CI_015]), .r(g32[SRC_CI_015]));
  ci_prng #(.I(1), .J(1), .K(2)) u_ci112 (
    .clk, .rst_n, .en(gen_en[SRC_CI_112]), .ready(src_ready[SRC_CI_112]), .r(g32[SRC_CI_112]));

  pcg32 u_pcg32 (
    .clk, .rst_n, .en(gen_en[SRC_PCG32]), .seed_we(seed_we[SRC_PCG32]),
    .seed(seed_data[127:0]), .out(g32[SRC_PCG32]));
  mrg32k3a u_mrg32k3a (
    .clk, .rst_n, .en(gen_en[SRC_MRG32K3A]), .seed_we(seed_we[SRC_MRG32K3A]),
    .seed(seed_data[191:0]), .out(g32[SRC_MRG32K3A]));
  mwc256 u_mwc256 (
    .clk, .rst_n, .en(gen_en[SRC_MWC256]), .seed_we(seed_we[SRC_MWC256]),
    .seed(seed_data[31:0]), .ready(src_ready[SRC_MWC256]), .out(g32[SRC_MWC256]));
  cmwc4096 u_cmwc4096 (
    .clk, .rst_n, .en(gen_en[SRC_CMWC4096]), .seed_we(seed_we[SRC_CMWC4096]),
    .seed(seed_data[31:0]), .ready(src_ready[SRC_CMWC4096]), .out(g32[SRC_CMWC4096]));
  xorshift1024star u_xs1024s (
    .clk, .rst_n, .en(gen_en[SRC_XORSHIFT1024S]), .seed_we(seed_we[SRC_XORSHIFT1024S]),
    .seed_addr(seed_data[67:64]), .seed(seed_data[63:0]), .out(g64[SRC_XORSHIFT1024S]));

  assign src_ready[SRC_PCG32]         = 1'b1;
  assign src_ready[SRC_MRG32K3A]      = 1'b1;
  assign src_ready[SRC_XORSHIFT1024S] = 1'b1;
  assign src_ready[SRC_XORSHIFT64]   = 1'b1;
  assign src_ready[SRC_XORSHIFT128P] = 1'b1;
  assign src_ready[SRC_LFSR113]      = 1'b1;
  assign src_ready[SRC_TAUS88]       = 1'b1;
  assign src_ready[SRC_LFSR258]      = 1'b1;

  // ---- stream wrappers (burst size from GPIO-1) ------------------------
  for (genvar k = 0; k < NSRC; k++) begin : g_axis
    localparam bit IS64 = (k == SRC_XORSHIFT64) || (k == SRC_XORSHIFT128P)
                       || (k == SRC_LFSR258) || (k == SRC_XORSHIFT1024S);
    logic [63:0] word;
    // Each slot of g64/g32 is driven once: by its generator or by zero.
    if (IS64) begin : g_w64
      assign g32[k] = '0;
      assign word   = g64[k];
    end else begin : g_w32
      assign g64[k] = '0;
      assign word   = {32'd0, g32[k]};
    end
    prng_axis #(.GEN_W(64)) u_axis (
      .clk, .rst_n,
      .gen_out(word), .gen_ready(src_ready[k]), .gen_en(gen_en[k]),
      .burst_len(gpio1_burst),
      .m_tvalid(s_tvalid[k]), .m_tready(s_tready[k]), .m_beat(s_beat[k]));
  end

  // ---- RNG interconnect (source select from GPIO-0) --------------------
  axi_rng_interconnect #(.N(NSRC)) u_ic (
    .clk, .rst_n, .en(gpio0_en),
    .s_tvalid, .s_tready, .s_beat,
    .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready), .m_beat,
    .active, .cur_sel, .in_burst);

  assign m_axis_tdata = m_beat.tdata;
  assign m_axis_tlast = m_beat.tlast;
endmodule
