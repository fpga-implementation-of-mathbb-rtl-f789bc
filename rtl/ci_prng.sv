// ci_prng: a CI-PRNG combination [I, J, K] - three generators and ci_core.
//
// PRNG1 (code I) and PRNG2 (code J) are 64-bit xorshift generators
// (0 = xorshift64, 1 = xorshift128+); PRNG3 (code K) supplies the strategy
// bits (1 = LFSR113, 2 = Taus88, 3 = TT800, 4 = WELL512, 5 = MT19937, the
// last one self-seeded). All three advance together with the CI state on
// `en`, so one 32-bit result leaves per clock. `ready` is low while a
// TGFSR generator of the combination fills its state after reset.
// The codes and the structure follow the paper's CI algorithm and table;
// the seeds of the inner generators are parameters chosen by this design
// (PRNG1 and PRNG2 get different seeds so that a combination such as
// [1, 1, k] does not XOR a generator with itself). Only the 3 low bits of
// PRNG3's word are used, as in the paper; its upper bits are left unused.
module ci_prng #(
  parameter int unsigned I = 0,
  parameter int unsigned J = 1,
  parameter int unsigned K = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic        ready,
  output logic [31:0] r
);
  localparam logic [127:0] SEED1 = 128'h8a5cd789635d2dff_121fd2155c472f96;
  localparam logic [127:0] SEED2 = 128'h3c6ef372fe94f82b_6a09e667f3bcc908;

  logic [63:0] x, y;
  logic [31:0] z;
  logic        z_ready, adv;

  assign adv = en && ready;

  if (I == 0) begin : g_p1_xs64
    xorshift64 #(.SEED(SEED1[63:0])) u_p1 (
      .clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0), .out(x));
  end else begin : g_p1_xs128p
    xorshift128plus #(.SEED(SEED1)) u_p1 (
      .clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0), .out(x));
  end

  if (J == 0) begin : g_p2_xs64
    xorshift64 #(.SEED(SEED2[63:0])) u_p2 (
      .clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0), .out(y));
  end else begin : g_p2_xs128p
    xorshift128plus #(.SEED(SEED2)) u_p2 (
      .clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0), .out(y));
  end

  if (K == 1) begin : g_p3_lfsr113
    lfsr113 u_p3 (.clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0), .out(z));
    assign z_ready = 1'b1;
  end else if (K == 2) begin : g_p3_taus88
    taus88 u_p3 (.clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0), .out(z));
    assign z_ready = 1'b1;
  end else if (K == 3) begin : g_p3_tt800
    tt800 u_p3 (.clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0),
                .ready(z_ready), .out(z));
  end else if (K == 4) begin : g_p3_well512
    well512 u_p3 (.clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0),
                  .ready(z_ready), .out(z));
  end else begin : g_p3_mt19937
    mt19937 #(.INTERNAL_SEED(1'b1)) u_p3 (
      .clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0),
      .mem_we(1'b0), .mem_addr('0), .mem_wdata('0),
      .ready(z_ready), .out(z));
  end

  assign ready = z_ready;

  ci_core u_ci (
    .clk, .rst_n, .en(adv), .seed_we(1'b0), .seed('0),
    .x, .y, .z(z[2:0]), .r);
endmodule
