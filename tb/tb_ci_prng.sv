// tb_ci_prng: self-checking testbench of ci_prng.
//
// Builds the combinations [0,1,1] (xorshift64, xorshift128+, LFSR113),
// [1,1,2] (xorshift128+, xorshift128+, Taus88) and [0,1,3] (with TT800)
// and compares every 32-bit result with a model written here: the three
// generators as sequential functions of their published programs and the
// chaotic-iteration update on top. The inner generators are seeded with
// the values the RTL uses. Checks one result per enabled clock and that
// results hold while `en` is low; for [0,1,3] checks the TT800 seeding
// latency (`ready` low for 26 clocks) and the first words.
module tb_ci_prng;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic rdy_a, rdy_b, rdy_c;
  logic [31:0] r_a, r_b, r_c;
  int checks = 0, failures = 0;

  ci_prng #(.I(0), .J(1), .K(1)) dut_a (.clk, .rst_n, .en, .ready(rdy_a), .r(r_a));
  ci_prng #(.I(1), .J(1), .K(2)) dut_b (.clk, .rst_n, .en, .ready(rdy_b), .r(r_b));
  ci_prng #(.I(0), .J(1), .K(3)) dut_c (.clk, .rst_n, .en, .ready(rdy_c), .r(r_c));

  always #5 clk = ~clk;

  // ---- generator models --------------------------------------------------
  typedef struct { logic [63:0] x; }        xs64_t;
  typedef struct { logic [63:0] s [2]; }    xs128p_t;
  typedef struct { logic [31:0] z [4]; }    l113_t;
  typedef struct { logic [31:0] s [3]; }    t88_t;
  typedef struct { logic [31:0] x [25]; int k; } tt_t;

  function automatic logic [63:0] xs64(ref xs64_t g);
    g.x = g.x ^ (g.x << 13);
    g.x = g.x ^ (g.x >> 7);
    g.x = g.x ^ (g.x << 17);
    return g.x;
  endfunction

  function automatic logic [63:0] xs128p(ref xs128p_t g);
    logic [63:0] s1, s0;
    s1 = g.s[0];
    s0 = g.s[1];
    g.s[0] = s0;
    s1 = s1 ^ (s1 << 23);
    g.s[1] = s1 ^ s0 ^ (s1 >> 17) ^ (s0 >> 26);
    return g.s[1] + s0;
  endfunction

  function automatic logic [31:0] l113(ref l113_t g);
    logic [31:0] b;
    b = ((g.z[0] << 6) ^ g.z[0]) >> 13;   g.z[0] = ((g.z[0] & 32'hfffffffe) << 18) ^ b;
    b = ((g.z[1] << 2) ^ g.z[1]) >> 27;   g.z[1] = ((g.z[1] & 32'hfffffff8) << 2) ^ b;
    b = ((g.z[2] << 13) ^ g.z[2]) >> 21;  g.z[2] = ((g.z[2] & 32'hfffffff0) << 7) ^ b;
    b = ((g.z[3] << 3) ^ g.z[3]) >> 12;   g.z[3] = ((g.z[3] & 32'hffffff80) << 13) ^ b;
    return g.z[0] ^ g.z[1] ^ g.z[2] ^ g.z[3];
  endfunction

  function automatic logic [31:0] t88(ref t88_t g);
    logic [31:0] b;
    b = ((g.s[0] << 13) ^ g.s[0]) >> 19;  g.s[0] = ((g.s[0] & 32'hfffffffe) << 12) ^ b;
    b = ((g.s[1] << 2) ^ g.s[1]) >> 25;   g.s[1] = ((g.s[1] & 32'hfffffff8) << 4) ^ b;
    b = ((g.s[2] << 3) ^ g.s[2]) >> 11;   g.s[2] = ((g.s[2] & 32'hfffffff0) << 17) ^ b;
    return g.s[0] ^ g.s[1] ^ g.s[2];
  endfunction

  function automatic void tt_seed(ref tt_t g, input logic [31:0] s);
    logic [63:0] m;
    g.x[0] = s;
    for (int i = 1; i < 25; i++) begin
      m = 64'(32'd1812433253) * 64'(g.x[i-1] ^ (g.x[i-1] >> 30)) + 64'(i);
      g.x[i] = m[31:0];
    end
    g.k = 0;
  endfunction

  function automatic logic [31:0] tt(ref tt_t g);
    logic [31:0] y;
    if (g.k == 25) begin
      for (int kk = 0; kk < 25; kk++)
        g.x[kk] = g.x[(kk + 7) % 25] ^ (g.x[kk] >> 1) ^ (g.x[kk][0] ? 32'h8ebfd028 : 32'h0);
      g.k = 0;
    end
    y = g.x[g.k];
    y = y ^ ((y << 7) & 32'h2b5b2500);
    y = y ^ ((y << 15) & 32'hdb8b0000);
    y = y ^ (y >> 16);
    g.k++;
    return y;
  endfunction

  function automatic logic [31:0] ci(ref logic [31:0] s, input logic [63:0] x,
                                      input logic [63:0] y, input logic [31:0] z);
    if (z[0]) s = s ^ x[31:0];
    if (z[1]) s = s ^ x[63:32];
    if (z[2]) s = s ^ y[31:0];
    return s ^ y[63:32];
  endfunction

  localparam logic [127:0] SEED1 = 128'h8a5cd789635d2dff_121fd2155c472f96;
  localparam logic [127:0] SEED2 = 128'h3c6ef372fe94f82b_6a09e667f3bcc908;

  xs64_t   a1, c1;
  xs128p_t a2, b1, b2, c2;
  l113_t   a3;
  t88_t    b3;
  tt_t     c3;
  logic [31:0] sa, sb, sc;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0t", what, $time);
    end
  endtask

  initial begin
    logic [31:0] ea, eb, ec;
    int wait_cycles = 0;
    a1.x = SEED1[63:0];
    c1.x = SEED1[63:0];
    a2.s[0] = SEED2[63:0];  a2.s[1] = SEED2[127:64];
    c2 = a2;
    b1.s[0] = SEED1[63:0];  b1.s[1] = SEED1[127:64];
    b2 = a2;
    for (int i = 0; i < 4; i++) a3.z[i] = 32'd987654321;
    for (int i = 0; i < 3; i++) b3.s[i] = 32'd12345;
    tt_seed(c3, 32'd5489);
    sa = '0; sb = '0; sc = '0;

    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk(rdy_a && rdy_b, "LFSR113/Taus88 combinations ready at once");
    while (!rdy_c) begin
      wait_cycles++;
      @(negedge clk);
    end
    chk(wait_cycles == 25, "TT800 combination seeding latency");
    ea = ci(sa, xs64(a1), xs128p(a2), l113(a3));
    eb = ci(sb, xs128p(b1), xs128p(b2), t88(b3));
    ec = ci(sc, xs64(c1), xs128p(c2), tt(c3));
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      chk(r_a == ea, "[0,1,1]");
      chk(r_b == eb, "[1,1,2]");
      chk(r_c == ec, "[0,1,3]");
      @(posedge clk);
      if (en) begin
        ea = ci(sa, xs64(a1), xs128p(a2), l113(a3));
        eb = ci(sb, xs128p(b1), xs128p(b2), t88(b3));
        ec = ci(sc, xs64(c1), xs128p(c2), tt(c3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
