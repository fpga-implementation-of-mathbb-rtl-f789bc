// tb_prng_platform: end-to-end testbench of prng_platform at its default size.
//
// Plays the part of the software and of the DMA: writes the GPIO-0 enable
// and GPIO-1 burst size, loads the MT19937 state word by word, reseeds
// generators, and accepts the output stream with a random TREADY. Every
// accepted word is compared with reference models of the generators and
// of the chaotic-iteration combinations, written here as classes that
// follow the published programs; the source a word must come from is
// tracked by a model of the burst-boundary switching rule. Every source is
// selected in turn, and the testbench counts the mechanisms of the design
// it makes happen: source switches, switches requested mid-burst and
// deferred to the burst end, back-pressure stalls, waits for a generator
// still filling its state, idle periods with no source enabled, burst
// size changes, reseeds and the external MT19937 load. A mechanism that
// never happened counts as a failure.
module tb_prng_platform;
  import prng_pkg::*;

  // ---- reference models --------------------------------------------------
  virtual class gen_c;
    pure virtual function logic [63:0] next();
  endclass

  class xs64_c extends gen_c;
    logic [63:0] x;
    function new(logic [63:0] s); x = s; endfunction
    virtual function logic [63:0] next();
      x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
      return x;
    endfunction
  endclass

  class xs128p_c extends gen_c;
    logic [63:0] s0, s1;
    function new(logic [127:0] s); s0 = s[63:0]; s1 = s[127:64]; endfunction
    virtual function logic [63:0] next();
      logic [63:0] a, b;
      a = s0; b = s1; s0 = b;
      a = a ^ (a << 23);
      s1 = a ^ b ^ (a >> 17) ^ (b >> 26);
      return s1 + b;
    endfunction
  endclass

  class l113_c extends gen_c;
    logic [31:0] z1, z2, z3, z4;
    function new(logic [127:0] s); {z4, z3, z2, z1} = s; endfunction
    virtual function logic [63:0] next();
      logic [31:0] b;
      b = ((z1 << 6) ^ z1) >> 13;  z1 = ((z1 & 32'hfffffffe) << 18) ^ b;
      b = ((z2 << 2) ^ z2) >> 27;  z2 = ((z2 & 32'hfffffff8) << 2) ^ b;
      b = ((z3 << 13) ^ z3) >> 21; z3 = ((z3 & 32'hfffffff0) << 7) ^ b;
      b = ((z4 << 3) ^ z4) >> 12;  z4 = ((z4 & 32'hffffff80) << 13) ^ b;
      return 64'(z1 ^ z2 ^ z3 ^ z4);
    endfunction
  endclass

  class t88_c extends gen_c;
    logic [31:0] s1, s2, s3;
    function new(logic [95:0] s); {s3, s2, s1} = s; endfunction
    virtual function logic [63:0] next();
      logic [31:0] b;
      b = ((s1 << 13) ^ s1) >> 19; s1 = ((s1 & 32'hfffffffe) << 12) ^ b;
      b = ((s2 << 2) ^ s2) >> 25;  s2 = ((s2 & 32'hfffffff8) << 4) ^ b;
      b = ((s3 << 3) ^ s3) >> 11;  s3 = ((s3 & 32'hfffffff0) << 17) ^ b;
      return 64'(s1 ^ s2 ^ s3);
    endfunction
  endclass

  class l258_c extends gen_c;
    logic [63:0] y [5];
    function new(logic [319:0] s); for (int i = 0; i < 5; i++) y[i] = s[64*i +: 64]; endfunction
    virtual function logic [63:0] next();
      logic [63:0] b;
      b = ((y[0] << 1) ^ y[0]) >> 53;  y[0] = ((y[0] & 64'hfffffffffffffffe) << 10) ^ b;
      b = ((y[1] << 24) ^ y[1]) >> 50; y[1] = ((y[1] & 64'hfffffffffffffe00) << 5) ^ b;
      b = ((y[2] << 3) ^ y[2]) >> 23;  y[2] = ((y[2] & 64'hfffffffffffff000) << 29) ^ b;
      b = ((y[3] << 5) ^ y[3]) >> 24;  y[3] = ((y[3] & 64'hfffffffffffe0000) << 23) ^ b;
      b = ((y[4] << 3) ^ y[4]) >> 33;  y[4] = ((y[4] & 64'hffffffffff800000) << 8) ^ b;
      return y[0] ^ y[1] ^ y[2] ^ y[3] ^ y[4];
    endfunction
  endclass

  // Knuth's seeding recurrence, shared by the TGFSR models.
  class knuth_c;
    static function void fill(ref logic [31:0] a [], input logic [31:0] s);
      logic [63:0] m;
      a[0] = s;
      for (int i = 1; i < a.size(); i++) begin
        m = 64'(32'd1812433253) * 64'(a[i-1] ^ (a[i-1] >> 30)) + 64'(i);
        a[i] = m[31:0];
      end
    endfunction
  endclass

  class tt800_c extends gen_c;
    logic [31:0] x [];
    int k;
    function new(logic [31:0] s); x = new[25]; knuth_c::fill(x, s); k = 0; endfunction
    virtual function logic [63:0] next();
      logic [31:0] y;
      if (k == 25) begin
        for (int kk = 0; kk < 25; kk++)
          x[kk] = x[(kk + 7) % 25] ^ (x[kk] >> 1) ^ (x[kk][0] ? 32'h8ebfd028 : 32'h0);
        k = 0;
      end
      y = x[k++];
      y = y ^ ((y << 7) & 32'h2b5b2500);
      y = y ^ ((y << 15) & 32'hdb8b0000);
      return 64'(y ^ (y >> 16));
    endfunction
  endclass

  class well_c extends gen_c;
    logic [31:0] st [];
    int i;
    function new(logic [31:0] s); st = new[16]; knuth_c::fill(st, s); i = 0; endfunction
    virtual function logic [63:0] next();
      logic [31:0] z0, z1, z2, v1;
      z0 = st[(i + 15) & 15];
      z1 = st[i] ^ (st[i] << 16) ^ st[(i + 13) & 15] ^ (st[(i + 13) & 15] << 15);
      z2 = st[(i + 9) & 15] ^ (st[(i + 9) & 15] >> 11);
      v1 = z1 ^ z2;
      st[i] = v1;
      st[(i + 15) & 15] = z0 ^ (z0 << 2) ^ z1 ^ (z1 << 18) ^ (z2 << 28) ^ v1 ^ ((v1 << 5) & 32'hda442d24);
      i = (i + 15) & 15;
      return 64'(st[i]);
    endfunction
  endclass

  class mt_c extends gen_c;
    logic [31:0] mt [];
    int mti;
    function new(logic [31:0] s); mt = new[624]; knuth_c::fill(mt, s); mti = 624; endfunction
    virtual function logic [63:0] next();
      logic [31:0] y;
      if (mti >= 624) begin
        for (int kk = 0; kk < 624; kk++) begin
          y = (mt[kk] & 32'h80000000) | (mt[(kk + 1) % 624] & 32'h7fffffff);
          mt[kk] = mt[(kk + 397) % 624] ^ (y >> 1) ^ (y[0] ? 32'h9908b0df : 32'h0);
        end
        mti = 0;
      end
      y = mt[mti++];
      y = y ^ (y >> 11);
      y = y ^ ((y << 7) & 32'h9d2c5680);
      y = y ^ ((y << 15) & 32'hefc60000);
      return 64'(y ^ (y >> 18));
    endfunction
  endclass


  class pcg_c extends gen_c;
    logic [63:0] st, inc;
    function new(logic [63:0] initstate, logic [63:0] initseq);
      logic [63:0] u;
      st = '0; inc = (initseq << 1) | 64'd1;
      u = next(); st = st + initstate; u = next();
    endfunction
    virtual function logic [63:0] next();
      logic [63:0] old;
      logic [31:0] xs, r;
      int rot;
      old = st;
      st = old * 64'd6364136223846793005 + inc;
      xs = 32'(((old >> 18) ^ old) >> 27);
      rot = int'(old >> 59);
      r = (xs >> rot) | (xs << ((32 - rot) % 32));
      return 64'(r);
    endfunction
  endclass

  class mrg_c extends gen_c;
    longint g1 [3], g2 [3];
    function new(logic [191:0] s);
      for (int k = 0; k < 3; k++) begin g1[k] = longint'(s[32*k +: 32]); g2[k] = longint'(s[96 + 32*k +: 32]); end
    endfunction
    virtual function logic [63:0] next();
      longint p1, p2;
      p1 = (64'sd1403580 * g1[1] - 64'sd810728 * g1[0]) % 64'sd4294967087;
      if (p1 < 0) p1 += 64'sd4294967087;
      g1[0] = g1[1]; g1[1] = g1[2]; g1[2] = p1;
      p2 = (64'sd527612 * g2[2] - 64'sd1370589 * g2[0]) % 64'sd4294944443;
      if (p2 < 0) p2 += 64'sd4294944443;
      g2[0] = g2[1]; g2[1] = g2[2]; g2[2] = p2;
      return 64'((p1 > p2) ? (p1 - p2) : (p1 - p2 + 64'sd4294967087));
    endfunction
  endclass

  class mwc_c extends gen_c;
    logic [31:0] q [];
    logic [31:0] c;
    int i;
    bit comp;
    function new(logic [31:0] s, int n, bit complementary);
      q = new[n]; knuth_c::fill(q, s); c = 32'd362436; i = n - 1; comp = complementary;
    endfunction
    virtual function logic [63:0] next();
      logic [63:0] t;
      logic [31:0] x;
      i = (i + 1) % q.size();
      if (!comp) begin
        t = 64'd809430660 * 64'(q[i]) + 64'(c);
        c = t[63:32];
        q[i] = t[31:0];
      end else begin
        t = 64'd18782 * 64'(q[i]) + 64'(c);
        c = t[63:32];
        x = 32'(t + 64'(c));
        if (x < c) begin x++; c++; end
        q[i] = 32'hfffffffe - x;
      end
      return 64'(q[i]);
    endfunction
  endclass

  class xs1024s_c extends gen_c;
    logic [63:0] s [16];
    int p;
    function new(logic [1023:0] init); for (int k = 0; k < 16; k++) s[k] = init[64*k +: 64]; p = 0; endfunction
    virtual function logic [63:0] next();
      logic [63:0] s0, s1;
      s0 = s[p]; p = (p + 1) & 15; s1 = s[p];
      s1 = s1 ^ (s1 << 31); s1 = s1 ^ (s1 >> 11); s0 = s0 ^ (s0 >> 30);
      s[p] = s0 ^ s1;
      return s[p] * 64'd1181783497276652981;
    endfunction
  endclass

  class ci_c extends gen_c;
    gen_c p1, p2, p3;
    logic [31:0] s;
    function new(gen_c a, gen_c b, gen_c c); p1 = a; p2 = b; p3 = c; s = '0; endfunction
    virtual function logic [63:0] next();
      logic [63:0] x, y, z;
      x = p1.next(); y = p2.next(); z = p3.next();
      if (z[0]) s = s ^ x[31:0];
      if (z[1]) s = s ^ x[63:32];
      if (z[2]) s = s ^ y[31:0];
      return 64'(s ^ y[63:32]);
    endfunction
  endclass


  // Model constructors usable inside expressions.
  function automatic gen_c mk_xs64(logic [63:0] s);     xs64_c g = new(s);   return g; endfunction
  function automatic gen_c mk_xs128p(logic [127:0] s);  xs128p_c g = new(s); return g; endfunction
  function automatic gen_c mk_l113(logic [127:0] s);    l113_c g = new(s);   return g; endfunction
  function automatic gen_c mk_t88(logic [95:0] s);      t88_c g = new(s);    return g; endfunction
  function automatic gen_c mk_l258(logic [319:0] s);    l258_c g = new(s);   return g; endfunction
  function automatic gen_c mk_tt800(logic [31:0] s);    tt800_c g = new(s);  return g; endfunction
  function automatic gen_c mk_well(logic [31:0] s);     well_c g = new(s);   return g; endfunction
  function automatic gen_c mk_mt(logic [31:0] s);       mt_c g = new(s);     return g; endfunction
  function automatic gen_c mk_pcg(logic [63:0] a, logic [63:0] b); pcg_c g = new(a, b); return g; endfunction
  function automatic gen_c mk_mrg(logic [191:0] s);     mrg_c g = new(s);    return g; endfunction
  function automatic gen_c mk_mwc(logic [31:0] s, int n, bit cmp); mwc_c g = new(s, n, cmp); return g; endfunction
  function automatic gen_c mk_xs1024s(logic [1023:0] s); xs1024s_c g = new(s); return g; endfunction
  function automatic gen_c mk_ci(gen_c a, gen_c b, gen_c c); ci_c g = new(a, b, c); return g; endfunction

  localparam logic [127:0] CSEED1 = 128'h8a5cd789635d2dff_121fd2155c472f96;
  localparam logic [127:0] CSEED2 = 128'h3c6ef372fe94f82b_6a09e667f3bcc908;

  // ---- DUT ---------------------------------------------------------------
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NSRC-1:0] gpio0_en = '0;
  logic [BURST_W-1:0] gpio1_burst = 16'd8;
  logic [NSRC-1:0] seed_we = '0;
  logic [SEED_W-1:0] seed_data = '0;
  logic mt_mem_we = 1'b0;
  logic [9:0] mt_mem_addr = '0;
  logic [31:0] mt_mem_wdata = '0;
  logic m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;
  logic [63:0] m_axis_tdata;
  logic [NSRC-1:0] src_ready;
  logic [$clog2(NSRC)-1:0] cur_sel;
  logic active, in_burst;

  prng_platform dut (.*);

  always #5 clk = ~clk;

  gen_c model [NSRC];
  int checks = 0, failures = 0;
  int n_switch = 0, n_deferred = 0, n_stall = 0, n_seed_wait = 0, n_idle = 0;
  int n_burst_change = 0, n_reseed = 0, n_mt_load = 0, n_bursts = 0;
  int words_from [NSRC];
  int msel = -1, pos = 0, cur_len = 1;
  bit mburst = 1'b0;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0t (src %0d)", what, $time, msel);
    end
  endtask

  function automatic int lowest(input logic [NSRC-1:0] v);
    for (int k = 0; k < NSRC; k++) if (v[k]) return k;
    return -1;
  endfunction

  // One clock of the DMA side: random TREADY, check, model update.
  // `en_next` is written to GPIO-0 at this falling edge when >= 0.
  task automatic tick(input bit rnd_ready, input longint en_next = -1);
    @(negedge clk);
    if (en_next >= 0) begin
      if (mburst && lowest(NSRC'(en_next)) != msel) n_deferred++;
      gpio0_en = NSRC'(en_next);
    end
    m_axis_tready = rnd_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
    #1;
    chk(active == (msel >= 0), "active");
    if (msel >= 0) chk(cur_sel == msel[$clog2(NSRC)-1:0], "selected source");
    if (msel < 0) begin
      chk(!m_axis_tvalid, "no output while idle");
      n_idle++;
    end else begin
      chk(m_axis_tvalid == src_ready[msel], "tvalid follows generator readiness");
      if (!src_ready[msel]) n_seed_wait++;
    end
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
      logic [63:0] exp;
      if (pos == 0) cur_len = (gpio1_burst == 0) ? 1 : int'(gpio1_burst);
      exp = model[msel].next();
      chk(m_axis_tdata == exp, "stream word");
      chk(m_axis_tlast == (pos == cur_len - 1), "tlast");
      words_from[msel]++;
      pos = (pos == cur_len - 1) ? 0 : pos + 1;
    end
    @(posedge clk);
    if (m_axis_tvalid && m_axis_tready) begin
      mburst = !m_axis_tlast;
      if (m_axis_tlast) begin
        n_bursts++;
        if (lowest(gpio0_en) != msel) n_switch++;
        msel = lowest(gpio0_en);
      end
    end else if (!mburst) begin
      if (lowest(gpio0_en) != msel) n_switch++;
      msel = lowest(gpio0_en);
    end
  endtask

  // Select `src` and take `nbursts` bursts from it; the next source is
  // requested two words before the end of the last burst.
  task automatic run_source(input int src, input int nbursts, input int next_src);
    int start = words_from[src];
    tick(1'b1, longint'(1) << src);
    while (words_from[src] - start < nbursts * cur_len - 2 || msel != src) tick(1'b1);
    tick(1'b1, next_src < 0 ? 0 : longint'(1) << next_src);
    while (mburst || msel == src) tick(1'b1);
  endtask

  initial begin
    logic [31:0] mtinit [];
    model[SRC_XORSHIFT64]   = mk_xs64(64'd88172645463325252);
    model[SRC_XORSHIFT128P] = mk_xs128p(128'h8a5cd789635d2dff_121fd2155c472f96);
    model[SRC_LFSR113]      = mk_l113({4{32'd987654321}});
    model[SRC_TAUS88]       = mk_t88({3{32'd12345}});
    model[SRC_LFSR258]      = mk_l258({5{64'd123456789123456789}});
    model[SRC_TT800]        = mk_tt800(32'd5489);
    model[SRC_WELL512]      = mk_well(32'd5489);
    model[SRC_MT19937]      = mk_mt(32'd5489);
    model[SRC_CI_011] = mk_ci(mk_xs64(CSEED1[63:0]), mk_xs128p(CSEED2), mk_l113({4{32'd987654321}}));
    model[SRC_CI_012] = mk_ci(mk_xs64(CSEED1[63:0]), mk_xs128p(CSEED2), mk_t88({3{32'd12345}}));
    model[SRC_CI_013] = mk_ci(mk_xs64(CSEED1[63:0]), mk_xs128p(CSEED2), mk_tt800(32'd5489));
    model[SRC_CI_014] = mk_ci(mk_xs64(CSEED1[63:0]), mk_xs128p(CSEED2), mk_well(32'd5489));
    model[SRC_CI_015] = mk_ci(mk_xs64(CSEED1[63:0]), mk_xs128p(CSEED2), mk_mt(32'd5489));
    model[SRC_CI_112] = mk_ci(mk_xs128p(CSEED1), mk_xs128p(CSEED2), mk_t88({3{32'd12345}}));
    model[SRC_PCG32]        = mk_pcg(64'd42, 64'd54);
    model[SRC_MRG32K3A]     = mk_mrg({6{32'd12345}});
    model[SRC_MWC256]       = mk_mwc(32'd5489, 256, 1'b0);
    model[SRC_CMWC4096]     = mk_mwc(32'd5489, 4096, 1'b1);
    model[SRC_XORSHIFT1024S] = mk_xs1024s(dut.u_xs1024s.SEED);
    for (int k = 0; k < NSRC; k++) words_from[k] = 0;

    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // TT800 is selected straight after reset: the stream waits while it
    // fills its state.
    run_source(SRC_TT800, 3, SRC_XORSHIFT64);
    // Software loads the MT19937 state (Knuth array of seed 5489).
    // The DMA holds TREADY low while software is busy elsewhere.
    @(negedge clk);
    m_axis_tready = 1'b0;
    mtinit = new[624];
    knuth_c::fill(mtinit, 32'd5489);
    for (int i = 0; i < 624; i++) begin
      @(negedge clk);
      mt_mem_we = 1'b1;
      mt_mem_addr = 10'(i);
      mt_mem_wdata = mtinit[i];
    end
    @(negedge clk);
    mt_mem_we = 1'b0;
    n_mt_load++;

    // Sweep all sources, burst size 8.
    for (int k = 0; k < NSRC; k++) run_source(k, 3, k + 1 < NSRC ? k + 1 : -1);
    repeat (20) tick(1'b1);

    // Burst size 5, reseed four sources, sweep again.
    gpio1_burst = 16'd5;
    n_burst_change++;
    @(negedge clk);
    seed_data = {64'd987654321987654321, 64'd55555555555, 64'd4444444444, 64'd333333333, 64'd22222222};
    seed_we[SRC_LFSR258] = 1'b1;
    @(negedge clk);
    seed_we = '0;
    model[SRC_LFSR258] = mk_l258(seed_data);
    seed_data = {224'd0, 32'd777777, 32'd4444, 32'd99};
    seed_we[SRC_TAUS88] = 1'b1;
    @(negedge clk);
    seed_we = '0;
    model[SRC_TAUS88] = mk_t88(seed_data[95:0]);
    seed_data = {256'd0, 64'h0123_4567_89ab_cdef};
    seed_we[SRC_XORSHIFT64] = 1'b1;
    @(negedge clk);
    seed_we = '0;
    model[SRC_XORSHIFT64] = mk_xs64(seed_data[63:0]);
    seed_data = {288'd0, 32'h0bad_cafe};
    seed_we[SRC_WELL512] = 1'b1;
    @(negedge clk);
    seed_we = '0;
    model[SRC_WELL512] = mk_well(32'h0bad_cafe);
    seed_data = {192'd0, 64'd99, 64'hfeed_face_cafe_beef};
    seed_we[SRC_PCG32] = 1'b1;
    @(negedge clk);
    seed_we = '0;
    model[SRC_PCG32] = mk_pcg(64'hfeed_face_cafe_beef, 64'd99);
    begin
      logic [1023:0] st;
      for (int k = 0; k < 16; k++) begin
        seed_data = '0;
        seed_data[67:64] = 4'(k);
        seed_data[63:0] = {$urandom, $urandom};
        st[64*k +: 64] = seed_data[63:0];
        seed_we[SRC_XORSHIFT1024S] = 1'b1;
        @(negedge clk);
      end
      seed_we = '0;
      model[SRC_XORSHIFT1024S] = mk_xs1024s(st);
    end
    n_reseed += 6;
    for (int k = NSRC - 1; k >= 0; k--) run_source(k, 2, k > 0 ? k - 1 : -1);

    // Full-rate check: xorshift64 with TREADY always high for 200 words.
    begin
      int start = words_from[SRC_XORSHIFT64];
      tick(1'b0, longint'(1) << SRC_XORSHIFT64);
      tick(1'b0);
      for (int i = 0; i < 200; i++) tick(1'b0);
      chk(words_from[SRC_XORSHIFT64] - start >= 200, "one word per clock at full rate");
    end

    // Published MT19937 value: its first word for seed 5489.
    begin
      gen_c ref_mt = mk_mt(32'd5489);
      chk(ref_mt.next() == 64'd3499211612, "MT19937 reference value");
    end
    for (int k = 0; k < NSRC; k++) chk(words_from[k] > 0, "every source delivered words");
    chk(n_switch > 0, "source switch");
    chk(n_deferred > 0, "switch deferred to burst end");
    chk(n_stall > 0, "back-pressure stall");
    chk(n_seed_wait > 0, "wait for generator seeding");
    chk(n_idle > 0, "idle with no source");
    chk(n_burst_change > 0, "burst size change");
    chk(n_reseed > 0, "reseed");
    chk(n_mt_load > 0, "MT19937 state load");
    $display("switches=%0d deferred=%0d stalls=%0d seed_waits=%0d idle=%0d bursts=%0d",
             n_switch, n_deferred, n_stall, n_seed_wait, n_idle, n_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
