// tb_axi_rng_interconnect: self-checking testbench of axi_rng_interconnect.
//
// Four testbench sources send tagged words (source number in the top byte,
// a per-source count below) in bursts of 3 with TLAST, and drop TVALID at
// random; the consumer drops TREADY at random. The enable vector is changed
// at random moments, also in the middle of bursts. A model tracks the
// selection: it changes only between bursts and picks the lowest set bit.
// Checks every accepted beat's source and sequence (no beat lost or
// duplicated), that only the selected source sees TREADY, that no output
// appears with an empty enable vector, that bursts are never split, and
// that a full-rate stream passes at one beat per clock.
module tb_axi_rng_interconnect;
  import prng_pkg::*;
  localparam int N = 4, L = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] en = '0, s_tvalid, s_tready;
  rng_beat_t s_beat [N];
  logic m_tvalid, m_tready = 1'b0;
  rng_beat_t m_beat;
  logic active, in_burst;
  logic [1:0] cur_sel;
  int checks = 0, failures = 0;
  int cnt [N];
  logic [N-1:0] vld = '0;
  int n_switch = 0, n_deferred = 0, n_stall = 0, n_idle = 0;

  axi_rng_interconnect #(.N(N)) dut (
    .clk, .rst_n, .en, .s_tvalid, .s_tready, .s_beat,
    .m_tvalid, .m_tready, .m_beat, .active, .cur_sel, .in_burst);

  always #5 clk = ~clk;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      s_tvalid[k]     = vld[k];
      s_beat[k].tdata = {8'(k), 56'(cnt[k])};
      s_beat[k].tlast = (cnt[k] % L) == L - 1;
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) if (s_tvalid[k] && s_tready[k]) cnt[k] <= cnt[k] + 1;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0t", what, $time);
    end
  endtask

  function automatic int lowest(input logic [N-1:0] v);
    for (int k = 0; k < N; k++) if (v[k]) return k;
    return -1;
  endfunction

  int msel = -1;      // model: selected source, -1 = none
  bit mburst = 1'b0;  // model: burst in flight
  int exp_cnt [N];

  initial begin
    for (int k = 0; k < N; k++) begin
      cnt[k] = 0;
      exp_cnt[k] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      if (i < 5000) begin
        if ($urandom_range(0, 15) == 0) begin
          en = N'($urandom);
          if (mburst) n_deferred++;
        end
        vld = N'($urandom);
        m_tready = ($urandom_range(0, 3) != 0);
      end else begin
        en = 4'b0100;
        vld = '1;
        m_tready = 1'b1;
      end
      #1;
      // Only the selected source may be given TREADY.
      for (int k = 0; k < N; k++)
        chk(s_tready[k] == (k == msel && m_tready), "tready routing");
      chk(m_tvalid == (msel >= 0 && vld[msel]), "tvalid routing");
      if (msel < 0 && |vld) n_idle++;
      if (m_tvalid && !m_tready) n_stall++;
      if (m_tvalid && m_tready) begin
        chk(m_beat.tdata[63:56] == 8'(msel), "beat source");
        chk(m_beat.tdata[55:0] == 56'(exp_cnt[msel]), "beat sequence");
        exp_cnt[msel]++;
      end
      @(posedge clk);
      // Model update, mirrors the boundary rule.
      if (m_tvalid && m_tready) begin
        mburst = !m_beat.tlast;
        if (m_beat.tlast) begin
          if (lowest(en) != msel) n_switch++;
          msel = lowest(en);
        end
      end else if (!mburst) begin
        if (lowest(en) != msel) n_switch++;
        msel = lowest(en);
      end
    end
    // Full-rate phase: source 2 must have sent one beat per clock.
    chk(exp_cnt[2] >= 990, "full rate");
    chk(n_switch > 0, "a source switch happened");
    chk(n_deferred > 0, "a switch requested mid-burst happened");
    chk(n_stall > 0, "a back-pressure stall happened");
    chk(n_idle > 0, "an idle period with no source happened");
    $display("switches=%0d deferred=%0d stalls=%0d idle=%0d", n_switch, n_deferred, n_stall, n_idle);
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
