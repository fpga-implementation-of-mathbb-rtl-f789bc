// tb_prng_axis: self-checking testbench of prng_axis.
//
// The generator is stood in for by a counter in the testbench that
// advances on `gen_en` and drops `gen_ready` at random. The consumer drops
// TREADY at random. Checks: the data of accepted beats is the counter
// sequence with nothing lost or repeated (zero-extended 32-bit words);
// TLAST on every burst_len-th accepted beat; a burst size change written
// mid-burst applies from the next burst; burst size 0 acts as 1; TVALID
// follows gen_ready; one beat per clock when both sides are always ready.
module tb_prng_axis;
  import prng_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] cnt = '0;
  logic gen_ready = 1'b0, gen_en, m_tvalid, m_tready = 1'b0;
  logic [BURST_W-1:0] burst_len = 16'd4;
  rng_beat_t m_beat;
  int checks = 0, failures = 0;

  prng_axis #(.GEN_W(32)) dut (
    .clk, .rst_n, .gen_out(cnt), .gen_ready, .gen_en, .burst_len,
    .m_tvalid, .m_tready, .m_beat);

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (gen_en) cnt <= cnt + 1;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0t pos=%0d len=%0d bl=%0d tlast=%b", what, $time, pos, cur_len, burst_len, m_beat.tlast);
    end
  endtask

  // Accepts n beats. The reference burst size is sampled on the first beat
  // of each burst; `pos` is the position inside the burst.
  int exp_word = 0;
  int pos = 0;
  int cur_len = 4;

  task automatic stream(input int n, input bit rnd, input int new_len = -1);
    int got = 0, cyc = 0;
    while (got < n) begin
      @(negedge clk);
      // A burst size change is written at a falling edge, like any input.
      if (new_len >= 0 && got == 0 && cyc == 0) burst_len = BURST_W'(new_len);
      gen_ready = rnd ? ($urandom_range(0, 4) != 0) : 1'b1;
      m_tready  = rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
      #1;
      chk(m_tvalid == gen_ready, "tvalid follows gen_ready");
      if (m_tvalid && m_tready) begin
        if (pos == 0) cur_len = (burst_len == 0) ? 1 : int'(burst_len);
        chk(m_beat.tdata == 64'(exp_word), "data sequence");
        chk(m_beat.tdata[63:32] == 32'd0, "zero extension");
        chk(m_beat.tlast == (pos == cur_len - 1), "tlast position");
        exp_word++;
        got++;
        if (pos == cur_len - 1) begin
          pos = 0;
        end else begin
          pos++;
        end
      end
      cyc++;
    end
    if (!rnd) chk(cyc == n, "one beat per clock");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    stream(400, 1'b1);
    // Change the burst size in the middle of a burst.
    while (pos != 2) stream(1, 1'b1);
    stream(1, 1'b1, 7);
    stream(300, 1'b1);
    stream(1, 1'b1, 0);
    while (pos != 0) stream(1, 1'b1);
    stream(100, 1'b0);
    stream(1, 1'b0, 16);
    while (pos != 0) stream(1, 1'b0);
    stream(320, 1'b0);
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
