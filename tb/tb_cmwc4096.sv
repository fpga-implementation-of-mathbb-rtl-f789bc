// tb_cmwc4096: self-checking testbench of cmwc4096.
//
// Reference model: Marsaglia's CMWC4096 program (table Q, carry starting
// at 362436, index starting at 4095, multiplier 18782, r = 0xfffffffe)
// with Q filled by Knuth's recurrence from the seed. Checks the seeding
// latency, every word under a random `en` and a reseed through `seed_we`.
module tb_cmwc4096;
  localparam int N = 4096;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, seed_we = 1'b0, ready;
  logic [31:0] seed = '0, out;
  int checks = 0, failures = 0;
  logic [31:0] q [N];
  logic [31:0] c;
  int i;

  cmwc4096 dut (.clk, .rst_n, .en, .seed_we, .seed, .ready, .out);

  always #5 clk = ~clk;

  function automatic void model_seed(input logic [31:0] s);
    logic [63:0] m;
    q[0] = s;
    for (int j = 1; j < N; j++) begin
      m = 64'(32'd1812433253) * 64'(q[j-1] ^ (q[j-1] >> 30)) + 64'(j);
      q[j] = m[31:0];
    end
    c = 32'd362436;
    i = N - 1;
  endfunction

  function automatic logic [31:0] model_next();
    logic [63:0] t;
    logic [31:0] x;
    i = (i + 1) & 4095;
    t = 64'd18782 * 64'(q[i]) + 64'(c);
    c = t[63:32];
    x = 32'(t + 64'(c));
    if (x < c) begin
      x++;
      c++;
    end
    q[i] = 32'hfffffffe - x;
    return q[i];
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0t", what, $time);
    end
  endtask

  task automatic run(input int nwords, input bit random_en);
    logic [31:0] exp;
    int produced = 0;
    exp = model_next();
    while (produced < nwords) begin
      @(negedge clk);
      en = random_en ? ($urandom_range(0, 2) != 0) : 1'b1;
      chk(ready, "ready");
      chk(out == exp, "word");
      @(posedge clk);
      if (en) begin
        produced++;
        exp = model_next();
      end
    end
    @(negedge clk);
    en = 1'b0;
  endtask

  initial begin
    int wait_cycles = 0;
    model_seed(32'd5489);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (!ready) begin
      wait_cycles++;
      @(negedge clk);
    end
    // Ready N + 1 clocks after reset release: one start cycle and N words
    // (the count starts after the first clock).
    chk(wait_cycles == N, "seeding latency");
    run(5000, 1'b1);
    seed = 32'h1234_5678;
    seed_we = 1'b1;
    @(negedge clk);
    seed_we = 1'b0;
    chk(!ready, "not ready while reseeding");
    wait (ready);
    model_seed(32'h1234_5678);
    run(200, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (32288) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
