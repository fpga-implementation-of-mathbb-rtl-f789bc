// tb_tt800: self-checking testbench of tt800.
//
// Reference model: the block-regenerating TT800 program (25 words output,
// then all 25 regenerated at once), with its state filled by Knuth's
// recurrence from the seed. Checks `ready` after the 25 seeding cycles,
// every output word under a random `en` pattern (words hold while `en` is
// low, one word per enabled clock), and a reseed through `seed_we`.
module tb_tt800;
  localparam int N = 25, M = 7;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, seed_we = 1'b0, ready;
  logic [31:0] seed = '0, out;
  int checks = 0, failures = 0;
  logic [31:0] x [N];
  int k;

  tt800 dut (.clk, .rst_n, .en, .seed_we, .seed, .ready, .out);

  always #5 clk = ~clk;

  function automatic void model_seed(input logic [31:0] s);
    logic [63:0] m;
    x[0] = s;
    for (int i = 1; i < N; i++) begin
      m = 64'(32'd1812433253) * 64'(x[i-1] ^ (x[i-1] >> 30)) + 64'(i);
      x[i] = m[31:0];
    end
    k = 0;
  endfunction

  function automatic logic [31:0] model_next();
    logic [31:0] y;
    if (k == N) begin
      for (int kk = 0; kk < N; kk++) begin
        y = x[(kk + M) % N];
        x[kk] = y ^ (x[kk] >> 1) ^ (x[kk][0] ? 32'h8ebfd028 : 32'h0);
      end
      k = 0;
    end
    y = x[k];
    y = y ^ ((y << 7) & 32'h2b5b2500);
    y = y ^ ((y << 15) & 32'hdb8b0000);
    y = y ^ (y >> 16);
    k++;
    return y;
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
    run(1000, 1'b1);
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
