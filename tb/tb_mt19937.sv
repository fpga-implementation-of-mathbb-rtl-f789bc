// tb_mt19937: self-checking testbench of mt19937.
//
// Two instances: one self-seeded (INTERNAL_SEED = 1, seed 5489) and one
// loaded by the testbench through the state write port (INTERNAL_SEED = 0).
// Reference model: the block-regenerating MT19937 program (init_genrand,
// 624 words regenerated at once, tempering). Besides the model, checks the
// published values of the reference generator for seed 5489: first output
// 3499211612 and 10000th output 4123659995. Also checks the seeding
// latency (624 words), one word per enabled clock with a random `en`, the
// external load path, and a reseed through `seed_we`.
module tb_mt19937;
  localparam int N = 624, M = 397;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en_a = 1'b0, seed_we_a = 1'b0, ready_a;
  logic [31:0] seed_a = '0, out_a;
  logic en_b = 1'b0, mem_we_b = 1'b0, ready_b;
  logic [9:0] mem_addr_b = '0;
  logic [31:0] mem_wdata_b = '0, out_b;
  int checks = 0, failures = 0;
  logic [31:0] mt [N];
  int mti;

  mt19937 #(.INTERNAL_SEED(1'b1), .SEED(32'd5489)) dut_a (
    .clk, .rst_n, .en(en_a), .seed_we(seed_we_a), .seed(seed_a),
    .mem_we(1'b0), .mem_addr(10'd0), .mem_wdata(32'd0), .ready(ready_a), .out(out_a));

  mt19937 #(.INTERNAL_SEED(1'b0)) dut_b (
    .clk, .rst_n, .en(en_b), .seed_we(1'b0), .seed(32'd0),
    .mem_we(mem_we_b), .mem_addr(mem_addr_b), .mem_wdata(mem_wdata_b),
    .ready(ready_b), .out(out_b));

  always #5 clk = ~clk;

  function automatic void model_seed(input logic [31:0] s);
    logic [63:0] m;
    mt[0] = s;
    for (int i = 1; i < N; i++) begin
      m = 64'(32'd1812433253) * 64'(mt[i-1] ^ (mt[i-1] >> 30)) + 64'(i);
      mt[i] = m[31:0];
    end
    mti = N;
  endfunction

  function automatic logic [31:0] model_next();
    logic [31:0] y;
    if (mti >= N) begin
      for (int kk = 0; kk < N; kk++) begin
        y = (mt[kk] & 32'h80000000) | (mt[(kk + 1) % N] & 32'h7fffffff);
        mt[kk] = mt[(kk + M) % N] ^ (y >> 1) ^ (y[0] ? 32'h9908b0df : 32'h0);
      end
      mti = 0;
    end
    y = mt[mti++];
    y = y ^ (y >> 11);
    y = y ^ ((y << 7) & 32'h9d2c5680);
    y = y ^ ((y << 15) & 32'hefc60000);
    y = y ^ (y >> 18);
    return y;
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0t", what, $time);
    end
  endtask

  initial begin
    int wait_cycles = 0;
    int produced;
    logic [31:0] exp;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (!ready_a) begin
      wait_cycles++;
      @(negedge clk);
    end
    chk(wait_cycles == N, "internal seeding latency");

    // Self-seeded instance: 10000 words against the model, random en.
    model_seed(32'd5489);
    exp = model_next();
    chk(exp == 32'd3499211612, "model first word");
    produced = 0;
    while (produced < 10000) begin
      @(negedge clk);
      en_a = ($urandom_range(0, 3) != 0);
      chk(out_a == exp, "word (internal seed)");
      if (produced == 0) chk(out_a == 32'd3499211612, "first output 3499211612");
      if (produced == 9999) chk(out_a == 32'd4123659995, "10000th output 4123659995");
      @(posedge clk);
      if (en_a) begin
        produced++;
        exp = model_next();
      end
    end
    @(negedge clk);
    en_a = 1'b0;

    // Externally loaded instance: software writes the Knuth array.
    chk(!ready_b, "external instance not ready before load");
    model_seed(32'd19650218);
    for (int i = 0; i < N; i++) begin
      mem_we_b = 1'b1;
      mem_addr_b = 10'(i);
      mem_wdata_b = mt[i];
      @(negedge clk);
    end
    mem_we_b = 1'b0;
    chk(ready_b, "external instance ready after load");
    exp = model_next();
    for (int i = 0; i < 1500; i++) begin
      en_b = 1'b1;
      chk(out_b == exp, "word (external load)");
      @(posedge clk);
      exp = model_next();
      @(negedge clk);
    end
    en_b = 1'b0;

    // Reseed the self-seeded instance.
    seed_a = 32'h0000_1234;
    seed_we_a = 1'b1;
    @(negedge clk);
    seed_we_a = 1'b0;
    chk(!ready_a, "not ready while reseeding");
    wait (ready_a);
    @(negedge clk);
    model_seed(32'h0000_1234);
    exp = model_next();
    for (int i = 0; i < 700; i++) begin
      en_a = 1'b1;
      chk(out_a == exp, "word (reseed)");
      @(posedge clk);
      exp = model_next();
      @(negedge clk);
    end
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
