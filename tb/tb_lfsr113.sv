// tb_lfsr113: self-checking testbench of lfsr113.
//
// Drives `en` with a random pattern and compares `out` on every cycle with
// a reference model of the generator written here as a sequential
// function, the way the published C code computes it. Checks that the
// word holds while `en` is low, that one word is produced per enabled
// clock, and that `seed_we` reloads the state.
module tb_lfsr113;
  localparam int NWORDS = 2000;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0, seed_we = 1'b0;
  logic [128-1:0] seed = '0;
  logic [32-1:0] out;
  int checks = 0, failures = 0;
  logic [31:0] z1, z2, z3, z4;
  lfsr113 dut (.clk, .rst_n, .en, .seed_we, .seed, .out);

  always #5 clk = ~clk;

  function automatic logic [31:0] model_step();
    logic [31:0] b;
    b  = ((z1 << 6) ^ z1) >> 13;
    z1 = ((z1 & 32'd4294967294) << 18) ^ b;
    b  = ((z2 << 2) ^ z2) >> 27;
    z2 = ((z2 & 32'd4294967288) << 2) ^ b;
    b  = ((z3 << 13) ^ z3) >> 21;
    z3 = ((z3 & 32'd4294967280) << 7) ^ b;
    b  = ((z4 << 3) ^ z4) >> 12;
    z4 = ((z4 & 32'd4294967168) << 13) ^ b;
    return z1 ^ z2 ^ z3 ^ z4;
  endfunction

  task automatic check(input logic [32-1:0] exp, input string what);
    checks++;
    if (out !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, out, exp);
    end
  endtask

  initial begin
    automatic logic [32-1:0] exp;
    automatic int produced = 0, cycles = 0;
    z1 = 987654321; z2 = 987654321; z3 = 987654321; z4 = 987654321;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    exp = model_step();

    while (produced < NWORDS) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      check(exp, "word");
      @(posedge clk);
      cycles++;
      if (en) begin
        produced++;
        exp = model_step();
      end
    end
    // Throughput: every enabled cycle produced exactly one word.
    checks++;
    if (produced > cycles) failures++;
    // Reseed through seed_we.
    @(negedge clk);
    en = 1'b0;
    seed = {32'd100000, 32'd5000, 32'd300, 32'd20};
    {z4, z3, z2, z1} = seed;
    seed_we = 1'b1;
    @(negedge clk);
    seed_we = 1'b0;
    exp = model_step();
    repeat (200) begin
      @(negedge clk);
      en = 1'b1;
      check(exp, "after reseed");
      @(posedge clk);
      exp = model_step();
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
