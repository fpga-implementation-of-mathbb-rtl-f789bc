// tb_xorshift128plus: self-checking testbench of xorshift128plus.
//
// Drives `en` with a random pattern and compares `out` on every cycle with
// a reference model of the generator written here as a sequential
// function, the way the published C code computes it. Checks that the
// word holds while `en` is low, that one word is produced per enabled
// clock, and that `seed_we` reloads the state.
module tb_xorshift128plus;
  localparam int NWORDS = 2000;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0, seed_we = 1'b0;
  logic [128-1:0] seed = '0;
  logic [64-1:0] out;
  int checks = 0, failures = 0;
  logic [63:0] ms [2];
  xorshift128plus dut (.clk, .rst_n, .en, .seed_we, .seed, .out);

  always #5 clk = ~clk;

  function automatic logic [63:0] model_step();
    logic [63:0] s1, s0;
    s1 = ms[0];
    s0 = ms[1];
    ms[0] = s0;
    s1 = s1 ^ (s1 << 23);
    ms[1] = s1 ^ s0 ^ (s1 >> 17) ^ (s0 >> 26);
    return ms[1] + s0;
  endfunction

  task automatic check(input logic [64-1:0] exp, input string what);
    checks++;
    if (out !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, out, exp);
    end
  endtask

  initial begin
    automatic logic [64-1:0] exp;
    automatic int produced = 0, cycles = 0;
    ms[0] = 64'h121fd2155c472f96;
    ms[1] = 64'h8a5cd789635d2dff;
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
    seed = {64'hdead_beef_0bad_f00d, 64'h1357_9bdf_2468_ace0};
    ms[0] = seed[63:0];
    ms[1] = seed[127:64];
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
