// tb_lfsr258: self-checking testbench of lfsr258.
//
// Drives `en` with a random pattern and compares `out` on every cycle with
// a reference model of the generator written here as a sequential
// function, the way the published C code computes it. Checks that the
// word holds while `en` is low, that one word is produced per enabled
// clock, and that `seed_we` reloads the state.
module tb_lfsr258;
  localparam int NWORDS = 2000;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0, seed_we = 1'b0;
  logic [320-1:0] seed = '0;
  logic [64-1:0] out;
  int checks = 0, failures = 0;
  logic [63:0] y1, y2, y3, y4, y5;
  lfsr258 dut (.clk, .rst_n, .en, .seed_we, .seed, .out);

  always #5 clk = ~clk;

  function automatic logic [63:0] model_step();
    logic [63:0] b;
    b  = ((y1 << 1) ^ y1) >> 53;
    y1 = ((y1 & 64'd18446744073709551614) << 10) ^ b;
    b  = ((y2 << 24) ^ y2) >> 50;
    y2 = ((y2 & 64'd18446744073709551104) << 5) ^ b;
    b  = ((y3 << 3) ^ y3) >> 23;
    y3 = ((y3 & 64'd18446744073709547520) << 29) ^ b;
    b  = ((y4 << 5) ^ y4) >> 24;
    y4 = ((y4 & 64'd18446744073709420544) << 23) ^ b;
    b  = ((y5 << 3) ^ y5) >> 33;
    y5 = ((y5 & 64'd18446744073701163008) << 8) ^ b;
    return y1 ^ y2 ^ y3 ^ y4 ^ y5;
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
    y1 = 64'd123456789123456789; y2 = y1; y3 = y1; y4 = y1; y5 = y1;
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
    seed = {64'd987654321987654321, 64'd55555555555, 64'd4444444444, 64'd333333333, 64'd22222222};
    {y5, y4, y3, y2, y1} = seed;
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
