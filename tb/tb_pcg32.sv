// tb_pcg32: self-checking testbench of pcg32.
//
// Drives `en` with a random pattern and compares `out` on every cycle with
// a reference model of the generator written here as a sequential
// function, the way the published C code computes it. Checks that the
// word holds while `en` is low, that one word is produced per enabled
// clock, and that `seed_we` reloads the state.
module tb_pcg32;
  localparam int NWORDS = 2000;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0, seed_we = 1'b0;
  logic [128-1:0] seed = '0;
  logic [32-1:0] out;
  int checks = 0, failures = 0;
  logic [63:0] pst, pinc;
  pcg32 dut (.clk, .rst_n, .en, .seed_we, .seed, .out);

  always #5 clk = ~clk;

  function automatic logic [31:0] model_step();
    logic [63:0] old;
    logic [31:0] xs;
    int rot;
    old = pst;
    pst = old * 64'd6364136223846793005 + pinc;
    xs  = 32'(((old >> 18) ^ old) >> 27);
    rot = int'(old >> 59);
    return (xs >> rot) | (xs << ((32 - rot) % 32));
  endfunction

  function automatic void model_seed(input logic [63:0] initstate, input logic [63:0] initseq);
    logic [31:0] unused;
    pst  = '0;
    pinc = (initseq << 1) | 64'd1;
    unused = model_step();
    pst  = pst + initstate;
    unused = model_step();
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
    model_seed(64'd42, 64'd54);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    exp = model_step();
    // Published first words of pcg32 for initstate 42, initseq 54.
    checks++;
    if (out !== 32'ha15c02b7) failures++;
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
    seed = {64'd7, 64'h0123_4567_89ab_cdef};
    model_seed(seed[63:0], seed[127:64]);
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
