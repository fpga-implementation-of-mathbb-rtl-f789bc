// tb_knuth_seeder: self-checking testbench of knuth_seeder.
//
// Starts the seeder with seed 5489 and checks each of the N words against
// the recurrence x[i] = 1812433253*(x[i-1]^(x[i-1]>>30)) + i computed here
// with 64-bit arithmetic truncated to 32 bits; also checks the known second
// word of MT19937's initial state (1301868182 for seed 5489), the index,
// the one-word-per-clock rate and the `done` pulse, then restarts it.
module tb_knuth_seeder;
  localparam int N = 624;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [31:0] seed = 32'd5489;
  logic word_valid, done;
  logic [31:0] word;
  logic [9:0] idx;
  int checks = 0, failures = 0;

  knuth_seeder #(.N(N)) dut (.clk, .rst_n, .start, .seed, .word_valid, .word, .idx, .done);

  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0t", what, $time);
    end
  endtask

  task automatic run(input logic [31:0] s);
    logic [63:0] m;
    logic [31:0] x;
    @(negedge clk);
    seed  = s;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    x = s;
    for (int i = 0; i < N; i++) begin
      chk(word_valid, "valid");
      chk(word == x, "word");
      chk(idx == 10'(i), "idx");
      chk(done == (i == N - 1), "done");
      if (s == 32'd5489 && i == 1) chk(word == 32'd1301868182, "known word 1");
      m = 64'(32'd1812433253) * 64'(x ^ (x >> 30)) + 64'(i + 1);
      x = m[31:0];
      @(negedge clk);
    end
    chk(!word_valid, "idle after N words");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    chk(!word_valid, "idle after reset");
    run(32'd5489);
    run(32'hdeadbeef);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
