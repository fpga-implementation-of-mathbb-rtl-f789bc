// tb_mrg32k3a: self-checking testbench of mrg32k3a.
//
// Drives `en` with a random pattern and compares `out` on every cycle with
// a reference model of the generator written here as a sequential
// function, the way the published C code computes it. Checks that the
// word holds while `en` is low, that one word is produced per enabled
// clock, and that `seed_we` reloads the state.
module tb_mrg32k3a;
  localparam int NWORDS = 2000;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0, seed_we = 1'b0;
  logic [192-1:0] seed = '0;
  logic [32-1:0] out;
  int checks = 0, failures = 0;
  longint g1 [3], g2 [3];
  mrg32k3a dut (.clk, .rst_n, .en, .seed_we, .seed, .out);

  always #5 clk = ~clk;

  function automatic logic [31:0] model_step();
    longint p1, p2;
    p1 = (64'sd1403580 * g1[1] - 64'sd810728 * g1[0]) % 64'sd4294967087;
    if (p1 < 0) p1 += 64'sd4294967087;
    g1[0] = g1[1]; g1[1] = g1[2]; g1[2] = p1;
    p2 = (64'sd527612 * g2[2] - 64'sd1370589 * g2[0]) % 64'sd4294944443;
    if (p2 < 0) p2 += 64'sd4294944443;
    g2[0] = g2[1]; g2[1] = g2[2]; g2[2] = p2;
    return 32'((p1 > p2) ? (p1 - p2) : (p1 - p2 + 64'sd4294967087));
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
    for (int k = 0; k < 3; k++) begin g1[k] = 12345; g2[k] = 12345; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    exp = model_step();
    // Reference value: first output for seed 12345 (x6) is 545508589,
    // i.e. 0.12701112 after division by 2^32-208.
    checks++;
    if (out !== 32'd545508589) failures++;
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
    seed = {32'd4000000000, 32'd77, 32'd1, 32'd4294967000, 32'd0, 32'd3};
    for (int k = 0; k < 3; k++) begin g1[k] = longint'(seed[32*k +: 32]); g2[k] = longint'(seed[96 + 32*k +: 32]); end
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
