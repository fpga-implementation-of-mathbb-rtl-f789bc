// tb_xorshift1024star: self-checking testbench of xorshift1024star.
//
// Compares every output with the published xorshift1024* program written
// here as a function (state array, index p, shifts 31/11/30 and the final
// multiply), under a random `en`; then rewrites the 16 state words through
// the word load port and checks the sequence again.
module tb_xorshift1024star;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, seed_we = 1'b0;
  logic [3:0] seed_addr = '0;
  logic [63:0] seed = '0, out;
  int checks = 0, failures = 0;
  logic [63:0] s [16];
  int p;

  xorshift1024star dut (.clk, .rst_n, .en, .seed_we, .seed_addr, .seed, .out);

  always #5 clk = ~clk;

  function automatic logic [63:0] model_step();
    logic [63:0] s0, s1;
    s0 = s[p];
    p = (p + 1) & 15;
    s1 = s[p];
    s1 = s1 ^ (s1 << 31);
    s1 = s1 ^ (s1 >> 11);
    s0 = s0 ^ (s0 >> 30);
    s[p] = s0 ^ s1;
    return s[p] * 64'd1181783497276652981;
  endfunction

  task automatic run(input int n);
    logic [63:0] exp;
    int produced = 0;
    exp = model_step();
    while (produced < n) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      checks++;
      if (out !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL got %h exp %h", out, exp);
      end
      @(posedge clk);
      if (en) begin
        produced++;
        exp = model_step();
      end
    end
    @(negedge clk);
    en = 1'b0;
  endtask

  initial begin
    for (int k = 0; k < 16; k++) s[k] = dut.SEED[64*k +: 64];
    p = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(2000);
    for (int k = 0; k < 16; k++) begin
      seed_we = 1'b1;
      seed_addr = 4'(k);
      seed = {$urandom, $urandom};
      s[k] = seed;
      @(negedge clk);
    end
    seed_we = 1'b0;
    p = 0;
    run(500);
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
