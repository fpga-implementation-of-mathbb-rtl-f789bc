// tb_ci_core: self-checking testbench of ci_core.
//
// Drives random 64-bit x, y and 3-bit z and a random `en`, and compares r
// with the chaotic-iteration algorithm written here step by step (three
// conditional XORs into s, then r = s ^ (y >> 32)). Also checks that s
// holds while `en` is low, that every strategy value of z occurs, and a
// reload of s through `seed_we`.
module tb_ci_core;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, seed_we = 1'b0;
  logic [31:0] seed = '0, r;
  logic [63:0] x = '0, y = '0;
  logic [2:0] z = '0;
  int checks = 0, failures = 0;
  logic [31:0] s;
  int zseen [8];

  ci_core #(.SEED(32'h0)) dut (.clk, .rst_n, .en, .seed_we, .seed, .x, .y, .z, .r);

  always #5 clk = ~clk;

  function automatic logic [31:0] model(input logic [31:0] s_in, output logic [31:0] s_out);
    logic [31:0] t;
    t = s_in;
    if ((z & 3'd1) != 0) t = t ^ 32'(x & 64'h0ffffffff);
    if ((z & 3'd2) != 0) t = t ^ 32'(x >> 32);
    if ((z & 3'd4) != 0) t = t ^ 32'(y & 64'h0ffffffff);
    s_out = t;
    return t ^ 32'(y >> 32);
  endfunction

  initial begin
    logic [31:0] exp, s_new;
    s = 32'h0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      x  = {$urandom, $urandom};
      y  = {$urandom, $urandom};
      z  = 3'($urandom);
      en = ($urandom_range(0, 3) != 0);
      if (i == 2500) begin
        seed    = 32'hcafe_f00d;
        seed_we = 1'b1;
      end else begin
        seed_we = 1'b0;
      end
      #1;
      exp = model(s, s_new);
      checks++;
      if (r !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d r=%h exp=%h", i, r, exp);
      end
      zseen[z]++;
      @(posedge clk);
      if (seed_we) s = seed;
      else if (en) s = s_new;
    end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (zseen[k] == 0) failures++;
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
