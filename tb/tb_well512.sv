// tb_well512: self-checking testbench of well512.
//
// Reference model: the WELL512a program (state array and index, the
// MAT0POS/MAT0NEG/MAT3NEG/MAT4NEG transforms spelled out), with its 16
// words filled by Knuth's recurrence from the seed. Checks the seeding
// latency, every output word under a random `en` pattern and a reseed.
module tb_well512;
  localparam int R = 16;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, seed_we = 1'b0, ready;
  logic [31:0] seed = '0, out;
  int checks = 0, failures = 0;
  logic [31:0] st [R];
  int si;

  well512 dut (.clk, .rst_n, .en, .seed_we, .seed, .ready, .out);

  always #5 clk = ~clk;

  function automatic void model_seed(input logic [31:0] s);
    logic [63:0] m;
    st[0] = s;
    for (int i = 1; i < R; i++) begin
      m = 64'(32'd1812433253) * 64'(st[i-1] ^ (st[i-1] >> 30)) + 64'(i);
      st[i] = m[31:0];
    end
    si = 0;
  endfunction

  function automatic logic [31:0] model_next();
    logic [31:0] z0, z1, z2, v1;
    z0 = st[(si + 15) & 15];
    z1 = (st[si] ^ (st[si] << 16)) ^ (st[(si + 13) & 15] ^ (st[(si + 13) & 15] << 15));
    z2 = st[(si + 9) & 15] ^ (st[(si + 9) & 15] >> 11);
    v1 = z1 ^ z2;
    st[si] = v1;
    st[(si + 15) & 15] = (z0 ^ (z0 << 2)) ^ (z1 ^ (z1 << 18)) ^ (z2 << 28)
                       ^ (v1 ^ ((v1 << 5) & 32'hda442d24));
    si = (si + 15) & 15;
    return st[si];
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
    // Ready R + 1 clocks after reset release (the count starts after the
    // first clock).
    chk(wait_cycles == R, "seeding latency");
    run(1000, 1'b1);
    seed = 32'h0bad_cafe;
    seed_we = 1'b1;
    @(negedge clk);
    seed_we = 1'b0;
    chk(!ready, "not ready while reseeding");
    wait (ready);
    model_seed(32'h0bad_cafe);
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
