// cmwc4096: Marsaglia's complementary multiply-with-carry generator CMWC4096, 32 bits per clock.
//
// A 4096-word table Q, a carry c and a 12-bit index i. One step:
//   i = i+1; t = 18782 * Q[i] + c; c = t >> 32; x = t + c (mod 2^32);
//   if (x < c) { x++; c++; }  Q[i] = 0xfffffffe - x;
// and the new Q[i] is the output (the complement that gives the generator
// its name). Q is a RAM read and written at the same address in one clock
// (read-before-write). `out` is combinational from Q[i+1] and c; `en`
// commits the step. The table is filled by a knuth_seeder (4096 clocks
// with `ready` low) from SEED at reset or `seed` on `seed_we`, and the
// carry restarts at 362436. Constants follow the published generator; the
// seeding by Knuth's recurrence follows the paper; the reset seed is this
// design's choice.
module cmwc4096 #(
  parameter logic [31:0] SEED = 32'd5489
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        seed_we,
  input  logic [31:0] seed,
  output logic        ready,
  output logic [31:0] out
);
  localparam logic [31:0] A     = 32'd18782;
  localparam logic [31:0] R     = 32'hffff_fffe;
  localparam logic [31:0] C_INI = 32'd362436;

  logic [31:0] q_mem [4096];
  logic [11:0] i_q, i_n;
  logic [31:0] c_q, c_n, x0, x;
  logic [63:0] t;
  logic        init_q, seeded_q;
  logic        sd_valid, sd_done;
  logic [31:0] sd_word;
  logic [11:0] sd_idx;
  logic        step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_q <= 1'b1;
    else        init_q <= 1'b0;
  end

  knuth_seeder #(.N(4096)) u_seed (
    .clk, .rst_n,
    .start(init_q || seed_we),
    .seed (init_q ? SEED : seed),
    .word_valid(sd_valid), .word(sd_word), .idx(sd_idx), .done(sd_done)
  );

  always_comb begin
    i_n = i_q + 12'd1;
    t   = 64'(A) * 64'(q_mem[i_n]) + 64'(c_q);
    c_n = t[63:32];
    x0  = t[31:0] + c_n;
    x   = x0;
    if (x0 < c_n) begin
      x   = x0 + 32'd1;
      c_n = c_n + 32'd1;
    end
    out = R - x;
  end

  assign step = en && seeded_q && !sd_valid && !init_q && !seed_we;

  always_ff @(posedge clk) begin
    if (sd_valid)  q_mem[sd_idx] <= sd_word;
    else if (step) q_mem[i_n]    <= out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seeded_q <= 1'b0;
      i_q      <= 12'd4095;
      c_q      <= C_INI;
    end else if (init_q || seed_we) begin
      seeded_q <= 1'b0;
      i_q      <= 12'd4095;
      c_q      <= C_INI;
    end else if (sd_valid) begin
      if (sd_done) seeded_q <= 1'b1;
    end else if (step) begin
      i_q <= i_n;
      c_q <= c_n;
    end
  end

  assign ready = seeded_q;
endmodule
