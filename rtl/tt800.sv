// tt800: Matsumoto-Kurita TT800 twisted GFSR, one 32-bit word per clock.
//
// The 25-word state is kept as a feedback shift register sr[0..24] holding
// x[k..k+24]. Each step forms the new word
//   x[k+25] = x[k+7] ^ (x[k] >> 1) ^ (x[k][0] ? 0x8ebfd028 : 0)
// (the twisted recurrence x[k+n] = x[k+m] ^ x[k]*A with n = 25, m = 7),
// and shifts it in. The output is the oldest word sr[0] tempered:
//   y ^= (y << 7) & 0x2b5b2500; y ^= (y << 15) & 0xdb8b0000; y ^= y >> 16,
// so the first 25 outputs are the tempered seed words, then each word
// x[k+25] follows 25 steps after it was formed. This gives the same
// sequence as the reference program, which outputs its 25 words and then
// regenerates all of them at once. The state is filled by
// a knuth_seeder from a 32-bit seed (SEED at reset, `seed` on `seed_we`);
// `ready` is low during the 25 seeding cycles. The seeder's index output
// is left unconnected, since the words are shifted in rather than
// addressed. `out` is valid whenever `ready` is high and `en` consumes it.
module tt800 #(
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
  localparam int unsigned N = 25;
  localparam int unsigned M = 7;
  localparam logic [31:0] MAG = 32'h8ebf_d028;

  logic [31:0] sr_q [N];
  logic        init_q, seeded_q;
  logic        sd_valid, sd_done;
  logic [31:0] sd_word;
  logic [31:0] x_new, y1, y2;

  // Seeding starts one cycle after reset and on every seed_we.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_q <= 1'b1;
    else        init_q <= 1'b0;
  end

  knuth_seeder #(.N(N)) u_seed (
    .clk, .rst_n,
    .start(init_q || seed_we),
    .seed (init_q ? SEED : seed),
    .word_valid(sd_valid), .word(sd_word), .idx(), .done(sd_done)
  );

  always_comb begin
    x_new = sr_q[M] ^ (sr_q[0] >> 1) ^ (sr_q[0][0] ? MAG : 32'd0);
    y1    = sr_q[0] ^ ((sr_q[0] << 7) & 32'h2b5b_2500);
    y2    = y1 ^ ((y1 << 15) & 32'hdb8b_0000);
    out   = y2 ^ (y2 >> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seeded_q <= 1'b0;
      for (int i = 0; i < N; i++) sr_q[i] <= '0;
    end else if (init_q || seed_we) begin
      seeded_q <= 1'b0;
    end else if (sd_valid) begin
      for (int i = 0; i < N - 1; i++) sr_q[i] <= sr_q[i+1];
      sr_q[N-1] <= sd_word;
      if (sd_done) seeded_q <= 1'b1;
    end else if (en && seeded_q) begin
      for (int i = 0; i < N - 1; i++) sr_q[i] <= sr_q[i+1];
      sr_q[N-1] <= x_new;
    end
  end

  assign ready = seeded_q;
endmodule
