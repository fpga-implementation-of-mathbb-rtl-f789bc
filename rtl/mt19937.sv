// mt19937: Mersenne Twister MT19937 with its state in a 624-word RAM, 32 bits per clock.
//
// The RAM works as a circular feedback shift register: at index i the
// generator reads mt[i], mt[i+1] and mt[i+397] (mod 624), forms
//   y = (mt[i] & 0x80000000) | (mt[i+1] & 0x7fffffff)
//   mt[i] = mt[i+397] ^ (y >> 1) ^ (y[0] ? 0x9908b0df : 0)
// writes the new word back over the one it replaces, advances i, and
// outputs the new word tempered (>>11, <<7 & 0x9d2c5680, <<15 & 0xefc60000,
// >>18). This word-at-a-time update gives the same sequence as the block
// regeneration of the reference program.
//
// Seeding, two variants as in the paper: with INTERNAL_SEED = 1 (the
// "with seed" variant) a knuth_seeder writes the 624 words of Knuth's
// recurrence into the RAM after reset (from SEED) and on `seed_we` (from
// `seed`), 624 cycles with `ready` low. With INTERNAL_SEED = 0 (the "no
// seed" variant, the default) software writes the 624 words through
// `mem_we/mem_addr/mem_wdata`; `ready` rises when address 623 is written.
// A write through that port resets the generation index to 0 and clears
// `ready` until address 623 is written again.
// The paper stores the state in two block RAMs in read-before-write mode;
// here it is one array with three asynchronous reads and one write, which
// a synthesis tool may map to replicated distributed RAM.
module mt19937 #(
  parameter bit          INTERNAL_SEED = 1'b0,
  parameter logic [31:0] SEED          = 32'd5489
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        seed_we,    // INTERNAL_SEED = 1: reseed from `seed`
  input  logic [31:0] seed,
  input  logic        mem_we,     // external state load (INTERNAL_SEED = 0)
  input  logic [9:0]  mem_addr,
  input  logic [31:0] mem_wdata,
  output logic        ready,
  output logic [31:0] out
);
  localparam int unsigned N = 624;
  localparam int unsigned M = 397;
  localparam logic [31:0] MATRIX_A = 32'h9908_b0df;
  localparam logic [31:0] UPPER    = 32'h8000_0000;
  localparam logic [31:0] LOWER    = 32'h7fff_ffff;

  logic [31:0] mt_mem [N];
  logic [9:0]  i_q, i_p1, i_pm;
  logic        init_q, seeded_q;
  logic        sd_start, sd_valid, sd_done;
  logic [31:0] sd_word;
  logic [9:0]  sd_idx;
  logic [31:0] y, x_new, t1, t2, t3;
  logic        gen_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_q <= 1'b1;
    else        init_q <= 1'b0;
  end

  assign sd_start = INTERNAL_SEED && (init_q || seed_we);

  knuth_seeder #(.N(N)) u_seed (
    .clk, .rst_n,
    .start(sd_start),
    .seed (init_q ? SEED : seed),
    .word_valid(sd_valid), .word(sd_word), .idx(sd_idx), .done(sd_done)
  );

  always_comb begin
    i_p1  = (i_q == 10'(N - 1)) ? 10'd0 : i_q + 10'd1;
    i_pm  = (i_q >= 10'(N - M)) ? i_q - 10'(N - M) : i_q + 10'(M);
    y     = (mt_mem[i_q] & UPPER) | (mt_mem[i_p1] & LOWER);
    x_new = mt_mem[i_pm] ^ (y >> 1) ^ (y[0] ? MATRIX_A : 32'd0);
    t1    = x_new ^ (x_new >> 11);
    t2    = t1 ^ ((t1 << 7) & 32'h9d2c_5680);
    t3    = t2 ^ ((t2 << 15) & 32'hefc6_0000);
    out   = t3 ^ (t3 >> 18);
  end

  assign gen_step = en && seeded_q && !sd_valid && !mem_we && !sd_start;

  // State RAM: one write port shared by the seeder, the external load port
  // and the generator.
  always_ff @(posedge clk) begin
    if (sd_valid)      mt_mem[sd_idx]   <= sd_word;
    else if (mem_we)   mt_mem[mem_addr] <= mem_wdata;
    else if (gen_step) mt_mem[i_q]      <= x_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seeded_q <= 1'b0;
      i_q      <= '0;
    end else if (sd_start) begin
      seeded_q <= 1'b0;
      i_q      <= '0;
    end else if (sd_valid) begin
      if (sd_done) seeded_q <= 1'b1;
    end else if (mem_we) begin
      i_q      <= '0;
      seeded_q <= (mem_addr == 10'(N - 1));
    end else if (gen_step) begin
      i_q <= i_p1;
    end
  end

  assign ready = seeded_q;
endmodule
