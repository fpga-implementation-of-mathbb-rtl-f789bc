// mwc256: Marsaglia's lag-256 multiply-with-carry generator MWC256, 32 bits per clock.
//
// A 256-word table Q, a carry c and an 8-bit index i. One step:
//   i = i+1; t = 809430660 * Q[i] + c; c = t >> 32; Q[i] = t mod 2^32;
// and the new Q[i] is the output. Q is a RAM read and written at the same
// address in the same clock (read-before-write), so the table acts as a
// circular shift register of lag 256. `out` is combinational from Q[i+1]
// and c; `en` commits the step. The table is filled by a knuth_seeder
// from a 32-bit seed (SEED at reset, `seed` on `seed_we`; 256 clocks with
// `ready` low) and the carry restarts at 362436, the reference program's
// initial carry. Constants follow the published generator; the seeding by
// Knuth's recurrence follows the paper; reset seed is this design's choice.
module mwc256 #(
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
  localparam logic [31:0] A     = 32'd809430660;
  localparam logic [31:0] C_INI = 32'd362436;

  logic [31:0] q_mem [256];
  logic [7:0]  i_q, i_n;
  logic [31:0] c_q;
  logic [63:0] t;
  logic        init_q, seeded_q;
  logic        sd_valid, sd_done;
  logic [31:0] sd_word;
  logic [7:0]  sd_idx;
  logic        step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_q <= 1'b1;
    else        init_q <= 1'b0;
  end

  knuth_seeder #(.N(256)) u_seed (
    .clk, .rst_n,
    .start(init_q || seed_we),
    .seed (init_q ? SEED : seed),
    .word_valid(sd_valid), .word(sd_word), .idx(sd_idx), .done(sd_done)
  );

  assign i_n  = i_q + 8'd1;
  assign t    = 64'(A) * 64'(q_mem[i_n]) + 64'(c_q);
  assign out  = t[31:0];
  assign step = en && seeded_q && !sd_valid && !init_q && !seed_we;

  always_ff @(posedge clk) begin
    if (sd_valid)  q_mem[sd_idx] <= sd_word;
    else if (step) q_mem[i_n]    <= t[31:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seeded_q <= 1'b0;
      i_q      <= 8'd255;
      c_q      <= C_INI;
    end else if (init_q || seed_we) begin
      seeded_q <= 1'b0;
      i_q      <= 8'd255;
      c_q      <= C_INI;
    end else if (sd_valid) begin
      if (sd_done) seeded_q <= 1'b1;
    end else if (step) begin
      i_q <= i_n;
      c_q <= t[63:32];
    end
  end

  assign ready = seeded_q;
endmodule
