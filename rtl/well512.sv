// well512: WELL512a generator of Panneton, L'Ecuyer and Matsumoto, 32 bits per clock.
//
// Sixteen 32-bit state words and a circular index i. One step reads
// V0 = st[i], VM1 = st[i+13], VM2 = st[i+9], VRm1 = st[i+15] (mod 16) and
//   z1 = V0^(V0<<16) ^ VM1^(VM1<<15);  z2 = VM2^(VM2>>11);
//   st[i] = z1^z2;  st[i+15] = z0^(z0<<2) ^ z1^(z1<<18) ^ (z2<<28)
//                              ^ st[i] ^ ((st[i]<<5) & 0xda442d24);
//   i = i+15; output st[i]
// with z0 = VRm1. Two words of the register file are written per step.
// The output is the new st[i+15], formed combinationally; `en` consumes
// it. The state is filled by a knuth_seeder (16 cycles, `ready` low),
// from SEED at reset or from `seed` on `seed_we`; this seeding follows the
// paper's choice of Knuth's recurrence for TGFSR generators.
module well512 #(
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
  localparam int unsigned R = 16;

  logic [31:0] st_q [R];
  logic [3:0]  i_q;
  logic        init_q, seeded_q;
  logic        sd_valid, sd_done;
  logic [31:0] sd_word;
  logic [3:0]  sd_idx;
  logic [31:0] z0, z1, z2, v0, vm1, vm2, new_v1, new_v0;
  logic [3:0]  i_m1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_q <= 1'b1;
    else        init_q <= 1'b0;
  end

  knuth_seeder #(.N(R)) u_seed (
    .clk, .rst_n,
    .start(init_q || seed_we),
    .seed (init_q ? SEED : seed),
    .word_valid(sd_valid), .word(sd_word), .idx(sd_idx), .done(sd_done)
  );

  always_comb begin
    i_m1   = i_q + 4'd15;
    v0     = st_q[i_q];
    vm1    = st_q[i_q + 4'd13];
    vm2    = st_q[i_q + 4'd9];
    z0     = st_q[i_m1];
    z1     = v0 ^ (v0 << 16) ^ vm1 ^ (vm1 << 15);
    z2     = vm2 ^ (vm2 >> 11);
    new_v1 = z1 ^ z2;
    new_v0 = z0 ^ (z0 << 2) ^ z1 ^ (z1 << 18) ^ (z2 << 28)
           ^ new_v1 ^ ((new_v1 << 5) & 32'hda44_2d24);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seeded_q <= 1'b0;
      i_q      <= '0;
      for (int k = 0; k < R; k++) st_q[k] <= '0;
    end else if (init_q || seed_we) begin
      seeded_q <= 1'b0;
      i_q      <= '0;
    end else if (sd_valid) begin
      st_q[sd_idx] <= sd_word;
      if (sd_done) seeded_q <= 1'b1;
    end else if (en && seeded_q) begin
      st_q[i_q]  <= new_v1;
      st_q[i_m1] <= new_v0;
      i_q        <= i_m1;
    end
  end

  assign out   = new_v0;
  assign ready = seeded_q;
endmodule
