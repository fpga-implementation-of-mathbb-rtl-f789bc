// taus88: L'Ecuyer's Taus88 combined Tausworthe generator, 32 bits per clock.
//
// Three 32-bit components s1..s3, each updated by
//   b = ((s << q) ^ s) >> (k - s); s = ((s & mask) << sh) ^ b
// with (q, sh, k-sh, mask) = (13,12,19,~1), (2,4,25,~7), (3,17,11,~15).
// The output is s1^s2^s3 of the new components, formed combinationally;
// `en` moves the state on. Seeds must satisfy s1>1, s2>7, s3>15.
// Constants follow the published generator; the reset seed (12345 in each
// component) and the load port are this design's choices.
module taus88 #(
  parameter logic [95:0] SEED = {3{32'd12345}}
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        seed_we,
  input  logic [95:0] seed,      // {s3, s2, s1}
  output logic [31:0] out
);
  logic [31:0] s_q [3];
  logic [31:0] s_n [3];

  always_comb begin
    s_n[0] = ((s_q[0] & 32'hFFFF_FFFE) << 12) ^ (((s_q[0] << 13) ^ s_q[0]) >> 19);
    s_n[1] = ((s_q[1] & 32'hFFFF_FFF8) << 4)  ^ (((s_q[1] << 2)  ^ s_q[1]) >> 25);
    s_n[2] = ((s_q[2] & 32'hFFFF_FFF0) << 17) ^ (((s_q[2] << 3)  ^ s_q[2]) >> 11);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) s_q[i] <= SEED[32*i +: 32];
    end else if (seed_we) begin
      for (int i = 0; i < 3; i++) s_q[i] <= seed[32*i +: 32];
    end else if (en) begin
      for (int i = 0; i < 3; i++) s_q[i] <= s_n[i];
    end
  end

  assign out = s_n[0] ^ s_n[1] ^ s_n[2];
endmodule
