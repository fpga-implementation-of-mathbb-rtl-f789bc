// prng_axis: AXI4-Stream source wrapper for one generator.
//
// Presents the generator's current word as a stream beat: TVALID follows
// the generator's `gen_ready`, TDATA is the word zero-extended to 64 bits,
// and the generator is advanced (`gen_en`) on every accepted beat
// (TVALID & TREADY), so a generator delivers one word per clock while the
// consumer is ready and holds its word while it is not. TLAST marks every
// `burst_len`-th beat, the burst size written by software (GPIO-1); a
// burst size of 0 is taken as 1. A new burst size takes effect at the
// next burst boundary. The stream mapping, zero-extension and boundary
// rule are this design's choices: the paper only states that the
// generators are AXI-Stream IPs and that GPIO-1 sets the burst size.
module prng_axis #(
  parameter int unsigned GEN_W = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // generator side
  input  logic [GEN_W-1:0]              gen_out,
  input  logic                          gen_ready,
  output logic                          gen_en,
  // burst size (GPIO-1)
  input  logic [prng_pkg::BURST_W-1:0]  burst_len,
  // AXI4-Stream master
  output logic                          m_tvalid,
  input  logic                          m_tready,
  output prng_pkg::rng_beat_t           m_beat
);
  import prng_pkg::*;

  logic [BURST_W-1:0] cnt_q, len_q, len_in, len_eff;
  logic               hs, last;

  assign len_in   = (burst_len == '0) ? BURST_W'(1) : burst_len;
  // The first beat of a burst sees the current GPIO-1 value; the rest of
  // the burst uses the value latched on that first beat.
  assign len_eff  = (cnt_q == '0) ? len_in : len_q;
  assign m_tvalid = gen_ready;
  assign hs       = m_tvalid && m_tready;
  assign gen_en   = hs;
  assign last     = (cnt_q == len_eff - 1'b1);

  always_comb begin
    m_beat.tdata = DATA_W'(gen_out);
    m_beat.tlast = last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      len_q <= BURST_W'(1);
    end else if (hs) begin
      if (last) begin
        cnt_q <= '0;
      end else begin
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == '0) len_q <= len_in;
      end
    end
  end
endmodule
