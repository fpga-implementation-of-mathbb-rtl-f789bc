// knuth_seeder: sequential generator of a seed array from one 32-bit seed.
//
// Produces N words w[0] = seed, w[i] = 1812433253*(w[i-1]^(w[i-1]>>30)) + i,
// one per clock, the recurrence with Knuth's multiplier that the twisted
// GFSR generators (TT800, WELL512, MT19937) use to fill their state. A
// one-cycle `start` pulse captures `seed`; on the next N cycles
// `word_valid` is high with `word` and its index `idx`; `done` pulses with
// the last word. A new `start` restarts the sequence. The recurrence is the
// classic one; producing it word-serially (one multiplier, N cycles) is
// this design's choice.
module knuth_seeder #(
  parameter int unsigned N = 624
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          seed,
  output logic                 word_valid,
  output logic [31:0]          word,
  output logic [$clog2(N)-1:0] idx,
  output logic                 done
);
  import prng_pkg::*;

  localparam int unsigned IW = $clog2(N);

  logic          busy_q;
  logic [31:0]   cur_q;
  logic [IW-1:0] idx_q;
  logic          last;

  assign last = (idx_q == IW'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cur_q  <= '0;
      idx_q  <= '0;
    end else if (start) begin
      busy_q <= 1'b1;
      cur_q  <= seed;
      idx_q  <= '0;
    end else if (busy_q) begin
      cur_q  <= knuth_next(cur_q, 32'(idx_q) + 32'd1);
      idx_q  <= last ? '0 : idx_q + 1'b1;
      if (last) busy_q <= 1'b0;
    end
  end

  assign word_valid = busy_q;
  assign word       = cur_q;
  assign idx        = idx_q;
  assign done       = busy_q && last;
endmodule
