// axi_rng_interconnect: selects one of N generator streams for the DMA.
//
// N AXI4-Stream slave ports (one per generator wrapper) and one master
// port towards the DMA's S2MM channel. The enable vector `en` (written by
// software through GPIO-0) picks the source: the lowest set bit wins, and
// with no bit set the output is idle. Only the selected source sees
// TREADY, so all others hold their state. The selection is registered and
// changes only between bursts: a new `en` value is taken when no burst is
// in flight (after a beat with TLAST, or before the first beat), so a DMA
// transfer never mixes words of two generators. The datapath is a plain
// N:1 multiplexer with no buffering: TVALID/TDATA/TLAST pass
// combinationally, one beat per clock. The paper names the block and its
// EN input; the priority rule and the burst-boundary switching are this
// design's choices. The assertions are disabled while `rst_n` is low,
// which lint reports as `rst_n` being used both asynchronously and
// synchronously; in the logic it is only the asynchronous reset.
module axi_rng_interconnect #(
  parameter int unsigned N = 19
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        en,        // GPIO-0
  // slave ports
  input  logic [N-1:0]        s_tvalid,
  output logic [N-1:0]        s_tready,
  input  prng_pkg::rng_beat_t s_beat [N],
  // master port
  output logic                m_tvalid,
  input  logic                m_tready,
  output prng_pkg::rng_beat_t m_beat,
  // status
  output logic                active,    // a source is selected
  output logic [$clog2(N)-1:0] cur_sel,  // selected source
  output logic                in_burst   // a burst is in flight
);
  import prng_pkg::*;

  localparam int unsigned SW = $clog2(N);

  logic [SW-1:0] sel_q, req_sel;
  logic          act_q, req_act;
  logic          burst_q;
  logic          hs;

  // Lowest set bit of the enable vector.
  always_comb begin
    req_sel = '0;
    req_act = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      if (en[k]) begin
        req_sel = SW'(k);
        req_act = 1'b1;
      end
    end
  end

  always_comb begin
    m_tvalid = act_q && s_tvalid[sel_q];
    m_beat   = s_beat[sel_q];
    for (int k = 0; k < N; k++) s_tready[k] = act_q && (sel_q == SW'(k)) && m_tready;
  end

  assign hs = m_tvalid && m_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q   <= '0;
      act_q   <= 1'b0;
      burst_q <= 1'b0;
    end else begin
      // Switch only at a burst boundary: with the last beat of a burst,
      // or while no burst is in flight.
      if (hs) begin
        burst_q <= !m_beat.tlast;
        if (m_beat.tlast) begin
          sel_q <= req_sel;
          act_q <= req_act;
        end
      end else if (!burst_q) begin
        sel_q <= req_sel;
        act_q <= req_act;
      end
    end
  end

  assign active   = act_q;
  assign cur_sel  = sel_q;
  assign in_burst = burst_q;

  // The selected index is always a real port.
  a_sel_range: assert property (@(posedge clk) disable iff (!rst_n) act_q |-> (int'(sel_q) < int'(N)));
  // TLAST handshake ends the burst.
  a_burst_end: assert property (@(posedge clk) disable iff (!rst_n)
                                (hs && m_beat.tlast) |=> !burst_q);
endmodule
