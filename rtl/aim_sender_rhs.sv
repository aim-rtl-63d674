// aim_sender_rhs: PL sender for the right operand B.
//
// Loads B exactly as the left sender does (512-bit words sliced into 31-bit
// segments with a zero sign bit), then drives K B-streams in parallel. The
// tile at row r, column group k computes output columns (r+k)*T .. +T-1 from
// A segments r*T .. r*T+T-1, so it needs B segments k*T-T+1 .. k*T+T-1, a
// window that depends on k only. Stream k therefore carries that window of
// 2T-1 segments plus one zero pad (2T words, T/2 beats of 128 bits) and is
// shared by all tiles with the same k: the "hypotenuse" broadcast of AIM.
// Segments outside 0..NSEG-1 are sent as zero.
// The window broadcast, slicing and widths follow AIM; the window order
// (lowest B index first) and the zero pad word are this design's own.
module aim_sender_rhs
  import aim_pkg::*;
#(
  parameter int unsigned N = 65536,
  parameter int unsigned T = 200
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ddr_valid,
  output logic                ddr_ready,
  input  logic [DDR_W-1:0]    ddr_data,
  output logic [cols(N,T)-1:0] plio_valid,
  input  logic [cols(N,T)-1:0] plio_ready,
  output plio_t               plio_data [cols(N,T)]
);
  localparam int unsigned NS    = nseg(N);
  localparam int unsigned K     = cols(N, T);
  localparam int unsigned NGRP  = (NS + SEGS_PER_BEAT - 1) / SEGS_PER_BEAT;
  localparam int unsigned BEATS = 2 * T / SEGS_PER_BEAT;
  localparam int unsigned BW    = $clog2(BEATS + 1);

  initial begin
    assert (T % LANES == 0) else $error("aim_sender_rhs: T must be a multiple of 8");
  end

  logic [SEGS_PER_BEAT-1:0][SEG_W-1:0] seg_mem [NGRP];

  logic                sending_q;
  logic [BW-1:0]       beat_q [K];
  logic                up_valid, up_last;
  logic [SEGS_PER_BEAT-1:0][SEG_W-1:0] up_segs;
  logic [$clog2(NS/SEGS_PER_BEAT+2)-1:0] up_grp;
  logic                all_sent;

  seg_unpack #(.N(N)) u_unpack (
    .clk, .rst_n,
    .in_valid (ddr_valid), .in_ready (ddr_ready), .in_data (ddr_data),
    .out_valid(up_valid),  .out_ready(!sending_q),
    .out_segs (up_segs),   .out_grp  (up_grp),    .out_last(up_last)
  );

  always_ff @(posedge clk) begin
    if (up_valid && !sending_q) seg_mem[up_grp] <= up_segs;
  end

  // word l of window k: B segment k*T - T + 1 + l, zero outside the operand
  function automatic word_t win_word(input int k, input int l);
    int s;
    s = k * int'(T) - int'(T) + 1 + l;
    if (l < 2 * int'(T) - 1 && s >= 0 && s < int'(NS))
      return {1'b0, seg_mem[s / SEGS_PER_BEAT][s % SEGS_PER_BEAT]};
    return '0;
  endfunction

  always_comb begin
    all_sent = 1'b1;
    for (int k = 0; k < K; k++) begin
      plio_valid[k] = sending_q && (beat_q[k] < BW'(BEATS));
      for (int s = 0; s < SEGS_PER_BEAT; s++)
        plio_data[k][s*WORD_W +: WORD_W] =
          win_word(k, int'(beat_q[k]) * SEGS_PER_BEAT + s);
      if (beat_q[k] != BW'(BEATS)) all_sent = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sending_q <= 1'b0;
      for (int k = 0; k < K; k++) beat_q[k] <= '0;
    end else if (!sending_q) begin
      if (up_valid && up_last) sending_q <= 1'b1;
    end else if (all_sent) begin
      sending_q <= 1'b0;
      for (int k = 0; k < K; k++) beat_q[k] <= '0;
    end else begin
      for (int k = 0; k < K; k++)
        if (plio_valid[k] && plio_ready[k]) beat_q[k] <= beat_q[k] + 1'b1;
    end
  end
endmodule
