// aim_sender_lhs: PL sender for the left operand A.
//
// Loads A (N bits, N/512 words of 512 bits from off-chip memory), slices it
// into NSEG = ceil(N/31) segments and stores them. It then drives R = ceil(
// NSEG/T) A-streams in parallel: stream r carries segments r*T .. r*T+T-1,
// four per 128-bit beat, each as a 32-bit word with a zero sign bit
// (segments past NSEG are sent as zero). Every tile in AIE row r listens to
// stream r, which is how AIM shares one A stream across a row. A stream beat
// fires on valid && ready; the sender returns to loading once all R streams
// have sent their T/4 beats. Timing: about 5 cycles per input word to load,
// then T/4 beats per stream.
// The slicing, the zero sign bit, the 512/128-bit widths and the row
// broadcast follow AIM; the single operand buffer (no overlap of loading the
// next operand with sending the current one beyond one input word) is this
// design's own choice.
module aim_sender_lhs
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
  output logic [rows(N,T)-1:0] plio_valid,
  input  logic [rows(N,T)-1:0] plio_ready,
  output plio_t               plio_data [rows(N,T)]
);
  localparam int unsigned NS    = nseg(N);
  localparam int unsigned R     = rows(N, T);
  localparam int unsigned NGRP  = (NS + SEGS_PER_BEAT - 1) / SEGS_PER_BEAT;
  localparam int unsigned BEATS = T / SEGS_PER_BEAT;
  localparam int unsigned BW    = $clog2(BEATS + 1);

  initial begin
    assert (T % LANES == 0) else $error("aim_sender_lhs: T must be a multiple of 8");
  end

  logic [SEGS_PER_BEAT-1:0][SEG_W-1:0] seg_mem [NGRP];

  logic                sending_q;
  logic [BW-1:0]       beat_q [R];
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

  // segment s of A as a 32-bit word, zero past the end of the operand
  function automatic word_t seg_word(input int unsigned s);
    if (s < NS) return {1'b0, seg_mem[s / SEGS_PER_BEAT][s % SEGS_PER_BEAT]};
    return '0;
  endfunction

  always_comb begin
    all_sent = 1'b1;
    for (int r = 0; r < R; r++) begin
      plio_valid[r] = sending_q && (beat_q[r] < BW'(BEATS));
      for (int s = 0; s < SEGS_PER_BEAT; s++)
        plio_data[r][s*WORD_W +: WORD_W] =
          seg_word(r * T + int'(beat_q[r]) * SEGS_PER_BEAT + s);
      if (beat_q[r] != BW'(BEATS)) all_sent = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sending_q <= 1'b0;
      for (int r = 0; r < R; r++) beat_q[r] <= '0;
    end else if (!sending_q) begin
      if (up_valid && up_last) sending_q <= 1'b1;
    end else if (all_sent) begin
      sending_q <= 1'b0;
      for (int r = 0; r < R; r++) beat_q[r] <= '0;
    end else begin
      for (int r = 0; r < R; r++)
        if (plio_valid[r] && plio_ready[r]) beat_q[r] <= beat_q[r] + 1'b1;
    end
  end
endmodule
