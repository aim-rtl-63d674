// seg_unpack: width converter from 512-bit memory words to 31-bit segments.
//
// An N-bit operand arrives as N/512 little-endian 512-bit words. The unit
// keeps a bit buffer of one word plus one output group and hands out groups of
// four consecutive 31-bit segments (124 bits) per cycle, the last group padded
// with zeros. After ceil(NSEG/4) groups it clears itself for the next operand.
// Input and output never fire in the same cycle: a word is taken only when
// fewer than 124 bits are buffered, so a 512-bit word yields 4 groups in 4
// cycles after 1 cycle of input. Output index out_grp numbers the groups.
// The 512-to-31 bit slicing is the sender's job in AIM; the buffer-based
// structure is this design's own.
module seg_unpack
  import aim_pkg::*;
#(
  parameter int unsigned N = 65536
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [DDR_W-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [SEGS_PER_BEAT-1:0][SEG_W-1:0] out_segs,
  output logic [$clog2(nseg(N)/SEGS_PER_BEAT+2)-1:0] out_grp,
  output logic                       out_last
);
  localparam int unsigned NW    = N / DDR_W;
  localparam int unsigned GBITS = SEGS_PER_BEAT * SEG_W;              // 124
  localparam int unsigned NGRP  = (nseg(N) + SEGS_PER_BEAT - 1) / SEGS_PER_BEAT;
  localparam int unsigned BUF_W = DDR_W + GBITS;
  localparam int unsigned CW    = $clog2(BUF_W + 1);
  localparam int unsigned GW    = $clog2(nseg(N)/SEGS_PER_BEAT+2);

  initial begin
    assert (N % DDR_W == 0) else $error("seg_unpack: N must be a multiple of 512");
  end

  logic [BUF_W-1:0]          buf_q;
  logic [CW-1:0]             cnt_q;
  logic [$clog2(NW+1)-1:0]   words_q;
  logic [GW-1:0]             grp_q;

  assign in_ready  = (cnt_q < CW'(GBITS)) && (words_q < NW);
  assign out_valid = ((cnt_q >= CW'(GBITS)) || (words_q == NW && cnt_q != '0)) && (grp_q < NGRP);
  assign out_segs  = buf_q[GBITS-1:0];
  assign out_grp   = grp_q;
  assign out_last  = (grp_q == GW'(NGRP - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q   <= '0;
      cnt_q   <= '0;
      words_q <= '0;
      grp_q   <= '0;
    end else if (in_valid && in_ready) begin
      buf_q   <= buf_q | (BUF_W'(in_data) << cnt_q);
      cnt_q   <= cnt_q + CW'(DDR_W);
      words_q <= words_q + 1'b1;
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        buf_q   <= '0;
        cnt_q   <= '0;
        words_q <= '0;
        grp_q   <= '0;
      end else begin
        buf_q   <= buf_q >> GBITS;
        cnt_q   <= (cnt_q >= CW'(GBITS)) ? cnt_q - CW'(GBITS) : '0;
        grp_q   <= grp_q + 1'b1;
      end
    end
  end
endmodule
