// carry_merge: second carry step and result writer.
//
// The G column groups of one product are finished by G carry_adder units in
// parallel; each holds its group as normalized digits plus one leftover
// carry. This unit walks the groups in order (the `sel` of the group
// multiplexer), reading 8 digits (248 bits) of the selected group per cycle
// and adding a running carry with a single wide adder:
//   s = digits + c,  out = s[247:0],  c = s[248]
// At the end of group g the group's leftover carry is added into c, so it
// lands on the first digits of group g+1. A final piece holding c closes the
// product. The 248-bit pieces are packed into 512-bit words, and exactly
// 2N/512 words (the 2N-bit product, little-endian word order) are sent out;
// pieces past that are all zero for a valid product and are dropped.
// Interface: done/carry_in per group, shared rd_addr, release pulse per
// group; the result is a 512-bit valid/ready stream with out_last on the last
// word. Timing: one 248-bit piece per cycle while the packer has room, a word
// is sent in a cycle of its own, so about 3 cycles per 512-bit word.
// The group multiplexer and the wide carry adder follow AIM; the 248-bit
// adder width (AIM names 512 bits) and the packing are this design's own.
module carry_merge
  import aim_pkg::*;
#(
  parameter int unsigned N = 65536,
  parameter int unsigned T = 200
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [groups(N,T)-1:0]    done,
  input  logic [CP2_W-1:0]          rd_data [groups(N,T)],
  input  logic [CP1_CARRY_W-1:0]    carry_in [groups(N,T)],
  output logic [$clog2(T/CP2_DIGITS+1)-1:0] rd_addr,
  output logic [groups(N,T)-1:0]    release_grp,
  output logic [$clog2(groups(N,T)+1)-1:0] sel,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [DDR_W-1:0]          out_data,
  output logic                      out_last
);
  localparam int unsigned G     = groups(N, T);
  localparam int unsigned M     = T / CP2_DIGITS;
  localparam int unsigned OUTW  = 2 * N / DDR_W;
  localparam int unsigned PK_W  = DDR_W + CP2_W;
  localparam int unsigned CNT_W = $clog2(PK_W + 1);
  localparam int unsigned GW    = $clog2(G + 1);
  localparam int unsigned MW    = $clog2(M + 1);

  logic [GW-1:0]          g_q;
  logic [MW-1:0]          m_q;
  logic [CP2_CARRY_W-1:0] c_q;
  logic                   tail_q;      // final carry piece still to append
  logic                   flush_q;     // all pieces of this product appended
  logic [PK_W-1:0]        pk_q;
  logic [CNT_W-1:0]       cnt_q;
  logic [$clog2(OUTW+1)-1:0] words_q;

  logic [CP2_W:0]         sum;
  logic                   room, full_out, grp_step, tail_step, append;
  logic [CP2_W-1:0]       piece;

  assign rd_addr   = m_q;
  assign sel       = g_q;
  assign full_out  = (words_q == OUTW);
  assign room      = (cnt_q < CNT_W'(DDR_W)) || full_out;
  assign grp_step  = !tail_q && !flush_q && (g_q < GW'(G)) && done[g_q] && room;
  assign tail_step = tail_q && room;
  assign append    = grp_step || tail_step;
  assign sum       = {1'b0, rd_data[g_q]} + (CP2_W+1)'(c_q);
  assign piece     = tail_q ? CP2_W'(c_q) : sum[CP2_W-1:0];

  assign out_valid = !full_out && (cnt_q >= CNT_W'(DDR_W));
  assign out_data  = pk_q[DDR_W-1:0];
  assign out_last  = (words_q == $bits(words_q)'(OUTW - 1));

  always_comb begin
    release_grp = '0;
    if (grp_step && m_q == MW'(M - 1)) release_grp[g_q] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q <= '0; m_q <= '0; c_q <= '0;
      tail_q <= 1'b0; flush_q <= 1'b0;
      pk_q <= '0; cnt_q <= '0; words_q <= '0;
    end else if (flush_q && full_out) begin
      // product complete: ready for the next one
      g_q <= '0; m_q <= '0; c_q <= '0;
      tail_q <= 1'b0; flush_q <= 1'b0;
      pk_q <= '0; cnt_q <= '0; words_q <= '0;
    end else begin
      if (grp_step) begin
        if (m_q == MW'(M - 1)) begin
          c_q <= CP2_CARRY_W'(sum[CP2_W]) + CP2_CARRY_W'(carry_in[g_q]);
          m_q <= '0;
          g_q <= g_q + 1'b1;
          if (g_q == GW'(G - 1)) tail_q <= 1'b1;
        end else begin
          c_q <= CP2_CARRY_W'(sum[CP2_W]);
          m_q <= m_q + 1'b1;
        end
      end
      if (tail_step) begin
        tail_q  <= 1'b0;
        flush_q <= 1'b1;
      end
      if (append) begin
        if (!full_out) begin
          pk_q  <= pk_q | (PK_W'(piece) << cnt_q);
          cnt_q <= cnt_q + CNT_W'(CP2_W);
        end else begin
          assert (piece == '0) else $error("carry_merge: non-zero digits past 2N bits");
        end
      end else if (out_valid && out_ready) begin
        pk_q    <= pk_q >> DDR_W;
        cnt_q   <= cnt_q - CNT_W'(DDR_W);
        words_q <= words_q + 1'b1;
      end
    end
  end
endmodule
