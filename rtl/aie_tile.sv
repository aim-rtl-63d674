// aie_tile: one AI Engine running the AIM multiply kernel, as RTL.
//
// The tile computes one T x T parallelogram of the schoolbook product: A
// segments a[0..T-1] (its row's A group) against a window bw[0..2T-1] of B
// segments, producing T output columns c = 0..T-1 with
//   col[c] = sum_i a[i] * bw[c - i + T - 1].
// Work is output stationary, as in the AIM kernel: for each chunk w of 8
// columns, an 8-lane 80-bit accumulator starts from the cascade input (the
// partial sums of the tile above in the same reduction chain) or from zero,
// and for each chunk h of 8 A segments performs 8 vector steps
//   acc[j] += a[8h+i] * vb[j-i+7],   i = 0..7, j = 0..7 lanes,
// where vb is the 16-segment B window of that (w,h). That is the packed
// "v8acc80 += v16b[i:i+7] * v8a[i]" step. When a chunk is complete its sums go
// to the output register (cascade out, or an output stream at the end of a
// chain) and the next chunk starts at once in the accumulator, so cascade
// transfer overlaps compute.
// Interface: A and B arrive as 128-bit valid/ready beats (T/4 and T/2 beats);
// cascade in/out are 8 x 80-bit valid/ready vectors. Timing: after both inputs
// are loaded the tile does one vector step per cycle, T*T/8 cycles per tile,
// stalling only when the cascade input is empty at a chunk start or the
// output register is still full at a chunk end.
// The kernel structure, lane count, 80-bit lanes and cascade overlap follow
// AIM. Reading operands straight from register-file buffers (instead of the
// explicit next-register loads of the software kernel), a single input buffer
// (no ping-pong) and the column/window indexing are this design's own.
module aie_tile
  import aim_pkg::*;
#(
  parameter int unsigned T       = 200,
  parameter bit          HAS_CIN = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  a_valid,
  output logic  a_ready,
  input  plio_t a_data,
  input  logic  b_valid,
  output logic  b_ready,
  input  plio_t b_data,
  input  logic  cin_valid,
  output logic  cin_ready,
  input  accv_t cin_data,
  output logic  cout_valid,
  input  logic  cout_ready,
  output accv_t cout_data,
  output logic  busy          // computing (for cycle counting)
);
  localparam int unsigned C   = T / LANES;            // chunks per edge
  localparam int unsigned AB  = T / SEGS_PER_BEAT;    // A beats
  localparam int unsigned BB  = 2 * T / SEGS_PER_BEAT;// B beats
  localparam int unsigned CWD = $clog2(C + 1);
  localparam int unsigned AW  = $clog2(AB + 1);
  localparam int unsigned BWD = $clog2(BB + 1);

  initial begin
    assert (T % LANES == 0 && T >= LANES) else $error("aie_tile: T must be a multiple of 8");
  end

  word_t a_mem [T];
  word_t b_mem [2*T];

  logic           comp_q;
  logic [AW-1:0]  a_cnt_q;
  logic [BWD-1:0] b_cnt_q;
  logic [CWD-1:0] w_q, h_q;
  logic [2:0]     i_q;
  accv_t          acc_q, sum;
  logic           first, last, step;

  assign a_ready = !comp_q && (a_cnt_q < AW'(AB));
  assign b_ready = !comp_q && (b_cnt_q < BWD'(BB));
  assign busy    = comp_q;

  always_ff @(posedge clk) begin
    if (a_valid && a_ready)
      for (int s = 0; s < SEGS_PER_BEAT; s++)
        a_mem[int'(a_cnt_q) * SEGS_PER_BEAT + s] <= a_data[s*WORD_W +: WORD_W];
    if (b_valid && b_ready)
      for (int s = 0; s < SEGS_PER_BEAT; s++)
        b_mem[int'(b_cnt_q) * SEGS_PER_BEAT + s] <= b_data[s*WORD_W +: WORD_W];
  end

  assign first = (h_q == '0) && (i_q == 3'd0);
  assign last  = (h_q == CWD'(C - 1)) && (i_q == 3'd7);
  assign step  = comp_q
               && (!first || !HAS_CIN || cin_valid)
               && (!last  || !cout_valid || cout_ready);
  assign cin_ready = comp_q && first && step;

  // one vector step: 8 lanes, each one 31x31 product added to 80 bits
  always_comb begin
    word_t a_s;
    int    base;
    a_s  = a_mem[int'(h_q) * LANES + int'(i_q)];
    base = (int'(w_q) - int'(h_q)) * LANES + int'(T) - 1 - int'(i_q);
    for (int j = 0; j < LANES; j++) begin
      acc_t             start;
      logic [2*SEG_W-1:0] prod;
      prod   = (2*SEG_W)'(a_s[SEG_W-1:0]) * (2*SEG_W)'(b_mem[base + j][SEG_W-1:0]);
      start  = first ? (HAS_CIN ? cin_data[j] : '0) : acc_q[j];
      sum[j] = start + ACC_W'(prod);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      comp_q     <= 1'b0;
      a_cnt_q    <= '0;
      b_cnt_q    <= '0;
      w_q        <= '0;
      h_q        <= '0;
      i_q        <= '0;
      acc_q      <= '0;
      cout_valid <= 1'b0;
      cout_data  <= '0;
    end else begin
      if (cout_valid && cout_ready) cout_valid <= 1'b0;
      if (!comp_q) begin
        if (a_valid && a_ready) a_cnt_q <= a_cnt_q + 1'b1;
        if (b_valid && b_ready) b_cnt_q <= b_cnt_q + 1'b1;
        if (a_cnt_q == AW'(AB) && b_cnt_q == BWD'(BB)) begin
          comp_q <= 1'b1;
          w_q <= '0; h_q <= '0; i_q <= '0;
        end
      end else if (step) begin
        if (last) begin
          cout_valid <= 1'b1;
          cout_data  <= sum;
          h_q <= '0;
          i_q <= '0;
          if (w_q == CWD'(C - 1)) begin
            comp_q  <= 1'b0;
            a_cnt_q <= '0;
            b_cnt_q <= '0;
            w_q     <= '0;
          end else begin
            w_q <= w_q + 1'b1;
          end
        end else begin
          acc_q <= sum;
          i_q   <= i_q + 1'b1;
          if (i_q == 3'd7) h_q <= h_q + 1'b1;
        end
      end
    end
  end
endmodule
