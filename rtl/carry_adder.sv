// carry_adder: first carry step for one output stream of the AIE array.
//
// An output column group of T columns arrives as T/8 vectors of eight 80-bit
// column sums (column c has weight 2^(31c)). The unit turns them into
// normalized 31-bit digits, four columns (124 bits) per cycle:
//   s = col[4p] + col[4p+1]<<31 + col[4p+2]<<62 + col[4p+3]<<93 + carry
//   digits <= s[123:0],  carry <= s >> 124   (174-bit sum, 50-bit carry)
// The digits go into a T/4-entry buffer; once all T columns are in, `done`
// rises and the leftover carry (weight 2^(31T)) is held on carry_out for the
// second step, which reads the buffer 8 digits (248 bits) per address and
// pulses `release` when it has finished with the group. One such unit sits on
// every output stream and all of them work at the same time, so the long
// carry chain is cut into short per-group chains.
// Timing: 2 cycles per 8-column vector; a new vector is taken in the second
// of those cycles. While `done` is high the unit holds at most one vector of
// the next task and does not process it until released.
// The split of carry propagation into a per-stream step and a merge step
// follows AIM; the 4-digit step width is this design's reading of the
// 128-bit granularity, and the digit buffer is this design's own.
module carry_adder
  import aim_pkg::*;
#(
  parameter int unsigned T = 200
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  accv_t                     in_data,
  output logic                      done,
  input  logic [$clog2(T/CP2_DIGITS+1)-1:0] rd_addr,
  output logic [CP2_W-1:0]          rd_data,
  output logic [CP1_CARRY_W-1:0]    carry_out,
  input  logic                      release_grp
);
  localparam int unsigned E  = T / CP1_DIGITS;   // buffer entries
  localparam int unsigned EW = $clog2(E + 1);
  localparam int unsigned DW = CP1_DIGITS * SEG_W;

  logic [DW-1:0]          mem [E];
  accv_t                  chunk_q;
  logic                   have_q, ph_q, done_q;
  logic [EW-1:0]          wr_q;
  logic [CP1_CARRY_W-1:0] carry_q;
  logic [CP1_SUM_W-1:0]   sum;
  logic                   proc;

  assign in_ready  = !have_q || (ph_q && !done_q);
  assign proc      = have_q && !done_q;
  assign done      = done_q;
  assign carry_out = carry_q;
  assign rd_data   = {mem[2*int'(rd_addr) + 1], mem[2*int'(rd_addr)]};

  always_comb begin
    sum = CP1_SUM_W'(carry_q);
    for (int d = 0; d < CP1_DIGITS; d++)
      sum = sum + (CP1_SUM_W'(chunk_q[int'(ph_q) * CP1_DIGITS + d]) << (d * SEG_W));
  end

  always_ff @(posedge clk) begin
    if (proc) mem[wr_q] <= sum[DW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chunk_q <= '0;
      have_q  <= 1'b0;
      ph_q    <= 1'b0;
      done_q  <= 1'b0;
      wr_q    <= '0;
      carry_q <= '0;
    end else begin
      if (proc) begin
        carry_q <= sum[CP1_SUM_W-1:DW];
        ph_q    <= !ph_q;
        if (ph_q) have_q <= 1'b0;
        if (wr_q == EW'(E - 1)) begin
          done_q <= 1'b1;
          wr_q   <= '0;
        end else begin
          wr_q <= wr_q + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        chunk_q <= in_data;
        have_q  <= 1'b1;
      end
      if (release_grp && done_q) begin
        done_q  <= 1'b0;
        carry_q <= '0;
      end
    end
  end
endmodule
