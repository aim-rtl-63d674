// aim_pe: one AIM processing element, an N x N -> 2N bit multiplier.
//
// Operand A and operand B enter as streams of N/512 little-endian 512-bit
// words; the 2N-bit product leaves as 2N/512 words. Inside, the left and right
// senders cut the operands into 31-bit segments and broadcast them over R A
// streams and K B streams; the R x K AIE array forms the schoolbook partial
// products, reducing them along cascade chains into G = R+K-1 streams of
// 80-bit column sums; the carry propagation turns those into the binary
// product. Each stage has a single buffer, so a PE can hold parts of two
// consecutive products in different stages. With T = 200 and N = 65536 the
// array is 11 x 12 = 132 tiles, the intra-task parallelism of the best
// 64K-bit design point of AIM.
module aim_pe
  import aim_pkg::*;
#(
  parameter int unsigned N = 65536,
  parameter int unsigned T = 200
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             a_valid,
  output logic             a_ready,
  input  logic [DDR_W-1:0] a_data,
  input  logic             b_valid,
  output logic             b_ready,
  input  logic [DDR_W-1:0] b_data,
  output logic             p_valid,
  input  logic             p_ready,
  output logic [DDR_W-1:0] p_data,
  output logic             p_last,
  output logic [rows(N,T)*cols(N,T)-1:0] tile_busy
);
  localparam int unsigned R = rows(N, T);
  localparam int unsigned K = cols(N, T);
  localparam int unsigned G = groups(N, T);

  logic [R-1:0] pa_valid, pa_ready;
  plio_t        pa_data [R];
  logic [K-1:0] pb_valid, pb_ready;
  plio_t        pb_data [K];
  logic [G-1:0] o_valid, o_ready;
  accv_t        o_data [G];

  aim_sender_lhs #(.N(N), .T(T)) u_lhs (
    .clk, .rst_n,
    .ddr_valid(a_valid), .ddr_ready(a_ready), .ddr_data(a_data),
    .plio_valid(pa_valid), .plio_ready(pa_ready), .plio_data(pa_data)
  );

  aim_sender_rhs #(.N(N), .T(T)) u_rhs (
    .clk, .rst_n,
    .ddr_valid(b_valid), .ddr_ready(b_ready), .ddr_data(b_data),
    .plio_valid(pb_valid), .plio_ready(pb_ready), .plio_data(pb_data)
  );

  aie_array #(.N(N), .T(T)) u_array (
    .clk, .rst_n,
    .a_valid(pa_valid), .a_ready(pa_ready), .a_data(pa_data),
    .b_valid(pb_valid), .b_ready(pb_ready), .b_data(pb_data),
    .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data),
    .busy(tile_busy)
  );

  carry_propagation #(.N(N), .T(T)) u_carry (
    .clk, .rst_n,
    .in_valid(o_valid), .in_ready(o_ready), .in_data(o_data),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data), .out_last(p_last)
  );
endmodule
