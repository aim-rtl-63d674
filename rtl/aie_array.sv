// aie_array: the AIE array of one AIM PE, R rows by K column groups.
//
// Tile (r,k) multiplies A group r (segments r*T .. r*T+T-1) by the B window k
// and produces the partial sums of output column group g = r+k. Three kinds
// of connection tie the tiles together, as in the AIM array:
//  * A stream r is broadcast to every tile of row r;
//  * B stream k is broadcast to every tile with the same k (tiles on one
//    hypotenuse of the product parallelogram);
//  * tiles with the same g form a reduction chain, (r-1,k+1) -> (r,k), linked
//    by the 8 x 80-bit cascade; the last tile of chain g, at row min(R-1,g),
//    drives output stream g.
// This gives R+K input streams and G = R+K-1 output streams. A broadcast beat
// fires only when every listening tile is ready. The chains start with the
// row-0 or column-group K-1 tile, which accumulates from zero.
module aie_array
  import aim_pkg::*;
#(
  parameter int unsigned N = 65536,
  parameter int unsigned T = 200
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [rows(N,T)-1:0]   a_valid,
  output logic [rows(N,T)-1:0]   a_ready,
  input  plio_t                  a_data [rows(N,T)],
  input  logic [cols(N,T)-1:0]   b_valid,
  output logic [cols(N,T)-1:0]   b_ready,
  input  plio_t                  b_data [cols(N,T)],
  output logic [groups(N,T)-1:0] out_valid,
  input  logic [groups(N,T)-1:0] out_ready,
  output accv_t                  out_data [groups(N,T)],
  output logic [rows(N,T)*cols(N,T)-1:0] busy
);
  localparam int unsigned R = rows(N, T);
  localparam int unsigned K = cols(N, T);
  localparam int unsigned G = groups(N, T);

  // per-tile signals, index r*K+k
  logic  t_a_ready [R*K];
  logic  t_b_ready [R*K];
  logic  c_valid   [R*K];
  accv_t c_data    [R*K];
  logic  i_ready   [R*K];   // cascade-in ready of each tile

  always_comb begin
    for (int r = 0; r < R; r++) begin
      a_ready[r] = 1'b1;
      for (int k = 0; k < K; k++) a_ready[r] = a_ready[r] & t_a_ready[r*K+k];
    end
    for (int k = 0; k < K; k++) begin
      b_ready[k] = 1'b1;
      for (int r = 0; r < R; r++) b_ready[k] = b_ready[k] & t_b_ready[r*K+k];
    end
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar k = 0; k < K; k++) begin : g_col
      localparam bit HAS_PRED = (r > 0) && (k + 1 < K);
      localparam bit HAS_SUCC = (r + 1 < R) && (k > 0);
      logic  cin_valid;
      accv_t cin_data;
      logic  cout_ready;

      if (HAS_PRED) begin : g_pred
        assign cin_valid = c_valid[(r-1)*K + k + 1];
        assign cin_data  = c_data [(r-1)*K + k + 1];
      end else begin : g_nopred
        assign cin_valid = 1'b0;
        assign cin_data  = '0;
      end

      if (HAS_SUCC) begin : g_succ
        assign cout_ready = i_ready[(r+1)*K + k - 1];
      end else begin : g_out
        assign cout_ready           = out_ready[r+k];
        assign out_valid[r+k]       = c_valid[r*K+k];
        assign out_data[r+k]        = c_data[r*K+k];
      end

      aie_tile #(.T(T), .HAS_CIN(HAS_PRED)) u_tile (
        .clk, .rst_n,
        .a_valid   (a_valid[r] & a_ready[r]), .a_ready(t_a_ready[r*K+k]), .a_data(a_data[r]),
        .b_valid   (b_valid[k] & b_ready[k]), .b_ready(t_b_ready[r*K+k]), .b_data(b_data[k]),
        .cin_valid (cin_valid),  .cin_ready (i_ready[r*K+k]), .cin_data(cin_data),
        .cout_valid(c_valid[r*K+k]), .cout_ready(cout_ready), .cout_data(c_data[r*K+k]),
        .busy      (busy[r*K+k])
      );
    end
  end
endmodule
