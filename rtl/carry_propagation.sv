// carry_propagation: the receiver of one AIM PE.
//
// It takes the G = R+K-1 output streams of the AIE array (stream g carries the
// 80-bit column sums of output columns g*T .. g*T+T-1, eight per vector) and
// turns them into the binary product. Step one runs on every stream at once:
// a carry_adder per stream normalizes its group into 31-bit digits and one
// leftover carry. Step two, carry_merge, selects the groups in order and
// ripples the leftover carries through with a wide adder, writing the 2N-bit
// product as 512-bit words. Handshakes are valid/ready throughout.
// This two-step structure is the one AIM uses to keep a long carry chain off
// the critical path; widths of each step are described in the two units.
module carry_propagation
  import aim_pkg::*;
#(
  parameter int unsigned N = 65536,
  parameter int unsigned T = 200
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [groups(N,T)-1:0] in_valid,
  output logic [groups(N,T)-1:0] in_ready,
  input  accv_t                  in_data [groups(N,T)],
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [DDR_W-1:0]       out_data,
  output logic                   out_last
);
  localparam int unsigned G = groups(N, T);

  logic [G-1:0]           done, release_grp;
  logic [CP2_W-1:0]       rd_data  [G];
  logic [CP1_CARRY_W-1:0] carry    [G];
  logic [$clog2(T/CP2_DIGITS+1)-1:0] rd_addr;
  logic [$clog2(G+1)-1:0] sel;

  for (genvar g = 0; g < G; g++) begin : g_cp1
    carry_adder #(.T(T)) u_add (
      .clk, .rst_n,
      .in_valid (in_valid[g]), .in_ready(in_ready[g]), .in_data(in_data[g]),
      .done     (done[g]),     .rd_addr (rd_addr),     .rd_data(rd_data[g]),
      .carry_out(carry[g]),    .release_grp(release_grp[g])
    );
  end

  carry_merge #(.N(N), .T(T)) u_merge (
    .clk, .rst_n,
    .done, .rd_data, .carry_in(carry), .rd_addr, .release_grp, .sel,
    .out_valid, .out_ready, .out_data, .out_last
  );
endmodule
