// aim_top: AIM accelerator with P_INTER independent PEs.
//
// Inter-task parallelism: P_INTER copies of aim_pe each multiply their own
// pair of N-bit operands, side by side. Every PE has its own A, B and product
// streams of 512-bit words toward off-chip memory; the memory, its
// controllers and the host that issues tasks are outside this module. The
// defaults are AIM's best 65,536-bit design point: 3 PEs of 132 tiles
// (tile edge T = 200 segments = 6,200 bits), 396 tiles in all.
module aim_top
  import aim_pkg::*;
#(
  parameter int unsigned N       = 65536,
  parameter int unsigned T       = 200,
  parameter int unsigned P_INTER = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [P_INTER-1:0] a_valid,
  output logic [P_INTER-1:0] a_ready,
  input  logic [DDR_W-1:0] a_data [P_INTER],
  input  logic [P_INTER-1:0] b_valid,
  output logic [P_INTER-1:0] b_ready,
  input  logic [DDR_W-1:0] b_data [P_INTER],
  output logic [P_INTER-1:0] p_valid,
  input  logic [P_INTER-1:0] p_ready,
  output logic [DDR_W-1:0] p_data [P_INTER],
  output logic [P_INTER-1:0] p_last,
  output logic [P_INTER-1:0] busy
);
  for (genvar p = 0; p < P_INTER; p++) begin : g_pe
    logic [rows(N,T)*cols(N,T)-1:0] tb;
    aim_pe #(.N(N), .T(T)) u_pe (
      .clk, .rst_n,
      .a_valid(a_valid[p]), .a_ready(a_ready[p]), .a_data(a_data[p]),
      .b_valid(b_valid[p]), .b_ready(b_ready[p]), .b_data(b_data[p]),
      .p_valid(p_valid[p]), .p_ready(p_ready[p]), .p_data(p_data[p]), .p_last(p_last[p]),
      .tile_busy(tb)
    );
    assign busy[p] = |tb;
  end
endmodule
