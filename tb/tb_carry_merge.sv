// tb_carry_merge: checks the second carry step and the 512-bit result writer.
//
// N = 512, T = 8: five column groups, a 1024-bit product in two words. For
// each product the test draws 80-bit column sums (zero above column 30 so the
// total fits in 1024 bits), forms each group's digits D_g and leftover carry
// C_g the way the first step defines them, and offers them as the carry_adder
// units would, with `done` rising group by group after random delays and
// falling on `release`. The output words must equal sum_c col[c] * 2^(31c);
// out_last must mark the second word. The output is back-pressured at random.
module tb_carry_merge;
  import aim_pkg::*;

  localparam int unsigned N = 512, T = 8;
  localparam int unsigned G = groups(N, T), NC = G * T;
  localparam int unsigned XW = 31 * NC + 80;
  localparam int unsigned VW = 31 * T + 80;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [G-1:0] done = '0, release_grp;
  logic [CP2_W-1:0] rd_data [G];
  logic [CP1_CARRY_W-1:0] carry_in [G];
  logic [$clog2(T/CP2_DIGITS+1)-1:0] rd_addr;
  logic [$clog2(G+1)-1:0] sel;
  logic out_valid, out_ready = 0, out_last;
  logic [DDR_W-1:0] out_data;

  carry_merge #(.N(N), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  acc_t col [NC];
  logic [VW-1:0] vg [G];

  always_comb
    for (int g = 0; g < G; g++) begin
      rd_data[g]  = vg[g][int'(rd_addr) * CP2_W +: CP2_W];
      carry_in[g] = CP1_CARRY_W'(vg[g] >> (31 * T));
    end

  always @(posedge clk)
    for (int g = 0; g < G; g++) if (release_grp[g]) done[g] <= 1'b0;

  task automatic one(int kind);
    logic [XW-1:0] x;
    x = '0;
    for (int c = 0; c < NC; c++) begin
      col[c] = (c > 30) ? '0 : (kind == 1) ? '1 : {$urandom, $urandom, 16'($urandom)};
      x = x + (XW'(col[c]) << (31 * c));
    end
    for (int g = 0; g < G; g++) begin
      vg[g] = '0;
      for (int c = 0; c < T; c++) vg[g] = vg[g] + (VW'(col[g*T+c]) << (31 * c));
    end
    fork
      for (int g = 0; g < G; g++) begin
        repeat ($urandom_range(0, 4)) @(negedge clk);
        done[g] = 1'b1;
      end
      for (int w = 0; w < 2 * N / DDR_W; w++) begin
        do begin @(negedge clk); out_ready = ($urandom_range(0, 1) == 1); end
        while (!(out_valid && out_ready));
        checks++;
        if (out_data != x[w*DDR_W +: DDR_W] || out_last != (w == 2 * N / DDR_W - 1)) begin
          failures++;
          $display("FAIL kind %0d word %0d", kind, w);
        end
      end
    join
    @(negedge clk); out_ready = 0;
    while (done != '0) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(0);
    one(1);
    one(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
