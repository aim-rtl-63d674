// tb_carry_propagation: checks the whole receiver, streams in, words out.
//
// N = 512, T = 8: five output streams of 80-bit column sums, as the AIE array
// would deliver them, each offered with random gaps. Column sums are random
// (all-ones in the second product) up to column 30 and zero above, so the
// value fits the 1024-bit product. The two output words must equal
// sum_c col[c] * 2^(31c), computed here as one wide vector.
module tb_carry_propagation;
  import aim_pkg::*;

  localparam int unsigned N = 512, T = 8;
  localparam int unsigned G = groups(N, T), NC = G * T;
  localparam int unsigned XW = 31 * NC + 80;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [G-1:0] in_valid = '0, in_ready;
  accv_t in_data [G];
  logic out_valid, out_ready = 0, out_last;
  logic [DDR_W-1:0] out_data;

  carry_propagation #(.N(N), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  acc_t col [NC];

  task automatic one(int kind);
    logic [XW-1:0] x;
    x = '0;
    for (int c = 0; c < NC; c++) begin
      col[c] = (c > 30) ? '0 : (kind == 1) ? '1 : {$urandom, $urandom, 16'($urandom)};
      x = x + (XW'(col[c]) << (31 * c));
    end
    fork
      begin
        for (int g = 0; g < G; g++) begin
          automatic int gg = g;
          fork
            for (int w = 0; w < T/8; w++) begin
              repeat ($urandom_range(0, 3)) @(negedge clk);
              for (int j = 0; j < 8; j++) in_data[gg][j] = col[gg*T + 8*w + j];
              in_valid[gg] = 1'b1;
              while (!in_ready[gg]) @(negedge clk);
              @(negedge clk); in_valid[gg] = 1'b0;
            end
          join_none
        end
        wait fork;
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
