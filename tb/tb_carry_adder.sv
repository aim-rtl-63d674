// tb_carry_adder: checks the first carry step of one output stream.
//
// T = 16: a group is two vectors of eight 80-bit column sums. The expected
// value V = sum_c col[c] * 2^(31c) is built here as one wide vector; the unit
// must hold V's low 31*T bits as digits (read back 248 bits per address) and
// V >> 31T as its leftover carry. Three groups are run: random, all-ones
// columns (largest carries) and random again, with the next group's first
// vector offered before the previous group is released. The time from the
// first vector to `done` is checked (1 cycle to take the first vector, then
// 2 cycles per vector).
module tb_carry_adder;
  import aim_pkg::*;

  localparam int unsigned T = 16;
  localparam int unsigned VW = 31*T + 80;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, done, release_grp = 0;
  accv_t in_data;
  logic [$clog2(T/CP2_DIGITS+1)-1:0] rd_addr = '0;
  logic [CP2_W-1:0] rd_data;
  logic [CP1_CARRY_W-1:0] carry_out;

  carry_adder #(.T(T)) dut (.*);

  int checks = 0, failures = 0;
  accv_t vec [3][T/8];
  int unsigned cyc = 0, t0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [VW-1:0] value(int g);
    logic [VW-1:0] v;
    v = '0;
    for (int w = 0; w < T/8; w++)
      for (int j = 0; j < 8; j++) v = v + (VW'(vec[g][w][j]) << (31 * (8*w + j)));
    return v;
  endfunction

  initial begin
    for (int g = 0; g < 3; g++)
      for (int w = 0; w < T/8; w++)
        for (int j = 0; j < 8; j++)
          vec[g][w][j] = (g == 1) ? '1 : {$urandom, $urandom, 16'($urandom)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 3; g++) begin
      logic [VW-1:0] v;
      v = value(g);
      for (int w = 0; w < T/8; w++) begin
        in_valid = 1; in_data = vec[g][w];
        while (!in_ready) @(negedge clk);
        if (w == 0) t0 = cyc;
        @(negedge clk); in_valid = 0;
      end
      while (!done) @(negedge clk);
      checks++;
      if (g == 0 && cyc - t0 != 2 * T / 8 + 1) begin
        failures++;
        $display("FAIL done after %0d cycles", cyc - t0);
      end
      // offer the next group's first vector while this one is held
      if (g < 2) begin in_valid = 1; in_data = vec[g+1][0]; end
      for (int m = 0; m < T/8; m++) begin
        rd_addr = m[$bits(rd_addr)-1:0];
        #1;
        checks++;
        if (rd_data != v[m*CP2_W +: CP2_W]) begin
          failures++;
          $display("FAIL group %0d digits %0d", g, m);
        end
      end
      checks++;
      if (carry_out != CP1_CARRY_W'(v >> (31*T))) begin
        failures++;
        $display("FAIL group %0d carry", g);
      end
      @(negedge clk);
      release_grp = 1;
      @(negedge clk);
      release_grp = 0;
      if (g < 2) begin
        // the offered vector has been taken by now; send the rest
        in_valid = 0;
        for (int w = 1; w < T/8; w++) begin
          in_valid = 1; in_data = vec[g+1][w];
          while (!in_ready) @(negedge clk);
          @(negedge clk); in_valid = 0;
        end
        while (!done) @(negedge clk);
        g++;
        v = value(g);
        for (int m = 0; m < T/8; m++) begin
          rd_addr = m[$bits(rd_addr)-1:0];
          #1;
          checks++;
          if (rd_data != v[m*CP2_W +: CP2_W]) begin
            failures++;
            $display("FAIL group %0d digits %0d", g, m);
          end
        end
        checks++;
        if (carry_out != CP1_CARRY_W'(v >> (31*T))) begin
          failures++;
          $display("FAIL group %0d carry", g);
        end
        @(negedge clk); release_grp = 1;
        @(negedge clk); release_grp = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
