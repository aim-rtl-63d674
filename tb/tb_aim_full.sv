// tb_aim_full: one complete operation of the accelerator at its default size.
//
// aim_top is instantiated with no parameter overrides: 3 PEs, each a
// 65,536-bit multiplier built from an 11 x 12 array of tiles (T = 200). Each PE
// multiplies one pair of operands (random, all-ones, random/sparse), the three
// PEs working at the same time, and each 131,072-bit product is checked word
// by word against a 32-bit-limb schoolbook reference. The cycle count from
// the first input word to the last product word is printed and checked
// against the tile compute time T*T/8 (lower bound) and a generous upper bound.
module tb_aim_full;
  import aim_pkg::*;
  import tb_bigmul_pkg::*;

  localparam int unsigned N  = 65536;
  localparam int unsigned T  = 200;
  localparam int unsigned P  = 3;
  localparam int unsigned NW = N / 512;
  localparam int unsigned PW = 2 * N / 512;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [P-1:0] a_valid = '0, a_ready, b_valid = '0, b_ready;
  logic [P-1:0] p_valid, p_ready = '0, p_last, busy;
  logic [DDR_W-1:0] a_data [P], b_data [P], p_data [P];

  aim_top dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0, t_start = 0, t_end = 0;
  limbs_t opa [P], opb [P];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic drive(int p, bit is_b);
    for (int w = 0; w < NW; w++) begin
      if (is_b) begin b_valid[p] = 1'b1; b_data[p] = limbs_word(opb[p], w); end
      else      begin a_valid[p] = 1'b1; a_data[p] = limbs_word(opa[p], w); end
      while (!(is_b ? b_ready[p] : a_ready[p])) @(negedge clk);
      @(negedge clk);
      if (is_b) b_valid[p] = 1'b0; else a_valid[p] = 1'b0;
    end
  endtask

  task automatic collect(int p);
    limbs_t ref_p;
    int bad;
    ref_p = ref_mul(opa[p], opb[p]);
    bad = 0;
    p_ready[p] = 1'b1;
    for (int w = 0; w < PW; w++) begin
      do @(negedge clk); while (!p_valid[p]);
      if (p_data[p] != limbs_word(ref_p, w)) bad++;
      if (p_last[p] != (w == PW - 1)) bad++;
    end
    p_ready[p] = 1'b0;
    if (cyc > t_end) t_end = cyc;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL pe %0d: %0d bad words", p, bad);
    end
  endtask

  initial begin
    opa[0] = make_operand(N, 0); opb[0] = make_operand(N, 0);
    opa[1] = make_operand(N, 1); opb[1] = make_operand(N, 1);
    opa[2] = make_operand(N, 0); opb[2] = make_operand(N, 3);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    t_start = cyc;
    fork
      drive(0, 0); drive(0, 1); collect(0);
      drive(1, 0); drive(1, 1); collect(1);
      drive(2, 0); drive(2, 1); collect(2);
    join
    $display("cycles from first input to last product word: %0d (tile compute %0d)",
             t_end - t_start, T * T / 8);
    checks++;
    if (t_end - t_start < T * T / 8 || t_end - t_start > 3 * T * T / 8) begin
      failures++;
      $display("FAIL latency out of range");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
