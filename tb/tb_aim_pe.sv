// tb_aim_pe: end-to-end test of one PE at N = 1024, T = 16.
//
// Four operand pairs (random, all-ones, random by sparse, single top bits)
// are streamed in back to back, so the next pair is loaded while the array is
// still busy with the previous one. Each 2048-bit product is compared word by
// word with a 32-bit-limb schoolbook reference, under random product
// back-pressure. The array's compute time per product is checked: every tile
// must be busy at least T*T/8 cycles per product (one vector step per cycle).
module tb_aim_pe;
  import aim_pkg::*;
  import tb_bigmul_pkg::*;

  localparam int unsigned N = 1024, T = 16, NT = 4;
  localparam int unsigned NW = N / 512, PW = 2 * N / 512;
  localparam int unsigned RK = rows(N, T) * cols(N, T);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic a_valid = 0, a_ready, b_valid = 0, b_ready;
  logic [DDR_W-1:0] a_data, b_data, p_data;
  logic p_valid, p_ready = 0, p_last;
  logic [RK-1:0] tile_busy;

  aim_pe #(.N(N), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned busy0 = 0;
  limbs_t opa [NT], opb [NT];

  always @(posedge clk) if (tile_busy[0]) busy0++;

  initial begin
    for (int t = 0; t < NT; t++) begin
      opa[t] = make_operand(N, t == 1 ? 1 : t == 3 ? 4 : 0);
      opb[t] = make_operand(N, t == 1 ? 1 : t == 2 ? 3 : t == 3 ? 4 : 0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int t = 0; t < NT; t++)
        for (int w = 0; w < NW; w++) begin
          a_valid = 1; a_data = limbs_word(opa[t], w);
          while (!a_ready) @(negedge clk);
          @(negedge clk); a_valid = 0;
        end
      for (int t = 0; t < NT; t++)
        for (int w = 0; w < NW; w++) begin
          b_valid = 1; b_data = limbs_word(opb[t], w);
          while (!b_ready) @(negedge clk);
          @(negedge clk); b_valid = 0;
        end
      for (int t = 0; t < NT; t++) begin
        limbs_t ref_p;
        int bad;
        ref_p = ref_mul(opa[t], opb[t]);
        bad = 0;
        for (int w = 0; w < PW; w++) begin
          do begin @(negedge clk); p_ready = ($urandom_range(0, 2) != 0); end
          while (!(p_valid && p_ready));
          if (p_data != limbs_word(ref_p, w) || p_last != (w == PW - 1)) bad++;
        end
        checks++;
        if (bad != 0) begin
          failures++;
          $display("FAIL product %0d: %0d bad words", t, bad);
        end
      end
    join
    checks++;
    if (busy0 < NT * T * T / 8) begin
      failures++;
      $display("FAIL tile 0 busy %0d cycles, below %0d", busy0, NT * T * T / 8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
