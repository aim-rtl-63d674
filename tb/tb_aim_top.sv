// tb_aim_top: end-to-end test of the AIM accelerator at a reduced size.
//
// Two PEs (N = 512, tile edge T = 8: a 3 x 3 tile array and 5 output groups
// per PE) each multiply a stream of operand pairs: random, all-ones (longest
// carries), zero, sparse and single-top-bit values. Inputs are offered with
// random gaps and the product stream is back-pressured at random. Every
// product is compared with a 32-bit-limb schoolbook reference. The test also
// counts how often each mechanism of the design happened and fails if one
// never did: cascade transfers and cascade waits between tiles, broadcast
// stalls of the operand streams, multi-bit group carries in the second carry
// step, and product back-pressure.
module tb_aim_top;
  import aim_pkg::*;
  import tb_bigmul_pkg::*;

  localparam int unsigned N  = 512;
  localparam int unsigned T  = 8;
  localparam int unsigned P  = 2;
  localparam int unsigned NT = 6;              // products per PE
  localparam int unsigned NW = N / 512;
  localparam int unsigned PW = 2 * N / 512;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [P-1:0] a_valid = '0, a_ready, b_valid = '0, b_ready;
  logic [P-1:0] p_valid, p_ready = '0, p_last, busy;
  logic [DDR_W-1:0] a_data [P], b_data [P], p_data [P];

  aim_top #(.N(N), .T(T), .P_INTER(P)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int n_casc = 0, n_casc_wait = 0, n_bcast_stall = 0, n_big_carry = 0, n_backpr = 0;
  limbs_t opa [P][NT], opb [P][NT];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.g_pe[0].u_pe.u_array.g_row[1].g_col[0].u_tile.cin_ready &&
        dut.g_pe[0].u_pe.u_array.g_row[1].g_col[0].u_tile.cin_valid) n_casc++;
    if (dut.g_pe[0].u_pe.u_array.g_row[1].g_col[0].u_tile.comp_q &&
        dut.g_pe[0].u_pe.u_array.g_row[1].g_col[0].u_tile.first &&
        !dut.g_pe[0].u_pe.u_array.g_row[1].g_col[0].u_tile.cin_valid) n_casc_wait++;
    if (dut.g_pe[0].u_pe.pa_valid[0] && !dut.g_pe[0].u_pe.pa_ready[0]) n_bcast_stall++;
    if (dut.g_pe[0].u_pe.u_carry.u_merge.grp_step &&
        dut.g_pe[0].u_pe.u_carry.u_merge.m_q == '0 &&
        dut.g_pe[0].u_pe.u_carry.u_merge.c_q > 1) n_big_carry++;
    if (p_valid[0] && !p_ready[0]) n_backpr++;
  end

  initial begin
    for (int p = 0; p < P; p++)
      for (int t = 0; t < NT; t++) begin
        opa[p][t] = make_operand(N, (t == 1) ? 1 : (t == 2) ? 2 : (t == 3) ? 3 : (t == 4) ? 4 : 0);
        opb[p][t] = make_operand(N, (t == 1) ? 1 : (t == 3) ? 0 : (t == 4) ? 4 : 0);
      end
  end

  task automatic drive_a(int p);
    for (int t = 0; t < NT; t++)
      for (int w = 0; w < NW; w++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        a_valid[p] = 1'b1; a_data[p] = limbs_word(opa[p][t], w);
        while (!a_ready[p]) @(negedge clk);
        @(negedge clk); a_valid[p] = 1'b0;
      end
  endtask

  task automatic drive_b(int p);
    for (int t = 0; t < NT; t++)
      for (int w = 0; w < NW; w++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        b_valid[p] = 1'b1; b_data[p] = limbs_word(opb[p][t], w);
        while (!b_ready[p]) @(negedge clk);
        @(negedge clk); b_valid[p] = 1'b0;
      end
  endtask

  task automatic collect(int p);
    for (int t = 0; t < NT; t++) begin
      limbs_t ref_p;
      int bad;
      ref_p = ref_mul(opa[p][t], opb[p][t]);
      bad = 0;
      for (int w = 0; w < PW; w++) begin
        do begin
          @(negedge clk);
          p_ready[p] = ($urandom_range(0, 3) != 0);
        end while (!(p_valid[p] && p_ready[p]));
        if (p_data[p] != limbs_word(ref_p, w)) bad++;
        if (p_last[p] != (w == PW - 1)) bad++;
      end
      @(negedge clk); p_ready[p] = 1'b0;
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL pe %0d product %0d: %0d bad words", p, t, bad);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fork
      drive_a(0); drive_b(0); collect(0);
      drive_a(1); drive_b(1); collect(1);
    join
    $display("cycles=%0d cascade=%0d cascade_wait=%0d bcast_stall=%0d big_carry=%0d backpressure=%0d",
             cyc, n_casc, n_casc_wait, n_bcast_stall, n_big_carry, n_backpr);
    checks += 5;
    if (n_casc == 0)        begin failures++; $display("FAIL no cascade transfer"); end
    if (n_casc_wait == 0)   begin failures++; $display("FAIL no cascade wait"); end
    if (n_bcast_stall == 0) begin failures++; $display("FAIL no broadcast stall"); end
    if (n_big_carry == 0)   begin failures++; $display("FAIL no multi-bit group carry"); end
    if (n_backpr == 0)      begin failures++; $display("FAIL no product back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
