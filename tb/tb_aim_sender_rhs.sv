// tb_aim_sender_rhs: checks the right-operand sender's slicing and window streams.
//
// N = 1024, T = 16: 34 segments over K = 4 window streams of 8 beats. The test
// sends two random operands (the second one all-ones) as 512-bit words and
// compares every beat of every stream with segments cut out of the operand
// here: word l of stream k must be {0, B[31*(k*T-T+1+l) +: 31]}, zero outside segments 0..
// 33 and for the pad word l = 2T-1. The streams are read with random back-pressure per stream.
module tb_aim_sender_rhs;
  import aim_pkg::*;
  import tb_bigmul_pkg::*;

  localparam int unsigned N = 1024, T = 16;
  localparam int unsigned R = cols(N, T), NS = nseg(N);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ddr_valid = 0, ddr_ready;
  logic [DDR_W-1:0] ddr_data;
  logic [R-1:0] plio_valid, plio_ready = '0;
  plio_t plio_data [R];

  aim_sender_rhs #(.N(N), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  logic [N-1:0] opv;

  function automatic word_t exp_seg(int s);
    logic [N-1:0] sh;
    if (s < 0 || s >= NS) return '0;
    sh = opv >> (31 * s);
    return {1'b0, sh[30:0]};
  endfunction

  function automatic word_t exp_win(int k, int l);
    if (l == 2*T-1) return '0;
    return exp_seg(k*T - T + 1 + l);
  endfunction

  task automatic one(int kind);
    limbs_t op;
    op = make_operand(N, kind);
    for (int i = 0; i < N/32; i++) opv[i*32 +: 32] = op[i];
    fork
      for (int w = 0; w < N/512; w++) begin
        ddr_valid = 1; ddr_data = limbs_word(op, w);
        while (!ddr_ready) @(negedge clk);
        @(negedge clk); ddr_valid = 0;
      end
      begin
      for (int r = 0; r < R; r++) begin
        automatic int rr = r;
        fork
          for (int t = 0; t < T/2; t++) begin
            do begin @(negedge clk); plio_ready[rr] = ($urandom_range(0, 1) == 1); end
            while (!(plio_valid[rr] && plio_ready[rr]));
            for (int s = 0; s < 4; s++) begin
              checks++;
              if (plio_data[rr][32*s +: 32] != exp_win(rr, 4*t + s)) begin
                failures++;
                $display("FAIL stream %0d beat %0d word %0d", rr, t, s);
              end
            end
          end
        join_none
      end
      wait fork;
      end
    join
    @(negedge clk); plio_ready = '0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(0);
    one(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
