// tb_aie_tile: checks one AIE tile kernel against a direct column-sum model.
//
// A tile with T = 16 and a cascade input is loaded with random 31-bit A
// segments and a random B window (the pad word zero), and fed random cascade
// vectors. Each output vector w must equal, lane by lane,
//   cin[w][j] + sum_i a[i] * bw[8w + j - i + T - 1]
// computed here in 80-bit arithmetic. Pass 0 runs without stalls and checks
// that the tile is busy exactly T*T/8 cycles (one 8-lane vector step per
// cycle); pass 1 repeats with random cascade gaps and output back-pressure.
module tb_aie_tile;
  import aim_pkg::*;

  localparam int unsigned T = 16;
  localparam int unsigned C = T / 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  a_valid = 0, a_ready, b_valid = 0, b_ready;
  plio_t a_data, b_data;
  logic  cin_valid = 0, cin_ready, cout_valid, cout_ready = 0, busy;
  accv_t cin_data, cout_data;

  aie_tile #(.T(T), .HAS_CIN(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  int busy_cycles = 0;
  logic [30:0] a [T];
  logic [30:0] bw [2*T];
  accv_t cin [C];

  always @(posedge clk) if (busy) busy_cycles++;

  task automatic run(int stall);
    // operands
    foreach (a[i])  a[i]  = 31'($urandom);
    foreach (bw[i]) bw[i] = (i == 2*T-1) ? '0 : 31'($urandom);
    foreach (cin[w]) for (int j = 0; j < 8; j++) cin[w][j] = {$urandom, $urandom, 16'($urandom)} >> 10;
    busy_cycles = 0;
    fork
      begin
        for (int t = 0; t < T/4; t++) begin
          a_valid = 1; a_data = {1'b0, a[4*t+3], 1'b0, a[4*t+2], 1'b0, a[4*t+1], 1'b0, a[4*t]};
          while (!a_ready) @(negedge clk);
          @(negedge clk); a_valid = 0;
        end
      end
      begin
        for (int t = 0; t < T/2; t++) begin
          b_valid = 1; b_data = {1'b0, bw[4*t+3], 1'b0, bw[4*t+2], 1'b0, bw[4*t+1], 1'b0, bw[4*t]};
          while (!b_ready) @(negedge clk);
          @(negedge clk); b_valid = 0;
        end
      end
      begin
        for (int w = 0; w < C; w++) begin
          if (stall) repeat ($urandom_range(0, 20)) @(negedge clk);
          cin_valid = 1; cin_data = cin[w];
          #1;  // cin_ready depends on cin_valid: let it settle
          while (!cin_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          cin_valid = 0;
        end
      end
      begin
        for (int w = 0; w < C; w++) begin
          accv_t exp_v;
          for (int j = 0; j < 8; j++) begin
            exp_v[j] = cin[w][j];
            for (int i = 0; i < T; i++) begin
              int idx;
              idx = 8*w + j - i + T - 1;
              exp_v[j] = exp_v[j] + 80'(62'(a[i]) * 62'(bw[idx]));
            end
          end
          do begin
            @(negedge clk);
            cout_ready = stall ? ($urandom_range(0, 2) == 0) : 1'b1;
          end while (!(cout_valid && cout_ready));
          checks++;
          if (cout_data != exp_v) begin
            failures++;
            $display("FAIL task stall=%0d vector %0d got %h exp %h", stall, w, cout_data[0], exp_v[0]);
          end
        end
        @(negedge clk); cout_ready = 0;
      end
    join
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    checks++;
    if (busy_cycles != T * T / 8) begin
      failures++;
      $display("FAIL busy %0d cycles, expected %0d", busy_cycles, T * T / 8);
    end
    run(1);
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
