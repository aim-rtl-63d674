// tb_aie_array: checks the tile array's broadcast and cascade wiring.
//
// N = 512, T = 8: 17 segments per operand, a 3 x 3 array and 5 output
// streams. Random 31-bit segments of A and B are sent on the row streams and
// on the window streams (window k = B segments 8k-7 .. 8k+7 plus a zero pad),
// built here from the segment lists. Output stream g, vector w, lane j must
// carry the full column sum sum_{i+j'=c} a_i*b_j' for column c = 8g+8w+j,
// computed here directly. Two operand pairs are run, the second with all
// segments 2^31-1; outputs are back-pressured at random.
module tb_aie_array;
  import aim_pkg::*;

  localparam int unsigned N = 512, T = 8;
  localparam int unsigned R = rows(N, T), K = cols(N, T), G = groups(N, T), NS = nseg(N);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [R-1:0] a_valid = '0, a_ready;
  logic [K-1:0] b_valid = '0, b_ready;
  plio_t a_data [R], b_data [K];
  logic [G-1:0] out_valid, out_ready = '0;
  accv_t out_data [G];
  logic [R*K-1:0] busy;

  aie_array #(.N(N), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  logic [30:0] as [NS], bs [NS];

  function automatic word_t aw(int s);
    return (s < NS) ? {1'b0, as[s]} : '0;
  endfunction
  function automatic word_t bw(int k, int l);
    int s;
    s = k*T - T + 1 + l;
    return (l < 2*T-1 && s >= 0 && s < NS) ? {1'b0, bs[s]} : '0;
  endfunction
  function automatic acc_t colsum(int c);
    acc_t v;
    v = '0;
    for (int i = 0; i < NS; i++)
      if (c - i >= 0 && c - i < NS) v = v + 80'(62'(as[i]) * 62'(bs[c-i]));
    return v;
  endfunction

  task automatic one(int kind);
    foreach (as[i]) begin
      as[i] = kind ? '1 : 31'($urandom);
      bs[i] = kind ? '1 : 31'($urandom);
    end
    fork
      for (int t = 0; t < T/4; t++) begin
        for (int r = 0; r < R; r++)
          a_data[r] = {aw(r*T+4*t+3), aw(r*T+4*t+2), aw(r*T+4*t+1), aw(r*T+4*t)};
        a_valid = '1;
        while (!(&a_ready)) @(negedge clk);
        @(negedge clk); a_valid = '0;
      end
      for (int t = 0; t < T/2; t++) begin
        for (int k = 0; k < K; k++)
          b_data[k] = {bw(k, 4*t+3), bw(k, 4*t+2), bw(k, 4*t+1), bw(k, 4*t)};
        b_valid = '1;
        while (!(&b_ready)) @(negedge clk);
        @(negedge clk); b_valid = '0;
      end
      begin
        for (int g = 0; g < G; g++) begin
          automatic int gg = g;
          fork
            for (int w = 0; w < T/8; w++) begin
              do begin @(negedge clk); out_ready[gg] = ($urandom_range(0, 1) == 1); end
              while (!(out_valid[gg] && out_ready[gg]));
              for (int j = 0; j < 8; j++) begin
                checks++;
                if (out_data[gg][j] != colsum(gg*T + 8*w + j)) begin
                  failures++;
                  $display("FAIL stream %0d vector %0d lane %0d", gg, w, j);
                end
              end
            end
          join_none
        end
        wait fork;
      end
    join
    @(negedge clk); out_ready = '0;
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
