// tb_vec_agg: feeds groups of random vectors (group sizes 1..5, plus empty
// groups) with random gaps and output stalls, and checks each emitted sum
// against a real-valued sum, the count and the tag.
// Summing neighbour vectors is the paper's aggregation step; the one-vector-
// per-cycle rate and the empty-group marker are this design's.
module tb_vec_agg;
  import tb_pkg::*;
  localparam int N = 6, NG = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            in_valid = 0, in_ready, in_last = 0, in_empty = 0, out_valid, out_ready = 0;
  logic [N*32-1:0] in_vec = '0, out_sum;
  logic [7:0]      in_tag = 0, out_tag;
  logic [31:0]     out_cnt;

  vec_agg #(.N(N), .TW(8)) dut (.*);

  real exp_sum [NG][N];
  int  exp_cnt [NG];
  int  checks = 0, failures = 0, nout = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom % 3) != 0;
    if (out_valid && out_ready) begin
      checks++;
      if (out_tag != 8'(nout) || out_cnt != 32'(exp_cnt[nout])) begin
        failures++;
        $display("group %0d: tag %0d cnt %0d exp %0d", nout, out_tag, out_cnt, exp_cnt[nout]);
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (!near(f2r(out_sum[k*32 +: 32]), exp_sum[nout][k], 1e-5, 1e-5)) begin
          failures++;
          $display("group %0d elem %0d: %f exp %f", nout, k, f2r(out_sum[k*32 +: 32]), exp_sum[nout][k]);
        end
      end
      nout++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int g = 0; g < NG; g++) begin
      int n;
      n = (g % 4 == 2) ? 0 : 1 + ($urandom % 5);
      exp_cnt[g] = n;
      for (int k = 0; k < N; k++) exp_sum[g][k] = 0.0;
      for (int b = 0; b < ((n == 0) ? 1 : n); b++) begin
        @(negedge clk);
        while (($urandom % 4) == 0) @(negedge clk);
        for (int k = 0; k < N; k++) begin
          real v;
          v = f2r(r2f(rnd(4.0)));
          in_vec[k*32 +: 32] = r2f(v);
          if (n != 0) exp_sum[g][k] += v;
        end
        in_valid = 1; in_empty = (n == 0); in_last = (n == 0) || (b == n - 1); in_tag = 8'(g);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk) in_valid = 0;
      end
    end
    while (nout < NG) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
