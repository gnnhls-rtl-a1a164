// tb_gat_kernel2: fills the z and score memories with random values, runs
// GAT kernel 2 (sizes reduced) and checks every written vertex against
// ELU(sum_j softmax_j(LeakyReLU(el_i + er_j)) * z_j) per head, computed in
// real arithmetic. Checks the cycle count of the whole run against the
// controller's schedule: per vertex 5 cycles, plus 6 per edge (two passes
// of 3).
// The equations follow the paper; LeakyReLU slope 0.2, the two-pass schedule
// and its cycle count are this design's choices.
module tb_gat_kernel2;
  import tb_pkg::*;
  localparam int K = 2, F = 4, N = 12, DO = K * F;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start = 0, done;
  logic [31:0]       node_begin = 0, node_end = N;
  logic              ptr_rd_en, idx_rd_en, s_rd_en, z_rd_en, h_wr_en;
  logic [31:0]       ptr_rd_addr, idx_rd_addr, s_rd_addr, z_rd_addr, h_wr_addr;
  logic [31:0]       ptr_rd_data, idx_rd_data;
  logic [2*K*32-1:0] s_rd_data;
  logic [DO*32-1:0]  z_rd_data, h_wr_data;

  gat_kernel2 #(.K(K), .F(F)) dut (.*);

  logic [2*K*32-1:0] smem [N];
  logic [DO*32-1:0]  zmem [N];
  real Z [N][DO];
  real EL [N][K];
  real ER [N][K];
  int  checks = 0, failures = 0, written [N] = '{default: 0}, cyc = 0, t0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (ptr_rd_en) ptr_rd_data <= g_ptr[ptr_rd_addr];
    if (idx_rd_en) idx_rd_data <= g_col[idx_rd_addr];
    if (s_rd_en)   s_rd_data   <= smem[s_rd_addr];
    if (z_rd_en)   z_rd_data   <= zmem[z_rd_addr];
  end

  always @(posedge clk) if (rst_n) begin
    if (h_wr_en) begin
      int i;
      i = h_wr_addr;
      written[i]++;
      for (int k = 0; k < K; k++) begin
        real den, a;
        real acc [F];
        den = 0.0;
        for (int f = 0; f < F; f++) acc[f] = 0.0;
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) den += $exp(lrelu_r(EL[i][k] + ER[g_col[e]][k]));
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) begin
          a = $exp(lrelu_r(EL[i][k] + ER[g_col[e]][k])) / den;
          for (int f = 0; f < F; f++) acc[f] += a * Z[g_col[e]][k*F+f];
        end
        for (int f = 0; f < F; f++) begin
          checks++;
          if (!near(f2r(h_wr_data[(k*F+f)*32 +: 32]), elu_r(acc[f]), 1e-3, 1e-4)) begin
            failures++;
            $display("vertex %0d head %0d elem %0d: %f exp %f", i, k, f,
                     f2r(h_wr_data[(k*F+f)*32 +: 32]), elu_r(acc[f]));
          end
        end
      end
    end
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    make_graph(N, 5);
    for (int i = 0; i < N; i++) begin
      for (int r = 0; r < DO; r++) begin
        Z[i][r] = f2r(r2f(rnd(2.0)));
        zmem[i][r*32 +: 32] = r2f(Z[i][r]);
      end
      for (int k = 0; k < K; k++) begin
        EL[i][k] = f2r(r2f(rnd(3.0)));
        ER[i][k] = f2r(r2f(rnd(3.0)));
        smem[i][k*32 +: 32] = r2f(EL[i][k]);
        smem[i][(K+k)*32 +: 32] = r2f(ER[i][k]);
      end
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    checks++;
    if (cyc - t0 != 5 * N + 6 * int'(g_ptr[N])) begin
      failures++;
      $display("run took %0d cycles, expected %0d", cyc - t0, 5 * N + 6 * g_ptr[N]);
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (written[i] != 1) begin
        failures++;
        $display("vertex %0d written %0d times", i, written[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
