// tb_gatedgcn_kernel: runs the GatedGCN kernel (feature size reduced) on a
// random graph with random vertex and edge features and weights A..E, and
// checks every written edge feature e_ij' = E h_i + D h_j + C e_ij and every
// written vertex ReLU(A h_i + sum_j B h_j * s_ij / (sum_j s_ij + 1e-6)),
// s_ij = sigmoid(e_ij'), against real arithmetic.
// The equations follow the paper; eps = 1e-6 and the edge write-back format
// are this design's choices.
module tb_gatedgcn_kernel;
  import tb_pkg::*;
  localparam int D = 4, N = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start = 0, done, w_we = 0;
  logic [3:0]      w_sel = 0;
  logic [31:0]     node_begin = 0, node_end = N;
  logic [15:0]     w_row = 0, w_col = 0;
  logic [31:0]     w_data = 0;
  logic            ptr_rd_en, idx_rd_en, hi_rd_en, hj_rd_en, e_rd_en, h_wr_en, e_wr_en;
  logic [31:0]     ptr_rd_addr, idx_rd_addr, hi_rd_addr, hj_rd_addr, e_rd_addr, h_wr_addr, e_wr_addr;
  logic [31:0]     ptr_rd_data, idx_rd_data;
  logic [D*32-1:0] hi_rd_data, hj_rd_data, e_rd_data, h_wr_data, e_wr_data;

  gatedgcn_kernel #(.D(D)) dut (.*);

  logic [D*32-1:0] hmem [N];
  logic [D*32-1:0] emem [4096];
  real W [5][D][D];  // A, B, C, D, E
  real H [N][D];
  real EF [4096][D];
  int  checks = 0, failures = 0, written [N] = '{default: 0}, ewritten = 0;

  always_ff @(posedge clk) begin
    if (ptr_rd_en) ptr_rd_data <= g_ptr[ptr_rd_addr];
    if (idx_rd_en) idx_rd_data <= g_col[idx_rd_addr];
    if (hi_rd_en)  hi_rd_data  <= hmem[hi_rd_addr];
    if (hj_rd_en)  hj_rd_data  <= hmem[hj_rd_addr];
    if (e_rd_en)   e_rd_data   <= emem[e_rd_addr];
  end

  function automatic real mv(input int m, input int r, input real x [D]);
    real s;
    s = 0.0;
    for (int k = 0; k < D; k++) s += W[m][r][k] * x[k];
    return s;
  endfunction

  // reference e_ij' for edge e of target vertex i, element r
  function automatic real enew(input int i, input int e, input int r);
    return mv(4, r, H[i]) + mv(3, r, H[g_col[e]]) + mv(2, r, EF[e]);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (e_wr_en) begin
      int e, i;
      e = e_wr_addr;
      i = 0;
      while (g_ptr[i+1] <= e) i++;
      ewritten++;
      for (int r = 0; r < D; r++) begin
        checks++;
        if (!near(f2r(e_wr_data[r*32 +: 32]), enew(i, e, r), 1e-3, 1e-4)) begin
          failures++;
          $display("edge %0d elem %0d: %f exp %f", e, r, f2r(e_wr_data[r*32 +: 32]), enew(i, e, r));
        end
      end
    end
    if (h_wr_en) begin
      int i;
      i = h_wr_addr;
      written[i]++;
      for (int r = 0; r < D; r++) begin
        real num, den, s, x;
        num = 0.0; den = 0.0;
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) begin
          s = sigmoid_r(enew(i, e, r));
          num += mv(1, r, H[g_col[e]]) * s;
          den += s;
        end
        x = relu_r(mv(0, r, H[i]) + num / (den + 1e-6));
        checks++;
        if (!near(f2r(h_wr_data[r*32 +: 32]), x, 1e-3, 1e-4)) begin
          failures++;
          $display("vertex %0d elem %0d: %f exp %f", i, r, f2r(h_wr_data[r*32 +: 32]), x);
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
    make_graph(N, 4);
    for (int i = 0; i < N; i++)
      for (int k = 0; k < D; k++) begin
        H[i][k] = f2r(r2f(rnd(1.0)));
        hmem[i][k*32 +: 32] = r2f(H[i][k]);
      end
    for (int e = 0; e < int'(g_ptr[N]); e++)
      for (int k = 0; k < D; k++) begin
        EF[e][k] = f2r(r2f(rnd(1.0)));
        emem[e][k*32 +: 32] = r2f(EF[e][k]);
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int m = 0; m < 5; m++)
      for (int r = 0; r < D; r++)
        for (int k = 0; k < D; k++) begin
          @(negedge clk);
          W[m][r][k] = f2r(r2f(rnd(1.0)));
          w_we = 1; w_sel = 4'(m); w_row = 16'(r); w_col = 16'(k); w_data = r2f(W[m][r][k]);
        end
    @(negedge clk) w_we = 0;
    start = 1;
    @(negedge clk) start = 0;
    while (!done) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (written[i] != 1) begin
        failures++;
        $display("vertex %0d written %0d times", i, written[i]);
      end
    end
    checks++;
    if (ewritten != int'(g_ptr[N])) begin
      failures++;
      $display("%0d edge features written, expected %0d", ewritten, g_ptr[N]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
