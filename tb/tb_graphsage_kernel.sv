// tb_graphsage_kernel: runs the GraphSage kernel on a random graph (feature
// size reduced) and compares every written vertex with
// ReLU(V h_i + W mean_j h_j) in real arithmetic; vertices without neighbours
// use a zero mean. Also checks that every vertex is written exactly once.
// The equation and its parallel target/neighbour paths follow the paper; the
// zero mean of an empty neighbourhood is this design's choice.
module tb_graphsage_kernel;
  import tb_pkg::*;
  localparam int D = 8, N = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start = 0, done, w_we = 0;
  logic [3:0]      w_sel = 0;
  logic [31:0]     node_begin = 0, node_end = N;
  logic [15:0]     w_row = 0, w_col = 0;
  logic [31:0]     w_data = 0;
  logic            ptr_rd_en, idx_rd_en, hj_rd_en, hi_rd_en, h_wr_en;
  logic [31:0]     ptr_rd_addr, idx_rd_addr, hj_rd_addr, hi_rd_addr, h_wr_addr;
  logic [31:0]     ptr_rd_data, idx_rd_data;
  logic [D*32-1:0] hj_rd_data, hi_rd_data, h_wr_data;

  graphsage_kernel #(.D(D)) dut (.*);

  logic [D*32-1:0] hmem [N];
  real M [2][D][D];  // 0: V, 1: W
  real H [N][D];
  int  checks = 0, failures = 0, written [N] = '{default: 0};

  always_ff @(posedge clk) begin
    if (ptr_rd_en) ptr_rd_data <= g_ptr[ptr_rd_addr];
    if (idx_rd_en) idx_rd_data <= g_col[idx_rd_addr];
    if (hj_rd_en)  hj_rd_data  <= hmem[hj_rd_addr];
    if (hi_rd_en)  hi_rd_data  <= hmem[hi_rd_addr];
  end

  always @(posedge clk) if (rst_n) begin
    if (h_wr_en) begin
      int i, deg;
      real mean [D];
      i = h_wr_addr;
      written[i]++;
      deg = g_ptr[i+1] - g_ptr[i];
      for (int k = 0; k < D; k++) begin
        mean[k] = 0.0;
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) mean[k] += H[g_col[e]][k];
        if (deg != 0) mean[k] = mean[k] / deg;
      end
      for (int r = 0; r < D; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < D; k++) s += M[0][r][k] * H[i][k] + M[1][r][k] * mean[k];
        checks++;
        if (!near(f2r(h_wr_data[r*32 +: 32]), relu_r(s), 1e-3, 1e-4)) begin
          failures++;
          $display("vertex %0d elem %0d: %f exp %f", i, r, f2r(h_wr_data[r*32 +: 32]), relu_r(s));
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
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int m = 0; m < 2; m++)
      for (int r = 0; r < D; r++)
        for (int k = 0; k < D; k++) begin
          @(negedge clk);
          M[m][r][k] = f2r(r2f(rnd(1.0)));
          w_we = 1; w_sel = 4'(m); w_row = 16'(r); w_col = 16'(k); w_data = r2f(M[m][r][k]);
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
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
