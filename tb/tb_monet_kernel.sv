// tb_monet_kernel: runs the two-unit MoNet kernel (sizes reduced) on a
// random graph with random pseudo-coordinates and parameters, and compares
// every written vertex with ReLU(sum_k U_k sum_j w_k(u_ij) h_j), where
// u_ij = tanh(Vp pseudo_ij + vb) and
// w_k = exp(-1/2 sum_d (u_ij[d] - mu[k][d])^2 isig[k][d]), in real arithmetic.
// The equations and the two units follow the paper; the diagonal, unsquared
// use of the inverse covariance is this design's reading of it.
module tb_monet_kernel;
  import tb_pkg::*;
  localparam int DIN = 4, K = 2, DOUT = 4, N = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               start = 0, done, w_we = 0;
  logic [3:0]         w_sel = 0;
  logic [31:0]        node_begin = 0, node_end = N;
  logic [15:0]        w_row = 0, w_col = 0;
  logic [31:0]        w_data = 0;
  logic               ptr_rd_en [2], idx_rd_en [2], ps_rd_en [2], h_rd_en [2], h_wr_en [2];
  logic [31:0]        ptr_rd_addr [2], idx_rd_addr [2], ps_rd_addr [2], h_rd_addr [2], h_wr_addr [2];
  logic [31:0]        ptr_rd_data [2], idx_rd_data [2];
  logic [63:0]        ps_rd_data [2];
  logic [DIN*32-1:0]  h_rd_data [2];
  logic [DOUT*32-1:0] h_wr_data [2];

  monet_kernel #(.DIN(DIN), .K(K), .DOUT(DOUT)) dut (.*);

  logic [DIN*32-1:0] hmem [N];
  logic [63:0]       pmem [4096];
  real U [DOUT][K*DIN];
  real VP [2][2];
  real VB [2];
  real MU [K][2];
  real IS [K][2];
  real H [N][DIN];
  real P [4096][2];
  int  checks = 0, failures = 0, written [N] = '{default: 0};

  for (genvar c = 0; c < 2; c++) begin : g_mem
    always_ff @(posedge clk) begin
      if (ptr_rd_en[c]) ptr_rd_data[c] <= g_ptr[ptr_rd_addr[c]];
      if (idx_rd_en[c]) idx_rd_data[c] <= g_col[idx_rd_addr[c]];
      if (ps_rd_en[c])  ps_rd_data[c]  <= pmem[ps_rd_addr[c]];
      if (h_rd_en[c])   h_rd_data[c]   <= hmem[h_rd_addr[c]];
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) if (h_wr_en[c]) begin
      int i;
      real g [K][DIN];
      i = h_wr_addr[c];
      written[i]++;
      for (int k = 0; k < K; k++) for (int x = 0; x < DIN; x++) g[k][x] = 0.0;
      for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) begin
        real u [2];
        for (int d = 0; d < 2; d++) u[d] = $tanh(VP[d][0] * P[e][0] + VP[d][1] * P[e][1] + VB[d]);
        for (int k = 0; k < K; k++) begin
          real q, w;
          q = 0.0;
          for (int d = 0; d < 2; d++) q += (u[d] - MU[k][d]) * (u[d] - MU[k][d]) * IS[k][d];
          w = $exp(-0.5 * q);
          for (int x = 0; x < DIN; x++) g[k][x] += w * H[g_col[e]][x];
        end
      end
      for (int r = 0; r < DOUT; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < K; k++) for (int x = 0; x < DIN; x++) s += U[r][k*DIN+x] * g[k][x];
        checks++;
        if (!near(f2r(h_wr_data[c][r*32 +: 32]), relu_r(s), 1e-3, 2e-4)) begin
          failures++;
          $display("vertex %0d elem %0d: %f exp %f", i, r, f2r(h_wr_data[c][r*32 +: 32]), relu_r(s));
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

  task automatic wr(input int sel, input int r, input int c, input real v);
    @(negedge clk);
    w_we = 1; w_sel = 4'(sel); w_row = 16'(r); w_col = 16'(c); w_data = r2f(v);
  endtask

  initial begin
    make_graph(N, 4);
    for (int i = 0; i < N; i++)
      for (int x = 0; x < DIN; x++) begin
        H[i][x] = f2r(r2f(rnd(1.0)));
        hmem[i][x*32 +: 32] = r2f(H[i][x]);
      end
    for (int e = 0; e < int'(g_ptr[N]); e++)
      for (int d = 0; d < 2; d++) begin
        P[e][d] = f2r(r2f(0.8 + rnd(0.6)));
        pmem[e][d*32 +: 32] = r2f(P[e][d]);
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < DOUT; r++)
      for (int x = 0; x < K * DIN; x++) begin
        U[r][x] = f2r(r2f(rnd(1.0)));
        wr(0, r, x, U[r][x]);
      end
    for (int d = 0; d < 2; d++) begin
      for (int x = 0; x < 2; x++) begin
        VP[d][x] = f2r(r2f(rnd(1.0)));
        wr(1, d, x, VP[d][x]);
      end
      VB[d] = f2r(r2f(rnd(0.5)));
      wr(2, 0, d, VB[d]);
    end
    for (int k = 0; k < K; k++)
      for (int d = 0; d < 2; d++) begin
        MU[k][d] = f2r(r2f(rnd(1.0)));
        wr(3, k, d, MU[k][d]);
        IS[k][d] = f2r(r2f(1.0 + rnd(0.5)));
        wr(4, k, d, IS[k][d]);
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
