// tb_gcn_kernel: runs the two-unit GCN kernel on a random graph with random
// features and weights (feature size reduced to keep the run short) and
// compares every written vertex with ReLU(U * sum h_j) computed in real
// arithmetic. Also checks that each unit wrote only its half of the range.
// The equation and the two units follow the paper; the midpoint split of the
// vertex range is this design's choice.
module tb_gcn_kernel;
  import tb_pkg::*;
  localparam int D = 8, N = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start = 0, done, w_we = 0;
  logic [31:0]     node_begin = 0, node_end = N;
  logic [15:0]     w_row = 0, w_col = 0;
  logic [31:0]     w_data = 0;
  logic            ptr_rd_en [2], idx_rd_en [2], h_rd_en [2], h_wr_en [2];
  logic [31:0]     ptr_rd_addr [2], idx_rd_addr [2], h_rd_addr [2], h_wr_addr [2];
  logic [31:0]     ptr_rd_data [2], idx_rd_data [2];
  logic [D*32-1:0] h_rd_data [2], h_wr_data [2];

  gcn_kernel #(.D(D)) dut (.*);

  logic [D*32-1:0] hmem [N];
  real U [D][D];
  real H [N][D];
  int  checks = 0, failures = 0, written [N] = '{default: 0};

  for (genvar c = 0; c < 2; c++) begin : g_mem
    always_ff @(posedge clk) begin
      if (ptr_rd_en[c]) ptr_rd_data[c] <= g_ptr[ptr_rd_addr[c]];
      if (idx_rd_en[c]) idx_rd_data[c] <= g_col[idx_rd_addr[c]];
      if (h_rd_en[c])   h_rd_data[c]   <= hmem[h_rd_addr[c]];
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) if (h_wr_en[c]) begin
      int i;
      i = h_wr_addr[c];
      written[i]++;
      checks++;
      if ((c == 0) != (i < N / 2)) begin
        failures++;
        $display("vertex %0d written by unit %0d", i, c);
      end
      for (int r = 0; r < D; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < D; k++) begin
          real a;
          a = 0.0;
          for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) a += H[g_col[e]][k];
          s += U[r][k] * a;
        end
        checks++;
        if (!near(f2r(h_wr_data[c][r*32 +: 32]), relu_r(s), 1e-3, 1e-4)) begin
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

  initial begin
    make_graph(N, 4);
    for (int i = 0; i < N; i++)
      for (int k = 0; k < D; k++) begin
        H[i][k] = f2r(r2f(rnd(1.0)));
        hmem[i][k*32 +: 32] = r2f(H[i][k]);
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < D; r++)
      for (int k = 0; k < D; k++) begin
        @(negedge clk);
        U[r][k] = f2r(r2f(rnd(1.0)));
        w_we = 1; w_row = 16'(r); w_col = 16'(k); w_data = r2f(U[r][k]);
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
